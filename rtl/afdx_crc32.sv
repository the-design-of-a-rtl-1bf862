// afdx_crc32: frame check sequence unit of the switch.
//
// Computes the Ethernet CRC-32 (reflected polynomial 0xEDB88320, register
// preset to all ones, result inverted) over the bytes of a MAC frame, one
// byte per clock, and captures the frame's own 4-byte FCS field, which
// arrives least significant byte first. fcs_ok reports whether the computed
// value equals the captured one; the switch controller reads it after the
// last FCS byte. The switch never recomputes or inserts an FCS, it only
// compares.
//
// Interface: init restarts the unit for a new frame (it may coincide with
// no byte). A byte with en=1 and is_fcs=0 updates the CRC; a byte with en=1
// and is_fcs=1 is shifted into the FCS capture register instead. crc and
// fcs_ok are valid the clock after the last byte.
//
// From the paper: calculation of the received frame CRC, comparison with the
// embedded FCS and report of the result to the controller. The byte-serial
// structure and the interface are this design's own choices.
module afdx_crc32
  import afdx_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init,
  input  logic        en,
  input  logic        is_fcs,
  input  logic [7:0]  data,
  output logic [31:0] crc,
  output logic        fcs_ok
);

  logic [31:0] crc_q;   // running CRC register (not inverted)
  logic [31:0] fcs_q;   // FCS field captured from the frame

  always_ff @(posedge clk) begin
    if (!rst_n || init) begin
      crc_q <= CRC_INIT;
      fcs_q <= '0;
    end else if (en) begin
      if (is_fcs) fcs_q <= {data, fcs_q[31:8]};
      else        crc_q <= crc32_byte(crc_q, data);
    end
  end

  assign crc    = ~crc_q;
  assign fcs_ok = (fcs_q == ~crc_q);

endmodule
