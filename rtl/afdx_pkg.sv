// afdx_pkg: constants and types shared by the blocks of the AFDX-style
// network-on-chip switch.
//
// The frame on an RX/TX port is an Ethernet/AFDX frame carried one byte per
// clock over an 8-bit parallel link (byte valid + byte): seven preamble bytes
// 0x55, the start frame delimiter 0xD5, then the MAC frame (destination
// address, source address, type, payload, 4-byte FCS). The 1518-byte maximum
// frame length and the 7+1 bytes of preamble/SFD follow the paper; the
// 64-byte minimum, the byte values, and the AFDX destination address layout
// (a 32-bit constant field 0x03000000 followed by the 16-bit virtual link
// identifier) are taken from the Ethernet and ARINC 664 standards the paper
// builds on.
package afdx_pkg;

  localparam int unsigned PREAMBLE_LEN  = 7;
  localparam int unsigned HDR_LEN       = PREAMBLE_LEN + 1;  // preamble + SFD
  localparam logic [7:0]  PREAMBLE_BYTE = 8'h55;
  localparam logic [7:0]  SFD_BYTE      = 8'hD5;

  localparam int unsigned MIN_FRAME_LEN = 64;    // MAC frame incl. FCS
  localparam int unsigned MAX_FRAME_LEN = 1518;  // MAC frame incl. FCS
  localparam int unsigned FCS_LEN       = 4;
  localparam int unsigned DA_LEN        = 6;

  // AFDX destination address: constant field, then virtual link ID.
  localparam logic [31:0] DA_CONST_FIELD = 32'h0300_0000;

  // Ethernet CRC-32, reflected form.
  localparam logic [31:0] CRC_POLY_REFL = 32'hEDB8_8320;
  localparam logic [31:0] CRC_INIT      = 32'hFFFF_FFFF;

  typedef logic [15:0] vlid_t;

  // Why a frame was dropped (one count per cause in the error log).
  typedef enum logic [2:0] {
    ERR_NONE     = 3'd0,
    ERR_PREAMBLE = 3'd1,  // preamble/SFD not as expected
    ERR_OVERRUN  = 3'd2,  // frame arrived while the port buffer was occupied
    ERR_SIZE     = 3'd3,  // MAC frame shorter than 64 or longer than 1518
    ERR_FCS      = 3'd4,  // computed CRC differs from the frame's FCS
    ERR_ADDR     = 3'd5   // constant field wrong, VL unknown or not permitted
  } err_e;

  localparam int unsigned N_ERR = 6;

  // One entry of the addresses table: a virtual link, the receiving ports
  // permitted to send on it and the transmitting ports it goes to.
  typedef struct packed {
    logic        valid;
    vlid_t       vlid;
    logic [31:0] rx_permit;  // bit i: RX port i may send this VL
    logic [31:0] tx_mask;    // bit j: forward to TX port j
  } vl_entry_t;

  // Byte-wise reflected CRC-32 update, as used by the CRC module and by the
  // testbenches' bit-serial reference (which they compute independently).
  function automatic logic [31:0] crc32_byte(input logic [31:0] c, input logic [7:0] d);
    logic [31:0] r;
    r = c;
    for (int b = 0; b < 8; b++) begin
      if (r[0] ^ d[b]) r = (r >> 1) ^ CRC_POLY_REFL;
      else             r = r >> 1;
    end
    return r;
  endfunction

endpackage
