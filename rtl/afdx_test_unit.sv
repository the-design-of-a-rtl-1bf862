// afdx_test_unit: frame detector placed on every receiving port.
//
// The unit watches the 8-bit RX port continuously. A burst begins when
// rx_dv rises; the unit then expects seven preamble bytes (0x55) followed by
// the start frame delimiter (0xD5). When the SFD arrives in the right place a
// new frame has been detected and sof_o is raised for the switch controller;
// a wrong byte, or a burst that ends inside the preamble, raises pre_err_o
// and the rest of the burst is ignored. When rx_dv falls after a detected
// frame, eof_o is raised.
//
// Timing: the byte stream is registered once (dv_o/data_o lag rx_dv/rx_data
// by one clock) and every flag is aligned with the byte on data_o that caused
// it: start_o with the first byte of a burst, sof_o with the SFD, pre_err_o
// with the offending byte, eof_o with the first cycle in which dv_o is low
// again.
//
// From the paper: one test unit per RX port, comparison against the seven
// preamble bytes, signal to the controller on detection. The flag set, the
// one-cycle register stage and the handling of a broken preamble are this
// design's own choices.
module afdx_test_unit
  import afdx_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx_dv,
  input  logic [7:0] rx_data,
  output logic       dv_o,
  output logic [7:0] data_o,
  output logic       start_o,
  output logic       sof_o,
  output logic       eof_o,
  output logic       pre_err_o
);

  typedef enum logic [1:0] {S_IDLE, S_PRE, S_DATA, S_BAD} state_e;

  state_e     state;
  logic [2:0] cnt;    // preamble bytes seen so far in this burst
  logic       first;  // this cycle's byte is the first of a burst

  assign first = rx_dv && !dv_o;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt       <= '0;
      dv_o      <= 1'b0;
      data_o    <= '0;
      start_o   <= 1'b0;
      sof_o     <= 1'b0;
      eof_o     <= 1'b0;
      pre_err_o <= 1'b0;
    end else begin
      dv_o      <= rx_dv;
      data_o    <= rx_data;
      start_o   <= first;
      sof_o     <= 1'b0;
      eof_o     <= 1'b0;
      pre_err_o <= 1'b0;
      if (!rx_dv) begin
        // Burst over (or line idle).
        if (state == S_DATA) eof_o <= 1'b1;
        if (state == S_PRE)  pre_err_o <= 1'b1;
        state <= S_IDLE;
        cnt   <= '0;
      end else begin
        // A burst always starts in S_IDLE with cnt = 0: both are cleared
        // whenever rx_dv is low.
        unique case (state)
          S_IDLE, S_PRE: begin
            if (cnt == 3'(PREAMBLE_LEN)) begin
              if (rx_data == SFD_BYTE) begin
                sof_o <= 1'b1;
                state <= S_DATA;
              end else begin
                pre_err_o <= 1'b1;
                state     <= S_BAD;
              end
            end else if (rx_data == PREAMBLE_BYTE) begin
              cnt   <= cnt + 3'd1;
              state <= S_PRE;
            end else begin
              pre_err_o <= 1'b1;
              state     <= S_BAD;
            end
          end
          S_DATA: ;
          S_BAD:  ;
        endcase
      end
    end
  end

endmodule
