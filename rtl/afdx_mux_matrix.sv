// afdx_mux_matrix: the multiplexing matrix between the port memories and the
// transmitting ports.
//
// Works like a multiplexer that selects the byte stream of one receiving
// port's memory (sel), followed by a fan-out stage that drives that stream
// onto every transmitting port whose bit is set in tx_mask: one bit for a
// unicast frame, several for a multicast frame and all bits for broadcast.
// Transmitting ports outside the mask stay idle (tx_dv low, tx_data zero).
//
// Timing: one register stage; a byte presented with in_valid in cycle t
// appears on the chosen TX ports in cycle t+1. sel and tx_mask must stay
// stable for a whole frame (the switch controller holds them).
//
// From the paper: a multiplexer with multicasting and broadcasting, the port
// set coming from the addresses table. The register stage and the idle
// value are this design's own choices.
module afdx_mux_matrix #(
  parameter int unsigned N_RX = 8,
  parameter int unsigned N_TX = 8,
  localparam int unsigned PW  = (N_RX > 1) ? $clog2(N_RX) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [7:0]      in_data [N_RX],
  input  logic [PW-1:0]   sel,
  input  logic            in_valid,
  input  logic [N_TX-1:0] tx_mask,
  output logic [N_TX-1:0] tx_dv,
  output logic [7:0]      tx_data [N_TX]
);

  logic [7:0] byte_sel;
  assign byte_sel = in_data[sel];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tx_dv <= '0;
      for (int j = 0; j < N_TX; j++) tx_data[j] <= '0;
    end else begin
      for (int j = 0; j < N_TX; j++) begin
        tx_dv[j]   <= in_valid && tx_mask[j];
        tx_data[j] <= (in_valid && tx_mask[j]) ? byte_sel : 8'h00;
      end
    end
  end

  a_sel_range: assert property (@(posedge clk) disable iff (!rst_n)
                                in_valid |-> (32'(sel) < N_RX));

endmodule
