// tb_afdx_mux_matrix: self-checking testbench of the multiplexing matrix.
//
// Each cycle presents random bytes on all inputs, a random selected input,
// valid and TX mask (covering unicast, multicast and all-ports broadcast).
// One clock later every TX port in the mask must carry the selected byte
// with tx_dv high, and every other port must be idle with zero data.
module tb_afdx_mux_matrix;
  localparam int NRX = 8, NTX = 8;

  logic           clk = 1'b0, rst_n = 1'b0;
  logic [7:0]     in_data [NRX];
  logic [2:0]     sel = '0;
  logic           in_valid = 1'b0;
  logic [NTX-1:0] tx_mask = '0;
  logic [NTX-1:0] tx_dv;
  logic [7:0]     tx_data [NTX];
  int             checks = 0, failures = 0;
  int             n_uni = 0, n_multi = 0, n_bcast = 0;

  afdx_mux_matrix dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0]     eb;
    logic [NTX-1:0] em;
    for (int i = 0; i < NRX; i++) in_data[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      for (int i = 0; i < NRX; i++) in_data[i] = 8'($urandom);
      sel      = 3'($urandom);
      in_valid = ($urandom % 4) != 0;
      case ($urandom % 3)
        0: tx_mask = NTX'(1) << ($urandom % NTX);
        1: tx_mask = NTX'($urandom);
        default: tx_mask = '1;
      endcase
      eb = in_data[sel];
      em = in_valid ? tx_mask : '0;
      if (in_valid && $countones(tx_mask) == 1) n_uni++;
      if (in_valid && $countones(tx_mask) > 1 && tx_mask != '1) n_multi++;
      if (in_valid && tx_mask == '1) n_bcast++;
      @(posedge clk); #1;
      for (int j = 0; j < NTX; j++) begin
        checks++;
        if (tx_dv[j] !== em[j] || tx_data[j] !== (em[j] ? eb : 8'h00)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d port %0d", t, j);
        end
      end
    end
    checks++;
    if (n_uni == 0 || n_multi == 0 || n_bcast == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
