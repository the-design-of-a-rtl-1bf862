// tb_afdx_test_unit: self-checking testbench of the frame detector.
//
// Drives bursts onto the RX port: correct frames, a wrong byte at every
// position of the preamble/SFD, a burst cut off inside the preamble, and
// back-to-back bursts with one idle cycle between them. A monitor numbers
// the bytes leaving the unit and records where each flag appears. Expected:
// data_o repeats rx_data one clock later; start_o on byte 0; sof_o on byte 7
// (the SFD) of a correct frame; pre_err_o on the first wrong byte (or in the
// first idle cycle of a cut-off burst); eof_o once, in the first idle cycle
// after a detected frame, and never otherwise.
module tb_afdx_test_unit;
  import afdx_tb_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0;
  logic       rx_dv = 1'b0;
  logic [7:0] rx_data = '0;
  logic       dv_o, start_o, sof_o, eof_o, pre_err_o;
  logic [7:0] data_o;
  int         checks = 0, failures = 0;

  afdx_test_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Monitor state, sampled at negedge (outputs of the previous posedge).
  int     idx;           // index of the byte on data_o in the burst
  int     sof_at, perr_at, eof_n, start_n, perr_n, sof_n;
  bytes_t seen;
  logic   prev_dv;

  task automatic clear_mon();
    sof_at = -1; perr_at = -1; eof_n = 0; start_n = 0; perr_n = 0; sof_n = 0;
    seen = {}; idx = 0;
  endtask

  always @(negedge clk) if (rst_n) begin
    if (dv_o) begin
      seen.push_back(data_o);
      if (start_o) begin start_n++; check(idx == 0, "start_o on first byte"); end
      if (sof_o)   begin sof_n++;  sof_at = idx; end
      if (pre_err_o) begin perr_n++; perr_at = idx; end
      idx++;
    end else begin
      if (pre_err_o) begin perr_n++; perr_at = idx; end
      if (eof_o) eof_n++;
      idx = 0;
      check(!sof_o && !start_o, "no sof/start while idle");
    end
  end

  task automatic drive(input bytes_t b, input int gap);
    foreach (b[k]) begin
      @(negedge clk); rx_dv = 1'b1; rx_data = b[k];
    end
    @(negedge clk); rx_dv = 1'b0; rx_data = 8'h00;
    repeat (gap) @(negedge clk);
  endtask

  initial begin
    bytes_t w, m;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // correct frames of several lengths
    for (int t = 0; t < 5; t++) begin
      m = mac_frame(16'(t + 1), 46 + t * 17, 8'(t), t);
      w = wire_frame(m);
      clear_mon();
      drive(w, 3);
      check(seen == w, "bytes pass through in order");
      check(start_n == 1, "one start");
      check(sof_n == 1 && sof_at == 7, $sformatf("sof on SFD (at %0d)", sof_at));
      check(perr_n == 0, "no preamble error");
      check(eof_n == 1, "one eof");
    end

    // a wrong byte at each preamble/SFD position
    for (int pos = 0; pos < 8; pos++) begin
      w = wire_frame(mac_frame(16'h10, 46, 8'h1, pos));
      w[pos] = (pos == 7) ? 8'h55 : 8'hD5;
      clear_mon();
      drive(w, 2);
      check(perr_n == 1 && perr_at == pos, $sformatf("pre_err at %0d (got %0d x%0d)", pos, perr_at, perr_n));
      check(sof_n == 0, "no sof on broken preamble");
      check(eof_n == 0, "no eof on broken preamble");
    end

    // cut off inside the preamble
    w = {8'h55, 8'h55, 8'h55};
    clear_mon();
    drive(w, 2);
    check(perr_n == 1 && perr_at == 3, "pre_err when burst ends in preamble");
    check(eof_n == 0 && sof_n == 0, "no sof/eof for cut-off burst");

    // two frames with a single idle cycle between them
    clear_mon();
    w = wire_frame(mac_frame(16'h22, 50, 8'h2, 9));
    drive(w, 0);
    drive(w, 2);
    check(start_n == 2 && sof_n == 2 && eof_n == 2 && perr_n == 0, "back-to-back frames");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
