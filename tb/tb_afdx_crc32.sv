// tb_afdx_crc32: self-checking testbench of the CRC module.
//
// Checks the standard CRC-32 check value ("123456789" -> 0xCBF43926), then
// random frames of random length: with their correct FCS fcs_ok must be 1
// and crc must equal the bit-serial reference; with one corrupted byte or a
// corrupted FCS fcs_ok must be 0. Also checks that the result is ready one
// clock after the last byte.
module tb_afdx_crc32;
  import afdx_tb_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        init = 1'b0, en = 1'b0, is_fcs = 1'b0;
  logic [7:0]  data = '0;
  logic [31:0] crc;
  logic        fcs_ok;
  int          checks = 0, failures = 0;

  afdx_crc32 dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Feed a sequence: the last nfcs bytes are marked as FCS.
  task automatic feed(input bytes_t d, input int nfcs);
    @(negedge clk); init = 1'b1; en = 1'b0;
    @(negedge clk); init = 1'b0;
    foreach (d[k]) begin
      en = 1'b1; is_fcs = (k >= d.size() - nfcs); data = d[k];
      @(negedge clk);
    end
    en = 1'b0; is_fcs = 1'b0;
  endtask

  initial begin
    bytes_t s, f;
    int     len, pos;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    s = {8'h31, 8'h32, 8'h33, 8'h34, 8'h35, 8'h36, 8'h37, 8'h38, 8'h39};
    check(ref_fcs(s) == 32'hCBF4_3926, "reference check value");
    feed(s, 0);
    check(crc == 32'hCBF4_3926, $sformatf("check value, got %08h", crc));

    for (int t = 0; t < 60; t++) begin
      len = 1 + ($urandom % 200);
      s = {};
      for (int i = 0; i < len; i++) s.push_back(8'($urandom));
      f = s;
      for (int i = 0; i < 4; i++) f.push_back(8'(ref_fcs(s) >> (8 * i)));
      feed(f, 4);
      // Result is read one clock after the last byte (the feed task returns
      // at the negedge following the last byte's posedge).
      check(crc == ref_fcs(s), $sformatf("crc len %0d: %08h vs %08h", len, crc, ref_fcs(s)));
      check(fcs_ok, $sformatf("fcs_ok for good frame len %0d", len));
      // corrupt one data byte
      pos = $urandom % len;
      f[pos] = f[pos] ^ 8'(1 << ($urandom % 8));
      feed(f, 4);
      check(!fcs_ok, "fcs_ok low for corrupted data");
      // corrupt FCS only
      f[pos] = s[pos];
      pos = len + ($urandom % 4);
      f[pos] = f[pos] ^ 8'h80;
      feed(f, 4);
      check(!fcs_ok, "fcs_ok low for corrupted FCS");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
