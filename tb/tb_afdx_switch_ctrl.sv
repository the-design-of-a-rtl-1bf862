// tb_afdx_switch_ctrl: self-checking testbench of the switch controller.
//
// The controller is run with 2 RX ports, 3 TX ports and 256-byte memories,
// surrounded by the real port memories, CRC module and addresses table; the
// test-unit stream and flags are generated by the testbench itself (start on byte 0,
// sof on the SFD, eof in the first idle cycle, pre_err where asked). The
// testbench watches the controller's matrix outputs (mx_valid, mx_sel,
// mx_mask and the selected memory byte) and checks:
//   - a good frame is streamed once, whole and in order, with the table's
//     TX mask (or all ports in broadcast mode);
//   - the stream starts L-3 clocks after the buffer becomes full (L-8 CRC
//     reads, lookup, decision, memory latency) and runs without gaps;
//   - bad frames are not streamed and are counted by cause (size, FCS,
//     address, preamble, overrun, burst longer than the memory);
//   - two full buffers are served in round-robin order.
module tb_afdx_switch_ctrl;
  import afdx_pkg::*;
  import afdx_tb_pkg::*;

  localparam int NRX = 2, NTX = 3, DEPTH = 256, AW = 8;

  logic           clk = 1'b0, rst_n = 1'b0, broadcast_en = 1'b0;
  logic [NRX-1:0] tu_dv = '0, tu_start = '0, tu_sof = '0, tu_eof = '0, tu_pre_err = '0;
  logic [7:0]     tu_data [NRX];
  logic [NRX-1:0] mem_we;
  logic [AW-1:0]  mem_addr [NRX];
  logic [7:0]     mem_rdata [NRX];
  logic           crc_init, crc_en, crc_is_fcs, crc_fcs_ok;
  logic [7:0]     crc_data;
  logic [31:0]    crc_value;
  logic           lk_en, lk_valid, lk_ok;
  logic [47:0]    lk_da;
  logic [0:0]     lk_port;
  logic [NTX-1:0] lk_tx_mask;
  logic           lk_const_ok, lk_hit, lk_permit;
  logic [0:0]     mx_sel;
  logic           mx_valid;
  logic [NTX-1:0] mx_mask;
  logic [NRX-1:0] buf_full;
  logic [15:0]    err_cnt [N_ERR];
  err_e           last_err;
  logic [0:0]     last_err_port;
  logic [15:0]    fwd_cnt;
  logic           cfg_we = 1'b0;
  logic [3:0]     cfg_idx = '0;
  vl_entry_t      cfg_entry = '0;

  afdx_switch_ctrl #(.N_RX(NRX), .N_TX(NTX), .DEPTH(DEPTH)) dut (.*);

  for (genvar i = 0; i < NRX; i++) begin : g_ram
    afdx_port_ram #(.DEPTH(DEPTH)) u_ram (.clk, .we(mem_we[i]), .addr(mem_addr[i]),
                                          .wdata(tu_data[i]), .rdata(mem_rdata[i]));
  end
  afdx_crc32 u_crc (.clk, .rst_n, .init(crc_init), .en(crc_en), .is_fcs(crc_is_fcs),
                    .data(crc_data), .crc(crc_value), .fcs_ok(crc_fcs_ok));
  afdx_addr_table #(.N_ENTRIES(16), .N_RX(NRX), .N_TX(NTX)) u_tbl (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_entry,
    .lookup_en(lk_en), .lookup_da(lk_da), .lookup_port(lk_port),
    .res_valid(lk_valid), .res_const_ok(lk_const_ok), .res_hit(lk_hit),
    .res_permit(lk_permit), .res_ok(lk_ok), .res_tx_mask(lk_tx_mask));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // ---------------------------------------------------- output monitoring
  typedef struct { int port; logic [NTX-1:0] mask; bytes_t data; int start_cyc; } fwd_t;
  fwd_t   got [$];
  fwd_t   cur;
  logic   in_frame = 1'b0;
  int     full_rise [NRX];
  logic [NRX-1:0] full_q = '0;

  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < NRX; i++) if (buf_full[i] && !full_q[i]) full_rise[i] = cyc;
    full_q = buf_full;
    if (mx_valid) begin
      if (!in_frame) begin
        cur.port = int'(mx_sel); cur.mask = mx_mask; cur.data = {}; cur.start_cyc = cyc;
        in_frame = 1'b1;
      end
      cur.data.push_back(mem_rdata[mx_sel]);
    end else if (in_frame) begin
      got.push_back(cur);
      in_frame = 1'b0;
    end
  end

  // ----------------------------------------------------------- stimulus
  // Test-unit flags as the real test unit produces them.
  task automatic send(input int p, input bytes_t w, input int bad_at = -1);
    foreach (w[k]) begin
      @(negedge clk);
      tu_dv[p] = 1'b1; tu_data[p] = w[k];
      tu_start[p]   = (k == 0);
      tu_sof[p]     = (k == 7) && (bad_at < 0);
      tu_pre_err[p] = (k == bad_at);
      tu_eof[p]     = 1'b0;
    end
    @(negedge clk);
    tu_dv[p] = 1'b0; tu_start[p] = 1'b0; tu_sof[p] = 1'b0; tu_pre_err[p] = 1'b0;
    tu_eof[p] = (bad_at < 0);
    @(negedge clk);
    tu_eof[p] = 1'b0;
  endtask

  task automatic wait_idle();
    int q;
    q = 0;
    while (q < 10) begin
      @(negedge clk);
      if (buf_full == '0 && !mx_valid) q++; else q = 0;
    end
  endtask

  logic [15:0] eref [N_ERR];
  task automatic check_errs(input string what);
    for (int c = 1; c < N_ERR; c++)
      check(err_cnt[c] == eref[c], $sformatf("%s: count[%0d]=%0d exp %0d", what, c, err_cnt[c], eref[c]));
  endtask

  task automatic expect_fwd(input int p, input logic [NTX-1:0] m, input bytes_t w, input bit timing);
    fwd_t f;
    check(got.size() == 1, $sformatf("one frame streamed (got %0d)", got.size()));
    if (got.size() == 0) return;
    f = got.pop_front();
    check(f.port == p, "streamed from the right port");
    check(f.mask == m, $sformatf("mask %b exp %b", f.mask, m));
    check(f.data == w, $sformatf("frame content (%0d vs %0d bytes)", f.data.size(), w.size()));
    if (timing)
      check(f.start_cyc - full_rise[p] == w.size() - 3,
            $sformatf("start %0d clocks after full, expected %0d", f.start_cyc - full_rise[p], w.size() - 3));
  endtask

  initial begin
    bytes_t w, w1;
    for (int i = 0; i < NRX; i++) tu_data[i] = '0;
    for (int c = 0; c < N_ERR; c++) eref[c] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    cfg_we = 1'b1; cfg_idx = 0;
    cfg_entry = '{valid: 1'b1, vlid: 16'h0042, rx_permit: 32'h1, tx_mask: 32'h6};
    @(negedge clk);
    cfg_idx = 1;
    cfg_entry = '{valid: 1'b1, vlid: 16'h0043, rx_permit: 32'h3, tx_mask: 32'h1};
    @(negedge clk); cfg_we = 1'b0;

    // good frame, multicast to TX1, TX2
    w = wire_frame(mac_frame(16'h0042, 46, 8'h0, 1));
    send(0, w);
    wait_idle();
    expect_fwd(0, 3'b110, w, 1);
    check(fwd_cnt == 1, "forward count");

    // good frame on port 1, unicast, longer
    w = wire_frame(mac_frame(16'h0043, 150, 8'h1, 2));
    send(1, w);
    wait_idle();
    expect_fwd(1, 3'b001, w, 1);

    // FCS error, size error (short), address error (not permitted)
    send(0, wire_frame(mac_frame(16'h0043, 46, 8'h0, 3, 32'h0300_0000, 1)));
    wait_idle(); eref[ERR_FCS]++;
    send(0, wire_frame(mac_frame(16'h0043, 45, 8'h0, 4)));
    wait_idle(); eref[ERR_SIZE]++;
    send(1, wire_frame(mac_frame(16'h0042, 46, 8'h1, 5)));
    wait_idle(); eref[ERR_ADDR]++;
    check(got.size() == 0, "no bad frame streamed");
    check_errs("drops");
    check(last_err == ERR_ADDR && last_err_port == 1'b1, "last error record");

    // preamble error reported by the test unit
    send(0, wire_frame(mac_frame(16'h0042, 46, 8'h0, 6)), 3);
    wait_idle(); eref[ERR_PREAMBLE]++;
    // burst longer than the 256-byte memory
    send(0, wire_frame(mac_frame(16'h0042, 300, 8'h0, 7)));
    wait_idle(); eref[ERR_SIZE]++;
    check(got.size() == 0, "no truncated frame streamed");
    check_errs("preamble/long");

    // overrun, then round robin: both ports full at once
    w  = wire_frame(mac_frame(16'h0042, 100, 8'h0, 8));
    w1 = wire_frame(mac_frame(16'h0043, 100, 8'h1, 9));
    fork
      send(0, w);
      send(1, w1);
    join
    send(1, wire_frame(mac_frame(16'h0043, 60, 8'h1, 10)));   // port 1 still full
    wait_idle(); eref[ERR_OVERRUN]++;
    check(got.size() == 2, "two frames streamed");
    if (got.size() == 2) begin
      // rr pointer was left at port 1 by the last served frame, so port 0 first
      check(got[0].port == 0 && got[1].port == 1, "round-robin order 0,1");
      check(got[0].data == w && got[1].data == w1, "round-robin frame contents");
    end
    got = {};
    // serve port 0 alone, so that the pointer now favours port 1
    send(0, w);
    wait_idle();
    got = {};
    fork
      send(0, w);
      send(1, w1);
    join
    wait_idle();
    check(got.size() == 2 && got[0].port == 1 && got[1].port == 0, "round-robin order 1,0");
    got = {};
    check_errs("overrun");

    // broadcast mode: unknown VL goes to all ports
    broadcast_en = 1'b1;
    w = wire_frame(mac_frame(16'h0999, 46, 8'h0, 11));
    send(0, w);
    wait_idle();
    expect_fwd(0, 3'b111, w, 1);
    broadcast_en = 1'b0;
    check(fwd_cnt == 8, $sformatf("forward count %0d", fwd_cnt));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
