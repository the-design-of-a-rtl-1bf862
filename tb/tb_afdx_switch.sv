// tb_afdx_switch: end-to-end testbench of the switch at its default size
// (8 RX ports, 8 TX ports, 2K-byte port memories, 16 table entries).
//
// Loads a forwarding table, then drives complete frames on the RX ports and
// checks every TX port against a scoreboard: each forwarded frame must come
// out byte-for-byte identical (preamble to FCS), contiguous, on exactly the
// TX ports its virtual link maps to, and each dropped frame must be counted
// under the right cause in the error log. Mechanisms exercised and counted
// (a mechanism that never happens is a failure):
//   unicast, multicast, broadcast mode, maximum-size frame,
//   drop on FCS, on size (short, long, longer than the memory),
//   on address (constant field, unknown VL, port not permitted),
//   preamble error, overrun of a full port buffer,
//   round-robin service of several full buffers,
// followed by random mixed traffic on all eight ports at once.
// Timing check: on an idle switch the first byte of a frame of L stored
// bytes (preamble included) leaves L clocks after its last byte entered:
// L-8 clocks of CRC pass, 4 of lookup/decision, 2 of memory and matrix
// registers, and 2 of reception bookkeeping.
module tb_afdx_switch;
  import afdx_pkg::*;
  import afdx_tb_pkg::*;

  localparam int NRX = 8, NTX = 8;

  logic            clk = 1'b0, rst_n = 1'b0;
  logic            broadcast_en = 1'b0;
  logic [NRX-1:0]  rx_dv = '0;
  logic [7:0]      rx_data [NRX];
  logic [NTX-1:0]  tx_dv;
  logic [7:0]      tx_data [NTX];
  logic            cfg_we = 1'b0;
  logic [3:0]      cfg_idx = '0;
  vl_entry_t       cfg_entry = '0;
  logic [NRX-1:0]  buf_full;
  logic [15:0]     err_cnt [N_ERR];
  err_e            last_err;
  logic [2:0]      last_err_port;
  logic [15:0]     fwd_cnt;

  afdx_switch dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // ------------------------------------------------------------ scoreboard
  bytes_t expq [NTX][$];        // frames expected per TX port
  bytes_t cur  [NTX];
  int     first_tx_cyc [NTX];
  int     n_rx_frames [NTX];

  always @(negedge clk) if (rst_n) begin
    for (int j = 0; j < NTX; j++) begin
      if (tx_dv[j]) begin
        if (cur[j].size() == 0) first_tx_cyc[j] = cyc;
        cur[j].push_back(tx_data[j]);
      end else if (cur[j].size() != 0) begin
        int hit;
        hit = -1;
        foreach (expq[j][k]) if (hit < 0 && expq[j][k] == cur[j]) hit = k;
        check(hit >= 0, $sformatf("TX%0d frame of %0d bytes was expected", j, cur[j].size()));
        if (hit >= 0) expq[j].delete(hit);
        n_rx_frames[j]++;
        cur[j] = {};
      end
    end
  end

  // --------------------------------------------------------------- stimulus
  int last_rx_cyc [NRX];

  task automatic send(input int p, input bytes_t w);
    foreach (w[k]) begin
      @(negedge clk); rx_dv[p] = 1'b1; rx_data[p] = w[k];
    end
    last_rx_cyc[p] = cyc + 1;   // the clock edge that samples the last byte
    @(negedge clk); rx_dv[p] = 1'b0; rx_data[p] = 8'h00;
  endtask

  // Drive one frame on every RX port at once, all starting in the same cycle.
  task automatic send_all(input bytes_t wf [NRX]);
    int n;
    n = 0;
    for (int p = 0; p < NRX; p++) if (wf[p].size() > n) n = wf[p].size();
    for (int k = 0; k <= n; k++) begin
      @(negedge clk);
      for (int p = 0; p < NRX; p++) begin
        rx_dv[p]   = (k < wf[p].size());
        rx_data[p] = (k < wf[p].size()) ? wf[p][k] : 8'h00;
      end
    end
  endtask

  task automatic expect_on(input logic [NTX-1:0] m, input bytes_t w);
    for (int j = 0; j < NTX; j++) if (m[j]) expq[j].push_back(w);
  endtask

  task automatic wait_idle();
    int quiet;
    quiet = 0;
    while (quiet < 20) begin
      @(negedge clk);
      if (buf_full == '0 && tx_dv == '0 && rx_dv == '0) quiet++;
      else quiet = 0;
    end
  endtask

  vl_entry_t tbl_model [16];

  task automatic cfg(input int idx, input logic [15:0] vl, input logic [31:0] rxp,
                     input logic [31:0] txm);
    tbl_model[idx] = '{valid: 1'b1, vlid: vl, rx_permit: rxp, tx_mask: txm};
    @(negedge clk);
    cfg_we = 1'b1; cfg_idx = 4'(idx);
    cfg_entry = '{valid: 1'b1, vlid: vl, rx_permit: rxp, tx_mask: txm};
    @(negedge clk); cfg_we = 1'b0;
  endtask

  // Random traffic: each RX port sends n frames, waiting for its own buffer
  // to be free so that no overrun occurs. The fate of each frame is worked
  // out from the table model and added to the scoreboard / expected counts.
  int rnd_fwd = 0, rnd_drop = 0;
  logic [15:0] rnd_err [N_ERR];

  task automatic random_port(input int p, input int n);
    bytes_t w;
    int kind, plen, hit;
    logic [15:0] vl;
    logic [31:0] cf;
    bit bad;
    for (int f = 0; f < n; f++) begin
      // the buffer is marked full 2 clocks after the last byte: wait for it
      repeat (3 + $urandom % 40) @(negedge clk);
      while (buf_full[p]) @(negedge clk);
      kind = $urandom % 10;
      plen = 46 + ($urandom % 250);
      cf   = 32'h0300_0000;
      bad  = 0;
      vl   = (kind < 5) ? 16'h1000 + 16'(p) : 16'h0400 + 16'($urandom % 8) * 16'h101;
      if (kind == 6) plen = 10 + ($urandom % 30);          // too short
      if (kind == 7) bad = 1;                              // FCS error
      if (kind == 8) cf = 32'h0300_0000 ^ (32'(1) << ($urandom % 32));
      if (kind == 9) vl = 16'hE000 + 16'($urandom % 256);  // unknown VL
      w = wire_frame(mac_frame(vl, plen, 8'(p), 1000 + p * 100 + f, cf, bad));
      if (plen + 18 < 64) rnd_err[ERR_SIZE]++;
      else if (bad) rnd_err[ERR_FCS]++;
      else begin
        hit = -1;
        for (int e = 0; e < 16; e++)
          if (hit < 0 && tbl_model[e].valid && tbl_model[e].vlid == vl) hit = e;
        if (cf != 32'h0300_0000 || hit < 0 || !tbl_model[hit].rx_permit[p] ||
            tbl_model[hit].tx_mask[NTX-1:0] == '0)
          rnd_err[ERR_ADDR]++;
        else begin
          expect_on(tbl_model[hit].tx_mask[NTX-1:0], w);
          rnd_fwd++;
        end
      end
      send(p, w);
    end
  endtask

  logic [15:0] err_ref [N_ERR];
  int          fwd_ref;

  task automatic check_log(input string what);
    for (int c = 1; c < N_ERR; c++)
      check(err_cnt[c] == err_ref[c], $sformatf("%s: error count %0d is %0d, expected %0d",
                                                what, c, err_cnt[c], err_ref[c]));
    check(fwd_cnt == 16'(fwd_ref), $sformatf("%s: forwarded %0d expected %0d", what, fwd_cnt, fwd_ref));
    for (int j = 0; j < NTX; j++)
      check(expq[j].size() == 0, $sformatf("%s: TX%0d still expects %0d frames", what, j, expq[j].size()));
  endtask

  // mechanism counters
  int m_uni = 0, m_multi = 0, m_bcast = 0, m_max = 0, m_fcs = 0, m_size = 0, m_toolong = 0;
  int m_addr = 0, m_pre = 0, m_ovr = 0, m_rr = 0, m_latency = 0;

  always @(negedge clk) if (rst_n && $countones(buf_full) > 1 && tx_dv != '0) m_rr++;

  initial begin
    bytes_t w, w2;
    for (int i = 0; i < NRX; i++) rx_data[i] = '0;
    for (int c = 0; c < N_ERR; c++) err_ref[c] = '0;
    for (int e = 0; e < 16; e++) tbl_model[e] = '0;
    fwd_ref = 0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;

    cfg(0, 16'h0101, 32'h01, 32'h08);          // RX0 -> TX3
    cfg(1, 16'h0202, 32'h06, 32'h70);          // RX1,RX2 -> TX4,5,6
    cfg(2, 16'h0303, 32'h08, 32'h01);          // RX3 -> TX0
    cfg(3, 16'h0404, 32'hFF, 32'h82);          // any -> TX1,TX7
    for (int p = 0; p < NRX; p++)              // VL 0x1000+p: RXp -> TX(7-p)
      cfg(4 + p, 16'h1000 + 16'(p), 32'(1) << p, 32'(1) << (7 - p));

    // 1. unicast, with latency check
    w = wire_frame(mac_frame(16'h0101, 46, 8'h0, 1));
    expect_on(8'h08, w);
    send(0, w);
    wait_idle();
    fwd_ref++;
    check(first_tx_cyc[3] - last_rx_cyc[0] == w.size(),
          $sformatf("latency %0d, expected %0d", first_tx_cyc[3] - last_rx_cyc[0], w.size()));
    m_latency++;
    m_uni++;
    check_log("unicast");

    // 2. multicast
    w = wire_frame(mac_frame(16'h0202, 100, 8'h1, 2));
    expect_on(8'h70, w);
    send(1, w);
    wait_idle();
    fwd_ref++; m_multi++;
    check_log("multicast");

    // 3. FCS error
    send(2, wire_frame(mac_frame(16'h0202, 80, 8'h2, 3, 32'h0300_0000, 1)));
    wait_idle();
    err_ref[ERR_FCS]++; m_fcs++;
    check_log("fcs");
    check(last_err == ERR_FCS && last_err_port == 3'd2, "last error record (FCS, RX2)");

    // 4. size errors: too short, too long, longer than the memory
    send(0, wire_frame(mac_frame(16'h0101, 20, 8'h0, 4)));
    wait_idle();
    send(0, wire_frame(mac_frame(16'h0101, 1501, 8'h0, 5)));
    wait_idle();
    err_ref[ERR_SIZE] += 2; m_size += 2;
    check_log("size");
    send(0, wire_frame(mac_frame(16'h0101, 2100, 8'h0, 6)));
    wait_idle();
    err_ref[ERR_SIZE]++; m_toolong++;
    check_log("longer than memory");

    // 5. maximum-size frame (1518 bytes) forwarded
    w = wire_frame(mac_frame(16'h0303, 1500, 8'h3, 7));
    check(w.size() == 1526, "max frame is 1518 + 8 bytes");
    expect_on(8'h01, w);
    send(3, w);
    wait_idle();
    fwd_ref++; m_max++;
    check_log("max frame");

    // 6. address errors: constant field, unknown VL, port not permitted
    send(0, wire_frame(mac_frame(16'h0101, 46, 8'h0, 8, 32'h0300_0100)));
    wait_idle();
    send(0, wire_frame(mac_frame(16'h7777, 46, 8'h0, 9)));
    wait_idle();
    send(5, wire_frame(mac_frame(16'h0101, 46, 8'h5, 10)));
    wait_idle();
    err_ref[ERR_ADDR] += 3; m_addr += 3;
    check_log("address");

    // 7. preamble error (six preamble bytes only)
    w = wire_frame(mac_frame(16'h0404, 46, 8'h4, 11));
    w.delete(0);
    send(4, w);
    wait_idle();
    err_ref[ERR_PREAMBLE]++; m_pre++;
    check_log("preamble");

    // 8. overrun: second frame arrives while the first still occupies RX0
    w  = wire_frame(mac_frame(16'h0101, 300, 8'h0, 12));
    w2 = wire_frame(mac_frame(16'h0101, 60, 8'h0, 13));
    expect_on(8'h08, w);
    send(0, w);
    repeat (2) @(negedge clk);
    check(buf_full[0], "RX0 buffer full before second frame");
    send(0, w2);
    wait_idle();
    fwd_ref++; err_ref[ERR_OVERRUN]++; m_ovr++;
    check_log("overrun");

    // 9. all eight ports at once, several rounds: round-robin service
    for (int r = 0; r < 3; r++) begin
      bytes_t wf [NRX];
      for (int p = 0; p < NRX; p++) begin
        wf[p] = wire_frame(mac_frame(16'h1000 + 16'(p), 46 + 37 * p + r, 8'(p), 100 + 10 * r + p));
        expect_on(NTX'(1) << (7 - p), wf[p]);
      end
      send_all(wf);
      wait_idle();
      fwd_ref += NRX;
    end
    check_log("all ports");

    // 10. broadcast mode: any correct frame to every TX port; errors still drop
    broadcast_en = 1'b1;
    w = wire_frame(mac_frame(16'h5555, 46, 8'h6, 14));
    expect_on('1, w);
    send(6, w);
    wait_idle();
    fwd_ref++; m_bcast++;
    send(6, wire_frame(mac_frame(16'h5555, 46, 8'h6, 15, 32'h0300_0000, 1)));
    wait_idle();
    err_ref[ERR_FCS]++; m_fcs++;
    broadcast_en = 1'b0;
    check_log("broadcast");

    // 11. random mixed traffic on all ports at once
    for (int c = 0; c < N_ERR; c++) rnd_err[c] = '0;
    fork
      random_port(0, 12); random_port(1, 12); random_port(2, 12); random_port(3, 12);
      random_port(4, 12); random_port(5, 12); random_port(6, 12); random_port(7, 12);
    join
    wait_idle();
    fwd_ref += rnd_fwd;
    for (int c = 0; c < N_ERR; c++) err_ref[c] += rnd_err[c];
    $display("random traffic: %0d forwarded, %0d size, %0d FCS, %0d address drops",
             rnd_fwd, rnd_err[ERR_SIZE], rnd_err[ERR_FCS], rnd_err[ERR_ADDR]);
    check(rnd_fwd > 0, "random traffic forwarded frames");
    check_log("random traffic");

    $display("mechanisms: unicast=%0d multicast=%0d broadcast=%0d max_frame=%0d fcs_drop=%0d size_drop=%0d too_long=%0d addr_drop=%0d preamble=%0d overrun=%0d round_robin_cycles=%0d latency=%0d",
             m_uni, m_multi, m_bcast, m_max, m_fcs, m_size, m_toolong, m_addr, m_pre, m_ovr, m_rr, m_latency);
    check(m_uni > 0 && m_multi > 0 && m_bcast > 0 && m_max > 0 && m_fcs > 0 && m_size > 0 &&
          m_toolong > 0 && m_addr > 0 && m_pre > 0 && m_ovr > 0 && m_rr > 0 && m_latency > 0,
          "every mechanism happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
