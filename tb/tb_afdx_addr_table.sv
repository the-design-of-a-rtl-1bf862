// tb_afdx_addr_table: self-checking testbench of the addresses table.
//
// Loads a few virtual links (unicast, multicast, one with several permitted
// RX ports), then looks up: legal addresses from permitted and forbidden
// ports, unknown VLs, a wrong constant field, and an entry overwritten and
// invalidated later. Each result is compared with a reference search over a
// copy of the table in the testbench, and must appear exactly one clock
// after lookup_en.
module tb_afdx_addr_table;
  import afdx_pkg::*;

  localparam int NE = 16, NRX = 8, NTX = 8;

  logic           clk = 1'b0, rst_n = 1'b0;
  logic           cfg_we = 1'b0;
  logic [3:0]     cfg_idx = '0;
  vl_entry_t      cfg_entry = '0;
  logic           lookup_en = 1'b0;
  logic [47:0]    lookup_da = '0;
  logic [2:0]     lookup_port = '0;
  logic           res_valid, res_const_ok, res_hit, res_permit, res_ok;
  logic [NTX-1:0] res_tx_mask;
  vl_entry_t      model [NE];
  int             checks = 0, failures = 0;

  afdx_addr_table dut (.*);

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

  task automatic write(input int idx, input bit v, input logic [15:0] vl,
                       input logic [31:0] rxp, input logic [31:0] txm);
    @(negedge clk);
    cfg_we = 1'b1; cfg_idx = 4'(idx);
    cfg_entry = '{valid: v, vlid: vl, rx_permit: rxp, tx_mask: txm};
    model[idx] = cfg_entry;
    @(negedge clk); cfg_we = 1'b0;
  endtask

  task automatic lookup(input logic [31:0] cf, input logic [15:0] vl, input int port);
    bit hit, perm, cok;
    logic [NTX-1:0] m;
    hit = 0; perm = 0; m = '0;
    for (int e = 0; e < NE; e++)
      if (!hit && model[e].valid && model[e].vlid == vl) begin
        hit = 1; perm = model[e].rx_permit[port]; m = model[e].tx_mask[NTX-1:0];
      end
    cok = (cf == 32'h0300_0000);
    @(negedge clk);
    lookup_en = 1'b1; lookup_da = {cf, vl}; lookup_port = 3'(port);
    @(negedge clk);
    lookup_en = 1'b0; lookup_da = '0;
    check(res_valid, "result one clock after lookup");
    check(res_const_ok == cok, "constant field check");
    check(res_hit == hit, $sformatf("hit vl %04h", vl));
    check(res_permit == (hit && perm), $sformatf("permit vl %04h port %0d", vl, port));
    check(res_ok == (cok && hit && perm && m != 0), $sformatf("ok vl %04h port %0d", vl, port));
    if (hit) check(res_tx_mask == m, $sformatf("mask vl %04h", vl));
    @(negedge clk);
    check(!res_valid, "result valid for one clock");
  endtask

  initial begin
    for (int e = 0; e < NE; e++) model[e] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // empty table: nothing found
    lookup(32'h0300_0000, 16'h0001, 0);

    write(0, 1, 16'h0001, 32'h0000_0001, 32'h0000_0004);   // unicast 0 -> 2
    write(5, 1, 16'h00A5, 32'h0000_0006, 32'h0000_00F0);   // multicast 1,2 -> 4..7
    write(15, 1, 16'hBEEF, 32'h0000_0080, 32'h0000_0001);  // 7 -> 0
    write(3, 0, 16'h0777, 32'h0000_00FF, 32'h0000_00FF);   // invalid entry

    lookup(32'h0300_0000, 16'h0001, 0);
    lookup(32'h0300_0000, 16'h0001, 1);   // not permitted
    lookup(32'h0300_0001, 16'h0001, 0);   // wrong constant field
    lookup(32'h0300_0000, 16'h00A5, 1);
    lookup(32'h0300_0000, 16'h00A5, 2);
    lookup(32'h0300_0000, 16'h00A5, 3);
    lookup(32'h0300_0000, 16'hBEEF, 7);
    lookup(32'h0300_0000, 16'h0777, 0);   // invalid entry not found
    lookup(32'h0300_0000, 16'h1234, 0);   // unknown

    // random table and lookups
    for (int e = 0; e < NE; e++)
      write(e, 1'($urandom), 16'(e * 3 + 1), $urandom & 32'hFF, $urandom & 32'hFF);
    for (int t = 0; t < 200; t++)
      lookup(($urandom % 4 == 0) ? $urandom : 32'h0300_0000, 16'($urandom % 60), $urandom % NRX);

    // reset clears the table
    @(negedge clk); rst_n = 1'b0; @(negedge clk); rst_n = 1'b1;
    for (int e = 0; e < NE; e++) model[e].valid = 1'b0;
    lookup(32'h0300_0000, 16'h0001, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
