// tb_afdx_port_ram: self-checking testbench of the local storage memory.
//
// Runs at the default 2K-byte size. Writes every address with random data,
// then mixes random reads and writes against a shadow array. A read must
// return the shadow word exactly one clock after its address; a read on a
// write cycle returns the old word.
module tb_afdx_port_ram;
  localparam int DEPTH = 2048;

  logic        clk = 1'b0;
  logic        we = 1'b0;
  logic [10:0] addr = '0;
  logic [7:0]  wdata = '0;
  logic [7:0]  rdata;
  logic [7:0]  shadow [DEPTH];
  int          checks = 0, failures = 0;

  afdx_port_ram dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] exp;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1'b1; addr = 11'(a); wdata = 8'($urandom); shadow[a] = wdata;
    end
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      we = ($urandom % 3) == 0; addr = 11'($urandom); wdata = 8'($urandom);
      exp = shadow[addr];
      if (we) shadow[addr] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d: got %02h exp %02h", addr, rdata, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
