// tb_sram: self-checking test of the shared memory at its full 4096 x 8 size.
// Writes a pattern to every address, reads all back (one-cycle read latency),
// checks that a disabled cycle keeps rdata, then rewrites random addresses
// against a reference array.
module tb_sram;
  localparam int AW = 12;
  logic clk = 0, en = 0, we = 0;
  logic [AW-1:0] addr = 0;
  logic [7:0] wdata = 0, rdata;
  logic [7:0] ref_mem [2**AW];
  int checks = 0, failures = 0;

  sram #(.ADDR_W(AW), .DATA_W(8)) dut (.clk, .en, .we, .addr, .wdata, .rdata);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(int a, logic [7:0] d);
    @(negedge clk); en = 1; we = 1; addr = AW'(a); wdata = d; ref_mem[a] = d;
    @(negedge clk); en = 0; we = 0;
  endtask
  task automatic rd(int a, output logic [7:0] d);
    @(negedge clk); en = 1; we = 0; addr = AW'(a);
    @(negedge clk); en = 0; d = rdata;
  endtask

  initial begin
    logic [7:0] d;
    for (int a = 0; a < 2**AW; a++) wr(a, 8'(a * 7 + (a >> 8)));
    for (int a = 0; a < 2**AW; a++) begin
      rd(a, d);
      if (d != ref_mem[a]) check(0, $sformatf("addr %0d: %02h vs %02h", a, d, ref_mem[a]));
      else checks++;
    end
    rd(100, d);
    @(negedge clk); addr = 12'd5;  // en low: output must hold
    @(negedge clk);
    check(rdata == ref_mem[100], "rdata held while disabled");
    for (int n = 0; n < 2000; n++) begin
      int a;
      a = int'($urandom_range(2**AW - 1));
      if ($urandom_range(1)) wr(a, 8'($urandom));
      else begin rd(a, d); check(d == ref_mem[a], $sformatf("random read %0d", a)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
