// tb_mem_ctrl: self-checking test of the memory controller with its memory.
// With sel = 0 random writes from the Process 1 port fill a reference copy;
// reads from the Process 2 port are then refused and counted. With sel = 1
// every written address is read back through the Process 2 port (data one
// cycle after the request, with rvalid) and writes from Process 1 are
// refused and counted without changing the memory.
module tb_mem_ctrl;
  localparam int AW = 8;
  logic clk = 0, rst_n = 0, sel = 0;
  logic p1_we = 0, p2_re = 0;
  logic [AW-1:0] p1_addr = 0, p2_addr = 0;
  logic [7:0] p1_wdata = 0, p2_rdata, dropped;
  logic p2_rvalid;
  logic [7:0] ref_mem [2**AW];
  bit written [2**AW];
  int checks = 0, failures = 0;

  mem_ctrl #(.ADDR_W(AW)) dut (.clk, .rst_n, .sel, .p1_we, .p1_addr, .p1_wdata,
    .p2_re, .p2_addr, .p2_rdata, .p2_rvalid, .dropped);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    // Process 1 owns the memory
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge clk); p1_we = 1; p1_addr = AW'(a); p1_wdata = 8'($urandom);
      ref_mem[a] = p1_wdata; written[a] = 1;
    end
    @(negedge clk); p1_we = 0;
    // refused reads
    for (int i = 0; i < 5; i++) begin
      @(negedge clk); p2_re = 1; p2_addr = AW'(i);
      @(negedge clk); p2_re = 0;
      check(!p2_rvalid, "no read data for a non-owner");
    end
    check(dropped == 5, $sformatf("5 refused reads counted, %0d", dropped));
    // Process 2 owns it: refused writes first
    @(negedge clk); sel = 1;
    for (int i = 0; i < 3; i++) begin
      @(negedge clk); p1_we = 1; p1_addr = AW'(i); p1_wdata = ~ref_mem[i];
    end
    @(negedge clk); p1_we = 0;
    check(dropped == 8, $sformatf("3 refused writes counted, %0d", dropped));
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge clk); p2_re = 1; p2_addr = AW'(a);
      @(negedge clk); p2_re = 0;
      check(p2_rvalid && p2_rdata == ref_mem[a], $sformatf("read %0d: %02h vs %02h", a, p2_rdata, ref_mem[a]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
