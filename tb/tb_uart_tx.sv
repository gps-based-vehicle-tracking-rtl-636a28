// tb_uart_tx: self-checking test of the serial transmitter.
// Hands random bytes to the transmitter at CLKS_PER_BIT = 16, samples the
// line in the middle of every bit time, and checks start bit, data bits
// (LSB first), stop bit, and that ready returns exactly 10 bit times after
// the byte was taken.
module tb_uart_tx;
  localparam int CPB = 16;
  logic clk = 0, rst_n = 0;
  logic [7:0] data = 0;
  logic valid = 0, ready, txd;
  int checks = 0, failures = 0;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .data, .valid, .ready, .txd);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; repeat (3) @(posedge clk);
    check(txd == 1 && ready == 1, "idle line high and ready");
    for (int n = 0; n < 30; n++) begin
      logic [7:0] b;
      logic [9:0] line;
      int busy;
      b = 8'($urandom);
      @(negedge clk); data = b; valid = 1;
      @(posedge clk); #1 valid = 0;            // taken at this edge
      // now mid-bit sampling, start bit began at this edge
      repeat (CPB/2) @(posedge clk);
      for (int i = 0; i < 10; i++) begin
        #1 line[i] = txd;
        if (i < 9) repeat (CPB) @(posedge clk);
      end
      check(line[0] == 0, $sformatf("start bit of %02h", b));
      check(line[8:1] == b, $sformatf("data sent %02h line %02h", b, line[8:1]));
      check(line[9] == 1, "stop bit");
      busy = CPB/2 + 9*CPB;
      while (!ready) begin @(posedge clk); #1; busy++; end
      check(busy == 10*CPB, $sformatf("frame took %0d cycles", busy));
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
