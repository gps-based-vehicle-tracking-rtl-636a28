// tb_uart_rx: self-checking test of the serial receiver.
// Sends random bytes as 8N1 frames at CLKS_PER_BIT = 16 and checks each
// received byte, that valid comes 9.5 bit times (plus the 2-cycle
// synchronizer) after the start edge, that a frame with a low stop bit gives
// frame_err and no valid, and that a short low glitch is ignored.
module tb_uart_rx;
  localparam int CPB = 16;
  logic clk = 0, rst_n = 0, rxd = 1;
  logic [7:0] data;
  logic valid, frame_err;
  int checks = 0, failures = 0;
  int cyc = 0;

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .rxd, .data, .valid, .frame_err);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // drive one frame; record when valid/frame_err shows
  int t_start, t_valid;
  logic [7:0] got; bit got_v, got_fe;
  always @(posedge clk) begin
    if (valid)     begin got = data; got_v = 1; t_valid = cyc; end
    if (frame_err) got_fe = 1;
  end

  task automatic send(logic [7:0] b, bit stop_ok);
    got_v = 0; got_fe = 0;
    @(negedge clk); rxd = 0; t_start = cyc;
    repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(negedge clk); end
    rxd = stop_ok; repeat (CPB) @(negedge clk);
    rxd = 1; repeat (2*CPB) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; repeat (3) @(posedge clk);
    for (int n = 0; n < 40; n++) begin
      logic [7:0] b;
      b = 8'($urandom);
      send(b, 1);
      check(got_v && got == b, $sformatf("byte %0d: sent %02h got %02h v=%0b", n, b, got, got_v));
      check(!got_fe, "no frame error on good frame");
      // start edge to valid: 9.5 bits, +2 sync, +1 edge detect, +1 per
      // counter reload, +1 output register: at most 6 extra cycles
      check((t_valid - t_start) >= 9*CPB + CPB/2 && (t_valid - t_start) <= 9*CPB + CPB/2 + 6,
            $sformatf("latency %0d", t_valid - t_start));
    end
    send(8'hA5, 0);
    check(got_fe && !got_v, "frame error flagged, no byte");
    // glitch shorter than half a bit
    got_v = 0; got_fe = 0;
    @(negedge clk); rxd = 0; repeat (CPB/4) @(negedge clk); rxd = 1;
    repeat (12*CPB) @(negedge clk);
    check(!got_v && !got_fe, "glitch ignored");
    send(8'h3C, 1);
    check(got_v && got == 8'h3C, "byte after glitch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
