// tb_i2c_ctrl: self-checking test of the shared-memory bus controller.
// A model of Process 1 answers the interrupt a random 1-6 cycles later.
// Checked in every cycle: Process 2 is granted only while Process 1 is held
// stopped, and sel follows the grant. Checked per sequence: request ->
// interrupt -> grant after the stop answer; done -> one clear pulse and
// Process 1 released; request withdrawn -> released without clear, both
// n_before and after the grant.
module tb_i2c_ctrl;
  import vts_pkg::*;
  logic clk = 0, rst_n = 0;
  logic p2_req = 0, p2_done = 0, p1_stopped = 0;
  logic p1_stop, p1_clear, p2_grant, sel;
  bus_state_t state;
  int checks = 0, failures = 0;

  i2c_ctrl dut (.clk, .rst_n, .p2_req, .p2_done, .p1_stopped, .p1_stop, .p1_clear,
                .p2_grant, .sel, .state);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Process 1 model: stopped some cycles after the interrupt, drops with it
  int lag = 0, n_clear = 0;
  always @(posedge clk) begin
    if (!p1_stop) begin p1_stopped <= 0; lag <= 1 + int'($urandom_range(5)); end
    else if (lag > 0) lag <= lag - 1;
    else p1_stopped <= 1;
    if (p1_clear && rst_n) n_clear++;
  end
  // invariants, every cycle
  always @(negedge clk) if (rst_n) begin
    if (p2_grant && !(p1_stop && p1_stopped)) check(0, "grant while Process 1 not stopped");
    if (sel != p2_grant) check(0, "sel differs from grant");
  end

  task automatic wait_grant(output int cycles);
    cycles = 0;
    while (!p2_grant && cycles < 50) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int c;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    check(!p1_stop && !p2_grant && !sel, "Process 1 owns the memory after reset");
    for (int k = 0; k < 20; k++) begin
      int how;
      how = int'($urandom_range(2));
      @(negedge clk); p2_req = 1;
      @(negedge clk);
      check(p1_stop && !p2_grant, "interrupt raised first");
      if (how == 2 && k % 2 == 0) begin
        // withdrawn n_before the grant
        p2_req = 0; @(negedge clk); @(negedge clk);
        check(!p1_stop && !p2_grant && state == BUS_P1, "withdrawn n_before grant");
        continue;
      end
      wait_grant(c);
      check(p2_grant && p1_stopped, $sformatf("granted after stop (%0d cycles)", c));
      repeat (int'($urandom_range(3, 10))) @(negedge clk);
      check(p2_grant && p1_stop, "held during download");
      if (how == 0) begin
        int n_before;
        n_before = n_clear;
        p2_done = 1; @(negedge clk); p2_done = 0; p2_req = 0;
        check(p1_clear && !p2_grant, "memory emptied after done");
        @(negedge clk);
        check(!p1_clear && !p1_stop && state == BUS_P1 && n_clear == n_before + 1,
              "single clear, Process 1 restarts");
      end else begin
        int n_before;
        n_before = n_clear;
        p2_req = 0; @(negedge clk); @(negedge clk);
        check(!p1_stop && !p2_grant && n_clear == n_before, "withdrawn: no clear");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
