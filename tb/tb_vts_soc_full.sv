// tb_vts_soc_full: one complete operation of the tracking unit with every
// parameter at its default (10 MHz clock assumed, 9600 bps on both links,
// 4096-byte memory, 1 ms priority delay, 100 ms acknowledge timeout).
// The GPS model sends the three-sentence sample message; the base-station
// model sends "free", acknowledges the unit's ID, receives the download
// with its own serial receiver, checks the 43-byte reading and the point
// count against the expected text, confirms, and the unit must then release
// power_hold with the memory emptied. Also checks the time from "free" to the
// ID against the priority delay. About 2.6 million clock cycles.
module tb_vts_soc_full;
  import vts_pkg::*;
  localparam int CPB = 1042;   // the design's default: 10 MHz / 9600 bps
  localparam string GGA = "$GPGGA,161229.487,3723.2475,N,12158.3416,W,1,07,1.0,9.0,M, , , ,0000*18\r\n";
  localparam string GLL = "$GPGLL,3723.2475,N,12158.3416,W,161229.487,A*2C\r\n";
  localparam string RMC = "$GPRMC,161229.487,A,3723.2475,N,12158.3416,W,0.13,309.62,120598 ,*10\r\n";
  localparam string READING = "161229.487,3723.2475,12158.3416,0.13,120598";

  logic clk = 0, rst_n = 0, gps_rxd = 1, bs_rxd = 1;
  logic bs_txd, power_hold, c_flag, mem_full;
  logic [12:0] points, fill;
  bus_state_t bus_state;
  logic ev_sentence, ev_discard, ev_id_retry, ev_abandon, ev_repeat, ev_done, ev_frame_err;
  int checks = 0, failures = 0;

  vts_soc dut (
    .clk, .rst_n, .gps_rxd, .bs_rxd, .bs_txd, .power_hold, .c_flag, .mem_full, .points,
    .fill, .bus_state, .ev_sentence, .ev_discard, .ev_id_retry, .ev_abandon, .ev_repeat,
    .ev_done, .ev_frame_err);

  always #50 clk = ~clk;   // 10 MHz
  longint cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic gps_send(string s);
    foreach (s[i]) begin
      gps_rxd = 0; repeat (CPB) @(negedge clk);
      for (int b = 0; b < 8; b++) begin gps_rxd = s[i][b]; repeat (CPB) @(negedge clk); end
      gps_rxd = 1; repeat (CPB) @(negedge clk);
    end
  endtask
  task automatic bs_send(logic [7:0] c);
    bs_rxd = 0; repeat (CPB) @(negedge clk);
    for (int b = 0; b < 8; b++) begin bs_rxd = c[b]; repeat (CPB) @(negedge clk); end
    bs_rxd = 1; repeat (CPB) @(negedge clk);
  endtask

  logic [7:0] heard [$];
  longint t_heard [$];
  initial forever begin
    logic [7:0] c;
    longint t;
    @(negedge bs_txd);
    t = cyc;
    repeat (CPB/2) @(posedge clk);
    for (int b = 0; b < 8; b++) begin repeat (CPB) @(posedge clk); c[b] = bs_txd; end
    repeat (CPB) @(posedge clk);
    if (bs_txd) begin heard.push_back(c); t_heard.push_back(t); end
    else check(0, "stop bit on the unit's transmit line");
  end
  task automatic wait_heard(int n, longint limit);
    longint g = 0;
    while (heard.size() < n && g < limit) begin @(posedge clk); g++; end
  endtask

  initial begin
    string got;
    longint t_free;
    repeat (5) @(negedge clk); rst_n = 1; repeat (5) @(negedge clk);
    gps_send({GGA, GLL, RMC});
    repeat (3*CPB) @(negedge clk);
    check(c_flag && points == 1 && fill == 43, $sformatf("logged: points %0d fill %0d", points, fill));

    bs_send("f"); bs_send("r"); bs_send("e"); bs_send("e");
    t_free = cyc - CPB;   // stop bit of the last 'e' began one bit ago
    wait_heard(1, 20*CPB + 20000);
    check(heard.size() == 1 && heard[0] == 8'h01, "unit ID 1 sent");
    // ID follows about half a stop bit + the 10 420-cycle delay
    check(heard.size() == 1 && t_heard[0] - t_free > 10420 && t_heard[0] - t_free < 10420 + CPB + 20,
          $sformatf("ID %0d cycles after free", t_heard[0] - t_free));
    bs_send(BS_ACK);
    wait_heard(46, 50*10*CPB);
    got = "";
    for (int i = 1; i < 44 && i < heard.size(); i++) got = {got, string'(heard[i])};
    check(got == READING, {"downloaded: ", got});
    check(heard.size() == 46 && heard[44] == 0 && heard[45] == 1, "point count 1");
    bs_send(BS_ACK);
    repeat (4*CPB) @(negedge clk);
    check(!power_hold && points == 0 && fill == 0 && !c_flag, "confirmed: memory emptied, power released");
    check(!ev_frame_err, "no framing errors");
    $display("cycles: %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
