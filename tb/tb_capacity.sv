// tb_capacity: the log-capacity workload at the default parameters.
// The GPS model sends 96 RMC fixes taken two minutes apart over the 9600-bps
// link; each makes a 43-byte reading, so 95 fit in the 4096-byte memory
// (4085 bytes, 190 minutes of driving) and the 96th is dropped with the full
// flag. The base-station model then takes the whole log over the radio link
// and checks every byte against the readings it expects, and the point count
// 95, before confirming. About 90 million clock cycles.
module tb_capacity;
  import vts_pkg::*;
  localparam int CPB = 1042;
  localparam int N = 96;

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

  always #50 clk = ~clk;

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
  initial forever begin
    logic [7:0] c;
    @(negedge bs_txd);
    repeat (CPB/2) @(posedge clk);
    for (int b = 0; b < 8; b++) begin repeat (CPB) @(posedge clk); c[b] = bs_txd; end
    repeat (CPB) @(posedge clk);
    if (bs_txd) heard.push_back(c);
    else check(0, "stop bit on the unit's transmit line");
  end

  // fix i: time 16:00:00 + 2 min * i, small moves in position, speed 1.00-9.99
  function automatic string fix_time(int i);
    int m = 2 * i;
    return $sformatf("%02d%02d%02d.000", 16 + m / 60, m % 60, (7 * i) % 60);
  endfunction
  function automatic string fix_lat(int i);
    return $sformatf("3723.%04d", 2475 + 13 * i);
  endfunction
  function automatic string fix_lon(int i);
    return $sformatf("12158.%04d", 3416 + 29 * i);
  endfunction
  function automatic string fix_spd(int i);
    return $sformatf("%0d.%02d", 1 + i % 9, (11 * i) % 100);
  endfunction
  function automatic string reading(int i);
    return {fix_time(i), ",", fix_lat(i), ",", fix_lon(i), ",", fix_spd(i), ",120598"};
  endfunction
  function automatic string sentence(int i);
    return {"$GPRMC,", fix_time(i), ",A,", fix_lat(i), ",N,", fix_lon(i), ",W,", fix_spd(i),
            ",309.62,120598,,*00\r\n"};
  endfunction

  initial begin
    string expect_log;
    int n_fit, bad;
    repeat (5) @(negedge clk); rst_n = 1; repeat (5) @(negedge clk);
    expect_log = "";
    for (int i = 0; i < N; i++) begin
      string r;
      r = reading(i);
      if (i == 0) check(r.len() == 43, $sformatf("reading is %0d bytes", r.len()));
      if (expect_log.len() + r.len() <= 4096) expect_log = {expect_log, r};
      gps_send(sentence(i));
    end
    n_fit = expect_log.len() / 43;
    repeat (3*CPB) @(negedge clk);
    check(n_fit == 95, "95 readings of 43 bytes fit in 4096 bytes");
    check(points == 95 && fill == 4085 && mem_full,
          $sformatf("stored %0d readings, %0d bytes, full=%0b", points, fill, mem_full));

    bs_send("f"); bs_send("r"); bs_send("e"); bs_send("e");
    while (heard.size() < 1) @(posedge clk);
    bs_send(BS_ACK);
    while (heard.size() < 1 + 4085 + 2) @(posedge clk);
    bad = 0;
    for (int i = 0; i < 4085; i++) if (heard[1 + i] != expect_log[i]) bad++;
    check(bad == 0, $sformatf("%0d of 4085 downloaded bytes differ", bad));
    check(heard[4086] == 0 && heard[4087] == 95, "point count 95");
    bs_send(BS_ACK);
    repeat (4*CPB) @(negedge clk);
    check(!power_hold && points == 0 && !mem_full, "confirmed: memory emptied, power released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (120_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
