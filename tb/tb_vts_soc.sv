// tb_vts_soc: end-to-end test of the whole tracking unit at reduced sizes
// (8 clocks per bit on both serial links, a 128-byte memory, short delays).
// A GPS model sends NMEA sentences on gps_rxd and a base-station model talks
// the download protocol on bs_rxd/bs_txd, decoding the unit's serial output
// with its own receiver. The run goes through: the sample message (GGA, GLL,
// RMC) logged as one 43-byte reading; a cut sentence discarded; "free" with
// no acknowledge (retry, then abandon); "free" with acknowledge, during
// which the GPS keeps talking but nothing is written (Process 1 stopped by
// the interrupt); a download reported as mismatched and repeated; the
// confirmed download, which empties the memory and drops power_hold; then
// logging again until the memory is full. Each mechanism is counted and a
// mechanism that never happened is a failure.
module tb_vts_soc;
  import vts_pkg::*;
  localparam int CPB = 8, AW = 7, ID_DELAY = 50, TMO = 3000;
  localparam string GGA = "$GPGGA,161229.487,3723.2475,N,12158.3416,W,1,07,1.0,9.0,M, , , ,0000*18";
  localparam string GLL = "$GPGLL,3723.2475,N,12158.3416,W,161229.487,A*2C";
  localparam string RMC = "$GPRMC,161229.487,A,3723.2475,N,12158.3416,W,0.13,309.62,120598 ,*10";
  localparam string READING = "161229.487,3723.2475,12158.3416,0.13,120598";

  logic clk = 0, rst_n = 0, gps_rxd = 1, bs_rxd = 1;
  logic bs_txd, power_hold, c_flag, mem_full;
  logic [AW:0] points, fill;
  bus_state_t bus_state;
  logic ev_sentence, ev_discard, ev_id_retry, ev_abandon, ev_repeat, ev_done, ev_frame_err;
  int checks = 0, failures = 0;

  vts_soc #(.CLKS_PER_BIT(CPB), .ADDR_W(AW), .UNIT_ID(8'h07), .ID_DELAY(ID_DELAY),
            .ACK_TIMEOUT(TMO)) dut (
    .clk, .rst_n, .gps_rxd, .bs_rxd, .bs_txd, .power_hold, .c_flag, .mem_full, .points,
    .fill, .bus_state, .ev_sentence, .ev_discard, .ev_id_retry, .ev_abandon, .ev_repeat,
    .ev_done, .ev_frame_err);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // serial line drivers (8N1, LSB first)
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
  task automatic bs_send_str(string s);
    foreach (s[i]) bs_send(s[i]);
  endtask

  // base-station receiver: mid-bit sampling of bs_txd
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
  task automatic wait_heard(int n, int limit);
    int g = 0;
    while (heard.size() < n && g < limit) begin @(posedge clk); g++; end
  endtask

  // mechanism counters
  int n_sentence = 0, n_discard = 0, n_retry = 0, n_abandon = 0, n_repeat = 0;
  int n_done = 0, n_stop = 0, n_p1_write_stopped = 0, n_full = 0;
  always @(posedge clk) if (rst_n) begin
    n_sentence += int'(ev_sentence);
    n_discard  += int'(ev_discard);
    n_retry    += int'(ev_id_retry);
    n_abandon  += int'(ev_abandon);
    n_repeat   += int'(ev_repeat);
    n_done     += int'(ev_done);
    if (bus_state == BUS_STOP && $past(bus_state) == BUS_P1) n_stop++;
    if (bus_state == BUS_P2 && dut.u_p1.mem_we) n_p1_write_stopped++;
    if (mem_full && !$past(mem_full)) n_full++;
  end

  function automatic string heard_str(int from, int n);
    string r = "";
    for (int i = 0; i < n; i++) r = {r, string'(heard[from + i])};
    return r;
  endfunction

  initial begin
    int fill_before;
    repeat (5) @(negedge clk); rst_n = 1; repeat (5) @(negedge clk);
    check(power_hold && !c_flag, "power held, C clear after power-up");

    // 1. sample message
    gps_send({GGA, GLL, RMC});
    repeat (3*CPB) @(negedge clk);
    check(c_flag && points == 1 && fill == 43, $sformatf("sample logged: points %0d fill %0d", points, fill));
    check(n_sentence == 2, "GGA and RMC recognised");
    // 2. cut sentence
    gps_send("$GPRMC,101010.000,A,1234.5$");
    repeat (3*CPB) @(negedge clk);
    check(n_discard == 1 && fill == 43, "cut sentence discarded");

    // 3. base station silent after the ID
    bs_send_str("free");
    wait_heard(1, 20*CPB + ID_DELAY);
    check(heard.size() == 1 && heard[0] == 8'h07, "unit ID sent after free");
    wait_heard(2, TMO + 20*CPB);
    check(heard.size() == 2 && heard[1] == 8'h07 && n_retry == 1, "ID repeated once");
    repeat (TMO + 20*CPB) @(negedge clk);
    check(n_abandon == 1 && heard.size() == 2 && bus_state == BUS_P1, "gave up, Process 1 still logging");

    // 4. acknowledged; GPS keeps talking during the download
    heard.delete();
    bs_send_str("free");
    wait_heard(1, 20*CPB + ID_DELAY);
    bs_send(BS_ACK);
    fill_before = fill;
    fork
      gps_send(RMC);
      wait_heard(1 + 43 + 2, 60*10*CPB);
    join
    check(heard.size() == 46, $sformatf("ID + 43 + 2 bytes heard: %0d", heard.size()));
    check(heard_str(1, 43) == READING, {"downloaded: ", heard_str(1, 43)});
    check(heard[44] == 0 && heard[45] == 1, "point count 1");
    check(fill == fill_before && n_stop == 1, "Process 1 stopped by the interrupt, memory unchanged");
    // report a mismatch once
    bs_send(BS_NAK);
    wait_heard(46 + 45, 60*10*CPB);
    check(n_repeat == 1 && heard_str(46, 43) == READING && heard[89] == 0 && heard[90] == 1,
          "download repeated after mismatch");
    bs_send(BS_ACK);
    repeat (4*CPB) @(negedge clk);
    check(n_done == 1 && !power_hold, "confirmed: power released");
    check(points == 0 && fill == 0 && !c_flag && bus_state == BUS_P1, "memory emptied, C cleared");

    // 5. log until the 128-byte memory is full (2 readings fit)
    gps_send({RMC, "\r\n", RMC, "\r\n", RMC, "\r\n"});
    repeat (3*CPB) @(negedge clk);
    check(points == 2 && fill == 86 && mem_full, $sformatf("full: points %0d fill %0d", points, fill));
    check(!ev_frame_err, "no framing errors");

    check(n_sentence >= 1, "mechanism: sentence name found");
    check(n_discard  >= 1, "mechanism: partial reading discarded");
    check(n_retry    >= 1, "mechanism: ID retry");
    check(n_abandon  >= 1, "mechanism: no acknowledge, back to waiting");
    check(n_stop     >= 1, "mechanism: interrupt stops Process 1");
    check(n_repeat   >= 1, "mechanism: download repeated");
    check(n_done     >= 1, "mechanism: download confirmed, memory emptied");
    check(n_full     >= 1, "mechanism: memory full");
    check(n_p1_write_stopped == 0, "no write while Process 2 owns the memory");
    $display("mechanisms: sentence=%0d discard=%0d retry=%0d abandon=%0d stop=%0d repeat=%0d done=%0d full=%0d",
             n_sentence, n_discard, n_retry, n_abandon, n_stop, n_repeat, n_done, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
