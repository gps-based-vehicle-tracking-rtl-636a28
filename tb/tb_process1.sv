// tb_process1: self-checking test of Process I, the sentence detector and
// field selector.
// DUT a (default fields, 4 KB memory) gets the three-sentence sample message
// GGA, GLL, RMC one byte per clock and must store exactly the 43-byte
// reading "161229.487,3723.2475,12158.3416,0.13,120598", take one clock per
// byte, set C and count one point. Then: a sentence cut off by '$' is
// discarded; names reached through the flow chart's retry paths (RMGGA,
// GRMC) are found while RRMC is not; a stop request drops a partial reading
// and is answered with stopped; clear empties the memory and C.
// DUT b also stores GGA's time, latitude and longitude and has only 64
// bytes: the GGA part fits, the RMC reading does not and is dropped with the
// full flag.
module tb_process1;
  logic clk = 0, rst_n = 0;
  logic [7:0] rx_data = 0;
  logic rx_valid = 0, stop_req = 0, clear = 0;
  int checks = 0, failures = 0;

  // DUT a
  logic        a_stopped, a_we, a_c, a_full, a_hit, a_disc;
  logic [11:0] a_addr;
  logic [7:0]  a_wdata;
  logic [12:0] a_fill, a_points;
  process1 dut_a (.clk, .rst_n, .rx_data, .rx_valid, .stop_req, .stopped(a_stopped), .clear,
    .mem_we(a_we), .mem_addr(a_addr), .mem_wdata(a_wdata), .c_flag(a_c), .fill(a_fill),
    .points(a_points), .full(a_full), .sentence_hit(a_hit), .discard_hit(a_disc));
  // DUT b
  logic       b_stopped, b_we, b_c, b_full, b_hit, b_disc;
  logic [5:0] b_addr;
  logic [7:0] b_wdata;
  logic [6:0] b_fill, b_points;
  process1 #(.ADDR_W(6), .GGA_FIELDS(16'b0000_0000_0001_0110)) dut_b (
    .clk, .rst_n, .rx_data, .rx_valid, .stop_req(1'b0), .stopped(b_stopped), .clear(1'b0),
    .mem_we(b_we), .mem_addr(b_addr), .mem_wdata(b_wdata), .c_flag(b_c), .fill(b_fill),
    .points(b_points), .full(b_full), .sentence_hit(b_hit), .discard_hit(b_disc));

  logic [7:0] mem_a [4096];
  logic [7:0] mem_b [64];
  int hits_a = 0, disc_a = 0;
  always @(posedge clk) if (rst_n) begin
    if (a_we) mem_a[a_addr] <= a_wdata;
    if (b_we) mem_b[b_addr] <= b_wdata;
    if (a_hit) hits_a++;
    if (a_disc) disc_a++;
  end

  always #5 clk = ~clk;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one byte per clock
  task automatic feed(string s);
    foreach (s[i]) begin
      @(negedge clk); rx_data = s[i]; rx_valid = 1;
    end
    @(negedge clk); rx_valid = 0;
    repeat (3) @(negedge clk);
  endtask

  function automatic string mem_str_a(int from, int n);
    string r = "";
    for (int i = 0; i < n; i++) r = {r, string'(mem_a[from + i])};
    return r;
  endfunction
  function automatic string mem_str_b(int from, int n);
    string r = "";
    for (int i = 0; i < n; i++) r = {r, string'(mem_b[from + i])};
    return r;
  endfunction

  localparam string GGA = "$GPGGA,161229.487,3723.2475,N,12158.3416,W,1,07,1.0,9.0,M, , , ,0000*18";
  localparam string GLL = "$GPGLL,3723.2475,N,12158.3416,W,161229.487,A*2C";
  localparam string RMC = "$GPRMC,161229.487,A,3723.2475,N,12158.3416,W,0.13,309.62,120598 ,*10";
  localparam string READING = "161229.487,3723.2475,12158.3416,0.13,120598";

  initial begin
    string msg;
    int t0, t1, nwr;
    msg = {GGA, GLL, RMC};
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    check(!a_c && a_points == 0, "C clear and no points after reset");

    // sample message, counting clocks from first byte to last byte
    t0 = $time;
    nwr = 0;
    fork
      feed(msg);
      begin
        repeat (msg.len() + 4) begin @(posedge clk); if (a_we) nwr++; end
      end
    join
    t1 = $time;
    check(msg.len() == 186, $sformatf("sample message is %0d bytes", msg.len()));
    check((t1 - t0) / 10 == msg.len() + 4, "one clock per byte (no stalls)");
    check(nwr == 43, $sformatf("43 memory writes for one reading, got %0d", nwr));
    check(a_fill == 43 && a_points == 1, $sformatf("fill %0d points %0d", a_fill, a_points));
    check(mem_str_a(0, 43) == READING, {"reading: ", mem_str_a(0, 43)});
    check(a_c, "flag C set");
    check(hits_a == 2, $sformatf("GGA and RMC found: %0d", hits_a));

    // DUT b: GGA part stored, RMC reading dropped for lack of room
    check(b_points == 1 && b_fill == 31, $sformatf("b fill %0d points %0d", b_fill, b_points));
    check(mem_str_b(0, 31) == "161229.487,3723.2475,12158.3416", {"b GGA: ", mem_str_b(0, 31)});
    check(b_full && b_disc == 0, "b full flag");

    // '$' inside a sentence discards the partial reading
    feed("$GPRMC,235959.000,A,1111.1111$");
    check(a_fill == 43 && a_points == 1, "cut sentence discarded");
    check(disc_a == 1 && hits_a == 3, "one discard");
    // retry paths of the detector
    feed("xRMGGA,101010.000,*00");  // GGA stores nothing by default
    check(hits_a == 4, "RMGGA found via retry of G");
    feed("GRMC,111111.111,A,2222.2222,S,03333.3333,E,12.5,0,311299*00\r\n");
    check(hits_a == 5, "GRMC found via retry of R");
    check(a_points == 2 && a_fill == 43 + 43, $sformatf("second reading fill %0d", a_fill));
    check(mem_str_a(43, 43) == "111111.111,2222.2222,03333.3333,12.5,311299", {"r2: ", mem_str_a(43, 43)});
    feed("RRMC,1,2,3,4,5,6,7,8,9*00");
    check(hits_a == 5 && a_fill == 86, "RRMC not a match (flow chart retries only G after R)");

    // stop request in the middle of a reading
    feed("$GPRMC,121212.000,A");
    @(negedge clk); stop_req = 1;
    repeat (3) @(negedge clk);
    check(a_stopped, "stopped answers the interrupt");
    check(a_fill == 86 && a_points == 2, "partial reading dropped at stop");
    feed(",3333.3333,N*00$GPRMC,9,A,9,N,9,W,9,9,9*00");  // ignored while stopped
    check(a_fill == 86 && a_points == 2 && a_stopped, "nothing written while stopped");
    @(negedge clk); stop_req = 0; clear = 1;
    @(negedge clk); clear = 0;
    check(!a_c && a_fill == 0 && a_points == 0, "clear empties memory and C");
    feed(RMC);
    check(a_points == 1 && a_fill == 43 && mem_str_a(0, 43) == READING, "logging restarts at 0");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
