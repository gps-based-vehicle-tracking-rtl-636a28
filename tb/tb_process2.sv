// tb_process2: self-checking test of Process II, the download protocol.
// Surrounding models: a transmitter that is busy 6 cycles per byte, a
// 64-byte memory with one-cycle read latency, and a bus controller that
// grants 3 cycles after the request. Checked: the ID follows "free" after
// exactly the priority delay; a missing acknowledge gives one retry and then
// abandonment; after an acknowledge the memory is requested and sent byte by
// byte, followed by the point count; no final answer releases the memory;
// a NAK repeats the whole download; an ACK pulses done and drops power_hold.
module tb_process2;
  import vts_pkg::*;
  localparam int ID_DELAY = 20, TMO = 100;
  logic clk = 0, rst_n = 0;
  logic [7:0] rx_data = 0, tx_data;
  logic rx_valid = 0, tx_valid, tx_ready;
  logic bus_req, bus_grant, done, mem_re, mem_rvalid, power_hold;
  logic [5:0] mem_addr;
  logic [7:0] mem_rdata;
  logic [6:0] fill = 7'd10, points = 7'd3;
  logic ev_id_retry, ev_abandon, ev_repeat;
  int checks = 0, failures = 0;

  process2 #(.ADDR_W(6), .UNIT_ID(8'h2A), .ID_DELAY(ID_DELAY), .ACK_TIMEOUT(TMO)) dut (
    .clk, .rst_n, .rx_data, .rx_valid, .tx_data, .tx_valid, .tx_ready,
    .bus_req, .bus_grant, .done, .mem_re, .mem_addr, .mem_rdata, .mem_rvalid,
    .fill, .points, .power_hold, .ev_id_retry, .ev_abandon, .ev_repeat);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  // transmitter model
  int busy = 0;
  logic [7:0] sent [$];
  int t_sent [$];
  assign tx_ready = (busy == 0);
  always @(posedge clk) begin
    if (rst_n && tx_valid && tx_ready) begin sent.push_back(tx_data); t_sent.push_back(cyc); busy <= 6; end
    else if (busy > 0) busy <= busy - 1;
  end
  // memory model
  logic [7:0] mem [64];
  always @(posedge clk) begin
    mem_rvalid <= mem_re;
    if (mem_re) mem_rdata <= mem[mem_addr];
  end
  // bus controller model
  logic [2:0] req_d = 0;
  always @(posedge clk) req_d <= {req_d[1:0], bus_req};
  assign bus_grant = bus_req && req_d[2];

  int n_retry = 0, n_abandon = 0, n_repeat = 0, n_done = 0;
  always @(posedge clk) if (rst_n) begin
    n_retry   += int'(ev_id_retry);
    n_abandon += int'(ev_abandon);
    n_repeat  += int'(ev_repeat);
    n_done    += int'(done);
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic rx(logic [7:0] b);
    @(negedge clk); rx_data = b; rx_valid = 1;
    @(negedge clk); rx_valid = 0;
    repeat (3) @(negedge clk);
  endtask
  task automatic rx_str(string s);
    foreach (s[i]) rx(s[i]);
  endtask
  task automatic wait_sent(int n);
    int guard = 0;
    while (sent.size() < n && guard < 5000) begin @(posedge clk); guard++; end
    repeat (8) @(posedge clk);
  endtask

  initial begin
    int t_free;
    for (int i = 0; i < 64; i++) mem[i] = 8'(8'h30 + i);
    repeat (3) @(posedge clk); rst_n = 1;
    check(power_hold, "power held after power-up");

    // 1: no acknowledge at all
    rx_str("xxfre");
    rx("e"); t_free = cyc - 3;   // clock edge that took the final 'e'
    wait_sent(1);
    check(sent.size() == 1 && sent[0] == 8'h2A, "ID sent after free");
    // delay count, one cycle to hand the byte over, one for the handshake
    check(t_sent[0] - t_free == ID_DELAY + 3,
          $sformatf("ID after %0d cycles (delay %0d)", t_sent[0] - t_free, ID_DELAY));
    repeat (TMO + 20) @(posedge clk);
    check(sent.size() == 2 && sent[1] == 8'h2A && n_retry == 1, "ID sent again once");
    repeat (TMO + 20) @(posedge clk);
    check(n_abandon == 1 && sent.size() == 2 && !bus_req, "gave up after second try");
    rx_str("fre");  // not yet the word
    repeat (ID_DELAY + 20) @(posedge clk);
    check(sent.size() == 2, "no ID without the whole word");

    // 2: acknowledged, download, no final answer
    sent.delete(); t_sent.delete();
    rx("e");
    wait_sent(1);
    rx(BS_ACK);
    wait_sent(13);
    check(sent.size() == 13, $sformatf("ID + 10 bytes + 2 count bytes, got %0d", sent.size()));
    for (int i = 0; i < 10; i++) check(sent[1+i] == mem[i], $sformatf("download byte %0d", i));
    check(sent[11] == 8'h00 && sent[12] == 8'h03, "point count 3, MSB first");
    check(bus_req, "memory held while waiting for the answer");
    repeat (TMO + 20) @(posedge clk);
    check(!bus_req && n_abandon == 2 && power_hold, "no answer: memory released, power kept");

    // 3: NAK then ACK
    sent.delete(); t_sent.delete();
    fill = 7'd5; points = 7'd1;
    rx_str("free");
    wait_sent(1);
    rx(BS_ACK);
    wait_sent(8);
    check(sent.size() == 8, "ID + 5 + 2");
    rx(BS_NAK);
    wait_sent(15);
    check(n_repeat == 1 && sent.size() == 15, "download repeated after mismatch");
    for (int i = 0; i < 5; i++) check(sent[8+i] == mem[i], $sformatf("repeat byte %0d", i));
    check(sent[13] == 8'h00 && sent[14] == 8'h01, "count repeated");
    rx(BS_ACK);
    repeat (5) @(posedge clk);
    check(n_done == 1 && !power_hold && !bus_req, "done, unit switches off");
    rx_str("free");
    repeat (ID_DELAY + 40) @(posedge clk);
    check(sent.size() == 15, "finished process stays quiet");

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
