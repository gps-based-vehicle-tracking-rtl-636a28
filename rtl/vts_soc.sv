// vts_soc: the mobile unit of a GPS vehicle tracker on one chip. It logs the
// position, speed, date and time from the GPS receiver's NMEA sentences into
// a 4 KB on-chip memory and, when the vehicle is back at its base station,
// downloads the log over the radio link and then switches the unit off.
//
// Structure (the block diagram of the standalone system):
//   gps_rxd --uart_rx--> process1 --write--+
//                                          mem_ctrl (muxes) -- sram 4096x8
//   bs_rxd  --uart_rx--> process2 --read---+
//   bs_txd <--uart_tx--- process2
//   i2c_ctrl decides which process owns the memory and sends the
//   interrupts between them.
// Process 1 runs until Process 2 has been acknowledged by the base station;
// the two never use the memory at the same time.
//
// Outputs besides the serial lines: power_hold (drives the D2 side of the
// ignition/power relay circuit; it falls when a download has been
// confirmed), flag C, the point count, the memory-full flag and event pulses
// for monitoring. Parameters: CLKS_PER_BIT for both links (10 MHz / 9600 bps
// assumed), ADDR_W of the memory (12 as described), the unit's ID, its
// priority delay and the acknowledge timeout (assumed values).
module vts_soc
  import vts_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 1042,
  parameter int unsigned ADDR_W       = 12,
  parameter logic [7:0]  UNIT_ID      = 8'h01,
  parameter int unsigned ID_DELAY     = 10_420,
  parameter int unsigned ACK_TIMEOUT  = 1_000_000,
  parameter logic [15:0] RMC_FIELDS   = RMC_FIVE,
  parameter logic [15:0] GGA_FIELDS   = 16'h0000
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            gps_rxd,
  input  logic            bs_rxd,
  output logic            bs_txd,
  output logic            power_hold,
  output logic            c_flag,
  output logic            mem_full,
  output logic [ADDR_W:0] points,
  output logic [ADDR_W:0] fill,
  output bus_state_t      bus_state,
  output logic            ev_sentence,   // RMC/GGA name found
  output logic            ev_discard,    // partial reading dropped
  output logic            ev_id_retry,   // ID sent a second time
  output logic            ev_abandon,    // base station did not answer
  output logic            ev_repeat,     // download repeated after mismatch
  output logic            ev_done,       // download confirmed, memory emptied
  output logic            ev_frame_err   // framing error on either link
);
  logic [7:0] gps_byte, bs_byte, tx_byte;
  logic       gps_valid, bs_valid, tx_valid, tx_ready;
  logic       gps_ferr, bs_ferr;

  logic              p1_stop, p1_stopped, p1_clear;
  logic              p2_req, p2_grant, p2_done, sel;
  logic              p1_we;
  logic [ADDR_W-1:0] p1_addr, p2_addr;
  logic [7:0]        p1_wdata, p2_rdata, dropped;
  logic              p2_re, p2_rvalid;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_gps_rx (
    .clk, .rst_n, .rxd(gps_rxd), .data(gps_byte), .valid(gps_valid), .frame_err(gps_ferr));

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_bs_rx (
    .clk, .rst_n, .rxd(bs_rxd), .data(bs_byte), .valid(bs_valid), .frame_err(bs_ferr));

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_bs_tx (
    .clk, .rst_n, .data(tx_byte), .valid(tx_valid), .ready(tx_ready), .txd(bs_txd));

  process1 #(.ADDR_W(ADDR_W), .RMC_FIELDS(RMC_FIELDS), .GGA_FIELDS(GGA_FIELDS)) u_p1 (
    .clk, .rst_n,
    .rx_data(gps_byte), .rx_valid(gps_valid),
    .stop_req(p1_stop), .stopped(p1_stopped), .clear(p1_clear),
    .mem_we(p1_we), .mem_addr(p1_addr), .mem_wdata(p1_wdata),
    .c_flag, .fill, .points, .full(mem_full),
    .sentence_hit(ev_sentence), .discard_hit(ev_discard));

  process2 #(.ADDR_W(ADDR_W), .UNIT_ID(UNIT_ID), .ID_DELAY(ID_DELAY),
             .ACK_TIMEOUT(ACK_TIMEOUT)) u_p2 (
    .clk, .rst_n,
    .rx_data(bs_byte), .rx_valid(bs_valid),
    .tx_data(tx_byte), .tx_valid, .tx_ready,
    .bus_req(p2_req), .bus_grant(p2_grant), .done(p2_done),
    .mem_re(p2_re), .mem_addr(p2_addr), .mem_rdata(p2_rdata), .mem_rvalid(p2_rvalid),
    .fill, .points,
    .power_hold, .ev_id_retry, .ev_abandon, .ev_repeat);

  i2c_ctrl u_i2c (
    .clk, .rst_n,
    .p2_req, .p2_done, .p1_stopped,
    .p1_stop, .p1_clear, .p2_grant, .sel, .state(bus_state));

  mem_ctrl #(.ADDR_W(ADDR_W)) u_memc (
    .clk, .rst_n, .sel,
    .p1_we, .p1_addr, .p1_wdata,
    .p2_re, .p2_addr, .p2_rdata, .p2_rvalid, .dropped);

  assign ev_done      = p2_done;
  assign ev_frame_err = gps_ferr | bs_ferr;

  // the memory controller never has to drop an access in this wiring
  a_no_drop: assert property (@(posedge clk) disable iff (!rst_n) dropped == 8'd0);
endmodule
