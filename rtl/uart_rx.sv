// uart_rx: asynchronous serial receiver, 8 data bits, no parity, one stop
// bit (the NMEA default of 9600 bps, 8N1).
//
// The line passes a two-flop synchronizer. A falling edge starts a frame; the
// start bit is checked again half a bit later, then each data bit (LSB first)
// is sampled in the middle of its bit time and the stop bit likewise. At the
// stop bit the byte is presented on data with a one-cycle valid strobe;
// frame_err pulses instead of valid if the stop bit is low. A start bit that
// is gone at mid-bit is taken as a glitch. CLKS_PER_BIT = clock / baud; the
// default assumes a 10 MHz clock. Framing follows the described GPS link, the
// sampling scheme is this design's choice.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 1042
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic [7:0] data,
  output logic       valid,
  output logic       frame_err
);
  typedef enum logic [1:0] {IDLE, START, DATA, STOP} st_t;
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  st_t           st;
  logic [CW-1:0] cnt;
  logic [2:0]    bitn;
  logic [1:0]    sync;
  logic          rx;

  assign rx = sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync      <= 2'b11;
      st        <= IDLE;
      cnt       <= '0;
      bitn      <= '0;
      data      <= '0;
      valid     <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      sync      <= {sync[0], rxd};
      valid     <= 1'b0;
      frame_err <= 1'b0;
      unique case (st)
        IDLE: if (!rx) begin
          st  <= START;
          cnt <= CW'(CLKS_PER_BIT / 2);
        end
        START: if (cnt == 0) begin
          if (!rx) begin
            st   <= DATA;
            cnt  <= CW'(CLKS_PER_BIT - 1);
            bitn <= '0;
          end else st <= IDLE;
        end else cnt <= cnt - 1'b1;
        DATA: if (cnt == 0) begin
          data <= {rx, data[7:1]};
          cnt  <= CW'(CLKS_PER_BIT - 1);
          if (bitn == 3'd7) st <= STOP;
          bitn <= bitn + 1'b1;
        end else cnt <= cnt - 1'b1;
        STOP: if (cnt == 0) begin
          valid     <= rx;
          frame_err <= !rx;
          st        <= IDLE;
        end else cnt <= cnt - 1'b1;
      endcase
    end
  end
endmodule
