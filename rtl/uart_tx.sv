// uart_tx: asynchronous serial transmitter, 8 data bits, no parity, one stop
// bit, LSB first, line idle high.
//
// A byte is taken when valid and ready are both high on a clock edge; ready
// is low from then until the stop bit has been on the line for a full bit
// time, so one frame takes 10 * CLKS_PER_BIT cycles. The default
// CLKS_PER_BIT assumes a 10 MHz clock and 9600 bps. The valid/ready
// handshake is this design's choice.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 1042
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] data,
  input  logic       valid,
  output logic       ready,
  output logic       txd
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  logic [8:0]    shreg;   // stop, data[7:0] still to send
  logic [3:0]    nbits;   // bits still to send
  logic [CW-1:0] cnt;

  assign ready = (nbits == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg <= '1;
      nbits <= '0;
      cnt   <= '0;
      txd   <= 1'b1;
    end else if (nbits == 0) begin
      if (valid) begin
        shreg <= {1'b1, data};
        nbits <= 4'd10;
        cnt   <= CW'(CLKS_PER_BIT - 1);
        txd   <= 1'b0;
      end
    end else if (cnt == 0) begin
      nbits <= nbits - 1'b1;
      shreg <= {1'b1, shreg[8:1]};
      txd   <= (nbits == 1) ? 1'b1 : shreg[0];
      cnt   <= CW'(CLKS_PER_BIT - 1);
    end else begin
      cnt <= cnt - 1'b1;
    end
  end
endmodule
