// sram: the shared memory of the tracking unit, 2**ADDR_W words of DATA_W
// bits (4096 x 8 = 4 KB at the defaults, addressed by a 12-bit bus).
//
// One port, synchronous: when en is high on a clock edge, we=1 writes wdata
// at addr, we=0 reads addr and rdata holds the word from the next cycle on.
// rdata keeps its value while en is low. Written as an array so that a
// synthesis tool maps it to on-chip RAM; contents are not reset. The size is
// the described one; the single synchronous port is this design's choice.
module sram #(
  parameter int unsigned ADDR_W = 12,
  parameter int unsigned DATA_W = 8
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  logic [DATA_W-1:0] wdata,
  output logic [DATA_W-1:0] rdata
);
  logic [DATA_W-1:0] mem [2**ADDR_W];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
