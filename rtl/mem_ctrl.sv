// mem_ctrl: the memory controller with its multiplexers. It selects which
// process addresses the shared memory and carries out that process's access.
//
// sel = 0 routes the write port of Process 1 (we, addr, wdata) to the
// memory; sel = 1 routes the read port of Process 2 (re, addr) and returns
// the word one cycle later on p2_rdata with p2_rvalid. An access from the
// process that does not own the memory is dropped and counted in
// dropped (saturating), so a misbehaving process cannot corrupt the other's
// view. The memory is 2**ADDR_W x 8 (4096 x 8 with the 12-bit address of the
// description). The owner-only gating and the drop counter are this design's
// choices; the description only says multiplexers select the addressed
// location and the operation.
module mem_ctrl #(
  parameter int unsigned ADDR_W = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sel,
  // Process 1: writes
  input  logic              p1_we,
  input  logic [ADDR_W-1:0] p1_addr,
  input  logic [7:0]        p1_wdata,
  // Process 2: reads
  input  logic              p2_re,
  input  logic [ADDR_W-1:0] p2_addr,
  output logic [7:0]        p2_rdata,
  output logic              p2_rvalid,
  output logic [7:0]        dropped
);
  logic              en, we;
  logic [ADDR_W-1:0] addr;

  always_comb begin
    if (sel) begin
      en   = p2_re;
      we   = 1'b0;
      addr = p2_addr;
    end else begin
      en   = p1_we;
      we   = 1'b1;
      addr = p1_addr;
    end
  end

  sram #(.ADDR_W(ADDR_W), .DATA_W(8)) u_mem (
    .clk, .en, .we, .addr, .wdata(p1_wdata), .rdata(p2_rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p2_rvalid <= 1'b0;
      dropped   <= '0;
    end else begin
      p2_rvalid <= sel && p2_re;
      if (((sel && p1_we) || (!sel && p2_re)) && dropped != 8'hFF)
        dropped <= dropped + 1'b1;
    end
  end
endmodule
