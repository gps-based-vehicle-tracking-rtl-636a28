// process2: Process II of the tracking unit - the download of the stored
// readings to the base station over the transceiver link.
//
// Protocol, as described for the system:
//   1. Wait until the base station's word "free" arrives (four bytes).
//   2. Wait ID_DELAY cycles - each unit gets its own delay, which is how the
//      units in range share the channel by priority - then send UNIT_ID.
//   3. Wait up to ACK_TIMEOUT cycles for the acknowledge. Without it, send
//      the ID once more and wait again; still nothing: back to step 1.
//   4. With it, request the shared memory (bus_req). The bus controller
//      interrupts Process 1, which stops writing, and grants the memory.
//   5. Send the stored bytes, address 0 to fill-1, then the number of
//      readings (points) as two bytes, most significant first.
//   6. The base station compares the count with what it received and answers
//      BS_ACK (match) or BS_NAK (mismatch). On a mismatch the whole download
//      is repeated from step 5. On a match, done pulses (the controller
//      empties the memory), power_hold falls - the output that holds the
//      unit's power relay, low meaning "switch the unit off" - and the
//      process stays finished until the next reset (next power-up).
//      No answer within ACK_TIMEOUT: the bus is released with the data kept
//      and the process returns to step 1.
//
// Interface: byte streams from/to the transceiver UART (rx_valid strobe;
// tx_valid/tx_ready handshake), a read port to the memory controller with a
// one-cycle read latency. fill and points are sampled when the bus is
// granted (Process 1 has then stopped). Design choices: the reply codes, the
// two-byte count, the timeout values and the behaviour on a missing final
// answer, none of which the description gives.
module process2
  import vts_pkg::*;
#(
  parameter int unsigned ADDR_W      = 12,
  parameter logic [7:0]  UNIT_ID     = 8'h01,
  parameter int unsigned ID_DELAY    = 10_420,      // 1 ms at 10 MHz
  parameter int unsigned ACK_TIMEOUT = 1_000_000    // 100 ms at 10 MHz
) (
  input  logic              clk,
  input  logic              rst_n,
  // transceiver link
  input  logic [7:0]        rx_data,
  input  logic              rx_valid,
  output logic [7:0]        tx_data,
  output logic              tx_valid,
  input  logic              tx_ready,
  // bus controller
  output logic              bus_req,
  input  logic              bus_grant,
  output logic              done,
  // memory read port
  output logic              mem_re,
  output logic [ADDR_W-1:0] mem_addr,
  input  logic [7:0]        mem_rdata,
  input  logic              mem_rvalid,
  // what Process 1 stored
  input  logic [ADDR_W:0]   fill,
  input  logic [ADDR_W:0]   points,
  // power relay hold (D2 side of the power switch)
  output logic              power_hold,
  // event pulses for monitoring
  output logic              ev_id_retry,
  output logic              ev_abandon,
  output logic              ev_repeat
);
  typedef enum logic [3:0] {
    S_FREE, S_DELAY, S_ID, S_ACK, S_REQ, S_READ, S_RWAIT, S_SEND,
    S_CNT_HI, S_CNT_LO, S_RESULT, S_DONE
  } st_t;
  localparam int unsigned TW = $clog2((ID_DELAY > ACK_TIMEOUT ? ID_DELAY : ACK_TIMEOUT) + 1);

  st_t             st;
  logic [23:0]     last3;       // last three bytes received
  logic [TW-1:0]   timer;
  logic            second_try;
  logic [ADDR_W:0] addr, len;
  logic [15:0]     npts;
  logic [7:0]      byte_q;

  assign mem_addr = addr[ADDR_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_FREE;
      last3       <= '0;
      timer       <= '0;
      second_try  <= 1'b0;
      addr        <= '0;
      len         <= '0;
      npts        <= '0;
      byte_q      <= '0;
      tx_data     <= '0;
      tx_valid    <= 1'b0;
      bus_req     <= 1'b0;
      done        <= 1'b0;
      mem_re      <= 1'b0;
      power_hold  <= 1'b1;
      ev_id_retry <= 1'b0;
      ev_abandon  <= 1'b0;
      ev_repeat   <= 1'b0;
    end else begin
      done        <= 1'b0;
      mem_re      <= 1'b0;
      ev_id_retry <= 1'b0;
      ev_abandon  <= 1'b0;
      ev_repeat   <= 1'b0;
      if (rx_valid) last3 <= {last3[15:0], rx_data};
      if (tx_valid && tx_ready) tx_valid <= 1'b0;

      unique case (st)
        S_FREE: if (rx_valid && {last3, rx_data} == WORD_FREE) begin
          last3      <= '0;
          timer      <= TW'(ID_DELAY);
          second_try <= 1'b0;
          st         <= S_DELAY;
        end
        S_DELAY: if (timer == 0) st <= S_ID;
                 else timer <= timer - 1'b1;
        S_ID: if (!tx_valid && tx_ready) begin
          tx_data  <= UNIT_ID;
          tx_valid <= 1'b1;
          timer    <= TW'(ACK_TIMEOUT);
          st       <= S_ACK;
        end
        S_ACK: begin
          if (rx_valid && rx_data == BS_ACK) begin
            bus_req <= 1'b1;
            st      <= S_REQ;
          end else if (timer == 0) begin
            if (!second_try) begin
              second_try  <= 1'b1;
              ev_id_retry <= 1'b1;
              st          <= S_ID;
            end else begin
              ev_abandon <= 1'b1;
              st         <= S_FREE;
            end
          end else if (!tx_valid) timer <= timer - 1'b1;
        end
        S_REQ: if (bus_grant) begin
          len  <= fill;
          npts <= 16'(points);
          addr <= '0;
          st   <= S_READ;
        end
        S_READ: begin
          if (addr == len) st <= S_CNT_HI;
          else begin
            mem_re <= 1'b1;
            st     <= S_RWAIT;
          end
        end
        S_RWAIT: if (mem_rvalid) begin
          byte_q <= mem_rdata;
          st     <= S_SEND;
        end
        S_SEND: if (!tx_valid && tx_ready) begin
          tx_data  <= byte_q;
          tx_valid <= 1'b1;
          addr     <= addr + 1'b1;
          st       <= S_READ;
        end
        S_CNT_HI: if (!tx_valid && tx_ready) begin
          tx_data  <= npts[15:8];
          tx_valid <= 1'b1;
          st       <= S_CNT_LO;
        end
        S_CNT_LO: if (!tx_valid && tx_ready) begin
          tx_data  <= npts[7:0];
          tx_valid <= 1'b1;
          timer    <= TW'(ACK_TIMEOUT);
          st       <= S_RESULT;
        end
        S_RESULT: begin
          if (rx_valid && rx_data == BS_ACK) begin
            done       <= 1'b1;
            bus_req    <= 1'b0;
            power_hold <= 1'b0;
            st         <= S_DONE;
          end else if (rx_valid && rx_data == BS_NAK) begin
            ev_repeat <= 1'b1;
            addr      <= '0;
            st        <= S_READ;
          end else if (timer == 0) begin
            bus_req    <= 1'b0;
            ev_abandon <= 1'b1;
            st         <= S_FREE;
          end else if (!tx_valid) timer <= timer - 1'b1;
        end
        S_DONE: ;
        default: st <= S_FREE;
      endcase
    end
  end

  // memory is read only while the bus is granted
  a_read_owned: assert property (@(posedge clk) disable iff (!rst_n)
    mem_re |-> bus_grant);
endmodule
