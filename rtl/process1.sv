// process1: Process I of the tracking unit. It reads the GPS byte stream,
// finds the sentences it needs, and writes the chosen fields of each one into
// the shared memory as one "reading".
//
// Sentence detection follows the described flow chart: the detector waits
// for the letters R,M,C or G,G,A in consecutive bytes. After a wrong letter
// it tests the same byte again as a possible first letter, in the order the
// flow chart draws: after R or RM only G is retried, after G or GG only R.
// When a name is complete the flag C is set and the unit captures that
// sentence. Fields are counted by commas; field k is stored when bit k of
// RMC_FIELDS (or GGA_FIELDS) is set. The characters of the stored fields go to
// memory one per byte, and the comma that closes a stored field is stored too
// when a later field of the same sentence is also stored, so that a reading
// is "time,latitude,longitude,speed,date" - 43 bytes (344 bits) for the
// sample sentence, the size the system's storage budget is based on. Spaces
// are dropped. '*' (start of the checksum), CR or LF ends the sentence and
// commits the reading: the point count rises if anything was written. A '$'
// inside a sentence, a full memory or a stop request discards the partial
// reading by moving the write pointer back to where the reading began.
//
// Timing: one byte per clock, no back-pressure (the stream may be a byte per
// cycle); the memory write for a byte is issued on the next cycle (registered
// mem_we/mem_addr/mem_wdata). stop_req is the interrupt of the bus
// controller; stopped answers it once no write is pending. clear (from the
// controller, after a good download) empties the memory: write pointer,
// point count, the full flag and C go to zero.
//
// Design choices where the description is silent: the stored-field masks
// (RMC default: time, latitude, longitude, speed and date; GGA default:
// nothing, since RMC already carries all five and one reading is budgeted at
// 43 locations), the commas inside a reading, the discard rules and the
// checksum left unchecked.
module process1
  import vts_pkg::*;
#(
  parameter int unsigned  ADDR_W     = 12,
  parameter logic [15:0]  RMC_FIELDS = RMC_FIVE,
  parameter logic [15:0]  GGA_FIELDS = 16'h0000
) (
  input  logic              clk,
  input  logic              rst_n,
  // GPS byte stream
  input  logic [7:0]        rx_data,
  input  logic              rx_valid,
  // bus controller
  input  logic              stop_req,
  output logic              stopped,
  input  logic              clear,
  // memory write port
  output logic              mem_we,
  output logic [ADDR_W-1:0] mem_addr,
  output logic [7:0]        mem_wdata,
  // status
  output logic              c_flag,
  output logic [ADDR_W:0]   fill,       // bytes stored (committed readings)
  output logic [ADDR_W:0]   points,     // readings stored
  output logic              full,       // a reading was dropped for lack of room
  output logic              sentence_hit, // pulse: RMC or GGA name completed
  output logic              discard_hit   // pulse: a partial reading was dropped
);
  typedef enum logic [2:0] {D_IDLE, D_R, D_RM, D_G, D_GG, D_CAP} det_t;
  localparam logic [ADDR_W:0] DEPTH = (ADDR_W+1)'(2**ADDR_W);

  det_t            st;
  logic            is_rmc;       // sentence being captured is RMC (else GGA)
  logic [3:0]      field;
  logic [ADDR_W:0] wr_ptr;       // next free location
  logic [ADDR_W:0] rec_start;    // where the current reading began

  logic [15:0] mask;
  logic        sel_field, more_after;
  assign mask      = is_rmc ? RMC_FIELDS : GGA_FIELDS;
  assign sel_field = mask[field];
  // another stored field follows this one in the same sentence
  assign more_after = |(mask >> (field + 4'd1));

  assign fill = rec_start;

  // next detector state for a byte while not capturing (flow chart order)
  function automatic det_t detect(det_t s, logic [7:0] ch);
    unique case (s)
      D_R:     detect = (ch == CH_M) ? D_RM : (ch == CH_G) ? D_G : D_IDLE;
      D_RM:    detect = (ch == CH_C) ? D_CAP : (ch == CH_G) ? D_G : D_IDLE;
      D_G:     detect = (ch == CH_G) ? D_GG : (ch == CH_R) ? D_R : D_IDLE;
      D_GG:    detect = (ch == CH_A) ? D_CAP : (ch == CH_R) ? D_R : D_IDLE;
      default: detect = (ch == CH_R) ? D_R : (ch == CH_G) ? D_G : D_IDLE;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= D_IDLE;
      is_rmc       <= 1'b0;
      field        <= '0;
      wr_ptr       <= '0;
      rec_start    <= '0;
      points       <= '0;
      c_flag       <= 1'b0;
      full         <= 1'b0;
      stopped      <= 1'b0;
      mem_we       <= 1'b0;
      mem_addr     <= '0;
      mem_wdata    <= '0;
      sentence_hit <= 1'b0;
      discard_hit  <= 1'b0;
    end else begin
      mem_we       <= 1'b0;
      sentence_hit <= 1'b0;
      discard_hit  <= 1'b0;
      if (clear) begin
        st        <= D_IDLE;
        wr_ptr    <= '0;
        rec_start <= '0;
        points    <= '0;
        c_flag    <= 1'b0;
        full      <= 1'b0;
      end else if (stop_req) begin
        // interrupt: stop writing, drop a partial reading
        if (st == D_CAP && wr_ptr != rec_start) discard_hit <= 1'b1;
        st      <= D_IDLE;
        wr_ptr  <= rec_start;
        stopped <= !mem_we;
      end else begin
        stopped <= 1'b0;
        if (rx_valid) begin
          if (st != D_CAP) begin
            st <= detect(st, rx_data);
            if (detect(st, rx_data) == D_CAP) begin
              is_rmc       <= (st == D_RM);
              field        <= '0;
              c_flag       <= 1'b1;
              sentence_hit <= 1'b1;
            end
          end else if (rx_data == CH_STAR || rx_data == CH_CR || rx_data == CH_LF) begin
            // end of data: commit the reading
            st        <= D_IDLE;
            rec_start <= wr_ptr;
            if (wr_ptr != rec_start) points <= points + 1'b1;
          end else if (rx_data == CH_DOLLAR) begin
            // new sentence before the old one ended: drop it
            st     <= D_IDLE;
            wr_ptr <= rec_start;
            if (wr_ptr != rec_start) discard_hit <= 1'b1;
          end else if (rx_data != CH_SPACE) begin
            if (rx_data == CH_COMMA && field != 4'd15) field <= field + 1'b1;
            if (sel_field && (rx_data != CH_COMMA || more_after)) begin
              if (wr_ptr == DEPTH) begin
                // no room: drop the partial reading, wait for the next name
                st          <= D_IDLE;
                wr_ptr      <= rec_start;
                full        <= 1'b1;
                discard_hit <= 1'b1;
              end else begin
                mem_we    <= 1'b1;
                mem_addr  <= wr_ptr[ADDR_W-1:0];
                mem_wdata <= rx_data;
                wr_ptr    <= wr_ptr + 1'b1;
              end
            end
          end
        end
      end
    end
  end

  // once stopped, Process 1 issues no memory write
  a_no_write_when_stopped: assert property (@(posedge clk) disable iff (!rst_n)
    stopped |-> !mem_we);
endmodule
