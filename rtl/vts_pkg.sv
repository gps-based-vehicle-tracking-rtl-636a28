// vts_pkg: constants and types shared by the vehicle-tracking SoC.
//
// ASCII codes the sentence detector and the base-station protocol look for,
// the single-byte replies of the base station, and the state types of the
// bus controller. The sentence names (RMC, GGA) and the word "free" follow
// the described system; the reply codes ACK/NAK are this design's choice,
// since the protocol names an acknowledge and a mismatch but not their bytes.
package vts_pkg;

  // characters of the NMEA stream
  localparam logic [7:0] CH_DOLLAR = 8'h24;  // '$' sentence start
  localparam logic [7:0] CH_COMMA  = 8'h2C;  // ',' field separator
  localparam logic [7:0] CH_STAR   = 8'h2A;  // '*' checksum start = end of data
  localparam logic [7:0] CH_SPACE  = 8'h20;
  localparam logic [7:0] CH_CR     = 8'h0D;
  localparam logic [7:0] CH_LF     = 8'h0A;
  localparam logic [7:0] CH_R      = 8'h52;
  localparam logic [7:0] CH_M      = 8'h4D;
  localparam logic [7:0] CH_C      = 8'h43;
  localparam logic [7:0] CH_G      = 8'h47;
  localparam logic [7:0] CH_A      = 8'h41;

  // base-station protocol
  localparam logic [31:0] WORD_FREE = 32'h66_72_65_65; // "free"
  localparam logic [7:0]  BS_ACK    = 8'h06;           // acknowledge / download good
  localparam logic [7:0]  BS_NAK    = 8'h15;           // point count mismatch

  // NMEA field numbers (field 1 follows the sentence name)
  // RMC: 1 time, 2 validity, 3 latitude, 4 N/S, 5 longitude, 6 E/W,
  //      7 speed, 8 course, 9 date
  localparam logic [15:0] RMC_FIVE = 16'b0000_0010_1010_1010; // fields 1,3,5,7,9

  // which process owns the shared memory
  typedef enum logic [1:0] {
    BUS_P1    = 2'd0,   // Process 1 may write
    BUS_STOP  = 2'd1,   // interrupt raised, waiting for P1 to stop
    BUS_P2    = 2'd2,   // Process 2 may read
    BUS_CLEAR = 2'd3    // second interrupt: memory emptied, P1 restarts
  } bus_state_t;

endpackage
