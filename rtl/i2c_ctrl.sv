// i2c_ctrl: the controller that the description calls the I2C interface of
// the two processes with the shared memory. It makes sure only one process
// uses the memory at a time and sends the interrupts that switch between
// them.
//
// Sequence (a four-state machine, bus_state_t):
//   BUS_P1    Process 1 owns the memory (sel = 0). A request from Process 2
//             (p2_req, raised after the base station acknowledged the unit)
//             raises the interrupt p1_stop.
//   BUS_STOP  p1_stop stays high until Process 1 answers p1_stopped.
//   BUS_P2    Process 2 owns the memory (sel = 1, p2_grant = 1); p1_stop
//             stays high so Process 1 cannot restart. When Process 2 ends
//             with p2_done (download confirmed) the memory is emptied; if it
//             drops p2_req without p2_done the data stay and Process 1
//             resumes where it was.
//   BUS_CLEAR one cycle of p1_clear (the second interrupt: "memory emptied",
//             flag C cleared), then back to BUS_P1.
//
// The description names a serial two-wire I2C bus here, but also counts one
// clock cycle per received byte for the integrated processes and memory; this
// controller keeps the I2C controller's role (arbitration and interrupts)
// with a parallel on-chip bus, which is what allows that rate.
module i2c_ctrl
  import vts_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic p2_req,
  input  logic p2_done,
  input  logic p1_stopped,
  output logic p1_stop,
  output logic p1_clear,
  output logic p2_grant,
  output logic sel,          // 0: Process 1 drives the memory, 1: Process 2
  output bus_state_t state
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= BUS_P1;
    else begin
      unique case (state)
        BUS_P1:    if (p2_req) state <= BUS_STOP;
        BUS_STOP:  if (!p2_req) state <= BUS_P1;
                   else if (p1_stopped) state <= BUS_P2;
        BUS_P2:    if (p2_done) state <= BUS_CLEAR;
                   else if (!p2_req) state <= BUS_P1;
        BUS_CLEAR: state <= BUS_P1;
      endcase
    end
  end

  assign p1_stop  = (state == BUS_STOP) || (state == BUS_P2);
  assign p2_grant = (state == BUS_P2);
  assign sel      = (state == BUS_P2);
  assign p1_clear = (state == BUS_CLEAR);

  // the memory is given to Process 2 only after Process 1 has stopped
  a_grant_after_stop: assert property (@(posedge clk) disable iff (!rst_n)
    $rose(p2_grant) |-> $past(p1_stopped));
  a_one_owner: assert property (@(posedge clk) disable iff (!rst_n)
    !(p2_grant && !p1_stop));
endmodule
