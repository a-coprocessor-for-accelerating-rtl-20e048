// plc_control_fsm: control FSM of the pixel level controller.
//
// Decides, clock by clock, whether a new pixel-cycle may start and which
// instruction its stage 2 gets. It is started by the image level controller
// and offers a pixel-cycle while that controller enables it (neighbourhood in
// the IIM, room in the OIM) and the scanner has pixels left. The stage 2
// instruction is a LOAD (fill the window from scratch: three columns for
// CON_8, nine for a line window along the scan) at the start of a line,
// and a SHIFT (one new column) otherwise; in CON_0, a line window across
// the scan and inter mode every pixel-cycle
// reads one column. When the last pixel-cycle has
// left stage 4 it pulses done and returns to idle.
//
// Timing: offer and cols are combinational from the state and inputs; the
// state changes at the clock edge. The FSM's role follows the paper; its
// states are this design's choice.
module plc_control_fsm
  import ae_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       enable,      // from the image level controller
  input  logic       all_issued,  // scanner has passed the last pixel
  input  logic       nx_load,     // next pixel-cycle starts a line with a LOAD
  input  logic [3:0] load_cols,   // columns of a LOAD (3 for CON_8, 9 for a line along the scan)
  input  logic       pipe_empty,  // no pixel-cycle in stages 2..4
  output logic       offer,       // a pixel-cycle may start now
  output logic [3:0] cols,        // columns its stage 2 reads
  output logic       running,
  output logic       done
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state, state_n;

  always_comb begin
    state_n = state;
    done    = 1'b0;
    case (state)
      S_IDLE:  if (start) state_n = S_RUN;
      S_RUN:   if (all_issued) state_n = S_DRAIN;
      S_DRAIN: if (pipe_empty) begin state_n = S_IDLE; done = 1'b1; end
      default: state_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else        state <= state_n;
  end

  assign offer   = (state == S_RUN) && !all_issued && enable;
  assign cols    = nx_load ? load_cols : 4'd1;
  assign running = (state != S_IDLE);

endmodule
