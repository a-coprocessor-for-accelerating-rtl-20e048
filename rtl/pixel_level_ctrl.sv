// pixel_level_ctrl: pixel level controller (PLC), the control path of the
// AddressEngine processor.
//
// Generates, for every pixel-cycle, one instruction per stage of the
// four-stage process unit and lets pixel-cycles overlap: while one pixel's
// result is stored, the next is computed, the one after is loaded into the
// matrix register and a fourth starts scanning. It is made of the four parts
// the paper names:
//   control FSM    - start/stop, which pixel-cycle to offer (plc_control_fsm)
//   startpipeline  - which stage holds a pixel-cycle (plc_startpipeline)
//   arbiter        - shared IIM port, matrix and result register (plc_arbiter)
//   instructions FSM - executes the instructions, drives the process unit
//                    (plc_instr_fsm)
// Interface: start/enable from the image level controller, oim_full from the
// OIM, scanner status (all_issued, nx_load) from the process unit; ctrl to the
// process unit; done pulses when the last pixel is in the OIM.
// Timing: steady state one pixel per clock; a line start costs two extra
// clocks for a CON_8 LOAD and eight for the LOAD of a line window along
// the scan; a full OIM or a disable stalls the pipe.
module pixel_level_ctrl
  import ae_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  logic     enable,
  input  logic     oim_full,
  input  logic     all_issued,
  input  logic     nx_load,
  input  logic [3:0] load_cols,
  output pu_ctrl_t ctrl,
  output logic     running,
  output logic     done,
  output logic     stalled     // a pixel-cycle was held back by enable
);
  logic       offer;
  logic [3:0] cols;
  logic       v2, v3, v4, pipe_empty;
  logic       s2_more, s4_done, done2, done3;
  logic       g_res_s3, g_mat_s2, g_iim_s2, g_iim_s1;

  plc_control_fsm u_ctrl_fsm (
    .clk, .rst_n, .start, .enable, .all_issued, .nx_load, .load_cols, .pipe_empty,
    .offer, .cols, .running, .done
  );

  plc_startpipeline u_startpipe (
    .clk, .rst_n, .start, .issue(ctrl.s1_issue), .done2, .done3,
    .done4(s4_done), .v2, .v3, .v4, .empty(pipe_empty)
  );

  plc_arbiter u_arbiter (
    .s1_req(offer), .s2_valid(v2), .s2_more, .s3_valid(v3), .s4_valid(v4),
    .s4_done, .g_res_s3, .g_mat_s2, .g_iim_s2, .g_iim_s1
  );

  plc_instr_fsm u_instr_fsm (
    .clk, .rst_n, .start, .offer, .cols, .oim_full, .v2, .v4,
    .s2_more, .s4_done, .g_res_s3, .g_mat_s2, .g_iim_s2, .g_iim_s1,
    .done2, .done3, .ctrl
  );

  assign stalled = running && !all_issued && !enable;

endmodule
