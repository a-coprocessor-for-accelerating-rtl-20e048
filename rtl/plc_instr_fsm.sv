// plc_instr_fsm: instructions FSM of the pixel level controller.
//
// Executes the instruction each stage holds and turns it into the control
// signals of the process unit. It requests the shared resources from the
// arbiter and drives a stage only when its resources are granted:
//   stage 1 SCAN   : s1_issue  (advance the pixel position counters, read
//                    the first column into the preload register)
//   stage 2 LOAD   : one s2_step clock per column (3 for CON_8, 9 for
//                    a line along the scan), all but the last with s2_rd_next
//           SHIFT  : one s2_step clock
//   stage 3 EXEC   : s3_exec  (pixel operation into the result register)
//   stage 4 STORE  : s4_store (result register into the OIM, not while the
//                    OIM is full)
// Its state is the number of columns the stage 2 instruction still has to
// take. Timing: the control signals are combinational in the clock they act;
// the column count updates at the edge. Follows the paper's description of
// the block; the instruction encoding is this design's choice.
module plc_instr_fsm
  import ae_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       offer,     // control FSM offers a pixel-cycle
  input  logic [3:0] cols,      // its stage 2 column count
  input  logic       oim_full,
  input  logic       v2,
  input  logic       v4,
  // arbiter
  output logic       s2_more,
  output logic       s4_done,
  input  logic       g_res_s3,
  input  logic       g_mat_s2,
  input  logic       g_iim_s2,
  input  logic       g_iim_s1,
  // results
  output logic       done2,
  output logic       done3,
  output pu_ctrl_t   ctrl
);
  logic [3:0] cols_left;

  always_comb begin
    s2_more        = (cols_left > 4'd1);
    s4_done        = v4 && !oim_full;
    done3          = g_res_s3;
    done2          = g_mat_s2 && !s2_more;
    ctrl.s1_issue  = g_iim_s1;
    ctrl.s2_step   = g_mat_s2;
    ctrl.s2_rd_next = g_iim_s2;
    ctrl.s3_exec   = g_res_s3;
    ctrl.s4_store  = s4_done;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                cols_left <= '0;
    else if (start)            cols_left <= '0;
    else if (g_iim_s1)         cols_left <= cols;
    else if (g_mat_s2)         cols_left <= cols_left - 4'd1;
  end

  a_step_has_column: assert property (@(posedge clk) disable iff (!rst_n)
    ctrl.s2_step |-> (cols_left != 4'd0));
  // offer is only a request; issue never happens without it
  a_issue_offered: assert property (@(posedge clk) disable iff (!rst_n)
    ctrl.s1_issue |-> offer);
  a_s2_valid: assert property (@(posedge clk) disable iff (!rst_n)
    ctrl.s2_step |-> v2);
endmodule
