// plc_arbiter: resource arbiter of the pixel level controller.
//
// Pixel-cycles in different stages share three resources of the process
// unit: the IIM read port together with the preload register it fills, the
// matrix register, and the result register. The arbiter grants each
// resource so that two stages never use it at once, always favouring the
// older pixel-cycle (the higher stage):
//   IIM port/preload: held by stage 2 while its LOAD still has columns to
//     read; stage 1 may read only when stage 2 is empty or takes its last
//     column in this clock.
//   matrix register: stage 2 may overwrite it only when stage 3 is empty or
//     reads it in this clock.
//   result register: stage 3 may overwrite it only when stage 4 is empty or
//     stores it in this clock.
// Purely combinational. The arbiter's purpose follows the paper; the
// resources and the fixed priority are this design's choice.
module plc_arbiter (
  input  logic s1_req,        // stage 1 wants to start a pixel-cycle
  input  logic s2_valid,
  input  logic s2_more,       // stage 2 has more than one column to take
  input  logic s3_valid,
  input  logic s4_valid,
  input  logic s4_done,       // stage 4 stores in this clock
  output logic g_res_s3,      // stage 3 may write the result register
  output logic g_mat_s2,      // stage 2 may write the matrix register
  output logic g_iim_s2,      // stage 2 reads the next column
  output logic g_iim_s1       // stage 1 reads its first column
);
  logic s3_done, s2_done;

  always_comb begin
    g_res_s3 = s3_valid && (!s4_valid || s4_done);
    s3_done  = g_res_s3;
    g_mat_s2 = s2_valid && (!s3_valid || s3_done);
    g_iim_s2 = g_mat_s2 && s2_more;
    s2_done  = g_mat_s2 && !s2_more;
    g_iim_s1 = s1_req && (!s2_valid || s2_done);
  end

  a_one_reader: assert final (!(g_iim_s1 && g_iim_s2));
endmodule
