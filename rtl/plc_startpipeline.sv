// plc_startpipeline: start-pipeline of the pixel level controller.
//
// Keeps track of which of stages 2, 3 and 4 of the process unit hold a
// pixel-cycle, so that a new pixel-cycle can enter stage 1 before the
// previous one has finished: up to four pixel-cycles are in flight, one per
// stage, and they always keep their order. A pixel-cycle moves on from a
// stage in the clock its instruction completes there (doneN); a stage
// whose pixel-cycle cannot move keeps it.
//
// Timing: v2..v4 are registers updated at the clock edge from the issue and
// done strobes of the same clock. The role follows the paper; this valid-bit
// form is this design's choice.
module plc_startpipeline (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic issue,   // stage 1 starts a pixel-cycle
  input  logic done2,   // stage 2 finished its LOAD/SHIFT
  input  logic done3,   // stage 3 wrote the result register
  input  logic done4,   // stage 4 stored the result in the OIM
  output logic v2,
  output logic v3,
  output logic v4,
  output logic empty
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; v3 <= 1'b0; v4 <= 1'b0;
    end else if (start) begin
      v2 <= 1'b0; v3 <= 1'b0; v4 <= 1'b0;
    end else begin
      v2 <= (v2 && !done2) || issue;
      v3 <= (v3 && !done3) || done2;
      v4 <= (v4 && !done4) || done3;
    end
  end

  assign empty = !v2 && !v3 && !v4;

  // A stage can only finish an instruction it holds, and a pixel-cycle can
  // only move into a stage that is free or being freed.
  a_done2: assert property (@(posedge clk) disable iff (!rst_n) done2 |-> v2);
  a_done3: assert property (@(posedge clk) disable iff (!rst_n) done3 |-> v3);
  a_done4: assert property (@(posedge clk) disable iff (!rst_n) done4 |-> v4);
  a_issue: assert property (@(posedge clk) disable iff (!rst_n) issue |-> (!v2 || done2));
endmodule
