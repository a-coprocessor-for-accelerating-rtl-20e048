// txu_out: output transmission unit of the AddressEngine.
//
// Moves result pixels from the output intermediate memory to the result
// area of the board memory. Unlike the input side, both 32-bit halves of a
// pixel go to the same bank one after the other (lower half Y,U,V at word
// 2n, upper half Alfa,Aux at word 2n+1), so the PC reads the result already
// in pixel order. Results are written to Res_Block_A (bank 4) first. When
// switch_req is raised (the input image is completely in the board memory
// and the PCI bus is free), the unit switches to Res_Block_B (bank 5) at the
// next pixel boundary, once per image, and reports how many pixels
// Res_Block_A holds.
//
// Interface: oim_empty/oim_data/oim_pop to the OIM (show-ahead FIFO), one
// write port per result bank. Timing: two clocks per pixel; the pixel is
// popped in the second clock. a_count is valid from the switched pulse on,
// total counts every pixel written since start. The bank layout and the
// single switch follow the paper; the exact moment of the switch is this
// design's choice.
module txu_out
  import ae_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              switch_req,
  output logic              switched,     // pulse: now writing Res_Block_B
  output logic [17:0]       a_count,      // pixels in Res_Block_A
  output logic [17:0]       total,        // pixels written since start
  // OIM read side
  input  logic              oim_empty,
  input  pixel_t            oim_data,
  output logic              oim_pop,
  // result banks
  output logic [ZBT_AW-1:0] res_addr,
  output logic              res_we_a,
  output logic              res_we_b,
  output logic [WORD_W-1:0] res_wdata
);
  logic              phase;      // 0: lower half, 1: upper half
  logic              sel_b;      // writing Res_Block_B
  logic [ZBT_AW-1:0] addr;

  logic go;                      // a word is written this clock
  assign go = !oim_empty && !(phase == 1'b0 && switch_req && !sel_b);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= 1'b0; sel_b <= 1'b0; addr <= '0;
      a_count <= '0; total <= '0; switched <= 1'b0;
    end else if (start) begin
      phase <= 1'b0; sel_b <= 1'b0; addr <= '0;
      a_count <= '0; total <= '0; switched <= 1'b0;
    end else begin
      switched <= 1'b0;
      if (phase == 1'b0 && switch_req && !sel_b) begin
        // pixel boundary: switch the result bank once
        sel_b    <= 1'b1;
        addr     <= '0;
        a_count  <= total;
        switched <= 1'b1;
      end else if (go) begin
        phase <= ~phase;
        addr  <= addr + 1'b1;
        if (phase) total <= total + 1'b1;
      end
    end
  end

  assign res_addr  = addr;
  assign res_we_a  = go && !sel_b;
  assign res_we_b  = go && sel_b;
  assign res_wdata = phase ? pix_hi(oim_data) : pix_lo(oim_data);
  assign oim_pop   = go && phase;

endmodule
