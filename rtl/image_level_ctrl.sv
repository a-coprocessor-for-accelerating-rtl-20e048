// image_level_ctrl: image level controller of the AddressEngine.
//
// Runs one AddressEngine call: it takes the configuration and the start
// command from the PC, keeps account of the image strips the PC has written
// into the board memory, has the input transmission unit copy their lines
// into the IIM in order, enables the pixel level controller only while the
// IIM holds the next neighbourhood and the OIM has room, has the output
// transmission unit switch result banks once the input image is complete,
// and raises interrupts toward the PC.
//
// Strips: the image is sent in strips of 16 scan lines (image lines in a
// horizontal scan, image columns in a vertical one), alternately into
// block_A (even strips) and block_B (odd strips); the PC pulses strip_valid after
// each strip. In inter mode a strip holds the same 16 lines of both images.
// Once all lines of a strip are in the IIM, its block is free again and the
// matching interrupt bit is set, so the PC may refill it.
//
// Interrupts: irq_status bits BLK_A_FREE, BLK_B_FREE, RES_A_RDY (the result
// bank A may be read: res_a_count pixels) and DONE (all results written;
// the rest is in bank B). irq is the OR of the bits; the PC clears bits by
// writing ones to irq_clear.
//
// Timing: all outputs except plc_enable and txu_req are registers. The
// responsibilities follow the paper; the strip handshake, the interrupt
// bits and their encoding are this design's choices.
module image_level_ctrl
  import ae_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // PC side
  input  logic        host_start,
  input  ae_cfg_t     host_cfg,
  input  logic        strip_valid,
  input  logic [3:0]  irq_clear,
  output logic        irq,
  output logic [3:0]  irq_status,
  output logic        busy,
  // configuration and start to the other blocks
  output logic        start,
  output ae_cfg_t     cfg,
  // input TxU
  output logic        txu_req,
  output logic        txu_img,
  output logic [9:0]  txu_line,
  output logic        txu_blk,
  input  logic        txu_busy,
  input  logic        txu_line_done,
  input  logic        txu_line_done_img,
  input  logic [9:0]  txu_line_done_line,
  // IIM / OIM state
  input  logic        iim_empty,
  input  logic        iim_full_0,
  input  logic        iim_full_1,
  input  logic        oim_full,
  // pixel level controller
  output logic        plc_enable,
  input  logic        plc_done,
  // output TxU
  output logic        res_switch_req,
  input  logic        res_switched,
  input  logic [17:0] res_total
);
  logic [9:0]  strips_in;      // strips announced by the PC
  logic [9:0]  nl;             // next line to copy into the IIM
  logic        nimg;           // its image
  logic        lines_left;
  logic [17:0] npix;
  logic        plc_finished;

  logic [9:0]  n_lines;        // scan lines of the image
  logic [5:0]  n_strips;
  assign n_lines  = scan_lines(cfg);
  assign n_strips = n_lines[9:4];

  // next line transfer
  always_comb begin
    lines_left = busy && (nl < n_lines);
    txu_img    = nimg;
    txu_line   = nl;
    txu_blk    = nl[4];                      // strip number parity
    txu_req    = lines_left && !txu_busy &&
                 ((nl >> 4) < strips_in) &&
                 !(nimg ? iim_full_1 : iim_full_0);
  end

  assign plc_enable     = !iim_empty && !oim_full;
  assign res_switch_req = busy && (strips_in >= 10'(n_strips));
  assign irq            = |irq_status;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; start <= 1'b0; cfg <= '0;
      strips_in <= '0; nl <= '0; nimg <= 1'b0;
      irq_status <= '0; npix <= '0; plc_finished <= 1'b0;
    end else begin
      start <= 1'b0;
      irq_status <= irq_status & ~irq_clear;
      if (host_start && !busy) begin
        busy      <= 1'b1;
        start     <= 1'b1;
        cfg       <= host_cfg;
        strips_in <= '0;
        nl        <= '0;
        nimg      <= 1'b0;
        npix      <= 18'(host_cfg.width * host_cfg.height);
        plc_finished <= 1'b0;
        irq_status <= '0;
      end else if (busy) begin
        if (strip_valid) strips_in <= strips_in + 10'd1;
        if (txu_req) begin
          if (cfg.mode == MODE_INTER && !nimg) nimg <= 1'b1;
          else begin
            nimg <= 1'b0;
            nl   <= nl + 10'd1;
          end
        end
        // a strip is fully in the IIM: its block may be refilled
        if (txu_line_done && txu_line_done_line[3:0] == 4'hF &&
            (cfg.mode == MODE_INTRA || txu_line_done_img)) begin
          if (txu_line_done_line[4]) irq_status[IRQ_BLK_B_FREE] <= 1'b1;
          else                       irq_status[IRQ_BLK_A_FREE] <= 1'b1;
        end
        if (res_switched) irq_status[IRQ_RES_A_RDY] <= 1'b1;
        if (plc_done) plc_finished <= 1'b1;
        if (plc_finished && res_total == npix) begin
          irq_status[IRQ_DONE] <= 1'b1;
          busy <= 1'b0;
        end
      end
    end
  end

  a_strip_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    strip_valid |-> busy && (strips_in < 10'(n_strips)));

endmodule
