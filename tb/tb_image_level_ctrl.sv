// tb_image_level_ctrl: the image level controller against models of the
// input transmission unit (fixed line time), the IIM line FIFO (lines are
// consumed at random) and the output side. Checks the order of line
// requests (line by line; image 0 then 1 in inter mode), the block each
// line is read from, that no line is requested before the PC announced its
// strip or while the IIM FIFO is full, the block-free interrupts after each
// strip, the result bank switch request once the input image is complete,
// the DONE interrupt, interrupt clearing, and the enable rule.
module tb_image_level_ctrl;
  import ae_pkg::*;

  logic clk = 0, rst_n = 0;
  logic host_start = 0, strip_valid = 0;
  ae_cfg_t host_cfg, cfg;
  logic [3:0] irq_clear = 0, irq_status;
  logic irq, busy, start;
  logic txu_req, txu_img, txu_blk, txu_busy = 0;
  logic [9:0] txu_line;
  logic txu_line_done = 0, txu_line_done_img = 0;
  logic [9:0] txu_line_done_line = 0;
  logic iim_empty = 1, iim_full_0 = 0, iim_full_1 = 0, oim_full = 0;
  logic plc_enable, plc_done = 0;
  logic res_switch_req, res_switched = 0;
  logic [17:0] res_total = 0;
  int checks = 0, failures = 0;

  image_level_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  // models
  int strips_announced, lines_done [2], consumed, exp_line, exp_img, n_blk_free [2];
  bit inter;
  always @(posedge clk) if (rst_n) begin
    check(plc_enable == (!iim_empty && !oim_full), "enable rule");
    if (txu_req) begin
      check(int'(txu_line) == exp_line && txu_img == exp_img[0],
            $sformatf("request order line %0d img %0d", txu_line, txu_img));
      check(txu_blk == 1'((txu_line / 16) % 2), "block of the strip");
      check(int'(txu_line) / 16 < strips_announced, "strip announced");
      check(!(txu_img ? iim_full_1 : iim_full_0), "IIM not full");
      if (inter && exp_img == 0) exp_img = 1;
      else begin exp_img = 0; exp_line++; end
    end
  end

  // a block-free interrupt must follow the last line of a strip in that block
  logic [3:0] prev_irq = 0;
  int last_line = -1, last_img = 0;
  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < 2; b++)
      if (irq_status[b] && !prev_irq[b])
        check(last_line % 16 == 15 && (last_line / 16) % 2 == b && (!inter || last_img == 1),
              $sformatf("block %0d freed after line %0d", b, last_line));
    prev_irq = irq_status;
    if (txu_line_done) begin last_line = int'(txu_line_done_line); last_img = txu_line_done_img; end
  end

  // line transfer model: 5 clocks per line
  always begin
    @(negedge clk);
    if (txu_req) begin
      int l, im;
      l = txu_line; im = txu_img;
      txu_busy = 1;
      repeat (5) @(negedge clk);
      txu_line_done = 1; txu_line_done_img = im[0]; txu_line_done_line = 10'(l);
      @(negedge clk);
      txu_line_done = 0; txu_busy = 0;
      lines_done[im]++;
    end
  end

  always @(negedge clk) begin
    int cap;
    cap = inter ? 8 : 16;
    if (($urandom % 9 == 0) && consumed < lines_done[0] && (!inter || consumed < lines_done[1]))
      consumed++;
    iim_full_0 = (lines_done[0] - consumed) >= cap;
    iim_full_1 = inter && (lines_done[1] - consumed) >= cap;
    iim_empty  = $urandom % 3 == 0;
    oim_full   = $urandom % 4 == 0;
    if (irq_status[IRQ_BLK_A_FREE]) n_blk_free[0]++;
    if (irq_status[IRQ_BLK_B_FREE]) n_blk_free[1]++;
  end

  task automatic run(bit inter_mode, int w, int h);
    int nstrips;
    inter = inter_mode;
    nstrips = h / 16;
    strips_announced = 0; lines_done[0] = 0; lines_done[1] = 0; consumed = 0;
    exp_line = 0; exp_img = 0;
    host_cfg = '0;
    host_cfg.mode = inter_mode ? MODE_INTER : MODE_INTRA;
    host_cfg.width = 10'(w); host_cfg.height = 10'(h);
    @(negedge clk); host_start = 1; @(negedge clk); host_start = 0;
    check(busy, "busy after start");
    check(cfg.height == 10'(h), "configuration latched");
    // PC: strips 0 and 1 at once, then each after its block's interrupt
    for (int s = 0; s < nstrips; s++) begin
      if (s >= 2) begin
        int b;
        b = s % 2;
        while (!irq_status[b]) @(negedge clk);
        check(irq, "irq line follows status");
        irq_clear = 4'(1 << b); @(negedge clk); irq_clear = 0;
        @(negedge clk);
        check(!irq_status[b], "interrupt bit cleared");
      end
      check(!res_switch_req, "no bank switch before input complete");
      strip_valid = 1; strips_announced++; @(negedge clk); strip_valid = 0;
    end
    @(negedge clk);
    check(res_switch_req, "bank switch requested when input complete");
    res_switched = 1; @(negedge clk); res_switched = 0;
    @(negedge clk);
    check(irq_status[IRQ_RES_A_RDY], "Res_Block_A ready interrupt");
    while (exp_line < h) begin
      if (consumed < lines_done[0]) consumed++;
      @(negedge clk);
    end
    while (txu_busy) @(negedge clk);
    check(lines_done[0] == h && lines_done[1] == (inter ? h : 0), "all lines transferred");
    check(busy && !irq_status[IRQ_DONE], "not done before the results");
    plc_done = 1; @(negedge clk); plc_done = 0;
    res_total = 18'(w * h); @(negedge clk); @(negedge clk);
    check(irq_status[IRQ_DONE] && !busy, "DONE interrupt");
    irq_clear = 4'hF; @(negedge clk); irq_clear = 0; res_total = 0;
    @(negedge clk);
    check(!irq, "all cleared");
  endtask

  initial begin
    host_cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 8, 64);
    run(1, 6, 48);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
