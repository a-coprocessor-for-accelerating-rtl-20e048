// tb_process_unit: the process unit with its pixel level controller and
// input intermediate memory. The testbench streams image lines into the IIM
// as FULL allows, enables the controller only while the IIM holds the next
// neighbourhood, randomly reports the OIM as full, and compares every
// stored result pixel, in scan order, with the reference model applied to
// the image with border pixels repeated. Intra CON_8 with every window
// operation, the 1x9 and 9x1 line windows, CON_0 and inter mode (with the
// SAD sum) are run, in horizontal and vertical scan. The testbench feeds
// scan lines; in a vertical scan scan line l is image column l, and the
// reference windows are taken in image coordinates.
module tb_process_unit;
  import ae_pkg::*;
  import tb_ref_pkg::*;

  localparam int W = 11, H = 21;
  logic clk = 0, rst_n = 0, start = 0;
  ae_cfg_t cfg;
  pu_ctrl_t ctrl;
  logic [8:0] iim_rd_col;
  pixel_t [15:0] iim_rd_data;
  logic [9:0] need_line, low_line, lines_in_0, lines_in_1;
  logic iim_empty, full_0, full_1;
  logic oim_push, oim_full = 0;
  pixel_t oim_data;
  logic all_issued, nx_load, running, done, stalled;
  logic [3:0] load_cols;
  logic [31:0] sad;
  // IIM write side driven by the testbench
  logic wr_en = 0, wr_img = 0, line_done = 0;
  logic [9:0] wr_line = 0;
  logic [8:0] wr_col = 0;
  pixel_t wr_data = '0;
  int checks = 0, failures = 0, seed = 0;

  iim u_iim (.clk, .rst_n, .start, .mode(cfg.mode), .wr_en, .wr_img, .wr_line, .wr_col,
             .wr_data, .line_done, .line_done_img(wr_img), .rd_col(iim_rd_col),
             .rd_data(iim_rd_data), .need_line, .low_line, .lines_in_0, .lines_in_1,
             .empty(iim_empty), .full_0, .full_1);
  pixel_level_ctrl u_plc (.clk, .rst_n, .start, .enable(!iim_empty && !oim_full), .oim_full,
                          .all_issued, .nx_load, .load_cols, .ctrl, .running, .done, .stalled);
  process_unit dut (.clk, .rst_n, .start, .cfg, .ctrl, .iim_rd_col, .iim_rd_data,
                    .need_line, .low_line, .oim_push, .oim_data, .all_issued, .nx_load, .load_cols, .sad);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  function automatic pixel_t px(int img, int x, int y);
    if (x < 0) x = 0;
    if (x >= W) x = W - 1;
    if (y < 0) y = 0;
    if (y >= H) y = H - 1;
    return gen_pix(img, x, y, seed);
  endfunction

  // pixel at image position (ix,iy); scan line data is gen_pix(img, pos, line)
  function automatic pixel_t ipx(int img, int ix, int iy);
    if (cfg.scan == SCAN_V) return px(img, iy, ix);
    return px(img, ix, iy);
  endfunction

  function automatic pixel_t expected(int x, int y);
    pixel_t win[9];
    bit intra, line;
    int ix, iy;
    intra = (cfg.mode == MODE_INTRA);
    line  = intra && (cfg.nbh == LINE_H9 || cfg.nbh == LINE_V9);
    ix = (cfg.scan == SCAN_V) ? y : x;
    iy = (cfg.scan == SCAN_V) ? x : y;
    for (int i = 0; i < 9; i++) begin
      if (intra && cfg.nbh == CON_8)        win[i] = ipx(0, ix + i % 3 - 1, iy + i / 3 - 1);
      else if (intra && cfg.nbh == LINE_H9) win[i] = ipx(0, ix + i - 4, iy);
      else if (intra && cfg.nbh == LINE_V9) win[i] = ipx(0, ix, iy + i - 4);
      else                                  win[i] = ipx(0, ix, iy);
    end
    return ref_op(win, ipx(1, ix, iy), cfg.op, cfg.chan, line);
  endfunction

  int nout, exp_sad;
  always @(posedge clk) if (rst_n && oim_push) begin
    int x, y;
    x = nout % W; y = nout / W;
    check(oim_data == expected(x, y), $sformatf("pixel (%0d,%0d) op %0d", x, y, cfg.op));
    if (cfg.mode == MODE_INTER)
      exp_sad += (px(0, x, y).y > px(1, x, y).y) ? px(0, x, y).y - px(1, x, y).y
                                                 : px(1, x, y).y - px(0, x, y).y;
    nout++;
  end

  // line feeder: next line (and image) into the IIM whenever it has room
  task automatic feed();
    int l = 0, img = 0;
    while (l < H) begin
      @(negedge clk);
      if (!(img ? full_1 : full_0)) begin
        for (int xx = 0; xx < W; xx++) begin
          wr_en = 1; wr_img = img[0]; wr_line = 10'(l); wr_col = 9'(xx);
          wr_data = gen_pix(img, xx, l, seed); line_done = (xx == W - 1);
          @(negedge clk);
        end
        wr_en = 0; line_done = 0;
        if (cfg.mode == MODE_INTER && img == 0) img = 1;
        else begin img = 0; l++; end
      end
    end
  endtask

  task automatic run(addr_mode_e m, nbh_e n, pix_op_e op, logic [2:0] chan,
                     scan_e sc = SCAN_H);
    cfg = '0; cfg.mode = m; cfg.nbh = n; cfg.op = op; cfg.chan = chan; cfg.scan = sc;
    // W pixels per scan line, H scan lines
    if (sc == SCAN_V) begin cfg.width = H; cfg.height = W; end
    else              begin cfg.width = W; cfg.height = H; end
    seed++; nout = 0; exp_sad = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      feed();
      begin
        while (!done) begin
          @(negedge clk);
          oim_full = ($urandom % 6 == 0);
        end
        oim_full = 0;
      end
    join
    repeat (3) @(negedge clk);
    check(nout == W * H, $sformatf("%0d results", nout));
    if (m == MODE_INTER) check(sad == 32'(exp_sad), "SAD sum");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(MODE_INTRA, CON_8, OP_GRAD,   3'b111);
    run(MODE_INTRA, CON_8, OP_SMOOTH, 3'b111);
    run(MODE_INTRA, CON_8, OP_DILATE, 3'b001);
    run(MODE_INTRA, CON_8, OP_ERODE,  3'b110);
    run(MODE_INTRA, LINE_H9, OP_GRAD,   3'b111);
    run(MODE_INTRA, LINE_H9, OP_SMOOTH, 3'b101);
    run(MODE_INTRA, LINE_V9, OP_ERODE,  3'b111);
    run(MODE_INTRA, LINE_V9, OP_SMOOTH, 3'b111);
    run(MODE_INTRA, CON_0, OP_COPY,   3'b111);
    run(MODE_INTER, CON_0, OP_SUB,    3'b111);
    run(MODE_INTER, CON_0, OP_ADD,    3'b011);
    run(MODE_INTER, CON_0, OP_MULT,   3'b111);
    run(MODE_INTRA, CON_8,   OP_SMOOTH, 3'b111, SCAN_V);
    run(MODE_INTRA, LINE_H9, OP_GRAD,   3'b111, SCAN_V);
    run(MODE_INTRA, LINE_V9, OP_SMOOTH, 3'b111, SCAN_V);
    run(MODE_INTER, CON_0,   OP_SUB,    3'b111, SCAN_V);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
