// tb_address_engine: end-to-end test of the AddressEngine at its default
// parameters. Six behavioural ZBT banks and a model of the PC surround the
// design. For each call the PC writes the input image strip by strip into
// block_A / block_B (waiting for the block-free interrupt before reusing a
// block), announces each strip, reads Res_Block_A when the RES_A_RDY
// interrupt arrives and Res_Block_B after DONE, and compares every result
// pixel with the reference model. Calls: CIF 352x288 intra CON_8 gradient,
// QCIF 176x144 inter difference picture with SAD, a 32x32 intra CON_0
// copy, 64x48 calls with the 1x9 and 9x1 line windows, and vertically
// scanned calls (strips of 16 columns, results in column order). The mechanisms of the design are counted and each must occur.
module tb_address_engine;
  import ae_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic host_start = 0, strip_valid = 0;
  ae_cfg_t host_cfg;
  logic [3:0] irq_clear, clr_w = 0, clr_r = 0, irq_status;
  logic irq, busy;
  logic [17:0] res_a_count, res_total;
  logic [31:0] sad;
  logic [ZBT_AW-1:0] zbt_addr [N_ZBT];
  logic zbt_en [N_ZBT], zbt_we [N_ZBT];
  logic [31:0] zbt_wdata [N_ZBT], zbt_rdata [N_ZBT];
  // PC port of each bank
  logic h_we [N_ZBT];
  logic [ZBT_AW-1:0] h_addr [N_ZBT];
  logic [31:0] h_wdata [N_ZBT], h_rdata [N_ZBT];
  int checks = 0, failures = 0;

  assign irq_clear = clr_w | clr_r;

  address_engine dut (.*);

  for (genvar b = 0; b < N_ZBT; b++) begin : g_zbt
    zbt_bank_model #(.AW(ZBT_AW), .RD_LAT(2)) u_bank (
      .clk, .addr(zbt_addr[b]), .en(zbt_en[b]), .we(zbt_we[b]), .wdata(zbt_wdata[b]),
      .rdata(zbt_rdata[b]), .h_we(h_we[b]), .h_addr(h_addr[b]), .h_wdata(h_wdata[b]),
      .h_rdata(h_rdata[b]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------ mechanism counters
  int m_iim_empty_stall, m_oim_full_stall, m_load, m_shift, m_arb_hold, m_iim_full,
      m_blk_free, m_switch, m_intra, m_inter, m_done, m_line_h, m_line_v, m_vert;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_plc.stalled && dut.iim_empty)                m_iim_empty_stall++;
    if (dut.u_plc.running && dut.oim_full)                 m_oim_full_stall++;
    if (dut.ctrl.s2_rd_next)                               m_load++;
    if (dut.ctrl.s2_step && !dut.u_plc.s2_more && !dut.u_pu.nx_load) m_shift++;
    if (dut.u_plc.offer && !dut.ctrl.s1_issue)             m_arb_hold++;
    if (dut.u_ilc.lines_left && dut.iim_full_0)            m_iim_full++;
    if (dut.res_switched)                                  m_switch++;
    if (dut.ctrl.s3_exec && dut.cfg.nbh == LINE_H9)        m_line_h++;
    if (dut.ctrl.s3_exec && dut.cfg.nbh == LINE_V9)        m_line_v++;
  end

  // ------------------------------------------------------ reference
  int W, H, seed;
  ae_cfg_t cur;
  function automatic pixel_t px(int img, int x, int y);
    if (x < 0) x = 0;
    if (x >= W) x = W - 1;
    if (y < 0) y = 0;
    if (y >= H) y = H - 1;
    return gen_pix(img, x, y, seed);
  endfunction
  function automatic pixel_t expected(int p);
    pixel_t win[9];
    int x, y;
    bit intra, line;
    // result p is pixel p of the scan: in a vertical scan, columns in turn
    if (cur.scan == SCAN_V) begin x = p / H; y = p % H; end
    else                    begin x = p % W; y = p / W; end
    intra = (cur.mode == MODE_INTRA);
    line  = intra && (cur.nbh == LINE_H9 || cur.nbh == LINE_V9);
    for (int i = 0; i < 9; i++) begin
      if (intra && cur.nbh == CON_8)        win[i] = px(0, x + i % 3 - 1, y + i / 3 - 1);
      else if (intra && cur.nbh == LINE_H9) win[i] = px(0, x + i - 4, y);
      else if (intra && cur.nbh == LINE_V9) win[i] = px(0, x, y + i - 4);
      else                                  win[i] = px(0, x, y);
    end
    return ref_op(win, px(1, x, y), cur.op, cur.chan, line);
  endfunction

  // ------------------------------------------------------ PC model
  task automatic write_strip(int s);
    int blk, x0, x1, y0, y1;
    blk = s % 2;
    if (cur.scan == SCAN_V) begin x0 = s * 16; x1 = s * 16 + 16; y0 = 0; y1 = H; end
    else                    begin x0 = 0; x1 = W; y0 = s * 16; y1 = s * 16 + 16; end
    for (int img = 0; img < (cur.mode == MODE_INTER ? 2 : 1); img++)
      for (int y = y0; y < y1; y++)
        for (int x = x0; x < x1; x++) begin
          pixel_t p;
          p = gen_pix(img, x, y, seed);
          @(negedge clk);
          h_we[2*blk] = 1;   h_addr[2*blk]   = ZBT_AW'(img * IMG2_BASE + y * W + x); h_wdata[2*blk]   = p[31:0];
          h_we[2*blk+1] = 1; h_addr[2*blk+1] = ZBT_AW'(img * IMG2_BASE + y * W + x); h_wdata[2*blk+1] = p[63:32];
        end
    @(negedge clk);
    h_we[2*blk] = 0; h_we[2*blk+1] = 0;
    strip_valid = 1; @(negedge clk); strip_valid = 0;
  endtask

  task automatic writer();
    for (int s = 0; s < (cur.scan == SCAN_V ? W : H) / 16; s++) begin
      if (s >= 2) begin
        while (!irq_status[s % 2]) @(negedge clk);
        m_blk_free++;
        clr_w = 4'(1 << (s % 2)); @(negedge clk); clr_w = 0;
      end
      write_strip(s);
    end
  endtask

  task automatic read_bank(int bank, int first, int n);
    for (int i = 0; i < n; i++) begin
      pixel_t got, e;
      h_addr[bank] = ZBT_AW'(2 * i);     #1; got[31:0]  = h_rdata[bank];
      h_addr[bank] = ZBT_AW'(2 * i + 1); #1; got[63:32] = h_rdata[bank];
      e = expected(first + i);
      check(got == e, $sformatf("bank %0d pixel %0d: got %h exp %h", bank, first + i, got, e));
    end
  endtask

  task automatic reader();
    int na;
    while (!irq_status[IRQ_RES_A_RDY]) @(negedge clk);
    clr_r = 4'(1 << IRQ_RES_A_RDY); @(negedge clk); clr_r = 0;
    na = int'(res_a_count);
    read_bank(BANK_RES_A, 0, na);
    @(negedge clk);
    while (!irq_status[IRQ_DONE]) @(negedge clk);
    m_done++;
    check(res_total == 18'(W * H), "result count");
    read_bank(BANK_RES_B, na, W * H - na);
    @(negedge clk);          // the reads above advance in #1 steps
    clr_r = 4'hF; @(negedge clk); clr_r = 0;
  endtask

  task automatic call(addr_mode_e m, nbh_e n, pix_op_e op, logic [2:0] chan, int w, int h,
                      scan_e sc = SCAN_H);
    int t0;
    W = w; H = h; seed++;
    cur = '0; cur.mode = m; cur.nbh = n; cur.op = op; cur.chan = chan; cur.scan = sc;
    if (sc == SCAN_V) m_vert++;
    cur.width = 10'(w); cur.height = 10'(h);
    host_cfg = cur;
    @(negedge clk); host_start = 1; @(negedge clk); host_start = 0;
    t0 = $time;
    fork writer(); reader(); join
    if (m == MODE_INTER) begin
      int e = 0;
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          int a, b;
          a = px(0, x, y).y; b = px(1, x, y).y;
          e += (a > b) ? a - b : b - a;
        end
      check(sad == 32'(e), "SAD of the two images");
      m_inter++;
    end else m_intra++;
    check(!busy && !irq, $sformatf("idle after the call: busy %0d irq %b", busy, irq_status));
    $display("call %0dx%0d mode %0d op %0d: %0d clocks, Res_Block_A %0d pixels",
             w, h, m, op, ($time - t0) / 10, res_a_count);
  endtask

  initial begin
    for (int b = 0; b < N_ZBT; b++) begin h_we[b] = 0; h_addr[b] = 0; h_wdata[b] = 0; end
    host_cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    call(MODE_INTRA, CON_8, OP_GRAD, 3'b111, 352, 288);
    call(MODE_INTER, CON_0, OP_SUB,  3'b111, 176, 144);
    call(MODE_INTRA, CON_0, OP_COPY, 3'b111, 32, 32);
    call(MODE_INTRA, LINE_H9, OP_SMOOTH, 3'b111, 64, 48);
    call(MODE_INTRA, LINE_V9, OP_GRAD,   3'b111, 64, 48);
    call(MODE_INTRA, CON_8,   OP_SMOOTH, 3'b111, 48, 40, SCAN_V);
    call(MODE_INTRA, LINE_H9, OP_ERODE,  3'b111, 48, 40, SCAN_V);
    call(MODE_INTER, CON_0,   OP_SUB,    3'b001, 32, 24, SCAN_V);
    check(m_iim_empty_stall > 0, "IIM-empty stall happened");
    check(m_oim_full_stall > 0,  "OIM-full stall happened");
    check(m_load > 0,            "LOAD instructions happened");
    check(m_shift > 0,           "SHIFT instructions happened");
    check(m_arb_hold > 0,        "arbiter held stage 1 back");
    check(m_iim_full > 0,        "IIM full held a transfer back");
    check(m_blk_free > 0,        "block-free interrupts used");
    check(m_line_h == 64 * 48 + 48 * 40, "1x9 line window used");
    check(m_line_v == 64 * 48,   "9x1 line window used");
    check(m_vert == 3,           "vertical scans run");
    check(m_switch == 8,         "one result bank switch per call");
    check(m_intra == 6 && m_inter == 2 && m_done == 8, "all calls completed");
    $display("mechanisms: iim_empty_stall=%0d oim_full_stall=%0d load=%0d shift=%0d arb_hold=%0d iim_full=%0d blk_free=%0d switch=%0d line_h=%0d line_v=%0d",
             m_iim_empty_stall, m_oim_full_stall, m_load, m_shift, m_arb_hold, m_iim_full, m_blk_free, m_switch, m_line_h, m_line_v);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
