// tb_txu_in: two behavioural ZBT block pairs hold image lines; the input
// transmission unit is asked for lines of both images from both blocks.
// Every IIM write is checked for line, image, column and pixel value, the
// line must take exactly its length + RD_LAT clocks, and line_done must
// come with the last pixel. Image columns are fetched the same way for a
// vertical scan.
module tb_txu_in;
  import ae_pkg::*;
  import tb_ref_pkg::*;

  localparam int W = 24, H = 20;
  logic clk = 0, rst_n = 0;
  logic [9:0] width = W, height = H;
  logic vert = 0;
  logic req = 0, req_img = 0, req_blk = 0, busy;
  logic [9:0] req_line = 0;
  logic [ZBT_AW-1:0] zbt_addr;
  logic zbt_rd_a, zbt_rd_b;
  logic [31:0] rd [4];
  logic iim_wr, iim_img, line_done;
  logic [9:0] iim_line;
  logic [8:0] iim_col;
  pixel_t iim_data;
  int checks = 0, failures = 0;

  txu_in dut (.clk, .rst_n, .width, .height, .vert, .req, .req_img, .req_line, .req_blk, .busy,
              .zbt_addr, .zbt_rd_a, .zbt_rd_b,
              .zbt_rdata_a_lo(rd[0]), .zbt_rdata_a_hi(rd[1]),
              .zbt_rdata_b_lo(rd[2]), .zbt_rdata_b_hi(rd[3]),
              .iim_wr, .iim_img, .iim_line, .iim_col, .iim_data, .line_done);

  logic [ZBT_AW-1:0] h_addr [4];
  logic h_we [4];
  logic [31:0] h_wdata [4];
  logic [31:0] h_rdata [4];
  for (genvar b = 0; b < 4; b++) begin : g_zbt
    zbt_bank_model u_bank (.clk, .addr(zbt_addr), .en(b < 2 ? zbt_rd_a : zbt_rd_b),
      .we(1'b0), .wdata('0), .rdata(rd[b]),
      .h_we(h_we[b]), .h_addr(h_addr[b]), .h_wdata(h_wdata[b]), .h_rdata(h_rdata[b]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // host writes line y of image img into block (y/16)%2
  task automatic host_line(int img, int y);
    int blk;
    blk = (y / 16) % 2;
    for (int x = 0; x < W; x++) begin
      pixel_t p;
      p = gen_pix(img, x, y, 1);
      @(negedge clk);
      for (int b = 0; b < 4; b++) h_we[b] = 0;
      h_we[2*blk] = 1; h_addr[2*blk] = ZBT_AW'(img * IMG2_BASE + y * W + x); h_wdata[2*blk] = p[31:0];
      h_we[2*blk+1] = 1; h_addr[2*blk+1] = ZBT_AW'(img * IMG2_BASE + y * W + x); h_wdata[2*blk+1] = p[63:32];
    end
    @(negedge clk);
    for (int b = 0; b < 4; b++) h_we[b] = 0;
  endtask

  // host writes column x of image img (vertical strips) into block (x/16)%2
  task automatic host_col(int img, int x);
    int blk;
    blk = (x / 16) % 2;
    for (int y = 0; y < H; y++) begin
      pixel_t p;
      p = gen_pix(img, x, y, 1);
      @(negedge clk);
      for (int b = 0; b < 4; b++) h_we[b] = 0;
      h_we[2*blk] = 1; h_addr[2*blk] = ZBT_AW'(img * IMG2_BASE + y * W + x); h_wdata[2*blk] = p[31:0];
      h_we[2*blk+1] = 1; h_addr[2*blk+1] = ZBT_AW'(img * IMG2_BASE + y * W + x); h_wdata[2*blk+1] = p[63:32];
    end
    @(negedge clk);
    for (int b = 0; b < 4; b++) h_we[b] = 0;
  endtask

  int exp_col;
  int exp_img, exp_line;
  always @(posedge clk) if (rst_n && iim_wr) begin
    check(iim_line == 10'(exp_line) && iim_img == exp_img[0], "line/image tag");
    check(int'(iim_col) == exp_col, $sformatf("column %0d", exp_col));
    check(iim_data == (vert ? gen_pix(exp_img, exp_line, exp_col, 1)
                            : gen_pix(exp_img, exp_col, exp_line, 1)),
          $sformatf("pixel img %0d line %0d col %0d", exp_img, exp_line, exp_col));
    check(line_done == (exp_col == (vert ? H : W) - 1), "line_done with last pixel");
    exp_col++;
  end

  task automatic get_line(int img, int y);
    int t0, t1;
    exp_img = img; exp_line = y; exp_col = 0;
    @(negedge clk);
    req = 1; req_img = img[0]; req_line = 10'(y); req_blk = 1'((y / 16) % 2);
    @(negedge clk);
    req = 0;
    t0 = 0;
    while (!line_done) begin @(negedge clk); t0++; end
    // req clock + t0 clocks until the last write
    check(t0 + 1 == (vert ? H : W) + 2, $sformatf("line took %0d clocks", t0 + 1));
    @(negedge clk);
    check(!busy, "idle after the line");
    check(exp_col == (vert ? H : W), "all pixels written");
  endtask

  initial begin
    for (int b = 0; b < 4; b++) begin h_we[b] = 0; h_addr[b] = 0; h_wdata[b] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    host_line(0, 0);  host_line(0, 17); host_line(1, 3); host_line(1, 30);
    get_line(0, 0);
    get_line(0, 17);
    get_line(1, 3);
    get_line(1, 30);
    // vertical scan: scan lines are image columns
    vert = 1;
    host_col(0, 2); host_col(0, 19); host_col(1, 5); host_col(1, 23);
    get_line(0, 2);
    get_line(0, 19);
    get_line(1, 5);
    get_line(1, 23);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
