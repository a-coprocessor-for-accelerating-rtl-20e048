// tb_iim: fills the input intermediate memory line by line in intra and
// inter mode, reads whole columns back and checks every line memory, and
// checks FULL/EMPTY against the number of lines written and released.
module tb_iim;
  import ae_pkg::*;
  import tb_ref_pkg::*;

  localparam int W = 20;
  logic clk = 0, rst_n = 0, start = 0;
  addr_mode_e mode = MODE_INTRA;
  logic wr_en = 0, wr_img = 0, line_done = 0, line_done_img = 0;
  logic [9:0] wr_line = 0, need_line = 0, low_line = 0;
  logic [8:0] wr_col = 0, rd_col = 0;
  pixel_t wr_data;
  pixel_t [15:0] rd_data;
  logic [9:0] lines_in_0, lines_in_1;
  logic empty, full_0, full_1;
  int checks = 0, failures = 0;

  iim dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic write_line(int img, int line);
    for (int x = 0; x < W; x++) begin
      @(negedge clk);
      wr_en = 1; wr_img = img[0]; wr_line = 10'(line); wr_col = 9'(x);
      wr_data = gen_pix(img, x, line, 3);
      line_done = (x == W - 1); line_done_img = img[0];
    end
    @(negedge clk);
    wr_en = 0; line_done = 0;
  endtask

  // expected line held by slot s, given the lines written so far
  task automatic check_columns(int first, int last, int img, int slot_base, int nslots);
    for (int x = 0; x < W; x++) begin
      rd_col = 9'(x);
      #1;
      for (int l = first; l <= last; l++)
        check(rd_data[slot_base + (l % nslots)] == gen_pix(img, x, l, 3),
              $sformatf("img %0d line %0d col %0d", img, l, x));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    // ---- intra: 16 lines fill the FIFO
    need_line = 0; low_line = 0;
    #1 check(empty, "empty before any line");
    for (int l = 0; l < 16; l++) begin
      check(!full_0, $sformatf("not full before line %0d", l));
      write_line(0, l);
      need_line = 10'(l); #1;
      check(!empty, "needed line present");
      need_line = 10'(l + 1); #1;
      check(empty, "next line not yet present");
    end
    check(full_0, "full after 16 lines");
    check(lines_in_0 == 16, "16 lines counted");
    check_columns(0, 15, 0, 0, 16);
    // release 5 lines, write 5 more into the freed line memories
    low_line = 5; #1;
    check(!full_0, "not full after release");
    for (int l = 16; l < 21; l++) write_line(0, l);
    check(full_0, "full again");
    check_columns(5, 20, 0, 0, 16);
    // ---- inter: two FIFOs of 8 lines
    mode = MODE_INTER;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    low_line = 0; need_line = 0;
    for (int l = 0; l < 8; l++) begin
      need_line = 10'(l);
      write_line(0, l);
      #1 check(empty, "inter: empty until image 1 line is present");
      write_line(1, l);
      #1 check(!empty, "inter: both present");
    end
    check(full_0 && full_1, "inter: both halves full");
    check_columns(0, 7, 0, 0, 8);
    check_columns(0, 7, 1, 8, 8);
    low_line = 1; #1;
    check(!full_0 && !full_1, "inter: release one line");
    write_line(1, 8);
    check(full_1 && !full_0, "inter: FIFOs counted apart");
    check_columns(1, 8, 1, 8, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
