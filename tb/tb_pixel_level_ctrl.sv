// tb_pixel_level_ctrl: runs the pixel level controller against a model of
// the scanner (position counters advanced by s1_issue). Checks the number of
// each instruction, the LOAD at a line start (three columns in CON_8, nine
// for a line window along the scan), the issue rate (one pixel-cycle per clock while shifting,
// W+2 clocks per line in CON_8, W+8 for the line, W in CON_0), that nothing is issued while the
// image level controller disables the controller, that nothing is stored
// while the OIM is full, and the single done pulse.
module tb_pixel_level_ctrl;
  import ae_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, enable = 1, oim_full = 0;
  logic all_issued, nx_load, running, done, stalled;
  logic [3:0] load_cols;
  pu_ctrl_t ctrl;
  int checks = 0, failures = 0;
  int W, H;
  int rch;                       // horizontal reach of the window
  int x, y;
  int n_issue, n_step, n_rdnext, n_exec, n_store, n_done, n_stallclk;
  int first_issue_line[int];

  pixel_level_ctrl dut (.*);

  always #5 clk = ~clk;
  assign all_issued = (y >= H);
  assign nx_load    = (rch != 0) && (x == 0);
  assign load_cols  = 4'(2 * rch + 1);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  int cyc;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && running) begin
      if (ctrl.s1_issue) begin
        check(enable, "no issue while disabled");
        if (x == 0) first_issue_line[y] = cyc;
        n_issue++;
        if (x == W - 1) begin x = 0; y++; end else x++;
      end
      if (ctrl.s2_step)    n_step++;
      if (ctrl.s2_rd_next) n_rdnext++;
      if (ctrl.s3_exec)    n_exec++;
      if (ctrl.s4_store) begin
        check(!oim_full, "no store while OIM full");
        n_store++;
      end
      check(!(ctrl.s1_issue && ctrl.s2_rd_next), "one IIM reader per clock");
      if (stalled) n_stallclk++;
    end
    if (done) n_done++;
  end

  task automatic run(int w, int h, int r, bit disturb);
    W = w; H = h; rch = r; x = 0; y = 0;
    n_issue = 0; n_step = 0; n_rdnext = 0; n_exec = 0; n_store = 0; n_done = 0; n_stallclk = 0;
    first_issue_line.delete();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (n_done == 0) begin
      if (disturb) begin
        enable   = ($urandom % 5 != 0);
        oim_full = ($urandom % 4 == 0);
      end
      @(negedge clk);
    end
    enable = 1; oim_full = 0;
    repeat (3) @(negedge clk);
    check(n_done == 1, "one done pulse");
    check(n_issue == W * H, $sformatf("issues %0d", n_issue));
    check(n_exec == W * H, "stage 3 executions");
    check(n_store == W * H, "stores");
    check(n_step == H * (W + 2 * r), $sformatf("matrix steps %0d", n_step));
    check(n_rdnext == 2 * r * H, $sformatf("LOAD extra reads %0d", n_rdnext));
    if (!disturb)
      for (int l = 1; l < H; l++)
        check(first_issue_line[l] - first_issue_line[l-1] == W + 2 * r,
              $sformatf("clocks per line %0d", first_issue_line[l] - first_issue_line[l-1]));
    else check(n_stallclk > 0, "disable seen");
    check(!running, "idle after done");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(12, 5, 1, 0);
    run(12, 5, 0, 0);
    run(12, 5, 4, 0);
    run(9, 6, 1, 1);
    run(7, 4, 0, 1);
    run(10, 4, 4, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
