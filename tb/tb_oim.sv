// tb_oim: pushes and pops random pixels into the output intermediate memory
// at random rates, compares the order and content with a queue, and fills it
// completely to check FULL and EMPTY at the exact pixel counts.
module tb_oim;
  import ae_pkg::*;

  localparam int LINES = 4, W_MAX = 8, DEPTH = LINES * W_MAX;
  logic clk = 0, rst_n = 0, start = 0, push = 0, pop = 0;
  pixel_t push_data, pop_data;
  logic full, empty;
  pixel_t q[$];
  int checks = 0, failures = 0;

  oim #(.LINES(LINES), .W_MAX(W_MAX)) dut (.*);

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

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    check(empty && !full, "empty after start");
    // fill completely
    for (int i = 0; i < DEPTH; i++) begin
      push = 1; push_data = pixel_t'({$urandom, $urandom}); q.push_back(push_data);
      @(negedge clk);
      check(full == (i == DEPTH - 1), $sformatf("full flag at %0d", i + 1));
    end
    push = 0;
    check(!empty, "not empty when full");
    // random traffic
    for (int n = 0; n < 3000; n++) begin
      push = !full && ($urandom % 3 != 0);
      pop  = !empty && ($urandom % 2 == 0);
      push_data = pixel_t'({$urandom, $urandom});
      if (pop) begin
        pixel_t e;
        e = q.pop_front();
        check(pop_data == e, $sformatf("data order at %0d", n));
      end
      if (push) q.push_back(push_data);
      @(negedge clk);
      check(empty == (q.size() == 0) && full == (q.size() == DEPTH), "flags track count");
    end
    push = 0;
    while (!empty) begin
      pixel_t e;
      pop = 1; e = q.pop_front();
      check(pop_data == e, "drain data");
      @(negedge clk);
    end
    pop = 0;
    check(q.size() == 0, "queue drained together with OIM");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
