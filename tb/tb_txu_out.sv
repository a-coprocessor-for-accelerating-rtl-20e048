// tb_txu_out: feeds result pixels to the output transmission unit from a
// show-ahead FIFO model with gaps, raises the bank switch request part way
// and checks the word sequence in Res_Block_A and Res_Block_B (lower half,
// then upper half of each pixel), the two clocks per pixel, the single
// switch and the pixel counts.
module tb_txu_out;
  import ae_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, switch_req = 0, switched;
  logic [17:0] a_count, total;
  logic oim_empty, oim_pop;
  pixel_t oim_data;
  logic [ZBT_AW-1:0] res_addr;
  logic res_we_a, res_we_b;
  logic [31:0] res_wdata;
  pixel_t src[$];
  logic [31:0] bank_a [int];
  logic [31:0] bank_b [int];
  int checks = 0, failures = 0, nswitch = 0, wr_clocks = 0;
  localparam int N = 60, SW_AT = 23;

  txu_out dut (.*);

  always #5 clk = ~clk;
  assign oim_empty = (src.size() == 0);
  assign oim_data  = oim_empty ? pixel_t'('0) : src[0];

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

  always @(posedge clk) if (rst_n) begin
    check(!(res_we_a && res_we_b), "one bank at a time");
    if (res_we_a) bank_a[int'(res_addr)] = res_wdata;
    if (res_we_b) bank_b[int'(res_addr)] = res_wdata;
    if (res_we_a || res_we_b) wr_clocks++;
    if (switched) nswitch++;
    if (oim_pop) void'(src.pop_front());
  end

  pixel_t all[N];
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < N; i++) all[i] = pixel_t'({$urandom, $urandom});
    // steady feed of the first SW_AT pixels: 2 clocks per pixel
    for (int i = 0; i < SW_AT; i++) src.push_back(all[i]);
    begin
      int t = 0;
      while (src.size() != 0) begin @(negedge clk); t++; end
      check(t == 2 * SW_AT, $sformatf("%0d pixels took %0d clocks", SW_AT, t));
    end
    switch_req = 1;
    for (int i = SW_AT; i < N; i++) begin
      src.push_back(all[i]);
      repeat ($urandom % 4) @(negedge clk);
    end
    while (src.size() != 0) @(negedge clk);
    repeat (4) @(negedge clk);
    check(nswitch == 1, "switched exactly once");
    check(a_count == SW_AT, "a_count");
    check(total == N, "total");
    check(wr_clocks == 2 * N, "two words per pixel");
    for (int i = 0; i < N; i++) begin
      int a;
      if (i < SW_AT) begin
        a = 2 * i;
        check(bank_a.exists(a) && bank_a[a] == all[i][31:0] && bank_a[a+1] == all[i][63:32],
              $sformatf("Res_Block_A pixel %0d", i));
      end else begin
        a = 2 * (i - SW_AT);
        check(bank_b.exists(a) && bank_b[a] == all[i][31:0] && bank_b[a+1] == all[i][63:32],
              $sformatf("Res_Block_B pixel %0d", i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
