// tb_pixel_processor: drives random 3x3 and 9-pixel line neighbourhoods and
// every operation
// into the pixel level processor and compares the result pixel and the SAD
// output with the integer reference model.
module tb_pixel_processor;
  import ae_pkg::*;
  import tb_ref_pkg::*;

  nbh_t       nbh;
  pix_op_e    op;
  logic [2:0] chan;
  logic       line;
  pixel_t     result;
  logic [7:0] sad_y;
  int checks = 0, failures = 0;

  pixel_processor dut (.nbh, .line, .op, .chan, .result, .sad_y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic pixel_t rnd_pix();
    return pixel_t'({$urandom, $urandom});
  endfunction

  initial begin
    pixel_t win[9];
    pixel_t exp_p;
    int exp_sad;
    for (int n = 0; n < 4000; n++) begin
      line = (n % 3 == 2);
      for (int i = 0; i < 9; i++) begin
        pixel_t other;
        win[i] = rnd_pix();
        // extreme values now and then to hit saturation and min/max edges
        if (n % 7 == 0) win[i].y = (i % 2) ? 8'hFF : 8'h00;
        other = rnd_pix();
        // the window not selected holds unrelated pixels
        if (line) begin nbh.l[i] = win[i]; nbh.a[i/3][i%3] = other; end
        else      begin nbh.a[i/3][i%3] = win[i]; nbh.l[i] = other; end
      end
      nbh.b = rnd_pix();
      if (n % 5 == 0) nbh.b.y = 8'hF0;
      op   = pix_op_e'(n % 8);
      chan = (n < 800) ? 3'b111 : 3'($urandom);
      #1;
      exp_p = ref_op(win, nbh.b, op, chan, line);
      checks++;
      if (result !== exp_p) begin
        failures++;
        if (failures < 10)
          $display("FAIL n=%0d op=%0d chan=%b got %h exp %h", n, op, chan, result, exp_p);
      end
      exp_sad = (win[4].y > nbh.b.y) ? win[4].y - nbh.b.y : nbh.b.y - win[4].y;
      checks++;
      if (int'(sad_y) != exp_sad) failures++;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
