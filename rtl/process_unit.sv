// process_unit: the four-stage datapath of the AddressEngine processor.
//
// All positions here are scan coordinates: x counts pixels along a scan
// line, y counts scan lines. In a horizontal scan these are the image
// column and row; in a vertical scan a scan line is an image column, so x
// is the image row and y the image column.
//
// Stage 1 - scanner and pixel position counters: hold the position (x,y) of
//   the next pixel-cycle, scan the image scan line by scan line, and on
//   s1_issue hand the position to stage 2 and read the first column of its
//   neighbourhood from the IIM into the preload register: x-r for a LOAD,
//   x+r for a SHIFT, where r is the reach of the window along the scan (1
//   for CON_8, 4 for a line window along the scan, 0 otherwise).
// Stage 2 - address generator, preload register, pixel selection logic,
//   matrix loading logic, matrix register: the IIM returns one pixel of every
//   line memory for a column; the selection logic picks lines y-4 .. y+4
//   (intra, clamped at the image border) or line y of both images (inter).
//   s2_step moves that column into the matrix register: CON_8 shifts the 3x3
//   window by one column (rows y-1..y+1); a line window along the scan
//   (LINE_H9 in a horizontal scan, LINE_V9 in a vertical one) shifts by one
//   pixel (row y); a line window across the scan takes the whole column
//   y-4..y+4 at once - the neighbourhood perpendicular to the scan direction
//   in a single read. s2_rd_next reads the following column of a LOAD (2
//   more for CON_8, 8 more for a line along the scan). Columns and lines
//   outside the image are clamped, i.e. border pixels are repeated.
// Stage 3 - pixel level processor and result register (s3_exec).
// Stage 4 - storing unit: pushes the result register into the OIM
//   (s4_store).
// The process unit also reports to the IIM the highest line the next
// pixel-cycle needs (need_line, drives EMPTY) and the lowest line still in
// use (low_line, frees line memories), and accumulates the Y-channel sum of
// absolute differences of image A and B over the image (sad).
//
// Timing: every control signal acts at the clock edge of the clock in which
// it is high; with all four asserted each clock the unit delivers one pixel
// per clock. The stage split and the blocks follow the paper's Fig. 6; the
// border rule, the line-window shapes
// and the SAD accumulator are this design's choices.
module process_unit
  import ae_pkg::*;
#(
  parameter int unsigned LINES = STRIP_LINES,
  parameter int unsigned W_MAX = 352
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  ae_cfg_t                   cfg,
  input  pu_ctrl_t                  ctrl,
  // IIM
  output logic [$clog2(W_MAX)-1:0]  iim_rd_col,
  input  pixel_t [LINES-1:0]        iim_rd_data,
  output logic [9:0]                need_line,
  output logic [9:0]                low_line,
  // OIM
  output logic                      oim_push,
  output pixel_t                    oim_data,
  // status to the pixel level controller
  output logic                      all_issued,
  output logic                      nx_load,
  output logic [3:0]                load_cols,   // columns of a LOAD
  output logic [31:0]               sad
);
  localparam int unsigned CW = $clog2(W_MAX);
  localparam int unsigned SW = $clog2(LINES);

  // ------------------------------------------------------------ stage 1
  logic [9:0]         x, y;        // pixel position counters (next pixel-cycle)
  logic [9:0]         y2;          // line of the pixel-cycle in stage 2
  logic signed [11:0] col_ptr;     // next column a LOAD reads (may be < 0)
  logic [2:0]         rh, rv;      // horizontal / vertical reach of the window
  logic               intra;
  logic [9:0]         lw, nlines;  // pixels per scan line, scan lines
  logic               along;       // the line window runs along the scan

  assign lw     = scan_len(cfg);
  assign nlines = scan_lines(cfg);
  // LINE_H9 is horizontal in the image, LINE_V9 vertical; which of them runs
  // along the scan depends on the scan direction
  assign along  = (cfg.nbh == LINE_H9 && cfg.scan == SCAN_H) ||
                  (cfg.nbh == LINE_V9 && cfg.scan == SCAN_V);

  // reach of the configured neighbourhood
  always_comb begin
    intra = (cfg.mode == MODE_INTRA);
    rh = '0;
    rv = '0;
    if (intra) begin
      case (cfg.nbh)
        CON_8:   begin rh = 3'd1; rv = 3'd1; end
        LINE_H9, LINE_V9: begin
          if (along) rh = 3'd4;
          else       rv = 3'd4;
        end
        default: ;
      endcase
    end
  end

  assign all_issued = (y >= nlines);
  assign nx_load    = (rh != 3'd0) && (x == 10'd0);
  assign load_cols  = 4'({rh, 1'b1});     // 2*rh + 1 columns

  function automatic logic [9:0] clamp_col(logic signed [11:0] c, logic [9:0] w);
    if (c < 0)                         return 10'd0;
    else if (c >= $signed({2'b00, w})) return w - 10'd1;
    else                               return c[9:0];
  endfunction

  function automatic logic [9:0] clamp_line(logic signed [11:0] l, logic [9:0] h);
    if (l < 0)                         return 10'd0;
    else if (l >= $signed({2'b00, h})) return h - 10'd1;
    else                               return l[9:0];
  endfunction

  // first column of the next pixel-cycle: x-rh for a LOAD, x+rh for a SHIFT
  logic signed [11:0] xs;
  logic [9:0]         s1_col;
  always_comb begin
    xs = $signed({2'b00, x});
    if (nx_load) s1_col = clamp_col(xs - $signed({9'd0, rh}), lw);
    else         s1_col = clamp_col(xs + $signed({9'd0, rh}), lw);
  end

  // address generator: stage 2 owns the port while a LOAD continues
  assign iim_rd_col = CW'(ctrl.s2_rd_next ? clamp_col(col_ptr, lw) : s1_col);

  // IIM line numbers needed by the next pixel-cycle and still in use
  always_comb begin
    need_line = clamp_line($signed({2'b00, y}) + $signed({9'd0, rv}), nlines);
    low_line  = (y2 > 10'(rv)) ? y2 - 10'(rv) : 10'd0;
  end

  // scanner + pixel position counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0; y2 <= '0; col_ptr <= '0;
    end else if (start) begin
      x <= '0; y <= '0; y2 <= '0; col_ptr <= '0;
    end else begin
      if (ctrl.s1_issue) begin
        y2      <= y;
        col_ptr <= xs - $signed({9'd0, rh}) + 12'sd1;   // LOAD: next column
        if (x == lw - 10'd1) begin
          x <= '0;
          y <= y + 10'd1;
        end else begin
          x <= x + 10'd1;
        end
      end else if (ctrl.s2_rd_next) begin
        col_ptr <= col_ptr + 12'sd1;
      end
    end
  end

  // ------------------------------------------------------------ stage 2
  pixel_t [LINES-1:0] preload;     // preload register
  always_ff @(posedge clk) begin
    if (ctrl.s1_issue || ctrl.s2_rd_next) preload <= iim_rd_data;
  end

  // pixel selection logic: the line memory holding image line l
  function automatic logic [SW-1:0] slot_intra(logic [9:0] line);
    return line[SW-1:0];
  endfunction

  pixel_t [8:0] sel_v;             // rows y2-4 .. y2+4 of image A (clamped)
  pixel_t       sel_b;             // row y2 of image B
  always_comb begin
    for (int i = 0; i < 9; i++)
      sel_v[i] = preload[slot_intra(clamp_line($signed({2'b00, y2}) + 12'(i) - 12'sd4,
                                               nlines))];
    if (!intra) begin
      for (int i = 0; i < 9; i++) sel_v[i] = preload[{1'b0, y2[SW-2:0]}];
      sel_b = preload[{1'b1, y2[SW-2:0]}];
    end else begin
      sel_b = preload[slot_intra(y2)];
    end
  end

  // matrix loading logic + matrix register
  nbh_t matrix;
  always_ff @(posedge clk) begin
    if (ctrl.s2_step) begin
      if (intra && cfg.nbh == CON_8) begin
        // shift the 3x3 window left, new column (rows y-1, y, y+1) on the right
        for (int r = 0; r < 3; r++) begin
          matrix.a[r][0] <= matrix.a[r][1];
          matrix.a[r][1] <= matrix.a[r][2];
          matrix.a[r][2] <= sel_v[r + 3];
        end
      end else begin
        for (int r = 0; r < 3; r++)
          for (int k = 0; k < 3; k++)
            matrix.a[r][k] <= sel_v[4];
      end
      if (intra && along) begin
        // shift the line window left, new pixel of line y on the right
        for (int i = 0; i < 8; i++) matrix.l[i] <= matrix.l[i + 1];
        matrix.l[8] <= sel_v[4];
      end else begin
        // whole column y-4 .. y+4 in one step
        matrix.l <= sel_v;
      end
      matrix.b <= sel_b;
    end
  end

  // ------------------------------------------------------------ stage 3
  pixel_t     pp_result;
  logic [7:0] pp_sad;
  pixel_t     result_q;            // result register

  pixel_processor u_pp (
    .nbh(matrix), .line(intra && (cfg.nbh == LINE_H9 || cfg.nbh == LINE_V9)), .op(cfg.op), .chan(cfg.chan), .result(pp_result), .sad_y(pp_sad)
  );

  always_ff @(posedge clk) begin
    if (ctrl.s3_exec) result_q <= pp_result;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                       sad <= '0;
    else if (start)                                   sad <= '0;
    else if (ctrl.s3_exec && cfg.mode == MODE_INTER)  sad <= sad + 32'(pp_sad);
  end

  // ------------------------------------------------------------ stage 4
  assign oim_push = ctrl.s4_store;     // storing unit
  assign oim_data = result_q;

endmodule
