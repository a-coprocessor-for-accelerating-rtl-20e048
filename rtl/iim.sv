// iim: input intermediate memory of the AddressEngine.
//
// Holds the most recent image lines in front of the process unit so that a
// pixel brought in from the board memory is reused by every neighbourhood it
// belongs to. It is made of LINES line memories, each split into a lower bank
// (Y,U,V) and an upper bank (Alfa,Aux), 2*LINES memory blocks in all. A read
// gives the pixel at one column of every line memory at once, so a whole
// vertical column of the neighbourhood - also a neighbourhood that stands
// perpendicular to the scan direction - arrives in a single cycle.
//
// It behaves as a FIFO of lines. Intra mode: one FIFO of LINES lines, image
// line L in line memory L mod LINES. Inter mode: two FIFOs of LINES/2 lines,
// image 0 in the lower half and image 1 in the upper half. The process unit
// reports the highest line its next pixel-cycle needs (need_line) and the
// lowest line it still needs (low_line); EMPTY is raised while need_line has
// not arrived yet, FULL while the FIFO has no free line memory.
//
// Interface: the input transmission unit writes one pixel per cycle (wr_*)
// and pulses line_done after the last pixel of a line. start clears the FIFO.
// Timing: writes take effect at the clock edge; the read port is
// combinational (rd_col -> rd_data) and is registered by the preload register
// of the process unit, which together form one synchronous block RAM read.
// The sizes, the two banks and the FULL/EMPTY signals follow the paper; the
// exact FULL/EMPTY rule in terms of line numbers is this design's choice.
module iim
  import ae_pkg::*;
#(
  parameter int unsigned LINES = STRIP_LINES,  // line memories (paper: 16)
  parameter int unsigned W_MAX = 352           // longest line (CIF width)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,       // new image: clear FIFO
  input  addr_mode_e                 mode,
  // write side (input TxU)
  input  logic                       wr_en,
  input  logic                       wr_img,      // image 0 or 1 (inter)
  input  logic [9:0]                 wr_line,
  input  logic [$clog2(W_MAX)-1:0]   wr_col,
  input  pixel_t                     wr_data,
  input  logic                       line_done,   // last pixel of a line written
  input  logic                       line_done_img,
  // read side (process unit)
  input  logic [$clog2(W_MAX)-1:0]   rd_col,
  output pixel_t [LINES-1:0]         rd_data,     // one pixel per line memory
  // FIFO state
  input  logic [9:0]                 need_line,
  input  logic [9:0]                 low_line,
  output logic [9:0]                 lines_in_0,  // lines received, image 0
  output logic [9:0]                 lines_in_1,  // lines received, image 1
  output logic                       empty,
  output logic                       full_0,
  output logic                       full_1
);
  localparam int unsigned SW = $clog2(LINES);

  // Two banks of LINES line memories each.
  logic [WORD_W-1:0] mem_lo [LINES][W_MAX];
  logic [WORD_W-1:0] mem_hi [LINES][W_MAX];

  logic [9:0] lines_in [2];

  function automatic logic [SW-1:0] slot_of(addr_mode_e m, logic img, logic [9:0] line);
    logic [SW-1:0] s;
    if (m == MODE_INTER) s = {img, line[SW-2:0]};
    else                 s = line[SW-1:0];
    return s;
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) begin
      mem_lo[slot_of(mode, wr_img, wr_line)][wr_col] <= pix_lo(wr_data);
      mem_hi[slot_of(mode, wr_img, wr_line)][wr_col] <= pix_hi(wr_data);
    end
  end

  always_comb begin
    for (int s = 0; s < LINES; s++)
      rd_data[s] = pixel_t'({mem_hi[s][rd_col], mem_lo[s][rd_col]});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lines_in[0] <= '0;
      lines_in[1] <= '0;
    end else if (start) begin
      lines_in[0] <= '0;
      lines_in[1] <= '0;
    end else if (line_done) begin
      lines_in[line_done_img] <= lines_in[line_done_img] + 10'd1;
    end
  end

  assign lines_in_0 = lines_in[0];
  assign lines_in_1 = lines_in[1];

  logic [10:0] cap;
  assign cap = (mode == MODE_INTER) ? 11'(LINES / 2) : 11'(LINES);

  always_comb begin
    empty  = (lines_in[0] <= need_line) ||
             ((mode == MODE_INTER) && (lines_in[1] <= need_line));
    full_0 = ({1'b0, lines_in[0]} - {1'b0, low_line}) >= cap;
    full_1 = (mode == MODE_INTER) &&
             (({1'b0, lines_in[1]} - {1'b0, low_line}) >= cap);
  end

  // A line may only be written into a free line memory.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en |-> (wr_line >= low_line) &&
              ({1'b0, wr_line} - {1'b0, low_line} < cap));

endmodule
