// oim: output intermediate memory of the AddressEngine.
//
// Buffers result pixels between the process unit, which can deliver one
// pixel per clock, and the output transmission unit, which needs two clocks
// per pixel because both 32-bit halves go to the same board memory bank.
// It has the structure of the input intermediate memory: LINES line
// memories of W_MAX pixels, each split into a lower (Y,U,V) and an upper
// (Alfa,Aux) 32-bit bank. Here it is used as a plain first-in first-out
// buffer that fills the line memories one after the other.
//
// Interface: push/push_data from stage 4 of the process unit, pop/pop_data
// toward the output transmission unit (pop_data shows the oldest pixel while
// empty is low; pop removes it). full and empty go to the image level
// controller. Timing: push and pop take effect at the clock edge, both may
// happen in the same cycle. The size and banks follow the paper; the
// show-ahead read and the FULL/EMPTY rule are this design's choice.
module oim
  import ae_pkg::*;
#(
  parameter int unsigned LINES = STRIP_LINES,
  parameter int unsigned W_MAX = 352
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   push,
  input  pixel_t push_data,
  input  logic   pop,
  output pixel_t pop_data,
  output logic   full,
  output logic   empty
);
  localparam int unsigned SW    = $clog2(LINES);
  localparam int unsigned CW    = $clog2(W_MAX);
  localparam int unsigned DEPTH = LINES * W_MAX;

  logic [WORD_W-1:0] mem_lo [LINES][W_MAX];
  logic [WORD_W-1:0] mem_hi [LINES][W_MAX];

  typedef struct packed {
    logic [SW-1:0] slot;
    logic [CW-1:0] col;
  } ptr_t;

  ptr_t wp, rp;
  logic [$clog2(DEPTH+1)-1:0] count;

  function automatic ptr_t next_ptr(ptr_t p);
    ptr_t n;
    n = p;
    if (p.col == CW'(W_MAX - 1)) begin
      n.col  = '0;
      n.slot = (p.slot == SW'(LINES - 1)) ? '0 : p.slot + SW'(1);
    end else begin
      n.col = p.col + CW'(1);
    end
    return n;
  endfunction

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk) begin
    if (do_push) begin
      mem_lo[wp.slot][wp.col] <= pix_lo(push_data);
      mem_hi[wp.slot][wp.col] <= pix_hi(push_data);
    end
  end

  assign pop_data = pixel_t'({mem_hi[rp.slot][rp.col], mem_lo[rp.slot][rp.col]});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else if (start) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= next_ptr(wp);
      if (do_pop)  rp <= next_ptr(rp);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  assign full  = (count == ($bits(count))'(DEPTH));
  assign empty = (count == '0);

  a_push_not_full: assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_pop_not_empty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
