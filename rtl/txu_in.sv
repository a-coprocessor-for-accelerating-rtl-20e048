// txu_in: input transmission unit of the AddressEngine.
//
// Copies one scan line from the board ZBT memory into the input
// intermediate memory per request: an image line in a horizontal scan, an
// image column in a vertical scan. The pixel's lower half (Y,U,V) and upper
// half (Alfa,Aux) sit at the same address of the two banks of a block
// (block_A = banks 0/1, block_B = banks 2/3), so both halves are read in the
// same cycle and one whole pixel is moved per clock.
//
// Memory map (this design's choice within the paper's scheme): image 0 pixel
// (x,y) at word y*width + x, image 1 (inter mode) at IMG2_BASE + y*width + x,
// in the block that holds the strip of that pixel. A horizontal scan line L
// is read at L*width + i, i = 0..width-1; a vertical one at i*width + L,
// i = 0..height-1, by stepping the address by width.
//
// Interface: req with req_img/req_line/req_blk starts a line while busy is
// low. The unit issues one read per clock on both banks of the block; the
// banks return data RD_LAT clocks later (ZBT pipelined read). Each returned
// pixel is written to the IIM at its column; when the last one is written,
// line_done pulses together with that write. A scan line of N pixels thus
// takes N + RD_LAT clocks. The paper gives the unit's function; the request
// handshake and the read latency are this design's choice.
module txu_in
  import ae_pkg::*;
#(
  parameter int unsigned W_MAX  = 352,
  parameter int unsigned RD_LAT = 2      // ZBT read latency in clocks
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [9:0]                width,
  input  logic [9:0]                height,
  input  logic                      vert,       // vertical scan
  // request from the image level controller
  input  logic                      req,
  input  logic                      req_img,
  input  logic [9:0]                req_line,
  input  logic                      req_blk,    // 0 = block_A, 1 = block_B
  output logic                      busy,
  // ZBT read side: one address for the two banks of a block
  output logic [ZBT_AW-1:0]         zbt_addr,
  output logic                      zbt_rd_a,   // read banks 0/1
  output logic                      zbt_rd_b,   // read banks 2/3
  input  logic [WORD_W-1:0]         zbt_rdata_a_lo,
  input  logic [WORD_W-1:0]         zbt_rdata_a_hi,
  input  logic [WORD_W-1:0]         zbt_rdata_b_lo,
  input  logic [WORD_W-1:0]         zbt_rdata_b_hi,
  // IIM write side
  output logic                      iim_wr,
  output logic                      iim_img,
  output logic [9:0]                iim_line,
  output logic [$clog2(W_MAX)-1:0]  iim_col,
  output pixel_t                    iim_data,
  output logic                      line_done
);
  localparam int unsigned CW = $clog2(W_MAX);

  logic              active;      // issuing reads
  logic              img_q, blk_q;
  logic [9:0]        line_q;
  logic [ZBT_AW-1:0] addr_q;      // address of the next read
  logic [ZBT_AW-1:0] step_q;      // 1 (horizontal) or width (vertical)
  logic [9:0]        len;         // pixels per scan line
  logic [CW-1:0]     issue_col;
  logic [CW-1:0]     ret_col;
  logic [9:0]        returned;

  // read return pipeline: valid and block select per pending read
  logic [RD_LAT-1:0] pend_v;
  logic [RD_LAT-1:0] pend_b;

  logic issue;
  assign issue = active;
  assign len   = vert ? height : width;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      busy      <= 1'b0;
      img_q     <= 1'b0;
      blk_q     <= 1'b0;
      line_q    <= '0;
      addr_q    <= '0;
      step_q    <= '0;
      issue_col <= '0;
      ret_col   <= '0;
      returned  <= '0;
      pend_v    <= '0;
      pend_b    <= '0;
    end else begin
      pend_v <= {pend_v[RD_LAT-2:0], issue};
      pend_b <= {pend_b[RD_LAT-2:0], blk_q};
      if (req && !busy) begin
        active    <= 1'b1;
        busy      <= 1'b1;
        img_q     <= req_img;
        blk_q     <= req_blk;
        line_q    <= req_line;
        addr_q    <= (vert ? ZBT_AW'(req_line) : ZBT_AW'(req_line * width)) +
                     (req_img ? ZBT_AW'(IMG2_BASE) : '0);
        step_q    <= vert ? ZBT_AW'(width) : ZBT_AW'(1);
        issue_col <= '0;
        ret_col   <= '0;
        returned  <= '0;
      end else begin
        if (issue) begin
          if (10'(issue_col) == len - 10'd1) active <= 1'b0;
          issue_col <= issue_col + CW'(1);
          addr_q    <= addr_q + step_q;
        end
        if (pend_v[RD_LAT-1]) begin
          ret_col  <= ret_col + CW'(1);
          returned <= returned + 10'd1;
          if (returned == len - 10'd1) busy <= 1'b0;
        end
      end
    end
  end

  assign zbt_addr = addr_q;
  assign zbt_rd_a = issue && !blk_q;
  assign zbt_rd_b = issue && blk_q;

  assign iim_wr    = pend_v[RD_LAT-1];
  assign iim_img   = img_q;
  assign iim_line  = line_q;
  assign iim_col   = ret_col;
  assign iim_data  = pend_b[RD_LAT-1] ? pixel_t'({zbt_rdata_b_hi, zbt_rdata_b_lo})
                                      : pixel_t'({zbt_rdata_a_hi, zbt_rdata_a_lo});
  assign line_done = pend_v[RD_LAT-1] && (returned == len - 10'd1);

endmodule
