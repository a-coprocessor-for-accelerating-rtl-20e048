// address_engine: FPGA part of the AddressEngine coprocessor (top level).
//
// The AddressEngine speeds up the low-level pixel loops of image analysis
// software: the PC keeps the high-level algorithm and, per library call,
// hands the coprocessor one or two images plus one pixel operation that is
// applied to every pixel. This top connects
//   image_level_ctrl  - talks to the PC (start, strips, interrupts), steers
//                       the transfers and enables the processor
//   txu_in            - ZBT block_A/block_B -> IIM, one line per request
//   iim               - 16-line input buffer, whole column per read
//   pixel_level_ctrl  - control path of the processor (Fig. 5)
//   process_unit      - four-stage datapath of the processor (Fig. 6)
//   oim               - 16-line output buffer
//   txu_out           - OIM -> ZBT Res_Block_A/Res_Block_B
// The six ZBT banks and the PC/PCI side are outside: their ports are
// brought out. Banks 0..3 (input blocks) are only read here, banks 4 and 5
// (result blocks) only written; the PC reaches the same banks over the PCI
// bus through its own port of the board memory.
//
// Timing: steady state one result pixel per clock out of the process unit,
// one result pixel per two clocks into the ZBT, so the OIM fills up and the
// processor is throttled to the rate of the result bank.
module address_engine
  import ae_pkg::*;
#(
  parameter int unsigned LINES  = STRIP_LINES,  // IIM/OIM lines (paper: 16)
  parameter int unsigned W_MAX  = 352,          // CIF line length
  parameter int unsigned RD_LAT = 2             // ZBT read latency
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // PC side (register interface behind the PCI bus)
  input  logic                  host_start,
  input  ae_cfg_t               host_cfg,
  input  logic                  strip_valid,
  input  logic [3:0]            irq_clear,
  output logic                  irq,
  output logic [3:0]            irq_status,
  output logic                  busy,
  output logic [17:0]           res_a_count,
  output logic [17:0]           res_total,
  output logic [31:0]           sad,
  // ZBT banks
  output logic [ZBT_AW-1:0]     zbt_addr  [N_ZBT],
  output logic                  zbt_en    [N_ZBT],
  output logic                  zbt_we    [N_ZBT],
  output logic [WORD_W-1:0]     zbt_wdata [N_ZBT],
  input  logic [WORD_W-1:0]     zbt_rdata [N_ZBT]
);
  localparam int unsigned CW = $clog2(W_MAX);

  logic     start;
  ae_cfg_t  cfg;

  // input TxU <-> ILC / IIM
  logic               txu_req, txu_img, txu_blk, txu_busy;
  logic [9:0]         txu_line;
  logic [ZBT_AW-1:0]  in_addr;
  logic               in_rd_a, in_rd_b;
  logic               iim_wr, iim_wimg, line_done;
  logic [9:0]         iim_wline;
  logic [CW-1:0]      iim_wcol;
  pixel_t             iim_wdata;

  // IIM <-> PU
  logic [CW-1:0]      iim_rd_col;
  pixel_t [LINES-1:0] iim_rd_data;
  logic [9:0]         need_line, low_line, lines_in_0, lines_in_1;
  logic               iim_empty, iim_full_0, iim_full_1;

  // PLC <-> PU
  pu_ctrl_t           ctrl;
  logic [3:0]         load_cols;
  logic               all_issued, nx_load, plc_enable, plc_running, plc_done, plc_stalled;

  // OIM
  logic               oim_push, oim_pop, oim_full, oim_empty;
  pixel_t             oim_wdata, oim_rdata;

  // output TxU
  logic               res_switch_req, res_switched;
  logic [ZBT_AW-1:0]  res_addr;
  logic               res_we_a, res_we_b;
  logic [WORD_W-1:0]  res_wdata;

  image_level_ctrl u_ilc (
    .clk, .rst_n,
    .host_start, .host_cfg, .strip_valid, .irq_clear, .irq, .irq_status, .busy,
    .start, .cfg,
    .txu_req, .txu_img, .txu_line, .txu_blk, .txu_busy,
    .txu_line_done(line_done), .txu_line_done_img(iim_wimg),
    .txu_line_done_line(iim_wline),
    .iim_empty, .iim_full_0, .iim_full_1, .oim_full,
    .plc_enable, .plc_done,
    .res_switch_req, .res_switched, .res_total
  );

  txu_in #(.W_MAX(W_MAX), .RD_LAT(RD_LAT)) u_txu_in (
    .clk, .rst_n, .width(cfg.width), .height(cfg.height), .vert(cfg.scan == SCAN_V),
    .req(txu_req), .req_img(txu_img), .req_line(txu_line), .req_blk(txu_blk),
    .busy(txu_busy),
    .zbt_addr(in_addr), .zbt_rd_a(in_rd_a), .zbt_rd_b(in_rd_b),
    .zbt_rdata_a_lo(zbt_rdata[BANK_A_LO]), .zbt_rdata_a_hi(zbt_rdata[BANK_A_HI]),
    .zbt_rdata_b_lo(zbt_rdata[BANK_B_LO]), .zbt_rdata_b_hi(zbt_rdata[BANK_B_HI]),
    .iim_wr, .iim_img(iim_wimg), .iim_line(iim_wline), .iim_col(iim_wcol),
    .iim_data(iim_wdata), .line_done
  );

  iim #(.LINES(LINES), .W_MAX(W_MAX)) u_iim (
    .clk, .rst_n, .start, .mode(cfg.mode),
    .wr_en(iim_wr), .wr_img(iim_wimg), .wr_line(iim_wline), .wr_col(iim_wcol),
    .wr_data(iim_wdata), .line_done, .line_done_img(iim_wimg),
    .rd_col(iim_rd_col), .rd_data(iim_rd_data),
    .need_line, .low_line, .lines_in_0, .lines_in_1,
    .empty(iim_empty), .full_0(iim_full_0), .full_1(iim_full_1)
  );

  pixel_level_ctrl u_plc (
    .clk, .rst_n, .start, .enable(plc_enable), .oim_full,
    .all_issued, .nx_load, .load_cols, .ctrl, .running(plc_running), .done(plc_done),
    .stalled(plc_stalled)
  );

  process_unit #(.LINES(LINES), .W_MAX(W_MAX)) u_pu (
    .clk, .rst_n, .start, .cfg, .ctrl,
    .iim_rd_col, .iim_rd_data, .need_line, .low_line,
    .oim_push, .oim_data(oim_wdata),
    .all_issued, .nx_load, .load_cols, .sad
  );

  oim #(.LINES(LINES), .W_MAX(W_MAX)) u_oim (
    .clk, .rst_n, .start,
    .push(oim_push), .push_data(oim_wdata),
    .pop(oim_pop), .pop_data(oim_rdata),
    .full(oim_full), .empty(oim_empty)
  );

  txu_out u_txu_out (
    .clk, .rst_n, .start,
    .switch_req(res_switch_req), .switched(res_switched),
    .a_count(res_a_count), .total(res_total),
    .oim_empty, .oim_data(oim_rdata), .oim_pop,
    .res_addr, .res_we_a, .res_we_b, .res_wdata
  );

  // ZBT bank wiring (Fig. 3 memory map)
  always_comb begin
    for (int b = 0; b < N_ZBT; b++) begin
      zbt_addr[b]  = in_addr;
      zbt_en[b]    = 1'b0;
      zbt_we[b]    = 1'b0;
      zbt_wdata[b] = res_wdata;
    end
    zbt_en[BANK_A_LO]  = in_rd_a;
    zbt_en[BANK_A_HI]  = in_rd_a;
    zbt_en[BANK_B_LO]  = in_rd_b;
    zbt_en[BANK_B_HI]  = in_rd_b;
    zbt_addr[BANK_RES_A] = res_addr;
    zbt_addr[BANK_RES_B] = res_addr;
    zbt_en[BANK_RES_A] = res_we_a;
    zbt_we[BANK_RES_A] = res_we_a;
    zbt_en[BANK_RES_B] = res_we_b;
    zbt_we[BANK_RES_B] = res_we_b;
  end

endmodule
