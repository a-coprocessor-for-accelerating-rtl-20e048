// zbt_bank_model: behavioural model of one 32-bit ZBT SRAM bank of the
// board, not synthesizable logic. Port 1 is the FPGA side: synchronous,
// read data RD_LAT clocks after the read is issued (pipelined ZBT), write
// takes effect at the clock edge. Port 2 stands for the PC reaching the
// same bank over the PCI bus: immediate write and read.
module zbt_bank_model #(
  parameter int unsigned AW     = 18,
  parameter int unsigned RD_LAT = 2
) (
  input  logic          clk,
  input  logic [AW-1:0] addr,
  input  logic          en,
  input  logic          we,
  input  logic [31:0]   wdata,
  output logic [31:0]   rdata,
  input  logic          h_we,
  input  logic [AW-1:0] h_addr,
  input  logic [31:0]   h_wdata,
  output logic [31:0]   h_rdata
);
  logic [31:0] mem [2**AW];
  logic [31:0] pipe [RD_LAT];

  always_ff @(posedge clk) begin
    if (en && we) mem[addr] <= wdata;
    if (h_we)     mem[h_addr] <= h_wdata;
    pipe[0] <= mem[addr];
    for (int i = 1; i < RD_LAT; i++) pipe[i] <= pipe[i-1];
  end

  assign rdata   = pipe[RD_LAT-1];
  assign h_rdata = mem[h_addr];
endmodule
