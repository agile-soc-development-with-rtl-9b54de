// plm_bank: one bank of an accelerator's private local memory (PLM). A
// simple dual-port array: one write port, one read port whose data appears
// one clock after the address (rdata = mem[raddr of the previous cycle]);
// a read and a write of the same word in one cycle return the old word.
// No reset: a word is read only after it has been written. Maps onto an
// SRAM macro or FPGA block RAM.
module plm_bank #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
