// mem_tile: a memory tile. Its socket holds the non-coherent DMA service
// (mem_dma_proxy) with a buffer queue on plane 6 (requests in) and on plane 4
// (data out), and exposes the tile's channel to external memory as a plain
// request port (see mem_dma_proxy). The DRAM controller behind that port is
// outside this design. Planes 1-3 and 5 are unused in this tile: nothing is
// sent and anything received is dropped (an assertion flags it).
// The tile and its planes follow the paper; the LLC partition and directory
// that the paper places here are not part of this design.
//
// Lint: rst_n is used as an asynchronous reset by the flops and as a
// synchronous enable by the assertions' 'disable iff'; a tool that reports
// the reset as both synchronous and asynchronous is seeing the assertions.
module mem_tile
  import esp_pkg::*;
#(
  parameter logic [COORD_W-1:0] TILE_Y = '0,
  parameter logic [COORD_W-1:0] TILE_X = '0,
  parameter int unsigned        QDEPTH = 4
) (
  input  logic                           clk,
  input  logic                           rst_n,
  output logic  [NUM_PLANES-1:0]         noc_out_valid,
  input  logic  [NUM_PLANES-1:0]         noc_out_ready,
  output flit_t [NUM_PLANES-1:0]         noc_out_flit,
  input  logic  [NUM_PLANES-1:0]         noc_in_valid,
  output logic  [NUM_PLANES-1:0]         noc_in_ready,
  input  flit_t [NUM_PLANES-1:0]         noc_in_flit,
  output logic                           mem_req_valid,
  input  logic                           mem_req_ready,
  output logic                           mem_we,
  output logic [31:0]                    mem_addr,
  output logic [DATA_W-1:0]              mem_wdata,
  input  logic                           mem_rvalid,
  input  logic [DATA_W-1:0]              mem_rdata
);
  localparam int unsigned P4 = PLANE_DMA_M2D - 1;
  localparam int unsigned P6 = PLANE_DMA_D2M - 1;

  logic  rq_v, rq_r, rs_v, rs_r;
  flit_t rq_f, rs_f;

  noc_queue #(.W(FLIT_W), .DEPTH(QDEPTH)) u_q6_in (.clk, .rst_n,
    .in_valid(noc_in_valid[P6]), .in_ready(noc_in_ready[P6]), .in_data(noc_in_flit[P6]),
    .out_valid(rq_v), .out_ready(rq_r), .out_data(rq_f));

  mem_dma_proxy #(.TILE_Y(TILE_Y), .TILE_X(TILE_X), .RSP_DEPTH(QDEPTH)) u_dma (
    .clk, .rst_n,
    .req_valid(rq_v), .req_ready(rq_r), .req_flit(rq_f),
    .rsp_valid(rs_v), .rsp_ready(rs_r), .rsp_flit(rs_f),
    .mem_req_valid, .mem_req_ready, .mem_we, .mem_addr, .mem_wdata, .mem_rvalid, .mem_rdata);

  noc_queue #(.W(FLIT_W), .DEPTH(QDEPTH)) u_q4_out (.clk, .rst_n,
    .in_valid(rs_v), .in_ready(rs_r), .in_data(rs_f),
    .out_valid(noc_out_valid[P4]), .out_ready(noc_out_ready[P4]), .out_data(noc_out_flit[P4]));

  for (genvar p = 0; p < NUM_PLANES; p++) begin : g_unused
    if (p != P4) begin : g_o
      assign noc_out_valid[p] = 1'b0;
      assign noc_out_flit[p]  = '0;
    end
    if (p != P6) begin : g_i
      assign noc_in_ready[p] = 1'b1;
      a_nothing_in: assert property (@(posedge clk) disable iff (!rst_n) !noc_in_valid[p]);
    end
  end
endmodule
