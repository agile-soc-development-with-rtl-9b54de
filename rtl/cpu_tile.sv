// cpu_tile: the socket of a processor tile. The processor core with its L1
// caches is outside this design; its memory-mapped I/O accesses enter on the
// cpu_* request port and are forwarded over plane 5 by mmio_proxy, with one
// buffer queue per direction. Other planes are unused here: nothing is sent
// and anything received is dropped (an assertion flags it).
// The paper's private L2 cache, DVFS controller, interrupt-level proxy and
// debug proxy are not part of this design.
//
// Lint: rst_n is used as an asynchronous reset by the flops and as a
// synchronous enable by the assertions' 'disable iff'; a tool that reports
// the reset as both synchronous and asynchronous is seeing the assertions.
module cpu_tile
  import esp_pkg::*;
#(
  parameter logic [COORD_W-1:0] TILE_Y = '0,
  parameter logic [COORD_W-1:0] TILE_X = '0,
  parameter int unsigned        COLS   = 3,
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
  input  logic                           cpu_req_valid,
  output logic                           cpu_req_ready,
  input  logic                           cpu_we,
  input  logic [31:0]                    cpu_addr,
  input  logic [31:0]                    cpu_wdata,
  output logic                           cpu_rsp_valid,
  output logic [31:0]                    cpu_rdata
);
  localparam int unsigned P5 = PLANE_MISC - 1;

  logic  o_v, o_r, i_v, i_r;
  flit_t o_f, i_f;

  mmio_proxy #(.TILE_Y(TILE_Y), .TILE_X(TILE_X), .COLS(COLS)) u_mmio (
    .clk, .rst_n, .cpu_req_valid, .cpu_req_ready, .cpu_we, .cpu_addr, .cpu_wdata, .cpu_rsp_valid, .cpu_rdata,
    .out_valid(o_v), .out_ready(o_r), .out_flit(o_f), .in_valid(i_v), .in_ready(i_r), .in_flit(i_f));

  noc_queue #(.W(FLIT_W), .DEPTH(QDEPTH)) u_q5_out (.clk, .rst_n,
    .in_valid(o_v), .in_ready(o_r), .in_data(o_f),
    .out_valid(noc_out_valid[P5]), .out_ready(noc_out_ready[P5]), .out_data(noc_out_flit[P5]));
  noc_queue #(.W(FLIT_W), .DEPTH(QDEPTH)) u_q5_in (.clk, .rst_n,
    .in_valid(noc_in_valid[P5]), .in_ready(noc_in_ready[P5]), .in_data(noc_in_flit[P5]),
    .out_valid(i_v), .out_ready(i_r), .out_data(i_f));

  for (genvar p = 0; p < NUM_PLANES; p++) begin : g_unused
    if (p != P5) begin : g_u
      assign noc_out_valid[p] = 1'b0;
      assign noc_out_flit[p]  = '0;
      assign noc_in_ready[p]  = 1'b1;
      a_nothing_in: assert property (@(posedge clk) disable iff (!rst_n) !noc_in_valid[p]);
    end
  end
endmodule
