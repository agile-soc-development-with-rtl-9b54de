// acc_tile: an accelerator tile. The socket joins the accelerator (esp_acc)
// to the NoC through platform-service proxies, each with its own buffer queue
// (noc_queue) between it and the router's tile port:
//   plane 6 out: DMA read requests / P2P requests and DMA writes (two proxies,
//                merged by noc_pkt_mux);
//   plane 6 in:  P2P requests from consumer tiles;
//   plane 4 in:  DMA read data and P2P data;
//   plane 4 out: P2P data sent to a consumer;
//   plane 5 in/out: register access and interrupt (acc_regs).
// Planes 1-3 (coherence) are unused here: nothing is sent on them and
// anything received is dropped (an assertion flags it).
// The accelerator interface, the proxies and the per-proxy queues follow the
// paper; the accelerator's own computation and the queue depth are this
// design's choices.
//
// Lint: rst_n is used as an asynchronous reset by the flops and as a
// synchronous enable by the assertions' 'disable iff'; a tool that reports
// the reset as both synchronous and asynchronous is seeing the assertions.
module acc_tile
  import esp_pkg::*;
#(
  parameter logic [COORD_W-1:0]               TILE_Y    = '0,
  parameter logic [COORD_W-1:0]               TILE_X    = '0,
  parameter logic [COORD_W-1:0]               IRQ_Y     = '0,
  parameter logic [COORD_W-1:0]               IRQ_X     = '0,
  parameter int unsigned                      NUM_MEM   = 2,
  parameter logic [NUM_MEM-1:0][COORD_W-1:0]  MEM_Y     = '0,
  parameter logic [NUM_MEM-1:0][COORD_W-1:0]  MEM_X     = '0,
  parameter int unsigned                      PART_BITS = 20,
  parameter int unsigned                      PLM_WORDS = 64,
  parameter int unsigned                      QDEPTH    = 4
) (
  input  logic                           clk,
  input  logic                           rst_n,
  output logic  [NUM_PLANES-1:0]         noc_out_valid,
  input  logic  [NUM_PLANES-1:0]         noc_out_ready,
  output flit_t [NUM_PLANES-1:0]         noc_out_flit,
  input  logic  [NUM_PLANES-1:0]         noc_in_valid,
  output logic  [NUM_PLANES-1:0]         noc_in_ready,
  input  flit_t [NUM_PLANES-1:0]         noc_in_flit,
  output logic                           acc_busy
);
  localparam int unsigned P4 = PLANE_DMA_M2D - 1;
  localparam int unsigned P5 = PLANE_MISC - 1;
  localparam int unsigned P6 = PLANE_DMA_D2M - 1;

  // accelerator <-> DMAC / registers
  logic      conf_valid;     conf_t conf;
  logic      lc_v, lc_r;     dma_ctrl_t lc;
  logic      ld_v, ld_r;     logic [DATA_W-1:0] ld_d;
  logic      sc_v, sc_r;     dma_ctrl_t sc;
  logic      sd_v, sd_r;     logic [DATA_W-1:0] sd_d;
  logic      acc_done;
  logic [31:0] base;
  logic      p2p_st, p2p_ld;
  logic [COORD_W-1:0] p2p_y, p2p_x;

  esp_acc #(.PLM_WORDS(PLM_WORDS)) u_acc (
    .clk, .rst_n, .conf_valid, .conf,
    .load_ctrl_valid(lc_v), .load_ctrl_ready(lc_r), .load_ctrl(lc),
    .load_chnl_valid(ld_v), .load_chnl_ready(ld_r), .load_chnl_data(ld_d),
    .store_ctrl_valid(sc_v), .store_ctrl_ready(sc_r), .store_ctrl(sc),
    .store_chnl_valid(sd_v), .store_chnl_ready(sd_r), .store_chnl_data(sd_d),
    .acc_done, .busy(acc_busy));

  // proxy-side queue ends
  logic  ldq_v, ldq_r, stq_v, stq_r, rspq_v, rspq_r, p2pq_v, p2pq_r, p2poq_v, p2poq_r;
  flit_t ldq_f, stq_f, rspq_f, p2pq_f, p2poq_f;
  logic  regi_v, regi_r, rego_v, rego_r;
  flit_t regi_f, rego_f;

  esp_dmac #(.TILE_Y(TILE_Y), .TILE_X(TILE_X), .NUM_MEM(NUM_MEM), .MEM_Y(MEM_Y), .MEM_X(MEM_X),
             .PART_BITS(PART_BITS)) u_dmac (
    .clk, .rst_n, .base, .p2p_store_en(p2p_st), .p2p_load_en(p2p_ld), .p2p_src_y(p2p_y), .p2p_src_x(p2p_x),
    .load_ctrl_valid(lc_v), .load_ctrl_ready(lc_r), .load_ctrl(lc),
    .load_chnl_valid(ld_v), .load_chnl_ready(ld_r), .load_chnl_data(ld_d),
    .store_ctrl_valid(sc_v), .store_ctrl_ready(sc_r), .store_ctrl(sc),
    .store_chnl_valid(sd_v), .store_chnl_ready(sd_r), .store_chnl_data(sd_d),
    .ld_req_valid(ldq_v), .ld_req_ready(ldq_r), .ld_req_flit(ldq_f),
    .st_req_valid(stq_v), .st_req_ready(stq_r), .st_req_flit(stq_f),
    .rsp_valid(rspq_v), .rsp_ready(rspq_r), .rsp_flit(rspq_f),
    .p2p_req_valid(p2pq_v), .p2p_req_ready(p2pq_r), .p2p_req_flit(p2pq_f),
    .p2p_out_valid(p2poq_v), .p2p_out_ready(p2poq_r), .p2p_out_flit(p2poq_f));

  acc_regs #(.TILE_Y(TILE_Y), .TILE_X(TILE_X), .IRQ_Y(IRQ_Y), .IRQ_X(IRQ_X)) u_regs (
    .clk, .rst_n,
    .req_valid(regi_v), .req_ready(regi_r), .req_flit(regi_f),
    .out_valid(rego_v), .out_ready(rego_r), .out_flit(rego_f),
    .conf_valid, .conf, .base, .p2p_store_en(p2p_st), .p2p_load_en(p2p_ld),
    .p2p_src_y(p2p_y), .p2p_src_x(p2p_x), .acc_done, .acc_busy);

  // ---- plane 6 out: two proxies, two queues, one mux ----
  logic  [1:0] m6_v, m6_r;
  flit_t [1:0] m6_f;
  noc_queue #(.W(FLIT_W), .DEPTH(QDEPTH)) u_q6_ld (.clk, .rst_n,
    .in_valid(ldq_v), .in_ready(ldq_r), .in_data(ldq_f), .out_valid(m6_v[0]), .out_ready(m6_r[0]), .out_data(m6_f[0]));
  noc_queue #(.W(FLIT_W), .DEPTH(QDEPTH)) u_q6_st (.clk, .rst_n,
    .in_valid(stq_v), .in_ready(stq_r), .in_data(stq_f), .out_valid(m6_v[1]), .out_ready(m6_r[1]), .out_data(m6_f[1]));
  noc_pkt_mux #(.N(2)) u_mux6 (.clk, .rst_n, .in_valid(m6_v), .in_ready(m6_r), .in_flit(m6_f),
    .out_valid(noc_out_valid[P6]), .out_ready(noc_out_ready[P6]), .out_flit(noc_out_flit[P6]));

  // ---- plane 6 in: P2P requests ----
  noc_queue #(.W(FLIT_W), .DEPTH(QDEPTH)) u_q6_in (.clk, .rst_n,
    .in_valid(noc_in_valid[P6]), .in_ready(noc_in_ready[P6]), .in_data(noc_in_flit[P6]),
    .out_valid(p2pq_v), .out_ready(p2pq_r), .out_data(p2pq_f));

  // ---- plane 4 in: DMA / P2P data ----
  noc_queue #(.W(FLIT_W), .DEPTH(QDEPTH)) u_q4_in (.clk, .rst_n,
    .in_valid(noc_in_valid[P4]), .in_ready(noc_in_ready[P4]), .in_data(noc_in_flit[P4]),
    .out_valid(rspq_v), .out_ready(rspq_r), .out_data(rspq_f));

  // ---- plane 4 out: P2P data ----
  noc_queue #(.W(FLIT_W), .DEPTH(QDEPTH)) u_q4_out (.clk, .rst_n,
    .in_valid(p2poq_v), .in_ready(p2poq_r), .in_data(p2poq_f),
    .out_valid(noc_out_valid[P4]), .out_ready(noc_out_ready[P4]), .out_data(noc_out_flit[P4]));

  // ---- plane 5: register access in, register responses and interrupts out ----
  noc_queue #(.W(FLIT_W), .DEPTH(QDEPTH)) u_q5_in (.clk, .rst_n,
    .in_valid(noc_in_valid[P5]), .in_ready(noc_in_ready[P5]), .in_data(noc_in_flit[P5]),
    .out_valid(regi_v), .out_ready(regi_r), .out_data(regi_f));
  noc_queue #(.W(FLIT_W), .DEPTH(QDEPTH)) u_q5_out (.clk, .rst_n,
    .in_valid(rego_v), .in_ready(rego_r), .in_data(rego_f),
    .out_valid(noc_out_valid[P5]), .out_ready(noc_out_ready[P5]), .out_data(noc_out_flit[P5]));

  // ---- unused planes ----
  for (genvar p = 0; p < NUM_PLANES; p++) begin : g_unused
    if (p != P4 && p != P5 && p != P6) begin : g_u
      assign noc_out_valid[p] = 1'b0;
      assign noc_out_flit[p]  = '0;
      assign noc_in_ready[p]  = 1'b1;
      a_nothing_in: assert property (@(posedge clk) disable iff (!rst_n) !noc_in_valid[p]);
    end
  end
endmodule
