// noc_multiplane: the multi-plane NoC. NUM_PLANES physically separate
// ROWS x COLS meshes (noc_mesh), one per message class, so that messages of
// one class can never block another (protocol-deadlock freedom) and the planes
// add up their bandwidth. Port arrays are indexed [plane-1][tile]; tile
// t = y*COLS + x. The six planes and their use follow the paper: 1 coherence
// request, 2 coherence forward, 3 coherence response, 4 and 6 DMA, 5 short
// messages (register access, interrupts, I/O).
module noc_multiplane
  import esp_pkg::*;
#(
  parameter int unsigned ROWS   = 3,
  parameter int unsigned COLS   = 3,
  parameter int unsigned PLANES = NUM_PLANES,
  parameter int unsigned DEPTH  = 4
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  input  logic  [PLANES-1:0][ROWS*COLS-1:0]       loc_in_valid,
  output logic  [PLANES-1:0][ROWS*COLS-1:0]       loc_in_ready,
  input  flit_t [PLANES-1:0][ROWS*COLS-1:0]       loc_in_flit,
  output logic  [PLANES-1:0][ROWS*COLS-1:0]       loc_out_valid,
  input  logic  [PLANES-1:0][ROWS*COLS-1:0]       loc_out_ready,
  output flit_t [PLANES-1:0][ROWS*COLS-1:0]       loc_out_flit
);
  for (genvar p = 0; p < PLANES; p++) begin : g_plane
    noc_mesh #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH)) u_mesh (
      .clk, .rst_n,
      .loc_in_valid (loc_in_valid[p]),  .loc_in_ready (loc_in_ready[p]),  .loc_in_flit (loc_in_flit[p]),
      .loc_out_valid(loc_out_valid[p]), .loc_out_ready(loc_out_ready[p]), .loc_out_flit(loc_out_flit[p])
    );
  end
endmodule
