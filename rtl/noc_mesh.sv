// noc_mesh: one physical plane of the NoC, a ROWS x COLS 2D mesh of
// noc_router instances. Tile t = y*COLS + x sits at row y, column x; row 0 is
// the north edge. Neighbouring routers are joined by valid/ready links that
// also carry the look-ahead route; links off the mesh edge are tied off
// (never valid, never ready). Each tile sees one local input and one local
// output port. One hop takes one clock cycle.
module noc_mesh
  import esp_pkg::*;
#(
  parameter int unsigned ROWS  = 3,
  parameter int unsigned COLS  = 3,
  parameter int unsigned DEPTH = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic  [ROWS*COLS-1:0]       loc_in_valid,
  output logic  [ROWS*COLS-1:0]       loc_in_ready,
  input  flit_t [ROWS*COLS-1:0]       loc_in_flit,
  output logic  [ROWS*COLS-1:0]       loc_out_valid,
  input  logic  [ROWS*COLS-1:0]       loc_out_ready,
  output flit_t [ROWS*COLS-1:0]       loc_out_flit
);
  localparam int unsigned NT = ROWS * COLS;

  logic  [NT-1:0][NPORTS-1:0]             i_valid, i_ready, o_valid, o_ready;
  flit_t [NT-1:0][NPORTS-1:0]             i_flit, o_flit;
  logic  [NT-1:0][NPORTS-1:0][NPORTS-1:0] i_route, o_route;

  for (genvar y = 0; y < ROWS; y++) begin : g_y
    for (genvar x = 0; x < COLS; x++) begin : g_x
      localparam int unsigned T = y * COLS + x;

      noc_router #(.X(COORD_W'(x)), .Y(COORD_W'(y)), .DEPTH(DEPTH)) u_rtr (
        .clk, .rst_n,
        .in_valid (i_valid[T]), .in_ready (i_ready[T]), .in_flit (i_flit[T]), .in_route (i_route[T]),
        .out_valid(o_valid[T]), .out_ready(o_ready[T]), .out_flit(o_flit[T]), .out_route(o_route[T])
      );

      // local port
      assign i_valid[T][PORT_L] = loc_in_valid[T];
      assign i_flit [T][PORT_L] = loc_in_flit[T];
      assign i_route[T][PORT_L] = '0;
      assign loc_in_ready[T]    = i_ready[T][PORT_L];
      assign loc_out_valid[T]   = o_valid[T][PORT_L];
      assign loc_out_flit[T]    = o_flit[T][PORT_L];
      assign o_ready[T][PORT_L] = loc_out_ready[T];

      // north: link with (y-1, x)
      if (y > 0) begin : g_n
        assign i_valid[T][PORT_N] = o_valid[T-COLS][PORT_S];
        assign i_flit [T][PORT_N] = o_flit [T-COLS][PORT_S];
        assign i_route[T][PORT_N] = o_route[T-COLS][PORT_S];
        assign o_ready[T][PORT_N] = i_ready[T-COLS][PORT_S];
      end else begin : g_n0
        assign i_valid[T][PORT_N] = 1'b0;
        assign i_flit [T][PORT_N] = '0;
        assign i_route[T][PORT_N] = '0;
        assign o_ready[T][PORT_N] = 1'b0;
      end
      if (y < ROWS - 1) begin : g_s
        assign i_valid[T][PORT_S] = o_valid[T+COLS][PORT_N];
        assign i_flit [T][PORT_S] = o_flit [T+COLS][PORT_N];
        assign i_route[T][PORT_S] = o_route[T+COLS][PORT_N];
        assign o_ready[T][PORT_S] = i_ready[T+COLS][PORT_N];
      end else begin : g_s0
        assign i_valid[T][PORT_S] = 1'b0;
        assign i_flit [T][PORT_S] = '0;
        assign i_route[T][PORT_S] = '0;
        assign o_ready[T][PORT_S] = 1'b0;
      end
      if (x > 0) begin : g_w
        assign i_valid[T][PORT_W] = o_valid[T-1][PORT_E];
        assign i_flit [T][PORT_W] = o_flit [T-1][PORT_E];
        assign i_route[T][PORT_W] = o_route[T-1][PORT_E];
        assign o_ready[T][PORT_W] = i_ready[T-1][PORT_E];
      end else begin : g_w0
        assign i_valid[T][PORT_W] = 1'b0;
        assign i_flit [T][PORT_W] = '0;
        assign i_route[T][PORT_W] = '0;
        assign o_ready[T][PORT_W] = 1'b0;
      end
      if (x < COLS - 1) begin : g_e
        assign i_valid[T][PORT_E] = o_valid[T+1][PORT_W];
        assign i_flit [T][PORT_E] = o_flit [T+1][PORT_W];
        assign i_route[T][PORT_E] = o_route[T+1][PORT_W];
        assign o_ready[T][PORT_E] = i_ready[T+1][PORT_W];
      end else begin : g_e0
        assign i_valid[T][PORT_E] = 1'b0;
        assign i_flit [T][PORT_E] = '0;
        assign i_route[T][PORT_E] = '0;
        assign o_ready[T][PORT_E] = 1'b0;
      end
    end
  end
endmodule
