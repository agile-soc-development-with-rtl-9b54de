// noc_router: one router of a 2D-mesh NoC plane, five ports (N, S, W, E and
// the local tile port), packet-switched with wormhole flow.
//
// Routing is dimension-ordered (X first, then Y) and look-ahead: a flit
// arrives together with a one-hot vector naming the output port it must take
// in this router, computed by the upstream router. While this router
// arbitrates for that output it computes, in the same cycle, the port the
// packet will take in the next router and sends it along on out_route. Route
// computation is thus off the critical path and every hop costs one clock
// cycle: a flit written into an input queue at one edge can be written into
// the next router's input queue at the following edge. The local input has no
// upstream router, so its route is computed from the header as it enters;
// the route stored with a body flit is not used.
//
// Each input has a noc_queue (DEPTH flits). An output is claimed by the head
// flit of a packet and held until its tail flit has passed; competing head
// flits are served round robin. Links use valid/ready.
//
// The mesh, the look-ahead dimensional routing and the single-cycle hop follow
// the paper; X-before-Y order, queue depth, round-robin arbitration and the
// valid/ready link are this design's choices.
module noc_router
  import esp_pkg::*;
#(
  parameter logic [COORD_W-1:0] X     = '0,
  parameter logic [COORD_W-1:0] Y     = '0,
  parameter int unsigned        DEPTH = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic  [NPORTS-1:0]            in_valid,
  output logic  [NPORTS-1:0]            in_ready,
  input  flit_t [NPORTS-1:0]            in_flit,
  input  logic  [NPORTS-1:0][NPORTS-1:0] in_route,
  output logic  [NPORTS-1:0]            out_valid,
  input  logic  [NPORTS-1:0]            out_ready,
  output flit_t [NPORTS-1:0]            out_flit,
  output logic  [NPORTS-1:0][NPORTS-1:0] out_route
);
  localparam int unsigned QW = FLIT_W + NPORTS;

  // ---------------- input queues ----------------
  logic  [NPORTS-1:0]             q_valid, q_pop;
  flit_t [NPORTS-1:0]             q_flit;
  logic  [NPORTS-1:0][NPORTS-1:0] q_route;

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    logic [NPORTS-1:0] r_in;
    header_t           h_in;
    assign h_in = header_t'(in_flit[i].data);
    if (i == PORT_L) begin : g_loc
      assign r_in = xy_route(Y, X, h_in.dst_y, h_in.dst_x);
    end else begin : g_nbr
      assign r_in = in_route[i];
      // A flit from a neighbour must carry the route this router would compute.
      a_lookahead: assert property (@(posedge clk) disable iff (!rst_n)
        (in_valid[i] && in_flit[i].head) |-> in_route[i] == xy_route(Y, X, h_in.dst_y, h_in.dst_x));
    end
    noc_queue #(.W(QW), .DEPTH(DEPTH)) u_q (
      .clk, .rst_n,
      .in_valid (in_valid[i]),
      .in_ready (in_ready[i]),
      .in_data  ({r_in, in_flit[i]}),
      .out_valid(q_valid[i]),
      .out_ready(q_pop[i]),
      .out_data ({q_route[i], q_flit[i]})
    );
  end

  // ---------------- switch allocation ----------------
  logic [NPORTS-1:0]                 locked;          // per output
  logic [NPORTS-1:0][2:0]            owner;           // input holding the output
  logic [NPORTS-1:0][2:0]            rr_ptr;          // round-robin start per output
  logic [NPORTS-1:0][NPORTS-1:0]     held_route;      // next-router route of the packet in flight
  logic [NPORTS-1:0]                 gnt_valid;
  logic [NPORTS-1:0][2:0]            gnt_in;

  // Neighbour coordinates seen through each output.
  function automatic logic [2*COORD_W-1:0] nbr(input int unsigned o);
    case (o)
      PORT_N:  return {Y - 1'b1, X};
      PORT_S:  return {Y + 1'b1, X};
      PORT_W:  return {Y, X - 1'b1};
      PORT_E:  return {Y, X + 1'b1};
      default: return {Y, X};
    endcase
  endfunction

  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      gnt_valid[o] = 1'b0;
      gnt_in[o]    = '0;
      if (locked[o]) begin
        // body flits follow their head; only the head's route is meaningful
        gnt_valid[o] = q_valid[owner[o]] && !q_flit[owner[o]].head;
        gnt_in[o]    = owner[o];
      end else begin
        for (int k = NPORTS - 1; k >= 0; k--) begin
          automatic int unsigned i = (int'(rr_ptr[o]) + k) % NPORTS;
          if (q_valid[i] && q_flit[i].head && q_route[i][o]) begin
            gnt_valid[o] = 1'b1;
            gnt_in[o]    = 3'(i);
          end
        end
      end
    end
  end

  always_comb begin
    q_pop = '0;
    for (int o = 0; o < NPORTS; o++) begin
      header_t                h;
      logic [2*COORD_W-1:0]   nb;
      h            = header_t'(q_flit[gnt_in[o]].data);
      nb           = nbr(o);
      out_valid[o] = gnt_valid[o];
      out_flit[o]  = q_flit[gnt_in[o]];
      out_route[o] = q_flit[gnt_in[o]].head ? xy_route(nb[2*COORD_W-1:COORD_W], nb[COORD_W-1:0], h.dst_y, h.dst_x)
                                            : held_route[o];
      if (gnt_valid[o] && out_ready[o]) q_pop[gnt_in[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked     <= '0;
      owner      <= '0;
      rr_ptr     <= '0;
      held_route <= '0;
    end else begin
      for (int o = 0; o < NPORTS; o++) begin
        if (gnt_valid[o] && out_ready[o]) begin
          if (out_flit[o].head) begin
            held_route[o] <= out_route[o];
            owner[o]      <= gnt_in[o];
            rr_ptr[o]     <= (gnt_in[o] == 3'(NPORTS - 1)) ? '0 : gnt_in[o] + 1'b1;
          end
          locked[o] <= !out_flit[o].tail;
        end
      end
    end
  end

endmodule
