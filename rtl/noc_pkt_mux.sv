// noc_pkt_mux: the MUX half of a tile's MUX/DEMUX on one NoC plane. Several
// proxies share the plane; this merges their packet streams into the one
// queue that feeds the router. A packet is never split: the input whose head
// flit wins keeps the output until its tail flit has passed. Competing heads
// are served round robin. Valid/ready on all ports; out_valid follows the
// chosen input combinationally (no added latency).
// The MUX/DEMUX is named by the paper; its policy is this design's choice.
module noc_pkt_mux
  import esp_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic  [N-1:0]   in_valid,
  output logic  [N-1:0]   in_ready,
  input  flit_t [N-1:0]   in_flit,
  output logic            out_valid,
  input  logic            out_ready,
  output flit_t           out_flit
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          locked;
  logic [IW-1:0] owner, rr, sel;
  logic          sel_valid;

  always_comb begin
    sel_valid = 1'b0;
    sel       = owner;
    if (locked) begin
      sel_valid = in_valid[owner];
    end else begin
      for (int k = N - 1; k >= 0; k--) begin
        automatic int unsigned i = (int'(rr) + k) % N;
        if (in_valid[i] && in_flit[i].head) begin
          sel_valid = 1'b1;
          sel       = IW'(i);
        end
      end
    end
    out_valid = sel_valid;
    out_flit  = in_flit[sel];
    in_ready  = '0;
    in_ready[sel] = sel_valid && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      owner  <= '0;
      rr     <= '0;
    end else if (sel_valid && out_ready) begin
      owner  <= sel;
      locked <= !out_flit.tail;
      if (out_flit.head) rr <= (sel == IW'(N - 1)) ? '0 : sel + 1'b1;
    end
  end

  a_no_orphan_body: assert property (@(posedge clk) disable iff (!rst_n)
    !locked |-> !(sel_valid && !out_flit.head));
endmodule
