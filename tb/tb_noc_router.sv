// tb_noc_router: self-checking testbench of one mesh router, placed at (1, 1)
// of a 3x3 grid so that all five outputs lead somewhere. Each of the five
// inputs sends 150 packets of 1-4 flits to random destinations in the grid;
// inputs from neighbours come with the look-ahead route an upstream router
// would have computed, the local input with none. Every output applies random
// back-pressure. The head flit's reserved header bits and every body flit
// carry the input port and packet number.
// Checks: a flit into an idle router leaves on the following cycle (one-cycle
// hop); every packet leaves on the port X-then-Y routing gives; head flits
// leave with the look-ahead route of the next router; packets are never
// interleaved on an output; packets from one input to one output keep their
// order and all arrive. Contention (two inputs wanting one output) is counted
// and must happen.
module tb_noc_router;
  import esp_pkg::*;
  localparam logic [COORD_W-1:0] RX = 3'd1, RY = 3'd1;
  localparam int unsigned NPKT = 150;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  [NPORTS-1:0]             in_valid, in_ready, out_valid, out_ready;
  flit_t [NPORTS-1:0]             in_flit, out_flit;
  logic  [NPORTS-1:0][NPORTS-1:0] in_route, out_route;
  noc_router #(.X(RX), .Y(RY), .DEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [2*COORD_W-1:0] nbr_of(input int o);
    case (o)
      PORT_N:  return {RY - 1'b1, RX};
      PORT_S:  return {RY + 1'b1, RX};
      PORT_W:  return {RY, RX - 1'b1};
      PORT_E:  return {RY, RX + 1'b1};
      default: return {RY, RX};
    endcase
  endfunction

  // source state
  int sent [NPORTS], pos [NPORTS], plen [NPORTS];
  logic [COORD_W-1:0] dy [NPORTS], dx [NPORTS];
  logic [NPORTS-1:0] fire;
  // expected packet sequence per (input, output)
  int exp_q [NPORTS][NPORTS][$];
  // sink state
  int cur_in [NPORTS], cur_seq [NPORTS], cur_pos [NPORTS], rx_total = 0;
  logic [NPORTS-1:0] ofire;
  flit_t [NPORTS-1:0] of;
  logic  [NPORTS-1:0][NPORTS-1:0] oroute;
  int n_contend = 0, total_pkts = 0;
  bit run = 0;

  function automatic flit_t src_flit(input int i);
    header_t h;
    if (pos[i] == 0) begin
      h = '{src_y: RY, src_x: RX, dst_y: dy[i], dst_x: dx[i], msg: MSG_DMA_RD_RSP, rsvd: {3'(i), 12'(sent[i])}};
      return '{head: 1'b1, tail: plen[i] == 1, data: h};
    end
    return '{head: 1'b0, tail: pos[i] == plen[i] - 1, data: {4'(i), 16'(sent[i]), 12'(pos[i])}};
  endfunction

  task automatic new_pkt(input int i);
    int o;
    plen[i] = $urandom_range(4, 1);
    dy[i]   = COORD_W'($urandom_range(2));
    dx[i]   = COORD_W'($urandom_range(2));
    for (o = 0; o < NPORTS; o++) if (xy_route(RY, RX, dy[i], dx[i])[o]) break;
    exp_q[i][o].push_back(sent[i]);
  endtask

  // sources
  initial begin
    in_valid = '0; in_flit = '0; in_route = '0; fire = '0;
    for (int i = 0; i < NPORTS; i++) begin sent[i] = 0; pos[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // one-cycle hop: one flit W -> E into the idle router
    @(negedge clk);
    in_valid[PORT_W] = 1'b1;
    in_flit[PORT_W]  = mk_head(RY, RX, RY, RX + 1'b1, MSG_IRQ, 1'b1);
    in_route[PORT_W] = xy_route(RY, RX, RY, RX + 1'b1);
    out_ready = '1;
    @(negedge clk);
    in_valid = '0;
    check(out_valid == (NPORTS'(1) << PORT_E), "flit leaves one cycle after entering");
    check(out_route[PORT_E] == xy_route(RY, RX + 1'b1, RY, RX + 1'b1), "look-ahead route of next hop");
    @(negedge clk);
    check(out_valid == '0, "single flit leaves once");
    run = 1;
    for (int i = 0; i < NPORTS; i++) new_pkt(i);
    forever begin
      @(negedge clk);
      for (int i = 0; i < NPORTS; i++) begin
        if (!(in_valid[i] && !fire[i])) begin
          in_valid[i] = (sent[i] < NPKT) && ($urandom_range(3) != 0);
          in_flit[i]  = src_flit(i);
          in_route[i] = (i == PORT_L) ? NPORTS'(0) : (pos[i] == 0 ? xy_route(RY, RX, dy[i], dx[i]) : NPORTS'($urandom));
        end
      end
      #4;
      fire = in_valid & in_ready;
      @(posedge clk);
      for (int i = 0; i < NPORTS; i++)
        if (fire[i]) begin
          if (pos[i] == plen[i] - 1) begin
            pos[i] = 0; sent[i]++;
            if (sent[i] < NPKT) new_pkt(i);
          end else pos[i]++;
        end
    end
  end

  // sinks
  initial begin
    out_ready = '0;
    for (int o = 0; o < NPORTS; o++) cur_in[o] = -1;
    wait (run);
    forever begin
      @(negedge clk);
      out_ready = NPORTS'($urandom) | NPORTS'($urandom);
      begin
        // contention: two head flits at queue fronts want the same output
        int want [NPORTS];
        foreach (want[o]) want[o] = 0;
        for (int i = 0; i < NPORTS; i++)
          if (dut.q_valid[i] && dut.q_flit[i].head)
            for (int o = 0; o < NPORTS; o++) if (dut.q_route[i][o]) want[o]++;
        foreach (want[o]) if (want[o] > 1) n_contend++;
      end
      #4;
      ofire  = out_valid & out_ready;
      of     = out_flit;
      oroute = out_route;
      @(posedge clk);
      for (int o = 0; o < NPORTS; o++) if (ofire[o]) begin
        if (cur_in[o] < 0) begin
          header_t h;
          logic [2*COORD_W-1:0] nb;
          h  = header_t'(of[o].data);
          nb = nbr_of(o);
          check(of[o].head, "packet starts with head on output");
          check(xy_route(RY, RX, h.dst_y, h.dst_x)[o], "packet on the X-then-Y port");
          check(oroute[o] == xy_route(nb[2*COORD_W-1:COORD_W], nb[COORD_W-1:0], h.dst_y, h.dst_x), "look-ahead route");
          cur_in[o]  = int'(h.rsvd[14:12]);
          cur_seq[o] = int'(h.rsvd[11:0]);
          cur_pos[o] = 0;
          check(exp_q[cur_in[o]][o].size() > 0 && exp_q[cur_in[o]][o][0] == cur_seq[o], "packet order per input/output");
          if (exp_q[cur_in[o]][o].size() > 0) void'(exp_q[cur_in[o]][o].pop_front());
        end else begin
          cur_pos[o]++;
          check(!of[o].head && of[o].data == {4'(cur_in[o]), 16'(cur_seq[o]), 12'(cur_pos[o])}, "body flit of the packet in flight");
        end
        if (of[o].tail) begin cur_in[o] = -1; total_pkts++; end
      end
    end
  end

  initial begin
    wait (run);
    wait (total_pkts == NPORTS * NPKT);
    repeat (5) @(posedge clk);
    for (int i = 0; i < NPORTS; i++)
      for (int o = 0; o < NPORTS; o++) check(exp_q[i][o].size() == 0, "all packets delivered");
    check(n_contend > 0, "output contention happened");
    $display("contention cycles=%0d packets=%0d", n_contend, total_pkts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    $display("FAIL: watchdog packets=%0d", total_pkts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
