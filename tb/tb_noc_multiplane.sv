// tb_noc_multiplane: self-checking testbench of the six-plane 3x3 mesh NoC.
// First, single flits on an idle plane measure the hop cost: the time from
// injection to ejection must grow by exactly one cycle per extra hop. Then
// every tile injects 40 packets of 1-4 flits on every plane to random
// destinations (including itself), all at once, while every ejection port
// applies random back-pressure. Each body flit carries plane, source, packet
// number and position.
// Checks: each packet leaves the NoC at its destination tile and on the plane
// it entered; packets are never interleaved at an ejection port; packets from
// one source to one destination on one plane keep their order; every packet
// arrives; and planes are independent (a flit never changes plane).
module tb_noc_multiplane;
  import esp_pkg::*;
  localparam int unsigned ROWS = 3, COLS = 3, NT = ROWS * COLS, P = NUM_PLANES, NPKT = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  [P-1:0][NT-1:0] loc_in_valid, loc_in_ready, loc_out_valid, loc_out_ready;
  flit_t [P-1:0][NT-1:0] loc_in_flit, loc_out_flit;
  noc_multiplane #(.ROWS(ROWS), .COLS(COLS), .PLANES(P), .DEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int sent [P][NT], pos [P][NT], plen [P][NT], dst [P][NT];
  int exp_q [P][NT][NT][$];          // [plane][src][dst] packet numbers
  int cur_src [P][NT], cur_seq [P][NT], cur_pos [P][NT];
  logic  [P-1:0][NT-1:0] fire, ofire;
  flit_t [P-1:0][NT-1:0] of;
  int total = 0;
  bit run = 0;

  function automatic flit_t src_flit(input int p, input int s);
    header_t h;
    if (pos[p][s] == 0) begin
      h = '{src_y: COORD_W'(s / COLS), src_x: COORD_W'(s % COLS),
            dst_y: COORD_W'(dst[p][s] / COLS), dst_x: COORD_W'(dst[p][s] % COLS),
            msg: MSG_DMA_RD_RSP, rsvd: {3'(p), 12'(sent[p][s])}};
      return '{head: 1'b1, tail: plen[p][s] == 1, data: h};
    end
    return '{head: 1'b0, tail: pos[p][s] == plen[p][s] - 1,
             data: {4'(p), 4'(s), 12'(sent[p][s]), 12'(pos[p][s])}};
  endfunction

  task automatic new_pkt(input int p, input int s);
    plen[p][s] = $urandom_range(4, 1);
    dst[p][s]  = $urandom_range(NT - 1);
    exp_q[p][s][dst[p][s]].push_back(sent[p][s]);
  endtask

  // Latency of one flit from tile s to tile d on plane p of the idle NoC.
  task automatic one_flit(input int p, input int s, input int d, output int lat);
    @(negedge clk);
    loc_in_valid[p][s] = 1'b1;
    loc_in_flit[p][s]  = mk_head(COORD_W'(s / COLS), COORD_W'(s % COLS),
                                 COORD_W'(d / COLS), COORD_W'(d % COLS), MSG_IRQ, 1'b1);
    @(negedge clk);
    loc_in_valid[p][s] = 1'b0;
    lat = 1;
    while (!loc_out_valid[p][d] && lat < 50) begin @(negedge clk); lat++; end
    check(loc_out_valid == (P*NT)'(1) << (p * NT + d), "flit ejected only at its destination");
    @(negedge clk);
  endtask

  initial begin
    int l1, l4, l2;
    loc_in_valid = '0; loc_in_flit = '0; loc_out_ready = '1; fire = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    one_flit(0, 0, 1, l1);
    one_flit(3, 0, 8, l4);
    one_flit(5, 7, 3, l2);
    $display("idle latency: 1 hop %0d, 2 hops %0d, 4 hops %0d cycles", l1, l2, l4);
    check(l4 - l1 == 3 && l2 - l1 == 1, "one cycle per hop");
    for (int p = 0; p < P; p++) for (int s = 0; s < NT; s++) begin
      sent[p][s] = 0; pos[p][s] = 0; new_pkt(p, s);
    end
    run = 1;
    forever begin
      @(negedge clk);
      for (int p = 0; p < P; p++) for (int s = 0; s < NT; s++)
        if (!(loc_in_valid[p][s] && !fire[p][s])) begin
          loc_in_valid[p][s] = (sent[p][s] < NPKT) && ($urandom_range(2) != 0);
          loc_in_flit[p][s]  = src_flit(p, s);
        end
      #4;
      fire = loc_in_valid & loc_in_ready;
      @(posedge clk);
      for (int p = 0; p < P; p++) for (int s = 0; s < NT; s++)
        if (fire[p][s]) begin
          if (pos[p][s] == plen[p][s] - 1) begin
            pos[p][s] = 0; sent[p][s]++;
            if (sent[p][s] < NPKT) new_pkt(p, s);
          end else pos[p][s]++;
        end
    end
  end

  initial begin
    for (int p = 0; p < P; p++) for (int t = 0; t < NT; t++) cur_src[p][t] = -1;
    wait (run);
    forever begin
      @(negedge clk);
      loc_out_ready = {$urandom, $urandom} | {$urandom, $urandom};
      #4;
      ofire = loc_out_valid & loc_out_ready;
      of    = loc_out_flit;
      @(posedge clk);
      for (int p = 0; p < P; p++) for (int t = 0; t < NT; t++) if (ofire[p][t]) begin
        if (cur_src[p][t] < 0) begin
          header_t h;
          h = header_t'(of[p][t].data);
          check(of[p][t].head, "packet starts with head");
          check(int'(h.dst_y) * COLS + int'(h.dst_x) == t, "ejected at destination");
          check(int'(h.rsvd[14:12]) == p, "stays on its plane");
          cur_src[p][t] = int'(h.src_y) * COLS + int'(h.src_x);
          cur_seq[p][t] = int'(h.rsvd[11:0]);
          cur_pos[p][t] = 0;
          check(exp_q[p][cur_src[p][t]][t].size() > 0 && exp_q[p][cur_src[p][t]][t][0] == cur_seq[p][t],
                "order per source/destination/plane");
          if (exp_q[p][cur_src[p][t]][t].size() > 0) void'(exp_q[p][cur_src[p][t]][t].pop_front());
        end else begin
          cur_pos[p][t]++;
          check(!of[p][t].head && of[p][t].data == {4'(p), 4'(cur_src[p][t]), 12'(cur_seq[p][t]), 12'(cur_pos[p][t])},
                "body flit of the packet in flight");
        end
        if (of[p][t].tail) begin cur_src[p][t] = -1; total++; end
      end
    end
  end

  initial begin
    wait (run);
    wait (total == P * NT * NPKT);
    repeat (5) @(posedge clk);
    for (int p = 0; p < P; p++) for (int s = 0; s < NT; s++) for (int d = 0; d < NT; d++)
      check(exp_q[p][s][d].size() == 0, "every packet delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    $display("FAIL: watchdog packets=%0d", total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
