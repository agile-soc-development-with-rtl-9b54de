// tb_noc_mux_demux: self-checking testbench of the packet multiplexer that
// merges the DMA proxies' streams onto one NoC plane. Three sources send
// packets of 1-5 flits with random gaps; the sink applies random back-pressure.
// Each flit carries its source, packet number and position. Checks: the
// output is a sequence of whole packets (no interleaving between head and
// tail), each source's packets arrive in order and complete, and competing
// sources all get through (the arbiter switched between sources).
module tb_noc_mux_demux;
  import esp_pkg::*;
  localparam int unsigned N = 3, NPKT = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] in_valid, in_ready; flit_t [N-1:0] in_flit;
  logic out_valid, out_ready; flit_t out_flit;
  noc_pkt_mux #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // flit payload: [31:28] source, [27:12] packet number, [11:0] position
  function automatic logic [31:0] pay(input int s, input int p, input int k);
    return {4'(s), 16'(p), 12'(k)};
  endfunction

  int sent [N];
  int pos  [N];
  int plen [N];
  int rx_pkt [N];
  int cur_src = -1, cur_pos = 0, n_switch = 0, last_src = -1;
  logic [N-1:0] fire;
  logic ofire;
  flit_t of;

  // sources
  initial begin
    in_valid = '0; in_flit = '0; fire = '0;
    foreach (sent[s]) begin sent[s] = 0; pos[s] = 0; plen[s] = $urandom_range(5, 1); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    forever begin
      @(negedge clk);
      for (int s = 0; s < N; s++) begin
        if (!(in_valid[s] && !fire[s])) begin
          in_valid[s] = (sent[s] < NPKT) && ($urandom_range(3) != 0);
          in_flit[s]  = '{head: pos[s] == 0, tail: pos[s] == plen[s] - 1, data: pay(s, sent[s], pos[s])};
        end
      end
      #4;
      fire = in_valid & in_ready;
      @(posedge clk);
      for (int s = 0; s < N; s++)
        if (fire[s]) begin
          if (pos[s] == plen[s] - 1) begin
            pos[s] = 0; sent[s]++; plen[s] = $urandom_range(5, 1);
          end else pos[s]++;
        end
    end
  end

  // sink
  initial begin
    out_ready = 0;
    foreach (rx_pkt[s]) rx_pkt[s] = 0;
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      out_ready = ($urandom_range(3) != 0);
      #4;
      ofire = out_valid && out_ready;
      of    = out_flit;
      @(posedge clk);
      if (ofire) begin
        automatic int s = int'(of.data[31:28]);
        automatic int p = int'(of.data[27:12]);
        automatic int k = int'(of.data[11:0]);
        if (cur_src < 0) begin
          check(of.head && k == 0, "packet starts with its head");
          check(s < N && p == rx_pkt[s], "packets of a source in order");
          if (s != last_src && last_src >= 0) n_switch++;
          cur_src = s; cur_pos = 0;
        end else begin
          check(s == cur_src && !of.head, "no interleaving inside a packet");
          cur_pos++;
          check(k == cur_pos, "flits of a packet in order");
        end
        if (of.tail) begin
          if (s < N) rx_pkt[s]++;
          last_src = s;
          cur_src = -1;
        end
      end
    end
  end

  initial begin
    wait (rst_n);
    wait (rx_pkt[0] == NPKT && rx_pkt[1] == NPKT && rx_pkt[2] == NPKT);
    repeat (5) @(posedge clk);
    check(n_switch > NPKT, "arbiter alternated between sources");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    $display("FAIL: watchdog rx=%0d %0d %0d", rx_pkt[0], rx_pkt[1], rx_pkt[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
