// tb_esp_soc: end-to-end testbench of the 3x3 SoC at its default parameters.
//
// Around the design it places behavioural models of what the SoC leaves
// outside: two processors that issue register accesses on their I/O ports, a
// DRAM behind each memory tile (random request back-pressure and a random
// 2-6 cycle read latency, in order), and an interrupt controller that
// acknowledges interrupts. It runs three scenarios:
//   1. one accelerator (tile 3) through memory: input words are placed in
//      memory tile 0's slice, the processor at tile 1 configures and starts the
//      accelerator, waits for its interrupt and reads STATUS;
//   2. two accelerators at once (tiles 4 and 5), started by the two processors,
//      with buffers in different memory tiles, so DMA traffic contends;
//   3. a producer-consumer pipeline over P2P: tile 3 produces, tile 7
//      consumes (load via P2P from tile 3) and writes to memory; the
//      producer's results never touch memory.
// Every output word is checked against the expected value computed here.
// Mechanisms counted, each required at least once: DRAM stall, NoC
// back-pressure at a tile port, load/store overlap inside an accelerator,
// P2P request, interrupt, register read.
module tb_esp_soc;
  import esp_pkg::*;
  localparam int NT = 9;
  localparam int PART = 1 << 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NT-1:0]             cpu_req_valid, cpu_req_ready, cpu_we, cpu_rsp_valid;
  logic [NT-1:0][31:0]       cpu_addr, cpu_wdata, cpu_rdata;
  logic [NT-1:0]             mem_req_valid, mem_req_ready, mem_we, mem_rvalid;
  logic [NT-1:0][31:0]       mem_addr, mem_wdata, mem_rdata;
  logic [NT-1:0]             irq, irq_ack, acc_busy;

  esp_soc dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- DRAM models (tiles 0 and 8) ----------------
  logic [31:0] dram [int];
  int n_dram_stall = 0, n_dram_rd = 0, n_dram_wr = 0;
  for (genvar t = 0; t < NT; t++) begin : g_dram
    if (t == 0 || t == 8) begin : g_m
      int q_addr[$];
      int q_due[$];
      int cyc = 0;
      always @(posedge clk) begin
        cyc <= cyc + 1;
        if (!rst_n) mem_req_ready[t] <= 1'b0;
        else        mem_req_ready[t] <= ($urandom_range(0, 3) != 0);
        if (rst_n && mem_req_valid[t] && !mem_req_ready[t]) n_dram_stall++;
        if (rst_n && mem_req_valid[t] && mem_req_ready[t]) begin
          check((int'(mem_addr[t]) / PART) == (t == 0 ? 0 : 1), "address reaches the owning memory tile");
          if (mem_we[t]) begin dram[int'(mem_addr[t])] = mem_wdata[t]; n_dram_wr++; end
          else begin
            q_addr.push_back(int'(mem_addr[t]));
            q_due.push_back(cyc + $urandom_range(2, 6));
            n_dram_rd++;
          end
        end
        mem_rvalid[t] <= 1'b0;
        if (q_due.size() > 0 && q_due[0] <= cyc) begin
          int a;
          a = q_addr.pop_front();
          void'(q_due.pop_front());
          mem_rvalid[t] <= 1'b1;
          mem_rdata[t]  <= dram.exists(a) ? dram[a] : 32'hDEAD_BEEF;
        end
      end
    end else begin : g_n
      assign mem_req_ready[t] = 1'b0;
      assign mem_rvalid[t]    = 1'b0;
      assign mem_rdata[t]     = '0;
    end
  end

  // ---------------- processor models (tiles 1 and 2) ----------------
  logic        c_v [NT];
  logic        c_we[NT];
  logic [31:0] c_a [NT], c_d[NT];
  for (genvar t = 0; t < NT; t++) begin : g_c
    assign cpu_req_valid[t] = c_v[t];
    assign cpu_we[t]        = c_we[t];
    assign cpu_addr[t]      = c_a[t];
    assign cpu_wdata[t]     = c_d[t];
  end
  int n_reg_rd = 0;

  task automatic reg_access(input int c, input bit we, input int tile, input logic [5:0] r,
                            input logic [31:0] d, output logic [31:0] q);
    @(negedge clk);
    c_v[c] = 1; c_we[c] = we; c_a[c] = 32'(tile << 8) | (32'(r) << 2); c_d[c] = d;
    do @(posedge clk); while (!cpu_req_ready[c]);
    @(negedge clk); c_v[c] = 0;
    while (!cpu_rsp_valid[c]) @(negedge clk);
    q = cpu_rdata[c];
    if (!we) n_reg_rd++;
  endtask

  task automatic reg_wr(input int c, input int tile, input logic [5:0] r, input logic [31:0] d);
    logic [31:0] q;
    reg_access(c, 1, tile, r, d, q);
  endtask

  task automatic configure(input int c, input int tile, input int base, input int len, input int nchunk,
                           input int addend, input int outoff, input logic [7:0] p2p);
    reg_wr(c, tile, REG_BASE, 32'(base));
    reg_wr(c, tile, REG_LEN, 32'(len));
    reg_wr(c, tile, REG_NCHUNK, 32'(nchunk));
    reg_wr(c, tile, REG_ADDEND, 32'(addend));
    reg_wr(c, tile, REG_OUTOFF, 32'(outoff));
    reg_wr(c, tile, REG_P2P, 32'(p2p));
  endtask

  // ---------------- interrupt controller model ----------------
  int n_irq[NT];
  always @(posedge clk) begin
    for (int t = 0; t < NT; t++) begin
      irq_ack[t] <= rst_n && irq[t] && !irq_ack[t];
      if (rst_n && irq[t] && !irq_ack[t]) n_irq[t]++;
    end
  end

  task automatic wait_irq(input int tile, input int prev);
    while (n_irq[tile] == prev) @(negedge clk);
  endtask

  // ---------------- mechanism probes ----------------
  function automatic msg_t msg_of(input flit_t f);
    header_t h;
    h = header_t'(f.data);
    return h.msg;
  endfunction
  int n_backpressure = 0, n_overlap = 0, n_p2p_req = 0, n_stall_cyc = 0;
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NUM_PLANES; p++)
      for (int t = 0; t < NT; t++) begin
        if (dut.n_in_v[p][t] && !dut.n_in_r[p][t]) n_backpressure++;
        if (p == PLANE_DMA_D2M - 1 && dut.n_in_v[p][t] && dut.n_in_r[p][t] && dut.n_in_f[p][t].head &&
            msg_of(dut.n_in_f[p][t]) == MSG_P2P_REQ) n_p2p_req++;
      end
    if (dut.g_tile[4].g_acc.u_tile.u_acc.load_chnl_valid && dut.g_tile[4].g_acc.u_tile.u_acc.load_chnl_ready &&
        dut.g_tile[4].g_acc.u_tile.u_acc.store_chnl_valid && dut.g_tile[4].g_acc.u_tile.u_acc.store_chnl_ready)
      n_overlap++;
  end

  // expected output of an accelerator: in + addend
  task automatic check_out(input int outbase, input int inbase, input int n, input int add, input string what);
    int bad = 0;
    for (int k = 0; k < n; k++)
      if (!dram.exists(outbase + k) || dram[outbase + k] != 32'(inbase + 7 * k + add)) bad++;
    check(bad == 0, $sformatf("%s: %0d of %0d output words wrong", what, bad, n));
  endtask

  task automatic fill_in(input int base, input int n);
    for (int k = 0; k < n; k++) dram[base + k] = 32'(base + 7 * k);
  endtask

  localparam int L = 16, NC = 4;

  initial begin
    logic [31:0] q;
    int i3, i4, i5, i7, w_before;
    for (int t = 0; t < NT; t++) begin c_v[t] = 0; c_we[t] = 0; c_a[t] = 0; c_d[t] = 0; n_irq[t] = 0; end
    repeat (4) @(negedge clk); rst_n = 1;

    // ---- 1. one accelerator through memory ----
    fill_in(1000, L * NC);
    configure(1, 3, 1000, L, NC, 5, 4096, 8'h00);
    i3 = n_irq[3];
    reg_wr(1, 3, REG_CMD, 1);
    $display("scenario 1 started at %0t", $time);
    wait_irq(3, i3);
    repeat (20) @(negedge clk);
    check_out(1000 + 4096, 1000, L * NC, 5, "scenario 1");
    reg_access(1, 0, 3, REG_STATUS, 0, q);
    check(q[1] == 1'b1 && q[0] == 1'b0, $sformatf("STATUS after done = %h", q));
    reg_wr(1, 3, REG_STATUS, 0);
    reg_access(1, 0, 3, REG_STATUS, 0, q);
    check(q[1] == 1'b0, "STATUS done cleared");
    reg_access(1, 0, 3, REG_ADDEND, 0, q);
    check(q == 5, "ADDEND read back");

    // ---- 2. two accelerators at once, different memory tiles ----
    fill_in(20000, L * NC);
    fill_in(PART + 300, L * NC);
    fork
      configure(1, 4, 20000, L, NC, 11, 8192, 8'h00);
      configure(2, 5, PART + 300, L, NC, 3, 8192, 8'h00);
    join
    i4 = n_irq[4]; i5 = n_irq[5];
    fork
      reg_wr(1, 4, REG_CMD, 1);
      reg_wr(2, 5, REG_CMD, 1);
    join
    fork
      wait_irq(4, i4);
      wait_irq(5, i5);
    join
    repeat (20) @(negedge clk);
    check_out(20000 + 8192, 20000, L * NC, 11, "scenario 2, tile 4");
    check_out(PART + 300 + 8192, PART + 300, L * NC, 3, "scenario 2, tile 5");

    // ---- 3. producer (tile 3) -> consumer (tile 7) over P2P ----
    fill_in(50000, L * NC);
    // producer: loads from memory, stores via P2P; consumer: loads via P2P from (y=1, x=0)
    configure(1, 3, 50000, L, NC, 100, 9000, 8'h01);
    configure(2, 7, 60000, L, NC, 20, 0, {3'd1, 3'd0, 2'b10});
    w_before = n_dram_wr;
    i3 = n_irq[3]; i7 = n_irq[7];
    fork
      reg_wr(2, 7, REG_CMD, 1);
      reg_wr(1, 3, REG_CMD, 1);
    join
    fork
      wait_irq(3, i3);
      wait_irq(7, i7);
    join
    repeat (20) @(negedge clk);
    check_out(60000, 50000, L * NC, 120, "scenario 3, consumer output");
    check(n_dram_wr - w_before == L * NC, $sformatf("P2P: only the consumer writes memory (%0d words)", n_dram_wr - w_before));
    check(!dram.exists(50000 + 9000), "P2P: producer output not in memory");

    // ---- mechanisms ----
    check(n_dram_stall > 0,   $sformatf("DRAM stalls: %0d", n_dram_stall));
    check(n_backpressure > 0, $sformatf("NoC back-pressure cycles: %0d", n_backpressure));
    check(n_overlap > 0,      $sformatf("load/store overlap cycles: %0d", n_overlap));
    check(n_p2p_req == NC,    $sformatf("P2P requests: %0d", n_p2p_req));
    check(n_irq[3] == 2 && n_irq[4] == 1 && n_irq[5] == 1 && n_irq[7] == 1, "interrupt counts");
    check(n_reg_rd >= 3,      "register reads");
    $display("mechanisms: dram_stall=%0d backpressure=%0d overlap=%0d p2p_req=%0d irq=%0d reg_rd=%0d",
             n_dram_stall, n_backpressure, n_overlap, n_p2p_req, n_irq[3] + n_irq[4] + n_irq[5] + n_irq[7], n_reg_rd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (acc3 ls=%0d cs=%0d ss=%0d lchunk=%0d dmac ld=%0d st=%0d; irq=%b n_irq3=%0d)",
             dut.g_tile[3].g_acc.u_tile.u_acc.ls, dut.g_tile[3].g_acc.u_tile.u_acc.cs, dut.g_tile[3].g_acc.u_tile.u_acc.ss,
             dut.g_tile[3].g_acc.u_tile.u_acc.lchunk, dut.g_tile[3].g_acc.u_tile.u_dmac.ld, dut.g_tile[3].g_acc.u_tile.u_dmac.st, irq, n_irq[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
