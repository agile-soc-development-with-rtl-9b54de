// tb_acc_regs: self-checking testbench of the accelerator tile's register
// proxy and interrupt sender, at tile (1, 1) with the interrupt controller at
// (2, 0). Register packets are driven on the plane-5 input; packets leaving on
// the plane-5 output are collected under random back-pressure. A small model
// stands in for the accelerator: busy rises on conf_valid and acc_done pulses
// a few cycles later.
// Checks: written registers drive conf, base and the P2P fields and read back;
// a read answers the requesting tile with one response packet; a start pulses
// conf_valid once and is ignored while busy; completion sets the done bit,
// sends exactly one interrupt packet to the interrupt tile, and a write to
// STATUS clears the done bit.
module tb_acc_regs;
  import esp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready; flit_t req_flit;
  logic out_valid, out_ready; flit_t out_flit;
  logic conf_valid; conf_t conf; logic [31:0] base;
  logic p2p_store_en, p2p_load_en; logic [COORD_W-1:0] p2p_src_y, p2p_src_x;
  logic acc_done, acc_busy;

  acc_regs #(.TILE_Y(3'd1), .TILE_X(3'd1), .IRQ_Y(3'd2), .IRQ_X(3'd0)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // accelerator model
  int n_start = 0, run_left = 0;
  always @(posedge clk) begin
    acc_done <= 1'b0;
    if (conf_valid) begin acc_busy <= 1'b1; run_left <= 30; n_start++; end
    else if (run_left > 1) run_left <= run_left - 1;
    else if (run_left == 1) begin run_left <= 0; acc_busy <= 1'b0; acc_done <= 1'b1; end
  end

  flit_t outq[$];
  always @(negedge clk) begin
    out_ready = $urandom_range(2) != 0;
    #4;
    if (rst_n && out_valid && out_ready) outq.push_back(out_flit);
  end

  task automatic send(input flit_t f);
    @(negedge clk);
    req_valid = 1; req_flit = f;
    #4; while (!req_ready) begin @(negedge clk); #4; end
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic reg_wr(input logic [5:0] r, input logic [31:0] d);
    send(mk_head(3'd0, 3'd2, 3'd1, 3'd1, MSG_REG_WR, 1'b0));
    send(mk_body(32'(r), 1'b0));
    send(mk_body(d, 1'b1));
  endtask

  task automatic reg_rd(input logic [5:0] r, output logic [31:0] d);
    header_t h;
    int n = 0;
    outq.delete();
    send(mk_head(3'd0, 3'd1, 3'd1, 3'd1, MSG_REG_RD, 1'b0));
    send(mk_body(32'(r), 1'b1));
    while (outq.size() < 2 && n < 200) begin @(posedge clk); n++; end
    check(outq.size() == 2, "read response arrives");
    h = header_t'(outq[0].data);
    check(outq[0].head && h.msg == MSG_REG_RSP && h.dst_y == 3'd0 && h.dst_x == 3'd1, "response to the reader");
    check(outq[1].tail, "response is two flits");
    d = outq[1].data;
    outq.delete();
  endtask

  initial begin
    logic [31:0] d;
    header_t h;
    req_valid = 0; req_flit = '0; acc_busy = 0; acc_done = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    reg_wr(REG_LEN, 32'd16);
    reg_wr(REG_NCHUNK, 32'd4);
    reg_wr(REG_ADDEND, 32'hCAFE0001);
    reg_wr(REG_OUTOFF, 32'd64);
    reg_wr(REG_BASE, 32'h0012_3400);
    reg_wr(REG_P2P, 32'b101_010_1_1);
    check(conf.len == 16 && conf.nchunk == 4 && conf.addend == 32'hCAFE0001 && conf.out_offset == 64, "conf fields");
    check(base == 32'h0012_3400, "base register");
    check(p2p_store_en && p2p_load_en && p2p_src_x == 3'd2 && p2p_src_y == 3'd5, "P2P fields");
    reg_rd(REG_LEN, d);    check(d == 32'd16, "read LEN");
    reg_rd(REG_ADDEND, d); check(d == 32'hCAFE0001, "read ADDEND");
    reg_rd(REG_BASE, d);   check(d == 32'h0012_3400, "read BASE");
    reg_rd(REG_P2P, d);    check(d == 32'b101_010_1_1, "read P2P");
    reg_wr(REG_P2P, 32'd0);
    // start, and a second start while busy
    outq.delete();
    reg_wr(REG_CMD, 32'd1);
    repeat (3) @(posedge clk);
    check(acc_busy, "accelerator started");
    reg_wr(REG_CMD, 32'd1);
    reg_rd(REG_STATUS, d); check(d[0] == 1'b1 && d[1] == 1'b0, "status running");
    repeat (60) @(posedge clk);
    check(n_start == 1, "start ignored while busy");
    check(outq.size() == 1, "one interrupt packet");
    if (outq.size() > 0) begin
      h = header_t'(outq[0].data);
      check(outq[0].head && outq[0].tail && h.msg == MSG_IRQ && h.dst_y == 3'd2 && h.dst_x == 3'd0
            && h.src_y == 3'd1 && h.src_x == 3'd1, "interrupt to the interrupt tile");
    end
    outq.delete();
    reg_rd(REG_STATUS, d); check(d[1:0] == 2'b10, "status done");
    reg_wr(REG_STATUS, 32'd0);
    reg_rd(REG_STATUS, d); check(d[1:0] == 2'b00, "done cleared");
    // second invocation
    reg_wr(REG_CMD, 32'd1);
    repeat (60) @(posedge clk);
    check(n_start == 2 && outq.size() == 1, "second run, second interrupt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
