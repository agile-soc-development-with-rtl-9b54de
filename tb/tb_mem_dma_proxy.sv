// tb_mem_dma_proxy: self-checking testbench of the memory tile's DMA service,
// at tile (2, 2). DMA packets from random requesting tiles are driven on the
// plane-6 input; a DRAM model with random request back-pressure and a random
// 1-6 cycle read latency (in order) sits on the memory port; the plane-4
// output is drained under random back-pressure.
// Checks, over 60 random reads and writes: a write stores every data word at
// address + k; a read answers the requesting tile with one response packet of
// `length` words that equal the DRAM contents; and reads are pipelined (more
// than one read in flight at some point), so the DRAM latency is hidden.
module tb_mem_dma_proxy;
  import esp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready; flit_t req_flit;
  logic rsp_valid, rsp_ready; flit_t rsp_flit;
  logic mem_req_valid, mem_req_ready, mem_we, mem_rvalid;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  mem_dma_proxy #(.TILE_Y(3'd2), .TILE_X(3'd2), .RSP_DEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // DRAM model: reads return in order after 1-6 cycles
  logic [31:0] dram [logic [31:0]];
  logic [31:0] rd_q[$];
  int          rd_due[$];
  int cyc = 0, inflight = 0, max_inflight = 0;
  always @(negedge clk) begin
    cyc++;
    mem_req_ready = $urandom_range(3) != 0;
    mem_rvalid = 0;
    if (rd_due.size() > 0 && rd_due[0] <= cyc) begin
      void'(rd_due.pop_front());
      mem_rvalid = 1;
      mem_rdata  = rd_q.pop_front();
    end
    #4;
    if (rst_n && mem_req_valid && mem_req_ready) begin
      if (mem_we) dram[mem_addr] = mem_wdata;
      else begin
        automatic int due = cyc + $urandom_range(6, 1);
        if (rd_due.size() > 0 && rd_due[$] > due) due = rd_due[$];
        rd_q.push_back(dram.exists(mem_addr) ? dram[mem_addr] : ~mem_addr);
        rd_due.push_back(due);
      end
    end
    inflight = rd_q.size();
    if (inflight > max_inflight) max_inflight = inflight;
  end

  flit_t outq[$];
  always @(negedge clk) begin
    rsp_ready = $urandom_range(2) != 0;
    #4;
    if (rst_n && rsp_valid && rsp_ready) outq.push_back(rsp_flit);
  end

  task automatic send(input flit_t f);
    @(negedge clk);
    req_valid = 1; req_flit = f;
    #4; while (!req_ready) begin @(negedge clk); #4; end
    @(negedge clk);
    req_valid = 0;
  endtask

  logic [31:0] model [logic [31:0]];

  initial begin
    req_valid = 0; req_flit = '0; mem_rdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 60; i++) begin
      automatic logic [31:0] a = 32'($urandom_range(200));
      automatic int len = $urandom_range(12, 1);
      automatic int sy = $urandom_range(2), sx = $urandom_range(2);
      automatic bit wr = (i < 10) || ($urandom_range(1) == 1);
      if (wr) begin
        send(mk_head(3'(sy), 3'(sx), 3'd2, 3'd2, MSG_DMA_WR_REQ, 1'b0));
        send(mk_body(a, 1'b0));
        send(mk_body(32'(len), 1'b0));
        for (int k = 0; k < len; k++) begin
          automatic logic [31:0] d = $urandom;
          model[a + 32'(k)] = d;
          send(mk_body(d, k == len - 1));
        end
        repeat (4) @(posedge clk);
        for (int k = 0; k < len; k++)
          check(dram.exists(a + 32'(k)) && dram[a + 32'(k)] == model[a + 32'(k)], "write reached DRAM");
      end else begin
        header_t h;
        automatic int n = 0;
        outq.delete();
        send(mk_head(3'(sy), 3'(sx), 3'd2, 3'd2, MSG_DMA_RD_REQ, 1'b0));
        send(mk_body(a, 1'b0));
        send(mk_body(32'(len), 1'b1));
        while (outq.size() < len + 1 && n < 500) begin @(posedge clk); n++; end
        check(outq.size() == len + 1, "read response length");
        h = header_t'(outq[0].data);
        check(outq[0].head && h.msg == MSG_DMA_RD_RSP && h.dst_y == 3'(sy) && h.dst_x == 3'(sx)
              && h.src_y == 3'd2 && h.src_x == 3'd2, "response to the requester");
        for (int k = 0; k < len && k + 1 < outq.size(); k++)
          check(outq[k + 1].data == (model.exists(a + 32'(k)) ? model[a + 32'(k)] : ~(a + 32'(k)))
                && outq[k + 1].tail == (k == len - 1), "read data");
        outq.delete();
      end
    end
    check(max_inflight > 1, "reads pipelined");
    $display("max reads in flight=%0d", max_inflight);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
