// tb_mmio_proxy: self-checking testbench of the processor tile's register
// access proxy, at tile (0, 1) of a 3-column grid. A processor model issues
// 200 random reads and writes to register addresses of random tiles; a
// responder model collects the outgoing plane-5 packets under random
// back-pressure and answers reads after a random delay.
// Checks: each access becomes one packet to tile addr[11:8] (y = t / 3,
// x = t % 3) carrying register addr[7:2] and, for writes, the data; a write
// completes once its packet is sent; a read returns the responder's data;
// only one access is outstanding.
module tb_mmio_proxy;
  import esp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cpu_req_valid, cpu_req_ready, cpu_we, cpu_rsp_valid;
  logic [31:0] cpu_addr, cpu_wdata, cpu_rdata;
  logic out_valid, out_ready; flit_t out_flit;
  logic in_valid, in_ready; flit_t in_flit;
  mmio_proxy #(.TILE_Y(3'd0), .TILE_X(3'd1), .COLS(3)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  flit_t outq[$];
  always @(negedge clk) begin
    out_ready = $urandom_range(2) != 0;
    #4;
    if (rst_n && out_valid && out_ready) outq.push_back(out_flit);
  end

  initial begin
    cpu_req_valid = 0; cpu_we = 0; cpu_addr = '0; cpu_wdata = '0; in_valid = 0; in_flit = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      automatic int t  = $urandom_range(8);
      automatic int r  = $urandom_range(63);
      automatic bit w  = $urandom_range(1);
      automatic logic [31:0] d = $urandom;
      automatic int n = 0;
      header_t h;
      @(negedge clk);
      cpu_req_valid = 1; cpu_we = w; cpu_addr = {20'h0, 4'(t), 6'(r), 2'b00}; cpu_wdata = d;
      #4; while (!cpu_req_ready) begin @(negedge clk); #4; end
      @(negedge clk);
      cpu_req_valid = 0;
      while (outq.size() < (w ? 3 : 2) && n < 100) begin @(posedge clk); n++; end
      check(outq.size() == (w ? 3 : 2), "request packet sent");
      h = header_t'(outq[0].data);
      check(outq[0].head && h.msg == (w ? MSG_REG_WR : MSG_REG_RD)
            && h.dst_y == COORD_W'(t / 3) && h.dst_x == COORD_W'(t % 3)
            && h.src_y == 3'd0 && h.src_x == 3'd1, "header to the owning tile");
      check(outq[1].data == 32'(r) && outq[1].tail == !w, "register index");
      if (w) begin
        check(outq[2].data == d && outq[2].tail, "write data");
        n = 0;
        while (!cpu_rsp_valid && n < 10) begin @(negedge clk); n++; end
        check(cpu_rsp_valid, "write completes");
      end else begin
        check(!cpu_rsp_valid && !cpu_req_ready, "read waits for the response");
        repeat ($urandom_range(8)) @(negedge clk);
        in_valid = 1; in_flit = mk_head(COORD_W'(t / 3), COORD_W'(t % 3), 3'd0, 3'd1, MSG_REG_RSP, 1'b0);
        @(negedge clk);
        in_flit = mk_body(d ^ 32'h5A5A_5A5A, 1'b1);
        @(negedge clk);
        in_valid = 0;
        n = 0;
        while (!cpu_rsp_valid && n < 10) begin #10; n++; end
        check(cpu_rsp_valid && cpu_rdata == (d ^ 32'h5A5A_5A5A), "read data returned");
      end
      outq.delete();
    end
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
