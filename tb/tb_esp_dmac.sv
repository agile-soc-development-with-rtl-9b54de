// tb_esp_dmac: self-checking testbench of the accelerator tile's DMA
// controller, placed at tile (1, 0) with memory tiles at (0, 0) and (2, 2)
// and 2**PART_BITS-word memory slices. The NoC is modelled by collectors on
// the two plane-6 outputs and the plane-4 P2P output (random back-pressure)
// and by a driver on the plane-4 response input; the accelerator side is
// driven directly, with random back-pressure on load_chnl.
// Checks, for 24 random DMA loads and 24 random DMA stores spread over both
// memory slices: the request packet goes to the memory tile owning the
// address, carries base + index and the length, the response data is handed
// to load_chnl in order, and the write packet carries the store_chnl data.
// Then P2P: with P2P load enabled a load becomes a P2P request to the
// configured producer; with P2P store enabled a store waits for a consumer's
// P2P request and answers it with one response packet to that consumer.
module tb_esp_dmac;
  import esp_pkg::*;
  localparam int unsigned PB = 20;
  localparam logic [1:0][COORD_W-1:0] MY = {3'd2, 3'd0}, MX = {3'd2, 3'd0};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] base; logic p2p_store_en, p2p_load_en; logic [COORD_W-1:0] p2p_src_y, p2p_src_x;
  logic load_ctrl_valid, load_ctrl_ready; dma_ctrl_t load_ctrl;
  logic load_chnl_valid, load_chnl_ready; logic [31:0] load_chnl_data;
  logic store_ctrl_valid, store_ctrl_ready; dma_ctrl_t store_ctrl;
  logic store_chnl_valid, store_chnl_ready; logic [31:0] store_chnl_data;
  logic ld_req_valid, ld_req_ready; flit_t ld_req_flit;
  logic st_req_valid, st_req_ready; flit_t st_req_flit;
  logic rsp_valid, rsp_ready; flit_t rsp_flit;
  logic p2p_req_valid, p2p_req_ready; flit_t p2p_req_flit;
  logic p2p_out_valid, p2p_out_ready; flit_t p2p_out_flit;

  esp_dmac #(.TILE_Y(3'd1), .TILE_X(3'd0), .NUM_MEM(2), .MEM_Y(MY), .MEM_X(MX), .PART_BITS(PB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // collectors: flits leaving on each output, in order
  flit_t ldq[$], stq[$], p2q[$];
  logic [31:0] chq[$];
  always @(negedge clk) begin
    ld_req_ready    = $urandom_range(3) != 0;
    st_req_ready    = $urandom_range(3) != 0;
    p2p_out_ready   = $urandom_range(3) != 0;
    load_chnl_ready = $urandom_range(3) != 0;
    #4;
    if (rst_n) begin
      if (ld_req_valid && ld_req_ready) ldq.push_back(ld_req_flit);
      if (st_req_valid && st_req_ready) stq.push_back(st_req_flit);
      if (p2p_out_valid && p2p_out_ready) p2q.push_back(p2p_out_flit);
      if (load_chnl_valid && load_chnl_ready) chq.push_back(load_chnl_data);
    end
  end

  task automatic wait_n(ref flit_t q[$], input int n);
    int k = 0;
    while (q.size() < n && k < 2000) begin @(posedge clk); k++; end
    check(q.size() >= n, "packet leaves the DMAC");
  endtask

  function automatic bit hdr_ok(input flit_t f, input int dy, input int dx, input msg_t m);
    header_t h;
    h = header_t'(f.data);
    return f.head && h.dst_y == COORD_W'(dy) && h.dst_x == COORD_W'(dx) && h.msg == m
           && h.src_y == 3'd1 && h.src_x == 3'd0;
  endfunction

  task automatic drive_rsp(input flit_t f);
    @(negedge clk);
    rsp_valid = 1'b1; rsp_flit = f;
    #4;
    while (!rsp_ready) begin @(negedge clk); #4; end
    @(negedge clk);
    rsp_valid = 1'b0;
  endtask

  task automatic do_load(input logic [31:0] idx, input int len, input bit p2p);
    logic [31:0] addr;
    int mem, n;
    addr = base + idx;
    mem  = int'((addr >> PB) % 2);
    @(negedge clk);
    load_ctrl_valid = 1'b1; load_ctrl = '{index: idx, length: 16'(len)};
    #4;
    while (!load_ctrl_ready) begin @(negedge clk); #4; end
    @(negedge clk);
    load_ctrl_valid = 1'b0;
    if (!p2p) begin
      wait_n(ldq, 3);
      check(hdr_ok(ldq[0], int'(MY[mem]), int'(MX[mem]), MSG_DMA_RD_REQ), "read request to the owning memory tile");
      check(ldq[1].data == addr && !ldq[1].tail, "read request address");
      check(ldq[2].data == 32'(len) && ldq[2].tail, "read request length");
    end else begin
      wait_n(ldq, 2);
      check(hdr_ok(ldq[0], int'(p2p_src_y), int'(p2p_src_x), MSG_P2P_REQ), "P2P request to the producer");
      check(ldq[1].data == 32'(len) && ldq[1].tail, "P2P request length");
    end
    ldq.delete();
    drive_rsp(mk_head(3'd0, 3'd0, 3'd1, 3'd0, MSG_DMA_RD_RSP, 1'b0));
    for (int k = 0; k < len; k++) drive_rsp(mk_body(addr * 7 + 32'(k), k == len - 1));
    n = 0;
    while (chq.size() < len && n < 200) begin @(posedge clk); n++; end
    check(chq.size() == len, "load_chnl words");
    for (int k = 0; k < len && k < chq.size(); k++) check(chq[k] == addr * 7 + 32'(k), "load_chnl data in order");
    chq.delete();
  endtask

  task automatic feed_store(input logic [31:0] idx, input int len, input logic [31:0] seed);
    @(negedge clk);
    store_ctrl_valid = 1'b1; store_ctrl = '{index: idx, length: 16'(len)};
    #4;
    while (!store_ctrl_ready) begin @(negedge clk); #4; end
    @(negedge clk);
    store_ctrl_valid = 1'b0;
    for (int k = 0; k < len; k++) begin
      store_chnl_valid = 1'b1; store_chnl_data = seed + 32'(k * 3);
      #4;
      while (!store_chnl_ready) begin @(negedge clk); #4; end
      @(negedge clk);
    end
    store_chnl_valid = 1'b0;
  endtask

  task automatic do_store(input logic [31:0] idx, input int len);
    logic [31:0] addr;
    int mem;
    addr = base + idx;
    mem  = int'((addr >> PB) % 2);
    feed_store(idx, len, addr);
    wait_n(stq, 3 + len);
    check(hdr_ok(stq[0], int'(MY[mem]), int'(MX[mem]), MSG_DMA_WR_REQ), "write request to the owning memory tile");
    check(stq[1].data == addr, "write address");
    check(stq[2].data == 32'(len), "write length");
    for (int k = 0; k < len && 3 + k < stq.size(); k++)
      check(stq[3 + k].data == addr + 32'(k * 3) && stq[3 + k].tail == (k == len - 1), "write data");
    stq.delete();
  endtask

  initial begin
    base = '0; p2p_store_en = 0; p2p_load_en = 0; p2p_src_y = '0; p2p_src_x = '0;
    load_ctrl_valid = 0; load_ctrl = '0; store_ctrl_valid = 0; store_ctrl = '0;
    store_chnl_valid = 0; store_chnl_data = '0; rsp_valid = 0; rsp_flit = '0;
    p2p_req_valid = 0; p2p_req_flit = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 24; i++) begin
      base = (i % 2 == 0) ? 32'(i * 1000) : (32'(1) << PB) + 32'(i * 77);
      if (i % 6 == 5) base = (32'(3) << PB) + 32'(i);
      do_load(32'($urandom_range(500)), $urandom_range(16, 1), 1'b0);
      do_store(32'($urandom_range(500)), $urandom_range(16, 1));
    end
    // P2P load from producer (1, 2)
    p2p_load_en = 1; p2p_src_y = 3'd1; p2p_src_x = 3'd2;
    do_load(32'd0, 8, 1'b1);
    p2p_load_en = 0;
    // P2P store: answer a consumer at (2, 1)
    p2p_store_en = 1;
    fork
      feed_store(32'd40, 6, 32'h1000);
      begin
        repeat (20) @(posedge clk);
        check(stq.size() == 0 && p2q.size() == 0, "P2P store waits for the consumer's request");
        @(negedge clk);
        p2p_req_valid = 1; p2p_req_flit = mk_head(3'd2, 3'd1, 3'd1, 3'd0, MSG_P2P_REQ, 1'b0);
        #4; while (!p2p_req_ready) begin @(negedge clk); #4; end
        @(negedge clk);
        p2p_req_flit = mk_body(32'd6, 1'b1);
        #4; while (!p2p_req_ready) begin @(negedge clk); #4; end
        @(negedge clk);
        p2p_req_valid = 0;
      end
    join
    wait_n(p2q, 7);
    check(hdr_ok(p2q[0], 2, 1, MSG_DMA_RD_RSP), "P2P data packet to the consumer");
    for (int k = 0; k < 6 && 1 + k < p2q.size(); k++)
      check(p2q[1 + k].data == 32'h1000 + 32'(k * 3) && p2q[1 + k].tail == (k == 5), "P2P data");
    check(stq.size() == 0, "P2P store sends nothing to memory");
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
