// tb_esp_acc: self-checking testbench of the accelerator. A behavioural DMA
// model answers load_ctrl with words in[k] = 3*k + 7 (k = word index) and
// records what arrives on store_ctrl/store_chnl. Two invocations are run, one
// with free-flowing channels and one with random back-pressure and gaps.
// Checks: every output word equals in[k] + addend at out_offset + k, the
// control words carry the expected index/length, acc_done pulses once per
// invocation, loads overlap stores (ping-pong), and the free-flowing run takes
// fewer cycles than the phases would take one after another.
module tb_esp_acc;
  import esp_pkg::*;
  localparam int unsigned PLM = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic conf_valid; conf_t conf;
  logic load_ctrl_valid, load_ctrl_ready; dma_ctrl_t load_ctrl;
  logic load_chnl_valid, load_chnl_ready; logic [31:0] load_chnl_data;
  logic store_ctrl_valid, store_ctrl_ready; dma_ctrl_t store_ctrl;
  logic store_chnl_valid, store_chnl_ready; logic [31:0] store_chnl_data;
  logic acc_done, busy;

  esp_acc #(.PLM_WORDS(PLM)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // DMA model
  logic [31:0] outmem [0:1023];
  bit          written [0:1023];
  int ld_idx, ld_left, st_idx, st_left;
  bit stall;
  int n_ldctrl, n_stctrl, n_done, overlap;
  int exp_ld_ctrl_idx, exp_st_ctrl_idx;
  int cur_len, cur_off;

  assign load_ctrl_ready  = (ld_left == 0);
  assign store_ctrl_ready = (st_left == 0);
  assign load_chnl_valid  = (ld_left != 0) && !(stall && ($urandom_range(0, 2) == 0));
  assign load_chnl_data   = 32'(ld_idx) * 3 + 7;
  assign store_chnl_ready = (st_left != 0) && !(stall && ($urandom_range(0, 2) == 0));

  always @(posedge clk) begin
    if (rst_n) begin
      if (load_ctrl_valid && load_ctrl_ready) begin
        check(load_ctrl.index == 32'(exp_ld_ctrl_idx) && load_ctrl.length == 16'(cur_len), "load_ctrl word");
        exp_ld_ctrl_idx += cur_len;
        ld_idx  <= load_ctrl.index; ld_left <= load_ctrl.length; n_ldctrl++;
      end
      if (load_chnl_valid && load_chnl_ready) begin ld_idx <= ld_idx + 1; ld_left <= ld_left - 1; end
      if (store_ctrl_valid && store_ctrl_ready) begin
        check(store_ctrl.index == 32'(exp_st_ctrl_idx) && store_ctrl.length == 16'(cur_len), "store_ctrl word");
        exp_st_ctrl_idx += cur_len;
        st_idx <= store_ctrl.index; st_left <= store_ctrl.length; n_stctrl++;
      end
      if (store_chnl_valid && store_chnl_ready) begin
        outmem[st_idx] <= store_chnl_data; written[st_idx] <= 1; st_idx <= st_idx + 1; st_left <= st_left - 1;
      end
      if ((load_chnl_valid && load_chnl_ready) && (store_chnl_valid && store_chnl_ready)) overlap++;
      if (acc_done) n_done++;
    end
  end

  task automatic run(input int len, input int nchunk, input int addend, input int off, input bit st, output int cycles);
    stall = st;
    cur_len = len; cur_off = off;
    exp_ld_ctrl_idx = 0; exp_st_ctrl_idx = off;
    for (int i = 0; i < 1024; i++) written[i] = 0;
    conf = '{len: 16'(len), nchunk: 16'(nchunk), addend: 32'(addend), out_offset: 32'(off)};
    @(negedge clk); conf_valid = 1; @(negedge clk); conf_valid = 0;
    cycles = 1;
    while (!acc_done) begin @(negedge clk); cycles++; end
    repeat (2) @(negedge clk);
    for (int k = 0; k < len * nchunk; k++)
      check(written[off + k] && outmem[off + k] == 32'(k * 3 + 7 + addend), $sformatf("out word %0d", k));
  endtask

  initial begin
    int cyc;
    conf_valid = 0; conf = '0; stall = 0;
    ld_left = 0; st_left = 0; ld_idx = 0; st_idx = 0;
    n_ldctrl = 0; n_stctrl = 0; n_done = 0; overlap = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(PLM, 4, 5, 200, 0, cyc);
    // serial phases would take at least 4 chunks * 3 phases * 16 words
    check(cyc < 4 * 3 * PLM, $sformatf("overlapped run took %0d cycles", cyc));
    check(cyc <= 4 * PLM + 2 * PLM + 16, $sformatf("run took %0d cycles, bound %0d", cyc, 6 * PLM + 16));
    check(overlap > 0, "load and store overlap");
    check(n_ldctrl == 4 && n_stctrl == 4 && n_done == 1, "ctrl and done counts (run 1)");
    run(5, 7, 32'hFFFF_FFF0, 500, 1, cyc);
    check(n_ldctrl == 11 && n_stctrl == 11 && n_done == 2, "ctrl and done counts (run 2)");
    check(!busy, "idle after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
