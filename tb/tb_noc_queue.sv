// tb_noc_queue: self-checking testbench of the NoC input queue. A random
// producer and a random consumer (valid/ready, each active about half the
// time) move 2000 words through a DEPTH-4 queue. A reference queue in the
// testbench predicts every output word and the occupancy; the checks are that
// words come out in order and unchanged, that in_ready drops exactly when the
// queue holds DEPTH words, that out_valid is high exactly when it holds any,
// and that the full and empty cases both happened.
module tb_noc_queue;
  localparam int unsigned W = 34, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  noc_queue #(.W(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [W-1:0] model[$];
  bit pop, push;
  int n_full = 0, n_empty = 0, n_out = 0;

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (n_out < 2000) begin
      @(negedge clk);
      in_valid  = ($urandom_range(1) == 1);
      in_data   = {$urandom, $urandom};
      out_ready = ($urandom_range(1) == 1);
      #1;
      check(in_ready == (model.size() < DEPTH), "in_ready vs occupancy");
      check(out_valid == (model.size() > 0), "out_valid vs occupancy");
      if (model.size() == DEPTH) n_full++;
      if (model.size() == 0) n_empty++;
      if (out_valid && model.size() > 0) check(out_data == model[0], "output order/data");
      #3;
      pop  = out_valid && out_ready;
      push = in_valid && in_ready;
      @(posedge clk);
      if (pop) begin void'(model.pop_front()); n_out++; end
      if (push) model.push_back(in_data);
    end
    check(n_full > 0, "queue was full at least once");
    check(n_empty > 0, "queue was empty at least once");
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
