// tb_irq_rcv: self-checking testbench of the interrupt receiver. Interrupt
// packets from random source tiles of a 3x3 grid arrive on the plane-5 input
// and random acknowledges clear pending lines. Checks: each packet raises the
// line of its source tile on the next cycle, an acknowledge clears it, a line
// set and acknowledged in the same cycle stays set (the new interrupt is not
// lost), and the input is always ready.
module tb_irq_rcv;
  import esp_pkg::*;
  localparam int unsigned ROWS = 3, COLS = 3, NT = ROWS * COLS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready; flit_t in_flit;
  logic [NT-1:0] irq, irq_ack;
  irq_rcv #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [NT-1:0] model, set;
  int n_same = 0;

  initial begin
    in_valid = 0; in_flit = '0; irq_ack = '0; model = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      check(irq == model, $sformatf("irq lines at cycle %0d", c));
      check(in_ready, "always ready");
      set = '0;
      in_valid = ($urandom_range(2) == 0);
      if (in_valid) begin
        automatic int unsigned t = $urandom_range(NT - 1);
        in_flit = mk_head(COORD_W'($urandom_range(2)), COORD_W'($urandom_range(2)),
                          3'd2, 3'd0, MSG_IRQ, 1'b1);
        t = int'(in_flit.data[31:29]) * COLS + int'(in_flit.data[28:26]);
        set[t] = 1'b1;
      end
      irq_ack = NT'($urandom) & NT'($urandom);
      if ((set & irq_ack) != '0) n_same++;
      @(posedge clk);
      model = (model & ~irq_ack) | set;
    end
    check(n_same > 0, "set and acknowledge in the same cycle happened");
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
