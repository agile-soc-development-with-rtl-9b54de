// tb_plm_bank: self-checking testbench of the private local memory bank. Random
// writes and reads on the two ports, 3000 cycles, against a reference array.
// Checks: the read data one cycle after a read address equals the reference
// contents at that address as they were before that cycle's write (read and
// write at the same address in the same cycle return the old word), and every
// address is written at least once.
module tb_plm_bank;
  localparam int unsigned W = 32, DEPTH = 64, AW = 6;
  logic clk = 0;
  always #5 clk = ~clk;

  logic we; logic [AW-1:0] waddr, raddr; logic [W-1:0] wdata, rdata;
  plm_bank #(.W(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [W-1:0] model [DEPTH];
  bit           known [DEPTH];
  bit           seen  [DEPTH];
  logic [W-1:0] expect_d;
  bit           expect_ok;

  initial begin
    we = 0; waddr = '0; raddr = '0; wdata = '0; expect_ok = 0;
    foreach (known[i]) begin known[i] = 0; seen[i] = 0; end
    @(posedge clk);
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      if (expect_ok) check(rdata == expect_d, $sformatf("read data at cycle %0d", c));
      we    = ($urandom_range(2) != 0);
      waddr = AW'($urandom);
      wdata = $urandom;
      raddr = (c % 4 == 0) ? waddr : AW'($urandom);
      expect_ok = known[raddr];
      expect_d  = model[raddr];
      @(posedge clk);
      if (we) begin model[waddr] = wdata; known[waddr] = 1; seen[waddr] = 1; end
    end
    foreach (seen[i]) check(seen[i], $sformatf("address %0d written", i));
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
