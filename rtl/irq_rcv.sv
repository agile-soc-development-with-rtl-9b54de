// irq_rcv: the auxiliary tile's interrupt receive proxy (interrupt rcv,
// plane 5). Each MSG_IRQ packet from a tile sets that tile's bit in irq
// (bit t for tile t = y*COLS + x); the bit stays set until irq_ack[t] is
// pulsed. The bits are the level inputs of the system's interrupt controller.
// An interrupt arriving in the same cycle as its ack stays pending.
// The proxy is named in the paper; its behaviour here is this design's.
module irq_rcv
  import esp_pkg::*;
#(
  parameter int unsigned ROWS = 3,
  parameter int unsigned COLS = 3
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,   // plane 5, NoC -> tile
  output logic                    in_ready,
  input  flit_t                   in_flit,
  output logic [ROWS*COLS-1:0]    irq,
  input  logic [ROWS*COLS-1:0]    irq_ack
);
  header_t hdr;
  logic [ROWS*COLS-1:0] set;

  assign hdr      = header_t'(in_flit.data);
  assign in_ready = 1'b1;

  always_comb begin
    set = '0;
    if (in_valid && in_flit.head && hdr.msg == MSG_IRQ)
      set[int'(hdr.src_y) * COLS + int'(hdr.src_x)] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) irq <= '0;
    else        irq <= (irq & ~irq_ack) | set;
  end

  a_irq_only: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (in_flit.head && in_flit.tail && hdr.msg == MSG_IRQ));
endmodule
