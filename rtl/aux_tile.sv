// aux_tile: the socket of the auxiliary tile, reduced to its interrupt
// receive proxy (irq_rcv) on plane 5 with its buffer queue. The pending
// interrupt vector and its acknowledge are ports, for the interrupt
// controller that lives in this tile. Nothing is sent on any plane, and
// packets on planes other than 5 are dropped (an assertion flags them).
// The peripherals of this tile in the paper (Ethernet, UART, timer,
// interrupt controller, boot ROM, frame buffer, debug link) are outside this
// design.
//
// Lint: rst_n is used as an asynchronous reset by the flops and as a
// synchronous enable by the assertions' 'disable iff'; a tool that reports
// the reset as both synchronous and asynchronous is seeing the assertions.
module aux_tile
  import esp_pkg::*;
#(
  parameter int unsigned ROWS   = 3,
  parameter int unsigned COLS   = 3,
  parameter int unsigned QDEPTH = 4
) (
  input  logic                           clk,
  input  logic                           rst_n,
  output logic  [NUM_PLANES-1:0]         noc_out_valid,
  input  logic  [NUM_PLANES-1:0]         noc_out_ready,
  output flit_t [NUM_PLANES-1:0]         noc_out_flit,
  input  logic  [NUM_PLANES-1:0]         noc_in_valid,
  output logic  [NUM_PLANES-1:0]         noc_in_ready,
  input  flit_t [NUM_PLANES-1:0]         noc_in_flit,
  output logic  [ROWS*COLS-1:0]          irq,
  input  logic  [ROWS*COLS-1:0]          irq_ack
);
  localparam int unsigned P5 = PLANE_MISC - 1;

  logic  i_v, i_r;
  flit_t i_f;

  noc_queue #(.W(FLIT_W), .DEPTH(QDEPTH)) u_q5_in (.clk, .rst_n,
    .in_valid(noc_in_valid[P5]), .in_ready(noc_in_ready[P5]), .in_data(noc_in_flit[P5]),
    .out_valid(i_v), .out_ready(i_r), .out_data(i_f));

  irq_rcv #(.ROWS(ROWS), .COLS(COLS)) u_irq (.clk, .rst_n, .in_valid(i_v), .in_ready(i_r), .in_flit(i_f),
    .irq, .irq_ack);

  assign noc_out_valid = '0;
  assign noc_out_flit  = '0;
  for (genvar p = 0; p < NUM_PLANES; p++) begin : g_unused
    if (p != P5) begin : g_u
      assign noc_in_ready[p] = 1'b1;
      a_nothing_in: assert property (@(posedge clk) disable iff (!rst_n) !noc_in_valid[p]);
    end
  end
endmodule
