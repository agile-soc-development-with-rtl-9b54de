// mmio_proxy: the processor tile's register-access proxy (register snd,
// plane 5). The processor's I/O bus issues single-word accesses on a plain
// request port; each becomes a register packet to the tile that owns the
// address:
//   write: [head MSG_REG_WR][reg][data, tail]   (posted: cpu_rsp_valid pulses
//          as soon as the packet has been sent)
//   read:  [head MSG_REG_RD][reg, tail], then waits for [head MSG_REG_RSP]
//          [data, tail] on plane 5 and returns the data with cpu_rsp_valid.
// Address map: bits [11:8] select tile t = y*COLS + x, bits [7:2] the register.
// One access is outstanding at a time.
// The paper gives the forwarding of memory-mapped I/O over the I/O plane;
// the request port (in place of the APB adapter), address map and packets
// are this design's.
module mmio_proxy
  import esp_pkg::*;
#(
  parameter logic [COORD_W-1:0] TILE_Y = '0,
  parameter logic [COORD_W-1:0] TILE_X = '0,
  parameter int unsigned        COLS   = 3
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cpu_req_valid,
  output logic               cpu_req_ready,
  input  logic               cpu_we,
  input  logic [31:0]        cpu_addr,
  input  logic [31:0]        cpu_wdata,
  output logic               cpu_rsp_valid,
  output logic [31:0]        cpu_rdata,
  output logic               out_valid,   // plane 5, tile -> NoC
  input  logic               out_ready,
  output flit_t              out_flit,
  input  logic               in_valid,    // plane 5, NoC -> tile
  output logic               in_ready,
  input  flit_t              in_flit
);
  typedef enum logic [2:0] {M_IDLE, M_HEAD, M_REG, M_DATA, M_WAIT} mst_t;
  mst_t               ms;
  logic               we;
  logic [31:0]        addr, wdata;
  logic [3:0]         tidx;
  logic [COORD_W-1:0] dy, dx;

  assign tidx = addr[11:8];
  assign dy   = COORD_W'(int'(tidx) / COLS);
  assign dx   = COORD_W'(int'(tidx) % COLS);

  assign cpu_req_ready = (ms == M_IDLE);
  assign in_ready      = (ms == M_WAIT);

  always_comb begin
    out_valid = 1'b0;
    out_flit  = '0;
    case (ms)
      M_HEAD: begin out_valid = 1'b1; out_flit = mk_head(TILE_Y, TILE_X, dy, dx, we ? MSG_REG_WR : MSG_REG_RD, 1'b0); end
      M_REG:  begin out_valid = 1'b1; out_flit = mk_body(32'(addr[7:2]), !we); end
      M_DATA: begin out_valid = 1'b1; out_flit = mk_body(wdata, 1'b1); end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ms <= M_IDLE; we <= 1'b0; addr <= '0; wdata <= '0; cpu_rsp_valid <= 1'b0; cpu_rdata <= '0;
    end else begin
      cpu_rsp_valid <= 1'b0;
      case (ms)
        M_IDLE: if (cpu_req_valid) begin
          we <= cpu_we; addr <= cpu_addr; wdata <= cpu_wdata; ms <= M_HEAD;
        end
        M_HEAD: if (out_ready) ms <= M_REG;
        M_REG:  if (out_ready) ms <= we ? M_DATA : M_WAIT;
        M_DATA: if (out_ready) begin ms <= M_IDLE; cpu_rsp_valid <= 1'b1; end
        M_WAIT: if (in_valid && !in_flit.head) begin
          cpu_rdata     <= in_flit.data;
          cpu_rsp_valid <= 1'b1;
          ms            <= M_IDLE;
        end
        default: ms <= M_IDLE;
      endcase
    end
  end

  a_rsp_only: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (ms == M_WAIT));
endmodule
