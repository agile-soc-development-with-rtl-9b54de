// acc_regs: configuration registers of an accelerator tile, with the
// register-access proxy (register rcv, plane 5) and the interrupt proxy
// (interrupt snd, plane 5) that serve them.
//
// Packets in (plane 5):  [head MSG_REG_WR][reg index][data, tail]
//                        [head MSG_REG_RD][reg index, tail]
// Packets out (plane 5): [head MSG_REG_RSP][data, tail]   back to the reader
//                        [head MSG_IRQ, tail]             to the interrupt tile
// Register map (word index): 0 CMD (write 1 starts the accelerator),
// 1 STATUS ([0] running, [1] done; any write clears done), 2 BASE (physical
// word address of the accelerator's buffer), 3 P2P ([0] store via P2P,
// [1] load via P2P, [4:2] producer x, [7:5] producer y), 16 LEN, 17 NCHUNK,
// 18 ADDEND, 19 OUT_OFFSET (the accelerator's own conf_info fields).
// A start while the accelerator is busy is ignored. When the accelerator
// raises acc_done the done bit is set and one interrupt packet is sent; an
// interrupt waiting to be sent goes out before the next register packet is
// taken. One packet is handled at a time.
// The paper gives the services (memory-mapped configuration, start, status,
// P2P configuration registers, interrupt on completion); the register map and
// packet layouts are this design's.
module acc_regs
  import esp_pkg::*;
#(
  parameter logic [COORD_W-1:0] TILE_Y = '0,
  parameter logic [COORD_W-1:0] TILE_X = '0,
  parameter logic [COORD_W-1:0] IRQ_Y  = '0,
  parameter logic [COORD_W-1:0] IRQ_X  = '0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                req_valid,   // plane 5, NoC -> tile
  output logic                req_ready,
  input  flit_t               req_flit,
  output logic                out_valid,   // plane 5, tile -> NoC
  input  logic                out_ready,
  output flit_t               out_flit,
  // to / from the accelerator and the DMAC
  output logic                conf_valid,
  output conf_t               conf,
  output logic [31:0]         base,
  output logic                p2p_store_en,
  output logic                p2p_load_en,
  output logic [COORD_W-1:0]  p2p_src_y,
  output logic [COORD_W-1:0]  p2p_src_x,
  input  logic                acc_done,
  input  logic                acc_busy
);
  typedef enum logic [2:0] {R_IDLE, R_REG, R_DATA, R_RSP_HEAD, R_RSP_DATA, R_IRQ} rst_t;
  rst_t               rs;
  logic               is_wr;
  logic [COORD_W-1:0] sy, sx;
  logic [5:0]         ridx;
  logic [31:0]        rdval;
  logic               done_bit, irq_pend;
  logic [7:0]         p2p_reg;
  header_t            hdr;

  assign hdr          = header_t'(req_flit.data);
  assign p2p_store_en = p2p_reg[0];
  assign p2p_load_en  = p2p_reg[1];
  assign p2p_src_x    = p2p_reg[4:2];
  assign p2p_src_y    = p2p_reg[7:5];

  always_comb begin
    case (ridx)
      REG_STATUS: rdval = {30'd0, done_bit, acc_busy};
      REG_BASE:   rdval = base;
      REG_P2P:    rdval = {24'd0, p2p_reg};
      REG_LEN:    rdval = 32'(conf.len);
      REG_NCHUNK: rdval = 32'(conf.nchunk);
      REG_ADDEND: rdval = conf.addend;
      REG_OUTOFF: rdval = conf.out_offset;
      default:    rdval = '0;
    endcase
  end

  always_comb begin
    req_ready = (rs == R_IDLE && !irq_pend) || rs == R_REG || rs == R_DATA;
    out_valid = 1'b0;
    out_flit  = '0;
    case (rs)
      R_IRQ:      begin out_valid = 1'b1; out_flit = mk_head(TILE_Y, TILE_X, IRQ_Y, IRQ_X, MSG_IRQ, 1'b1); end
      R_RSP_HEAD: begin out_valid = 1'b1; out_flit = mk_head(TILE_Y, TILE_X, sy, sx, MSG_REG_RSP, 1'b0); end
      R_RSP_DATA: begin out_valid = 1'b1; out_flit = mk_body(rdval, 1'b1); end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= R_IDLE; is_wr <= 1'b0; sy <= '0; sx <= '0; ridx <= '0;
      done_bit <= 1'b0; irq_pend <= 1'b0; p2p_reg <= '0; base <= '0; conf <= '0;
      conf_valid <= 1'b0;
    end else begin
      conf_valid <= 1'b0;
      if (acc_done) begin
        done_bit <= 1'b1;
        irq_pend <= 1'b1;
      end
      case (rs)
        R_IDLE: begin
          if (irq_pend) rs <= R_IRQ;
          else if (req_valid && req_flit.head) begin
            is_wr <= (hdr.msg == MSG_REG_WR);
            sy    <= hdr.src_y;
            sx    <= hdr.src_x;
            rs    <= R_REG;
          end
        end
        R_REG: if (req_valid) begin
          ridx <= req_flit.data[5:0];
          rs   <= is_wr ? R_DATA : R_RSP_HEAD;
        end
        R_DATA: if (req_valid) begin
          case (ridx)
            REG_CMD:    if (req_flit.data[0] && !acc_busy) conf_valid <= 1'b1;
            REG_STATUS: done_bit <= 1'b0;
            REG_BASE:   base <= req_flit.data;
            REG_P2P:    p2p_reg <= req_flit.data[7:0];
            REG_LEN:    conf.len <= req_flit.data[15:0];
            REG_NCHUNK: conf.nchunk <= req_flit.data[15:0];
            REG_ADDEND: conf.addend <= req_flit.data;
            REG_OUTOFF: conf.out_offset <= req_flit.data;
            default: ;
          endcase
          rs <= R_IDLE;
        end
        R_RSP_HEAD: if (out_ready) rs <= R_RSP_DATA;
        R_RSP_DATA: if (out_ready) rs <= R_IDLE;
        R_IRQ: if (out_ready) begin
          rs <= R_IDLE;
          if (!acc_done) irq_pend <= 1'b0;
        end
        default: rs <= R_IDLE;
      endcase
    end
  end

  a_reg_pkt: assert property (@(posedge clk) disable iff (!rst_n)
    (rs == R_IDLE && !irq_pend && req_valid) |-> (req_flit.head && (hdr.msg == MSG_REG_WR || hdr.msg == MSG_REG_RD)));
endmodule
