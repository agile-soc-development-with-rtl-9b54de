// esp_dmac: the DMA controller of the accelerator socket, with the
// non-coherent DMA service and point-to-point (P2P) transfers between
// accelerator tiles.
//
// Load: a load_ctrl word {index, length} becomes a read request
//   [head MSG_DMA_RD_REQ][word address = base + index][length]
// sent on plane 6 to the memory tile that owns the address, or, when P2P
// load is enabled, a request [head MSG_P2P_REQ][length] sent on plane 6 to the
// producer tile named in the P2P register. The answer arrives on plane 4 as
// [head MSG_DMA_RD_RSP][data]...[data, tail] and is streamed to load_chnl.
// Store: a store_ctrl word becomes a write
//   [head MSG_DMA_WR_REQ][address][length][data]...[data, tail]
// on plane 6 to the owning memory tile, fed from store_chnl. When P2P store
// is enabled the DMAC instead waits for a MSG_P2P_REQ from a consumer
// (plane 6) and answers it with one store burst as a MSG_DMA_RD_RSP packet
// on plane 4, so one producer store matches one consumer load.
//
// Memory is partitioned across NUM_MEM memory tiles in contiguous slices of
// 2**PART_BITS words: tile (word address >> PART_BITS) % NUM_MEM owns it.
// A burst must not cross a slice. Writes are posted. Load and store run
// independently; each handles one burst at a time. Data passes through
// combinationally (valid/ready), so a burst streams at one word per cycle.
//
// From the paper: the DMA service, the plane labels d2m (6) / m2d (4),
// partitioned memory across memory tiles, P2P over the NoC selected by
// configuration registers at run time, and one store transaction per consumer
// load. This design's choices: the packet layouts, the planes P2P uses, the
// slice partitioning, posted writes, and a physical base register in place of
// the TLB.
module esp_dmac
  import esp_pkg::*;
#(
  parameter logic [COORD_W-1:0]               TILE_Y    = '0,
  parameter logic [COORD_W-1:0]               TILE_X    = '0,
  parameter int unsigned                      NUM_MEM   = 2,
  parameter logic [NUM_MEM-1:0][COORD_W-1:0]  MEM_Y     = '0,
  parameter logic [NUM_MEM-1:0][COORD_W-1:0]  MEM_X     = '0,
  parameter int unsigned                      PART_BITS = 20
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration registers
  input  logic [31:0]         base,
  input  logic                p2p_store_en,
  input  logic                p2p_load_en,
  input  logic [COORD_W-1:0]  p2p_src_y,
  input  logic [COORD_W-1:0]  p2p_src_x,
  // accelerator side
  input  logic                load_ctrl_valid,
  output logic                load_ctrl_ready,
  input  dma_ctrl_t           load_ctrl,
  output logic                load_chnl_valid,
  input  logic                load_chnl_ready,
  output logic [DATA_W-1:0]   load_chnl_data,
  input  logic                store_ctrl_valid,
  output logic                store_ctrl_ready,
  input  dma_ctrl_t           store_ctrl,
  input  logic                store_chnl_valid,
  output logic                store_chnl_ready,
  input  logic [DATA_W-1:0]   store_chnl_data,
  // NoC side
  output logic                ld_req_valid,   // plane 6, tile -> NoC
  input  logic                ld_req_ready,
  output flit_t               ld_req_flit,
  output logic                st_req_valid,   // plane 6, tile -> NoC
  input  logic                st_req_ready,
  output flit_t               st_req_flit,
  input  logic                rsp_valid,      // plane 4, NoC -> tile
  output logic                rsp_ready,
  input  flit_t               rsp_flit,
  input  logic                p2p_req_valid,  // plane 6, NoC -> tile
  output logic                p2p_req_ready,
  input  flit_t               p2p_req_flit,
  output logic                p2p_out_valid,  // plane 4, tile -> NoC
  input  logic                p2p_out_ready,
  output flit_t               p2p_out_flit
);
  localparam int unsigned MW = (NUM_MEM > 1) ? $clog2(NUM_MEM) : 1;

  function automatic int unsigned owner(input logic [31:0] addr);
    return int'(32'(addr >> PART_BITS) % NUM_MEM);
  endfunction

  // ---------------- load ----------------
  typedef enum logic [2:0] {LD_IDLE, LD_HEAD, LD_ADDR, LD_LEN, LD_DATA} ld_t;
  ld_t                ld;
  logic [31:0]        ld_addr;
  logic [15:0]        ld_len;
  logic               ld_p2p;
  logic [COORD_W-1:0] ld_dy, ld_dx;
  logic               rsp_body;

  assign load_ctrl_ready = (ld == LD_IDLE);

  always_comb begin
    ld_req_valid = 1'b0;
    ld_req_flit  = '0;
    case (ld)
      LD_HEAD: begin
        ld_req_valid = 1'b1;
        ld_req_flit  = mk_head(TILE_Y, TILE_X, ld_dy, ld_dx, ld_p2p ? MSG_P2P_REQ : MSG_DMA_RD_REQ, 1'b0);
      end
      LD_ADDR: begin ld_req_valid = 1'b1; ld_req_flit = mk_body(ld_addr, 1'b0); end
      LD_LEN:  begin ld_req_valid = 1'b1; ld_req_flit = mk_body(32'(ld_len), 1'b1); end
      default: ;
    endcase
  end

  // Response: drop the head flit, stream the body.
  assign rsp_body        = (ld == LD_DATA) && rsp_valid && !rsp_flit.head;
  assign load_chnl_valid = rsp_body;
  assign load_chnl_data  = rsp_flit.data;
  assign rsp_ready       = (ld == LD_DATA) && (rsp_flit.head || load_chnl_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld <= LD_IDLE; ld_addr <= '0; ld_len <= '0; ld_p2p <= 1'b0; ld_dy <= '0; ld_dx <= '0;
    end else begin
      case (ld)
        LD_IDLE: if (load_ctrl_valid) begin
          ld_addr <= base + load_ctrl.index;
          ld_len  <= load_ctrl.length;
          ld_p2p  <= p2p_load_en;
          if (p2p_load_en) begin
            ld_dy <= p2p_src_y;
            ld_dx <= p2p_src_x;
          end else begin
            ld_dy <= MEM_Y[MW'(owner(base + load_ctrl.index))];
            ld_dx <= MEM_X[MW'(owner(base + load_ctrl.index))];
          end
          ld <= LD_HEAD;
        end
        LD_HEAD: if (ld_req_ready) ld <= ld_p2p ? LD_LEN : LD_ADDR;
        LD_ADDR: if (ld_req_ready) ld <= LD_LEN;
        LD_LEN:  if (ld_req_ready) ld <= LD_DATA;
        LD_DATA: if (rsp_valid && rsp_ready && rsp_flit.tail) ld <= LD_IDLE;
        default: ld <= LD_IDLE;
      endcase
    end
  end

  // ---------------- store ----------------
  typedef enum logic [2:0] {ST_IDLE, ST_WAIT_REQ, ST_HEAD, ST_ADDR, ST_LEN, ST_DATA} st_t;
  st_t                st;
  logic [31:0]        st_addr;
  logic [15:0]        st_len, st_cnt;
  logic               st_p2p;
  logic [COORD_W-1:0] st_dy, st_dx;
  flit_t              st_flit;
  logic               st_valid, st_ready;
  header_t            p2p_hdr, rsp_hdr;

  assign p2p_hdr = header_t'(p2p_req_flit.data);
  assign rsp_hdr = header_t'(rsp_flit.data);

  assign st_ready         = st_p2p ? p2p_out_ready : st_req_ready;
  assign store_ctrl_ready = (st == ST_IDLE);
  assign p2p_req_ready    = (st == ST_WAIT_REQ);

  always_comb begin
    st_valid         = 1'b0;
    st_flit          = '0;
    store_chnl_ready = 1'b0;
    case (st)
      ST_HEAD: begin
        st_valid = 1'b1;
        st_flit  = mk_head(TILE_Y, TILE_X, st_dy, st_dx, st_p2p ? MSG_DMA_RD_RSP : MSG_DMA_WR_REQ, 1'b0);
      end
      ST_ADDR: begin st_valid = 1'b1; st_flit = mk_body(st_addr, 1'b0); end
      ST_LEN:  begin st_valid = 1'b1; st_flit = mk_body(32'(st_len), 1'b0); end
      ST_DATA: begin
        st_valid         = store_chnl_valid;
        st_flit          = mk_body(store_chnl_data, st_cnt == st_len - 1'b1);
        store_chnl_ready = st_ready;
      end
      default: ;
    endcase
    // plain stores go to memory on plane 6, P2P answers to the consumer on plane 4
    st_req_valid  = st_valid && !st_p2p;
    st_req_flit   = st_flit;
    p2p_out_valid = st_valid && st_p2p;
    p2p_out_flit  = st_flit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= ST_IDLE; st_addr <= '0; st_len <= '0; st_cnt <= '0; st_p2p <= 1'b0;
      st_dy <= '0; st_dx <= '0;
    end else begin
      case (st)
        ST_IDLE: if (store_ctrl_valid) begin
          st_addr <= base + store_ctrl.index;
          st_len  <= store_ctrl.length;
          st_cnt  <= '0;
          st_p2p  <= p2p_store_en;
          st_dy   <= MEM_Y[MW'(owner(base + store_ctrl.index))];
          st_dx   <= MEM_X[MW'(owner(base + store_ctrl.index))];
          st      <= p2p_store_en ? ST_WAIT_REQ : ST_HEAD;
        end
        ST_WAIT_REQ: if (p2p_req_valid) begin
          if (p2p_req_flit.head) begin
            st_dy <= p2p_hdr.src_y;
            st_dx <= p2p_hdr.src_x;
          end
          if (p2p_req_flit.tail) st <= ST_HEAD;
        end
        ST_HEAD: if (st_ready) st <= st_p2p ? ST_DATA : ST_ADDR;
        ST_ADDR: if (st_ready) st <= ST_LEN;
        ST_LEN:  if (st_ready) st <= ST_DATA;
        ST_DATA: if (st_valid && st_ready) begin
          st_cnt <= st_cnt + 1'b1;
          if (st_cnt == st_len - 1'b1) st <= ST_IDLE;
        end
        default: st <= ST_IDLE;
      endcase
    end
  end

  // The consumer must ask for exactly the producer's burst length.
  a_p2p_len: assert property (@(posedge clk) disable iff (!rst_n)
    (st == ST_WAIT_REQ && p2p_req_valid && !p2p_req_flit.head) |-> p2p_req_flit.data[15:0] == st_len);
  a_rsp_type: assert property (@(posedge clk) disable iff (!rst_n)
    (ld == LD_DATA && rsp_valid && rsp_flit.head) |-> rsp_hdr.msg == MSG_DMA_RD_RSP);
  a_no_cross: assert property (@(posedge clk) disable iff (!rst_n)
    (ld == LD_HEAD && !ld_p2p) |-> owner(ld_addr) == owner(ld_addr + 32'(ld_len) - 1));
endmodule
