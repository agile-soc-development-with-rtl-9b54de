// mem_dma_proxy: the non-coherent DMA service of a memory tile. It takes DMA
// packets arriving on plane 6 and executes them on the tile's memory port
// (the channel to external DRAM):
//   [head MSG_DMA_WR_REQ][addr][len][data]...[data, tail]  -> len writes
//   [head MSG_DMA_RD_REQ][addr][len, tail]                 -> len reads, answered
//   on plane 4 with [head MSG_DMA_RD_RSP][data]...[data, tail] to the sender.
// Reads are pipelined: a new read is issued each cycle as long as the response
// queue (RSP_DEPTH flits) has room for every read in flight, so the memory's
// read latency is hidden and DRAM stalls (mem_req_ready low, late
// mem_rvalid) only slow the burst down. Read data must come back in order.
// Packets are served one at a time, in arrival order.
// The service and its planes follow the paper; the packet layouts and the
// memory port (valid/ready request, in-order read data) are this design's.
module mem_dma_proxy
  import esp_pkg::*;
#(
  parameter logic [COORD_W-1:0] TILE_Y    = '0,
  parameter logic [COORD_W-1:0] TILE_X    = '0,
  parameter int unsigned        RSP_DEPTH = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                req_valid,   // plane 6, NoC -> tile
  output logic                req_ready,
  input  flit_t               req_flit,
  output logic                rsp_valid,   // plane 4, tile -> NoC
  input  logic                rsp_ready,
  output flit_t               rsp_flit,
  // memory port
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output logic                mem_we,
  output logic [31:0]         mem_addr,
  output logic [DATA_W-1:0]   mem_wdata,
  input  logic                mem_rvalid,
  input  logic [DATA_W-1:0]   mem_rdata
);
  localparam int unsigned CW = $clog2(RSP_DEPTH + 1);

  typedef enum logic [2:0] {P_IDLE, P_ADDR, P_LEN, P_RD_HEAD, P_RD, P_WR} pst_t;
  pst_t               ps;
  logic               is_rd;
  logic [COORD_W-1:0] sy, sx;
  logic [31:0]        addr;
  logic [15:0]        len, issued, returned;
  logic [CW-1:0]      credits;
  header_t            hdr;

  // response queue
  logic  q_in_valid, q_in_ready, q_pop;
  flit_t q_in;
  noc_queue #(.W(FLIT_W), .DEPTH(RSP_DEPTH)) u_rspq (
    .clk, .rst_n,
    .in_valid(q_in_valid), .in_ready(q_in_ready), .in_data(q_in),
    .out_valid(rsp_valid), .out_ready(rsp_ready), .out_data(rsp_flit));
  assign q_pop = rsp_valid && rsp_ready;

  assign hdr = header_t'(req_flit.data);

  wire rd_issue  = (ps == P_RD) && (issued != len) && (credits != '0) && mem_req_ready;
  wire head_push = (ps == P_RD_HEAD) && (credits != '0);

  always_comb begin
    req_ready     = 1'b0;
    mem_req_valid = 1'b0;
    mem_we        = 1'b0;
    mem_addr      = addr + 32'(issued);
    mem_wdata     = req_flit.data;
    q_in_valid    = 1'b0;
    q_in          = mk_body(mem_rdata, returned == len - 1'b1);
    case (ps)
      P_IDLE, P_ADDR, P_LEN: req_ready = 1'b1;
      P_RD_HEAD: begin
        q_in_valid = (credits != '0);
        q_in       = mk_head(TILE_Y, TILE_X, sy, sx, MSG_DMA_RD_RSP, 1'b0);
      end
      P_RD: begin
        mem_req_valid = (issued != len) && (credits != '0);
        q_in_valid    = mem_rvalid;
      end
      P_WR: begin
        mem_req_valid = req_valid;
        mem_we        = 1'b1;
        req_ready     = mem_req_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ps <= P_IDLE; is_rd <= 1'b0; sy <= '0; sx <= '0; addr <= '0; len <= '0;
      issued <= '0; returned <= '0; credits <= CW'(RSP_DEPTH);
    end else begin
      // credits: response-queue slots not yet taken or promised to a read in flight
      credits <= credits - CW'(rd_issue) - CW'(head_push) + CW'(q_pop);
      case (ps)
        P_IDLE: if (req_valid && req_flit.head) begin
          is_rd <= (hdr.msg == MSG_DMA_RD_REQ);
          sy    <= hdr.src_y;
          sx    <= hdr.src_x;
          ps    <= P_ADDR;
        end
        P_ADDR: if (req_valid) begin addr <= req_flit.data; ps <= P_LEN; end
        P_LEN:  if (req_valid) begin
          len      <= req_flit.data[15:0];
          issued   <= '0;
          returned <= '0;
          ps       <= is_rd ? P_RD_HEAD : P_WR;
        end
        P_RD_HEAD: if (head_push) ps <= P_RD;
        P_RD: begin
          if (rd_issue) issued <= issued + 1'b1;
          if (mem_rvalid) begin
            returned <= returned + 1'b1;
            if (returned == len - 1'b1) ps <= P_IDLE;
          end
        end
        P_WR: if (req_valid && mem_req_ready) begin
          issued <= issued + 1'b1;
          if (req_flit.tail) ps <= P_IDLE;
        end
        default: ps <= P_IDLE;
      endcase
    end
  end

  a_rsp_room: assert property (@(posedge clk) disable iff (!rst_n) (ps == P_RD && mem_rvalid) |-> q_in_ready);
  a_known: assert property (@(posedge clk) disable iff (!rst_n)
    (ps == P_IDLE && req_valid) |-> (req_flit.head && (hdr.msg == MSG_DMA_RD_REQ || hdr.msg == MSG_DMA_WR_REQ)));
endmodule
