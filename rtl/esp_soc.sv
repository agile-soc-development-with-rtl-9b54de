// esp_soc: a tile-based SoC instance. A ROWS x COLS grid of tiles on the
// six-plane mesh NoC (noc_multiplane); TILE_MAP gives each tile's type
// (element t = y*COLS + x). The default is the 3x3 instance
//     row 0:  MEM  CPU  CPU
//     row 1:  ACC  ACC  ACC
//     row 2:  AUX  ACC  MEM
// with two processor tiles, four accelerator tiles, two memory tiles and one
// auxiliary tile.
//
// What crosses the NoC here: processors configure and start accelerators
// with register packets (plane 5); accelerators move data by DMA to and from
// the memory tile that owns each address (requests on plane 6, data on plane
// 4) or directly from a producer accelerator (P2P); on completion they send an
// interrupt packet to the auxiliary tile (plane 5). Memory is split between
// the memory tiles in slices of 2**PART_BITS words (see esp_dmac).
//
// Parts outside this design appear as ports, indexed by tile number and
// meaningful only for tiles of the matching type: the processor cores'
// I/O request ports (cpu_*), the memory tiles' channels to DRAM (mem_*), and
// the interrupt lines into the auxiliary tile's interrupt controller
// (irq/irq_ack).
//
// From the paper: the tile grid and its default 3x3 arrangement, the tile
// types, the six-plane NoC and the services each tile offers. This design's
// choices: the port bundling, the memory slicing and the interrupt tile being
// the last auxiliary tile of the grid.
//
// Lint: the per-tile ports are full width for every tile, so bits of tiles
// of another type are unused by design. rst_n is used as an asynchronous reset by the flops and as a
// synchronous enable by the assertions' 'disable iff'; a tool that reports
// the reset as both synchronous and asynchronous is seeing the assertions.
module esp_soc
  import esp_pkg::*;
#(
  parameter int unsigned                    ROWS      = 3,
  parameter int unsigned                    COLS      = 3,
  parameter logic [ROWS*COLS-1:0][1:0]      TILE_MAP  = MAP_3X3,
  parameter int unsigned                    PLM_WORDS = 64,
  parameter int unsigned                    PART_BITS = 20,
  parameter int unsigned                    QDEPTH    = 4
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // processor cores (CPU tiles)
  input  logic [ROWS*COLS-1:0]              cpu_req_valid,
  output logic [ROWS*COLS-1:0]              cpu_req_ready,
  input  logic [ROWS*COLS-1:0]              cpu_we,
  input  logic [ROWS*COLS-1:0][31:0]        cpu_addr,
  input  logic [ROWS*COLS-1:0][31:0]        cpu_wdata,
  output logic [ROWS*COLS-1:0]              cpu_rsp_valid,
  output logic [ROWS*COLS-1:0][31:0]        cpu_rdata,
  // DRAM channels (MEM tiles)
  output logic [ROWS*COLS-1:0]              mem_req_valid,
  input  logic [ROWS*COLS-1:0]              mem_req_ready,
  output logic [ROWS*COLS-1:0]              mem_we,
  output logic [ROWS*COLS-1:0][31:0]        mem_addr,
  output logic [ROWS*COLS-1:0][DATA_W-1:0]  mem_wdata,
  input  logic [ROWS*COLS-1:0]              mem_rvalid,
  input  logic [ROWS*COLS-1:0][DATA_W-1:0]  mem_rdata,
  // interrupt controller (AUX tile)
  output logic [ROWS*COLS-1:0]              irq,
  input  logic [ROWS*COLS-1:0]              irq_ack,
  // accelerator activity (ACC tiles)
  output logic [ROWS*COLS-1:0]              acc_busy
);
  localparam int unsigned NT = ROWS * COLS;

  function automatic int unsigned count_type(input tile_t ty);
    int unsigned n = 0;
    for (int t = 0; t < NT; t++) if (TILE_MAP[t] == ty) n++;
    return n;
  endfunction

  // Coordinates of the memory tiles, in tile order.
  function automatic logic [NT-1:0][COORD_W-1:0] mem_coord(input bit want_y);
    logic [NT-1:0][COORD_W-1:0] c = '0;
    int unsigned k = 0;
    for (int t = 0; t < NT; t++)
      if (TILE_MAP[t] == TILE_MEM) begin
        c[k] = want_y ? COORD_W'(t / COLS) : COORD_W'(t % COLS);
        k++;
      end
    return c;
  endfunction

  function automatic int unsigned first_aux();
    for (int t = NT - 1; t >= 0; t--) if (TILE_MAP[t] == TILE_AUX) return t;
    return 0;
  endfunction

  localparam int unsigned NUM_MEM = count_type(TILE_MEM);
  localparam logic [NT-1:0][COORD_W-1:0] MYS = mem_coord(1'b1);
  localparam logic [NT-1:0][COORD_W-1:0] MXS = mem_coord(1'b0);
  localparam int unsigned AUX_T = first_aux();

  // NoC
  logic  [NUM_PLANES-1:0][NT-1:0] n_in_v, n_in_r, n_out_v, n_out_r;
  flit_t [NUM_PLANES-1:0][NT-1:0] n_in_f, n_out_f;

  noc_multiplane #(.ROWS(ROWS), .COLS(COLS), .PLANES(NUM_PLANES), .DEPTH(QDEPTH)) u_noc (
    .clk, .rst_n,
    .loc_in_valid(n_in_v), .loc_in_ready(n_in_r), .loc_in_flit(n_in_f),
    .loc_out_valid(n_out_v), .loc_out_ready(n_out_r), .loc_out_flit(n_out_f));

  for (genvar t = 0; t < NT; t++) begin : g_tile
    localparam logic [COORD_W-1:0] TY = COORD_W'(t / COLS);
    localparam logic [COORD_W-1:0] TX = COORD_W'(t % COLS);

    // per-tile views of the NoC ports, plane-major
    logic  [NUM_PLANES-1:0] t_out_v, t_out_r, t_in_v, t_in_r;
    flit_t [NUM_PLANES-1:0] t_out_f, t_in_f;
    for (genvar p = 0; p < NUM_PLANES; p++) begin : g_p
      assign n_in_v[p][t]  = t_out_v[p];
      assign n_in_f[p][t]  = t_out_f[p];
      assign t_out_r[p]    = n_in_r[p][t];
      assign t_in_v[p]     = n_out_v[p][t];
      assign t_in_f[p]     = n_out_f[p][t];
      assign n_out_r[p][t] = t_in_r[p];
    end

    if (TILE_MAP[t] == TILE_ACC) begin : g_acc
      acc_tile #(.TILE_Y(TY), .TILE_X(TX),
                 .IRQ_Y(COORD_W'(AUX_T / COLS)), .IRQ_X(COORD_W'(AUX_T % COLS)),
                 .NUM_MEM(NUM_MEM), .MEM_Y(MYS[NUM_MEM-1:0]), .MEM_X(MXS[NUM_MEM-1:0]),
                 .PART_BITS(PART_BITS), .PLM_WORDS(PLM_WORDS), .QDEPTH(QDEPTH)) u_tile (
        .clk, .rst_n,
        .noc_out_valid(t_out_v), .noc_out_ready(t_out_r), .noc_out_flit(t_out_f),
        .noc_in_valid(t_in_v), .noc_in_ready(t_in_r), .noc_in_flit(t_in_f),
        .acc_busy(acc_busy[t]));
    end else begin : g_nacc
      assign acc_busy[t] = 1'b0;
    end

    if (TILE_MAP[t] == TILE_MEM) begin : g_mem
      mem_tile #(.TILE_Y(TY), .TILE_X(TX), .QDEPTH(QDEPTH)) u_tile (
        .clk, .rst_n,
        .noc_out_valid(t_out_v), .noc_out_ready(t_out_r), .noc_out_flit(t_out_f),
        .noc_in_valid(t_in_v), .noc_in_ready(t_in_r), .noc_in_flit(t_in_f),
        .mem_req_valid(mem_req_valid[t]), .mem_req_ready(mem_req_ready[t]), .mem_we(mem_we[t]),
        .mem_addr(mem_addr[t]), .mem_wdata(mem_wdata[t]), .mem_rvalid(mem_rvalid[t]), .mem_rdata(mem_rdata[t]));
    end else begin : g_nmem
      assign mem_req_valid[t] = 1'b0;
      assign mem_we[t]        = 1'b0;
      assign mem_addr[t]      = '0;
      assign mem_wdata[t]     = '0;
    end

    if (TILE_MAP[t] == TILE_CPU) begin : g_cpu
      cpu_tile #(.TILE_Y(TY), .TILE_X(TX), .COLS(COLS), .QDEPTH(QDEPTH)) u_tile (
        .clk, .rst_n,
        .noc_out_valid(t_out_v), .noc_out_ready(t_out_r), .noc_out_flit(t_out_f),
        .noc_in_valid(t_in_v), .noc_in_ready(t_in_r), .noc_in_flit(t_in_f),
        .cpu_req_valid(cpu_req_valid[t]), .cpu_req_ready(cpu_req_ready[t]), .cpu_we(cpu_we[t]),
        .cpu_addr(cpu_addr[t]), .cpu_wdata(cpu_wdata[t]), .cpu_rsp_valid(cpu_rsp_valid[t]), .cpu_rdata(cpu_rdata[t]));
    end else begin : g_ncpu
      assign cpu_req_ready[t] = 1'b0;
      assign cpu_rsp_valid[t] = 1'b0;
      assign cpu_rdata[t]     = '0;
    end

    if (TILE_MAP[t] == TILE_AUX) begin : g_aux
      logic [NT-1:0] irq_t;
      aux_tile #(.ROWS(ROWS), .COLS(COLS), .QDEPTH(QDEPTH)) u_tile (
        .clk, .rst_n,
        .noc_out_valid(t_out_v), .noc_out_ready(t_out_r), .noc_out_flit(t_out_f),
        .noc_in_valid(t_in_v), .noc_in_ready(t_in_r), .noc_in_flit(t_in_f),
        .irq(irq_t), .irq_ack(irq_ack));
      if (t == AUX_T) begin : g_irq
        assign irq = irq_t;
      end
    end
  end

  if (count_type(TILE_AUX) == 0) begin : g_noaux
    assign irq = '0;
  end
endmodule
