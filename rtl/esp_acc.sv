// esp_acc: a loosely-coupled accelerator with the standard accelerator
// interface: conf_info, load_ctrl, load_chnl, store_ctrl, store_chnl and
// acc_done. It processes a data set of nchunk chunks of len words each.
//
// Execution has the four phases configure, load, compute and store. After
// configuration, three concurrent processes share a ping-pong private local
// memory (two input banks, two output banks):
//   load    - for chunk c, waits for input bank c%2 to be free, sends
//             load_ctrl {index = c*len, length = len} and writes the len words
//             arriving on load_chnl into the bank;
//   compute - for chunk c, waits for input bank c%2 to be full and output bank
//             c%2 to be free, then computes one word per cycle into the output
//             bank and frees the input bank;
//   store   - for chunk c, waits for output bank c%2 to be full, sends
//             store_ctrl {index = out_offset + c*len, length = len} and streams
//             the bank out on store_chnl, then frees it.
// Loading chunk c+1 thus overlaps computing chunk c, and loads overlap stores.
// When the last chunk has been stored, acc_done pulses for one cycle.
//
// All channels are latency-insensitive valid/ready. The computation,
// out[i] = in[i] + addend, stands in for the application-specific kernel that
// an accelerator designer would supply; everything else (interface, phases,
// ping-pong PLM, overlap) follows the paper. Field layout of conf_info, the
// PLM size and the chunk indexing are this design's choices.
module esp_acc
  import esp_pkg::*;
#(
  parameter int unsigned PLM_WORDS = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration: conf_valid starts an invocation with conf
  input  logic              conf_valid,
  input  conf_t             conf,
  // load
  output logic              load_ctrl_valid,
  input  logic              load_ctrl_ready,
  output dma_ctrl_t         load_ctrl,
  input  logic              load_chnl_valid,
  output logic              load_chnl_ready,
  input  logic [DATA_W-1:0] load_chnl_data,
  // store
  output logic              store_ctrl_valid,
  input  logic              store_ctrl_ready,
  output dma_ctrl_t         store_ctrl,
  output logic              store_chnl_valid,
  input  logic              store_chnl_ready,
  output logic [DATA_W-1:0] store_chnl_data,
  // completion
  output logic              acc_done,
  output logic              busy
);
  localparam int unsigned AW = (PLM_WORDS > 1) ? $clog2(PLM_WORDS) : 1;

  conf_t cfg;

  // bank state
  logic [1:0] in_full, out_full;
  logic [1:0] in_set, in_clr, out_set, out_clr;

  // PLM
  logic [1:0]            in_we, out_we;
  logic [AW-1:0]         in_waddr, in_raddr, out_waddr, out_raddr;
  logic [DATA_W-1:0]     in_wdata, out_wdata;
  logic [1:0][DATA_W-1:0] in_rdata, out_rdata;

  for (genvar b = 0; b < 2; b++) begin : g_plm
    plm_bank #(.W(DATA_W), .DEPTH(PLM_WORDS)) u_in (
      .clk, .we(in_we[b]), .waddr(in_waddr), .wdata(in_wdata), .raddr(in_raddr), .rdata(in_rdata[b]));
    plm_bank #(.W(DATA_W), .DEPTH(PLM_WORDS)) u_out (
      .clk, .we(out_we[b]), .waddr(out_waddr), .wdata(out_wdata), .raddr(out_raddr), .rdata(out_rdata[b]));
  end

  // ---------------- load process ----------------
  typedef enum logic [1:0] {L_IDLE, L_CTRL, L_DATA} lstate_t;
  lstate_t       ls;
  logic [15:0]   lchunk;
  logic [AW-1:0] lptr;
  wire           lb = lchunk[0];

  assign load_ctrl_valid = (ls == L_CTRL) && !in_full[lb];
  assign load_ctrl       = '{index: 32'(lchunk) * 32'(cfg.len), length: cfg.len};
  assign load_chnl_ready = (ls == L_DATA);
  assign in_waddr        = lptr;
  assign in_wdata        = load_chnl_data;
  always_comb begin
    in_we  = '0;
    in_set = '0;
    if (load_chnl_valid && load_chnl_ready) begin
      in_we[lb] = 1'b1;
      if (32'(lptr) == 32'(cfg.len) - 1) in_set[lb] = 1'b1;
    end
  end

  // ---------------- compute process ----------------
  typedef enum logic [1:0] {C_IDLE, C_WAIT, C_RUN} cstate_t;
  cstate_t       cs;
  logic [15:0]   cchunk;
  logic [AW:0]   crd;        // next word to read
  logic          cwv;        // a read issued last cycle: write it now
  logic [AW-1:0] cwa;
  wire           cb = cchunk[0];

  assign in_raddr  = crd[AW-1:0];
  assign out_waddr = cwa;
  assign out_wdata = in_rdata[cb] + cfg.addend;
  always_comb begin
    out_we  = '0;
    out_set = '0;
    in_clr  = '0;
    if (cwv) begin
      out_we[cb] = 1'b1;
      if (32'(cwa) == 32'(cfg.len) - 1) begin
        out_set[cb] = 1'b1;
        in_clr[cb]  = 1'b1;
      end
    end
  end

  // ---------------- store process ----------------
  typedef enum logic [1:0] {S_IDLE, S_CTRL, S_PRIME, S_DATA} sstate_t;
  sstate_t       ss;
  logic [15:0]   schunk;
  logic [AW-1:0] sptr;
  wire           sb    = schunk[0];
  wire           sfire = store_chnl_valid && store_chnl_ready;

  assign store_ctrl_valid = (ss == S_CTRL) && out_full[sb];
  assign store_ctrl       = '{index: cfg.out_offset + 32'(schunk) * 32'(cfg.len), length: cfg.len};
  assign store_chnl_valid = (ss == S_DATA);
  assign store_chnl_data  = out_rdata[sb];
  assign out_raddr        = (ss == S_DATA && sfire) ? sptr + 1'b1 : sptr;
  always_comb begin
    out_clr = '0;
    if (sfire && 32'(sptr) == 32'(cfg.len) - 1) out_clr[sb] = 1'b1;
  end

  assign busy = (ls != L_IDLE) || (cs != C_IDLE) || (ss != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg      <= '0;
      in_full  <= '0;
      out_full <= '0;
      ls <= L_IDLE; lchunk <= '0; lptr <= '0;
      cs <= C_IDLE; cchunk <= '0; crd <= '0; cwv <= 1'b0; cwa <= '0;
      ss <= S_IDLE; schunk <= '0; sptr <= '0;
      acc_done <= 1'b0;
    end else begin
      in_full  <= (in_full | in_set) & ~in_clr;
      out_full <= (out_full | out_set) & ~out_clr;
      acc_done <= 1'b0;

      // configure
      if (conf_valid && !busy) begin
        cfg <= conf;
        if (conf.nchunk == '0) begin
          acc_done <= 1'b1;
        end else begin
          ls <= L_CTRL; lchunk <= '0; lptr <= '0;
          cs <= C_WAIT; cchunk <= '0;
          ss <= S_CTRL; schunk <= '0;
        end
      end

      // load
      case (ls)
        L_CTRL: if (load_ctrl_valid && load_ctrl_ready) begin ls <= L_DATA; lptr <= '0; end
        L_DATA: if (load_chnl_valid) begin
          lptr <= lptr + 1'b1;
          if (32'(lptr) == 32'(cfg.len) - 1) begin
            lchunk <= lchunk + 1'b1;
            ls     <= (lchunk + 1'b1 == cfg.nchunk) ? L_IDLE : L_CTRL;
          end
        end
        default: ;
      endcase

      // compute
      cwv <= 1'b0;
      case (cs)
        C_WAIT: if (in_full[cb] && !out_full[cb]) begin cs <= C_RUN; crd <= '0; end
        C_RUN: begin
          if (32'(crd) < 32'(cfg.len)) begin
            cwv <= 1'b1;
            cwa <= crd[AW-1:0];
            crd <= crd + 1'b1;
          end
          if (cwv && 32'(cwa) == 32'(cfg.len) - 1) begin
            cwv    <= 1'b0;
            cchunk <= cchunk + 1'b1;
            cs     <= (cchunk + 1'b1 == cfg.nchunk) ? C_IDLE : C_WAIT;
          end
        end
        default: ;
      endcase

      // store
      case (ss)
        S_CTRL:  if (store_ctrl_valid && store_ctrl_ready) begin ss <= S_PRIME; sptr <= '0; end
        S_PRIME: ss <= S_DATA;
        S_DATA:  if (sfire) begin
          sptr <= sptr + 1'b1;
          if (32'(sptr) == 32'(cfg.len) - 1) begin
            schunk <= schunk + 1'b1;
            if (schunk + 1'b1 == cfg.nchunk) begin
              ss       <= S_IDLE;
              acc_done <= 1'b1;
            end else begin
              ss <= S_CTRL;
            end
          end
        end
        default: ;
      endcase
    end
  end

  a_len_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (conf_valid && !busy) |-> (32'(conf.len) <= 32'(PLM_WORDS) && conf.len != '0));
  a_ctrl_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (load_ctrl_valid && !load_ctrl_ready) |=> load_ctrl_valid);
endmodule
