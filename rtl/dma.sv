// dma: multi-channel DMA engine with 1D and 2D addressing.
//
// Each of the NCH channels copies a block of 32-bit words from a source to a
// destination over the OBI bus, without the CPU. A 1D transfer moves SIZE_D1
// words; a 2D transfer moves SIZE_D2 rows of SIZE_D1 words each. The address
// of element (i1, i2) is
//     SRC + i1 * SRC_STRIDE_D1 + i2 * SRC_STRIDE_D2     (read)
//     DST + i1 * DST_STRIDE_D1 + i2 * DST_STRIDE_D2     (write)
// with strides in bytes, so the same engine gathers, scatters, transposes or
// re-lays out tensors (for example an im2col transformation).
//
// For accelerators with a streaming interface a channel can be paced by
// external triggers, the DMA part of the accelerator interface: with
// CTRL.RX_TRIG set, each read waits until trig_rx_i[ch] is high (the source
// has data); with CTRL.TX_TRIG set, each write waits until trig_tx_i[ch] is
// high (the destination has room). A slave that is a FIFO window can so be
// read or written at a fixed address (stride 0) without extra bus masters.
//
// Interface: one OBI slave for the registers (channel ch at ch*0x40, the
// register offsets are in xheep_pkg), one OBI read master and one OBI write
// master shared by all channels through round-robin arbiters, and one done
// interrupt per channel (level, high while STATUS.DONE and CTRL.IRQ_EN).
// Timing: each element takes a read (request, response) and then a write
// (request, response); a channel has at most one access in flight, and each
// port carries at most one access at a time. Register accesses are granted
// at once and answered in the next cycle.
//
// The platform gives the multi-channel structure, the 1D/2D addressing and
// the accelerator extension of the DMA; the register map, the word-only
// element size, the stride convention and the trigger protocol are this
// design's choices.
module dma
  import xheep_pkg::*;
#(
  parameter int unsigned NCH = 2
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  // register port
  input  obi_req_t       reg_req_i,
  output obi_rsp_t       reg_rsp_o,
  // bus masters
  output obi_req_t       rd_req_o,
  input  obi_rsp_t       rd_rsp_i,
  output obi_req_t       wr_req_o,
  input  obi_rsp_t       wr_rsp_i,
  // accelerator pacing
  input  logic [NCH-1:0] trig_rx_i,
  input  logic [NCH-1:0] trig_tx_i,
  // interrupts
  output logic [NCH-1:0] done_irq_o
);
  localparam int unsigned CW = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int unsigned IW = $clog2(NCH + 1);

  typedef enum logic [2:0] {CH_IDLE, CH_RD, CH_RD_WAIT, CH_WR, CH_WR_WAIT} ch_state_e;

  typedef struct packed {
    logic [31:0] src, dst, size_d1, size_d2, sstr1, sstr2, dstr1, dstr2;
    logic        dim2, rx_trig, tx_trig, irq_en;
  } ch_cfg_t;

  ch_cfg_t   [NCH-1:0] cfg_q;
  ch_state_e [NCH-1:0] st_q;
  logic [NCH-1:0]      done_q;
  logic [NCH-1:0][31:0] src_row_q, src_cur_q, dst_row_q, dst_cur_q, cnt1_q, cnt2_q, data_q;

  // ---------------------------------------------------------------------------
  // Register port
  // ---------------------------------------------------------------------------
  logic [CW-1:0] r_ch;
  logic [5:0]    r_off;
  logic          reg_we;
  logic          rvalid_q;
  logic [31:0]   rdata_q;
  assign r_ch   = CW'(reg_req_i.addr[6 +: CW]);
  assign r_off  = reg_req_i.addr[5:0];
  assign reg_we = reg_req_i.req & reg_req_i.we & (int'(reg_req_i.addr[6 +: CW]) < NCH);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= reg_req_i.req;
      if (reg_req_i.req && !reg_req_i.we) begin
        unique case (r_off)
          DMA_REG_SRC:     rdata_q <= cfg_q[r_ch].src;
          DMA_REG_DST:     rdata_q <= cfg_q[r_ch].dst;
          DMA_REG_SIZE_D1: rdata_q <= cfg_q[r_ch].size_d1;
          DMA_REG_SIZE_D2: rdata_q <= cfg_q[r_ch].size_d2;
          DMA_REG_SSTR_D1: rdata_q <= cfg_q[r_ch].sstr1;
          DMA_REG_SSTR_D2: rdata_q <= cfg_q[r_ch].sstr2;
          DMA_REG_DSTR_D1: rdata_q <= cfg_q[r_ch].dstr1;
          DMA_REG_DSTR_D2: rdata_q <= cfg_q[r_ch].dstr2;
          DMA_REG_CTRL:    rdata_q <= {27'b0, cfg_q[r_ch].irq_en, cfg_q[r_ch].tx_trig,
                                       cfg_q[r_ch].rx_trig, cfg_q[r_ch].dim2, 1'b0};
          DMA_REG_STATUS:  rdata_q <= {30'b0, done_q[r_ch], st_q[r_ch] != CH_IDLE};
          default:         rdata_q <= '0;
        endcase
      end
    end
  end
  assign reg_rsp_o.gnt    = reg_req_i.req;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;

  // ---------------------------------------------------------------------------
  // Port arbitration
  // ---------------------------------------------------------------------------
  logic [NCH-1:0] rd_want, wr_want, rd_g, wr_g;
  logic [IW-1:0]  rd_w, wr_w;
  logic           rd_v, wr_v;
  logic           rd_busy_q, wr_busy_q;
  logic [CW-1:0]  rd_owner_q, wr_owner_q;

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      rd_want[c] = !rd_busy_q && st_q[c] == CH_RD && (!cfg_q[c].rx_trig || trig_rx_i[c]);
      wr_want[c] = !wr_busy_q && st_q[c] == CH_WR && (!cfg_q[c].tx_trig || trig_tx_i[c]);
    end
  end

  rr_arbiter #(.N(NCH)) u_rd_arb (
    .clk_i, .rst_ni, .req_i(rd_want), .accept_i(rd_rsp_i.gnt), .gnt_o(rd_g), .idx_o(rd_w), .valid_o(rd_v)
  );
  rr_arbiter #(.N(NCH)) u_wr_arb (
    .clk_i, .rst_ni, .req_i(wr_want), .accept_i(wr_rsp_i.gnt), .gnt_o(wr_g), .idx_o(wr_w), .valid_o(wr_v)
  );

  always_comb begin
    rd_req_o       = '0;
    rd_req_o.req   = rd_v;
    rd_req_o.addr  = src_cur_q[rd_w[CW-1:0]];
    rd_req_o.be    = '1;
    wr_req_o       = '0;
    wr_req_o.req   = wr_v;
    wr_req_o.we    = 1'b1;
    wr_req_o.be    = '1;
    wr_req_o.addr  = dst_cur_q[wr_w[CW-1:0]];
    wr_req_o.wdata = data_q[wr_w[CW-1:0]];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_busy_q  <= 1'b0;
      wr_busy_q  <= 1'b0;
      rd_owner_q <= '0;
      wr_owner_q <= '0;
    end else begin
      if (rd_v && rd_rsp_i.gnt) begin
        rd_busy_q  <= 1'b1;
        rd_owner_q <= rd_w[CW-1:0];
      end else if (rd_rsp_i.rvalid) begin
        rd_busy_q  <= 1'b0;
      end
      if (wr_v && wr_rsp_i.gnt) begin
        wr_busy_q  <= 1'b1;
        wr_owner_q <= wr_w[CW-1:0];
      end else if (wr_rsp_i.rvalid) begin
        wr_busy_q  <= 1'b0;
      end
    end
  end

  // ---------------------------------------------------------------------------
  // Channels
  // ---------------------------------------------------------------------------
  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic start, row_end, last;
    assign start   = reg_we && r_ch == CW'(c) && r_off == DMA_REG_CTRL &&
                     reg_req_i.wdata[DMA_CTRL_START] && st_q[c] == CH_IDLE;
    assign row_end = cnt1_q[c] == cfg_q[c].size_d1 - 1;
    assign last    = row_end && (!cfg_q[c].dim2 || cnt2_q[c] == cfg_q[c].size_d2 - 1);

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        cfg_q[c]     <= '0;
        st_q[c]      <= CH_IDLE;
        done_q[c]    <= 1'b0;
        src_row_q[c] <= '0;
        src_cur_q[c] <= '0;
        dst_row_q[c] <= '0;
        dst_cur_q[c] <= '0;
        cnt1_q[c]    <= '0;
        cnt2_q[c]    <= '0;
        data_q[c]    <= '0;
      end else begin
        // configuration writes
        if (reg_we && r_ch == CW'(c)) begin
          unique case (r_off)
            DMA_REG_SRC:     cfg_q[c].src     <= reg_req_i.wdata;
            DMA_REG_DST:     cfg_q[c].dst     <= reg_req_i.wdata;
            DMA_REG_SIZE_D1: cfg_q[c].size_d1 <= reg_req_i.wdata;
            DMA_REG_SIZE_D2: cfg_q[c].size_d2 <= reg_req_i.wdata;
            DMA_REG_SSTR_D1: cfg_q[c].sstr1   <= reg_req_i.wdata;
            DMA_REG_SSTR_D2: cfg_q[c].sstr2   <= reg_req_i.wdata;
            DMA_REG_DSTR_D1: cfg_q[c].dstr1   <= reg_req_i.wdata;
            DMA_REG_DSTR_D2: cfg_q[c].dstr2   <= reg_req_i.wdata;
            DMA_REG_CTRL: begin
              cfg_q[c].dim2    <= reg_req_i.wdata[DMA_CTRL_2D];
              cfg_q[c].rx_trig <= reg_req_i.wdata[DMA_CTRL_RX_TRIG];
              cfg_q[c].tx_trig <= reg_req_i.wdata[DMA_CTRL_TX_TRIG];
              cfg_q[c].irq_en  <= reg_req_i.wdata[DMA_CTRL_IRQ_EN];
            end
            DMA_REG_STATUS:  done_q[c] <= 1'b0;
            default: ;
          endcase
        end

        unique case (st_q[c])
          CH_IDLE: if (start) begin
            src_row_q[c] <= cfg_q[c].src;
            src_cur_q[c] <= cfg_q[c].src;
            dst_row_q[c] <= cfg_q[c].dst;
            dst_cur_q[c] <= cfg_q[c].dst;
            cnt1_q[c]    <= '0;
            cnt2_q[c]    <= '0;
            done_q[c]    <= 1'b0;
            if (cfg_q[c].size_d1 == '0 ||
                (reg_req_i.wdata[DMA_CTRL_2D] && cfg_q[c].size_d2 == '0)) begin
              done_q[c] <= 1'b1;  // empty transfer completes at once
            end else begin
              st_q[c] <= CH_RD;
            end
          end
          CH_RD: if (rd_v && rd_w == IW'(c) && rd_rsp_i.gnt) st_q[c] <= CH_RD_WAIT;
          CH_RD_WAIT: if (rd_rsp_i.rvalid && rd_owner_q == CW'(c)) begin
            data_q[c] <= rd_rsp_i.rdata;
            st_q[c]   <= CH_WR;
          end
          CH_WR: if (wr_v && wr_w == IW'(c) && wr_rsp_i.gnt) st_q[c] <= CH_WR_WAIT;
          CH_WR_WAIT: if (wr_rsp_i.rvalid && wr_owner_q == CW'(c)) begin
            if (last) begin
              st_q[c]   <= CH_IDLE;
              done_q[c] <= 1'b1;
            end else begin
              st_q[c] <= CH_RD;
              if (row_end) begin
                cnt1_q[c]    <= '0;
                cnt2_q[c]    <= cnt2_q[c] + 1;
                src_row_q[c] <= src_row_q[c] + cfg_q[c].sstr2;
                src_cur_q[c] <= src_row_q[c] + cfg_q[c].sstr2;
                dst_row_q[c] <= dst_row_q[c] + cfg_q[c].dstr2;
                dst_cur_q[c] <= dst_row_q[c] + cfg_q[c].dstr2;
              end else begin
                cnt1_q[c]    <= cnt1_q[c] + 1;
                src_cur_q[c] <= src_cur_q[c] + cfg_q[c].sstr1;
                dst_cur_q[c] <= dst_cur_q[c] + cfg_q[c].dstr1;
              end
            end
          end
          default: st_q[c] <= CH_IDLE;
        endcase
      end
    end

    assign done_irq_o[c] = done_q[c] & cfg_q[c].irq_en;
  end
endmodule
