// hybrid_iommu: software-managed IOMMU between the accelerator and the host memory.
//
// Every AXI read or write address (AR/AW) of the accelerator is translated from a
// virtual to a physical page. The first-level TLB (32 entries, fully associative) is
// looked up combinationally in the cycle the address arrives; a hit that is not a
// prefetch is forwarded downstream in that same cycle (if downstream is not ready,
// the translated request is registered and held until it is taken). On an L1 miss the address is
// taken in and the set-associative L2 TLB (256 entries, up to 6 cycles) is searched.
// Then one of three things happens:
//   * hit, normal access: the transaction is forwarded with the physical address;
//   * hit, prefetch (AXI user bit = 1): the IOMMU answers OKAY itself (read data is
//     0 and meaningless, write data is swallowed) and nothing goes downstream;
//   * miss (prefetch or not): the IOMMU answers SLVERR and drops the transaction.
// The IOMMU never walks page tables and keeps no miss queue: masters see the error
// response and software threads on the accelerator handle the miss and write the
// TLBs through the configuration port (cfg_addr_i: bit 9 selects the L2 TLB, bits 8:1
// the entry, bit 0 the word; see rab_l1_tlb for the word layout).
//
// AR and AW share one translator, served round robin, one transaction at a time.
// W beats are routed (forwarded or dropped) in AW order through a small queue of
// routing decisions. A locally generated response is only sent once every forwarded
// transaction of the same direction has answered, so responses never overtake each
// other. Translation through the TLBs, the drop-and-error policy and the prefetch
// semantics follow the paper; the shared translator, the ordering rule and the
// SLVERR code are this design's choices.
// Lint note: the L2 TLB's req_ready output is left unconnected on purpose; the
// translator only requests a search from T_IDLE, when the L2 TLB is always idle.
// Lint note: rst_ni is reported as both synchronous and asynchronous. The flops use it
// asynchronously; the other use is the 'disable iff' of the simulation assertions.
module hybrid_iommu
  import svm_pkg::*;
#(
  parameter int unsigned L1_ENTRIES = 32,
  parameter int unsigned L2_SETS    = 32,
  parameter int unsigned L2_WAYS    = 8,
  parameter int unsigned WQ_DEPTH   = 8
) (
  input  logic clk_i,
  input  logic rst_ni,
  // slave side (from the accelerator)
  input  logic s_ar_valid_i, output logic s_ar_ready_o, input  ax_t s_ar_i,
  input  logic s_aw_valid_i, output logic s_aw_ready_o, input  ax_t s_aw_i,
  input  logic s_w_valid_i,  output logic s_w_ready_o,  input  w_t  s_w_i,
  output logic s_r_valid_o,  input  logic s_r_ready_i,  output r_t  s_r_o,
  output logic s_b_valid_o,  input  logic s_b_ready_i,  output b_t  s_b_o,
  // master side (towards host memory)
  output logic m_ar_valid_o, input  logic m_ar_ready_i, output ax_t m_ar_o,
  output logic m_aw_valid_o, input  logic m_aw_ready_i, output ax_t m_aw_o,
  output logic m_w_valid_o,  input  logic m_w_ready_i,  output w_t  m_w_o,
  input  logic m_r_valid_i,  output logic m_r_ready_o,  input  r_t  m_r_i,
  input  logic m_b_valid_i,  output logic m_b_ready_o,  input  b_t  m_b_i,
  // TLB configuration
  input  logic        cfg_we_i,
  input  logic [9:0]  cfg_addr_i,
  input  logic [31:0] cfg_wdata_i
);

  localparam int unsigned L1_IW = $clog2(L1_ENTRIES);
  localparam int unsigned L2_IW = $clog2(L2_SETS * L2_WAYS);

  // ---------------------------------------------------------------- TLBs
  pn_t  l1_vpn, l1_ppn, l2_ppn;
  logic l1_hit, l2_req, l2_ready, l2_resp_valid, l2_hit;
  ax_t  cur_q;

  rab_l1_tlb #(.N_ENTRIES(L1_ENTRIES)) i_l1 (
    .clk_i, .rst_ni,
    .lookup_vpn_i (l1_vpn),
    .hit_o        (l1_hit),
    .ppn_o        (l1_ppn),
    .cfg_we_i     (cfg_we_i && !cfg_addr_i[9]),
    .cfg_idx_i    (cfg_addr_i[L1_IW:1]),
    .cfg_word_i   (cfg_addr_i[0]),
    .cfg_wdata_i
  );

  rab_l2_tlb #(.N_SETS(L2_SETS), .N_WAYS(L2_WAYS)) i_l2 (
    .clk_i, .rst_ni,
    .req_valid_i  (l2_req),
    .req_ready_o  (l2_ready),
    .req_vpn_i    (l1_vpn),
    .resp_valid_o (l2_resp_valid),
    .resp_hit_o   (l2_hit),
    .resp_ppn_o   (l2_ppn),
    .cfg_we_i     (cfg_we_i && cfg_addr_i[9]),
    .cfg_idx_i    (cfg_addr_i[L2_IW:1]),
    .cfg_word_i   (cfg_addr_i[0]),
    .cfg_wdata_i
  );

  // ---------------------------------------------------------------- W routing queue
  // One entry per accepted write: 1 = forward its W beats, 0 = drop them.
  logic [WQ_DEPTH-1:0] wq_fwd_q;
  logic [$clog2(WQ_DEPTH)-1:0] wq_rd_q, wq_wr_q;
  localparam int unsigned WQ_CW = $clog2(WQ_DEPTH) + 1;
  logic [WQ_CW-1:0]   wq_cnt_q;
  logic wq_push, wq_push_fwd, wq_pop, wq_full, wq_empty;
  assign wq_full  = (wq_cnt_q == WQ_CW'(WQ_DEPTH));
  assign wq_empty = (wq_cnt_q == 0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wq_rd_q  <= '0;
      wq_wr_q  <= '0;
      wq_cnt_q <= '0;
      wq_fwd_q <= '0;
    end else begin
      if (wq_push) begin
        wq_fwd_q[wq_wr_q] <= wq_push_fwd;
        wq_wr_q <= wq_wr_q + 1'b1;
      end
      if (wq_pop) wq_rd_q <= wq_rd_q + 1'b1;
      wq_cnt_q <= wq_cnt_q + WQ_CW'(wq_push) - WQ_CW'(wq_pop);
    end
  end

  always_comb begin
    m_w_o       = s_w_i;
    m_w_valid_o = s_w_valid_i && !wq_empty && wq_fwd_q[wq_rd_q];
    s_w_ready_o = !wq_empty && (wq_fwd_q[wq_rd_q] ? m_w_ready_i : 1'b1);
    wq_pop      = s_w_valid_i && s_w_ready_o && s_w_i.last;
  end

  // ---------------------------------------------------------------- translator
  typedef enum logic [1:0] {T_IDLE, T_L2WAIT, T_FWD, T_LOCAL} tstate_e;
  tstate_e state_q, state_d;
  logic    cur_wr_q, cur_wr_d;
  ax_t     cur_d;
  logic    local_ok_q, local_ok_d;
  logic    prio_wr_q, prio_wr_d;
  logic [7:0] beat_q, beat_d;
  logic [7:0] rd_out_q, wr_out_q;

  logic sel_wr, sel_valid;
  ax_t  sel_ax;
  always_comb begin
    sel_wr    = s_aw_valid_i && !wq_full && (!s_ar_valid_i || prio_wr_q);
    sel_valid = s_ar_valid_i || (s_aw_valid_i && !wq_full);
    sel_ax    = sel_wr ? s_aw_i : s_ar_i;
  end

  assign l1_vpn = (state_q == T_IDLE) ? sel_ax.addr[ADDR_W-1:PAGE_W] : cur_q.addr[ADDR_W-1:PAGE_W];

  ax_t fwd_ax;
  always_comb begin
    fwd_ax = cur_q;
    if (state_q == T_IDLE) fwd_ax = sel_ax;
    fwd_ax.addr[ADDR_W-1:PAGE_W] = (state_q == T_IDLE) ? l1_ppn : cur_q.addr[ADDR_W-1:PAGE_W];
  end

  logic m_ax_valid, m_ax_ready, s_ax_accept, local_rd_active, local_wr_active;

  always_comb begin
    state_d     = state_q;
    cur_d       = cur_q;
    cur_wr_d    = cur_wr_q;
    local_ok_d  = local_ok_q;
    prio_wr_d   = prio_wr_q;
    beat_d      = beat_q;
    m_ax_valid  = 1'b0;
    s_ax_accept = 1'b0;
    l2_req      = 1'b0;
    wq_push     = 1'b0;
    wq_push_fwd = 1'b0;
    m_ax_ready  = cur_wr_q ? m_aw_ready_i : m_ar_ready_i;
    local_rd_active = (state_q == T_LOCAL) && !cur_wr_q && (rd_out_q == 0);
    local_wr_active = (state_q == T_LOCAL) &&  cur_wr_q && (wr_out_q == 0) && wq_empty;

    unique case (state_q)
      T_IDLE: if (sel_valid) begin
        m_ax_ready = sel_wr ? m_aw_ready_i : m_ar_ready_i;
        if (l1_hit && !sel_ax.user) begin
          // single-cycle translation
          // (when not accepted, the translated request is taken in and held
          // in T_FWD so the downstream request stays stable)
          m_ax_valid  = 1'b1;
          s_ax_accept = 1'b1;
          prio_wr_d   = !sel_wr;
          if (m_ax_ready) begin
            wq_push     = sel_wr;
            wq_push_fwd = 1'b1;
          end else begin
            cur_d       = fwd_ax;
            cur_wr_d    = sel_wr;
            state_d     = T_FWD;
          end
        end else begin
          s_ax_accept = 1'b1;
          prio_wr_d   = !sel_wr;
          cur_d       = sel_ax;
          cur_wr_d    = sel_wr;
          beat_d      = '0;
          if (l1_hit) begin          // prefetch hit: answer directly
            local_ok_d  = 1'b1;
            wq_push     = sel_wr;
            state_d     = T_LOCAL;
          end else begin             // search the L2 TLB
            l2_req      = 1'b1;
            state_d     = T_L2WAIT;
          end
        end
      end
      T_L2WAIT: if (l2_resp_valid) begin
        cur_d.addr[ADDR_W-1:PAGE_W] = l2_ppn;
        if (l2_hit && !cur_q.user) begin
          state_d = T_FWD;
        end else begin
          local_ok_d = l2_hit;
          wq_push    = cur_wr_q;
          state_d    = T_LOCAL;
        end
      end
      T_FWD: begin
        m_ax_valid = 1'b1;
        if (m_ax_ready) begin
          wq_push     = cur_wr_q;
          wq_push_fwd = 1'b1;
          state_d     = T_IDLE;
        end
      end
      T_LOCAL: begin
        if (local_rd_active && s_r_ready_i) begin
          beat_d = beat_q + 1'b1;
          if (beat_q == cur_q.len) state_d = T_IDLE;
        end
        if (local_wr_active && s_b_ready_i) state_d = T_IDLE;
      end
      default: state_d = T_IDLE;
    endcase
  end

  logic cur_is_wr;
  assign cur_is_wr = (state_q == T_IDLE) ? sel_wr : cur_wr_q;

  always_comb begin
    s_ar_ready_o = s_ax_accept && !sel_wr;
    s_aw_ready_o = s_ax_accept &&  sel_wr;
    m_ar_valid_o = m_ax_valid && !cur_is_wr;
    m_aw_valid_o = m_ax_valid &&  cur_is_wr;
    m_ar_o       = fwd_ax;
    m_aw_o       = fwd_ax;
  end

  // ---------------------------------------------------------------- responses
  always_comb begin
    if (local_rd_active) begin
      s_r_valid_o  = 1'b1;
      s_r_o.id     = cur_q.id;
      s_r_o.data   = '0;
      s_r_o.resp   = local_ok_q ? RESP_OKAY : RESP_SLVERR;
      s_r_o.last   = (beat_q == cur_q.len);
      m_r_ready_o  = 1'b0;
    end else begin
      s_r_valid_o  = m_r_valid_i;
      s_r_o        = m_r_i;
      m_r_ready_o  = s_r_ready_i;
    end
    if (local_wr_active) begin
      s_b_valid_o  = 1'b1;
      s_b_o.id     = cur_q.id;
      s_b_o.resp   = local_ok_q ? RESP_OKAY : RESP_SLVERR;
      m_b_ready_o  = 1'b0;
    end else begin
      s_b_valid_o  = m_b_valid_i;
      s_b_o        = m_b_i;
      m_b_ready_o  = s_b_ready_i;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= T_IDLE;
      cur_q      <= '0;
      cur_wr_q   <= 1'b0;
      local_ok_q <= 1'b0;
      prio_wr_q  <= 1'b0;
      beat_q     <= '0;
      rd_out_q   <= '0;
      wr_out_q   <= '0;
    end else begin
      state_q    <= state_d;
      cur_q      <= cur_d;
      cur_wr_q   <= cur_wr_d;
      local_ok_q <= local_ok_d;
      prio_wr_q  <= prio_wr_d;
      beat_q     <= beat_d;
      rd_out_q   <= rd_out_q + ((m_ar_valid_o && m_ar_ready_i) ? 8'd1 : 8'd0)
                             - ((m_r_valid_i && m_r_ready_o && m_r_i.last) ? 8'd1 : 8'd0);
      wr_out_q   <= wr_out_q + ((m_aw_valid_o && m_aw_ready_i) ? 8'd1 : 8'd0)
                             - ((m_b_valid_i && m_b_ready_o) ? 8'd1 : 8'd0);
    end
  end

  // AXI rule: a valid address must stay stable until accepted.
  a_ar_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    m_ar_valid_o && !m_ar_ready_i |=> m_ar_valid_o && $stable(m_ar_o));
  a_aw_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    m_aw_valid_o && !m_aw_ready_i |=> m_aw_valid_o && $stable(m_aw_o));

endmodule
