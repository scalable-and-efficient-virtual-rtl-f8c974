// axi_mux2: two AXI masters onto one AXI slave port.
//
// A minimal stand-in for the accelerator's main network in front of the IOMMU: it
// merges the cluster's DMA engine (port 0) and the cluster's core port, through which
// PEs issue loads, stores and TLB prefetches (port 1). Address channels are granted
// round robin; the granted master index is written into the top bit of the AXI ID
// (masters must keep it 0) and read and write responses are routed back by that bit.
// W beats follow the order of granted writes, kept in a small queue. All paths are
// combinational except the grant pointers and the queue. The network itself is not
// specified by the paper; this block is this design's own.
// The top ID bit of the responses on both slave ports is constant 0 by design (it is
// the routing bit, cleared on the way back); the other outputs are mostly wires.
module axi_mux2
  import svm_pkg::*;
#(
  parameter int unsigned WQ_DEPTH = 8
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic s_ar_valid_i [2], output logic s_ar_ready_o [2], input  ax_t s_ar_i [2],
  input  logic s_aw_valid_i [2], output logic s_aw_ready_o [2], input  ax_t s_aw_i [2],
  input  logic s_w_valid_i  [2], output logic s_w_ready_o  [2], input  w_t  s_w_i  [2],
  output logic s_r_valid_o  [2], input  logic s_r_ready_i  [2], output r_t  s_r_o  [2],
  output logic s_b_valid_o  [2], input  logic s_b_ready_i  [2], output b_t  s_b_o  [2],
  output logic m_ar_valid_o, input  logic m_ar_ready_i, output ax_t m_ar_o,
  output logic m_aw_valid_o, input  logic m_aw_ready_i, output ax_t m_aw_o,
  output logic m_w_valid_o,  input  logic m_w_ready_i,  output w_t  m_w_o,
  input  logic m_r_valid_i,  output logic m_r_ready_o,  input  r_t  m_r_i,
  input  logic m_b_valid_i,  output logic m_b_ready_o,  input  b_t  m_b_i
);

  logic ar_prio_q, aw_prio_q;   // port that wins when both request
  logic ar_sel, aw_sel;

  // W order queue
  logic [WQ_DEPTH-1:0]         wq_port_q;
  logic [$clog2(WQ_DEPTH)-1:0] wq_rd_q, wq_wr_q;
  localparam int unsigned WQ_CW = $clog2(WQ_DEPTH) + 1;
  logic [WQ_CW-1:0]   wq_cnt_q;
  logic wq_full, wq_empty, wq_push, wq_pop, wport;
  assign wq_full  = (wq_cnt_q == WQ_CW'(WQ_DEPTH));
  assign wq_empty = (wq_cnt_q == '0);
  assign wport    = wq_port_q[wq_rd_q];

  always_comb begin
    ar_sel = s_ar_valid_i[1] && (!s_ar_valid_i[0] || ar_prio_q);
    aw_sel = s_aw_valid_i[1] && (!s_aw_valid_i[0] || aw_prio_q);

    m_ar_valid_o = s_ar_valid_i[ar_sel];
    m_ar_o       = s_ar_i[ar_sel];
    m_ar_o.id[ID_W-1] = ar_sel;
    m_aw_valid_o = s_aw_valid_i[aw_sel] && !wq_full;
    m_aw_o       = s_aw_i[aw_sel];
    m_aw_o.id[ID_W-1] = aw_sel;
    m_w_valid_o = !wq_empty && s_w_valid_i[wport];
    m_w_o       = s_w_i[wport];
  end

  // ready paths, kept apart from the request paths above
  always_comb begin
    for (int p = 0; p < 2; p++) begin
      s_ar_ready_o[p] = (ar_sel == p[0]) && m_ar_ready_i;
      s_aw_ready_o[p] = (aw_sel == p[0]) && m_aw_ready_i && !wq_full;
      s_w_ready_o[p]  = !wq_empty && (wport == p[0]) && m_w_ready_i;
    end
    wq_push = m_aw_valid_o && m_aw_ready_i;
    wq_pop  = m_w_valid_o && m_w_ready_i && m_w_o.last;
  end

  // responses
  always_comb begin

    for (int p = 0; p < 2; p++) begin
      s_r_valid_o[p] = m_r_valid_i && (m_r_i.id[ID_W-1] == p[0]);
      s_r_o[p]       = m_r_i;
      s_r_o[p].id[ID_W-1] = 1'b0;
      s_b_valid_o[p] = m_b_valid_i && (m_b_i.id[ID_W-1] == p[0]);
      s_b_o[p]       = m_b_i;
      s_b_o[p].id[ID_W-1] = 1'b0;
    end
    m_r_ready_o = s_r_ready_i[m_r_i.id[ID_W-1]];
    m_b_ready_o = s_b_ready_i[m_b_i.id[ID_W-1]];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ar_prio_q <= 1'b0;
      aw_prio_q <= 1'b0;
      wq_port_q <= '0;
      wq_rd_q   <= '0;
      wq_wr_q   <= '0;
      wq_cnt_q  <= '0;
    end else begin
      if (m_ar_valid_o && m_ar_ready_i) ar_prio_q <= !ar_sel;
      if (wq_push) begin
        aw_prio_q          <= !aw_sel;
        wq_port_q[wq_wr_q] <= aw_sel;
        wq_wr_q            <= wq_wr_q + 1'b1;
      end
      if (wq_pop) wq_rd_q <= wq_rd_q + 1'b1;
      wq_cnt_q <= wq_cnt_q + WQ_CW'(wq_push) - WQ_CW'(wq_pop);
    end
  end

endmodule
