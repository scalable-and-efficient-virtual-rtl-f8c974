// vdma: cluster DMA engine that tolerates TLB misses of the hybrid IOMMU.
//
// Each PE has its own command interface (cmd_*[p]); a round-robin arbiter accepts at
// most one command per cycle into a small command queue and hands back a DMA
// transfer ID. The control unit splits each transfer (up to 64 KiB) into AXI bursts
// of at most 2 KiB that never cross a 4 KiB page, so each burst needs exactly one TLB
// entry. The AXI transfer unit issues the bursts (one AXI ID per burst from a 3-bit
// counter), writes read data into L1 through the l1w port and streams L1 data read
// through the l1r port (one-cycle read latency) onto the W channel.
//
// Every issued burst is recorded in the retirement buffer. When its final response
// arrives, a successful burst is retired and an erroneous one (a TLB miss in the
// IOMMU) is marked failed. As soon as any burst has failed the control unit stops
// issuing new bursts, waits until no burst is in flight any more, and from then on
// reissues bursts as soon as software has marked them reissuable, oldest first,
// until no burst is failed or in flight any more; then normal issue resumes.
// Software uses one register (reg_*): a read returns the external address of the
// oldest failed burst (0 if none) and marks all failed bursts on that page as peeked; a write of a
// virtual address marks all failed/peeked bursts on that page reissuable. A transfer
// is complete, and done_valid_o pulses with its PE and ID, when all its bursts were
// issued and retired successfully.
//
// Timing: a burst leaves the issue register one cycle after it was chosen; read data
// is accepted one beat per cycle when the L1 grants; write data flows one beat per
// cycle when the L1 grants and W is ready. Per-PE command interfaces, the 64 KiB /
// 2 KiB / page splitting, the retirement buffer and the stop-drain-reissue policy
// follow the paper; the command queue, the ID counter, the two L1 ports and the exact
// burst boundary rule are this design's choices. Addresses and lengths must be
// multiples of 8 bytes. L1 addresses are 18-bit byte addresses (256 KiB); the
// retirement buffer keeps the 16-bit address of the 32-bit word, the field width the
// paper gives for the local address (16 bits of words cover exactly 256 KiB).
// Lint note: only some fields of the retirement-buffer metadata read back on
// completion (dma_id, write) and on R lookup (loc_addr) are needed here, so the other
// bits of those two buses are intentionally unused.
// Lint note: rst_ni is reported as both synchronous and asynchronous. The flops use it
// asynchronously; the other use is the 'disable iff' of the simulation assertions.
// AR/AW ID bit 3 and the user (prefetch) bit are constant 0: the DMA uses 3-bit IDs
// (bit 3 belongs to the network) and never prefetches.
module vdma
  import svm_pkg::*;
#(
  parameter int unsigned N_PE            = 8,
  parameter int unsigned N_INFLIGHT      = 8,
  parameter int unsigned MAX_BURST_BYTES = 2048,
  parameter int unsigned PAGE_BYTES      = 4096,
  parameter int unsigned MAX_XFER_BYTES  = 65536,
  parameter int unsigned CMDQ_DEPTH      = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
  // per-PE command interfaces
  input  logic [N_PE-1:0]          cmd_valid_i,
  output logic [N_PE-1:0]          cmd_ready_o,
  input  dma_cmd_t                 cmd_i [N_PE],
  output logic [DMA_ID_W-1:0]      cmd_id_o,      // ID given to the accepted command
  // completion event
  output logic                     done_valid_o,
  output logic [$clog2(N_PE)-1:0]  done_pe_o,
  output logic [DMA_ID_W-1:0]      done_id_o,
  // failed-address register
  input  logic                     reg_req_i,
  input  logic                     reg_we_i,
  input  logic [31:0]              reg_wdata_i,
  output logic [31:0]              reg_rdata_o,
  // AXI master
  output logic ar_valid_o, input  logic ar_ready_i, output ax_t ar_o,
  output logic aw_valid_o, input  logic aw_ready_i, output ax_t aw_o,
  output logic w_valid_o,  input  logic w_ready_i,  output w_t  w_o,
  input  logic r_valid_i,  output logic r_ready_o,  input  r_t  r_i,
  input  logic b_valid_i,  output logic b_ready_o,  input  b_t  b_i,
  // L1 write port (read data from shared memory)
  output logic                     l1w_req_o,
  input  logic                     l1w_gnt_i,
  output logic [L1_AW-1:0]         l1w_addr_o,
  output logic [DATA_W-1:0]        l1w_data_o,
  // L1 read port (write data to shared memory), data one cycle after grant
  output logic                     l1r_req_o,
  input  logic                     l1r_gnt_i,
  output logic [L1_AW-1:0]         l1r_addr_o,
  input  logic [DATA_W-1:0]        l1r_data_i
);

  localparam int unsigned N_IDS  = 2 ** DMA_ID_W;
  localparam int unsigned PE_W   = $clog2(N_PE);
  localparam int unsigned CNT_W  = $clog2(MAX_XFER_BYTES / MAX_BURST_BYTES + 2) + 1;
  localparam int unsigned RB_CW  = $clog2(N_INFLIGHT) + 1;
  localparam int unsigned OFF_W  = $clog2(PAGE_BYTES);
  localparam int unsigned CQ_W   = $clog2(CMDQ_DEPTH);

  typedef logic [DMA_ID_W-1:0] did_t;

  // ================================================================ command arbiter
  typedef struct packed {
    dma_cmd_t cmd;
    did_t     id;
  } cq_entry_t;

  cq_entry_t cq_q [CMDQ_DEPTH];
  logic [CQ_W-1:0] cq_rd_q, cq_wr_q;
  logic [CQ_W:0]   cq_cnt_q;
  logic            cq_push, cq_pop;

  logic [N_IDS-1:0]     busy_q;
  logic [PE_W-1:0]      xpe_q   [N_IDS];
  logic [CNT_W-1:0]     xcnt_q  [N_IDS];   // bursts issued but not yet retired OK
  logic [N_IDS-1:0]     xall_q;            // all bursts of the transfer issued

  logic [PE_W-1:0] rr_q;
  logic            arb_valid;
  logic [PE_W-1:0] arb_pe;
  logic            id_free;
  did_t            free_id;

  always_comb begin
    arb_valid = 1'b0;
    arb_pe    = '0;
    for (int k = N_PE - 1; k >= 0; k--) begin
      logic [PE_W-1:0] p;
      p = PE_W'((int'(rr_q) + k) % N_PE);
      if (cmd_valid_i[p]) begin
        arb_valid = 1'b1;
        arb_pe    = p;
      end
    end
    id_free = 1'b0;
    free_id = '0;
    for (int i = N_IDS - 1; i >= 0; i--)
      if (!busy_q[i]) begin
        id_free = 1'b1;
        free_id = did_t'(i);
      end
  end

  assign cq_push  = arb_valid && id_free && (cq_cnt_q < (CQ_W+1)'(CMDQ_DEPTH));
  assign cmd_id_o = free_id;
  always_comb begin
    cmd_ready_o = '0;
    if (cq_push) cmd_ready_o[arb_pe] = 1'b1;
  end

  // ================================================================ splitter
  logic            sp_valid_q;
  addr_t           sp_ext_q;
  logic [L1_AW-1:0] sp_loc_q;
  logic [16:0]     sp_rem_q;
  logic            sp_write_q;
  did_t            sp_id_q;
  logic [16:0]     sp_bytes;
  logic            sp_last;
  logic            sp_advance;

  always_comb begin
    logic [16:0] to_page;
    to_page  = 17'(PAGE_BYTES) - 17'(sp_ext_q[OFF_W-1:0]);
    sp_bytes = sp_rem_q;
    if (sp_bytes > 17'(MAX_BURST_BYTES)) sp_bytes = 17'(MAX_BURST_BYTES);
    if (sp_bytes > to_page)              sp_bytes = to_page;
    sp_last  = (sp_bytes == sp_rem_q);
  end
  assign cq_pop = !sp_valid_q && (cq_cnt_q != 0);

  // ================================================================ retirement buffer
  logic        rb_push, rb_push_ready, rb_cpl_valid, rb_cpl_ok, rb_cpl_found;
  burst_meta_t rb_push_meta, rb_cpl_meta, rb_look_meta, rb_reis_meta;
  did_t        rb_cpl_id;
  logic        rb_look_found, rb_reis_valid, rb_reis_pop;
  logic [RB_CW-1:0] rb_n_inflight, rb_n_failed;
  addr_t       rb_peek_addr;

  retirement_buffer #(.N_ENTRIES(N_INFLIGHT)) i_rb (
    .clk_i, .rst_ni,
    .push_valid_i    (rb_push),
    .push_ready_o    (rb_push_ready),
    .push_meta_i     (rb_push_meta),
    .cpl_valid_i     (rb_cpl_valid),
    .cpl_id_i        (rb_cpl_id),
    .cpl_ok_i        (rb_cpl_ok),
    .cpl_found_o     (rb_cpl_found),
    .cpl_meta_o      (rb_cpl_meta),
    .lookup_id_i     (r_i.id[DMA_ID_W-1:0]),
    .lookup_found_o  (rb_look_found),
    .lookup_meta_o   (rb_look_meta),
    .n_inflight_o    (rb_n_inflight),
    .n_failed_o      (rb_n_failed),
    .reis_valid_o    (rb_reis_valid),
    .reis_meta_o     (rb_reis_meta),
    .reis_pop_i      (rb_reis_pop),
    .peek_i          (reg_req_i && !reg_we_i),
    .peek_addr_o     (rb_peek_addr),
    .handled_valid_i (reg_req_i && reg_we_i),
    .handled_addr_i  (reg_wdata_i)
  );

  assign reg_rdata_o = rb_peek_addr;

  // ================================================================ issue
  // drained: a miss has happened and every in-flight burst has come back since; it
  // stays set (no new bursts) until no burst is failed or in flight any more
  logic drained_q;
  logic iss_valid_q;
  ax_t  iss_ax_q;
  logic iss_write_q;
  did_t axi_id_q;

  typedef struct packed {
    logic [L1_AW-1:0] loc;
    logic [7:0]       len;
  } wq_entry_t;
  wq_entry_t wq_q [N_INFLIGHT];
  logic [$clog2(N_INFLIGHT)-1:0] wq_rd_q, wq_wr_q;
  localparam int unsigned WQ_CW = $clog2(N_INFLIGHT) + 1;
  logic [WQ_CW-1:0]   wq_cnt_q;
  logic wq_push, wq_pop, wq_space;
  wq_entry_t wq_push_data;
  assign wq_space = (wq_cnt_q < WQ_CW'(N_INFLIGHT));

  logic iss_take, iss_reissue, iss_new;
  always_comb begin
    iss_take     = !iss_valid_q && rb_push_ready && wq_space;
    iss_reissue  = iss_take && drained_q && rb_reis_valid;
    iss_new      = iss_take && !iss_reissue && (rb_n_failed == 0) && !drained_q && sp_valid_q;
    rb_push      = iss_reissue || iss_new;
    rb_reis_pop  = iss_reissue;
    sp_advance   = iss_new;
    if (iss_reissue) begin
      rb_push_meta        = rb_reis_meta;
      rb_push_meta.axi_id = axi_id_q;
    end else begin
      rb_push_meta.ext_addr = sp_ext_q;
      rb_push_meta.loc_addr = sp_loc_q[L1_AW-1:2];
      rb_push_meta.len      = 8'((sp_bytes >> 3) - 17'd1);
      rb_push_meta.axi_id   = axi_id_q;
      rb_push_meta.dma_id   = sp_id_q;
      rb_push_meta.write    = sp_write_q;
    end
    wq_push           = rb_push && rb_push_meta.write;
    wq_push_data.loc  = {rb_push_meta.loc_addr, 2'b00};
    wq_push_data.len  = rb_push_meta.len;
  end

  assign ar_valid_o = iss_valid_q && !iss_write_q;
  assign aw_valid_o = iss_valid_q &&  iss_write_q;
  assign ar_o       = iss_ax_q;
  assign aw_o       = iss_ax_q;

  // ================================================================ read data path
  logic [7:0]       beat_q [N_IDS];
  logic [N_IDS-1:0] rerr_q;
  did_t             r_id;
  logic             r_ok, r_hs;
  assign r_id = r_i.id[DMA_ID_W-1:0];
  assign r_ok = (r_i.resp == RESP_OKAY);

  always_comb begin
    l1w_req_o  = r_valid_i && r_ok;
    l1w_addr_o = {rb_look_meta.loc_addr, 2'b00} + L1_AW'({beat_q[r_id], 3'b000});
    l1w_data_o = r_i.data;
    r_ready_o  = r_ok ? l1w_gnt_i : 1'b1;
  end
  assign r_hs = r_valid_i && r_ready_o;

  // final responses go to the retirement buffer; R has priority over B
  logic b_hs;
  assign b_ready_o = !(r_hs && r_i.last);
  assign b_hs      = b_valid_i && b_ready_o;
  always_comb begin
    rb_cpl_valid = 1'b0;
    rb_cpl_id    = b_i.id[DMA_ID_W-1:0];
    rb_cpl_ok    = (b_i.resp == RESP_OKAY);
    if (r_hs && r_i.last) begin
      rb_cpl_valid = 1'b1;
      rb_cpl_id    = r_id;
      rb_cpl_ok    = r_ok && !rerr_q[r_id];
    end else if (b_hs) begin
      rb_cpl_valid = 1'b1;
    end
  end

  // ================================================================ write data path
  logic [7:0]       wr_beat_q;
  logic             rd_pend_q, rd_pend_last_q;
  w_t               wbuf_q [2];
  logic             wbuf_rd_q, wbuf_wr_q;
  logic [1:0]       wbuf_cnt_q;
  logic             w_hs;

  assign l1r_req_o  = (wq_cnt_q != 0) && ({1'b0, wbuf_cnt_q} + {2'b0, rd_pend_q} < 3'd2);
  assign l1r_addr_o = wq_q[wq_rd_q].loc + L1_AW'({wr_beat_q, 3'b000});
  assign wq_pop     = l1r_req_o && l1r_gnt_i && (wr_beat_q == wq_q[wq_rd_q].len);
  assign w_valid_o  = (wbuf_cnt_q != 0);
  assign w_o        = wbuf_q[wbuf_rd_q];
  assign w_hs       = w_valid_o && w_ready_i;

  // ================================================================ completion
  logic done_any;
  did_t done_id;
  always_comb begin
    done_any = 1'b0;
    done_id  = '0;
    for (int i = N_IDS - 1; i >= 0; i--)
      if (busy_q[i] && xall_q[i] && xcnt_q[i] == 0) begin
        done_any = 1'b1;
        done_id  = did_t'(i);
      end
  end
  assign done_valid_o = done_any;
  assign done_id_o    = done_id;
  assign done_pe_o    = xpe_q[done_id];

  logic retire_ok;
  assign retire_ok = rb_cpl_valid && rb_cpl_ok && rb_cpl_found;

  // ================================================================ registers
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q        <= '0;
      cq_rd_q     <= '0;
      cq_wr_q     <= '0;
      cq_cnt_q    <= '0;
      busy_q      <= '0;
      xall_q      <= '0;
      for (int i = 0; i < N_IDS; i++) begin
        xpe_q[i]  <= '0;
        xcnt_q[i] <= '0;
        beat_q[i] <= '0;
      end
      for (int i = 0; i < CMDQ_DEPTH; i++) cq_q[i] <= '0;
      for (int i = 0; i < N_INFLIGHT; i++) wq_q[i] <= '0;
      rerr_q      <= '0;
      sp_valid_q  <= 1'b0;
      sp_ext_q    <= '0;
      sp_loc_q    <= '0;
      sp_rem_q    <= '0;
      sp_write_q  <= 1'b0;
      sp_id_q     <= '0;
      drained_q   <= 1'b0;
      iss_valid_q <= 1'b0;
      iss_ax_q    <= '0;
      iss_write_q <= 1'b0;
      axi_id_q    <= '0;
      wq_rd_q     <= '0;
      wq_wr_q     <= '0;
      wq_cnt_q    <= '0;
      wr_beat_q   <= '0;
      rd_pend_q   <= 1'b0;
      rd_pend_last_q <= 1'b0;
      wbuf_q[0]   <= '0;
      wbuf_q[1]   <= '0;
      wbuf_rd_q   <= 1'b0;
      wbuf_wr_q   <= 1'b0;
      wbuf_cnt_q  <= '0;
    end else begin
      // command queue and transfer table
      if (cq_push) begin
        cq_q[cq_wr_q]   <= '{cmd: cmd_i[arb_pe], id: free_id};
        cq_wr_q         <= cq_wr_q + 1'b1;
        busy_q[free_id] <= 1'b1;
        xall_q[free_id] <= 1'b0;
        xpe_q[free_id]  <= arb_pe;
        rr_q            <= PE_W'((int'(arb_pe) + 1) % N_PE);
      end
      if (cq_pop) begin
        sp_valid_q <= 1'b1;
        sp_ext_q   <= cq_q[cq_rd_q].cmd.ext_addr;
        sp_loc_q   <= cq_q[cq_rd_q].cmd.loc_addr;
        sp_rem_q   <= cq_q[cq_rd_q].cmd.len;
        sp_write_q <= cq_q[cq_rd_q].cmd.write;
        sp_id_q    <= cq_q[cq_rd_q].id;
        cq_rd_q    <= cq_rd_q + 1'b1;
      end
      cq_cnt_q <= cq_cnt_q + (CQ_W+1)'(cq_push) - (CQ_W+1)'(cq_pop);

      if (sp_advance) begin
        sp_ext_q <= sp_ext_q + ADDR_W'(sp_bytes);
        sp_loc_q <= sp_loc_q + L1_AW'(sp_bytes);
        sp_rem_q <= sp_rem_q - sp_bytes;
        if (sp_last) begin
          sp_valid_q      <= 1'b0;
          xall_q[sp_id_q] <= 1'b1;
        end
      end

      for (int i = 0; i < N_IDS; i++) begin
        xcnt_q[i] <= xcnt_q[i]
                   + ((sp_advance && sp_id_q == did_t'(i)) ? CNT_W'(1) : CNT_W'(0))
                   - ((retire_ok && rb_cpl_meta.dma_id == did_t'(i)) ? CNT_W'(1) : CNT_W'(0));
      end
      if (done_any) busy_q[done_id] <= 1'b0;

      // issue register
      if (rb_push) begin
        iss_valid_q   <= 1'b1;
        iss_ax_q.id   <= {1'b0, rb_push_meta.axi_id};
        iss_ax_q.addr <= rb_push_meta.ext_addr;
        iss_ax_q.len  <= rb_push_meta.len;
        iss_ax_q.user <= 1'b0;
        iss_write_q   <= rb_push_meta.write;
        axi_id_q      <= axi_id_q + 1'b1;
      end else if ((ar_valid_o && ar_ready_i) || (aw_valid_o && aw_ready_i)) begin
        iss_valid_q   <= 1'b0;
      end

      if (rb_n_failed == 0 && rb_n_inflight == 0)     drained_q <= 1'b0;
      else if (rb_n_failed != 0 && rb_n_inflight == 0 && !iss_valid_q)
                                                      drained_q <= 1'b1;

      // read data
      if (r_hs) begin
        if (r_i.last) begin
          beat_q[r_id] <= '0;
          rerr_q[r_id] <= 1'b0;
        end else begin
          beat_q[r_id] <= beat_q[r_id] + 1'b1;
          if (!r_ok) rerr_q[r_id] <= 1'b1;
        end
      end

      // write data
      if (wq_push) begin
        wq_q[wq_wr_q] <= wq_push_data;
        wq_wr_q       <= wq_wr_q + 1'b1;
      end
      if (wq_pop) wq_rd_q <= wq_rd_q + 1'b1;
      wq_cnt_q <= wq_cnt_q + WQ_CW'(wq_push) - WQ_CW'(wq_pop);

      if (l1r_req_o && l1r_gnt_i) wr_beat_q <= wq_pop ? 8'd0 : wr_beat_q + 1'b1;
      rd_pend_q      <= l1r_req_o && l1r_gnt_i;
      rd_pend_last_q <= wq_pop;
      if (rd_pend_q) begin
        wbuf_q[wbuf_wr_q] <= '{data: l1r_data_i, strb: '1, last: rd_pend_last_q};
        wbuf_wr_q         <= !wbuf_wr_q;
      end
      if (w_hs) wbuf_rd_q <= !wbuf_rd_q;
      wbuf_cnt_q <= wbuf_cnt_q + (rd_pend_q ? 2'd1 : 2'd0) - (w_hs ? 2'd1 : 2'd0);
    end
  end

  a_r_known: assert property (@(posedge clk_i) disable iff (!rst_ni)
    r_valid_i |-> rb_look_found) else $error("read beat for unknown AXI ID");
  a_ar_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    ar_valid_o && !ar_ready_i |=> ar_valid_o && $stable(ar_o));

endmodule
