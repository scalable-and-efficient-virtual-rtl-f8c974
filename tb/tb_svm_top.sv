// tb_svm_top: end-to-end test of one cluster's shared-virtual-memory path at the
// default sizes (8 PE command ports, 8 bursts in flight, 32-entry L1 TLB, 256-entry
// 8-way L2 TLB, 2 KiB bursts, 4 KiB pages).
//
// Around svm_top the testbench models the L1 memory, the shared DRAM behind the SoC
// interconnect, and the software of the PEs: a miss-handling thread that polls the
// DMA failed-address register, "walks the page table" (a fixed VA->PA function),
// places the translation in the L2 TLB using one replacement counter per set, and
// reports the page handled; and a core that loads and prefetches through the core
// port. The run covers: core loads that hit in the L1 TLB, in the L2 TLB and that miss;
// prefetches that hit and miss; DMA read and write transfers from several PEs at once
// that cross pages and miss, so the DMA stalls, drains and reissues; DMA and core
// traffic competing in the network. Data in L1 and DRAM is compared with the expected
// values, and each mechanism is counted; a mechanism that never happened is a failure.
module tb_svm_top;
  import svm_pkg::*;
  localparam int NPE = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NPE-1:0] cmd_valid, cmd_ready;
  dma_cmd_t cmd [NPE];
  logic [2:0] cmd_id, done_id, done_pe;
  logic done_valid, reg_req, reg_we;
  logic [31:0] reg_wdata, reg_rdata;
  logic l1w_req, l1w_gnt, l1r_req, l1r_gnt;
  logic [17:0] l1w_addr, l1r_addr;
  logic [63:0] l1w_data, l1r_data;
  logic c_ar_valid, c_ar_ready, c_aw_valid, c_aw_ready, c_w_valid, c_w_ready;
  logic c_r_valid, c_r_ready, c_b_valid, c_b_ready;
  ax_t c_ar, c_aw; w_t c_w; r_t c_r; b_t c_b;
  logic cfg_we; logic [9:0] cfg_addr; logic [31:0] cfg_wdata;
  logic m_ar_valid, m_ar_ready, m_aw_valid, m_aw_ready, m_w_valid, m_w_ready;
  logic m_r_valid, m_r_ready, m_b_valid, m_b_ready;
  ax_t m_ar, m_aw; w_t m_w; r_t m_r; b_t m_b;
  int checks = 0, failures = 0;

  svm_top dut (.clk_i(clk), .rst_ni(rst_n),
    .dma_cmd_valid_i(cmd_valid), .dma_cmd_ready_o(cmd_ready), .dma_cmd_i(cmd),
    .dma_cmd_id_o(cmd_id), .dma_done_valid_o(done_valid), .dma_done_pe_o(done_pe),
    .dma_done_id_o(done_id), .dma_reg_req_i(reg_req), .dma_reg_we_i(reg_we),
    .dma_reg_wdata_i(reg_wdata), .dma_reg_rdata_o(reg_rdata),
    .l1w_req_o(l1w_req), .l1w_gnt_i(l1w_gnt), .l1w_addr_o(l1w_addr), .l1w_data_o(l1w_data),
    .l1r_req_o(l1r_req), .l1r_gnt_i(l1r_gnt), .l1r_addr_o(l1r_addr), .l1r_data_i(l1r_data),
    .core_ar_valid_i(c_ar_valid), .core_ar_ready_o(c_ar_ready), .core_ar_i(c_ar),
    .core_aw_valid_i(c_aw_valid), .core_aw_ready_o(c_aw_ready), .core_aw_i(c_aw),
    .core_w_valid_i(c_w_valid), .core_w_ready_o(c_w_ready), .core_w_i(c_w),
    .core_r_valid_o(c_r_valid), .core_r_ready_i(c_r_ready), .core_r_o(c_r),
    .core_b_valid_o(c_b_valid), .core_b_ready_i(c_b_ready), .core_b_o(c_b),
    .iommu_cfg_we_i(cfg_we), .iommu_cfg_addr_i(cfg_addr), .iommu_cfg_wdata_i(cfg_wdata),
    .mem_ar_valid_o(m_ar_valid), .mem_ar_ready_i(m_ar_ready), .mem_ar_o(m_ar),
    .mem_aw_valid_o(m_aw_valid), .mem_aw_ready_i(m_aw_ready), .mem_aw_o(m_aw),
    .mem_w_valid_o(m_w_valid), .mem_w_ready_i(m_w_ready), .mem_w_o(m_w),
    .mem_r_valid_i(m_r_valid), .mem_r_ready_o(m_r_ready), .mem_r_i(m_r),
    .mem_b_valid_i(m_b_valid), .mem_b_ready_o(m_b_ready), .mem_b_i(m_b));

  axi_mem_model #(.LATENCY(6)) mem (.clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(m_ar_valid), .ar_ready_o(m_ar_ready), .ar_i(m_ar),
    .aw_valid_i(m_aw_valid), .aw_ready_o(m_aw_ready), .aw_i(m_aw),
    .w_valid_i(m_w_valid), .w_ready_o(m_w_ready), .w_i(m_w),
    .r_valid_o(m_r_valid), .r_ready_i(m_r_ready), .r_o(m_r),
    .b_valid_o(m_b_valid), .b_ready_i(m_b_ready), .b_o(m_b));

  // ---------------------------------------------------------------- L1 model
  logic [63:0] l1 [32768];
  always @(negedge clk) begin
    l1w_gnt = ($urandom % 6) != 0;
    l1r_gnt = ($urandom % 6) != 0;
  end
  always @(posedge clk) begin
    if (l1w_req && l1w_gnt) l1[l1w_addr[17:3]] <= l1w_data;
    if (l1r_req && l1r_gnt) l1r_data <= l1[l1r_addr[17:3]];
  end

  function automatic addr_t v2p(input addr_t va);
    return {va[31:12] ^ 20'h2a5a5, va[11:0]};
  endfunction

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 30) $display("FAIL %s", msg); end
  endtask

  // ---------------------------------------------------------------- mechanism counters
  int m_l1_hit = 0, m_l2_hit = 0, m_drop = 0, m_pf_hit = 0, m_pf_miss = 0;
  int m_dma_fail = 0, m_dma_stall = 0, m_peek = 0, m_reissue = 0, m_page_split = 0;
  int m_l1_same_cycle = 0, m_net_compete = 0, m_done = 0, m_multi_cmd = 0;
  always @(posedge clk) if (rst_n) begin
    // IOMMU forwarding straight from the L1 TLB vs. after an L2 search
    if ((dut.i_iommu.s_ar_valid_i && dut.i_iommu.s_ar_ready_o) ||
        (dut.i_iommu.s_aw_valid_i && dut.i_iommu.s_aw_ready_o)) begin
      if (dut.i_iommu.l1_hit) m_l1_hit++;
      if (dut.i_iommu.l1_hit && !dut.i_iommu.sel_ax.user && dut.i_iommu.state_d == 0) m_l1_same_cycle++;
    end
    if (dut.i_iommu.l2_resp_valid && dut.i_iommu.l2_hit) m_l2_hit++;
    if (dut.i_iommu.s_r_valid_o && dut.i_iommu.s_r_ready_i && dut.i_iommu.s_r_o.last &&
        dut.i_iommu.s_r_o.resp != RESP_OKAY) m_drop++;
    if (dut.i_iommu.s_b_valid_o && dut.i_iommu.s_b_ready_i && dut.i_iommu.s_b_o.resp != RESP_OKAY) m_drop++;
    if ((dut.nw_ar_valid[0] && dut.nw_ar_valid[1]) || (dut.nw_aw_valid[0] && dut.nw_aw_valid[1])) m_net_compete++;
    if (dut.i_dma.rb_n_failed != 0 && dut.i_dma.sp_valid_q && !dut.i_dma.iss_valid_q) m_dma_stall++;
    if (done_valid) m_done++;
    if ($countones(cmd_valid) > 1) m_multi_cmd++;
  end

  // ---------------------------------------------------------------- miss handler
  int set_ctr [32];
  int n_handled = 0;
  bit sw_run = 1;
  semaphore cfg_lock = new(1);

  task automatic map_page(input addr_t va);
    int s, way;
    cfg_lock.get(1);
    s = int'(va[16:12]);
    way = set_ctr[s];
    set_ctr[s] = (set_ctr[s] + 1) % 8;
    @(negedge clk);
    cfg_we = 1; cfg_addr = {1'b1, 5'(s), 3'(way), 1'b1}; cfg_wdata = {12'h0, v2p(va) >> 12};
    @(negedge clk);
    cfg_addr = {1'b1, 5'(s), 3'(way), 1'b0}; cfg_wdata = {1'b1, 11'h0, va[31:12]};
    @(negedge clk); cfg_we = 0;
    cfg_lock.put(1);
  endtask

  initial begin
    reg_req = 0; reg_we = 0; reg_wdata = 0;
    wait (rst_n);
    while (sw_run) begin
      addr_t fa;
      repeat (3) @(negedge clk);
      reg_req = 1; reg_we = 0; #1 fa = reg_rdata;
      @(negedge clk); reg_req = 0;
      if (fa != 0) begin
        m_peek++;
        repeat (30) @(negedge clk);          // page-table walk
        map_page(fa);
        @(negedge clk);
        reg_req = 1; reg_we = 1; reg_wdata = fa;
        @(negedge clk); reg_req = 0; reg_we = 0;
        n_handled++;
      end
    end
  end

  // DMA-side burst monitor: failures, reissues, page splits
  addr_t err_addrs [$];
  addr_t ar_by_id [8], aw_by_id [8];
  always @(posedge clk) if (rst_n) begin
    if (dut.nw_ar_valid[0] && dut.nw_ar_ready[0]) begin
      ar_by_id[dut.nw_ar[0].id[2:0]] = dut.nw_ar[0].addr;
      if (dut.nw_ar[0].addr inside {err_addrs}) begin
        m_reissue++;
        foreach (err_addrs[k]) if (err_addrs[k] == dut.nw_ar[0].addr) begin err_addrs.delete(k); break; end
      end
      if (13'(dut.nw_ar[0].addr[11:0]) + 13'(dut.nw_ar[0].len) * 13'd8 + 13'd8 == 13'h1000 &&
          dut.nw_ar[0].len != 8'hff) m_page_split++;
    end
    if (dut.nw_aw_valid[0] && dut.nw_aw_ready[0]) begin
      aw_by_id[dut.nw_aw[0].id[2:0]] = dut.nw_aw[0].addr;
      if (dut.nw_aw[0].addr inside {err_addrs}) begin
        m_reissue++;
        foreach (err_addrs[k]) if (err_addrs[k] == dut.nw_aw[0].addr) begin err_addrs.delete(k); break; end
      end
      if (13'(dut.nw_aw[0].addr[11:0]) + 13'(dut.nw_aw[0].len) * 13'd8 + 13'd8 == 13'h1000 &&
          dut.nw_aw[0].len != 8'hff) m_page_split++;
    end
    if (dut.nw_r_valid[0] && dut.nw_r_ready[0] && dut.nw_r[0].last && dut.nw_r[0].resp != RESP_OKAY) begin
      m_dma_fail++; err_addrs.push_back(ar_by_id[dut.nw_r[0].id[2:0]]);
    end
    if (dut.nw_b_valid[0] && dut.nw_b_ready[0] && dut.nw_b[0].resp != RESP_OKAY) begin
      m_dma_fail++; err_addrs.push_back(aw_by_id[dut.nw_b[0].id[2:0]]);
    end
  end

  // ---------------------------------------------------------------- core port
  task automatic core_read(input addr_t a, input int len, input bit pf,
                           output logic [1:0] resp, output logic [63:0] d0);
    int beats;
    @(negedge clk);
    c_ar_valid = 1; c_ar = '{id: 4'h2, addr: a, len: 8'(len), user: pf};
    do @(posedge clk); while (!c_ar_ready);
    beats = 0; resp = RESP_OKAY; d0 = '0;
    while (1) begin
      @(negedge clk);
      c_ar_valid = 0;
      if (c_r_valid) begin
        check(c_r.id == 4'h2, "core read id");
        if (beats == 0) d0 = c_r.data;
        if (c_r.resp != RESP_OKAY) resp = c_r.resp;
        beats++;
        if (c_r.last) begin @(posedge clk); break; end
      end
    end
    check(beats == len + 1, "core read beat count");
  endtask

  // ---------------------------------------------------------------- DMA transfers
  typedef struct { int pe; addr_t va; int loc; int len; bit wr; } xfer_t;
  xfer_t xf [5];
  int    xid [5];
  bit    done_seen [5];
  always @(posedge clk) if (rst_n && done_valid) begin
    bit found = 0;
    foreach (xf[i]) if (xid[i] == int'(done_id) && !done_seen[i] && xid[i] >= 0 && xf[i].pe == int'(done_pe)) begin
      done_seen[i] = 1; found = 1;
    end
    check(found, "done event matches a running transfer of that PE");
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] resp; logic [63:0] d0; int ncyc; bit all_done;
    addr_t VA_A, VA_B, VA_C;
    VA_A = 32'h4000_0000; VA_B = 32'h4000_7000; VA_C = 32'h4123_4000;
    cmd_valid = '0; foreach (cmd[p]) cmd[p] = '0;
    c_ar_valid = 0; c_aw_valid = 0; c_w_valid = 0; c_r_ready = 1; c_b_ready = 1;
    c_ar = '0; c_aw = '0; c_w = '0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    foreach (set_ctr[s]) set_ctr[s] = 0;
    for (int i = 0; i < 32768; i++) l1[i] = {32'h5100_0000 + 32'(i), 32'(i) * 13};
    xf[0] = '{pe: 1, va: 32'h5000_0400, loc: 16'h0000, len: 8192,  wr: 0};  // 3 pages
    xf[1] = '{pe: 2, va: 32'h5200_0000, loc: 16'h4000, len: 4096,  wr: 1};
    xf[2] = '{pe: 4, va: 32'h5000_1800, loc: 16'h2400, len: 1024,  wr: 0};  // shares a page with xf[0]
    xf[3] = '{pe: 6, va: 32'h5300_0ff0, loc: 16'h6000, len: 2064,  wr: 1};
    xf[4] = '{pe: 7, va: 32'h5400_0000, loc: 18'h30000, len: 65536 - 32768, wr: 0};  // 32 KiB, 8 pages, upper L1
    foreach (xid[i]) begin xid[i] = -1; done_seen[i] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;

    // page A in the L1 TLB (slot 3), page B in the L2 TLB via the miss handler's path
    @(negedge clk); cfg_we = 1; cfg_addr = {1'b0, 8'd3, 1'b1}; cfg_wdata = {12'h0, v2p(VA_A) >> 12};
    @(negedge clk); cfg_addr = {1'b0, 8'd3, 1'b0}; cfg_wdata = {1'b1, 11'h0, VA_A[31:12]};
    @(negedge clk); cfg_we = 0;
    map_page(VA_B);

    // core loads: L1 hit, L2 hit, miss
    core_read(VA_A + 32'h18, 1, 0, resp, d0);
    check(resp == RESP_OKAY && d0 == {v2p(VA_A + 32'h18), ~v2p(VA_A + 32'h18)}, "core load via L1 TLB");
    core_read(VA_B + 32'h20, 0, 0, resp, d0);
    check(resp == RESP_OKAY && d0 == {v2p(VA_B + 32'h20), ~v2p(VA_B + 32'h20)}, "core load via L2 TLB");
    core_read(VA_C, 3, 0, resp, d0);
    check(resp == RESP_SLVERR, "core load miss answered with error");
    // prefetches: hit, miss, then the miss handler maps the page, then hit
    core_read(VA_A, 0, 1, resp, d0);
    check(resp == RESP_OKAY, "prefetch hit"); if (resp == RESP_OKAY) m_pf_hit++;
    core_read(VA_C, 0, 1, resp, d0);
    check(resp == RESP_SLVERR, "prefetch miss"); if (resp != RESP_OKAY) m_pf_miss++;
    map_page(VA_C);
    core_read(VA_C + 32'h8, 0, 1, resp, d0);
    check(resp == RESP_OKAY, "prefetch hit after mapping"); if (resp == RESP_OKAY) m_pf_hit++;
    check(mem.n_ar == 2, "only the two hitting loads reached memory");

    // DMA transfers from five PEs, posted together, with core traffic in parallel
    @(negedge clk);
    foreach (xf[i]) begin
      cmd_valid[xf[i].pe] = 1;
      cmd[xf[i].pe] = '{ext_addr: xf[i].va, loc_addr: 18'(xf[i].loc), len: 17'(xf[i].len), write: xf[i].wr};
    end
    fork
      begin
        ncyc = 0;
        while (cmd_valid != 0 && ncyc < 200) begin
          #1;
          foreach (xf[i]) if (cmd_valid[xf[i].pe] && cmd_ready[xf[i].pe]) xid[i] = int'(cmd_id);
          @(negedge clk);
          foreach (xf[i]) if (xid[i] >= 0) cmd_valid[xf[i].pe] = 0;
          ncyc++;
        end
      end
      begin
        for (int k = 0; k < 40; k++) begin
          core_read(VA_A + 32'(k * 64), 3, 0, resp, d0);
          check(resp == RESP_OKAY && d0 == {v2p(VA_A + 32'(k * 64)), ~v2p(VA_A + 32'(k * 64))}, "core load during DMA");
        end
      end
    join
    foreach (xid[i]) check(xid[i] >= 0, "command accepted");
    ncyc = 0; all_done = 0;
    while (!all_done && ncyc < 300000) begin
      @(negedge clk); ncyc++;
      all_done = 1; foreach (done_seen[i]) if (!done_seen[i]) all_done = 0;
    end
    foreach (done_seen[i]) check(done_seen[i], $sformatf("transfer %0d completed", i));
    sw_run = 0;
    repeat (10) @(negedge clk);
    foreach (xf[i]) begin
      for (int o = 0; o < xf[i].len; o += 8) begin
        addr_t pa; logic [63:0] exp, got; int w;
        pa = v2p(xf[i].va + 32'(o));
        w = (xf[i].loc + o) / 8;
        if (!xf[i].wr) begin exp = {pa, ~pa}; got = l1[w]; end
        else begin
          exp = {32'h5100_0000 + 32'(w), 32'(w) * 13};
          got = mem.mem.exists(pa) ? mem.mem[pa] : 64'h0;
        end
        if (got != exp) check(0, $sformatf("data xfer %0d offset %0d", i, o));
      end
      checks++;
    end
    check(err_addrs.size() == 0, "every failed DMA burst was reissued");

    $display("mechanisms: l1_tlb_hit=%0d (same-cycle forward %0d) l2_tlb_hit=%0d miss_dropped=%0d prefetch_hit=%0d prefetch_miss=%0d",
             m_l1_hit, m_l1_same_cycle, m_l2_hit, m_drop, m_pf_hit, m_pf_miss);
    $display("            dma_burst_failed=%0d dma_stall_cycles=%0d failed_addr_peeked=%0d reissued=%0d page_split=%0d",
             m_dma_fail, m_dma_stall, m_peek, m_reissue, m_page_split);
    $display("            network_contention=%0d concurrent_pe_cmds=%0d transfers_done=%0d", m_net_compete, m_multi_cmd, m_done);
    check(m_l1_hit > 0, "L1 TLB hit happened");
    check(m_l1_same_cycle > 0, "same-cycle L1 TLB forward happened");
    check(m_l2_hit > 0, "L2 TLB hit happened");
    check(m_drop > 0, "miss drop happened");
    check(m_pf_hit > 0, "prefetch hit happened");
    check(m_pf_miss > 0, "prefetch miss happened");
    check(m_dma_fail > 0, "DMA burst failure happened");
    check(m_dma_stall > 0, "DMA stall happened");
    check(m_peek > 0, "failed address read happened");
    check(m_reissue > 0 && m_reissue == m_dma_fail, "reissue of every failed burst");
    check(m_page_split > 0, "page split happened");
    check(m_net_compete > 0, "network contention happened");
    check(m_multi_cmd > 0, "concurrent PE commands happened");
    check(m_done == 5, "five completion events");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
