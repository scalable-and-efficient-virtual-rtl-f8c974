// tb_svm_workloads: the two kinds of application the design is meant for, run in small
// versions on the full-size top level (no parameter overrides), with the accelerator
// software modelled as testbench threads, one per PE.
//
// Threads:
//   worker (WT)     does the application work: loads through the core port, DMA
//                   transfers through its own command interface, "computation" on L1.
//                   A load that gets SLVERR puts its page into the software miss queue,
//                   waits until that page is handled and retries.
//   miss handler    (MHT) serves the DMA failed-address register and the software miss
//                   queue: skips pages another handler is already working on, "walks the
//                   page table" (a fixed delay and a fixed VA->PA function), places the
//                   translation in the L2 TLB using one replacement counter per set
//                   (atomic: a semaphore), then reports the page handled.
//   prefetcher      (PHT) runs ahead of the workers and sends prefetch loads to the
//                   pages they will need; a failed prefetch queues the page for the MHTs.
//
// Pointer chasing: 64 vertices, each with a header (successor count, pointer to its
// successor list, pointer to its payload), 1 KiB of payload and two successors, spread
// over about 140 pages. For each vertex a worker loads the header, DMA-reads the payload
// into L1, transforms it, follows the successor pointers and DMA-writes the result into
// a slot of each successor. Configurations: 6 WT + 2 MHT and 5 WT + 1 PHT + 2 MHT.
// Stream processing: 24 blocks of 8 KiB in one buffer, double-buffered in L1 by each
// worker (the read of the next block is started before the current one is processed),
// results written back to the other half of the buffer. Configuration 5 WT + 1 PHT +
// 2 MHT.
// Every output word in memory is compared with the expected value. The run reports the
// cycles, TLB misses and prefetches of each configuration; the sizes are this
// testbench's own, chosen so that the page footprint exceeds the L1 TLB and loads the
// L2 TLB sets unevenly, so that entries are replaced and missed again.
module tb_svm_workloads;
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

  axi_mem_model #(.LATENCY(20)) mem (.clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(m_ar_valid), .ar_ready_o(m_ar_ready), .ar_i(m_ar),
    .aw_valid_i(m_aw_valid), .aw_ready_o(m_aw_ready), .aw_i(m_aw),
    .w_valid_i(m_w_valid), .w_ready_o(m_w_ready), .w_i(m_w),
    .r_valid_o(m_r_valid), .r_ready_i(m_r_ready), .r_o(m_r),
    .b_valid_o(m_b_valid), .b_ready_i(m_b_ready), .b_o(m_b));

  // ---------------------------------------------------------------- L1 memory
  logic [63:0] l1 [32768];
  always @(negedge clk) begin
    l1w_gnt = ($urandom % 8) != 0;
    l1r_gnt = ($urandom % 8) != 0;
  end
  always @(posedge clk) begin
    if (l1w_req && l1w_gnt) l1[l1w_addr[17:3]] <= l1w_data;
    if (l1r_req && l1r_gnt) l1r_data <= l1[l1r_addr[17:3]];
  end

  function automatic addr_t v2p(input addr_t va);
    return {va[31:12] ^ 20'h1b3c5, va[11:0]};
  endfunction

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 30) $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- statistics
  int st_core_miss = 0, st_dma_fail = 0, st_pf_hit = 0, st_pf_miss = 0, st_walks = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.nw_r_valid[0] && dut.nw_r_ready[0] && dut.nw_r[0].last && dut.nw_r[0].resp != RESP_OKAY) st_dma_fail++;
    if (dut.nw_b_valid[0] && dut.nw_b_ready[0] && dut.nw_b[0].resp != RESP_OKAY) st_dma_fail++;
  end

  // ---------------------------------------------------------------- DMA command helper
  bit done_flag [NPE][8];
  always @(posedge clk) if (rst_n && done_valid) done_flag[done_pe][done_id] = 1'b1;

  task automatic dma_start(input int pe, input addr_t va, input int loc, input int len,
                           input bit wr, output int id);
    @(negedge clk);
    cmd_valid[pe] = 1'b1;
    cmd[pe] = '{ext_addr: va, loc_addr: 18'(loc), len: 17'(len), write: wr};
    forever begin
      #1;
      if (cmd_ready[pe]) begin id = int'(cmd_id); break; end
      @(negedge clk);
    end
    @(negedge clk);
    cmd_valid[pe] = 1'b0;
  endtask

  task automatic dma_wait(input int pe, input int id);
    while (!done_flag[pe][id]) @(posedge clk);
    done_flag[pe][id] = 1'b0;
  endtask

  // ---------------------------------------------------------------- core port (shared)
  semaphore core_lock = new(1);
  task automatic core_read(input addr_t a, input bit pf, output logic [1:0] resp,
                           output logic [63:0] d0);
    core_lock.get(1);
    @(negedge clk);
    c_ar_valid = 1; c_ar = '{id: 4'h1, addr: a, len: 8'd0, user: pf};
    do @(posedge clk); while (!c_ar_ready);
    @(negedge clk); c_ar_valid = 0;
    while (!c_r_valid) @(negedge clk);
    resp = c_r.resp; d0 = c_r.data;
    @(posedge clk);
    core_lock.put(1);
  endtask

  // ---------------------------------------------------------------- miss handling
  addr_t swq [$];                 // software miss queue (page numbers << 12)
  bit    mapped_gen [bit [19:0]]; // pages handled since the last request for them
  bit    busy_page [bit [19:0]];  // pages some MHT is working on
  int    set_ctr [32];
  semaphore cfg_lock = new(1), reg_lock = new(1);
  bit    sw_run;

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

  task automatic mht(input int me);
    while (sw_run) begin
      addr_t fa; bit from_dma;
      fa = '0; from_dma = 0;
      reg_lock.get(1);
      @(negedge clk);
      reg_req = 1; reg_we = 0; #1 fa = reg_rdata;
      @(negedge clk); reg_req = 0;
      reg_lock.put(1);
      if (fa != 0) from_dma = 1;
      else if (swq.size() > 0) fa = swq.pop_front();
      if (fa == 0) begin repeat (4) @(negedge clk); continue; end
      if (!from_dma && busy_page.exists(fa[31:12])) continue;   // another MHT has it
      busy_page[fa[31:12]] = 1;
      st_walks++;
      repeat (60) @(negedge clk);                                 // page-table walk
      map_page(fa);
      if (from_dma) begin
        reg_lock.get(1);
        @(negedge clk);
        reg_req = 1; reg_we = 1; reg_wdata = fa;
        @(negedge clk); reg_req = 0; reg_we = 0;
        reg_lock.put(1);
      end
      mapped_gen[fa[31:12]] = 1;
      busy_page.delete(fa[31:12]);
    end
  endtask

  // load with miss handling: queue the page, wait until it is handled, retry
  task automatic wt_load(input addr_t a, output logic [63:0] d);
    logic [1:0] resp;
    forever begin
      core_read(a, 1'b0, resp, d);
      if (resp == RESP_OKAY) break;
      st_core_miss++;
      mapped_gen.delete(a[31:12]);
      swq.push_back({a[31:12], 12'h0});
      while (!mapped_gen.exists(a[31:12])) @(negedge clk);
    end
  endtask

  task automatic prefetch(input addr_t a);
    logic [1:0] resp; logic [63:0] d;
    core_read(a, 1'b1, resp, d);
    if (resp == RESP_OKAY) st_pf_hit++;
    else begin
      st_pf_miss++;
      if (!busy_page.exists(a[31:12])) swq.push_back({a[31:12], 12'h0});
    end
  endtask

  // ---------------------------------------------------------------- pointer chasing
  localparam int    NV = 64;
  localparam addr_t VTX = 32'h6000_0000, SUCC = 32'h6800_0000, PAY = 32'h7000_0000,
                    OUT = 32'h7800_0000;
  localparam int    PAYB = 1024;
  function automatic addr_t vtx_va(input int v);  return VTX + 32'(v) * 32'h1140; endfunction
  function automatic addr_t pay_va(input int v);  return PAY + 32'(v) * 32'h0a00; endfunction
  function automatic int    succ(input int v, input int k);
    return (k == 0) ? (v * 5 + 1) % NV : (v * 7 + 3) % NV;
  endfunction
  function automatic logic [63:0] pay_word(input int v, input int i);
    return {32'(v) * 32'h0101_0101, 32'(i) ^ 32'hc0ffee00};
  endfunction

  task automatic mem_write(input addr_t va, input logic [63:0] d);
    mem.mem[v2p({va[31:3], 3'b000})] = d;
  endtask

  task automatic build_graph();
    for (int v = 0; v < NV; v++) begin
      mem_write(vtx_va(v),     {32'd2, SUCC + 32'(v) * 32'h40});
      mem_write(vtx_va(v) + 8, {pay_va(v), 32'h0});
      mem_write(SUCC + 32'(v) * 32'h40,     {32'h0, vtx_va(succ(v, 0))});
      mem_write(SUCC + 32'(v) * 32'h40 + 8, {32'h0, vtx_va(succ(v, 1))});
      for (int i = 0; i < PAYB / 8; i++) mem_write(pay_va(v) + 32'(i * 8), pay_word(v, i));
    end
  endtask

  int pc_next;
  task automatic pc_worker(input int pe, input int compute);
    int v, id, buf_loc, nsucc;
    logic [63:0] h0, h1, sp;
    addr_t succ_list, pay, s_vtx;
    buf_loc = pe * 16'h2000;
    forever begin
      if (pc_next >= NV) break;
      v = pc_next; pc_next++;
      wt_load(vtx_va(v), h0);                     // header: successor count, list pointer
      wt_load(vtx_va(v) + 8, h1);                 // payload pointer
      nsucc = int'(h0[63:32]); succ_list = h0[31:0]; pay = h1[63:32];
      dma_start(pe, pay, buf_loc, PAYB, 1'b0, id);
      dma_wait(pe, id);
      repeat (compute) @(negedge clk);
      for (int i = 0; i < PAYB / 8; i++) l1[buf_loc / 8 + i] = ~l1[buf_loc / 8 + i];
      for (int k = 0; k < nsucc; k++) begin
        int s;
        wt_load(succ_list + 32'(k * 8), sp);
        s_vtx = sp[31:0];
        s = int'((s_vtx - VTX) / 32'h1140);
        dma_start(pe, OUT + 32'(s) * 32'h800 + 32'(k) * 32'h400, buf_loc, PAYB, 1'b1, id);
        dma_wait(pe, id);
      end
    end
  endtask

  int pht_pos;
  task automatic pc_prefetcher(input int ahead);
    pht_pos = 0;
    while (pc_next < NV) begin
      int v;
      v = pc_next + ahead;
      if (v > pht_pos && v < NV) begin
        prefetch(vtx_va(v)); prefetch(pay_va(v)); prefetch(pay_va(v) + PAYB - 8);
        pht_pos = v;
      end else @(negedge clk);
    end
  endtask

  task automatic pc_check();
    for (int s = 0; s < NV; s++)
      for (int k = 0; k < 2; k++) begin
        int v; bit ok;
        v = -1;
        for (int u = 0; u < NV; u++) if (succ(u, k) == s) v = u;
        ok = 1;
        for (int i = 0; i < PAYB / 8; i++) begin
          addr_t pa; logic [63:0] got;
          pa = v2p(OUT + 32'(s) * 32'h800 + 32'(k) * 32'h400 + 32'(i * 8));
          got = mem.mem.exists(pa) ? mem.mem[pa] : 64'hx;
          if (got !== ~pay_word(v, i)) ok = 0;
        end
        check(ok, $sformatf("pointer chasing: slot %0d of vertex %0d holds the payload of vertex %0d", k, s, v));
      end
  endtask

  // ---------------------------------------------------------------- stream processing
  localparam int    NB = 24, BLK = 8192;
  localparam addr_t SIN = 32'h9000_0000, SOUT = 32'h9000_0000 + 32'(NB * BLK);
  function automatic logic [63:0] sp_word(input int i);
    return {32'(i) * 32'h9e37_79b9, 32'(i)};
  endfunction
  int sp_next;
  task automatic sp_worker(input int pe, input int compute);
    int b, nb, id_rd, id_nrd, id_wr, cur, loc [2];
    loc[0] = pe * 32'h6000; loc[1] = pe * 32'h6000 + BLK;
    id_wr = -1;
    if (sp_next >= NB) return;
    b = sp_next; sp_next++;
    dma_start(pe, SIN + 32'(b * BLK), loc[0], BLK, 1'b0, id_rd);
    cur = 0;
    while (b >= 0) begin
      nb = -1;
      if (sp_next < NB) begin nb = sp_next; sp_next++; end
      dma_wait(pe, id_rd);
      if (id_wr >= 0) dma_wait(pe, id_wr);          // the other buffer is free again
      if (nb >= 0) dma_start(pe, SIN + 32'(nb * BLK), loc[1 - cur], BLK, 1'b0, id_nrd);
      repeat (compute) @(negedge clk);
      for (int i = 0; i < BLK / 8; i++) l1[loc[cur] / 8 + i] = ~l1[loc[cur] / 8 + i];
      dma_start(pe, SOUT + 32'(b * BLK), loc[cur], BLK, 1'b1, id_wr);
      b = nb; id_rd = id_nrd; cur = 1 - cur;
    end
    if (id_wr >= 0) dma_wait(pe, id_wr);
  endtask

  task automatic sp_prefetcher(input int ahead);
    int last;
    last = -1;
    while (sp_next < NB) begin
      int b;
      b = sp_next + ahead;
      if (b > last && b < NB) begin
        for (int p = 0; p < BLK; p += 4096) begin
          prefetch(SIN + 32'(b * BLK + p)); prefetch(SOUT + 32'(b * BLK + p));
        end
        last = b;
      end else @(negedge clk);
    end
  endtask

  task automatic sp_check();
    for (int b = 0; b < NB; b++) begin
      bit ok; ok = 1;
      for (int i = 0; i < BLK / 8; i++) begin
        addr_t pa; logic [63:0] got;
        pa = v2p(SOUT + 32'(b * BLK + i * 8));
        got = mem.mem.exists(pa) ? mem.mem[pa] : 64'hx;
        if (got !== ~sp_word(b * BLK / 8 + i)) ok = 0;
      end
      check(ok, $sformatf("stream processing: output block %0d", b));
    end
  endtask

  // ---------------------------------------------------------------- runs
  task automatic restart();
    rst_n = 0;
    swq.delete(); mapped_gen.delete(); busy_page.delete();
    foreach (set_ctr[s]) set_ctr[s] = 0;
    foreach (done_flag[p, i]) done_flag[p][i] = 0;
    st_core_miss = 0; st_dma_fail = 0; st_pf_hit = 0; st_pf_miss = 0; st_walks = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
  endtask

  task automatic report(input string name, input int cycles);
    $display("%-34s cycles=%0d core_misses=%0d dma_failed_bursts=%0d prefetch_hit=%0d prefetch_miss=%0d walks=%0d",
             name, cycles, st_core_miss, st_dma_fail, st_pf_hit, st_pf_miss, st_walks);
  endtask

  initial begin
    int t0, n_wt; bit pht;
    cmd_valid = '0; foreach (cmd[p]) cmd[p] = '0;
    c_ar_valid = 0; c_aw_valid = 0; c_w_valid = 0; c_r_ready = 1; c_b_ready = 1;
    c_ar = '0; c_aw = '0; c_w = '0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    reg_req = 0; reg_we = 0; reg_wdata = 0;
    for (int i = 0; i < 32768; i++) l1[i] = '0;
    build_graph();
    for (int i = 0; i < NB * BLK / 8; i++) mem_write(SIN + 32'(i * 8), sp_word(i));

    // pointer chasing, 6 WT + 2 MHT, then 5 WT + 1 PHT + 2 MHT
    for (int cfg = 0; cfg < 2; cfg++) begin
      pht = (cfg == 1); n_wt = pht ? 5 : 6;
      restart();
      foreach (mem.mem[a]) if (a >= v2p(OUT) && a < v2p(OUT) + 32'h20000) mem.mem.delete(a);
      pc_next = 0; sw_run = 1;
      t0 = $time / 10;
      fork
        mht(0);
        mht(1);
        begin
          for (int p = 0; p < n_wt; p++) begin
            automatic int pe = p;
            fork pc_worker(pe, 200); join_none
          end
          if (pht) fork pc_prefetcher(2); join_none
          wait fork;
          sw_run = 0;
        end
      join
      report(pht ? "PC 5 WT + 1 PHT + 2 MHT" : "PC 6 WT + 2 MHT", $time / 10 - t0);
      check(st_core_miss > 0 && st_dma_fail > 0, "pointer chasing saw core and DMA misses");
      if (pht) check(st_pf_hit > 0 && st_pf_miss > 0, "prefetches hit and missed");
      pc_check();
    end

    // stream processing, 5 WT + 1 PHT + 2 MHT
    restart();
    sp_next = 0; sw_run = 1;
    t0 = $time / 10;
    fork
      mht(0);
      mht(1);
      begin
        for (int p = 0; p < 5; p++) begin
          automatic int pe = p;
          fork sp_worker(pe, 300); join_none
        end
        fork sp_prefetcher(1); join_none
        wait fork;
        sw_run = 0;
      end
    join
    report("SP 5 WT + 1 PHT + 2 MHT", $time / 10 - t0);
    check(st_dma_fail > 0, "stream processing saw DMA misses");
    check(st_pf_hit + st_pf_miss > 0, "stream prefetcher ran");
    sp_check();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
