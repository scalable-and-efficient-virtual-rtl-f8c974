// tb_vdma: self-checking test of the miss-tolerant DMA engine.
// The DMA drives a hybrid IOMMU in front of a behavioural memory, so bursts to pages
// that are not in the TLB come back with an error. A software miss handler is
// modelled in the testbench: it polls the DMA failed-address register, writes a
// translation for that page into the L1 TLB and writes the address back. Several PEs
// start read and write transfers that cross pages, some of them unmapped, at once.
// Checked: every transfer completes with a done event for the right PE and ID; L1
// and memory contents equal the expected data; no burst crosses a 4 KiB page or
// exceeds 2 KiB; every burst that got an error is issued again later; apart from the
// one burst already waiting in the issue register, no new burst is issued between a
// failure and the point where all failed bursts have been reissued; the
// register reads 0 once everything is handled.
module tb_vdma;
  import svm_pkg::*;
  localparam int NPE = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NPE-1:0] cmd_valid, cmd_ready;
  dma_cmd_t cmd [NPE];
  logic [2:0] cmd_id, done_id;
  logic [2:0] done_pe;
  logic done_valid, reg_req, reg_we;
  logic [31:0] reg_wdata, reg_rdata;
  logic ar_valid, ar_ready, aw_valid, aw_ready, w_valid, w_ready, r_valid, r_ready, b_valid, b_ready;
  ax_t ar, aw; w_t w; r_t r; b_t b;
  logic m_ar_valid, m_ar_ready, m_aw_valid, m_aw_ready, m_w_valid, m_w_ready;
  logic m_r_valid, m_r_ready, m_b_valid, m_b_ready;
  ax_t m_ar, m_aw; w_t m_w; r_t m_r; b_t m_b;
  logic l1w_req, l1w_gnt, l1r_req, l1r_gnt;
  logic [17:0] l1w_addr, l1r_addr;
  logic [63:0] l1w_data, l1r_data;
  logic cfg_we; logic [9:0] cfg_addr; logic [31:0] cfg_wdata;
  int checks = 0, failures = 0;

  vdma dut (.clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready),
    .cmd_i(cmd), .cmd_id_o(cmd_id), .done_valid_o(done_valid), .done_pe_o(done_pe),
    .done_id_o(done_id), .reg_req_i(reg_req), .reg_we_i(reg_we), .reg_wdata_i(reg_wdata),
    .reg_rdata_o(reg_rdata),
    .ar_valid_o(ar_valid), .ar_ready_i(ar_ready), .ar_o(ar),
    .aw_valid_o(aw_valid), .aw_ready_i(aw_ready), .aw_o(aw),
    .w_valid_o(w_valid), .w_ready_i(w_ready), .w_o(w),
    .r_valid_i(r_valid), .r_ready_o(r_ready), .r_i(r),
    .b_valid_i(b_valid), .b_ready_o(b_ready), .b_i(b),
    .l1w_req_o(l1w_req), .l1w_gnt_i(l1w_gnt), .l1w_addr_o(l1w_addr), .l1w_data_o(l1w_data),
    .l1r_req_o(l1r_req), .l1r_gnt_i(l1r_gnt), .l1r_addr_o(l1r_addr), .l1r_data_i(l1r_data));

  hybrid_iommu iommu (.clk_i(clk), .rst_ni(rst_n),
    .s_ar_valid_i(ar_valid), .s_ar_ready_o(ar_ready), .s_ar_i(ar),
    .s_aw_valid_i(aw_valid), .s_aw_ready_o(aw_ready), .s_aw_i(aw),
    .s_w_valid_i(w_valid), .s_w_ready_o(w_ready), .s_w_i(w),
    .s_r_valid_o(r_valid), .s_r_ready_i(r_ready), .s_r_o(r),
    .s_b_valid_o(b_valid), .s_b_ready_i(b_ready), .s_b_o(b),
    .m_ar_valid_o(m_ar_valid), .m_ar_ready_i(m_ar_ready), .m_ar_o(m_ar),
    .m_aw_valid_o(m_aw_valid), .m_aw_ready_i(m_aw_ready), .m_aw_o(m_aw),
    .m_w_valid_o(m_w_valid), .m_w_ready_i(m_w_ready), .m_w_o(m_w),
    .m_r_valid_i(m_r_valid), .m_r_ready_o(m_r_ready), .m_r_i(m_r),
    .m_b_valid_i(m_b_valid), .m_b_ready_o(m_b_ready), .m_b_i(m_b),
    .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata));

  axi_mem_model #(.LATENCY(5)) mem (.clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(m_ar_valid), .ar_ready_o(m_ar_ready), .ar_i(m_ar),
    .aw_valid_i(m_aw_valid), .aw_ready_o(m_aw_ready), .aw_i(m_aw),
    .w_valid_i(m_w_valid), .w_ready_o(m_w_ready), .w_i(m_w),
    .r_valid_o(m_r_valid), .r_ready_i(m_r_ready), .r_o(m_r),
    .b_valid_o(m_b_valid), .b_ready_i(m_b_ready), .b_o(m_b));

  // ---------------------------------------------------------------- L1 model
  logic [63:0] l1 [32768];
  always @(negedge clk) begin
    l1w_gnt = ($urandom % 8) != 0;
    l1r_gnt = ($urandom % 8) != 0;
  end
  always @(posedge clk) begin
    if (l1w_req && l1w_gnt) l1[l1w_addr[17:3]] <= l1w_data;
    if (l1r_req && l1r_gnt) l1r_data <= l1[l1r_addr[17:3]];
  end

  // VA -> PA mapping used by the software miss handler: PA page = VA page ^ 0x3c000
  function automatic addr_t v2p(input addr_t va);
    return {va[31:12] ^ 20'h3c000, va[11:0]};
  endfunction

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 30) $display("FAIL %s", msg); end
  endtask

  // ---------------------------------------------------------------- AXI monitor
  addr_t err_addrs [$];
  int n_bursts = 0, n_err = 0, n_reissued = 0, n_new_during_fail = 0;
  bit fail_pending = 0;
  bit staged_ok = 0;   // the one burst already waiting in the issue register may still go
  addr_t ar_addr_by_id [8], aw_addr_by_id [8];
  logic [7:0] dummy;
  always @(posedge clk) if (rst_n) begin
    if (ar_valid && ar_ready) begin
      n_bursts++;
      check(ar.addr[31:12] == (ar.addr + 32'(ar.len) * 8 + 7) >> 12, "read burst inside one page");
      check(int'(ar.len) + 1 <= 256, "read burst <= 2 KiB");
      ar_addr_by_id[ar.id[2:0]] = ar.addr;
      if (fail_pending && !(ar.addr inside {err_addrs})) begin
        if (staged_ok) staged_ok = 0; else n_new_during_fail++;
      end
      if (ar.addr inside {err_addrs}) begin
        n_reissued++;
        foreach (err_addrs[k]) if (err_addrs[k] == ar.addr) begin err_addrs.delete(k); break; end
      end
    end
    if (aw_valid && aw_ready) begin
      n_bursts++;
      check(aw.addr[31:12] == (aw.addr + 32'(aw.len) * 8 + 7) >> 12, "write burst inside one page");
      aw_addr_by_id[aw.id[2:0]] = aw.addr;
      if (fail_pending && !(aw.addr inside {err_addrs})) begin
        if (staged_ok) staged_ok = 0; else n_new_during_fail++;
      end
      if (aw.addr inside {err_addrs}) begin
        n_reissued++;
        foreach (err_addrs[k]) if (err_addrs[k] == aw.addr) begin err_addrs.delete(k); break; end
      end
    end
    if (r_valid && r_ready && r.last && r.resp != RESP_OKAY) begin
      n_err++; err_addrs.push_back(ar_addr_by_id[r.id[2:0]]);
    end
    if (b_valid && b_ready && b.resp != RESP_OKAY) begin
      n_err++; err_addrs.push_back(aw_addr_by_id[b.id[2:0]]);
    end
    if (!fail_pending && err_addrs.size() != 0) staged_ok = 1;
    if (err_addrs.size() == 0) staged_ok = 0;
    fail_pending = (err_addrs.size() != 0);
  end

  // ---------------------------------------------------------------- miss handler
  int n_handled = 0, tlb_slot = 0;
  bit sw_run = 1;
  initial begin
    reg_req = 0; reg_we = 0; reg_wdata = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    wait (rst_n);
    while (sw_run) begin
      addr_t fa;
      repeat (4) @(negedge clk);
      reg_req = 1; reg_we = 0; #1 fa = reg_rdata;
      @(negedge clk); reg_req = 0;
      if (fa != 0) begin
        repeat (20) @(negedge clk);   // page-table walk latency
        cfg_we = 1; cfg_addr = {1'b0, 8'(tlb_slot), 1'b1}; cfg_wdata = {12'h0, v2p(fa) >> 12};
        @(negedge clk);
        cfg_addr = {1'b0, 8'(tlb_slot), 1'b0}; cfg_wdata = {1'b1, 11'h0, fa[31:12]};
        @(negedge clk); cfg_we = 0;
        tlb_slot = (tlb_slot + 1) % 32;
        reg_req = 1; reg_we = 1; reg_wdata = fa;
        @(negedge clk); reg_req = 0; reg_we = 0;
        n_handled++;
      end
    end
  end

  // ---------------------------------------------------------------- transfers
  typedef struct { int pe; addr_t va; int loc; int len; bit wr; } xfer_t;
  xfer_t xf [4];
  int    xid [4];
  bit    done_seen [4];
  always @(posedge clk) if (rst_n && done_valid) begin
    bit found = 0;
    foreach (xf[i]) if (xid[i] == int'(done_id) && !done_seen[i] && xid[i] >= 0) begin
      check(int'(done_pe) == xf[i].pe, "done event PE");
      done_seen[i] = 1; found = 1;
    end
    check(found, "done event for a started transfer");
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ncyc;
    cmd_valid = '0;
    foreach (cmd[p]) cmd[p] = '0;
    for (int i = 0; i < 32768; i++) l1[i] = {32'h11c0_0000 + 32'(i), 32'(i) * 7};
    xf[0] = '{pe: 0, va: 32'h2468_0ef0, loc: 16'h1000, len: 6144, wr: 0};  // 3 pages
    xf[1] = '{pe: 3, va: 32'h3000_0800, loc: 16'h8000, len: 3072, wr: 1};
    xf[2] = '{pe: 5, va: 32'h2470_0000, loc: 16'h4000, len: 512,  wr: 0};
    xf[3] = '{pe: 7, va: 32'h3100_0ff8, loc: 18'h2c000, len: 4104, wr: 1};  // crosses 2 pages
    foreach (xid[i]) begin xid[i] = -1; done_seen[i] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    // pre-map one page of transfer 0 so some bursts hit and some miss
    @(negedge clk); cfg_we = 1; cfg_addr = {1'b1, 8'(8'h80 >> 0), 1'b1};
    cfg_addr = {1'b1, 5'h01, 3'h2, 1'b1}; cfg_wdata = {12'h0, v2p(32'h2468_1000) >> 12};
    @(negedge clk); cfg_addr = {1'b1, 5'h01, 3'h2, 1'b0}; cfg_wdata = {1'b1, 11'h0, 20'h24681};
    @(negedge clk); cfg_we = 0;
    // all four PEs post their command in the same cycle
    @(negedge clk);
    foreach (xf[i]) begin
      cmd_valid[xf[i].pe] = 1;
      cmd[xf[i].pe] = '{ext_addr: xf[i].va, loc_addr: 18'(xf[i].loc), len: 17'(xf[i].len), write: xf[i].wr};
    end
    ncyc = 0;
    while (cmd_valid != 0 && ncyc < 100) begin
      #1;
      foreach (xf[i]) if (cmd_valid[xf[i].pe] && cmd_ready[xf[i].pe]) xid[i] = int'(cmd_id);
      @(negedge clk);
      foreach (xf[i]) if (xid[i] >= 0) cmd_valid[xf[i].pe] = 0;
      ncyc++;
    end
    foreach (xid[i]) check(xid[i] >= 0, "command accepted");
    // wait for completion
    ncyc = 0;
    while (!(done_seen[0] && done_seen[1] && done_seen[2] && done_seen[3]) && ncyc < 100000) begin
      @(negedge clk); ncyc++;
    end
    foreach (done_seen[i]) check(done_seen[i], $sformatf("transfer %0d completed", i));
    repeat (10) @(negedge clk);
    sw_run = 0;
    // data
    foreach (xf[i]) begin
      for (int o = 0; o < xf[i].len; o += 8) begin
        addr_t pa; logic [63:0] exp, got;
        pa = v2p(xf[i].va + 32'(o));
        if (!xf[i].wr) begin
          exp = {pa, ~pa}; got = l1[(xf[i].loc + o) / 8];
        end else begin
          exp = {32'h11c0_0000 + 32'((xf[i].loc + o) / 8), 32'((xf[i].loc + o) / 8) * 7};
          got = mem.mem.exists(pa) ? mem.mem[pa] : 64'h0;
        end
        check(got == exp, $sformatf("data xfer %0d offset %0d: %h vs %h", i, o, got, exp));
      end
    end
    check(n_err > 0, "some bursts missed in the TLB");
    check(n_handled > 0, "miss handler ran");
    check(n_reissued == n_err, $sformatf("every failed burst reissued (%0d/%0d)", n_reissued, n_err));
    check(n_new_during_fail == 0, "no new burst while failures pending");
    reg_req = 1; reg_we = 0; #1;
    check(reg_rdata == 0, "no failed address left");
    reg_req = 0;
    $display("bursts=%0d errors=%0d reissued=%0d handled=%0d", n_bursts, n_err, n_reissued, n_handled);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
