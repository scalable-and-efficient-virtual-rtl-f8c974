// tb_hybrid_iommu: self-checking test of the hybrid IOMMU against a behavioural memory.
// Software-style configuration writes set up one L1 TLB entry and one L2 TLB entry.
// Then reads and writes are sent that hit in L1, hit in L2, miss, and prefetch (AXI
// user bit) with hit and with miss. Checked: translated physical addresses and data
// seen by memory, OKAY/SLVERR responses with the right number of read beats, that
// dropped and prefetch transactions never reach memory, that an L1 hit is forwarded in
// the same cycle it arrives, and that an L2 hit is forwarded within 6 cycles.
module tb_hybrid_iommu;
  import svm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_ar_valid, s_ar_ready, s_aw_valid, s_aw_ready, s_w_valid, s_w_ready;
  logic s_r_valid, s_r_ready, s_b_valid, s_b_ready;
  ax_t  s_ar, s_aw; w_t s_w; r_t s_r; b_t s_b;
  logic m_ar_valid, m_ar_ready, m_aw_valid, m_aw_ready, m_w_valid, m_w_ready;
  logic m_r_valid, m_r_ready, m_b_valid, m_b_ready;
  ax_t  m_ar, m_aw; w_t m_w; r_t m_r; b_t m_b;
  logic cfg_we; logic [9:0] cfg_addr; logic [31:0] cfg_wdata;
  int checks = 0, failures = 0;

  hybrid_iommu dut (.clk_i(clk), .rst_ni(rst_n),
    .s_ar_valid_i(s_ar_valid), .s_ar_ready_o(s_ar_ready), .s_ar_i(s_ar),
    .s_aw_valid_i(s_aw_valid), .s_aw_ready_o(s_aw_ready), .s_aw_i(s_aw),
    .s_w_valid_i(s_w_valid), .s_w_ready_o(s_w_ready), .s_w_i(s_w),
    .s_r_valid_o(s_r_valid), .s_r_ready_i(s_r_ready), .s_r_o(s_r),
    .s_b_valid_o(s_b_valid), .s_b_ready_i(s_b_ready), .s_b_o(s_b),
    .m_ar_valid_o(m_ar_valid), .m_ar_ready_i(m_ar_ready), .m_ar_o(m_ar),
    .m_aw_valid_o(m_aw_valid), .m_aw_ready_i(m_aw_ready), .m_aw_o(m_aw),
    .m_w_valid_o(m_w_valid), .m_w_ready_i(m_w_ready), .m_w_o(m_w),
    .m_r_valid_i(m_r_valid), .m_r_ready_o(m_r_ready), .m_r_i(m_r),
    .m_b_valid_i(m_b_valid), .m_b_ready_o(m_b_ready), .m_b_i(m_b),
    .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata));

  axi_mem_model #(.LATENCY(3)) mem (.clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(m_ar_valid), .ar_ready_o(m_ar_ready), .ar_i(m_ar),
    .aw_valid_i(m_aw_valid), .aw_ready_o(m_aw_ready), .aw_i(m_aw),
    .w_valid_i(m_w_valid), .w_ready_o(m_w_ready), .w_i(m_w),
    .r_valid_o(m_r_valid), .r_ready_i(m_r_ready), .r_o(m_r),
    .b_valid_o(m_b_valid), .b_ready_i(m_b_ready), .b_o(m_b));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic cfg(input bit l2, input int idx, input bit word, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = {l2, 8'(idx), word}; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // cycle counter and first cycle of the downstream address valid
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic do_read(input addr_t a, input int len, input bit pf, output logic [1:0] resp,
                         output int beats, output logic [63:0] data [], output int fwd_delay);
    int t0, t_fwd;
    bit seen_fwd;
    data = new[len + 1];
    @(negedge clk);
    s_ar_valid = 1; s_ar = '{id: 4'h5, addr: a, len: 8'(len), user: pf};
    #1 t0 = cyc; seen_fwd = 0; t_fwd = 0;
    if (m_ar_valid) begin seen_fwd = 1; t_fwd = cyc; end
    do begin @(posedge clk); end while (!s_ar_ready);
    beats = 0; resp = RESP_OKAY;
    while (1) begin
      @(negedge clk);
      s_ar_valid = 0;
      if (!seen_fwd && m_ar_valid) begin seen_fwd = 1; t_fwd = cyc; end
      if (s_r_valid) begin
        check(s_r.id == 4'h5, "read id");
        if (beats <= len) data[beats] = s_r.data;
        if (s_r.resp != RESP_OKAY) resp = s_r.resp;
        beats++;
        if (s_r.last) begin @(posedge clk); break; end
      end
      if (cyc - t0 > 200) begin check(0, "read timeout"); break; end
    end
    fwd_delay = seen_fwd ? t_fwd - t0 : -1;
  endtask

  task automatic do_write(input addr_t a, input int len, input bit pf, input logic [63:0] seed,
                          output logic [1:0] resp);
    int t0 = cyc;
    @(negedge clk);
    s_aw_valid = 1; s_aw = '{id: 4'h3, addr: a, len: 8'(len), user: pf};
    do @(posedge clk); while (!s_aw_ready);
    @(negedge clk); s_aw_valid = 0;
    for (int b = 0; b <= len; b++) begin
      s_w_valid = 1; s_w = '{data: seed + 64'(b), strb: '1, last: (b == len)};
      do @(posedge clk); while (!s_w_ready);
      @(negedge clk);
    end
    s_w_valid = 0;
    while (!s_b_valid && cyc - t0 < 200) @(negedge clk);
    check(s_b_valid, "write response");
    check(s_b.id == 4'h3, "write id");
    resp = s_b.resp;
    @(posedge clk); @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam addr_t VA_L1 = 32'h2468_0000, PA_L1 = 32'h1357_9000;
  localparam addr_t VA_L2 = 32'h2469_3000, PA_L2 = 32'h0abc_d000;
  localparam addr_t VA_MISS = 32'h2497_1000;

  initial begin
    logic [1:0] resp; int beats, fd, nar, naw; logic [63:0] d [];
    s_ar_valid = 0; s_aw_valid = 0; s_w_valid = 0; s_r_ready = 1; s_b_ready = 1;
    s_ar = '0; s_aw = '0; s_w = '0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // L1 entry 7 and L2 entry set (VPN mod 32) way 5, PPN word first, then VPN+valid
    cfg(0, 7, 1, {12'h0, PA_L1[31:12]});
    cfg(0, 7, 0, {1'b1, 11'h0, VA_L1[31:12]});
    cfg(1, int'(VA_L2[16:12]) * 8 + 5, 1, {12'h0, PA_L2[31:12]});
    cfg(1, int'(VA_L2[16:12]) * 8 + 5, 0, {1'b1, 11'h0, VA_L2[31:12]});

    // L1 hit read: forwarded in the same cycle
    nar = mem.n_ar;
    do_read(VA_L1 + 32'h40, 3, 0, resp, beats, d, fd);
    check(resp == RESP_OKAY && beats == 4, "L1 hit read response");
    check(fd == 0, $sformatf("L1 hit forwarded same cycle (delay %0d)", fd));
    check(mem.last_ar.addr == PA_L1 + 32'h40, "L1 hit physical address");
    for (int b = 0; b < 4; b++) begin
      addr_t pa;
      pa = PA_L1 + 32'h40 + 32'(b * 8);
      check(d[b] == {pa, ~pa}, "L1 hit read data");
    end
    check(mem.n_ar == nar + 1, "L1 hit reached memory");

    // L2 hit read: forwarded within 6 cycles
    do_read(VA_L2 + 32'h800, 0, 0, resp, beats, d, fd);
    check(resp == RESP_OKAY && beats == 1, "L2 hit read response");
    check(fd >= 1 && fd <= 5, $sformatf("L2 hit forwarded within 6 cycles (delay %0d)", fd));
    check(mem.last_ar.addr == PA_L2 + 32'h800, "L2 hit physical address");
    check(d[0] == {PA_L2 + 32'h800, ~(PA_L2 + 32'h800)}, "L2 hit read data");

    // miss read: SLVERR on every beat, dropped
    nar = mem.n_ar;
    do_read(VA_MISS, 5, 0, resp, beats, d, fd);
    check(resp == RESP_SLVERR && beats == 6, "miss read answered with 6 error beats");
    check(mem.n_ar == nar && fd == -1, "miss read dropped");

    // prefetch hit (L1 and L2): OKAY, not forwarded
    do_read(VA_L1, 0, 1, resp, beats, d, fd);
    check(resp == RESP_OKAY && beats == 1, "prefetch L1 hit OKAY");
    do_read(VA_L2, 0, 1, resp, beats, d, fd);
    check(resp == RESP_OKAY && beats == 1, "prefetch L2 hit OKAY");
    // prefetch miss: error
    do_read(VA_MISS + 32'h8, 0, 1, resp, beats, d, fd);
    check(resp == RESP_SLVERR, "prefetch miss SLVERR");
    check(mem.n_ar == nar, "prefetches never reach memory");

    // write hit in L1 and L2
    naw = mem.n_aw;
    do_write(VA_L1 + 32'h100, 3, 0, 64'hcafe_0000, resp);
    check(resp == RESP_OKAY, "L1 hit write OKAY");
    for (int b = 0; b < 4; b++)
      check(mem.mem[PA_L1 + 32'h100 + 32'(8*b)] == 64'hcafe_0000 + 64'(b), "L1 hit write data");
    do_write(VA_L2 + 32'h10, 1, 0, 64'hbeef_0000, resp);
    check(resp == RESP_OKAY && mem.mem[PA_L2 + 32'h18] == 64'hbeef_0001, "L2 hit write");
    check(mem.n_aw == naw + 2, "writes reached memory");
    // write miss and prefetch write: W swallowed, nothing reaches memory
    do_write(VA_MISS, 7, 0, 64'h1111, resp);
    check(resp == RESP_SLVERR, "write miss SLVERR");
    do_write(VA_L1 + 32'h200, 0, 1, 64'h2222, resp);
    check(resp == RESP_OKAY, "prefetch write hit OKAY");
    check(!mem.mem.exists(PA_L1 + 32'h200), "prefetch write did not write memory");
    check(mem.n_aw == naw + 2, "dropped writes never reach memory");
    // entry invalidated -> miss
    cfg(0, 7, 0, {1'b0, 11'h0, VA_L1[31:12]});
    do_read(VA_L1, 0, 0, resp, beats, d, fd);
    check(resp == RESP_SLVERR, "invalidated L1 entry misses");
    // a following hit still works after the error
    do_read(VA_L2, 1, 0, resp, beats, d, fd);
    check(resp == RESP_OKAY && beats == 2, "hit after miss");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
