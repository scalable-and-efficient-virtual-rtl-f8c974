// tb_axi_mux2: self-checking test of the two-master AXI multiplexer.
// Both masters run writes followed by read-backs to their own address ranges at the
// same time, through the multiplexer into a behavioural memory. Checked: every
// response returns to the master that issued the request with its own ID, read data
// equals what that master wrote (or the memory's default pattern), and both masters
// make progress (both were granted while the other was also requesting).
module tb_axi_mux2;
  import svm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_ar_valid [2], s_ar_ready [2], s_aw_valid [2], s_aw_ready [2], s_w_valid [2], s_w_ready [2];
  logic s_r_valid [2], s_r_ready [2], s_b_valid [2], s_b_ready [2];
  ax_t s_ar [2], s_aw [2]; w_t s_w [2]; r_t s_r [2]; b_t s_b [2];
  logic m_ar_valid, m_ar_ready, m_aw_valid, m_aw_ready, m_w_valid, m_w_ready;
  logic m_r_valid, m_r_ready, m_b_valid, m_b_ready;
  ax_t m_ar, m_aw; w_t m_w; r_t m_r; b_t m_b;
  int checks = 0, failures = 0;
  int both_req = 0;

  axi_mux2 dut (.clk_i(clk), .rst_ni(rst_n),
    .s_ar_valid_i(s_ar_valid), .s_ar_ready_o(s_ar_ready), .s_ar_i(s_ar),
    .s_aw_valid_i(s_aw_valid), .s_aw_ready_o(s_aw_ready), .s_aw_i(s_aw),
    .s_w_valid_i(s_w_valid), .s_w_ready_o(s_w_ready), .s_w_i(s_w),
    .s_r_valid_o(s_r_valid), .s_r_ready_i(s_r_ready), .s_r_o(s_r),
    .s_b_valid_o(s_b_valid), .s_b_ready_i(s_b_ready), .s_b_o(s_b),
    .m_ar_valid_o(m_ar_valid), .m_ar_ready_i(m_ar_ready), .m_ar_o(m_ar),
    .m_aw_valid_o(m_aw_valid), .m_aw_ready_i(m_aw_ready), .m_aw_o(m_aw),
    .m_w_valid_o(m_w_valid), .m_w_ready_i(m_w_ready), .m_w_o(m_w),
    .m_r_valid_i(m_r_valid), .m_r_ready_o(m_r_ready), .m_r_i(m_r),
    .m_b_valid_i(m_b_valid), .m_b_ready_o(m_b_ready), .m_b_i(m_b));

  axi_mem_model #(.LATENCY(2)) mem (.clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(m_ar_valid), .ar_ready_o(m_ar_ready), .ar_i(m_ar),
    .aw_valid_i(m_aw_valid), .aw_ready_o(m_aw_ready), .aw_i(m_aw),
    .w_valid_i(m_w_valid), .w_ready_o(m_w_ready), .w_i(m_w),
    .r_valid_o(m_r_valid), .r_ready_i(m_r_ready), .r_o(m_r),
    .b_valid_o(m_b_valid), .b_ready_i(m_b_ready), .b_o(m_b));

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  always @(posedge clk) if ((s_ar_valid[0] && s_ar_valid[1]) || (s_aw_valid[0] && s_aw_valid[1])) both_req++;

  task automatic master(input int p);
    for (int t = 0; t < 30; t++) begin
      addr_t a;
      int len;
      logic [63:0] seed;
      a = 32'h1000_0000 * (p + 1) + 32'(t * 256);
      len = $urandom % 8;
      seed = 64'(p) << 48 | 64'(t) << 16;
      // write
      @(negedge clk);
      s_aw_valid[p] = 1; s_aw[p] = '{id: 4'(t % 8), addr: a, len: 8'(len), user: 0};
      do @(posedge clk); while (!s_aw_ready[p]);
      @(negedge clk); s_aw_valid[p] = 0;
      for (int b = 0; b <= len; b++) begin
        s_w_valid[p] = 1; s_w[p] = '{data: seed + 64'(b), strb: '1, last: (b == len)};
        do @(posedge clk); while (!s_w_ready[p]);
        @(negedge clk);
      end
      s_w_valid[p] = 0;
      while (!s_b_valid[p]) @(negedge clk);
      check(s_b[p].id == 4'(t % 8), $sformatf("B id master %0d", p));
      @(negedge clk);
      // read back one beat more than written
      s_ar_valid[p] = 1; s_ar[p] = '{id: 4'((t + 3) % 8), addr: a, len: 8'(len + 1), user: 0};
      do @(posedge clk); while (!s_ar_ready[p]);
      @(negedge clk); s_ar_valid[p] = 0;
      for (int b = 0; b <= len + 1; b++) begin
        while (!s_r_valid[p]) @(negedge clk);
        check(s_r[p].id == 4'((t + 3) % 8), $sformatf("R id master %0d", p));
        if (b <= len) check(s_r[p].data == seed + 64'(b), $sformatf("R data master %0d", p));
        else begin
          addr_t e;
          e = a + 32'(b * 8);
          check(s_r[p].data == {e, ~e}, "R default data");
        end
        check(s_r[p].last == (b == len + 1), "R last");
        @(negedge clk);
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 2; p++) begin
      s_ar_valid[p] = 0; s_aw_valid[p] = 0; s_w_valid[p] = 0; s_r_ready[p] = 1; s_b_ready[p] = 1;
      s_ar[p] = '0; s_aw[p] = '0; s_w[p] = '0;
    end
    repeat (3) @(negedge clk); rst_n = 1;
    fork
      master(0);
      master(1);
    join
    check(both_req > 0, "both masters competed");
    check(mem.n_aw == 60 && mem.n_ar == 60, "all transactions reached memory");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
