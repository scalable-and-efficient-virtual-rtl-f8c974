// tb_rab_l1_tlb: self-checking test of the fully associative L1 TLB.
// Fills random entries through the two-word configuration writes, then looks up
// random page numbers (mostly present ones) and compares hit and physical page with
// a reference copy kept in the testbench. The lookup is combinational, so the result
// is checked in the same cycle the page number is applied (single-cycle translation).
// Also checks invalidation and that reset leaves the TLB empty.
module tb_rab_l1_tlb;
  import svm_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  pn_t  vpn, ppn;
  logic hit, we, word;
  logic [4:0] idx;
  logic [31:0] wdata;
  int checks = 0, failures = 0;

  rab_l1_tlb #(.N_ENTRIES(N)) dut (.clk_i(clk), .rst_ni(rst_n), .lookup_vpn_i(vpn), .hit_o(hit),
    .ppn_o(ppn), .cfg_we_i(we), .cfg_idx_i(idx), .cfg_word_i(word), .cfg_wdata_i(wdata));

  always #5 clk = ~clk;

  logic ref_v [N];
  pn_t  ref_vpn [N], ref_ppn [N];

  task automatic cfg(input int i, input bit w, input logic [31:0] d);
    @(negedge clk); we = 1; idx = 5'(i); word = w; wdata = d;
    @(negedge clk); we = 0;
  endtask

  task automatic check_lookup(input pn_t v);
    bit exp_hit = 0; pn_t exp_ppn = '0;
    for (int i = N - 1; i >= 0; i--) if (ref_v[i] && ref_vpn[i] == v) begin exp_hit = 1; exp_ppn = ref_ppn[i]; end
    vpn = v; #1;
    checks++;
    if (hit !== exp_hit || (exp_hit && ppn !== exp_ppn)) begin
      failures++;
      $display("FAIL vpn=%h hit=%0d exp=%0d ppn=%h exp=%h", v, hit, exp_hit, ppn, exp_ppn);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; idx = 0; word = 0; wdata = 0; vpn = 0;
    for (int i = 0; i < N; i++) begin ref_v[i] = 0; ref_vpn[i] = 0; ref_ppn[i] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    // after reset nothing hits
    for (int k = 0; k < 20; k++) check_lookup(pn_t'($urandom));
    // fill all entries with distinct VPNs
    for (int i = 0; i < N; i++) begin
      ref_vpn[i] = pn_t'(32'h24000 + i * 7 + ($urandom % 5) * 1000);
      ref_ppn[i] = pn_t'($urandom);
      ref_v[i]   = 1;
      cfg(i, 1, {12'h0, ref_ppn[i]});
      cfg(i, 0, {1'b1, 11'h0, ref_vpn[i]});
    end
    for (int k = 0; k < 300; k++) begin
      if ($urandom % 4 != 0) check_lookup(ref_vpn[$urandom % N]);
      else                   check_lookup(pn_t'($urandom));
      @(negedge clk);
    end
    // invalidate some entries and replace others
    for (int k = 0; k < 40; k++) begin
      int i = $urandom % N;
      if ($urandom % 2) begin
        ref_v[i] = 0;
        cfg(i, 0, {1'b0, 11'h0, ref_vpn[i]});
      end else begin
        ref_ppn[i] = pn_t'($urandom);
        ref_vpn[i] = pn_t'(32'h50000 + i);
        ref_v[i] = 1;
        cfg(i, 1, {12'h0, ref_ppn[i]});
        cfg(i, 0, {1'b1, 11'h0, ref_vpn[i]});
      end
      check_lookup(ref_vpn[i]);
      check_lookup(ref_vpn[$urandom % N]);
    end
    // reset clears everything
    rst_n = 0; @(negedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) ref_v[i] = 0;
    for (int k = 0; k < 10; k++) check_lookup(ref_vpn[$urandom % N]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
