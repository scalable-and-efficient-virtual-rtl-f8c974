// tb_rab_l2_tlb: self-checking test of the set-associative L2 TLB.
// Writes entries into chosen ways of chosen sets, then looks up present and absent
// page numbers and compares hit/PPN with a reference table. For each lookup the
// number of cycles from the request cycle to the response cycle (inclusive) is
// measured and compared with 3 + way/2 for a hit in a given way and 6 for a miss;
// the paper bounds an L2 translation at 6 cycles.
module tb_rab_l2_tlb;
  import svm_pkg::*;
  localparam int SETS = 32, WAYS = 8;
  logic clk = 0, rst_n = 0;
  logic req, ready, rvalid, rhit, we, word;
  pn_t  rvpn, rppn;
  logic [7:0] idx;
  logic [31:0] wdata;
  int checks = 0, failures = 0;

  rab_l2_tlb #(.N_SETS(SETS), .N_WAYS(WAYS)) dut (.clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req), .req_ready_o(ready), .req_vpn_i(rvpn), .resp_valid_o(rvalid),
    .resp_hit_o(rhit), .resp_ppn_o(rppn), .cfg_we_i(we), .cfg_idx_i(idx),
    .cfg_word_i(word), .cfg_wdata_i(wdata));

  always #5 clk = ~clk;

  logic ref_v [SETS*WAYS];
  pn_t  ref_vpn [SETS*WAYS], ref_ppn [SETS*WAYS];

  task automatic cfg(input int i, input bit w, input logic [31:0] d);
    @(negedge clk); we = 1; idx = 8'(i); word = w; wdata = d;
    @(negedge clk); we = 0;
  endtask

  task automatic lookup(input pn_t v);
    bit exp_hit = 0; pn_t exp_ppn = '0; int exp_way = -1; int cyc, exp_cyc;
    int s = int'(v[4:0]);
    for (int w = WAYS - 1; w >= 0; w--)
      if (ref_v[s*WAYS+w] && ref_vpn[s*WAYS+w] == v) begin exp_hit = 1; exp_ppn = ref_ppn[s*WAYS+w]; exp_way = w; end
    exp_cyc = exp_hit ? 3 + exp_way / 2 : 6;
    @(negedge clk);
    checks++;
    if (!ready) begin failures++; $display("FAIL not ready"); end
    req = 1; rvpn = v; cyc = 1;
    @(negedge clk); req = 0;
    while (!rvalid && cyc < 20) begin cyc++; @(negedge clk); end
    cyc++;
    checks += 2;
    if (rhit !== exp_hit || (exp_hit && rppn !== exp_ppn)) begin
      failures++; $display("FAIL vpn=%h hit=%0d/%0d ppn=%h/%h", v, rhit, exp_hit, rppn, exp_ppn);
    end
    if (cyc != exp_cyc || cyc > 6) begin
      failures++; $display("FAIL latency vpn=%h %0d cycles, expected %0d", v, cyc, exp_cyc);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; rvpn = 0; we = 0; idx = 0; word = 0; wdata = 0;
    for (int i = 0; i < SETS*WAYS; i++) begin ref_v[i] = 0; ref_vpn[i] = 0; ref_ppn[i] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 10; k++) lookup(pn_t'($urandom));
    // fill a random subset of entries; VPN must map to its set
    for (int k = 0; k < 200; k++) begin
      int s = $urandom % SETS, w = $urandom % WAYS;
      pn_t v = {pn_t'($urandom)} & ~pn_t'(31) | pn_t'(s);
      ref_vpn[s*WAYS+w] = v; ref_ppn[s*WAYS+w] = pn_t'($urandom); ref_v[s*WAYS+w] = 1;
      cfg(s*WAYS+w, 1, {12'h0, ref_ppn[s*WAYS+w]});
      cfg(s*WAYS+w, 0, {1'b1, 11'h0, v});
    end
    for (int k = 0; k < 400; k++) begin
      int i = $urandom % (SETS*WAYS);
      if ($urandom % 5 == 0) lookup(pn_t'($urandom));
      else                   lookup(ref_vpn[i]);
    end
    // every way position once, to see every latency
    for (int w = 0; w < WAYS; w++) begin
      ref_vpn[3*WAYS+w] = pn_t'(32'h7700 + 3 + 32*w); ref_ppn[3*WAYS+w] = pn_t'(w + 1); ref_v[3*WAYS+w] = 1;
      cfg(3*WAYS+w, 1, {12'h0, ref_ppn[3*WAYS+w]});
      cfg(3*WAYS+w, 0, {1'b1, 11'h0, ref_vpn[3*WAYS+w]});
    end
    for (int w = 0; w < WAYS; w++) lookup(ref_vpn[3*WAYS+w]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
