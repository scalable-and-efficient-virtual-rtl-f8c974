// tb_retirement_buffer: randomized self-checking test of the retirement buffer.
// A queue in the testbench, ordered by issue, is the reference model. Every cycle a
// random mix of push, successful or failed completion (by AXI ID, with IDs reused so
// the oldest-match rule matters), PE peek, PE "handled" and reissue-pop is applied to
// both. Before each clock edge, all observable outputs are compared with the model:
// in-flight and failed counts, the oldest reissuable burst, the oldest failed address
// seen by the PE, ID lookup and completion match.
module tb_retirement_buffer;
  import svm_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push_valid, push_ready, cpl_valid, cpl_ok, cpl_found, look_found;
  logic reis_valid, reis_pop, peek, handled_valid;
  burst_meta_t push_meta, cpl_meta, look_meta, reis_meta;
  logic [2:0] cpl_id, look_id;
  logic [3:0] n_inflight, n_failed;
  addr_t peek_addr, handled_addr;
  int checks = 0, failures = 0;
  int n_push = 0, n_ok = 0, n_fail = 0, n_peek = 0, n_hand = 0, n_pop = 0;

  retirement_buffer #(.N_ENTRIES(N)) dut (.clk_i(clk), .rst_ni(rst_n),
    .push_valid_i(push_valid), .push_ready_o(push_ready), .push_meta_i(push_meta),
    .cpl_valid_i(cpl_valid), .cpl_id_i(cpl_id), .cpl_ok_i(cpl_ok), .cpl_found_o(cpl_found),
    .cpl_meta_o(cpl_meta), .lookup_id_i(look_id), .lookup_found_o(look_found),
    .lookup_meta_o(look_meta), .n_inflight_o(n_inflight), .n_failed_o(n_failed),
    .reis_valid_o(reis_valid), .reis_meta_o(reis_meta), .reis_pop_i(reis_pop),
    .peek_i(peek), .peek_addr_o(peek_addr), .handled_valid_i(handled_valid),
    .handled_addr_i(handled_addr));

  typedef struct { burst_meta_t m; rb_state_e st; } ent_t;
  ent_t q [$];

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  function automatic int first(input rb_state_e st, input int id);
    foreach (q[k]) if (q[k].st == st && (id < 0 || int'(q[k].m.axi_id) == id)) return k;
    return -1;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push_valid = 0; cpl_valid = 0; cpl_ok = 0; cpl_id = 0; look_id = 0; reis_pop = 0;
    peek = 0; handled_valid = 0; handled_addr = 0; push_meta = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      int k, ninf, nfail, kc, kr, kf, kl;
      @(negedge clk);
      // ---- choose stimulus
      push_valid = ($urandom % 2) && q.size() < N;
      push_meta.ext_addr = {20'h24680 + 20'($urandom % 4), 9'($urandom), 3'b000};
      push_meta.loc_addr = 16'($urandom) & 16'hfff8;
      push_meta.len      = 8'($urandom);
      push_meta.axi_id   = 3'($urandom % 4);
      push_meta.dma_id   = 3'($urandom);
      push_meta.write    = 1'($urandom);
      k = first(RB_INFLIGHT, -1);
      cpl_valid = (k >= 0) && ($urandom % 5 < 2);
      if (k >= 0) begin
        // pick a random in-flight burst; its ID's oldest in-flight burst is the one
        int pick = $urandom % q.size();
        if (q[pick].st != RB_INFLIGHT) pick = k;
        cpl_id = q[pick].m.axi_id;
      end
      cpl_ok = ($urandom % 10) < 6;
      peek = ($urandom % 10) == 0;
      handled_valid = ($urandom % 8) == 0;
      kf = first(RB_FAILED, -1);
      kl = first(RB_PEEKED, -1);
      if (kl >= 0 && ($urandom % 2)) handled_addr = q[kl].m.ext_addr;
      else if (kf >= 0) handled_addr = q[kf].m.ext_addr;
      else handled_addr = {20'h24680 + 20'($urandom % 4), 12'h0};
      reis_pop = ($urandom % 3) == 0;
      look_id  = 3'($urandom % 4);
      #1;
      // ---- compare outputs with the model
      ninf = 0; nfail = 0;
      foreach (q[j]) begin
        if (q[j].st == RB_INFLIGHT) ninf++;
        if (q[j].st inside {RB_FAILED, RB_PEEKED, RB_REISSUABLE}) nfail++;
      end
      check(int'(n_inflight) == ninf, $sformatf("n_inflight %0d/%0d", n_inflight, ninf));
      check(int'(n_failed) == nfail, $sformatf("n_failed %0d/%0d", n_failed, nfail));
      check(push_ready == (q.size() < N), "push_ready");
      kr = first(RB_REISSUABLE, -1);
      check(reis_valid == (kr >= 0), "reis_valid");
      if (kr >= 0) check(reis_meta == q[kr].m, "reis_meta oldest reissuable");
      check(peek_addr == ((kf >= 0) ? q[kf].m.ext_addr : 32'h0), "peek address");
      kl = first(RB_INFLIGHT, int'(look_id));
      check(look_found == (kl >= 0), "lookup found");
      if (kl >= 0) check(look_meta == q[kl].m, "lookup meta");
      kc = first(RB_INFLIGHT, int'(cpl_id));
      if (cpl_valid) begin
        check(cpl_found && cpl_meta == q[kc].m, "completion match");
      end
      @(posedge clk);
      // ---- apply the same operations to the model
      if (peek && kf >= 0) begin
        n_peek++;
        foreach (q[j]) if (q[j].st == RB_FAILED && q[j].m.ext_addr[31:12] == q[kf].m.ext_addr[31:12]) q[j].st = RB_PEEKED;
      end
      if (handled_valid) begin
        n_hand++;
        foreach (q[j]) if (q[j].st inside {RB_FAILED, RB_PEEKED} && q[j].m.ext_addr[31:12] == handled_addr[31:12]) q[j].st = RB_REISSUABLE;
      end
      if (cpl_valid) begin
        if (cpl_ok) begin n_ok++; q.delete(kc); if (kr > kc) kr--; end
        else begin n_fail++; q[kc].st = RB_FAILED; end
      end
      if (reis_pop && kr >= 0) begin n_pop++; q.delete(kr); end
      if (push_valid) begin n_push++; q.push_back('{m: push_meta, st: RB_INFLIGHT}); end
    end
    check(n_ok > 100 && n_fail > 100 && n_peek > 10 && n_hand > 10 && n_pop > 10, "all operations exercised");
    $display("ops: push=%0d ok=%0d fail=%0d peek=%0d handled=%0d pop=%0d", n_push, n_ok, n_fail, n_peek, n_hand, n_pop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
