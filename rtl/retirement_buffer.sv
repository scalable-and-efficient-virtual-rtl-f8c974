// retirement_buffer: book-keeping of the DMA bursts that are in flight through the
// hybrid IOMMU, so that bursts which missed in the TLB can be reissued later.
//
// The buffer is a singly linked list kept in a register file of N_ENTRIES words (as
// many as bursts may be in flight). Each word holds the burst metadata (external and
// L1 address, AXI length, AXI ID, DMA transfer ID, read/write), a state (free,
// in flight, failed, peeked, reissuable) and the index of the next entry. Head and
// tail pointers mark the oldest and the youngest burst, so list order is issue order.
//
//   push      the transfer unit issued a burst: it is appended at the tail (state
//             in flight) in the lowest free word.
//   cpl       the final response of a burst arrived: the list is walked from the head
//             to the first in-flight entry with that AXI ID; OKAY frees it (it is
//             unlinked wherever it is), an error marks it failed.
//   peek      a PE reads the failing address: peek_addr_o is the external address of
//             the oldest failed burst (0 if none); all failed bursts on that page
//             become peeked, so the page is reported once.
//   handled   a PE has mapped a page: all failed or peeked bursts on it become
//             reissuable.
//   reis_pop  the control unit has reissued the oldest reissuable burst (reis_meta_o):
//             it is unlinked (the transfer unit pushes it again as in flight).
// All operations may happen in the same cycle; removals are applied before the push.
// lookup_id_i/lookup_meta_o give the oldest in-flight burst with an AXI ID, which the
// read path uses to place read data in L1. All outputs are combinational from the
// registers except the cpl_* outputs, which also depend on cpl_id_i.
//
// The linked-list organisation, the five states, the head/tail pointers and the three
// PE/control/transfer interfaces follow the paper. Matching only in-flight entries on
// completion, lowest-free allocation and the oldest-first choice of the reissued
// burst are this design's choices.
// Lint note: only the page number of handled_addr_i is compared; its page-offset
// bits are intentionally unused.
// Lint note: rst_ni is reported as both synchronous and asynchronous. The flops use it
// asynchronously; the other use is the 'disable iff' of the simulation assertion.
module retirement_buffer
  import svm_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 8
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // transfer unit
  input  logic                 push_valid_i,
  output logic                 push_ready_o,
  input  burst_meta_t          push_meta_i,
  input  logic                 cpl_valid_i,
  input  logic [DMA_ID_W-1:0]  cpl_id_i,
  input  logic                 cpl_ok_i,
  output logic                 cpl_found_o,    // a matching in-flight burst exists
  output burst_meta_t          cpl_meta_o,     // its metadata
  input  logic [DMA_ID_W-1:0]  lookup_id_i,
  output logic                 lookup_found_o,
  output burst_meta_t          lookup_meta_o,
  // control unit
  output logic [$clog2(N_ENTRIES):0] n_inflight_o,
  output logic [$clog2(N_ENTRIES):0] n_failed_o,  // failed + peeked + reissuable
  output logic                 reis_valid_o,
  output burst_meta_t          reis_meta_o,
  input  logic                 reis_pop_i,
  // PE control interface
  input  logic                 peek_i,
  output addr_t                peek_addr_o,
  input  logic                 handled_valid_i,
  input  addr_t                handled_addr_i
);

  localparam int unsigned IW = $clog2(N_ENTRIES);
  typedef logic [IW-1:0] idx_t;

  burst_meta_t meta_q [N_ENTRIES];
  rb_state_e   state_q [N_ENTRIES], state_d [N_ENTRIES];
  idx_t        next_q [N_ENTRIES],  next_d [N_ENTRIES];
  idx_t        head_q, head_d, tail_q, tail_d;
  logic [IW:0] count_q, count_d;

  // ---------------------------------------------------------------- list order
  // ord[k] is the index of the k-th oldest burst; valid for k < count_q.
  idx_t ord [N_ENTRIES];
  always_comb begin
    ord[0] = head_q;
    for (int k = 1; k < N_ENTRIES; k++) ord[k] = next_q[ord[k-1]];
  end

  // ---------------------------------------------------------------- searches
  logic cpl_found, reis_found, fail_found, look_found;
  idx_t cpl_idx, reis_idx, fail_idx, look_idx;
  always_comb begin
    cpl_found = 1'b0; reis_found = 1'b0; fail_found = 1'b0; look_found = 1'b0;
    cpl_idx = '0; reis_idx = '0; fail_idx = '0; look_idx = '0;
    for (int k = 0; k < N_ENTRIES; k++) begin
      if (k < int'(count_q)) begin
        if (!cpl_found && state_q[ord[k]] == RB_INFLIGHT && meta_q[ord[k]].axi_id == cpl_id_i) begin
          cpl_found = 1'b1; cpl_idx = ord[k];
        end
        if (!look_found && state_q[ord[k]] == RB_INFLIGHT && meta_q[ord[k]].axi_id == lookup_id_i) begin
          look_found = 1'b1; look_idx = ord[k];
        end
        if (!reis_found && state_q[ord[k]] == RB_REISSUABLE) begin
          reis_found = 1'b1; reis_idx = ord[k];
        end
        if (!fail_found && state_q[ord[k]] == RB_FAILED) begin
          fail_found = 1'b1; fail_idx = ord[k];
        end
      end
    end
  end

  assign cpl_found_o    = cpl_found;
  assign cpl_meta_o     = meta_q[cpl_idx];
  assign lookup_found_o = look_found;
  assign lookup_meta_o  = meta_q[look_idx];
  assign reis_valid_o   = reis_found;
  assign reis_meta_o    = meta_q[reis_idx];
  assign peek_addr_o    = fail_found ? meta_q[fail_idx].ext_addr : '0;

  always_comb begin
    n_inflight_o = '0;
    n_failed_o   = '0;
    for (int i = 0; i < N_ENTRIES; i++) begin
      if (state_q[i] == RB_INFLIGHT) n_inflight_o = n_inflight_o + 1'b1;
      if (state_q[i] == RB_FAILED || state_q[i] == RB_PEEKED || state_q[i] == RB_REISSUABLE)
        n_failed_o = n_failed_o + 1'b1;
    end
  end

  assign push_ready_o = (count_q < (IW+1)'(N_ENTRIES));

  // ---------------------------------------------------------------- next state
  logic do_push;
  idx_t alloc_idx;
  assign do_push = push_valid_i && push_ready_o;

  always_comb begin
    logic [1:0] n_rm;
    idx_t       rm [2];
    logic       alloc_found;
    state_d = state_q;
    next_d  = next_q;
    head_d  = head_q;
    tail_d  = tail_q;
    count_d = count_q;
    n_rm    = '0;
    rm[0]   = '0;
    rm[1]   = '0;
    alloc_idx   = '0;
    alloc_found = 1'b0;

    // state changes
    if (peek_i && fail_found) begin
      for (int i = 0; i < N_ENTRIES; i++)
        if (state_q[i] == RB_FAILED &&
            meta_q[i].ext_addr[ADDR_W-1:PAGE_W] == meta_q[fail_idx].ext_addr[ADDR_W-1:PAGE_W])
          state_d[i] = RB_PEEKED;
    end
    if (handled_valid_i) begin
      for (int i = 0; i < N_ENTRIES; i++)
        if ((state_q[i] == RB_FAILED || state_q[i] == RB_PEEKED) &&
            meta_q[i].ext_addr[ADDR_W-1:PAGE_W] == handled_addr_i[ADDR_W-1:PAGE_W])
          state_d[i] = RB_REISSUABLE;
    end
    if (cpl_valid_i && cpl_found) begin
      if (cpl_ok_i) begin
        rm[n_rm[0]] = cpl_idx;
        n_rm     = n_rm + 1'b1;
      end else begin
        state_d[cpl_idx] = RB_FAILED;
      end
    end
    if (reis_pop_i && reis_found) begin
      rm[n_rm[0]] = reis_idx;
      n_rm     = n_rm + 1'b1;
    end

    // unlink removed entries
    for (int r = 0; r < 2; r++) begin
      if (r < int'(n_rm)) begin
        if (rm[r] == head_d) begin
          head_d = next_d[rm[r]];
        end else begin
          for (int i = 0; i < N_ENTRIES; i++)
            if (state_d[i] != RB_FREE && idx_t'(i) != tail_d && next_d[i] == rm[r]) begin
              next_d[i] = next_d[rm[r]];
              if (rm[r] == tail_d) tail_d = idx_t'(i);
            end
        end
        state_d[rm[r]] = RB_FREE;
        count_d        = count_d - 1'b1;
      end
    end

    // append at the tail
    if (do_push) begin
      for (int i = 0; i < N_ENTRIES; i++)
        if (!alloc_found && state_d[i] == RB_FREE) begin
          alloc_found = 1'b1;
          alloc_idx   = idx_t'(i);
        end
      state_d[alloc_idx] = RB_INFLIGHT;
      if (count_d == 0) head_d = alloc_idx;
      else              next_d[tail_d] = alloc_idx;
      tail_d  = alloc_idx;
      count_d = count_d + 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < N_ENTRIES; i++) begin
        state_q[i] <= RB_FREE;
        next_q[i]  <= '0;
        meta_q[i]  <= '0;
      end
      head_q  <= '0;
      tail_q  <= '0;
      count_q <= '0;
    end else begin
      state_q <= state_d;
      next_q  <= next_d;
      head_q  <= head_d;
      tail_q  <= tail_d;
      count_q <= count_d;
      if (do_push) meta_q[alloc_idx] <= push_meta_i;
    end
  end

  a_cpl_match: assert property (@(posedge clk_i) disable iff (!rst_ni)
    cpl_valid_i |-> cpl_found) else $error("completion without in-flight burst");

endmodule
