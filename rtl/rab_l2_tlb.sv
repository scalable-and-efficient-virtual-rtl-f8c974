// rab_l2_tlb: second-level TLB of the hybrid IOMMU.
//
// N_SETS x N_WAYS translations (32 x 8 = 256), set associative. It is consulted only
// when the L1 TLB misses. The set is chosen by the low bits of the virtual page
// number. A lookup is a small state machine: the request is accepted in one cycle,
// then WAYS_PER_CYCLE (2) ways of the set are compared per cycle, stopping at the
// first hit, and the result is presented for one cycle. A lookup therefore takes
// 3 cycles (hit in ways 0/1) up to 6 cycles (hit in ways 6/7 or miss), counted from
// the request cycle to the response cycle inclusive, which is the "up to 6 cycles"
// the paper quotes. Size, associativity and the bound of 6 cycles follow the paper;
// the way-serial search and the set index bits are this design's choices.
//
// Interface: req_valid_i/req_ready_o handshake (ready only when idle), resp_valid_o
// pulses for one cycle with resp_hit_o/resp_ppn_o. Entries are written by software
// with two words like the L1 TLB (word 0: bit 31 valid, bits 19:0 VPN; word 1: PPN);
// cfg_idx_i = {set, way}. Reset clears all valid bits.
// Lint note: configuration word bits 30:20 are reserved and ignored.
module rab_l2_tlb
  import svm_pkg::*;
#(
  parameter int unsigned N_SETS         = 32,
  parameter int unsigned N_WAYS         = 8,
  parameter int unsigned WAYS_PER_CYCLE = 2
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  req_valid_i,
  output logic  req_ready_o,
  input  pn_t   req_vpn_i,
  output logic  resp_valid_o,
  output logic  resp_hit_o,
  output pn_t   resp_ppn_o,
  input  logic                                  cfg_we_i,
  input  logic [$clog2(N_SETS*N_WAYS)-1:0]      cfg_idx_i,
  input  logic                                  cfg_word_i,
  input  logic [31:0]                           cfg_wdata_i
);

  localparam int unsigned N_ENTRIES = N_SETS * N_WAYS;
  localparam int unsigned SET_W     = $clog2(N_SETS);
  localparam int unsigned WAY_W     = $clog2(N_WAYS);
  localparam int unsigned N_STEPS   = N_WAYS / WAYS_PER_CYCLE;
  localparam int unsigned STEP_W    = (N_STEPS > 1) ? $clog2(N_STEPS) : 1;

  logic [N_ENTRIES-1:0] valid_q;
  pn_t                  vpn_q [N_ENTRIES];
  pn_t                  ppn_q [N_ENTRIES];

  typedef enum logic [1:0] {S_IDLE, S_SEARCH, S_RESP} state_e;
  state_e            state_q;
  pn_t               vpn_lk_q;
  logic [STEP_W-1:0] step_q;
  logic              hit_q;
  pn_t               ppn_q_r;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0;
    end else if (cfg_we_i && !cfg_word_i) begin
      valid_q[cfg_idx_i] <= cfg_wdata_i[31];
    end
  end

  always_ff @(posedge clk_i) begin
    if (cfg_we_i) begin
      if (!cfg_word_i) vpn_q[cfg_idx_i] <= cfg_wdata_i[PN_W-1:0];
      else             ppn_q[cfg_idx_i] <= cfg_wdata_i[PN_W-1:0];
    end
  end

  // compare the ways of the current step
  logic step_hit;
  pn_t  step_ppn;
  always_comb begin
    logic [SET_W-1:0] set;
    logic [WAY_W-1:0] way;
    set      = vpn_lk_q[SET_W-1:0];
    step_hit = 1'b0;
    step_ppn = '0;
    for (int k = WAYS_PER_CYCLE - 1; k >= 0; k--) begin
      way = WAY_W'(int'(step_q) * WAYS_PER_CYCLE + k);
      if (valid_q[{set, way}] && vpn_q[{set, way}] == vpn_lk_q) begin
        step_hit = 1'b1;
        step_ppn = ppn_q[{set, way}];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= S_IDLE;
      vpn_lk_q <= '0;
      step_q   <= '0;
      hit_q    <= 1'b0;
      ppn_q_r  <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (req_valid_i) begin
          vpn_lk_q <= req_vpn_i;
          step_q   <= '0;
          state_q  <= S_SEARCH;
        end
        S_SEARCH: begin
          if (step_hit || int'(step_q) == N_STEPS - 1) begin
            hit_q   <= step_hit;
            ppn_q_r <= step_ppn;
            state_q <= S_RESP;
          end else begin
            step_q <= step_q + 1'b1;
          end
        end
        S_RESP: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign req_ready_o  = (state_q == S_IDLE);
  assign resp_valid_o = (state_q == S_RESP);
  assign resp_hit_o   = hit_q;
  assign resp_ppn_o   = ppn_q_r;

endmodule
