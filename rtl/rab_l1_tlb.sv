// rab_l1_tlb: first-level TLB of the hybrid IOMMU.
//
// A fully associative array of N_ENTRIES (32) translations, looked up combinationally
// so that a hit is translated in the same cycle the address arrives. All entries are
// written by software (the miss-handling threads on the accelerator), never by the
// hardware itself. One entry takes two 32-bit writes because the virtual and physical
// page numbers together do not fit into one word:
//   word 0: bit 31 = valid, bits 19:0 = virtual page number
//   word 1: bits 19:0 = physical page number
// Software should write word 1 first and word 0 (with valid) last. If several entries
// match, the lowest index wins. Size, full associativity, single-cycle lookup and the
// two-write update follow the paper; the word layout and the priority are this
// design's choices. Reset clears all valid bits.
// Lint note: configuration word bits 30:20 are reserved and ignored.
module rab_l1_tlb
  import svm_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 32
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  // lookup (combinational)
  input  pn_t                          lookup_vpn_i,
  output logic                         hit_o,
  output pn_t                          ppn_o,
  // configuration
  input  logic                         cfg_we_i,
  input  logic [$clog2(N_ENTRIES)-1:0] cfg_idx_i,
  input  logic                         cfg_word_i,
  input  logic [31:0]                  cfg_wdata_i
);

  logic [N_ENTRIES-1:0] valid_q;
  pn_t                  vpn_q [N_ENTRIES];
  pn_t                  ppn_q [N_ENTRIES];

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

  always_comb begin
    hit_o = 1'b0;
    ppn_o = '0;
    for (int i = N_ENTRIES - 1; i >= 0; i--) begin
      if (valid_q[i] && vpn_q[i] == lookup_vpn_i) begin
        hit_o = 1'b1;
        ppn_o = ppn_q[i];
      end
    end
  end

endmodule
