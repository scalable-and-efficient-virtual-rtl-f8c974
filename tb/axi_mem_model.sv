// axi_mem_model: behavioural AXI slave standing in for the SoC interconnect and the
// shared DRAM in testbenches (not synthesizable). Reads and writes are served one at
// a time each, in order, with a fixed LATENCY between address and first response.
// While idle, AR/AW ready is high (with STALLS, randomly low one cycle in four), so
// an address can be taken in the same cycle it is presented; after a handshake,
// ready stays low until that transaction has been answered.
// Memory is a sparse array of 64-bit words; a word never written reads as
// {addr, ~addr} of its byte address, so expected data can be computed independently.
// Counts the transactions it has served (n_ar, n_aw) so tests can check that dropped
// transactions never arrived.
module axi_mem_model
  import svm_pkg::*;
#(
  parameter int unsigned LATENCY = 4,
  parameter bit          STALLS  = 1'b1
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic ar_valid_i, output logic ar_ready_o, input  ax_t ar_i,
  input  logic aw_valid_i, output logic aw_ready_o, input  ax_t aw_i,
  input  logic w_valid_i,  output logic w_ready_o,  input  w_t  w_i,
  output logic r_valid_o,  input  logic r_ready_i,  output r_t  r_o,
  output logic b_valid_o,  input  logic b_ready_i,  output b_t  b_o
);
  logic [63:0] mem [logic [31:0]];
  int n_ar = 0, n_aw = 0;
  ax_t last_ar, last_aw;

  function automatic logic [63:0] rd_word(input logic [31:0] a);
    logic [31:0] wa = {a[31:3], 3'b000};
    if (mem.exists(wa)) return mem[wa];
    return {wa, ~wa};
  endfunction

  initial begin
    ar_ready_o = 0; r_valid_o = 0; r_o = '0;
    forever begin
      @(posedge clk_i);
      if (rst_ni && ar_valid_i && ar_ready_o) begin
        ax_t a;
        a = ar_i;
        ar_ready_o <= 0;
        n_ar++; last_ar = a;
        repeat (LATENCY) @(posedge clk_i);
        for (int b = 0; b <= int'(a.len); b++) begin
          r_valid_o <= 1;
          r_o <= '{id: a.id, data: rd_word(a.addr + 32'(b * 8)), resp: RESP_OKAY, last: (b == int'(a.len))};
          do @(posedge clk_i); while (!r_ready_i);
        end
        r_valid_o <= 0;
      end else begin
        ar_ready_o <= rst_ni && (!STALLS || ($urandom % 4) != 0);
      end
    end
  end

  initial begin
    aw_ready_o = 0; w_ready_o = 0; b_valid_o = 0; b_o = '0;
    forever begin
      @(posedge clk_i);
      if (rst_ni && aw_valid_i && aw_ready_o) begin
        ax_t a;
        a = aw_i;
        aw_ready_o <= 0;
        n_aw++; last_aw = a;
        w_ready_o <= 1;
        for (int b = 0; b <= int'(a.len); b++) begin
          do @(posedge clk_i); while (!w_valid_i);
          mem[{a.addr[31:3] + 29'(b), 3'b000}] = w_i.data;
        end
        w_ready_o <= 0;
        repeat (LATENCY) @(posedge clk_i);
        b_valid_o <= 1;
        b_o <= '{id: a.id, resp: RESP_OKAY};
        do @(posedge clk_i); while (!b_ready_i);
        b_valid_o <= 0;
      end else begin
        aw_ready_o <= rst_ni && (!STALLS || ($urandom % 4) != 0);
      end
    end
  end
endmodule
