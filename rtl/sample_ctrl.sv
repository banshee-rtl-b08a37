// sample_ctrl -- adaptive sampling decision and random numbers for the replacement policy.
//
// Banshee reads and updates a set's frequency counters for only a sampled fraction of the
// requests that reach the memory controller. The sample rate adapts: it is the recent DRAM-cache
// miss rate times a constant sampling coefficient (10% by default), so a cache that works well
// spends almost no bandwidth on counters. This block measures the miss rate over fixed windows
// of 2^MISS_WIN_LOG2 accesses, forms the sample rate in 16-bit fixed point, and compares it with
// a pseudo-random number. It also supplies the two other random numbers the replacement
// algorithm needs: which candidate entry to offer to a page not yet tracked, and a 16-bit
// fraction for the "replace with probability 1/count" test.
//
// Interface and timing: sample, rand_cand and rand_prob are combinational from the current state
// and are meant to be used with the access reported by acc_valid/acc_miss in the same cycle. At
// that clock edge the random generators advance and the access is counted. The miss rate used
// for sampling is the one measured in the previous complete window (1.0 after reset).
//
// From the paper: sample rate = recent miss rate x sampling coefficient, coefficient 10%, a
// random number compared against it per request. This design's choices: the window length, the
// fixed-point format (Q0.16, coefficient given as round(coef * 65536)), the two 32-bit Galois
// LFSRs as random sources, and the starting miss rate of 1.0.
module sample_ctrl
  import banshee_pkg::*;
#(
  parameter int unsigned SAMPLE_COEFF_Q16 = 6554,     // 0.1 * 65536; 65536 samples every access
  parameter int unsigned MISS_WIN_LOG2    = 10,       // window of 1024 accesses
  parameter logic [31:0] SEED_A           = 32'h1234_5678,
  parameter logic [31:0] SEED_B           = 32'h9ABC_DEF1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        acc_valid,
  input  logic        acc_miss,
  output logic        sample,
  output logic [$clog2(NUM_CAND)-1:0] rand_cand,
  output logic [15:0] rand_prob,
  output logic [15:0] miss_rate_q16,
  output logic [16:0] sample_rate_q16
);
  localparam int CW = $clog2(NUM_CAND);

  logic [31:0] lfsr_a, lfsr_b;
  logic [MISS_WIN_LOG2-1:0] acc_cnt;
  logic [MISS_WIN_LOG2:0]   miss_cnt;
  logic [15:0]              rate;

  function automatic logic [31:0] lfsr_next(logic [31:0] s);
    // Galois LFSR, x^32 + x^22 + x^2 + x + 1
    return s[0] ? ((s >> 1) ^ 32'h8020_0003) : (s >> 1);
  endfunction

  // sample rate = rate * coefficient, Q0.16
  logic [48:0] prod;
  always_comb begin
    prod            = 49'(rate) * 49'(SAMPLE_COEFF_Q16);
    sample_rate_q16 = 17'(prod >> 16);
    sample          = {1'b0, lfsr_a[15:0]} < sample_rate_q16;
    rand_cand       = CW'((32'(lfsr_a[31:24]) * NUM_CAND) >> 8);
    rand_prob       = lfsr_b[15:0];
    miss_rate_q16   = rate;
  end

  // new window rate: misses / 2^W in Q0.16, saturating at 0xFFFF
  logic [MISS_WIN_LOG2:0] miss_total;
  logic [31:0]            rate_new;
  always_comb begin
    miss_total = miss_cnt + (MISS_WIN_LOG2+1)'(acc_miss);
    rate_new   = (32'(miss_total) << 16) >> MISS_WIN_LOG2;
    if (rate_new > 32'hFFFF) rate_new = 32'hFFFF;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lfsr_a   <= SEED_A;
      lfsr_b   <= SEED_B;
      acc_cnt  <= '0;
      miss_cnt <= '0;
      rate     <= 16'hFFFF;
    end else if (acc_valid) begin
      lfsr_a  <= lfsr_next(lfsr_a);
      lfsr_b  <= lfsr_next(lfsr_next(lfsr_b));
      acc_cnt <= acc_cnt + 1'b1;
      if (acc_cnt == '1) begin
        rate     <= rate_new[15:0];
        miss_cnt <= '0;
      end else begin
        miss_cnt <= miss_total;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) rand_cand < CW'(NUM_CAND));

endmodule
