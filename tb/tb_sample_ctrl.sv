// tb_sample_ctrl -- self-checking testbench for sample_ctrl (coefficient 10%, window 1024).
//
// Drives accesses with a chosen miss pattern and checks, cycle by cycle, the sample decision and
// the random outputs against a reference model kept here (its own LFSRs and window counters).
// It also checks the arithmetic at known points: a first window with 256 misses in 1024 gives a
// miss rate of 0.25 (16384 in Q0.16) and a sample rate of 16384 * 6554 / 65536 = 1638; an
// all-miss window gives 65535 and 6553. Finally the number of sampled accesses over a long run
// at 50% misses must be close to 5%.
module tb_sample_ctrl;
  import banshee_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic acc_valid = 0, acc_miss = 0, sample;
  logic [2:0] rand_cand;
  logic [15:0] rand_prob, miss_rate;
  logic [16:0] srate;
  int checks = 0, failures = 0;

  sample_ctrl dut (.clk, .rst_n, .acc_valid, .acc_miss, .sample, .rand_cand, .rand_prob,
                   .miss_rate_q16 (miss_rate), .sample_rate_q16 (srate));

  // reference state
  int unsigned ra, rb;
  int acc_n, miss_n, rate;

  function automatic int unsigned step(int unsigned s);
    return (s & 1) ? ((s >> 1) ^ 32'h8020_0003) : (s >> 1);
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  int n_samp;
  task automatic access(bit miss);
    int exp_rate, exp_cand;
    @(negedge clk);
    acc_valid = 1; acc_miss = miss; #1;
    exp_rate = int'((longint'(rate) * 6554) >> 16);
    exp_cand = int'(((ra >> 24) & 255) * 5 / 256);
    checks++;
    if (sample != ((ra & 16'hFFFF) < exp_rate) || int'(srate) != exp_rate ||
        int'(rand_cand) != exp_cand || int'(rand_prob) != int'(rb & 16'hFFFF)) begin
      failures++;
      if (failures < 10) $display("FAIL access: sample=%0b rate=%0d/%0d", sample, srate, exp_rate);
    end
    n_samp += int'(sample);
    @(posedge clk); #1 acc_valid = 0;
    // reference update
    ra = step(ra); rb = step(step(rb));
    acc_n++; miss_n += int'(miss);
    if (acc_n == 1024) begin
      rate = (miss_n * 64 > 65535) ? 65535 : miss_n * 64;
      acc_n = 0; miss_n = 0;
    end
  endtask

  initial begin
    ra = 32'h1234_5678; rb = 32'h9ABC_DEF1; acc_n = 0; miss_n = 0; rate = 65535;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(miss_rate == 16'hFFFF && srate == 17'd6553, "reset miss rate 1.0, sample rate 10%");
    for (int i = 0; i < 1024; i++) access(i % 4 == 0);
    @(negedge clk);
    check(miss_rate == 16'd16384 && srate == 17'd1638, "25% misses -> sample rate 2.5%");
    for (int i = 0; i < 1024; i++) access(1'b1);
    @(negedge clk);
    check(miss_rate == 16'hFFFF && srate == 17'd6553, "all misses -> 10%");
    // idle cycles do not advance the window
    repeat (20) @(negedge clk);
    check(miss_rate == 16'hFFFF, "idle keeps rate");
    for (int i = 0; i < 1024; i++) access(1'b0);
    @(negedge clk);
    check(miss_rate == 0 && srate == 0, "no misses -> no sampling");
    n_samp = 0;
    for (int i = 0; i < 1024; i++) access(1'b0);
    check(n_samp == 0, "nothing sampled at 0% misses");
    n_samp = 0;
    for (int i = 0; i < 40960; i++) access(i % 2 == 0);
    // first window of this run still at 0%: 39 windows at 5% of 1024
    $display("sampled %0d of %0d accesses", n_samp, 40960);
    check(n_samp > 1700 && n_samp < 2300, "about 5% sampled at 50% misses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
