// tb_sirf_trng_stats: statistical workload on the full-size TRNG.
//
// Runs one complete round of sirf_trng_top at its default parameters (4,194,304
// bits) with a consumer that always accepts, cuts the stream into four
// sequences of 1,000,000 bits, as in the usual NIST SP 800-22 set-up of
// one-million-bit sequences, and applies three of that suite's tests to each
// at the significance level 0.01:
//   frequency (monobit): |S_n| / sqrt(n) <= 2.5758 (p = erfc(.) >= 0.01)
//   block frequency, M = 128: chi^2 = 4 M sum (pi_i - 1/2)^2 over 7,812
//     blocks, judged with the normal approximation of the chi-square
//     distribution, (chi^2 - N) / sqrt(2 N) <= 2.326
//   runs: prerequisite |pi - 1/2| < 2 / sqrt(n), then
//     |V - 2 n pi (1 - pi)| / (2 sqrt(2 n) pi (1 - pi)) <= 1.8214
// It also times the Sponge iterations with a consumer that never stalls: on
// average an iteration must take 10 to 14 x 2,048 cycles (four two-cycle
// passes, the SF read-modify-write and its fold steps), and none may take
// more than 32 x 2,048 (at most 22 fold steps per element at TCC = 8).
// The bits come from the behavioural netlist and TDC models, so this shows
// that the post-processing spreads the model's delays into balanced,
// run-free bits; it says nothing about the entropy of a physical device.
module tb_sirf_trng_stats;
  import trng_pkg::*;

  localparam int SEQ  = 1000000;
  localparam int NSEQ = 4;
  localparam int M    = 128;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic start = 1'b0, continuous = 1'b0;
  logic busy, round_done, bit_valid, bit_out;
  logic bit_ready = 1'b1;
  phase_e phase;
  logic [10:0] iter;

  sirf_trng_top dut (
    .clk, .rst_n, .start, .continuous, .busy, .phase, .iter, .round_done,
    .bit_valid, .bit_out, .bit_ready
  );

  // per-sequence statistics
  int     n = 0, ones = 0, runs = 0, blk_ones = 0, seq_no = 0;
  real    chi = 0.0;
  bit     prev = 1'b0;
  longint cyc = 0, t_iter = -1, max_iter = 0, t_first = -1, n_iter = 0;
  logic [10:0] iter_q = '0;

  task automatic judge();
    real s, pi, z, v, nr;
    int  nb;
    nr = real'(SEQ);
    s  = real'(2 * ones - SEQ);
    s  = (s < 0.0 ? -s : s) / $sqrt(nr);
    checks++;
    if (s > 2.5758) begin failures++; $display("seq %0d: frequency test fails (%f)", seq_no, s); end
    nb = SEQ / M;
    z  = (4.0 * real'(M) * chi - real'(nb)) / $sqrt(2.0 * real'(nb));
    checks++;
    if (z > 2.326) begin failures++; $display("seq %0d: block frequency test fails (z %f)", seq_no, z); end
    pi = real'(ones) / nr;
    v  = 2.0 * nr * pi * (1.0 - pi);
    checks += 2;
    if ((pi - 0.5 < 0.0 ? 0.5 - pi : pi - 0.5) >= 2.0 / $sqrt(nr)) begin
      failures++; $display("seq %0d: runs prerequisite fails (pi %f)", seq_no, pi);
    end
    v = (real'(runs) - v) / (2.0 * $sqrt(2.0 * nr) * pi * (1.0 - pi));
    if ((v < 0.0 ? -v : v) > 1.8214) begin failures++; $display("seq %0d: runs test fails (%f)", seq_no, v); end
    $display("sequence %0d: ones %0d  monobit %f  block-frequency z %f  runs %0d (stat %f)",
             seq_no, ones, s, z, runs, v);
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    // iteration length, from one iteration number change to the next
    iter_q <= iter;
    if (phase != PH_IDLE && iter != iter_q) begin
      if (t_iter >= 0 && cyc - t_iter > max_iter) max_iter = cyc - t_iter;
      if (t_first < 0) t_first = cyc;
      else n_iter++;
      t_iter = cyc;
    end
    if (bit_valid && bit_ready && seq_no < NSEQ) begin
      if (n > 0 && bit_out != prev) runs++;
      if (n == 0) runs = 1;
      prev = bit_out;
      ones += int'(bit_out);
      blk_ones += int'(bit_out);
      n++;
      if (n % M == 0) begin
        chi += (real'(blk_ones) / real'(M) - 0.5) ** 2;
        blk_ones = 0;
      end
      if (n == SEQ) begin
        judge();
        seq_no++;
        n = 0; ones = 0; runs = 0; blk_ones = 0; chi = 0.0;
      end
    end
  end

  initial begin : watchdog
    repeat (70000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!round_done) @(negedge clk);
    repeat (5) @(negedge clk);
    checks += 3;
    if (seq_no != NSEQ) begin failures++; $display("only %0d sequences", seq_no); end
    $display("%0d iterations timed: mean %0d cycles, longest %0d cycles",
             n_iter, (t_iter - t_first) / n_iter, max_iter);
    if ((t_iter - t_first) / n_iter > 14 * 2048 || (t_iter - t_first) / n_iter < 10 * 2048) begin
      failures++; $display("mean iteration length out of range");
    end
    if (max_iter > 32 * 2048) begin failures++; $display("iteration too long"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
