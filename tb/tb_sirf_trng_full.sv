// tb_sirf_trng_full: end-to-end testbench of the TRNG at its full size.
//
// sirf_trng_top is used with its default parameters: 128 challenges x 32 paths
// per path timing run, 2,048 DV_A and 2,048 DV_B values, 341 nonce bits from
// 12 DV each, RC/TCC nonce pairs reused every 20 iterations and 2,048 Sponge
// iterations per round, each producing 2,048 bits (4,194,304 bits per round).
// One round (boot-strap, DV run, Phase 2) is run with a consumer that withholds
// bit_ready at random. tb_trng_scoreboard checks every bit against a model
// built from the TDC results and requires every mechanism to have happened.
// It also checks the length of Phase 1 and of one Sponge iteration against the
// cycle budget of the design (see sirf_trng_top).
module tb_sirf_trng_full;
  import trng_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, continuous = 1'b0;
  logic busy, round_done, bit_valid, bit_out, bit_ready;
  phase_e phase;
  logic [10:0] iter;

  sirf_trng_top dut (
    .clk, .rst_n, .start, .continuous, .busy, .phase, .iter, .round_done,
    .bit_valid, .bit_out, .bit_ready
  );

  tb_trng_scoreboard sb (
    .clk, .rst_n, .phase, .tdc_done(dut.tdc_done), .tdc_dv(dut.tdc_dv),
    .seed_load(dut.seed_load), .seed(dut.seed), .bit_valid, .bit_out, .bit_ready,
    .sf_elem_done(dut.sf_elem_done), .sf_elem_odd(dut.sf_elem_odd)
  );

  always @(negedge clk) bit_ready <= ($urandom % 4 != 0);

  longint cyc = 0;
  longint t_boot = -1, t_dv = -1, t_p2 = -1, t_it1 = -1, t_end = -1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && t_boot >= 0) begin
      if (phase == PH_DVGEN && t_dv < 0) t_dv <= cyc;
      if (phase == PH_DVDIFF && t_p2 < 0) t_p2 <= cyc;
      if (phase == PH_DVDIFF && iter == 11'd1 && t_it1 < 0) t_it1 <= cyc;
    end
  end

  initial begin : watchdog
    repeat (80000000) @(posedge clk);
    sb.failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", sb.checks, sb.failures);
    $finish;
  end

  initial begin
    longint p1, it;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    t_boot = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!round_done) @(negedge clk);
    t_end = cyc;
    repeat (5) @(negedge clk);
    // Phase 1 (one path timing run of 4,096 TDC measurements of 610 cycles
    // plus a few cycles of handshake each) and one Sponge iteration
    // (about 10 x 2,048 cycles plus the stalls of the consumer)
    p1 = t_p2 - t_dv;
    it = t_it1 - t_p2;
    $display("boot-strap %0d cycles, DV run %0d cycles, iteration 0 %0d cycles, round %0d cycles",
             t_dv - t_boot, p1, it, t_end - t_boot);
    sb.checks += 3;
    if (p1 < 4096 * 611 || p1 > 4096 * 620) begin sb.failures++; $display("DV run length"); end
    if (it < 10 * 2048 || it > 14 * 2048) begin sb.failures++; $display("iteration length"); end
    if (busy) begin sb.failures++; $display("still busy after the round"); end
    sb.report();
    $display("TB_RESULT checks=%0d failures=%0d", sb.checks, sb.failures);
    $finish;
  end

endmodule
