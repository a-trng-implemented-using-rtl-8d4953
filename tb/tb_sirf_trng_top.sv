// tb_sirf_trng_top: end-to-end testbench of the whole TRNG at reduced size.
//
// Runs sirf_trng_top with N = 64 elements per region, 24 Sponge iterations per
// round, 4 challenges x 32 paths per path timing run, one DV per nonce bit,
// 128 nonce bits reused every 8 iterations and a 3-cycle TDC, for two
// continuous rounds (boot-strap, DV run, Phase 2, DV run, Phase 2). The
// consumer withholds bit_ready at random. tb_trng_scoreboard rebuilds the
// expected bit stream from the TDC results alone and checks every bit, and
// requires every mechanism (stalls, SF mirrors and wrap-arounds, zero
// alternation, nonce reuse, continuous rounds) to have happened.
module tb_sirf_trng_top;
  import trng_pkg::*;

  localparam int N  = 64;
  localparam int NI = 24;
  localparam int NC = 4;
  localparam int PP = 32;
  localparam int XL = 1;
  localparam int NB = 128;
  localparam int NR = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, continuous = 1'b1;
  logic busy, round_done, bit_valid, bit_out, bit_ready;
  phase_e phase;
  logic [$clog2(NI)-1:0] iter;

  sirf_trng_top #(
    .N(N), .N_ITER(NI), .N_CHLNG(NC), .PATHS_PER_CHLNG(PP), .XOR_LEN(XL),
    .NONCE_BITS(NB), .NONCE_REUSE(NR), .TDC_LATENCY(3)
  ) dut (
    .clk, .rst_n, .start, .continuous, .busy, .phase, .iter, .round_done,
    .bit_valid, .bit_out, .bit_ready
  );

  tb_trng_scoreboard #(
    .N(N), .N_ITER(NI), .XOR_LEN(XL), .NONCE_BITS(NB), .NONCE_REUSE(NR)
  ) sb (
    .clk, .rst_n, .phase, .tdc_done(dut.tdc_done), .tdc_dv(dut.tdc_dv),
    .seed_load(dut.seed_load), .seed(dut.seed), .bit_valid, .bit_out, .bit_ready,
    .sf_elem_done(dut.sf_elem_done), .sf_elem_odd(dut.sf_elem_odd)
  );

  always @(negedge clk) bit_ready <= ($urandom % 4 != 0);

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    sb.failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", sb.checks, sb.failures);
    $finish;
  end

  initial begin
    int rounds;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    rounds = 0;
    while (rounds < 2) begin
      @(negedge clk);
      if (round_done) begin
        rounds++;
        continuous = 1'b0;
      end
    end
    repeat (5) @(negedge clk);
    sb.checks++;
    if (busy) begin sb.failures++; $display("still busy after the last round"); end
    sb.report();
    $display("TB_RESULT checks=%0d failures=%0d", sb.checks, sb.failures);
    $finish;
  end

endmodule
