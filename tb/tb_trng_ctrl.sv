// tb_trng_ctrl: self-checking testbench of the TRNG sequencer.
//
// The sub-blocks are replaced by responders that answer each start with done
// after a random delay, and the nonce distiller by a random vector that is
// renewed at every clear. The testbench follows the expected sequence
// (boot-strap, DV generation, then DVDiff -> GPEV -> SF -> BitGen per
// iteration) and checks the seeds (1, then the boot-strap nonces, then the
// nonces of the previous DV run), the store flag, the iteration number, the
// Range Constant and Trim Code Constant of every iteration (nonce pair
// i mod 20), the first flag of SF, round_done and the continuous mode.
// N_ITER is reduced to 45 so that the nonce pairs wrap around twice.
module tb_trng_ctrl;
  import trng_pkg::*;

  localparam int NI = 45;
  localparam int NB = 341;
  localparam int NR = 20;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic start = 1'b0, continuous = 1'b0;
  logic busy, round_done, dist_clear, seed_load, pt_start, pt_store;
  logic dd_start, gp_start, sf_start, sf_first, bg_start;
  logic pt_done = 0, dd_done = 0, gp_done = 0, sf_done = 0, bg_done = 0;
  phase_e phase;
  logic [5:0] iter;
  logic [NB-1:0] dist_nonce, nonce_active;
  logic [63:0] seed;
  logic [7:0] gp_rc;
  logic [4:0] sf_tcc;

  trng_ctrl #(.N_ITER(NI), .NONCE_BITS(NB), .NONCE_REUSE(NR)) dut (
    .clk, .rst_n, .start, .continuous, .busy, .phase, .iter, .round_done,
    .dist_clear, .dist_nonce, .seed_load, .seed, .pt_start, .pt_store, .pt_done,
    .dd_start, .dd_done, .gp_start, .gp_rc, .gp_done, .sf_start, .sf_tcc,
    .sf_first, .sf_done, .bg_start, .bg_done, .nonce_active
  );

  // Expected event stream: 0 = pt, 1 = dd, 2 = gp, 3 = sf, 4 = bg.
  int exp_kind;
  int exp_iter;
  int n_seed, n_rounds;
  logic [NB-1:0] nonce_prev, nonce_cur;   // boot/previous-run nonces, current run
  logic [NB-1:0] act_model;

  assign dist_nonce = nonce_cur;

  function automatic logic [NB-1:0] rand_vec();
    logic [351:0] v;
    for (int i = 0; i < 352; i += 32) v[i +: 32] = $urandom;
    return v[NB-1:0];
  endfunction

  // responders
  task automatic respond(ref logic d);
    repeat (1 + $urandom % 4) @(posedge clk);
    d <= 1'b1;
    @(posedge clk);
    d <= 1'b0;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (dist_clear) begin
      nonce_prev <= nonce_cur;
      nonce_cur  <= rand_vec();
    end
    if (seed_load) begin
      checks++;
      if (n_seed == 0 && seed !== 64'd1) begin failures++; $display("boot seed %h", seed); end
      if (n_seed > 0 && seed !== act_model[63:0]) begin failures++; $display("DV seed %h expected %h", seed, act_model[63:0]); end
      n_seed++;
    end
    if (pt_start) begin
      checks += 2;
      if (exp_kind != 0) begin failures++; $display("unexpected path timing start"); end
      if (pt_store !== (n_seed > 1)) begin failures++; $display("store flag %0b", pt_store); end
      fork respond(pt_done); join_none
    end
    if (dd_start) begin
      checks += 2;
      if (exp_kind != 1) begin failures++; $display("unexpected DVDiff start"); end
      if (int'(iter) != exp_iter) begin failures++; $display("iter %0d expected %0d", iter, exp_iter); end
      exp_kind = 2;
      fork respond(dd_done); join_none
    end
    if (gp_start) begin
      logic [7:0] b;
      b = act_model[16 * (exp_iter % NR) +: 8];
      checks += 2;
      if (exp_kind != 2) begin failures++; $display("unexpected GPEV start"); end
      if (int'(gp_rc) != 128 + int'(b[5:0])) begin failures++; $display("RC %0d", gp_rc); end
      exp_kind = 3;
      fork respond(gp_done); join_none
    end
    if (sf_start) begin
      logic [7:0] b;
      b = act_model[16 * (exp_iter % NR) + 8 +: 8];
      checks += 3;
      if (exp_kind != 3) begin failures++; $display("unexpected SF start"); end
      if (int'(sf_tcc) != 8 + 2 * int'(b[2:0])) begin failures++; $display("TCC %0d", sf_tcc); end
      if (sf_first !== (exp_iter == 0)) begin failures++; $display("first flag %0b at %0d", sf_first, exp_iter); end
      exp_kind = 4;
      fork respond(sf_done); join_none
    end
    if (bg_start) begin
      checks++;
      if (exp_kind != 4) begin failures++; $display("unexpected BitGen start"); end
      exp_kind = 1;
      exp_iter++;
      fork respond(bg_done); join_none
    end
    if (round_done) begin
      checks++;
      if (exp_iter != NI) begin failures++; $display("round ended after %0d iterations", exp_iter); end
      n_rounds++;
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nonce_cur = rand_vec();
    nonce_prev = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    continuous = 1'b1;
    start = 1'b1;
    exp_kind = 0;
    @(negedge clk);
    start = 1'b0;
    // boot-strap done -> active = boot nonces
    wait (pt_start); @(negedge clk);
    wait (phase == PH_DVGEN); @(negedge clk);
    checks++;
    act_model = nonce_active;
    if (nonce_active !== nonce_prev && nonce_active !== nonce_cur) begin failures++; $display("boot nonces not taken"); end
    wait (phase == PH_DVDIFF);
    exp_kind = 1; exp_iter = 0;
    wait (round_done); @(negedge clk); @(negedge clk);
    // round 1 over: active must be the nonces of the DV run
    checks++;
    if (nonce_active !== nonce_cur) begin failures++; $display("DV-run nonces not committed"); end
    act_model = nonce_active;
    exp_kind = 0;
    continuous = 1'b0;
    wait (phase == PH_DVDIFF);
    exp_kind = 1; exp_iter = 0;
    wait (round_done); @(negedge clk); @(negedge clk);
    checks += 3;
    if (busy) begin failures++; $display("not idle after non-continuous round"); end
    if (n_rounds != 2) begin failures++; $display("%0d rounds", n_rounds); end
    if (n_seed != 3) begin failures++; $display("%0d seed loads", n_seed); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
