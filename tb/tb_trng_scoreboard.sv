// tb_trng_scoreboard: end-to-end checker of sirf_trng_top.
//
// It watches the TDC results and rebuilds everything else on its own: the
// nonces (XOR of XOR_LEN low-order bits), the expected LFSR seeds, DV_A and
// DV_B (the DV-generation measurements in order) and then, with the functions
// of tb_ref_pkg, every iteration of the Sponge Function loop (DVDiff, GPEV with
// RC from the nonces, SF chaining with TCC from the nonces, BitGen). Each bit
// the top delivers is compared with the expected one.
// It also counts how often each mechanism of the design happened: boot-strap
// runs, DV runs, rounds, consumer stalls, SF mirrors (odd fold counts), SF
// wrap-arounds at +-64, zero values that made BitGen alternate, and iterations
// that reused a nonce pair. report() counts a failure for every mechanism that
// never happened.
module tb_trng_scoreboard
  import trng_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int N           = 2048,
  parameter int N_ITER      = 2048,
  parameter int XOR_LEN     = 12,
  parameter int NONCE_BITS  = 341,
  parameter int NONCE_REUSE = 20
) (
  input logic        clk,
  input logic        rst_n,
  input phase_e      phase,
  input logic        tdc_done,
  input logic [11:0] tdc_dv,
  input logic        seed_load,
  input logic [63:0] seed,
  input logic        bit_valid,
  input logic        bit_out,
  input logic        bit_ready,
  input logic        sf_elem_done,
  input logic        sf_elem_odd
);

  int checks = 0;
  int failures = 0;

  // mechanism counters
  int n_boot = 0, n_dvrun = 0, n_rounds = 0, n_stall = 0, n_odd = 0;
  int n_wrap = 0, n_zero = 0, n_reuse = 0, n_bits = 0, n_seed = 0;

  int          boot_meas[$], dv_meas[$];
  bit [NONCE_BITS-1:0] active, pending;
  bit          exp_bits[$];
  int          sf_state[];
  bit          tog = 1'b0;
  phase_e      phase_q = PH_IDLE;
  bit          boot_seen = 1'b0;

  function automatic bit [NONCE_BITS-1:0] distil(ref int m[$]);
    bit [NONCE_BITS-1:0] v;
    v = '0;
    for (int k = 0; k < NONCE_BITS && (k + 1) * XOR_LEN <= m.size(); k++) begin
      bit b;
      b = 1'b0;
      for (int j = 0; j < XOR_LEN; j++) b ^= 1'(m[k * XOR_LEN + j]);
      v[k] = b;
    end
    return v;
  endfunction

  // Expected bits of one whole Phase 2.
  task automatic build_round();
    int dva[], dvb[], dvd[], dvdc[];
    dva = new[N]; dvb = new[N]; dvd = new[N]; dvdc = new[N];
    sf_state = new[N];
    for (int k = 0; k < N; k++) begin
      dva[k] = dv_meas[k];
      dvb[k] = dv_meas[N + k];
      sf_state[k] = 0;
    end
    for (int i = 0; i < N_ITER; i++) begin
      int rc, tcc, j;
      j   = i % NONCE_REUSE;
      rc  = 128 + int'(active[16 * j +: 6]);
      tcc = 8 + 2 * int'(active[16 * j + 8 +: 3]);
      if (i >= NONCE_REUSE) n_reuse++;
      ref_dvdiff(dva, dvb, i % N, dvd);
      ref_gpev(dvd, rc, dvdc);
      for (int k = 0; k < N; k++) begin
        int cs, sn;
        bit odd;
        ref_sf(dvdc[k], sf_state[k], tcc, cs, sn, odd);
        if (odd && sf_state[k] - 2 * cs != sn) n_wrap++;
        sf_state[k] = sn;
        if (cs == 0) n_zero++;
        exp_bits.push_back(ref_bit(cs, tog));
      end
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    phase_q <= phase;
    if (tdc_done) begin
      if (phase == PH_BOOT) boot_meas.push_back(int'(tdc_dv));
      else if (phase == PH_DVGEN) dv_meas.push_back(int'(tdc_dv));
    end
    if (seed_load) begin
      bit [63:0] e;
      if (phase == PH_BOOT) e = 64'd1;
      else e = active[63:0];
      checks++;
      if (seed !== e) begin failures++; $display("seed %h expected %h", seed, e); end
      n_seed++;
    end
    // entering a phase
    if (phase == PH_BOOT && phase_q != PH_BOOT) begin
      boot_meas.delete();
      n_boot++;
    end
    if (phase == PH_DVGEN && phase_q != PH_DVGEN) begin
      if (phase_q == PH_BOOT) active = distil(boot_meas);
      dv_meas.delete();
      n_dvrun++;
    end
    if (phase == PH_DVDIFF && phase_q == PH_DVGEN) begin
      checks++;
      if (dv_meas.size() != 2 * N) begin failures++; $display("%0d DV measured", dv_meas.size()); end
      pending = distil(dv_meas);
      build_round();
    end
    if (sf_elem_done && sf_elem_odd) n_odd++;
    if (bit_valid && !bit_ready) n_stall++;
    if (bit_valid && bit_ready) begin
      checks++;
      n_bits++;
      if (exp_bits.size() == 0) begin
        failures++;
        $display("unexpected bit");
      end else begin
        bit e;
        e = exp_bits.pop_front();
        if (bit_out !== e) begin
          failures++;
          if (failures < 10) $display("bit %0d = %0b, expected %0b", n_bits - 1, bit_out, e);
        end
      end
      if (exp_bits.size() == 0) begin
        n_rounds++;
        active = pending;
      end
    end
  end

  task automatic require(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never exercised: %s", what); end
    $display("  %-28s %0d", what, n);
  endtask

  task automatic report();
    $display("bits checked: %0d", n_bits);
    require("boot-strap runs", n_boot);
    require("DV generation runs", n_dvrun);
    require("seed loads", n_seed);
    require("complete rounds", n_rounds);
    require("consumer stalls", n_stall);
    require("SF mirrors (odd count)", n_odd);
    require("SF wrap-arounds", n_wrap);
    require("zero values at BitGen", n_zero);
    require("nonce pair reuses", n_reuse);
  endtask

endmodule
