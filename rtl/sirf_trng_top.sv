// sirf_trng_top: the SiRF PUF-TRNG in its TRNG mode.
//
// Phase 1 (path timing): the 64-bit LFSR challenge generator (chlng_gen)
// configures the SiRF netlist (sirf_netlist_model), the TDC (tdc_model)
// measures one path delay at a time under control of path_timing, the low
// bits of the delay values feed the nonce distiller, and in the DV generation
// run the delay values are stored in the shared BRAM as DV_A and DV_B.
// Phase 2 (the Sponge Function loop): dvdiff, gpev, sf_chain and bitgen run
// one after the other on the BRAM, N_ITER times, each iteration squeezing N
// random bits out on the bit_valid / bit_out / bit_ready stream.
// trng_ctrl sequences both phases and turns the nonces into the LFSR seed,
// the Range Constant and the Trim Code Constant.
//
// The netlist and the TDC are behavioural models (their function is timing);
// a silicon or FPGA implementation replaces them with the engineered netlist
// and the carry-chain TDC. Only one sub-block uses the BRAM at a time, so the
// two RAM ports are switched by the controller's phase.
// Interface: start (one cycle) begins boot-strap and a full Phase 1 + Phase 2
// round; with continuous high rounds repeat without a new boot-strap. bits are
// held until bit_ready, so the consumer may stall the TRNG. round_done pulses
// after the last bit of a round.
// Timing at the defaults: a path timing run is 4,096 measurements of about
// 619 cycles each (2.54 M cycles, 50.7 ms at 50 MHz; the reference quotes
// about 50 ms). Boot-strap runs once, the DV run once per round. One Sponge
// iteration takes 10 N cycles plus the SF fold steps, which depend on the data
// and on TCC: 26,800 cycles on average and 32,100 at most over a simulated
// round (536 us at 50 MHz, against about 600 us in the reference) when the
// consumer never stalls, about 3.6 Mbit/s at 50 MHz including the DV run.
module sirf_trng_top #(
  parameter int unsigned N               = 2048,
  parameter int unsigned N_ITER          = 2048,
  parameter int unsigned N_CHLNG         = 128,
  parameter int unsigned PATHS_PER_CHLNG = 32,
  parameter int unsigned CHLNG_W         = 198,
  parameter int unsigned XOR_LEN         = 12,
  parameter int unsigned NONCE_BITS      = 341,
  parameter int unsigned NONCE_REUSE     = 20,
  parameter int unsigned TDC_LATENCY     = 610
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic                      continuous,
  output logic                      busy,
  output trng_pkg::phase_e          phase,
  output logic [$clog2(N_ITER)-1:0] iter,
  output logic                      round_done,
  output logic                      bit_valid,
  output logic                      bit_out,
  input  logic                      bit_ready
);
  import trng_pkg::*;

  localparam int unsigned LOG2N = $clog2(N);

  // controller <-> blocks
  logic                   dist_clear, seed_load, pt_start, pt_store, pt_done;
  logic [63:0]            seed;
  logic [NONCE_BITS-1:0]  dist_nonce, nonce_active;
  logic                   dd_start, dd_done, gp_start, gp_done;
  logic                   sf_start, sf_done, sf_first, bg_start, bg_done;
  logic [7:0]             gp_rc;
  logic [4:0]             sf_tcc;

  // Phase 1 signals
  logic                   gen_req, gen_valid, gen_busy;
  logic [CHLNG_W-1:0]     chlng;
  logic [$clog2(PATHS_PER_CHLNG)-1:0] path_sel;
  logic [15:0]            delay_ps;
  logic                   tdc_start, tdc_busy, tdc_done;
  logic [11:0]            tdc_dv;
  logic                   meas_valid;
  logic [11:0]            meas_dv;
  logic                   pt_busy;
  logic [$clog2(NONCE_BITS+1)-1:0] nbits;
  logic                   nonce_full;

  // RAM ports of each block
  mem_req_t               pt_mem, dd_a, dd_b, gp_a, gp_b, sf_a, sf_b, bg_a;
  mem_req_t               ram_a, ram_b;
  logic [15:0]            rdata_a, rdata_b;
  logic                   dd_busy, gp_busy, sf_busy, bg_busy;
  logic                   sf_elem_done, sf_elem_odd;

  trng_ctrl #(
    .N_ITER(N_ITER), .NONCE_BITS(NONCE_BITS), .NONCE_REUSE(NONCE_REUSE)
  ) u_ctrl (
    .clk, .rst_n, .start, .continuous, .busy, .phase, .iter, .round_done,
    .dist_clear, .dist_nonce, .seed_load, .seed,
    .pt_start, .pt_store, .pt_done,
    .dd_start, .dd_done, .gp_start, .gp_rc, .gp_done,
    .sf_start, .sf_tcc, .sf_first, .sf_done, .bg_start, .bg_done,
    .nonce_active
  );

  chlng_gen #(.CHLNG_W(CHLNG_W)) u_chlng_gen (
    .clk, .rst_n, .seed_load, .seed, .req(gen_req), .valid(gen_valid),
    .busy(gen_busy), .chlng
  );

  sirf_netlist_model #(.CHLNG_W(CHLNG_W), .N_PATHS(PATHS_PER_CHLNG)) u_netlist (
    .chlng, .path_sel, .delay_ps
  );

  tdc_model #(.LATENCY(TDC_LATENCY)) u_tdc (
    .clk, .rst_n, .start(tdc_start), .delay_ps, .busy(tdc_busy),
    .done(tdc_done), .dv(tdc_dv)
  );

  path_timing #(.N_CHLNG(N_CHLNG), .PATHS_PER_CHLNG(PATHS_PER_CHLNG)) u_path_timing (
    .clk, .rst_n, .start(pt_start), .store_dv(pt_store), .busy(pt_busy),
    .done(pt_done), .gen_req, .gen_valid, .path_sel, .tdc_start, .tdc_done,
    .tdc_dv, .meas_valid, .meas_dv, .mem(pt_mem)
  );

  nonce_distiller #(.XOR_LEN(XOR_LEN), .NONCE_BITS(NONCE_BITS)) u_distiller (
    .clk, .rst_n, .clear(dist_clear), .dv_valid(meas_valid), .dv_lsb(meas_dv[0]),
    .nonce(dist_nonce), .nbits, .full(nonce_full)
  );

  dvdiff #(.N(N)) u_dvdiff (
    .clk, .rst_n, .start(dd_start), .iter(LOG2N'(iter)), .busy(dd_busy),
    .done(dd_done), .mem_a(dd_a), .mem_b(dd_b), .rdata_a, .rdata_b
  );

  gpev #(.N(N)) u_gpev (
    .clk, .rst_n, .start(gp_start), .rc(gp_rc), .busy(gp_busy), .done(gp_done),
    .mem_a(gp_a), .mem_b(gp_b), .rdata_a
  );

  sf_chain #(.N(N)) u_sf (
    .clk, .rst_n, .start(sf_start), .tcc(sf_tcc), .first(sf_first),
    .busy(sf_busy), .done(sf_done), .mem_a(sf_a), .mem_b(sf_b), .rdata_a,
    .rdata_b, .elem_done(sf_elem_done), .elem_odd(sf_elem_odd)
  );

  bitgen #(.N(N)) u_bitgen (
    .clk, .rst_n, .start(bg_start), .busy(bg_busy), .done(bg_done),
    .mem_a(bg_a), .rdata_a, .bit_valid, .bit_out, .bit_ready
  );

  // Only the block of the current phase owns the RAM.
  always_comb begin
    ram_a = MEM_IDLE;
    ram_b = MEM_IDLE;
    unique case (phase)
      PH_DVGEN:  ram_b = pt_mem;
      PH_DVDIFF: begin ram_a = dd_a; ram_b = dd_b; end
      PH_GPEV:   begin ram_a = gp_a; ram_b = gp_b; end
      PH_SF:     begin ram_a = sf_a; ram_b = sf_b; end
      PH_BITGEN: ram_a = bg_a;
      default:   ;
    endcase
  end

  trng_bram #(.DEPTH(N_REGIONS * N)) u_bram (
    .clk, .a(ram_a), .b(ram_b), .rdata_a, .rdata_b
  );

  // Structural rules of the parameter set.
  initial begin
    assert (N_CHLNG * PATHS_PER_CHLNG == 2 * N)
      else $error("path timing must fill DV_A and DV_B exactly");
    assert (NONCE_BITS >= 16 * NONCE_REUSE && NONCE_BITS >= 64)
      else $error("nonce register too small for seed and parameter bytes");
  end

endmodule
