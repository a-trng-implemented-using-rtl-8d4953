// trng_ctrl: sequencer of the SiRF TRNG algorithm.
//
// After start it runs, in order:
//   Phase 1, boot-strap: clear the nonce distiller, seed the challenge LFSR
//     with 1, run the path timing loop with DV storage off. The nonce bits of
//     this run become the active nonces.
//   Phase 1, DV generation: clear the distiller, seed the LFSR with active
//     nonce bits 63..0, run the path timing loop again, storing DV_A and DV_B.
//     The nonces of this run are collected but not yet used.
//   Phase 2, N_ITER = 2,048 iterations of the Sponge Function loop, each one
//     DVDiff (iteration number i) -> GPEV (Range Constant) -> SF (Trim Code
//     Constant, SF taken as zero when i = 0) -> BitGen.
// At the end of Phase 2 the collected nonces become the active nonces. With
// continuous high the controller goes straight on to the next DV generation
// run (boot-strap is done once per start), otherwise it returns to idle.
//
// Parameter randomisation (this design's reading of the reference): the
// nonces are used as bytes, byte b = nonce bits 8b+7..8b. Iteration i uses
// pair j = i mod NONCE_REUSE (20): RC = 128 + byte[2j][5:0] (128..191) and
// TCC = 8 + 2 * byte[2j+1][2:0] (8, 10, .., 22). Twenty iterations thus use
// 40 of the 42 nonce bytes before the sequence repeats, matching the
// reference's "reuse every 20 iterations" and its 6-bit and 3-bit nonce
// components. Which bits are used, and the commit timing of new nonces, are
// this design's choices.
// Interface: the controller drives one start pulse per sub-block and waits
// for that block's done pulse; phase, iter and busy report progress and
// round_done pulses at the end of every Phase 2.
module trng_ctrl #(
  parameter int unsigned N_ITER      = 2048,
  parameter int unsigned NONCE_BITS  = 341,
  parameter int unsigned NONCE_REUSE = 20
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic                       continuous,
  output logic                       busy,
  output trng_pkg::phase_e           phase,
  output logic [$clog2(N_ITER)-1:0]  iter,
  output logic                       round_done,
  // nonce distiller
  output logic                       dist_clear,
  input  logic [NONCE_BITS-1:0]      dist_nonce,
  // challenge generator seed
  output logic                       seed_load,
  output logic [63:0]                seed,
  // path timing
  output logic                       pt_start,
  output logic                       pt_store,
  input  logic                       pt_done,
  // Phase 2 modules
  output logic                       dd_start,
  input  logic                       dd_done,
  output logic                       gp_start,
  output logic [7:0]                 gp_rc,
  input  logic                       gp_done,
  output logic                       sf_start,
  output logic [4:0]                 sf_tcc,
  output logic                       sf_first,
  input  logic                       sf_done,
  output logic                       bg_start,
  input  logic                       bg_done,
  // the nonces in use
  output logic [NONCE_BITS-1:0]      nonce_active
);
  import trng_pkg::*;

  localparam int unsigned IW = $clog2(N_ITER);

  typedef enum logic [3:0] {
    C_IDLE, C_BOOT_SEED, C_BOOT_RUN, C_BOOT_COMMIT,
    C_DV_SEED, C_DV_RUN, C_DV_WAIT,
    C_DVDIFF, C_GPEV, C_SF, C_BITGEN
  } cstate_e;

  cstate_e                           st_q;
  logic                              launched_q;   // sub-block start already sent
  logic [$clog2(NONCE_REUSE)-1:0]    pair_q;
  logic [7:0]                        rc_byte, tcc_byte;

  assign busy = (st_q != C_IDLE);

  always_comb begin
    unique case (st_q)
      C_BOOT_SEED, C_BOOT_RUN, C_BOOT_COMMIT: phase = PH_BOOT;
      C_DV_SEED, C_DV_RUN, C_DV_WAIT:         phase = PH_DVGEN;
      C_DVDIFF:                               phase = PH_DVDIFF;
      C_GPEV:                                 phase = PH_GPEV;
      C_SF:                                   phase = PH_SF;
      C_BITGEN:                               phase = PH_BITGEN;
      default:                                phase = PH_IDLE;
    endcase
  end

  // Parameter bytes of the current nonce pair.
  assign rc_byte  = nonce_active[16*pair_q +: 8];
  assign tcc_byte = nonce_active[16*pair_q + 8 +: 8];
  assign gp_rc    = 8'd128 + {2'b00, rc_byte[5:0]};
  assign sf_tcc   = 5'd8 + {1'b0, tcc_byte[2:0], 1'b0};
  assign sf_first = (iter == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q         <= C_IDLE;
      launched_q   <= 1'b0;
      iter         <= '0;
      pair_q       <= '0;
      nonce_active <= '0;
      round_done   <= 1'b0;
      dist_clear   <= 1'b0;
      seed_load    <= 1'b0;
      seed         <= 64'd1;
      pt_start     <= 1'b0;
      pt_store     <= 1'b0;
      dd_start     <= 1'b0;
      gp_start     <= 1'b0;
      sf_start     <= 1'b0;
      bg_start     <= 1'b0;
    end else begin
      round_done <= 1'b0;
      dist_clear <= 1'b0;
      seed_load  <= 1'b0;
      pt_start   <= 1'b0;
      dd_start   <= 1'b0;
      gp_start   <= 1'b0;
      sf_start   <= 1'b0;
      bg_start   <= 1'b0;
      unique case (st_q)
        C_IDLE: if (start) st_q <= C_BOOT_SEED;
        C_BOOT_SEED: begin
          dist_clear <= 1'b1;
          seed_load  <= 1'b1;
          seed       <= 64'd1;
          launched_q <= 1'b0;
          st_q       <= C_BOOT_RUN;
        end
        C_BOOT_RUN: begin
          if (!launched_q) begin
            pt_start   <= 1'b1;
            pt_store   <= 1'b0;
            launched_q <= 1'b1;
          end else if (pt_done) begin
            st_q <= C_BOOT_COMMIT;
          end
        end
        // The distiller takes the last measurement in the cycle of pt_done.
        C_BOOT_COMMIT: begin
          nonce_active <= dist_nonce;
          st_q         <= C_DV_SEED;
        end
        C_DV_SEED: begin
          dist_clear <= 1'b1;
          seed_load  <= 1'b1;
          seed       <= nonce_active[63:0];
          launched_q <= 1'b0;
          st_q       <= C_DV_RUN;
        end
        C_DV_RUN: begin
          if (!launched_q) begin
            pt_start   <= 1'b1;
            pt_store   <= 1'b1;
            launched_q <= 1'b1;
          end else if (pt_done) begin
            st_q <= C_DV_WAIT;
          end
        end
        C_DV_WAIT: begin
          iter       <= '0;
          pair_q     <= '0;
          launched_q <= 1'b0;
          st_q       <= C_DVDIFF;
        end
        C_DVDIFF: begin
          if (!launched_q) begin
            dd_start   <= 1'b1;
            launched_q <= 1'b1;
          end else if (dd_done) begin
            launched_q <= 1'b0;
            st_q       <= C_GPEV;
          end
        end
        C_GPEV: begin
          if (!launched_q) begin
            gp_start   <= 1'b1;
            launched_q <= 1'b1;
          end else if (gp_done) begin
            launched_q <= 1'b0;
            st_q       <= C_SF;
          end
        end
        C_SF: begin
          if (!launched_q) begin
            sf_start   <= 1'b1;
            launched_q <= 1'b1;
          end else if (sf_done) begin
            launched_q <= 1'b0;
            st_q       <= C_BITGEN;
          end
        end
        C_BITGEN: begin
          if (!launched_q) begin
            bg_start   <= 1'b1;
            launched_q <= 1'b1;
          end else if (bg_done) begin
            launched_q <= 1'b0;
            pair_q     <= (pair_q == ($clog2(NONCE_REUSE))'(NONCE_REUSE - 1))
                          ? '0 : pair_q + 1'b1;
            if (iter == IW'(N_ITER - 1)) begin
              iter         <= '0;
              round_done   <= 1'b1;
              nonce_active <= dist_nonce;
              st_q         <= continuous ? C_DV_SEED : C_IDLE;
            end else begin
              iter <= iter + 1'b1;
              st_q <= C_DVDIFF;
            end
          end
        end
        default: st_q <= C_IDLE;
      endcase
    end
  end

endmodule
