// chlng_gen: random challenge generator of Phase 1 (the "64-bit LFSR Chlng
// Gen." box).
//
// A 64-bit Fibonacci LFSR (x^64 + x^63 + x^61 + x^60 + 1) is loaded with a seed
// by seed_load: the controller loads 1 before the boot-strap run and the first
// 64 nonce bits before every DV generation run, as the reference algorithm
// does. An all-zero seed would lock the LFSR, so it is replaced by 1.
// On req the generator shifts CHLNG_W LFSR output bits (one per clock, the
// MSB of the state before each step) into the challenge register and then
// pulses valid for one cycle with the new challenge on chlng; the challenge
// stays stable until the next req. A challenge is thus ready CHLNG_W + 1
// cycles after req.
//
// CHLNG_W = 198 bits is this design's count for the 3x2 module configuration:
// per module 16 shift-register, 1 transition-direction and 2 x 8 MUX challenge
// bits. The polynomial and the bit-serial filling are this design's choices;
// the reference gives only "64-bit LFSR".
module chlng_gen #(
  parameter int unsigned CHLNG_W = 198
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               seed_load,
  input  logic [63:0]        seed,
  input  logic               req,
  output logic               valid,
  output logic               busy,
  output logic [CHLNG_W-1:0] chlng
);
  import trng_pkg::*;

  logic [63:0] lfsr_q;
  logic [$clog2(CHLNG_W+1)-1:0] cnt_q;

  assign busy = (cnt_q != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr_q <= 64'd1;
      cnt_q  <= '0;
      valid  <= 1'b0;
      chlng  <= '0;
    end else begin
      valid <= 1'b0;
      if (seed_load) begin
        lfsr_q <= (seed == 64'd0) ? 64'd1 : seed;
        cnt_q  <= '0;
      end else if (busy) begin
        chlng  <= {chlng[CHLNG_W-2:0], lfsr_q[63]};
        lfsr_q <= lfsr64_next(lfsr_q);
        cnt_q  <= cnt_q - 1'b1;
        if (cnt_q == 1) valid <= 1'b1;
      end else if (req) begin
        cnt_q <= ($clog2(CHLNG_W+1))'(CHLNG_W);
      end
    end
  end

endmodule
