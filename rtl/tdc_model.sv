// tdc_model: BEHAVIOURAL MODEL of the time-to-digital converter. It is
// synthesizable, but it does not measure anything: it stands in for the
// carry-chain TDC and its jitter.
//
// The real TDC is an embedded carry-chain instrument that digitises the delay
// of the path the SiRF netlist launches, at a resolution of about 18 ps, into a
// 12-bit delay value (DV). Its jitter shows up in the low-order DV bit and is
// the TRNG's dynamic entropy.
// Interface: a one-cycle start captures delay_ps; LATENCY cycles later done
// pulses for one cycle with dv = round(delay_ps / RES_PS) + n, where the noise
// n is drawn from -NOISE .. +NOISE steps, nearly uniformly, by a 32-bit
// xorshift generator (seed NOISE_SEED, advanced once per measurement) that
// stands in for the physical jitter. busy is high in between; start while busy
// is ignored.
// RES_PS = 18 follows the reference. LATENCY = 610 cycles is derived from the
// reference's 50 ms for 4,096 measurements at 50 MHz; the uniform noise model
// is this model's own choice.
module tdc_model #(
  parameter int unsigned RES_PS  = 18,
  parameter int unsigned LATENCY = 610,
  parameter int unsigned NOISE   = 1,
  parameter logic [31:0] NOISE_SEED = 32'h2545_f491
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] delay_ps,
  output logic        busy,
  output logic        done,
  output logic [11:0] dv
);

  logic [15:0] delay_q;
  logic [31:0] cnt_q;
  logic [31:0] rng_q, rng_d;

  // xorshift32 (13, 17, 5)
  always_comb begin
    rng_d = rng_q ^ (rng_q << 13);
    rng_d = rng_d ^ (rng_d >> 17);
    rng_d = rng_d ^ (rng_d << 5);
  end

  assign busy = (cnt_q != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      delay_q <= '0;
      cnt_q   <= '0;
      done    <= 1'b0;
      dv      <= '0;
      rng_q   <= (NOISE_SEED == 0) ? 32'd1 : NOISE_SEED;
    end else begin
      done <= 1'b0;
      if (busy) begin
        cnt_q <= cnt_q - 1;
        if (cnt_q == 1) begin
          int signed steps;
          steps = int'((32'(delay_q) + RES_PS / 2) / RES_PS)
                + int'(rng_q % (2 * NOISE + 1)) - int'(NOISE);
          if (steps < 0) steps = 0;
          if (steps > 4095) steps = 4095;
          dv   <= 12'(steps);
          rng_q <= rng_d;
          done <= 1'b1;
        end
      end else if (start) begin
        delay_q <= delay_ps;
        cnt_q   <= (LATENCY == 0) ? 32'd1 : 32'(LATENCY);
      end
    end
  end

endmodule
