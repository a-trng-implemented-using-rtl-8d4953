// sirf_netlist_model: BEHAVIOURAL MODEL of the SiRF engineered netlist (the
// "Entropy Source": Launch FFs, shift-register modules, reconvergent-fanout
// modules and the path select MUX), not synthesizable logic.
//
// The real part is a placed-and-routed netlist whose only useful output is
// timing: a challenge configures the shift registers and MUXes, the Launch
// FFs fire a transition, and the delay of the path picked by path_sel to the
// SiRF_path output is what the TDC measures. That delay is fixed by
// manufacturing variation (static entropy) and cannot be described in RTL.
// This model returns, combinationally, a path delay in picoseconds that is a
// fixed pseudo-random function of (DEVICE_ID, challenge, path_sel), spread
// uniformly over MIN_PS .. MIN_PS + SPAN_PS - 1. The defaults give delay
// values of about 300 to 1000 TDC steps of 18 ps, the range the reference
// reports. N_PATHS = 32 outputs follows from the 3x2 configuration of 16-output
// modules. Everything else (the hash, the uniform spread) is model choice.
module sirf_netlist_model #(
  parameter int unsigned CHLNG_W   = 198,
  parameter int unsigned N_PATHS   = 32,
  parameter int unsigned MIN_PS    = 5400,
  parameter int unsigned SPAN_PS   = 12600,
  parameter logic [31:0] DEVICE_ID = 32'h5152_4601
) (
  input  logic [CHLNG_W-1:0]         chlng,
  input  logic [$clog2(N_PATHS)-1:0] path_sel,
  output logic [15:0]                delay_ps
);

  // 32-bit mixing step (xorshift-multiply).
  function automatic logic [31:0] mix(logic [31:0] h, logic [31:0] d);
    logic [31:0] x;
    x = h ^ d;
    x = x ^ (x >> 16);
    x = x * 32'h7feb_352d;
    x = x ^ (x >> 15);
    x = x * 32'h846c_a68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  localparam int unsigned N_WORDS = (CHLNG_W + 31) / 32;

  always_comb begin
    logic [32*N_WORDS-1:0] padded;
    logic [31:0] h;
    padded = '0;
    padded[CHLNG_W-1:0] = chlng;
    h = DEVICE_ID;
    for (int unsigned i = 0; i < N_WORDS; i++) h = mix(h, padded[32*i +: 32]);
    h = mix(h, 32'(path_sel));
    delay_ps = 16'(MIN_PS + (h % SPAN_PS));
  end

endmodule
