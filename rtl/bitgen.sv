// bitgen: the BitGen module, which squeezes the random bits out of the
// Sponge Function state.
//
// It reads the N values DVD_cs[0..N-1] in order and emits one bit per value:
// 0 for a negative value, 1 for a positive one and, as the reference
// prescribes, alternately 0 and 1 for values that are exactly zero. The
// alternation flip-flop starts at 0 after reset and carries over from one
// iteration to the next (this design's choice).
// Interface: start (one cycle); the bits leave on a valid/ready stream
// (bit_valid, bit_out, bit_ready): a bit is held until accepted, so a slow
// consumer stalls the module. done pulses after the N-th bit is accepted.
// Port a reads DVD_cs.
// Timing: two cycles per bit when bit_ready is held high, 2N + 1 cycles from
// the start cycle to the done cycle.
// Port a only reads, so its we and wdata bits are constant 0 and the address
// bits above the region offset are fixed: the synthesis report lists them as
// constant outputs, as intended.
module bitgen #(
  parameter int unsigned N = 2048
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               done,
  output trng_pkg::mem_req_t mem_a,
  input  logic [15:0]        rdata_a,
  output logic               bit_valid,
  output logic               bit_out,
  input  logic               bit_ready
);
  import trng_pkg::*;

  localparam int unsigned LOG2N = $clog2(N);

  typedef enum logic [1:0] {S_IDLE, S_RD, S_OUT} state_e;

  state_e           state_q;
  logic [LOG2N-1:0] k_q;
  logic             zero_tog_q;
  logic             is_zero;

  assign busy      = (state_q != S_IDLE);
  assign is_zero   = (rdata_a == 16'd0);
  assign bit_valid = (state_q == S_OUT);
  assign bit_out   = is_zero ? zero_tog_q : ~rdata_a[15];

  always_comb begin
    mem_a = MEM_IDLE;
    if (state_q == S_RD) begin
      mem_a.en   = 1'b1;
      mem_a.addr = region_base(REG_DVDCS, N) + 16'(k_q);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      k_q        <= '0;
      zero_tog_q <= 1'b0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          k_q     <= '0;
          state_q <= S_RD;
        end
        S_RD: state_q <= S_OUT;
        S_OUT: if (bit_ready) begin
          if (is_zero) zero_tog_q <= ~zero_tog_q;
          k_q <= k_q + 1'b1;
          if (k_q == LOG2N'(N - 1)) begin
            done    <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            state_q <= S_RD;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
