// dvdiff: the DVDiff module, first step of the Sponge Function loop.
//
// Two 11-bit address generators walk pseudo-randomly through DV_A and DV_B.
// For iteration i their seeds are i and 2047 - i (in general N - 1 - i), as
// the reference prescribes, and each generator steps once per element. For
// element k = 0 .. N-1 the module reads DV_A[a_k] and DV_B[b_k] and writes the
// signed difference DVD[k] = DV_A[a_k] - DV_B[b_k] (16-bit two's complement).
// The reference uses 11-bit LFSRs on a primitive polynomial but also seeds
// them with 0 and asks them to reach all 2,048 elements; a plain LFSR can do
// neither, so the generators are de Bruijn counters (an LFSR on x^11 + x^9 + 1
// extended with the all-zero state), which walk all 2,048 addresses from any
// seed. That extension is this design's choice.
// Interface: start (one cycle) with iter; done pulses once DVD is complete.
// Port a reads DV_A, port b reads DV_B and writes DVD.
// Timing: two cycles per element, 2N + 1 cycles from start to done.
// Port a only reads, so its we and wdata bits are constant 0, and the
// address bits above the region offset are fixed by the region base: the
// synthesis report lists them as constant outputs, as intended.
module dvdiff #(
  parameter int unsigned N = 2048
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [$clog2(N)-1:0] iter,
  output logic                 busy,
  output logic                 done,
  output trng_pkg::mem_req_t   mem_a,
  output trng_pkg::mem_req_t   mem_b,
  input  logic [15:0]          rdata_a,
  input  logic [15:0]          rdata_b
);
  import trng_pkg::*;

  localparam int unsigned LOG2N = $clog2(N);

  typedef enum logic [1:0] {S_IDLE, S_RD, S_WR} state_e;

  state_e            state_q;
  logic [LOG2N-1:0]  sel_a_q, sel_b_q, k_q;

  assign busy = (state_q != S_IDLE);

  always_comb begin
    mem_a = MEM_IDLE;
    mem_b = MEM_IDLE;
    if (state_q == S_RD) begin
      mem_a.en   = 1'b1;
      mem_a.addr = region_base(REG_DVA, N) + 16'(sel_a_q);
      mem_b.en   = 1'b1;
      mem_b.addr = region_base(REG_DVB, N) + 16'(sel_b_q);
    end else if (state_q == S_WR) begin
      mem_b.en    = 1'b1;
      mem_b.we    = 1'b1;
      mem_b.addr  = region_base(REG_DVD, N) + 16'(k_q);
      mem_b.wdata = rdata_a - rdata_b;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      sel_a_q <= '0;
      sel_b_q <= '0;
      k_q     <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          sel_a_q <= iter;
          sel_b_q <= LOG2N'(N - 1) - iter;
          k_q     <= '0;
          state_q <= S_RD;
        end
        S_RD: state_q <= S_WR;
        S_WR: begin
          sel_a_q <= LOG2N'(debruijn_next(16'(sel_a_q), LOG2N));
          sel_b_q <= LOG2N'(debruijn_next(16'(sel_b_q), LOG2N));
          k_q     <= k_q + 1'b1;
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
