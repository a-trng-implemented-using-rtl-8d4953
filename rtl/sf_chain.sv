// sf_chain: the Spread-Factor (SF) module, the chaining step of the Sponge
// Function loop.
//
// For every element k the module reads DVD_c[k] and the spread factor SF[k]
// left by the previous iteration (taken as 0 when first is set, which is how
// the SF start at zero on the first iteration) and then, as the reference
// describes:
//   1. x = DVD_c[k] - SF[k];
//   2. adds or subtracts the Trim Code Constant TCC, one step per clock, until
//      -TCC/2 <= x <= TCC/2, counting the steps;
//   3. an even count leaves everything as it is: DVD_cs[k] = x, SF unchanged;
//      an odd count mirrors x to the other side of zero, DVD_cs[k] = -x, and
//      changes SF by the offset, SF[k] += 2x. With TCC = 20 a start value of 52
//      takes three steps to -8; the output is 8 and SF changes by -16, the
//      worked example the reference prints.
// SF is kept in +-64 by dropping its high-order bits: it is an 11-bit Q6.4
// two's complement value, sign-extended into its 16-bit RAM word.
// The reference's text says the offset "is added to SF" while its worked
// example shows SF += -16 for an upward move of +16; this module follows the
// worked example.
// TCC arrives as an integer (8..22, even) and is used as TCC * 16 in Q.4.
// Interface: start (one cycle) with tcc and first; done pulses when all N
// elements are written. Port a reads DVD_c and writes DVD_cs; port b reads and
// writes SF.
// Timing: 4 cycles per element plus one per fold step; the number of fold
// steps depends on the data, so the run time is not fixed.
module sf_chain #(
  parameter int unsigned N = 2048
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [4:0]         tcc,
  input  logic               first,
  output logic               busy,
  output logic               done,
  output trng_pkg::mem_req_t mem_a,
  output trng_pkg::mem_req_t mem_b,
  input  logic [15:0]        rdata_a,
  input  logic [15:0]        rdata_b,
  // statistics of the last element finished (for observation)
  output logic               elem_done,
  output logic               elem_odd
);
  import trng_pkg::*;

  localparam int unsigned LOG2N = $clog2(N);

  typedef enum logic [2:0] {S_IDLE, S_RD, S_LOAD, S_FOLD, S_WR} state_e;

  state_e                   state_q;
  logic [LOG2N-1:0]         k_q;
  logic                     first_q;
  logic signed [17:0]       tcc_q4, half_q4;
  logic signed [17:0]       x_q;
  logic                     odd_q;
  logic signed [SF_BITS-1:0] sf_q;
  logic signed [15:0]       dvdcs_q;
  logic signed [SF_BITS-1:0] sf_new_q;

  logic signed [17:0]       sf_wide;
  logic signed [SF_BITS-1:0] sf_mirror;

  assign busy = (state_q != S_IDLE);

  // SF update of a mirrored element: SF + 2x, high-order bits dropped.
  assign sf_wide   = 18'(sf_q) + (x_q <<< 1);
  assign sf_mirror = SF_BITS'(sf_wide);

  always_comb begin
    mem_a = MEM_IDLE;
    mem_b = MEM_IDLE;
    if (state_q == S_RD) begin
      mem_a.en   = 1'b1;
      mem_a.addr = region_base(REG_DVDC, N) + 16'(k_q);
      mem_b.en   = 1'b1;
      mem_b.addr = region_base(REG_SF, N) + 16'(k_q);
    end else if (state_q == S_WR) begin
      mem_a.en    = 1'b1;
      mem_a.we    = 1'b1;
      mem_a.addr  = region_base(REG_DVDCS, N) + 16'(k_q);
      mem_a.wdata = dvdcs_q;
      mem_b.en    = 1'b1;
      mem_b.we    = 1'b1;
      mem_b.addr  = region_base(REG_SF, N) + 16'(k_q);
      mem_b.wdata = 16'(sf_new_q);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      k_q       <= '0;
      first_q   <= 1'b0;
      tcc_q4    <= '0;
      half_q4   <= '0;
      x_q       <= '0;
      odd_q     <= 1'b0;
      sf_q      <= '0;
      dvdcs_q   <= '0;
      sf_new_q  <= '0;
      done      <= 1'b0;
      elem_done <= 1'b0;
      elem_odd  <= 1'b0;
    end else begin
      done      <= 1'b0;
      elem_done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          k_q     <= '0;
          first_q <= first;
          tcc_q4  <= 18'(tcc) <<< FRAC_BITS;
          half_q4 <= 18'(tcc) <<< (FRAC_BITS - 1);
          state_q <= S_RD;
        end
        S_RD: state_q <= S_LOAD;
        S_LOAD: begin
          logic signed [SF_BITS-1:0] sf_in;
          sf_in   = first_q ? '0 : SF_BITS'(signed'(rdata_b));
          sf_q    <= sf_in;
          x_q     <= 18'(signed'(rdata_a)) - 18'(sf_in);
          odd_q   <= 1'b0;
          state_q <= S_FOLD;
        end
        S_FOLD: begin
          if (x_q > half_q4) begin
            x_q   <= x_q - tcc_q4;
            odd_q <= ~odd_q;
          end else if (x_q < -half_q4) begin
            x_q   <= x_q + tcc_q4;
            odd_q <= ~odd_q;
          end else begin
            if (odd_q) begin
              dvdcs_q  <= 16'(-x_q);
              sf_new_q <= sf_mirror;
            end else begin
              dvdcs_q  <= 16'(x_q);
              sf_new_q <= sf_q;
            end
            elem_done <= 1'b1;
            elem_odd  <= odd_q;
            state_q   <= S_WR;
          end
        end
        S_WR: begin
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
