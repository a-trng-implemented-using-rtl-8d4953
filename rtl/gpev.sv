// gpev: Global Process and Environmental Variation compensation.
//
// Reads the N signed DVD and writes the compensated soft data DVD_c. Pass 1
// streams the DVD once (one word per cycle) to form their sum, maximum and
// minimum. The module then computes, in Q.4 fixed point:
//   mu    = sum / N                                  (Eq. 1)
//   max'  = max - 0.05 * max,  min' = min + 0.05 * min (Eqs. 2, 3)
//   range = max' - min'                               (Eq. 4)
//   scale = RC * 2^20 / range   (sequential restoring divider, 32 cycles)
// and pass 2 streams the DVD again and writes
//   DVD_c = (DVD - mu) * RC / range = ((16*DVD - mu) * scale) >>> 16  (Eqs. 5, 6)
// saturated to 16 bits, one word per cycle. The Range Constant RC (128..191)
// comes from the nonces. The equations follow the reference. The 0.05 factor
// is the 12-bit fraction 205/4096, and folding RC / range into a single
// reciprocal (one division per iteration, one multiply per element) is this
// design's choice. A range of zero or less is forced to 1 LSB. Shifts of
// negative values round toward minus infinity.
// Interface: start (one cycle) with rc; done pulses when DVD_c is written.
// Port a reads DVD, port b writes DVD_c.
// Timing: 2N + 36 cycles from the start cycle to the done cycle.
// Port a only reads and port b only writes, so a's we/wdata and b's we are
// constant, as are the address bits fixed by the region bases: the synthesis
// report lists them as constant outputs, as intended.
module gpev #(
  parameter int unsigned N = 2048
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [7:0]         rc,
  output logic               busy,
  output logic               done,
  output trng_pkg::mem_req_t mem_a,
  output trng_pkg::mem_req_t mem_b,
  input  logic [15:0]        rdata_a
);
  import trng_pkg::*;

  localparam int unsigned LOG2N   = $clog2(N);
  localparam int unsigned DIV_W   = 32;
  localparam logic signed [31:0] FIVE_PCT = 32'sd205;  // 0.05 in 1/4096

  typedef enum logic [2:0] {S_IDLE, S_P1, S_CALC, S_DIV, S_P2} state_e;

  state_e                 state_q;
  logic [LOG2N:0]         issue_q;     // read requests issued
  logic                   pend_q;      // a read is returning this cycle
  logic [LOG2N-1:0]       pidx_q;      // index of the returning word
  logic signed [31:0]     sum_q;
  logic signed [15:0]     max_q, min_q;
  logic signed [31:0]     mu_q4_q;
  logic [7:0]             rc_q;
  logic [DIV_W-1:0]       num_q, den_q, rem_q, quo_q;
  logic [5:0]             div_cnt_q;

  logic signed [15:0]     dvd;
  logic signed [63:0]     prod;
  logic signed [63:0]     dvdc_full;
  logic signed [15:0]     dvdc_sat;

  // Combinational results of pass 1, used in S_CALC.
  logic signed [31:0]     maxb_q4, minb_q4, range_q4, mu_q4;

  assign busy = (state_q != S_IDLE);
  assign dvd  = signed'(rdata_a);

  always_comb begin
    mu_q4    = (sum_q <<< 4) >>> LOG2N;
    maxb_q4  = (32'(max_q) <<< 4) - ((32'(max_q) * FIVE_PCT) >>> 8);
    minb_q4  = (32'(min_q) <<< 4) + ((32'(min_q) * FIVE_PCT) >>> 8);
    range_q4 = maxb_q4 - minb_q4;
    if (range_q4 <= 0) range_q4 = 32'sd1;
  end

  // Pass 2 arithmetic on the word returning from the RAM.
  always_comb begin
    prod      = (64'(dvd) <<< 4) - 64'(mu_q4_q);
    dvdc_full = (prod * signed'({32'd0, quo_q})) >>> 16;
    if (dvdc_full > 64'sd32767)       dvdc_sat = 16'sh7fff;
    else if (dvdc_full < -64'sd32768) dvdc_sat = 16'sh8000;
    else                              dvdc_sat = 16'(dvdc_full);
  end

  always_comb begin
    mem_a = MEM_IDLE;
    mem_b = MEM_IDLE;
    if ((state_q == S_P1 || state_q == S_P2) && issue_q < (LOG2N+1)'(N)) begin
      mem_a.en   = 1'b1;
      mem_a.addr = region_base(REG_DVD, N) + 16'(issue_q);
    end
    if (state_q == S_P2 && pend_q) begin
      mem_b.en    = 1'b1;
      mem_b.we    = 1'b1;
      mem_b.addr  = region_base(REG_DVDC, N) + 16'(pidx_q);
      mem_b.wdata = dvdc_sat;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      issue_q   <= '0;
      pend_q    <= 1'b0;
      pidx_q    <= '0;
      sum_q     <= '0;
      max_q     <= '0;
      min_q     <= '0;
      mu_q4_q   <= '0;
      rc_q      <= '0;
      num_q     <= '0;
      den_q     <= '0;
      rem_q     <= '0;
      quo_q     <= '0;
      div_cnt_q <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          rc_q    <= rc;
          issue_q <= '0;
          pend_q  <= 1'b0;
          sum_q   <= '0;
          max_q   <= 16'sh8000;
          min_q   <= 16'sh7fff;
          state_q <= S_P1;
        end
        S_P1: begin
          if (issue_q < (LOG2N+1)'(N)) begin
            issue_q <= issue_q + 1'b1;
            pidx_q  <= LOG2N'(issue_q);
          end
          pend_q <= (issue_q < (LOG2N+1)'(N));
          if (pend_q) begin
            sum_q <= sum_q + 32'(dvd);
            if (dvd > max_q) max_q <= dvd;
            if (dvd < min_q) min_q <= dvd;
          end
          if (pend_q && issue_q == (LOG2N+1)'(N)) state_q <= S_CALC;
        end
        S_CALC: begin
          mu_q4_q   <= mu_q4;
          num_q     <= 32'(rc_q) << 20;
          den_q     <= 32'(range_q4);
          rem_q     <= '0;
          quo_q     <= '0;
          div_cnt_q <= 6'(DIV_W);
          state_q   <= S_DIV;
        end
        S_DIV: begin
          // One restoring-division step per cycle, MSB first.
          logic [DIV_W:0] r;
          r = {rem_q, num_q[DIV_W-1]};
          num_q <= num_q << 1;
          if (r >= {1'b0, den_q}) begin
            rem_q <= DIV_W'(r - {1'b0, den_q});
            quo_q <= {quo_q[DIV_W-2:0], 1'b1};
          end else begin
            rem_q <= DIV_W'(r);
            quo_q <= {quo_q[DIV_W-2:0], 1'b0};
          end
          div_cnt_q <= div_cnt_q - 1'b1;
          if (div_cnt_q == 6'd1) begin
            issue_q <= '0;
            pend_q  <= 1'b0;
            state_q <= S_P2;
          end
        end
        S_P2: begin
          if (issue_q < (LOG2N+1)'(N)) begin
            issue_q <= issue_q + 1'b1;
            pidx_q  <= LOG2N'(issue_q);
          end
          pend_q <= (issue_q < (LOG2N+1)'(N));
          if (pend_q && issue_q == (LOG2N+1)'(N)) begin
            done    <= 1'b1;
            state_q <= S_IDLE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
