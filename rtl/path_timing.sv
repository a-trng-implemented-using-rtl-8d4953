// path_timing: Phase 1 path timing loop (the "Path Timing Module").
//
// One run measures N_CHLNG x PATHS_PER_CHLNG = 128 x 32 = 4,096 path delays,
// as in the reference: for each of 128 challenges it asks the challenge
// generator for a new challenge, then times the 32 outputs of the SiRF netlist
// one at a time by selecting the path, starting the TDC and waiting for its
// result. Every delay value is passed on (meas_valid / meas_dv) to the nonce
// distiller. With store_dv set the DV is also written to the BRAM at word m,
// the measurement index: the first 2,048 measurements form DV_A (words
// 0..2047) and the next 2,048 form DV_B (words 2048..4095). The boot-strap run
// is done with store_dv low, so its DV are discarded.
// Interface: start (one cycle) begins a run; done pulses one cycle at the end;
// busy is high in between. The BRAM write uses port mem (write only).
// Timing: one TDC latency plus two cycles per path, plus the challenge
// generation time per challenge. Which measurements form DV_A and DV_B is this
// design's choice; the reference only says there are two groups of 2,048.
module path_timing #(
  parameter int unsigned N_CHLNG         = 128,
  parameter int unsigned PATHS_PER_CHLNG = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  store_dv,
  output logic                  busy,
  output logic                  done,
  // challenge generator
  output logic                  gen_req,
  input  logic                  gen_valid,
  // netlist path select and TDC
  output logic [$clog2(PATHS_PER_CHLNG)-1:0] path_sel,
  output logic                  tdc_start,
  input  logic                  tdc_done,
  input  logic [11:0]           tdc_dv,
  // measurement stream to the nonce distiller
  output logic                  meas_valid,
  output logic [11:0]           meas_dv,
  // BRAM write port
  output trng_pkg::mem_req_t    mem
);
  import trng_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_REQ, S_WAIT_CH, S_LAUNCH, S_WAIT_TDC} state_e;

  state_e                            state_q;
  logic [$clog2(N_CHLNG)-1:0]        chl_q;
  logic [$clog2(PATHS_PER_CHLNG)-1:0] path_q;
  logic                              store_q;

  assign busy     = (state_q != S_IDLE);
  assign path_sel = path_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      chl_q      <= '0;
      path_q     <= '0;
      store_q    <= 1'b0;
      done       <= 1'b0;
      gen_req    <= 1'b0;
      tdc_start  <= 1'b0;
      meas_valid <= 1'b0;
      meas_dv    <= '0;
      mem        <= MEM_IDLE;
    end else begin
      done       <= 1'b0;
      gen_req    <= 1'b0;
      tdc_start  <= 1'b0;
      meas_valid <= 1'b0;
      mem        <= MEM_IDLE;
      unique case (state_q)
        S_IDLE: if (start) begin
          store_q <= store_dv;
          chl_q   <= '0;
          path_q  <= '0;
          state_q <= S_REQ;
        end
        S_REQ: begin
          gen_req <= 1'b1;
          state_q <= S_WAIT_CH;
        end
        S_WAIT_CH: if (gen_valid) state_q <= S_LAUNCH;
        S_LAUNCH: begin
          tdc_start <= 1'b1;
          state_q   <= S_WAIT_TDC;
        end
        S_WAIT_TDC: if (tdc_done) begin
          meas_valid <= 1'b1;
          meas_dv    <= tdc_dv;
          if (store_q) begin
            mem.en    <= 1'b1;
            mem.we    <= 1'b1;
            mem.addr  <= 16'({chl_q, path_q});
            mem.wdata <= 16'(tdc_dv);
          end
          if (path_q == ($clog2(PATHS_PER_CHLNG))'(PATHS_PER_CHLNG - 1)) begin
            path_q <= '0;
            if (chl_q == ($clog2(N_CHLNG))'(N_CHLNG - 1)) begin
              done    <= 1'b1;
              state_q <= S_IDLE;
            end else begin
              chl_q   <= chl_q + 1'b1;
              state_q <= S_REQ;
            end
          end else begin
            path_q  <= path_q + 1'b1;
            state_q <= S_LAUNCH;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
