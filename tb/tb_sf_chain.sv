// tb_sf_chain: self-checking testbench of the Spread-Factor module.
//
// Checks the worked example first (TCC = 20: 52 -> output 8 and SF += -16;
// -35 -> output 5 and SF unchanged), then chains twenty iterations over N random
// DVD_c with different TCC, the first with the first flag set, and compares
// every DVD_cs and SF word with the closed-form reference of tb_ref_pkg. It
// counts mirrored (odd) elements and SF wrap-arounds so that both paths are
// known to be exercised, and checks the run time: 4 cycles per element plus
// one per fold step.
module tb_sf_chain;
  import trng_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 2048;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int n_odd = 0;
  int n_wrap = 0;

  logic        start = 1'b0;
  logic [4:0]  tcc = '0;
  logic        first = 1'b0;
  logic        busy, done, elem_done, elem_odd;
  mem_req_t    ma, mb;
  logic [15:0] ra, rb;

  sf_chain #(.N(N)) dut (
    .clk, .rst_n, .start, .tcc, .first, .busy, .done, .mem_a(ma), .mem_b(mb),
    .rdata_a(ra), .rdata_b(rb), .elem_done, .elem_odd
  );
  trng_bram #(.DEPTH(6 * N)) ram (.clk, .a(ma), .b(mb), .rdata_a(ra), .rdata_b(rb));

  int dvdc[N], sf[N], exp_cs[N], exp_sf[N];
  bit exp_odd[N];

  initial begin : watchdog
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int t, input bit f);
    int cyc, steps, x;
    steps = 0;
    for (int k = 0; k < N; k++) begin
      int s_in;
      ram.mem_q[3 * N + k] = 16'(dvdc[k]);
      s_in = f ? 0 : sf[k];
      ref_sf(dvdc[k], s_in, t, exp_cs[k], exp_sf[k], exp_odd[k]);
      x = dvdc[k] - s_in;
      // fold steps: |x - out| / TCC
      steps += ((x - (exp_odd[k] ? -exp_cs[k] : exp_cs[k])) / (t * 16)) < 0 ?
               -((x - (exp_odd[k] ? -exp_cs[k] : exp_cs[k])) / (t * 16)) :
               ((x - (exp_odd[k] ? -exp_cs[k] : exp_cs[k])) / (t * 16));
      if (exp_odd[k]) begin
        n_odd++;
        if (s_in + 2 * (-exp_cs[k]) != exp_sf[k]) n_wrap++;
      end
    end
    @(negedge clk);
    tcc = 5'(t);
    first = f;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 4 * N + steps + 1) begin
      failures++;
      $display("tcc %0d: %0d cycles, expected %0d", t, cyc, 4 * N + steps + 1);
    end
    for (int k = 0; k < N; k++) begin
      checks += 2;
      if (ram.mem_q[4 * N + k] !== 16'(exp_cs[k])) begin
        failures++;
        if (failures < 10)
          $display("tcc %0d DVD_cs[%0d] = %0d, expected %0d (DVD_c %0d SF %0d)", t, k,
                   $signed(ram.mem_q[4 * N + k]), exp_cs[k], dvdc[k], f ? 0 : sf[k]);
      end
      if (ram.mem_q[5 * N + k] !== 16'(exp_sf[k])) begin
        failures++;
        if (failures < 10)
          $display("tcc %0d SF[%0d] = %0d, expected %0d", t, k,
                   $signed(ram.mem_q[5 * N + k]), exp_sf[k]);
      end
      sf[k] = exp_sf[k];
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // Worked example of the reference (values in Q.4): SF = 0, TCC = 20.
    for (int k = 0; k < N; k++) dvdc[k] = 0;
    dvdc[0] = 52 * 16;
    dvdc[1] = -35 * 16;
    run(20, 1'b1);
    checks += 4;
    if ($signed(ram.mem_q[4 * N + 0]) != 8 * 16)   begin failures++; $display("example 1 output"); end
    if ($signed(ram.mem_q[5 * N + 0]) != -16 * 16) begin failures++; $display("example 1 SF"); end
    if ($signed(ram.mem_q[4 * N + 1]) != 5 * 16)   begin failures++; $display("example 2 output"); end
    if ($signed(ram.mem_q[5 * N + 1]) != 0)        begin failures++; $display("example 2 SF"); end
    // Random chained iterations; DVD_c about +-RC/2, in Q.4.
    for (int it = 0; it < 20; it++) begin
      for (int k = 0; k < N; k++) dvdc[k] = int'($urandom % 3201) - 1600;
      run(8 + 2 * int'($urandom % 8), it == 0);
    end
    checks++;
    if (n_odd == 0 || n_wrap == 0) begin
      failures++;
      $display("mirror (%0d) or SF wrap (%0d) never exercised", n_odd, n_wrap);
    end
    $display("mirrored elements %0d, SF wrap-arounds %0d", n_odd, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
