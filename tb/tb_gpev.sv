// tb_gpev: self-checking testbench of the GPEV module.
//
// Writes N random DVD (differences of two values in 300..1000, plus one
// large outlier in the second data set) to the RAM, runs GPEV with several
// Range Constants and compares every DVD_c with the integer reference of
// tb_ref_pkg. It also checks each DVD_c against the real-valued Eqs. 1-6
// within 0.25 and checks the run time of 2N + 36 cycles (start cycle to done cycle).
module tb_gpev;
  import trng_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 2048;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic        start = 1'b0;
  logic [7:0]  rc = '0;
  logic        busy, done;
  mem_req_t    ma, mb;
  logic [15:0] ra, rb;

  gpev #(.N(N)) dut (
    .clk, .rst_n, .start, .rc, .busy, .done, .mem_a(ma), .mem_b(mb), .rdata_a(ra)
  );
  trng_bram #(.DEPTH(6 * N)) ram (.clk, .a(ma), .b(mb), .rdata_a(ra), .rdata_b(rb));

  int dvd[], dvdc[];
  int rcs[4] = '{128, 150, 168, 191};

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int rcv, input bit outlier);
    int cyc;
    real sum, mx, mn, mu, rng, exact;
    dvd = new[N]; dvdc = new[N];
    foreach (dvd[k]) begin
      dvd[k] = int'($urandom % 701) - int'($urandom % 701);
      ram.mem_q[2 * N + k] = 16'(dvd[k]);
    end
    if (outlier) begin
      dvd[5] = 2500;
      ram.mem_q[2 * N + 5] = 16'(dvd[5]);
    end
    @(negedge clk);
    rc = 8'(rcv);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 2 * N + 36) begin
      failures++;
      $display("rc %0d: %0d cycles, expected %0d", rcv, cyc, 2 * N + 36);
    end
    ref_gpev(dvd, rcv, dvdc);
    sum = 0; mx = -1e9; mn = 1e9;
    foreach (dvd[k]) begin
      sum += dvd[k];
      if (dvd[k] > mx) mx = dvd[k];
      if (dvd[k] < mn) mn = dvd[k];
    end
    mu  = sum / N;
    rng = (mx - 0.05 * mx) - (mn + 0.05 * mn);
    for (int k = 0; k < N; k++) begin
      checks++;
      if (16'(dvdc[k]) !== ram.mem_q[3 * N + k]) begin
        failures++;
        if (failures < 10)
          $display("rc %0d DVD_c[%0d] = %0d, expected %0d", rcv, k,
                   $signed(ram.mem_q[3 * N + k]), dvdc[k]);
      end
      exact = (dvd[k] - mu) / rng * rcv;
      checks++;
      if ((real'($signed(ram.mem_q[3 * N + k])) / 16.0 - exact) > 0.25 ||
          (real'($signed(ram.mem_q[3 * N + k])) / 16.0 - exact) < -0.25) begin
        failures++;
        if (failures < 10)
          $display("rc %0d DVD_c[%0d] = %f, equation gives %f", rcv, k,
                   real'($signed(ram.mem_q[3 * N + k])) / 16.0, exact);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    foreach (rcs[i]) run(rcs[i], i == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
