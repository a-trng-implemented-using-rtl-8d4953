// tb_tdc_model: self-checking testbench of the TDC model.
//
// Starts many measurements of random delays and checks that done comes
// LATENCY cycles after start, that every DV lies within one step of
// round(delay / 18), that the noise takes all three values -1, 0 and +1, and
// that the low-order DV bit is balanced (it is the dynamic entropy source).
module tb_tdc_model;

  localparam int LAT = 20;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic        start = 1'b0;
  logic [15:0] delay_ps = '0;
  logic        busy, done;
  logic [11:0] dv;

  tdc_model #(.LATENCY(LAT)) dut (.clk, .rst_n, .start, .delay_ps, .busy, .done, .dv);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seen[3];
    int ones, n;
    ones = 0; n = 2000;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < n; i++) begin
      int d, cyc, e;
      d = 5400 + int'($urandom % 12600);
      @(negedge clk);
      delay_ps = 16'(d);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      e = (d + 9) / 18;
      checks += 2;
      if (cyc != LAT + 1) begin failures++; $display("latency %0d", cyc); end
      if (int'(dv) < e - 1 || int'(dv) > e + 1) begin
        failures++;
        $display("dv %0d for delay %0d", dv, d);
      end else seen[int'(dv) - e + 1]++;
      ones += int'(dv[0]);
    end
    checks += 4;
    if (seen[0] == 0) begin failures++; $display("no -1 noise"); end
    if (seen[1] == 0) begin failures++; $display("no 0 noise"); end
    if (seen[2] == 0) begin failures++; $display("no +1 noise"); end
    if (ones < n * 4 / 10 || ones > n * 6 / 10) begin failures++; $display("lsb ones %0d of %0d", ones, n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
