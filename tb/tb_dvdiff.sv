// tb_dvdiff: self-checking testbench of the DVDiff module.
//
// Fills DV_A and DV_B of a RAM with random delay values (300..1000), runs
// several iterations (0, 1, 7, 1000, 2047) and compares every DVD word with the
// reference walk of tb_ref_pkg. It also checks that the address walk of
// iteration 0 touches each of the N DV_A words exactly once, and that each run
// takes 2N + 1 cycles from the start cycle to the done cycle.
module tb_dvdiff;
  import trng_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 2048;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic              start = 1'b0;
  logic [10:0]       iter = '0;
  logic              busy, done;
  mem_req_t          ma, mb;
  logic [15:0]       ra, rb;

  dvdiff #(.N(N)) dut (
    .clk, .rst_n, .start, .iter, .busy, .done,
    .mem_a(ma), .mem_b(mb), .rdata_a(ra), .rdata_b(rb)
  );
  trng_bram #(.DEPTH(6 * N)) ram (.clk, .a(ma), .b(mb), .rdata_a(ra), .rdata_b(rb));

  int dva[], dvb[], dvd[];
  int seen[N];
  int its[5] = '{0, 1, 7, 1000, 2047};

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Count which DV_A words are read during the iteration-0 run.
  logic count_reads = 1'b0;
  always @(posedge clk)
    if (count_reads && ma.en && !ma.we) seen[int'(ma.addr)]++;

  initial begin
    dva = new[N]; dvb = new[N]; dvd = new[N];
    foreach (dva[k]) begin
      dva[k] = 300 + int'($urandom % 701);
      dvb[k] = 300 + int'($urandom % 701);
      ram.mem_q[k]     = 16'(dva[k]);
      ram.mem_q[N + k] = 16'(dvb[k]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    foreach (its[t]) begin
      int cyc;
      @(negedge clk);
      iter = 11'(its[t]);
      start = 1'b1;
      count_reads = (its[t] == 0);
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      count_reads = 1'b0;
      checks++;
      if (cyc != 2 * N + 1) begin
        failures++;
        $display("iteration %0d took %0d cycles, expected %0d", its[t], cyc, 2 * N + 1);
      end
      ref_dvdiff(dva, dvb, its[t], dvd);
      for (int k = 0; k < N; k++) begin
        checks++;
        if (16'(dvd[k]) !== ram.mem_q[2 * N + k]) begin
          failures++;
          if (failures < 10)
            $display("it %0d DVD[%0d] = %0d, expected %0d", its[t], k,
                     $signed(ram.mem_q[2 * N + k]), dvd[k]);
        end
      end
    end
    for (int k = 0; k < N; k++) begin
      checks++;
      if (seen[k] != 1) begin
        failures++;
        if (failures < 10) $display("DV_A[%0d] read %0d times in iteration 0", k, seen[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
