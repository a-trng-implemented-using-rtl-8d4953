// tb_bitgen: self-checking testbench of the BitGen module.
//
// Fills DVD_cs with random negative, positive and many zero values, runs two
// iterations with a consumer that randomly withholds bit_ready (stalls), and
// compares every bit with the sign rule (zeros alternate 0, 1, 0, ... across
// the whole run). Also checks that a bit is held steady while stalled and that
// an iteration takes 2N + 1 cycles when bit_ready is always high.
module tb_bitgen;
  import trng_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 2048;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int stalls = 0;

  logic        start = 1'b0;
  logic        busy, done;
  mem_req_t    ma, mb;
  logic [15:0] ra, rb;
  logic        bit_valid, bit_out, bit_ready;

  bitgen #(.N(N)) dut (
    .clk, .rst_n, .start, .busy, .done, .mem_a(ma), .rdata_a(ra),
    .bit_valid, .bit_out, .bit_ready
  );
  assign mb = MEM_IDLE;
  trng_bram #(.DEPTH(6 * N)) ram (.clk, .a(ma), .b(mb), .rdata_a(ra), .rdata_b(rb));

  int vals[N];
  bit tog = 1'b0;
  int idx;
  bit random_ready = 1'b0;
  logic held_valid = 1'b0;
  logic held_bit;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) bit_ready <= random_ready ? ($urandom % 3 != 0) : 1'b1;

  // Consumer: check each accepted bit, and that a stalled bit stays put.
  always @(posedge clk) if (rst_n) begin
    if (held_valid) begin
      checks++;
      if (!bit_valid || bit_out !== held_bit) begin
        failures++;
        $display("bit changed while stalled");
      end
    end
    held_valid <= bit_valid && !bit_ready;
    held_bit   <= bit_out;
    if (bit_valid && !bit_ready) stalls++;
    if (bit_valid && bit_ready) begin
      bit e;
      e = ref_bit(vals[idx], tog);
      checks++;
      if (bit_out !== e) begin
        failures++;
        if (failures < 10) $display("bit %0d (value %0d) = %0b, expected %0b", idx, vals[idx], bit_out, e);
      end
      idx <= idx + 1;
    end
  end

  task automatic run(input bit rnd);
    int cyc;
    for (int k = 0; k < N; k++) begin
      case ($urandom % 3)
        0: vals[k] = -1 - int'($urandom % 100);
        1: vals[k] = 1 + int'($urandom % 100);
        default: vals[k] = 0;
      endcase
      ram.mem_q[4 * N + k] = 16'(vals[k]);
    end
    idx = 0;
    random_ready = rnd;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (idx != N) begin failures++; $display("%0d bits accepted, expected %0d", idx, N); end
    if (!rnd) begin
      checks++;
      if (cyc != 2 * N + 1) begin failures++; $display("%0d cycles, expected %0d", cyc, 2 * N + 1); end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(1'b0);
    run(1'b1);
    checks++;
    if (stalls == 0) begin failures++; $display("no stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
