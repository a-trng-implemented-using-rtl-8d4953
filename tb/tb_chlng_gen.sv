// tb_chlng_gen: self-checking testbench of the challenge generator.
//
// Seeds the 64-bit LFSR with 1 and with a random value, requests several
// challenges and compares each with a bit-serial reference LFSR
// (x^64 + x^63 + x^61 + x^60 + 1, first output bit in the challenge MSB).
// Checks that valid comes CHLNG_W + 1 cycles after req, that the challenge is
// held between requests and that a zero seed behaves like seed 1.
module tb_chlng_gen;

  localparam int W = 198;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic          seed_load = 1'b0;
  logic [63:0]   seed = '0;
  logic          req = 1'b0;
  logic          valid, busy;
  logic [W-1:0]  chlng;

  chlng_gen #(.CHLNG_W(W)) dut (.clk, .rst_n, .seed_load, .seed, .req, .valid, .busy, .chlng);

  bit [63:0] ref_s;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit [W-1:0] ref_chlng();
    bit [W-1:0] c;
    for (int i = W - 1; i >= 0; i--) begin
      bit fb;
      c[i] = ref_s[63];
      fb = ref_s[63] ^ ref_s[62] ^ ref_s[60] ^ ref_s[59];
      ref_s = {ref_s[62:0], fb};
    end
    return c;
  endfunction

  task automatic load(input bit [63:0] s);
    @(negedge clk);
    seed = s;
    seed_load = 1'b1;
    @(negedge clk);
    seed_load = 1'b0;
    ref_s = (s == 0) ? 64'd1 : s;
  endtask

  task automatic get_and_check();
    int cyc;
    bit [W-1:0] e;
    @(negedge clk);
    req = 1'b1;
    @(negedge clk);
    req = 1'b0;
    cyc = 1;
    while (!valid) begin @(negedge clk); cyc++; end
    e = ref_chlng();
    checks += 2;
    if (cyc != W + 1) begin failures++; $display("valid after %0d cycles, expected %0d", cyc, W + 1); end
    if (chlng !== e) begin failures++; $display("challenge mismatch"); end
    repeat (5) @(negedge clk);
    checks++;
    if (chlng !== e) begin failures++; $display("challenge not held"); end
  endtask

  initial begin
    bit [63:0] r;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    load(64'd1);
    repeat (3) get_and_check();
    r = {$urandom, $urandom};
    load(r);
    repeat (3) get_and_check();
    load(64'd0);
    get_and_check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
