// tb_nonce_distiller: self-checking testbench of the nonce distiller.
//
// Feeds 4,096 random low-order bits (with random idle cycles in between) and
// checks that nonce bit k is the XOR of input bits 12k .. 12k+11, that exactly
// 341 bits are produced, that full rises, and that clear empties the register.
module tb_nonce_distiller;

  localparam int XL = 12;
  localparam int NB = 341;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic               clear = 1'b0;
  logic               dv_valid = 1'b0;
  logic               dv_lsb = 1'b0;
  logic [NB-1:0]      nonce;
  logic [$clog2(NB+1)-1:0] nbits;
  logic               full;

  nonce_distiller #(.XOR_LEN(XL), .NONCE_BITS(NB)) dut (
    .clk, .rst_n, .clear, .dv_valid, .dv_lsb, .nonce, .nbits, .full
  );

  bit in_bits[4096];

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_once();
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    checks++;
    if (nbits != 0 || nonce != '0) begin failures++; $display("clear failed"); end
    for (int i = 0; i < 4096; i++) begin
      in_bits[i] = 1'($urandom);
      while ($urandom % 4 == 0) begin dv_valid = 1'b0; @(negedge clk); end
      dv_valid = 1'b1;
      dv_lsb = in_bits[i];
      @(negedge clk);
    end
    dv_valid = 1'b0;
    @(negedge clk);
    checks += 2;
    if (nbits != NB) begin failures++; $display("nbits %0d", nbits); end
    if (!full) begin failures++; $display("full not set"); end
    for (int k = 0; k < NB; k++) begin
      bit e;
      e = 1'b0;
      for (int j = 0; j < XL; j++) e ^= in_bits[XL * k + j];
      checks++;
      if (nonce[k] !== e) begin
        failures++;
        if (failures < 10) $display("nonce[%0d] = %0b expected %0b", k, nonce[k], e);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_once();
    run_once();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
