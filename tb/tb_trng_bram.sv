// tb_trng_bram: self-checking testbench of the shared two-port RAM.
//
// Fills the RAM through both ports, then issues random reads and writes on
// both ports for many cycles and compares the read data (one cycle after the
// request, held until the next read) with an array model. Includes the
// read-first case (read and write of one word in the same cycle).
module tb_trng_bram;
  import trng_pkg::*;

  localparam int D = 12288;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  mem_req_t    a = MEM_IDLE, b = MEM_IDLE;
  logic [15:0] ra, rb;

  trng_bram #(.DEPTH(D)) dut (.clk, .a, .b, .rdata_a(ra), .rdata_b(rb));

  logic [15:0] model[D];
  logic [15:0] exp_a, exp_b;
  bit          chk_a, chk_b;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill: port a even words, port b odd words
    for (int i = 0; i < D; i += 2) begin
      @(negedge clk);
      model[i] = 16'($urandom);
      model[i + 1] = 16'($urandom);
      a = '{en: 1'b1, we: 1'b1, addr: 16'(i), wdata: model[i]};
      b = '{en: 1'b1, we: 1'b1, addr: 16'(i + 1), wdata: model[i + 1]};
    end
    @(negedge clk);
    a = MEM_IDLE; b = MEM_IDLE;
    for (int c = 0; c < 40000; c++) begin
      int wa, wb;
      @(negedge clk);
      // check data of last cycle's reads
      if (chk_a) begin checks++; if (ra !== exp_a) begin failures++; if (failures < 10) $display("port a read %h expected %h", ra, exp_a); end end
      if (chk_b) begin checks++; if (rb !== exp_b) begin failures++; if (failures < 10) $display("port b read %h expected %h", rb, exp_b); end end
      // port a: read or write a random word; port b: another word
      wa = int'($urandom % D);
      wb = int'($urandom % D);
      if (wb == wa) wb = (wb + 1) % D;
      a.en = ($urandom % 5 != 0);
      a.we = 1'($urandom);
      a.addr = 16'(wa);
      a.wdata = 16'($urandom);
      b.en = ($urandom % 5 != 0);
      b.we = 1'($urandom);
      b.addr = 16'((c % 50 == 0) ? wa : wb);   // sometimes the same word
      b.wdata = 16'($urandom);
      if (b.addr == a.addr && a.we) b.we = 1'b0;
      chk_a = a.en && !a.we ? 1'b1 : chk_a;
      chk_b = b.en && !b.we ? 1'b1 : chk_b;
      if (a.en && !a.we) exp_a = model[wa];
      if (b.en && !b.we) exp_b = model[int'(b.addr)];
      if (a.en && a.we) model[wa] = a.wdata;
      if (b.en && b.we) model[int'(b.addr)] = b.wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
