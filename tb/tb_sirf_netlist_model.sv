// tb_sirf_netlist_model: self-checking testbench of the SiRF netlist model.
//
// Applies random challenges and all 32 path selects and checks that every
// delay lies in 5,400 .. 17,999 ps (about 300 .. 1,000 TDC steps), that the
// same challenge and path always give the same delay (static entropy), that
// paths of one challenge differ, and that the mean delay is near the middle of
// the range.
module tb_sirf_netlist_model;

  localparam int W = 198;

  int checks = 0;
  int failures = 0;

  logic [W-1:0] chlng;
  logic [4:0]   path_sel;
  logic [15:0]  delay_ps;

  sirf_netlist_model #(.CHLNG_W(W)) dut (.chlng, .path_sel, .delay_ps);

  longint sum = 0;
  int     n = 0;
  int     distinct;
  int     d0[32];
  logic [223:0] ch;

  initial begin : watchdog
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 200; c++) begin
      for (int i = 0; i < 224; i += 32) ch[i +: 32] = $urandom;
      chlng = ch[W-1:0];
      distinct = 0;
      for (int p = 0; p < 32; p++) begin
        path_sel = 5'(p);
        #1;
        d0[p] = int'(delay_ps);
        checks++;
        if (delay_ps < 5400 || delay_ps > 17999) begin
          failures++;
          $display("delay %0d out of range", delay_ps);
        end
        sum += longint'(delay_ps);
        n++;
      end
      for (int p = 1; p < 32; p++) if (d0[p] != d0[0]) distinct++;
      checks++;
      if (distinct < 28) begin failures++; $display("paths of one challenge too similar"); end
      // repeat: must be identical
      for (int p = 31; p >= 0; p--) begin
        path_sel = 5'(p);
        #1;
        checks++;
        if (int'(delay_ps) != d0[p]) begin failures++; $display("delay not repeatable"); end
      end
    end
    checks++;
    if (sum < 64'(11000 * n) || sum > 64'(12400 * n)) begin
      failures++;
      $display("mean delay out of range (sum %0d over %0d paths)", sum, n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
