// tb_path_timing: self-checking testbench of the Phase 1 path timing loop.
//
// Connects path_timing to the challenge generator, the netlist and TDC
// models and the RAM, as in the top. A run without DV storage (boot-strap)
// must make 4,096 measurements and leave the RAM untouched; a run with storage
// must write measurement m to word m. Also checks that each challenge is
// followed by path selects 0..31 in order, that 128 challenges are requested
// and that the measurement stream matches the TDC results.
module tb_path_timing;
  import trng_pkg::*;

  localparam int NC = 128;
  localparam int PP = 32;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic        start = 1'b0, store_dv = 1'b0;
  logic        busy, done, gen_req, gen_valid, gen_busy, tdc_start, tdc_busy, tdc_done;
  logic [4:0]  path_sel;
  logic [11:0] tdc_dv, meas_dv;
  logic        meas_valid;
  logic [197:0] chlng;
  logic [15:0] delay_ps;
  mem_req_t    mem, idle_a;
  logic [15:0] ra, rb;
  logic        seed_load = 1'b0;

  assign idle_a = MEM_IDLE;

  path_timing #(.N_CHLNG(NC), .PATHS_PER_CHLNG(PP)) dut (
    .clk, .rst_n, .start, .store_dv, .busy, .done, .gen_req, .gen_valid,
    .path_sel, .tdc_start, .tdc_done, .tdc_dv, .meas_valid, .meas_dv, .mem
  );
  chlng_gen gen (.clk, .rst_n, .seed_load, .seed(64'd1), .req(gen_req), .valid(gen_valid),
                 .busy(gen_busy), .chlng);
  sirf_netlist_model net (.chlng, .path_sel, .delay_ps);
  tdc_model #(.LATENCY(3)) tdc (.clk, .rst_n, .start(tdc_start), .delay_ps, .busy(tdc_busy),
                                .done(tdc_done), .dv(tdc_dv));
  trng_bram ram (.clk, .a(idle_a), .b(mem), .rdata_a(ra), .rdata_b(rb));

  int meas[$];
  int n_req, exp_path, n_writes;

  always @(posedge clk) if (rst_n) begin
    if (gen_req) begin n_req++; exp_path = 0; end
    if (tdc_start) begin
      checks++;
      if (int'(path_sel) != exp_path) begin
        failures++;
        if (failures < 10) $display("path_sel %0d expected %0d", path_sel, exp_path);
      end
      exp_path++;
    end
    if (tdc_done) meas.push_back(int'(tdc_dv));
    if (meas_valid) begin
      checks++;
      if (meas.size() == 0 || int'(meas_dv) != meas[$]) begin failures++; $display("measurement stream mismatch"); end
    end
    if (mem.en && mem.we) n_writes++;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit st);
    meas.delete();
    n_req = 0; n_writes = 0;
    @(negedge clk);
    store_dv = st;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
    checks += 3;
    if (meas.size() != NC * PP) begin failures++; $display("%0d measurements", meas.size()); end
    if (n_req != NC) begin failures++; $display("%0d challenges", n_req); end
    if (n_writes != (st ? NC * PP : 0)) begin failures++; $display("%0d RAM writes", n_writes); end
    if (st)
      for (int m = 0; m < NC * PP; m++) begin
        checks++;
        if (ram.mem_q[m] !== 16'(meas[m])) begin
          failures++;
          if (failures < 10) $display("DV word %0d = %0d expected %0d", m, ram.mem_q[m], meas[m]);
        end
      end
  endtask

  initial begin
    for (int i = 0; i < 6 * 2048; i++) ram.mem_q[i] = 16'hdead;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(1'b0);
    for (int i = 0; i < 6 * 2048; i += 97) begin
      checks++;
      if (ram.mem_q[i] !== 16'hdead) begin failures++; $display("boot-strap wrote RAM"); break; end
    end
    run(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
