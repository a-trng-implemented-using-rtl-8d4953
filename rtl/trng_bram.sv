// trng_bram: the shared block RAM of the TRNG.
//
// DEPTH words of 16 bits (default 6 x 2048 = 12,288 words = 24 KBytes, the
// BRAM size of the reference implementation), holding the six regions DV_A,
// DV_B, DVD, DVD_c, DVD_cs and SF of N words each (see trng_pkg).
// Two independent synchronous ports, as an FPGA true dual-port block RAM has:
// each port reads or writes one word per cycle; read data appears on rdata_*
// the cycle after a read request and holds until the next read on that port
// (read-first). If both ports write the same word in one cycle, port B wins.
// The two-port organisation is this design's choice.
module trng_bram #(
  parameter int unsigned DEPTH = 12288
) (
  input  logic               clk,
  input  trng_pkg::mem_req_t a,
  input  trng_pkg::mem_req_t b,
  output logic [15:0]        rdata_a,
  output logic [15:0]        rdata_b
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [15:0] mem_q [DEPTH];

  always_ff @(posedge clk) begin
    if (a.en && a.we && (32'(a.addr) < DEPTH)) mem_q[a.addr[AW-1:0]] <= a.wdata;
    if (b.en && b.we && (32'(b.addr) < DEPTH)) mem_q[b.addr[AW-1:0]] <= b.wdata;
  end

  always_ff @(posedge clk) begin
    if (a.en && !a.we) rdata_a <= (32'(a.addr) < DEPTH) ? mem_q[a.addr[AW-1:0]] : '0;
    if (b.en && !b.we) rdata_b <= (32'(b.addr) < DEPTH) ? mem_q[b.addr[AW-1:0]] : '0;
  end

endmodule
