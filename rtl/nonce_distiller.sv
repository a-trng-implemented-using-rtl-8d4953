// nonce_distiller: turns TDC measurement noise into nonce bits.
//
// The low-order bit of each delay value carries the measurement noise. The
// distiller XORs the low-order bits of XOR_LEN = 12 consecutive measurements
// into one nonce bit, as the reference does, and stores nonce bit k at
// nonce[k], k = 0, 1, ... A path timing run of 4,096 measurements yields
// floor(4096 / 12) = 341 = NONCE_BITS bits; measurements beyond that are
// ignored and nbits saturates at NONCE_BITS.
// Interface: clear (one cycle) empties the register and restarts the count;
// each cycle with dv_valid consumes dv_lsb. full is high once NONCE_BITS bits
// are held. nonce bits not yet written read as 0.
module nonce_distiller #(
  parameter int unsigned XOR_LEN    = 12,
  parameter int unsigned NONCE_BITS = 341
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          dv_valid,
  input  logic                          dv_lsb,
  output logic [NONCE_BITS-1:0]         nonce,
  output logic [$clog2(NONCE_BITS+1)-1:0] nbits,
  output logic                          full
);

  localparam int unsigned CW = (XOR_LEN > 1) ? $clog2(XOR_LEN) : 1;

  logic                             acc_q;
  logic [CW-1:0]                    cnt_q;

  assign full = (nbits == ($clog2(NONCE_BITS+1))'(NONCE_BITS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= 1'b0;
      cnt_q <= '0;
      nonce <= '0;
      nbits <= '0;
    end else if (clear) begin
      acc_q <= 1'b0;
      cnt_q <= '0;
      nonce <= '0;
      nbits <= '0;
    end else if (dv_valid && !full) begin
      if (cnt_q == CW'(XOR_LEN - 1)) begin
        nonce[nbits] <= acc_q ^ dv_lsb;
        nbits        <= nbits + 1'b1;
        acc_q        <= 1'b0;
        cnt_q        <= '0;
      end else begin
        acc_q <= acc_q ^ dv_lsb;
        cnt_q <= cnt_q + 1'b1;
      end
    end
  end

endmodule
