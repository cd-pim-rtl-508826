// cu_output_buffer: the 128-byte partial-sum buffer and accumulators of a
// CD-PIM computing unit.
//
// It holds 64 partial sums of 16 bit. In outer-product mode a result of the
// multiplier stage carries 32 products of one weight half: the left half
// adds into sums 0..31, the right half into sums 32..63 (the PA1/PA2 ...
// PMN1/PMN2 vectors of the K-cache flow). In inner-product mode a result
// carries one reduced sum, which adds into sum number `step` (PA then PB of
// the V-cache flow). Sums wrap modulo 2^16: the 128 B size fixes 16 bit per
// sum, and saturation is not described, so none is modelled. clr zeroes all
// sums in one cycle and wins over a simultaneous accumulate. rd_chunk picks
// 16 sums (32 B, one bus word) for read-out, sum 16*chunk in bits 15:0.
module cu_output_buffer
  import cdpim_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     acc_valid,
  input  logic                     acc_inner,
  input  logic                     acc_half,
  input  logic [5:0]               acc_step,
  input  logic signed [15:0]       prod [LANES],
  input  logic signed [20:0]       sum,
  input  logic [1:0]               rd_chunk,
  output logic [SA_W-1:0]          rd_data
);
  logic [PSUM_W-1:0] psum [PSUM_N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < PSUM_N; i++) psum[i] <= '0;
    end else if (clr) begin
      for (int i = 0; i < PSUM_N; i++) psum[i] <= '0;
    end else if (acc_valid) begin
      if (acc_inner) begin
        psum[acc_step] <= psum[acc_step] + sum[PSUM_W-1:0];
      end else begin
        for (int i = 0; i < LANES; i++)
          psum[{acc_half, 5'(i)}] <= psum[{acc_half, 5'(i)}] + prod[i];
      end
    end
  end

  always_comb begin
    for (int i = 0; i < 16; i++)
      rd_data[PSUM_W*i +: PSUM_W] = psum[{rd_chunk, 4'(i)}];
  end

endmodule
