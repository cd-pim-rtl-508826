// pim_cu: one CD-PIM computing unit (CU_Top or CU_Bottom of a bank).
//
// Each memory cycle a MAC instruction hands the CU two 32-byte weight words
// read in parallel from its left and right Pbank (SA_xL and SA_xR). The CU
// runs at twice the memory clock, so it feeds the two words serially into
// one 32-lane INT8 multiplier stage: the left word in the first CU cycle, the
// right word, held in a register, in the second. This is how one CU consumes
// 64 B of weights per memory cycle.
//   outer product (K-cache, column-wise map): both words are multiplied by
//     input element IN[step]; the left products add into sums 0..31, the
//     right ones into sums 32..63.
//   inner product (V-cache, row-wise map): the left word is dotted with
//     IN[0..31], the right one with IN[32..63]; both add into sum[step].
// step counts MAC instructions from 0 to 63 and wraps, ready for the next
// 64-element input slice. clr zeroes the sums and step and sets the mode.
//
// Interface and timing (clk is the CU clock): w_valid is a one-cycle pulse,
// at most every second cycle. The left word enters the multipliers in that
// cycle, the right word one cycle later; each result accumulates one cycle
// after it entered, so a MAC is fully in the sums 3 cycles after w_valid.
// rd_en registers 32 B of sums (chunk rd_chunk) on rd_data at the next edge.
// The two-word serial feed, 400 MHz = 2 x memory clock, and buffer sizes are
// the design's; the pipeline depth, step counter and clear are this model's.
module pim_cu
  import cdpim_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clr,
  input  logic            clr_inner,
  input  logic            in_we,
  input  logic            in_chunk,
  input  logic [SA_W-1:0] in_wdata,
  input  logic            w_valid,
  input  logic [SA_W-1:0] w_left,
  input  logic [SA_W-1:0] w_right,
  input  logic            rd_en,
  input  logic [1:0]      rd_chunk,
  output logic [SA_W-1:0] rd_data,
  output logic            inner_mode,
  output logic [5:0]      step,
  output logic            busy
);
  logic            second;      // right word pending
  logic [SA_W-1:0] w_hold;
  logic            core_valid, core_half;
  logic [SA_W-1:0] core_w;
  logic signed [7:0] ib_elem;
  logic [SA_W-1:0] ib_half;

  logic                 m_valid, m_inner, m_half;
  logic [5:0]           m_step;
  logic signed [15:0]   m_prod [LANES];
  logic signed [20:0]   m_sum;
  logic [SA_W-1:0]      ob_rd;

  assign core_valid = w_valid || second;
  assign core_half  = second;
  assign core_w     = second ? w_hold : w_left;
  assign busy       = second || m_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      second     <= 1'b0;
      step       <= '0;
      inner_mode <= 1'b0;
    end else if (clr) begin
      second     <= 1'b0;
      step       <= '0;
      inner_mode <= clr_inner;
    end else begin
      second <= w_valid;
      if (second) step <= step + 6'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (w_valid) w_hold <= w_right;
    if (rd_en)   rd_data <= ob_rd;
  end

  cu_input_buffer u_ibuf (
    .clk      (clk),
    .we       (in_we),
    .chunk    (in_chunk),
    .wdata    (in_wdata),
    .elem_idx (step),
    .elem     (ib_elem),
    .half_idx (core_half),
    .half_vec (ib_half)
  );

  cu_mac_core u_core (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (core_valid && !clr),
    .inner     (inner_mode),
    .in_half   (core_half),
    .in_step   (step),
    .weights   (core_w),
    .bcast     (ib_elem),
    .vec       (ib_half),
    .out_valid (m_valid),
    .out_inner (m_inner),
    .out_half  (m_half),
    .out_step  (m_step),
    .prod      (m_prod),
    .sum       (m_sum)
  );

  cu_output_buffer u_obuf (
    .clk       (clk),
    .rst_n     (rst_n),
    .clr       (clr),
    .acc_valid (m_valid),
    .acc_inner (m_inner),
    .acc_half  (m_half),
    .acc_step  (m_step),
    .prod      (m_prod),
    .sum       (m_sum),
    .rd_chunk  (rd_chunk),
    .rd_data   (ob_rd)
  );

  // A new weight pair may not arrive while the right word is still pending.
  always_ff @(posedge clk) begin
    if (rst_n && w_valid) a_no_overlap: assert (!second);
  end

endmodule
