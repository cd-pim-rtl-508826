// cu_mac_core: the multiplier stage of a CD-PIM computing unit.
//
// Thirty-two signed INT8 x INT8 multipliers take one 32-byte weight word
// from a global SA per CU clock. In outer-product mode (K-cache) every lane
// multiplies its weight with the same broadcast input element and the 32
// products leave as a vector. In inner-product mode (V-cache) lane i
// multiplies weight i with input element i and an adder tree reduces the 32
// products to one sum. One pipeline register follows the multipliers: the
// results for the word presented in cycle n are valid in cycle n+1, together
// with the tag (which weight half, which step) that went in with it.
// The lane count, INT8 precision and the two product modes are the
// design's; the single register stage is this model's choice.
module cu_mac_core
  import cdpim_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      inner,      // 1 inner, 0 outer product
  input  logic                      in_half,    // 0 left-SA word, 1 right-SA word
  input  logic [5:0]                in_step,
  input  logic [SA_W-1:0]           weights,    // 32 x INT8
  input  logic signed [7:0]         bcast,      // outer product input element
  input  logic [SA_W-1:0]           vec,        // inner product input elements
  output logic                      out_valid,
  output logic                      out_inner,
  output logic                      out_half,
  output logic [5:0]                out_step,
  output logic signed [15:0]        prod [LANES],
  output logic signed [20:0]        sum
);
  logic signed [15:0] p   [LANES];
  logic signed [20:0] acc;

  always_comb begin
    acc = '0;
    for (int i = 0; i < LANES; i++) begin
      if (inner) p[i] = signed'(weights[8*i +: 8]) * signed'(vec[8*i +: 8]);
      else       p[i] = signed'(weights[8*i +: 8]) * bcast;
      acc = acc + 21'(p[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_inner <= 1'b0;
      out_half  <= 1'b0;
      out_step  <= '0;
    end else begin
      out_valid <= in_valid;
      out_inner <= inner;
      out_half  <= in_half;
      out_step  <= in_step;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      prod <= p;
      sum  <= acc;
    end
  end

endmodule
