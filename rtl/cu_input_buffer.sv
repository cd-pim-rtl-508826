// cu_input_buffer: the 64-byte input buffer of a CD-PIM computing unit.
//
// It holds one 64-element INT8 slice of the input vector: for the K-cache
// (outer product) a 1x64 piece of the query vector, for the V-cache (inner
// product) a 1x64 piece of the attention-weight vector. The buffer is written
// 32 B at a time from the data bus (chunk 0 = elements 0..31, chunk 1 =
// elements 32..63). It has two read ports, both combinational: one INT8
// element by index (outer product) and one 32-element half (inner product).
// The 64 B size is the design's; the 32 B write width is this model's
// choice, matching one burst of the bus.
module cu_input_buffer
  import cdpim_pkg::*;
(
  input  logic                    clk,
  input  logic                    we,
  input  logic                    chunk,
  input  logic [SA_W-1:0]         wdata,
  input  logic [5:0]              elem_idx,
  output logic signed [7:0]       elem,
  input  logic                    half_idx,
  output logic [SA_W-1:0]         half_vec
);
  logic [7:0] mem [IBUF_BYTES];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int i = 0; i < LANES; i++)
        mem[{chunk, 5'(i)}] <= wdata[8*i +: 8];
    end
  end

  assign elem = signed'(mem[elem_idx]);

  always_comb begin
    for (int i = 0; i < LANES; i++)
      half_vec[8*i +: 8] = mem[{half_idx, 5'(i)}];
  end

endmodule
