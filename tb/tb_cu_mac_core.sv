// tb_cu_mac_core: random INT8 weights and inputs in both product modes; the
// products and dot product one cycle later are compared with sums computed
// here, and the one-cycle latency of the valid flag is checked.
module tb_cu_mac_core;
  import cdpim_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, inner = 0, in_half = 0;
  logic [5:0] in_step = 0;
  logic [SA_W-1:0] weights, vec;
  logic signed [7:0] bcast;
  logic out_valid, out_inner, out_half;
  logic [5:0] out_step;
  logic signed [15:0] prod [LANES];
  logic signed [20:0] sum;
  int checks = 0, failures = 0;

  cu_mac_core dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int exp_s;
    int exp_p [LANES];
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      for (int i = 0; i < LANES; i++) begin weights[8*i +: 8] = 8'($urandom); vec[8*i +: 8] = 8'($urandom); end
      if (t < 2) begin weights = {LANES{8'h80}}; vec = {LANES{8'h80}}; end  // extremes
      bcast = 8'($urandom); inner = t[0]; in_half = t[1]; in_step = 6'(t);
      exp_s = 0;
      for (int i = 0; i < LANES; i++) begin
        exp_p[i] = int'(signed'(weights[8*i +: 8])) * (inner ? int'(signed'(vec[8*i +: 8])) : int'(bcast));
        exp_s += exp_p[i];
      end
      in_valid = 1; @(posedge clk); #1 in_valid = 0;
      checks++; if (!out_valid || out_inner !== inner || out_half !== in_half || out_step !== 6'(t)) begin failures++; $display("tag mismatch t=%0d", t); end
      checks++; if (int'(sum) != exp_s) begin failures++; $display("sum t=%0d got %0d exp %0d", t, sum, exp_s); end
      for (int i = 0; i < LANES; i++) begin checks++; if (int'(prod[i]) != exp_p[i]) failures++; end
      @(posedge clk); #1;
      checks++; if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
