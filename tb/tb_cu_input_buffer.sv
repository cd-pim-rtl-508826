// tb_cu_input_buffer: writes two random 32 B chunks into the 64 B input
// buffer and checks every element through the element port and both halves
// through the vector port against the written bytes.
module tb_cu_input_buffer;
  import cdpim_pkg::*;
  logic clk = 0, we = 0, chunk = 0, half_idx = 0;
  logic [SA_W-1:0] wdata, half_vec;
  logic [5:0] elem_idx = 0;
  logic signed [7:0] elem;
  logic [7:0] ref_b [64];
  int checks = 0, failures = 0;

  cu_input_buffer dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int c = 0; c < 2; c++) begin
      for (int i = 0; i < 32; i++) begin ref_b[32*c+i] = 8'($urandom); wdata[8*i +: 8] = ref_b[32*c+i]; end
      chunk = c[0]; we = 1; @(posedge clk); #1 we = 0;
    end
    for (int i = 0; i < 64; i++) begin
      elem_idx = 6'(i); #1;
      checks++; if (elem !== signed'(ref_b[i])) begin failures++; $display("elem %0d got %h exp %h", i, elem, ref_b[i]); end
    end
    for (int h = 0; h < 2; h++) begin
      half_idx = h[0]; #1;
      for (int i = 0; i < 32; i++) begin
        checks++; if (half_vec[8*i +: 8] !== ref_b[32*h+i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
