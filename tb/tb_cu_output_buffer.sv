// tb_cu_output_buffer: drives random outer-product (32 products into one
// half) and inner-product (one sum into one entry) accumulations, keeps a
// 16-bit reference of the 64 sums, and reads all four chunks back; checks
// the clear as well.
module tb_cu_output_buffer;
  import cdpim_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, acc_valid = 0, acc_inner = 0, acc_half = 0;
  logic [5:0] acc_step = 0;
  logic signed [15:0] prod [LANES];
  logic signed [20:0] sum;
  logic [1:0] rd_chunk = 0;
  logic [SA_W-1:0] rd_data;
  logic [15:0] ref_s [64];
  int checks = 0, failures = 0;

  cu_output_buffer dut (.*);
  always #5 clk = ~clk;
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic check_all();
    for (int c = 0; c < 4; c++) begin
      rd_chunk = 2'(c); #1;
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (rd_data[16*i +: 16] !== ref_s[16*c+i]) begin failures++; $display("psum %0d got %h exp %h", 16*c+i, rd_data[16*i +: 16], ref_s[16*c+i]); end
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 64; i++) ref_s[i] = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      acc_inner = ($urandom % 2) == 1; acc_half = 1'($urandom); acc_step = 6'($urandom);
      for (int i = 0; i < LANES; i++) prod[i] = 16'($urandom);
      sum = 21'($urandom);
      if (acc_inner) ref_s[acc_step] += sum[15:0];
      else for (int i = 0; i < LANES; i++) ref_s[{acc_half, 5'(i)}] += prod[i];
      acc_valid = 1; @(posedge clk); #1 acc_valid = 0;
    end
    check_all();
    clr = 1; @(posedge clk); #1 clr = 0;
    for (int i = 0; i < 64; i++) ref_s[i] = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
