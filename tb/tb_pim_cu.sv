// tb_pim_cu: one computing unit through a full 64-step run in each mode.
// Outer product (K-cache): sum[i] = sum_t IN[t]*L_t[i], sum[32+i] =
// sum_t IN[t]*R_t[i]. Inner product (V-cache): sum[t] = IN[0..31].L_t +
// IN[32..63].R_t. Weight pairs arrive back to back every second clock (one
// memory cycle), so a run must take 128 clocks plus the 3-clock drain; the
// testbench checks that count and all 64 sums (mod 2^16) of each run.
module tb_pim_cu;
  import cdpim_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, clr_inner = 0, in_we = 0, in_chunk = 0;
  logic [SA_W-1:0] in_wdata, w_left, w_right, rd_data;
  logic w_valid = 0, rd_en = 0, inner_mode, busy;
  logic [1:0] rd_chunk = 0;
  logic [5:0] step;
  logic signed [7:0] inb [64];
  logic [15:0] ref_s [64];
  int checks = 0, failures = 0;

  pim_cu dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic signed [7:0] lane(input logic [SA_W-1:0] v, input int i);
    return signed'(v[8*i +: 8]);
  endfunction

  task automatic run(input bit inner);
    int t0, t1;
    clr = 1; clr_inner = inner; @(posedge clk); #1 clr = 0;
    for (int i = 0; i < 64; i++) ref_s[i] = 0;
    for (int c = 0; c < 2; c++) begin
      for (int i = 0; i < 32; i++) begin inb[32*c+i] = 8'($urandom); in_wdata[8*i +: 8] = inb[32*c+i]; end
      in_chunk = c[0]; in_we = 1; @(posedge clk); #1 in_we = 0;
    end
    checks++; if (inner_mode !== inner) failures++;
    t0 = $time;
    for (int t = 0; t < 64; t++) begin
      for (int i = 0; i < 32; i++) begin w_left[8*i +: 8] = 8'($urandom); w_right[8*i +: 8] = 8'($urandom); end
      if (inner) begin
        int s = 0;
        for (int i = 0; i < 32; i++) s += int'(lane(w_left, i)) * int'(inb[i]) + int'(lane(w_right, i)) * int'(inb[32+i]);
        ref_s[t] += 16'(s);
      end else begin
        for (int i = 0; i < 32; i++) begin
          ref_s[i]    += 16'(int'(lane(w_left, i)) * int'(inb[t]));
          ref_s[32+i] += 16'(int'(lane(w_right, i)) * int'(inb[t]));
        end
      end
      w_valid = 1; @(posedge clk); #1 w_valid = 0; @(posedge clk); #1;
    end
    while (busy) @(posedge clk);
    #1 t1 = $time;
    checks++; if ((t1 - t0) / 10 != 128 + 2) begin failures++; $display("run took %0d clocks", (t1 - t0) / 10); end
    checks++; if (step != 0) failures++;
    for (int c = 0; c < 4; c++) begin
      rd_chunk = 2'(c); rd_en = 1; @(posedge clk); #1 rd_en = 0;
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (rd_data[16*i +: 16] !== ref_s[16*c+i]) begin failures++; $display("%s sum %0d got %h exp %h", inner ? "inner" : "outer", 16*c+i, rd_data[16*i +: 16], ref_s[16*c+i]); end
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    run(0);
    run(1);
    run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
