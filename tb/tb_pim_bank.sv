// tb_pim_bank: one bank with a small array. Fills a row of all four Pbanks
// with random weights, checks plain reads of each Pbank (SEL=0), then runs
// 32 MACs on both CUs (outer product, HBCEM) and reads both CUs' sums through
// the SEL=1 path; then an LBIM-style run where the top CU computes while the
// bottom half is read in the same memory cycles. Sums are compared with a
// reference computed here.
module tb_pim_bank;
  import cdpim_pkg::*;
  localparam int ROWS = 8, COLS = 32;
  logic clk = 0, rst_n = 0, ce = 0;
  sel_t sel = '0;
  logic act = 0, pre = 0, rd = 0, wr = 0, half = 0, side = 0;
  logic [2:0] row = 0;
  logic [4:0] col = 0, pim_col = 0;
  logic [SA_W-1:0] wdata = 0, rdata;
  logic mac_top = 0, mac_bot = 0, ldin = 0, ldin_chunk = 0, clr = 0, clr_inner = 0;
  logic rvalid, err, busy;
  logic [SA_W-1:0] mem [2][2][COLS];   // [half][side][col] of row 3
  logic signed [7:0] inb [64];
  logic [15:0] ref_s [2][64];
  int checks = 0, failures = 0, lbim_reads = 0;

  pim_bank #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic cyc();   // one memory cycle: ce on the first CU edge
    ce = 1; @(posedge clk); #1;
    {ce, act, pre, rd, wr, mac_top, mac_bot, ldin, clr} = '0;
    @(posedge clk); #1;
  endtask

  task automatic chk(input bit c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int h = 0; h < 2; h++) begin act = 1; half = h[0]; row = 3; cyc(); end
    for (int h = 0; h < 2; h++) for (int s = 0; s < 2; s++) for (int c = 0; c < COLS; c++) begin
      mem[h][s][c] = {8{$urandom}};
      wr = 1; half = h[0]; side = s[0]; col = 5'(c); wdata = mem[h][s][c]; cyc();
    end
    for (int h = 0; h < 2; h++) for (int s = 0; s < 2; s++) begin
      rd = 1; half = h[0]; side = s[0]; col = 5'(7); cyc();
      chk(rvalid && rdata === mem[h][s][7], "plain read");
    end
    // input vector, outer mode
    for (int c = 0; c < 2; c++) begin
      for (int i = 0; i < 32; i++) begin inb[32*c+i] = 8'($urandom); wdata[8*i +: 8] = inb[32*c+i]; end
      ldin = 1; ldin_chunk = c[0]; cyc();
    end
    clr = 1; clr_inner = 0; cyc();
    for (int h = 0; h < 2; h++) for (int i = 0; i < 64; i++) ref_s[h][i] = 0;
    sel = '{sel1: 1'b1, sel0: 1'b1};
    for (int t = 0; t < 32; t++) begin
      for (int h = 0; h < 2; h++) for (int i = 0; i < 32; i++) begin
        ref_s[h][i]    += 16'(int'(signed'(mem[h][0][t][8*i +: 8])) * int'(inb[t]));
        ref_s[h][32+i] += 16'(int'(signed'(mem[h][1][t][8*i +: 8])) * int'(inb[t]));
      end
      mac_top = 1; mac_bot = 1; pim_col = 5'(t); cyc();
    end
    cyc(); cyc();
    chk(!busy, "idle after run");
    for (int h = 0; h < 2; h++) for (int c = 0; c < 4; c++) begin
      rd = 1; half = h[0]; col = 5'(c); cyc();
      for (int i = 0; i < 16; i++) chk(rvalid && rdata[16*i +: 16] === ref_s[h][16*c+i], $sformatf("HBCEM psum h%0d %0d", h, 16*c+i));
    end
    // LBIM: top CU computes (SEL1=1, SEL0=0), bottom half read meanwhile
    clr = 1; cyc();
    for (int i = 0; i < 64; i++) ref_s[0][i] = 0;
    sel = '{sel1: 1'b1, sel0: 1'b0};
    for (int t = 0; t < 16; t++) begin
      for (int i = 0; i < 32; i++) begin
        ref_s[0][i]    += 16'(int'(signed'(mem[0][0][t][8*i +: 8])) * int'(inb[t]));
        ref_s[0][32+i] += 16'(int'(signed'(mem[0][1][t][8*i +: 8])) * int'(inb[t]));
      end
      mac_top = 1; pim_col = 5'(t); rd = 1; half = 1; side = t[0]; col = 5'(31 - t); cyc();
      chk(rvalid && rdata === mem[1][t % 2][31 - t], "LBIM bottom read");
      lbim_reads++;
    end
    cyc(); cyc();
    for (int c = 0; c < 4; c++) begin
      rd = 1; half = 0; col = 5'(c); cyc();
      for (int i = 0; i < 16; i++) chk(rvalid && rdata[16*i +: 16] === ref_s[0][16*c+i], "LBIM psum");
    end
    chk(lbim_reads == 16, "lbim reads");
    // closed Pbank
    pre = 1; half = 1; cyc();
    sel = '0; rd = 1; half = 1; cyc();
    chk(err === 1'b0, "err is a pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
