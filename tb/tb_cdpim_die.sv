// tb_cdpim_die: end-to-end test of the CD-PIM die at its default size
// (16 banks), acting as the host processor.
//  1. Stores weights through ordinary ACT/WR commands: two rows in every
//     Pbank, 64 columns per Pbank pair = one 64-step run.
//  2. HBCEM, K-cache (outer product): each bank gets its own 64-element
//     query slice, 64 PIM_MAC_FM instructions run back to back (one per
//     memory cycle, checked), all 2x16x64 partial sums are read through the
//     SEL=1 path and compared; the host-side sum over banks is checked too.
//  3. HBCEM, V-cache (inner product): one attention slice broadcast to all
//     banks, 64 PIM_MAC_FM, sums compared.
//  4. LBIM: MACT_LDB with processor reads of the bottom half in the same
//     memory cycles, then MACB_LDT with processor writes to the top half,
//     both checked (data read, data written, sums).
//  5. A refused access (conflict), an access to a closed Pbank (err), and
//     command stalls on cmd_ready.
// Every mechanism is counted and a failure is added for one that never
// happened.
module tb_cdpim_die;
  import cdpim_pkg::*;
  localparam int NB = 16, NR = 2, NC = 32;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready;
  cmd_t cmd = '0;
  logic [SA_W-1:0] wdata = '0, rdata;
  logic rvalid, conflict, err, sel0, sel1, pim_busy;
  logic [SA_W-1:0] W [NB][2][2][NR][NC];   // bank, half, side, row, col
  logic signed [7:0] q [NB][64];
  logic signed [7:0] a [64];
  logic [15:0] ref_s [NB][2][64];
  int checks = 0, failures = 0;
  int n_stall = 0, n_conflict = 0, n_err = 0, n_fm = 0, n_mact = 0, n_macb = 0;
  int n_lbim_rd = 0, n_lbim_wr = 0, n_mode_sw = 0, n_outer = 0, n_inner = 0;
  logic [1:0] last_sel = 2'b00;

  cdpim_die dut (.*);
  always #5 clk = ~clk;
  initial begin #20000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (rst_n) begin
    if ({sel1, sel0} != last_sel) n_mode_sw++;
    last_sel <= {sel1, sel0};
    if (conflict) n_conflict++;
    if (err) n_err++;
  end

  task automatic chk(input bit c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // Issue one command; returns just after the edge on which it fired.
  task automatic send(input cmd_t c, input logic [SA_W-1:0] d = '0);
    cmd = c; wdata = d; cmd_valid = 1;
    #1;
    if (!cmd_ready) n_stall++;
    while (!cmd_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    cmd_valid = 0; cmd = '0;
  endtask

  function automatic cmd_t mk(input pim_op_e p, input mem_op_e m, input int bank = 0,
                              input int half = 0, input int side = 0, input int row = 0,
                              input int col = 0, input int pcol = 0);
    cmd_t c = '0;
    c.pim = p; c.mem = m; c.bank = BANK_AW'(bank); c.half = half[0]; c.side = side[0];
    c.row = ROW_AW'(row); c.col = COL_AW'(col); c.pim_col = COL_AW'(pcol);
    return c;
  endfunction

  task automatic act_all(input int row);
    cmd_t c = mk(PIM_NOP, MEM_ACT, 0, 0, 0, row); c.all_banks = 1;
    send(c); c.half = 1; send(c);
  endtask

  // Read 32 B; rdata is sampled one edge after the command fired.
  task automatic read(input cmd_t c, output logic [SA_W-1:0] d);
    send(c); @(posedge clk); #1;
    chk(rvalid, "rvalid"); d = rdata;
  endtask

  task automatic clear_ref();
    for (int b = 0; b < NB; b++) for (int h = 0; h < 2; h++) for (int i = 0; i < 64; i++) ref_s[b][h][i] = 0;
  endtask

  task automatic check_sums(input int halves, input string tag);
    logic [SA_W-1:0] d;
    for (int b = 0; b < NB; b++) for (int h = 0; h < 2; h++) if (halves[h]) for (int c = 0; c < 4; c++) begin
      read(mk(PIM_NOP, MEM_RD, b, h, 0, 0, c), d);
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (d[16*i +: 16] !== ref_s[b][h][16*c+i]) begin
          failures++;
          if (failures < 10) $display("FAIL %s b%0d h%0d sum %0d got %h exp %h", tag, b, h, 16*c+i, d[16*i +: 16], ref_s[b][h][16*c+i]);
        end
      end
    end
  endtask

  // One 64-step run of the given MAC instruction over rows 0 and 1.
  task automatic mac_run(input pim_op_e op, input bit inner, input int halves,
                         input bit with_io = 0);
    int t_first, t_last;
    logic [SA_W-1:0] d;
    for (int r = 0; r < NR; r++) begin
      act_all(r);
      for (int col = 0; col < NC; col++) begin
        int t = r * NC + col;
        cmd_t c = mk(op, MEM_NOP, 0, 0, 0, 0, 0, col);
        for (int b = 0; b < NB; b++) for (int h = 0; h < 2; h++) if (halves[h]) begin
          if (inner) begin
            int s = 0;
            for (int i = 0; i < 32; i++)
              s += int'(signed'(W[b][h][0][r][col][8*i +: 8])) * int'(a[i]) +
                   int'(signed'(W[b][h][1][r][col][8*i +: 8])) * int'(a[32+i]);
            ref_s[b][h][t] += 16'(s);
          end else begin
            for (int i = 0; i < 32; i++) begin
              ref_s[b][h][i]    += 16'(int'(signed'(W[b][h][0][r][col][8*i +: 8])) * int'(q[b][t]));
              ref_s[b][h][32+i] += 16'(int'(signed'(W[b][h][1][r][col][8*i +: 8])) * int'(q[b][t]));
            end
          end
        end
        if (with_io) begin
          // processor traffic to the free half of bank (col % NB)
          int fb = col % NB, fh = halves[0] ? 1 : 0, fs = col % 2;
          if (op == PIM_MACT_LDB) begin
            c.mem = MEM_RD; c.bank = BANK_AW'(fb); c.half = fh[0]; c.side = fs[0]; c.col = COL_AW'(NC - 1 - col);
            send(c); @(posedge clk); #1;
            chk(rvalid && rdata === W[fb][fh][fs][r][NC-1-col], "LBIM read of free half");
            n_lbim_rd++;
          end else begin
            logic [SA_W-1:0] nd = {8{$urandom}};
            // rewrite with the same value so later reference sums stay valid
            nd = W[fb][fh][fs][r][NC-1-col];
            c.mem = MEM_WR; c.bank = BANK_AW'(fb); c.half = fh[0]; c.side = fs[0]; c.col = COL_AW'(NC - 1 - col);
            send(c, nd);
            n_lbim_wr++;
          end
        end else begin
          send(c);
        end
        if (t == 0) t_first = $time;
        t_last = $time;
        if (op == PIM_MAC_FM) n_fm++; else if (op == PIM_MACT_LDB) n_mact++; else n_macb++;
      end
      if (!with_io) chk((t_last - t_first) / 10 == 2 * (NC - 1) + (r == 0 ? 0 : 2 * (NC + 2)), "one MAC per memory cycle");
    end
    while (pim_busy) @(posedge clk);
    #1;
    if (inner) n_inner++; else n_outer++;
  endtask

  initial begin
    logic [SA_W-1:0] d;
    cmd_t c;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    // 1. weights
    for (int r = 0; r < NR; r++) begin
      act_all(r);
      for (int b = 0; b < NB; b++) for (int h = 0; h < 2; h++) for (int s = 0; s < 2; s++)
        for (int col = 0; col < NC; col++) begin
          W[b][h][s][r][col] = {8{$urandom}};
          send(mk(PIM_NOP, MEM_WR, b, h, s, 0, col), W[b][h][s][r][col]);
        end
    end
    read(mk(PIM_NOP, MEM_RD, 5, 1, 1, 0, 9), d);
    chk(d === W[5][1][1][1][9], "plain read-back");
    // 2. HBCEM K-cache (outer product)
    for (int b = 0; b < NB; b++) for (int ch = 0; ch < 2; ch++) begin
      logic [SA_W-1:0] v;
      for (int i = 0; i < 32; i++) begin q[b][32*ch+i] = 8'($urandom); v[8*i +: 8] = q[b][32*ch+i]; end
      c = mk(PIM_LDIN, MEM_NOP, b); c.chunk = ch[0]; send(c, v);
    end
    c = mk(PIM_CLR, MEM_NOP); c.inner = 0; send(c);
    clear_ref();
    mac_run(PIM_MAC_FM, 0, 2'b11);
    chk(sel0 && sel1, "HBCEM sel");
    check_sums(2'b11, "K outer");
    begin  // host reduction over banks for query . K columns
      logic [15:0] tot [128];
      for (int j = 0; j < 128; j++) tot[j] = 0;
      for (int b = 0; b < NB; b++) for (int h = 0; h < 2; h++) for (int c2 = 0; c2 < 4; c2++) begin
        read(mk(PIM_NOP, MEM_RD, b, h, 0, 0, c2), d);
        for (int i = 0; i < 16; i++) tot[64*h + 16*c2 + i] += d[16*i +: 16];
      end
      for (int j = 0; j < 128; j += 17) begin
        logic [15:0] e;
        logic [SA_W-1:0] w;
        logic signed [7:0] wb;
        int hh, ss, ll;
        e = 0; hh = j / 64; ss = (j % 64) / 32; ll = j % 32;
        for (int b = 0; b < NB; b++) for (int k = 0; k < 64; k++) begin
          w = W[b][hh][ss][k / NC][k % NC];
          wb = w[8*ll +: 8];
          e += 16'(int'(q[b][k]) * int'(wb));
        end
        chk(tot[j] === e, $sformatf("die-level q.K column %0d", j));
      end
    end
    // 3. HBCEM V-cache (inner product), broadcast input
    for (int ch = 0; ch < 2; ch++) begin
      logic [SA_W-1:0] v;
      for (int i = 0; i < 32; i++) begin a[32*ch+i] = 8'($urandom); v[8*i +: 8] = a[32*ch+i]; end
      c = mk(PIM_LDIN, MEM_NOP); c.all_banks = 1; c.chunk = ch[0]; send(c, v);
    end
    c = mk(PIM_CLR, MEM_NOP); c.inner = 1; send(c);
    clear_ref();
    mac_run(PIM_MAC_FM, 1, 2'b11);
    check_sums(2'b11, "V inner");
    // 4. LBIM: top computes while bottom is read, then bottom computes while top is written
    c = mk(PIM_CLR, MEM_NOP); c.inner = 1; send(c);
    clear_ref();
    mac_run(PIM_MACT_LDB, 1, 2'b01, 1);
    chk(sel1 && !sel0, "MACT_LDB sel");
    check_sums(2'b01, "LBIM top");
    c = mk(PIM_CLR, MEM_NOP); c.inner = 0; send(c);
    for (int b = 0; b < NB; b++) for (int ch = 0; ch < 2; ch++) begin
      logic [SA_W-1:0] v;
      for (int i = 0; i < 32; i++) v[8*i +: 8] = q[b][32*ch+i];
      c = mk(PIM_LDIN, MEM_NOP, b); c.chunk = ch[0]; send(c, v);
    end
    clear_ref();
    mac_run(PIM_MACB_LDT, 0, 2'b10, 1);
    chk(!sel1 && sel0, "MACB_LDT sel");
    check_sums(2'b10, "LBIM bottom");
    // 5. refused access, closed Pbank, exit
    send(mk(PIM_MAC_FM, MEM_RD, 2, 0, 0, 0, 3, 0));
    @(posedge clk); #1;
    chk(!rvalid, "refused read returns nothing");
    send(mk(PIM_EXIT, MEM_NOP));
    chk(!sel0 && !sel1, "exit sel");
    send(mk(PIM_NOP, MEM_PRE, 4, 0));
    send(mk(PIM_NOP, MEM_RD, 4, 0, 0, 0, 1));
    repeat (2) @(posedge clk);
    #1;
    // mechanism coverage
    chk(n_fm == 128, "PIM_MAC_FM issued");
    chk(n_mact == 64 && n_lbim_rd == 64, "MACT_LDB with concurrent reads");
    chk(n_macb == 64 && n_lbim_wr == 64, "MACB_LDT with concurrent writes");
    chk(n_outer > 0 && n_inner > 0, "outer and inner product runs");
    chk(n_mode_sw >= 3, "mode switches");
    chk(n_conflict == 1, "conflict seen once");
    chk(n_err >= 1, "closed-Pbank error seen");
    chk(n_stall > 0, "command stalls");
    $display("mechanisms: FM=%0d MACT_LDB=%0d MACB_LDT=%0d lbim_rd=%0d lbim_wr=%0d mode_sw=%0d conflict=%0d err=%0d stall=%0d",
             n_fm, n_mact, n_macb, n_lbim_rd, n_lbim_wr, n_mode_sw, n_conflict, n_err, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
