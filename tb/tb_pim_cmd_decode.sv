// tb_pim_cmd_decode: checks the SEL0/SEL1 values and CU enables of the three
// MAC instructions against the command selection table, that SEL holds over
// other instructions and returns to 0 on PIM_EXIT, and the conflict rule for
// memory accesses to a computing half.
module tb_pim_cmd_decode;
  import cdpim_pkg::*;
  logic clk = 0, rst_n = 0, cmd_fire = 0;
  cmd_t cmd;
  sel_t sel, sel_next;
  logic mac_top, mac_bot, ldin, clr, mem_ok, conflict;
  int checks = 0, failures = 0;

  pim_cmd_decode dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic issue(input pim_op_e p, input mem_op_e m, input logic h);
    cmd = '0; cmd.pim = p; cmd.mem = m; cmd.half = h; cmd_fire = 1; #1;
  endtask

  initial begin
    cmd = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    chk(sel == 2'b00, "reset sel");
    // table: {sel1, sel0}
    issue(PIM_MAC_FM, MEM_NOP, 0);  chk(mac_top && mac_bot && !conflict, "FM en");
    @(posedge clk); #1 chk(sel.sel0 == 1 && sel.sel1 == 1, "FM sel");
    issue(PIM_MACT_LDB, MEM_RD, 1); chk(mac_top && !mac_bot && mem_ok && !conflict, "MACT_LDB en");
    @(posedge clk); #1 chk(sel.sel0 == 0 && sel.sel1 == 1, "MACT_LDB sel");
    issue(PIM_MACB_LDT, MEM_WR, 0); chk(!mac_top && mac_bot && mem_ok && !conflict, "MACB_LDT en");
    @(posedge clk); #1 chk(sel.sel0 == 1 && sel.sel1 == 0, "MACB_LDT sel");
    issue(PIM_LDIN, MEM_NOP, 0); chk(ldin && !mac_top && !mac_bot, "LDIN");
    @(posedge clk); #1 chk(sel.sel0 == 1 && sel.sel1 == 0, "hold sel");
    issue(PIM_CLR, MEM_NOP, 0); chk(clr, "CLR");
    @(posedge clk); #1;
    issue(PIM_MACT_LDB, MEM_RD, 0); chk(conflict && !mem_ok, "conflict top");
    issue(PIM_MACB_LDT, MEM_ACT, 1); chk(conflict && !mem_ok, "conflict bottom");
    issue(PIM_MAC_FM, MEM_WR, 1); chk(conflict && !mem_ok, "conflict FM");
    issue(PIM_LDIN, MEM_WR, 1); chk(conflict, "conflict LDIN+WR");
    issue(PIM_NOP, MEM_RD, 0); chk(mem_ok && !conflict, "plain RD");
    cmd_fire = 0; issue(PIM_MAC_FM, MEM_NOP, 0); cmd_fire = 0;
    @(posedge clk); #1 chk(sel.sel0 == 1 && sel.sel1 == 0, "no fire no update");
    issue(PIM_EXIT, MEM_NOP, 0);
    @(posedge clk); #1 chk(sel == 2'b00, "exit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
