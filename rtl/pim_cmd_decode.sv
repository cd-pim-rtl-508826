// pim_cmd_decode: turns the PIM instruction of a command into the bank
// controls and keeps the SEL0/SEL1 mode register.
//
// The three MAC instructions set SEL0 and SEL1 as the design's command
// selection table gives them and start MACs on the matching CUs:
//   PIM_MAC_FM  SEL0=1 SEL1=1  both CUs, all four Pbanks (HBCEM)
//   MACT_LDB    SEL0=0 SEL1=1  top CU computes, processor uses bottom (LBIM)
//   MACB_LDT    SEL0=1 SEL1=0  bottom CU computes, processor uses top (LBIM)
// SEL1 steers the top half's data-bus multiplexer, SEL0 the bottom half's:
// 1 connects the CU output, 0 the Pbank data. The register keeps the last
// value, so after a MAC run the processor reads partial sums with plain RD
// commands. PIM_EXIT (this model's own) returns both to 0.
// A memory access in the same command that targets a half whose CU is
// MACing in that cycle is refused (conflict): the half's Pbanks are busy
// feeding the CU. A PIM_LDIN combined with a memory write is refused too,
// since both would use the write data.
// Everything is combinational except the SEL register, which updates on a
// rising edge with cmd_fire.
module pim_cmd_decode
  import cdpim_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  cmd_fire,
  input  cmd_t  cmd,
  output sel_t  sel,        // registered mode
  output sel_t  sel_next,   // mode in force for this command
  output logic  mac_top,
  output logic  mac_bot,
  output logic  ldin,
  output logic  clr,
  output logic  mem_ok,     // memory slot may proceed
  output logic  conflict
);
  always_comb begin
    sel_next = sel;
    mac_top  = 1'b0;
    mac_bot  = 1'b0;
    ldin     = 1'b0;
    clr      = 1'b0;
    unique case (cmd.pim)
      PIM_MAC_FM:   begin sel_next = '{sel1: 1'b1, sel0: 1'b1}; mac_top = 1'b1; mac_bot = 1'b1; end
      PIM_MACT_LDB: begin sel_next = '{sel1: 1'b1, sel0: 1'b0}; mac_top = 1'b1; end
      PIM_MACB_LDT: begin sel_next = '{sel1: 1'b0, sel0: 1'b1}; mac_bot = 1'b1; end
      PIM_LDIN:     ldin = 1'b1;
      PIM_CLR:      clr  = 1'b1;
      PIM_EXIT:     sel_next = '{sel1: 1'b0, sel0: 1'b0};
      default:      ;
    endcase
    conflict = 1'b0;
    if (cmd.mem inside {MEM_RD, MEM_WR, MEM_ACT, MEM_PRE}) begin
      if ((cmd.half == 1'b0 && mac_top) || (cmd.half == 1'b1 && mac_bot)) conflict = 1'b1;
    end
    if (ldin && cmd.mem == MEM_WR) conflict = 1'b1;
    mem_ok = (cmd.mem != MEM_NOP) && !conflict;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        sel <= '{sel1: 1'b0, sel0: 1'b0};
    else if (cmd_fire) sel <= sel_next;
  end

endmodule
