// cdpim_die: one CD-PIM LPDDR5 die: sixteen PIM banks behind a shared
// command port and 32-byte data bus.
//
// The die runs on the CU clock clk, twice the DRAM core (memory) clock. One
// command is taken per memory cycle: cmd_ready is high every second clk
// cycle and a command fires on an edge where cmd_valid and cmd_ready are both
// high. A command has two slots that execute in the same memory cycle:
//   pim slot  PIM_MAC_FM / MACT_LDB / MACB_LDT run a MAC on column pim_col
//             of the open rows in every bank (all-bank operation) and set the
//             SEL0/SEL1 mode; PIM_LDIN writes 32 B of input vector into the
//             input buffers of one bank (K-cache: each bank gets its own
//             slice of the query) or of all banks (V-cache: the attention
//             slice is broadcast); PIM_CLR clears partial sums and picks the
//             product mode; PIM_EXIT drops back to plain memory.
//   mem slot  ACT / PRE / RD / WR of one bank (or ACT/PRE of all banks), the
//             processor's ordinary traffic.
// HBCEM (high-bandwidth compute-efficient mode) uses PIM_MAC_FM: all four
// Pbanks of every bank feed the two CUs. LBIM (low-batch interleaving mode)
// alternates MACT_LDB / MACB_LDT: one CU per bank computes while the mem slot
// serves the processor from the other half of the same bank in the same
// memory cycle. A mem slot that hits a half whose CU is computing is refused
// and flagged on conflict for one cycle.
// Read data appears on rdata with rvalid two clk edges after the RD fires;
// err reports a column access to a closed Pbank. The bank structure, the
// three MAC instructions, the SEL table and the clock ratio follow the
// design; the command format, the all-bank MAC broadcast and the handshake
// are this model's choices.
module cdpim_die
  import cdpim_pkg::*;
#(
  parameter int unsigned NBANKS = NUM_BANKS,
  parameter int unsigned ROWS   = 64,
  parameter int unsigned COLS   = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  cmd_t            cmd,
  input  logic [SA_W-1:0] wdata,
  output logic [SA_W-1:0] rdata,
  output logic            rvalid,
  output logic            conflict,
  output logic            err,
  output logic            sel0,
  output logic            sel1,
  output logic            pim_busy
);
  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned CW = $clog2(COLS);

  logic phase;      // 0: first CU cycle of a memory cycle
  logic fire;
  sel_t sel, sel_next;
  logic mac_top, mac_bot, ldin, clr, mem_ok, conf_c;

  logic [SA_W-1:0]   b_rdata [NBANKS];
  logic [NBANKS-1:0] b_rvalid, b_err, b_busy;

  assign cmd_ready = !phase;
  assign fire      = cmd_valid && cmd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase    <= 1'b0;
      conflict <= 1'b0;
    end else begin
      phase    <= !phase;
      conflict <= fire && conf_c;
    end
  end

  pim_cmd_decode u_dec (
    .clk      (clk),
    .rst_n    (rst_n),
    .cmd_fire (fire),
    .cmd      (cmd),
    .sel      (sel),
    .sel_next (sel_next),
    .mac_top  (mac_top),
    .mac_bot  (mac_bot),
    .ldin     (ldin),
    .clr      (clr),
    .mem_ok   (mem_ok),
    .conflict (conf_c)
  );

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    logic hit;
    assign hit = (cmd.bank == BANK_AW'(b));
    pim_bank #(.ROWS(ROWS), .COLS(COLS)) u_bank (
      .clk        (clk),
      .rst_n      (rst_n),
      .ce         (fire),
      .sel        (sel_next),
      .act        (mem_ok && cmd.mem == MEM_ACT && (hit || cmd.all_banks)),
      .pre        (mem_ok && cmd.mem == MEM_PRE && (hit || cmd.all_banks)),
      .rd         (mem_ok && cmd.mem == MEM_RD && hit),
      .wr         (mem_ok && cmd.mem == MEM_WR && hit),
      .half       (cmd.half),
      .side       (cmd.side),
      .row        (cmd.row[RW-1:0]),
      .col        (cmd.col[CW-1:0]),
      .wdata      (wdata),
      .mac_top    (mac_top),
      .mac_bot    (mac_bot),
      .pim_col    (cmd.pim_col[CW-1:0]),
      .ldin       (ldin && !conf_c && (hit || cmd.all_banks)),
      .ldin_chunk (cmd.chunk),
      .clr        (clr),
      .clr_inner  (cmd.inner),
      .rdata      (b_rdata[b]),
      .rvalid     (b_rvalid[b]),
      .err        (b_err[b]),
      .busy       (b_busy[b])
    );
  end

  // Shared data bus: only the bank that was read drives it.
  always_comb begin
    rdata = '0;
    for (int b = 0; b < NBANKS; b++)
      if (b_rvalid[b]) rdata = b_rdata[b];
  end
  assign rvalid   = |b_rvalid;
  assign err      = |b_err;
  assign sel0     = sel.sel0;
  assign sel1     = sel.sel1;
  assign pim_busy = |b_busy;

  // Handshake rule: a command held off by cmd_ready stays valid and stable.
  logic pend;
  cmd_t cmd_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pend <= 1'b0;
    else        pend <= cmd_valid && !cmd_ready;
  end
  always_ff @(posedge clk) begin
    cmd_q <= cmd;
    if (rst_n && pend) a_cmd_stable: assert (cmd_valid && cmd == cmd_q);
  end

endmodule
