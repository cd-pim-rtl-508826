// pbank: one pseudo-bank (Pbank) of a CD-PIM bank, the DRAM cell array with
// its slice of row decoder, bitline sense amplifiers and global SA.
//
// A bank is split into four Pbanks (TL, TR, BL, BR) by cutting the global
// bitline into left/right halves and, with isolation transistors, into
// upper/lower halves. Each Pbank delivers one 256-bit (32 B) word per column
// access through its own global SA, so all four can be read in the same
// memory cycle. The split itself is the design's; the array organisation
// (ROWS x COLS words) and the open-row model are this model's own: the cell
// array is written as a synchronous memory, an ACT records the open row, RD
// and WR address (open row, column). A column access to a closed Pbank is
// ignored and raises err for one cycle.
//
// Timing: act/pre/rd/wr are sampled on a rising clock edge with ce high;
// rdata is the global SA output register and is valid from the following
// edge until the next read.
module pbank #(
  parameter int unsigned ROWS = 64,   // rows per Pbank (full part: 65536)
  parameter int unsigned COLS = 32,   // 32 B columns per Pbank row
  parameter int unsigned W    = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    ce,      // memory-cycle enable
  input  logic                    act,
  input  logic                    pre,
  input  logic [$clog2(ROWS)-1:0] row,
  input  logic                    rd,
  input  logic                    wr,
  input  logic [$clog2(COLS)-1:0] col,
  input  logic [W-1:0]            wdata,
  output logic [W-1:0]            rdata,
  output logic                    is_open,
  output logic                    err
);
  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned CW = $clog2(COLS);

  logic [W-1:0]  cells [ROWS*COLS];
  logic [RW-1:0] open_row;
  logic [RW+CW-1:0] addr;

  assign addr = {open_row, col};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      is_open  <= 1'b0;
      open_row <= '0;
      err      <= 1'b0;
    end else begin
      err <= 1'b0;
      if (ce) begin
        if (act) begin
          is_open  <= 1'b1;
          open_row <= row;
        end else if (pre) begin
          is_open  <= 1'b0;
        end
        if ((rd || wr) && !is_open) err <= 1'b1;
      end
    end
  end

  // Cell array and global SA register.
  always_ff @(posedge clk) begin
    if (ce && is_open && wr) cells[addr] <= wdata;
    if (ce && is_open && rd) rdata <= cells[addr];
  end

endmodule
