// pim_bank: one CD-PIM bank: four Pbanks, two computing units and the
// global-SA multiplexers that connect them to the CUs and the data bus.
//
// The bank's cell array is cut into Bank_TL, Bank_TR, Bank_BL and Bank_BR.
// The row decoder opens one row in the top pair and, independently, one row
// in the bottom pair (separated global bitlines); the column decoder reads
// the left and right Pbank of a pair together. CU_Top takes its weights from
// SA_TL and SA_TR, CU_Bottom from SA_BL and SA_BR. Each half has a data-bus
// multiplexer: with its SEL bit at 1 (SEL1 top, SEL0 bottom) a read of that
// half returns the CU's partial sums, at 0 the Pbank word chosen by `side`.
//
// Commands arrive already decoded, one per memory cycle, marked by ce:
//   act/pre   open/close row `row` in both Pbanks of `half`
//   rd        read column `col` of `half`; with SEL=1 read psum chunk col[1:0]
//   wr        write wdata to column `col` of Pbank (half, side)
//   mac_top / mac_bot  read column pim_col of the top / bottom pair and start
//             a MAC on that CU (the two can run together, or one of them
//             next to a processor access to the other half)
//   ldin, clr input-buffer write and partial-sum clear for both CUs
// rdata is valid with rvalid two clock edges after the rd command's edge.
// The partition, the CU wiring and the SEL multiplexers follow the design;
// how commands reach the bank is this model's choice.
module pim_bank
  import cdpim_pkg::*;
#(
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    ce,
  input  sel_t                    sel,
  input  logic                    act,
  input  logic                    pre,
  input  logic                    rd,
  input  logic                    wr,
  input  logic                    half,
  input  logic                    side,
  input  logic [$clog2(ROWS)-1:0] row,
  input  logic [$clog2(COLS)-1:0] col,
  input  logic [SA_W-1:0]         wdata,
  input  logic                    mac_top,
  input  logic                    mac_bot,
  input  logic [$clog2(COLS)-1:0] pim_col,
  input  logic                    ldin,
  input  logic                    ldin_chunk,
  input  logic                    clr,
  input  logic                    clr_inner,
  output logic [SA_W-1:0]         rdata,
  output logic                    rvalid,
  output logic                    err,
  output logic                    busy
);
  localparam int unsigned CW = $clog2(COLS);

  // Pbank index: {bottom, right}
  logic [SA_W-1:0] sa [4];
  logic [3:0]      pb_err, pb_open;
  logic [1:0]      h_act, h_pre, h_rd, h_mac, h_cu_rd;
  logic [CW-1:0]   h_col [2];
  logic [SA_W-1:0] cu_rd [2];
  logic [1:0]      cu_busy;
  logic [1:0]      mac_q;
  logic            rd_q, rd_q2, half_q, side_q, psum_q;
  logic            half_sel;

  assign half_sel = half ? sel.sel0 : sel.sel1;

  always_comb begin
    h_mac = {mac_bot, mac_top};
    for (int h = 0; h < 2; h++) begin
      h_act[h]   = act && (half == h[0]);
      h_pre[h]   = pre && (half == h[0]);
      h_cu_rd[h] = rd && (half == h[0]) && half_sel;
      h_rd[h]    = h_mac[h] || (rd && (half == h[0]) && !half_sel);
      h_col[h]   = h_mac[h] ? pim_col : col;
    end
  end

  for (genvar p = 0; p < 4; p++) begin : g_pb
    localparam int H = p / 2;
    localparam int S = p % 2;
    pbank #(.ROWS(ROWS), .COLS(COLS), .W(SA_W)) u_pbank (
      .clk     (clk),
      .rst_n   (rst_n),
      .ce      (ce),
      .act     (h_act[H]),
      .pre     (h_pre[H]),
      .row     (row),
      .rd      (h_rd[H]),
      .wr      (wr && (half == H[0]) && (side == S[0])),
      .col     (h_col[H]),
      .wdata   (wdata),
      .rdata   (sa[p]),
      .is_open (pb_open[p]),
      .err     (pb_err[p])
    );
  end

  for (genvar h = 0; h < 2; h++) begin : g_cu
    pim_cu u_cu (
      .clk        (clk),
      .rst_n      (rst_n),
      .clr        (ce && clr),
      .clr_inner  (clr_inner),
      .in_we      (ce && ldin),
      .in_chunk   (ldin_chunk),
      .in_wdata   (wdata),
      .w_valid    (mac_q[h]),
      .w_left     (sa[2*h]),
      .w_right    (sa[2*h+1]),
      .rd_en      (ce && h_cu_rd[h]),
      .rd_chunk   (col[1:0]),
      .rd_data    (cu_rd[h]),
      .inner_mode (),
      .step       (),
      .busy       (cu_busy[h])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mac_q  <= '0;
      rd_q   <= 1'b0;
      rd_q2  <= 1'b0;
      half_q <= 1'b0;
      side_q <= 1'b0;
      psum_q <= 1'b0;
    end else begin
      mac_q <= ce ? h_mac : 2'b00;
      rd_q  <= ce && rd;
      rd_q2 <= rd_q;
      if (ce && rd) begin
        half_q <= half;
        side_q <= side;
        psum_q <= half_sel;
      end
    end
  end

  // Data-bus multiplexers (SEL1 top, SEL0 bottom), registered once more.
  always_ff @(posedge clk) begin
    if (rd_q) rdata <= psum_q ? cu_rd[half_q] : sa[{half_q, side_q}];
  end
  assign rvalid = rd_q2;
  assign err    = |pb_err;
  assign busy   = |cu_busy || |mac_q;

endmodule
