// tb_pbank: writes random words to random (row, column) pairs through
// ACT/WR/PRE, reads them back through ACT/RD with a one-edge read latency,
// and checks that an access to a closed Pbank raises err and changes nothing.
module tb_pbank;
  localparam int ROWS = 16, COLS = 8;
  logic clk = 0, rst_n = 0, ce = 0, act = 0, pre = 0, rd = 0, wr = 0;
  logic [3:0] row = 0;
  logic [2:0] col = 0;
  logic [255:0] wdata = 0, rdata;
  logic is_open, err;
  logic [255:0] ref_m [ROWS*COLS];
  bit written [ROWS*COLS];
  int checks = 0, failures = 0;

  pbank #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic op(input logic a, p, r, w);
    act = a; pre = p; rd = r; wr = w; ce = 1; @(posedge clk); #1; act = 0; pre = 0; rd = 0; wr = 0; ce = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // closed-bank access
    col = 1; wdata = '1; op(0, 0, 0, 1);
    checks++; if (!err || is_open) failures++;
    for (int t = 0; t < 60; t++) begin
      row = 4'($urandom); op(1, 0, 0, 0);
      checks++; if (!is_open) failures++;
      for (int k = 0; k < 3; k++) begin
        col = 3'($urandom); wdata = {8{$urandom}};
        ref_m[{row, col}] = wdata; written[{row, col}] = 1;
        op(0, 0, 0, 1);
      end
      op(0, 1, 0, 0);
      checks++; if (is_open) failures++;
    end
    for (int r = 0; r < ROWS; r++) begin
      row = 4'(r); op(1, 0, 0, 0);
      for (int c = 0; c < COLS; c++) if (written[r*COLS+c]) begin
        col = 3'(c); op(0, 0, 1, 0);
        checks++; if (rdata !== ref_m[r*COLS+c]) begin failures++; $display("r%0d c%0d mismatch", r, c); end
        checks++; if (err) failures++;
      end
      op(0, 1, 0, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
