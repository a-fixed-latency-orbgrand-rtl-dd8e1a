// tb_pattern_memory -- fills a small pattern memory (N=16, Q_S=8) row by row,
// rewrites random rows, and compares every row with a shadow copy after each
// write (only the addressed row may change; rows not yet written are skipped).
module tb_pattern_memory;
  localparam int N = 16, QS = 8, AW = $clog2(QS);
  logic clk = 0, wr_en = 0;
  logic [AW-1:0] wr_row = '0;
  logic [N-1:0] wr_data = '0;
  logic [N-1:0] e [QS];
  logic [N-1:0] shadow [QS];
  int checks = 0, failures = 0;
  int filled = 0;   // rows 0..filled-1 have been written
  always #5 clk = ~clk;
  pattern_memory #(.N(N), .QS(QS)) dut (.clk, .wr_en, .wr_row, .wr_data, .e);
  initial begin
    repeat (500) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic wr(int r, logic [N-1:0] d);
    @(negedge clk); wr_en = 1; wr_row = AW'(r); wr_data = d;
    @(negedge clk); wr_en = 0;
    shadow[r] = d;
    if (r + 1 > filled) filled = r + 1;
    for (int i = 0; i < filled; i++) begin
      checks++;
      if (e[i] !== shadow[i]) begin failures++; $display("row %0d: %h vs %h", i, e[i], shadow[i]); end
    end
  endtask
  initial begin
    for (int r = 0; r < QS; r++) wr(r, 16'($urandom));
    for (int i = 0; i < 40; i++) wr($urandom_range(0, QS - 1), 16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
