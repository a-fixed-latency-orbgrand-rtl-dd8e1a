// tb_h_memory -- writes every row of a small H memory (N=8, M=5) with random
// data, then rewrites rows in random order, and after each write compares all
// rows with a shadow copy; a write to a row number >= M must change nothing.
module tb_h_memory;
  localparam int N = 8, M = 5, RW = $clog2(M);
  logic clk = 0, wr_en = 0;
  logic [RW-1:0] wr_row = '0;
  logic [N-1:0] wr_data = '0;
  logic [N-1:0] h [M];
  logic [N-1:0] shadow [M];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  h_memory #(.N(N), .M(M)) dut (.clk, .wr_en, .wr_row, .wr_data, .h);
  initial begin
    repeat (500) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic wr(int r, logic [N-1:0] d);
    @(negedge clk); wr_en = 1; wr_row = RW'(r); wr_data = d;
    @(negedge clk); wr_en = 0;
    if (r < M) shadow[r] = d;
    for (int i = 0; i < M; i++) begin
      checks++;
      if (h[i] !== shadow[i]) begin failures++; $display("row %0d: %h vs %h", i, h[i], shadow[i]); end
    end
  endtask
  initial begin
    for (int r = 0; r < M; r++) begin shadow[r] = 8'($urandom); @(negedge clk); wr_en = 1; wr_row = RW'(r); wr_data = shadow[r]; end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 40; i++) wr($urandom_range(0, M - 1), 8'($urandom));
    wr(6, 8'hA5);
    wr(7, 8'h5A);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
