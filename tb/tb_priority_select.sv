// tb_priority_select -- random zero flags (Q_S=8, several set at once) and
// patterns; the selected index must be the lowest set flag, z must equal
// pi(HD(y)) XOR e_sel and found the OR of the flags.
module tb_priority_select;
  localparam int N = 16, QS = 8, AW = 3;
  logic [QS-1:0] zero;
  logic [N-1:0] phd, z;
  logic [N-1:0] e [QS];
  logic [AW-1:0] sel;
  logic found;
  int checks = 0, failures = 0;
  priority_select #(.N(N), .QS(QS)) dut (.zero, .phd, .e, .z, .sel, .found);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 400; t++) begin
      automatic int first = -1;
      zero = QS'($urandom) & QS'($urandom);
      if (t % 10 == 0) zero = '0;
      phd = N'($urandom);
      for (int q = 0; q < QS; q++) e[q] = N'($urandom);
      #1;
      for (int q = QS - 1; q >= 0; q--) if (zero[q]) first = q;
      checks++;
      if (found !== (first >= 0)) failures++;
      if (first >= 0) begin
        checks += 2;
        if (sel !== AW'(first)) begin failures++; $display("sel %0d vs %0d", sel, first); end
        if (z !== (phd ^ e[first])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
