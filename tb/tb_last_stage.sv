// tb_last_stage -- random inputs every clock (N=8): frames found in the stage
// before (z_vld) must leave as pi^-1(z), decoded frames with their yhat,
// undecoded ones with out_yhat_vld = 0; out_yhat is loaded only for decoded
// frames. Outputs are checked one clock after the inputs.
module tb_last_stage;
  localparam int N = 8, LGN = 3, NT = 500;
  logic clk = 0, rst_n = 0;
  logic i_valid = 0, i_yhat_vld = 0, i_z_vld = 0;
  logic [N-1:0] i_yhat = '0, i_z = '0;
  logic [LGN-1:0] i_pi [N];
  logic out_valid, out_yhat_vld;
  logic [N-1:0] out_yhat;
  int checks = 0, failures = 0, c_inv = 0, c_pass = 0, c_none = 0;
  always #5 clk = ~clk;
  last_stage #(.N(N)) dut (.clk, .rst_n, .i_valid, .i_yhat, .i_yhat_vld, .i_z, .i_z_vld, .i_pi,
    .out_valid, .out_yhat, .out_yhat_vld);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int p[N];
    bit e_valid, e_vld, loaded;
    logic [N-1:0] e_yhat;
    loaded = 0;
    for (int j = 0; j < N; j++) i_pi[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      i_valid = ($urandom_range(0, 9) != 0);
      i_yhat_vld = ($urandom_range(0, 2) == 0);
      i_z_vld = !i_yhat_vld && ($urandom_range(0, 1) == 0);
      i_yhat = N'($urandom); i_z = N'($urandom);
      for (int i = 0; i < N; i++) p[i] = i;
      for (int i = N - 1; i > 0; i--) begin automatic int j = $urandom_range(0, i); automatic int x = p[i]; p[i] = p[j]; p[j] = x; end
      for (int i = 0; i < N; i++) i_pi[i] = LGN'(p[i]);
      e_valid = i_valid;
      e_vld = i_valid && (i_yhat_vld || i_z_vld);
      if (e_vld) begin
        loaded = 1;
        if (i_z_vld) begin
          for (int j = 0; j < N; j++) e_yhat[p[j]] = i_z[j];
          c_inv++;
        end else begin
          e_yhat = i_yhat;
          c_pass++;
        end
      end else if (i_valid) c_none++;
      @(negedge clk);
      checks += 2;
      if (out_valid !== e_valid) failures++;
      if (out_yhat_vld !== e_vld) failures++;
      if (loaded) begin
        checks++;
        if (out_yhat !== e_yhat) begin failures++; $display("yhat %h vs %h", out_yhat, e_yhat); end
      end
    end
    checks++;
    if (c_inv == 0 || c_pass == 0 || c_none == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
