// tb_xactivation: checks the three activations (ReLU, leaky ReLU with slope 1/8, none) and
// the requantisation to 8 and 16 bits against the reference arithmetic, over directed
// corner values and random accumulators of all magnitudes.
module tb_xactivation;
  import pointnet_pkg::*;
  import pointnet_ref_pkg::*;

  int checks = 0, failures = 0;
  logic signed [31:0] acc;
  logic signed [7:0]  y_relu, y_leaky, y_none8;
  logic signed [15:0] y_none16;
  logic s_relu, s_leaky, s_none8, s_none16;

  xactivation #(.ACC_W(32), .Y_W(8),  .SHIFT(8), .ACT(ACT_RELU))  u_relu  (.i_acc(acc), .o_y(y_relu),   .o_sat(s_relu));
  xactivation #(.ACC_W(32), .Y_W(8),  .SHIFT(8), .ACT(ACT_LEAKY)) u_leaky (.i_acc(acc), .o_y(y_leaky),  .o_sat(s_leaky));
  xactivation #(.ACC_W(32), .Y_W(8),  .SHIFT(8), .ACT(ACT_NONE))  u_none8 (.i_acc(acc), .o_y(y_none8),  .o_sat(s_none8));
  xactivation #(.ACC_W(32), .Y_W(16), .SHIFT(8), .ACT(ACT_NONE))  u_none16(.i_acc(acc), .o_y(y_none16), .o_sat(s_none16));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s acc=%0d got=%0d exp=%0d", what, acc, got, exp);
    end
  endtask

  task automatic try_acc(int a);
    int e;
    int unsigned sat0;
    acc = a;
    #1;
    sat0 = n_sat; e = ref_act(a, 1, 8);  check("relu", y_relu, e);  check("relu sat", s_relu, n_sat != sat0);
    sat0 = n_sat; e = ref_act(a, 2, 8);  check("leaky", y_leaky, e); check("leaky sat", s_leaky, n_sat != sat0);
    sat0 = n_sat; e = ref_act(a, 0, 8);  check("none8", y_none8, e); check("none8 sat", s_none8, n_sat != sat0);
    sat0 = n_sat; e = ref_act(a, 0, 16); check("none16", y_none16, e); check("none16 sat", s_none16, n_sat != sat0);
  endtask

  initial begin
    static int directed[] = '{0, 1, -1, 255, 256, -256, -257, 32767, 32768, -32768, -32769,
                       -2048, -2049, -8, -9, 8388607, -8388608, 2147483647, -2147483647};
    foreach (directed[k]) try_acc(directed[k]);
    for (int k = 0; k < 20000; k++) begin
      automatic int sh = int'($urandom_range(30));
      try_acc(int'($urandom) >>> sh);
    end
    if (n_relu_clip == 0 || n_leaky_neg == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL a case was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
