// tb_xbundle_layer: three xbundle_layer configurations (leaky ReLU with two lanes, ReLU
// with one lane, linear with a 16-bit output and four lanes), each checked output by
// output against the reference arithmetic under random flow control, plus a cycle-count
// check. It also requires that ReLU clipping, the leaky negative branch and saturation
// all occurred.
module tb_xbundle_layer;
  import pointnet_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic d0, d1, d2;
  int c0, c1, c2, f0, f1, f2;
  int checks, failures;

  xbundle_harness #(.N_IN(5),  .N_OUT(6), .LANES(2), .ACTI(2), .Y_W(8),  .NVEC(30)) h0 (.clk, .rst_n, .done(d0), .checks(c0), .failures(f0));
  xbundle_harness #(.N_IN(7),  .N_OUT(3), .LANES(1), .ACTI(1), .Y_W(8),  .NVEC(30)) h1 (.clk, .rst_n, .done(d1), .checks(c1), .failures(f1));
  xbundle_harness #(.N_IN(16), .N_OUT(8), .LANES(4), .ACTI(0), .Y_W(16), .NVEC(30)) h2 (.clk, .rst_n, .done(d2), .checks(c2), .failures(f2));

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (d0 && d1 && d2);
    checks = c0 + c1 + c2 + 1;
    failures = f0 + f1 + f2;
    if (n_relu_clip == 0 || n_leaky_neg == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL case not exercised: relu_clip=%0d leaky_neg=%0d sat=%0d", n_relu_clip, n_leaky_neg, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end
endmodule
