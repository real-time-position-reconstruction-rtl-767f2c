// tb_global_avg_pool: a small pool (4 channels, 5 points, several events back to back) and
// one with the full event size of 2126 points (3 channels), each compared average by
// average with integer division.
module tb_global_avg_pool;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic d0, d1;
  int c0, c1, f0, f1;

  pool_harness #(.N_CH(4), .N_PTS(5),    .NEV(6)) h0 (.clk, .rst_n, .done(d0), .checks(c0), .failures(f0));
  pool_harness #(.N_CH(3), .N_PTS(2126), .NEV(2)) h1 (.clk, .rst_n, .done(d1), .checks(c1), .failures(f1));

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (d0 && d1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end
endmodule
