// pool_harness: drives one global_avg_pool instance for tb_global_avg_pool.
//
// Sends NEV events of N_PTS points x N_CH channels with random values (some events all
// positive, as after a ReLU, some of mixed sign), random input gaps and random output
// back-pressure, and compares every average with sum / N_PTS (truncated toward zero)
// worked out by plain integer division. Also checks out_last and that, without
// back-pressure, the N_CH averages leave on N_CH consecutive cycles.
module pool_harness #(
  parameter int N_CH  = 4,
  parameter int N_PTS = 5,
  parameter int NEV   = 4
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  import pointnet_ref_pkg::*;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last;
  logic signed [7:0] in_data = 0, out_data;
  bit randomize_flow = 1;
  int expq[$];
  int unsigned cyc = 0, t_first = 0, t_last = 0, n_out = 0;

  global_avg_pool #(.N_CH(N_CH), .N_PTS(N_PTS), .X_W(8)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .out_last);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid && out_ready) begin
      int e;
      e = (expq.size() > 0) ? expq.pop_front() : 9999;
      checks++;
      if (int'(out_data) != e) begin
        failures++;
        $display("FAIL pool N_PTS=%0d avg %0d got %0d exp %0d", N_PTS, n_out, out_data, e);
      end
      checks++;
      if (out_last != ((n_out % N_CH) == N_CH - 1)) begin
        failures++;
        $display("FAIL pool out_last at %0d", n_out);
      end
      if (n_out % N_CH == 0) t_first <= cyc;
      if (out_last) t_last <= cyc;
      n_out++;
    end
    if (rst_n) out_ready <= randomize_flow ? ($urandom_range(2) != 0) : 1'b1;
  end

  task automatic run_event(input bit positive);
    longint sum[] = new[N_CH];
    int v[] = new[N_PTS * N_CH];
    foreach (v[k]) v[k] = positive ? rnd(0, 127) : rnd(-128, 127);
    for (int c = 0; c < N_CH; c++) begin
      sum[c] = 0;
      for (int p = 0; p < N_PTS; p++) sum[c] += v[p * N_CH + c];
      expq.push_back(ref_avg(sum[c], N_PTS));
    end
    foreach (v[k]) begin
      @(negedge clk);
      while (randomize_flow && $urandom_range(3) == 0) @(negedge clk);
      in_valid = 1; in_data = 8'(v[k]);
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      #1 in_valid = 0;
    end
  endtask

  initial begin
    checks = 0; failures = 0; done = 0;
    wait (rst_n);
    for (int e = 0; e < NEV; e++) run_event(e % 2 == 0);
    while (expq.size() > 0) @(posedge clk);
    randomize_flow = 0;
    repeat (3) @(posedge clk);
    run_event(1);
    while (expq.size() > 0) @(posedge clk);
    checks++;
    if (t_last - t_first != N_CH - 1) begin
      failures++;
      $display("FAIL pool emit took %0d cycles for %0d channels", t_last - t_first + 1, N_CH);
    end
    done = 1;
  end
endmodule
