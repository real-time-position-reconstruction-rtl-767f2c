// xbundle_harness: drives one xbundle_layer instance for tb_xbundle_layer.
//
// Loads random kernels and biases through the cfg port, sends NVEC random input vectors
// with random gaps, takes the outputs with random back-pressure and compares each output
// with the reference arithmetic. One extra vector is run with no gaps and no
// back-pressure to check the documented cycle count:
// 1 + (N_OUT / LANES) * (N_IN + 1 + LANES) cycles from the last input to the last output.
module xbundle_harness #(
  parameter int N_IN  = 5,
  parameter int N_OUT = 6,
  parameter int LANES = 2,
  parameter int ACTI  = 1,     // 0 none, 1 relu, 2 leaky
  parameter int Y_W   = 8,
  parameter int NVEC  = 20,
  parameter int WMAG  = 127    // largest kernel magnitude used
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  import pointnet_pkg::*;
  import pointnet_ref_pkg::*;

  localparam act_e ACT = (ACTI == 0) ? ACT_NONE : (ACTI == 1) ? ACT_RELU : ACT_LEAKY;

  logic cfg_we = 0, cfg_bias = 0;
  logic [9:0] cfg_row = 0, cfg_col = 0;
  logic [15:0] cfg_wdata = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last, out_sat;
  logic signed [7:0] in_data = 0;
  logic signed [Y_W-1:0] out_data;

  xbundle_layer #(.N_IN(N_IN), .N_OUT(N_OUT), .LANES(LANES), .ACT(ACT), .Y_W(Y_W)) dut (
    .clk, .rst_n, .cfg_we, .cfg_bias, .cfg_row, .cfg_col, .cfg_wdata,
    .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .out_last, .out_sat);

  int w[], b[];
  int expq[$];          // expected outputs in order
  bit randomize_flow = 1;
  int unsigned cyc = 0, t_last_in = 0, t_last_out = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid && in_ready) t_last_in <= cyc;
  end

  // output side: random back-pressure, compare in order
  int outs_seen = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid && out_ready) begin
        int e;
        checks++;
        e = (expq.size() > 0) ? expq.pop_front() : 12345;
        if (int'(out_data) != e) begin
          failures++;
          $display("FAIL layer N_IN=%0d out %0d got %0d exp %0d", N_IN, outs_seen, out_data, e);
        end
        checks++;
        if (out_last != ((outs_seen % N_OUT) == N_OUT - 1)) begin
          failures++;
          $display("FAIL out_last at output %0d", outs_seen);
        end
        outs_seen++;
        if (out_last) t_last_out = cyc;
      end
      out_ready <= randomize_flow ? ($urandom_range(3) != 0) : 1'b1;
    end
  end

  task automatic send_vec(input int x[]);
    int y[];
    ref_layer(w, b, x, N_IN, N_OUT, ACTI, Y_W, y);
    foreach (y[k]) expq.push_back(y[k]);
    for (int i = 0; i < N_IN; i++) begin
      @(negedge clk);
      while (randomize_flow && $urandom_range(2) == 0) @(negedge clk);
      in_valid = 1; in_data = 8'(x[i]);
      while (!in_ready) @(negedge clk);
      @(posedge clk);             // taken at this edge
      @(negedge clk);
      in_valid = 0;
    end
  endtask

  initial begin
    int x[];
    checks = 0; failures = 0; done = 0;
    w = new[N_IN * N_OUT]; b = new[N_OUT]; x = new[N_IN];
    foreach (w[k]) w[k] = rnd(-WMAG, WMAG);
    foreach (b[k]) b[k] = rnd(-32768, 32767);
    wait (rst_n);
    @(posedge clk);
    for (int o = 0; o < N_OUT; o++) begin
      for (int i = 0; i < N_IN; i++) begin
        cfg_we <= 1; cfg_bias <= 0; cfg_row <= 10'(o); cfg_col <= 10'(i); cfg_wdata <= 16'(w[o*N_IN+i]);
        @(posedge clk);
      end
      cfg_we <= 1; cfg_bias <= 1; cfg_row <= 10'(o); cfg_col <= 0; cfg_wdata <= 16'(b[o]);
      @(posedge clk);
    end
    cfg_we <= 0;
    for (int v = 0; v < NVEC; v++) begin
      foreach (x[k]) x[k] = (v % 4 == 0) ? rnd(-128, 127) : rnd(-40, 40);
      send_vec(x);
    end
    while (expq.size() > 0) @(posedge clk);
    // timing run: no gaps, no back-pressure
    randomize_flow = 0;
    repeat (3) @(posedge clk);
    foreach (x[k]) x[k] = rnd(-128, 127);
    send_vec(x);
    while (expq.size() > 0) @(posedge clk);
    checks++;
    if (t_last_out - t_last_in != 1 + (N_OUT / LANES) * (N_IN + 1 + LANES)) begin
      failures++;
      $display("FAIL latency %0d expected %0d", t_last_out - t_last_in,
               1 + (N_OUT / LANES) * (N_IN + 1 + LANES));
    end
    done = 1;
  end
endmodule
