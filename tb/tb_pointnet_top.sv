// tb_pointnet_top: end-to-end test of the PointNet engine at reduced layer sizes.
//
// Loads random kernels and biases into all six layers, streams NEV events of N_PTS
// readouts back to back with random gaps, takes the results with random back-pressure and
// compares every output word with a reference model of the
// whole network built from the reference arithmetic. It counts how often each mechanism
// of the design occurred and fails if one never did: input back-pressure, result
// back-pressure, dark PMTs (trigger label 0), ReLU clipping, the leaky negative branch,
// saturation and two events in flight at once.
module tb_pointnet_top;
  import pointnet_pkg::*;
  import pointnet_ref_pkg::*;

  localparam int NP  = 4;
  localparam int K1  = 4;
  localparam int K2  = 4;
  localparam int K3  = 8;
  localparam int J1  = 6;
  localparam int J2  = 4;
  localparam int NO  = 6;
  localparam int NEV = 16;   // one latency-measurement batch
  localparam int WMAG = 127;
  localparam longint WATCHDOG = 400000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we = 0, cfg_bias = 0;
  layer_e cfg_layer = L_CONV1;
  logic [9:0] cfg_row = 0, cfg_col = 0;
  logic [15:0] cfg_wdata = 0;
  logic pt_valid = 0, pt_ready, res_valid, res_ready = 0;
  pmt_point_t pt_data = '0;
  logic [NO-1:0][Y_OUT_W-1:0] res_data;

  pointnet_top #(.N_PTS(NP), .NC1(K1), .NC2(K2), .NC3(K3), .ND1(J1), .ND2(J2), .NOUT(NO), .LANES(2)) dut (
    .clk, .rst_n, .cfg_we, .cfg_layer, .cfg_bias, .cfg_row, .cfg_col, .cfg_wdata,
    .pt_valid, .pt_ready, .pt_data, .res_valid, .res_ready, .res_data);

  int checks = 0, failures = 0;
  int nin[6], nout[6];
  int w0[], w1[], w2[], w3[], w4[], w5[];
  int b0[], b1[], b2[], b3[], b4[], b5[];
  int expq[$];          // NO words per event
  int n_events_out = 0, pts_in = 0;
  int unsigned cyc = 0, t_first_pt = 0, t_res = 0;
  int unsigned n_pt_stall = 0, n_res_stall = 0, n_dark = 0, n_overlap = 0;
  bit flow_random = 1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (pt_valid && !pt_ready) n_pt_stall++;
      if (res_valid && !res_ready) n_res_stall++;
      if (pt_valid && pt_ready) begin
        if (pts_in == 0) t_first_pt <= cyc;
        // a readout of a later event entered while an earlier result is still pending
        if (pts_in / NP > n_events_out) n_overlap++;
        pts_in++;
      end
      if (res_valid && res_ready) begin
        for (int k = 0; k < NO; k++) begin
          int e;
          e = (expq.size() > 0) ? expq.pop_front() : 99999;
          checks++;
          if (int'($signed(res_data[k])) != e) begin
            failures++;
            $display("FAIL event %0d output %0d got %0d exp %0d", n_events_out, k,
                     $signed(res_data[k]), e);
          end
        end
        n_events_out++;
        t_res <= cyc;
      end
      res_ready <= flow_random ? ($urandom_range(3) == 0) : 1'b1;
    end
  end

  task automatic load_layer(input layer_e l, input int n_i, input int n_o,
                            input int wmag, output int w[], output int b[]);
    w = new[n_i * n_o]; b = new[n_o];
    foreach (w[k]) w[k] = rnd(-wmag, wmag);
    foreach (b[k]) b[k] = rnd(-12000, 12000);
    for (int o = 0; o < n_o; o++) begin
      for (int i = 0; i < n_i; i++) begin
        @(negedge clk);
        cfg_we = 1; cfg_layer = l; cfg_bias = 0; cfg_row = 10'(o); cfg_col = 10'(i);
        cfg_wdata = 16'(w[o * n_i + i]);
      end
      @(negedge clk);
      cfg_we = 1; cfg_layer = l; cfg_bias = 1; cfg_row = 10'(o); cfg_col = 0;
      cfg_wdata = 16'(b[o]);
    end
    @(negedge clk);
    cfg_we = 0;
  endtask

  // reference model of one event; pushes the expected outputs
  task automatic model_event(input pmt_point_t pts[]);
    int f[], h1[], h2[], h3[], p[], g1[], g2[], y[];
    longint sum[] = new[K3];
    foreach (sum[c]) sum[c] = 0;
    foreach (pts[n]) begin
      bit lit = (pts[n].t != 0) || (pts[n].q != 0);
      f = '{int'(pts[n].x), int'(pts[n].y), int'(pts[n].z), lit ? 127 : 0,
            int'(pts[n].t), int'(pts[n].q)};
      ref_layer(w0, b0, f, N_FEAT, K1, 1, 8, h1);
      ref_layer(w1, b1, h1, K1, K2, 1, 8, h2);
      ref_layer(w2, b2, h2, K2, K3, 1, 8, h3);
      foreach (h3[c]) sum[c] += h3[c];
    end
    p = new[K3];
    foreach (p[c]) p[c] = ref_avg(sum[c], NP);
    ref_layer(w3, b3, p, K3, J1, 2, 8, g1);
    ref_layer(w4, b4, g1, J1, J2, 2, 8, g2);
    ref_layer(w5, b5, g2, J2, NO, 0, Y_OUT_W, y);
    foreach (y[k]) expq.push_back(y[k]);
  endtask

  task automatic send_point(input pmt_point_t p);
    @(negedge clk);
    while (flow_random && $urandom_range(4) == 0) @(negedge clk);
    pt_valid = 1; pt_data = p;
    while (!pt_ready) @(negedge clk);
    @(posedge clk);
    #1 pt_valid = 0;
  endtask

  initial begin
    pmt_point_t pts[];
    repeat (4) @(posedge clk);
    rst_n = 1;
    load_layer(L_CONV1,  N_FEAT, K1, WMAG, w0, b0);
    load_layer(L_CONV2,  K1, K2, WMAG, w1, b1);
    load_layer(L_CONV3,  K2, K3, WMAG, w2, b2);
    load_layer(L_DENSE1, K3, J1, WMAG, w3, b3);
    load_layer(L_DENSE2, J1, J2, WMAG, w4, b4);
    load_layer(L_DENSE3, J2, NO, WMAG, w5, b5);
    pts = new[NP];
    for (int e = 0; e < NEV; e++) begin
      foreach (pts[n]) begin
        bit dark;
        dark = ($urandom_range(3) == 0);
        pts[n].x = 8'(rnd(-128, 127)); pts[n].y = 8'(rnd(-128, 127)); pts[n].z = 8'(rnd(-128, 127));
        pts[n].t = dark ? 8'sd0 : 8'(rnd(0, 127));
        pts[n].q = dark ? 8'sd0 : 8'(rnd(1, 127));
        if (dark) n_dark++;
      end
      model_event(pts);
      foreach (pts[n]) send_point(pts[n]);
    end
    while (n_events_out < NEV) @(posedge clk);

    $display("mechanisms: input stalls=%0d result stalls=%0d dark PMTs=%0d relu clips=%0d leaky negatives=%0d saturations=%0d overlapped events=%0d",
             n_pt_stall, n_res_stall, n_dark, n_relu_clip, n_leaky_neg, n_sat, n_overlap);
    checks++;
    if (n_pt_stall == 0 || n_res_stall == 0 || n_dark == 0 || n_relu_clip == 0 ||
        n_leaky_neg == 0 || n_sat == 0 || n_overlap == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (longint k = 0; k < WATCHDOG; k++) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d events done", n_events_out, NEV);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
