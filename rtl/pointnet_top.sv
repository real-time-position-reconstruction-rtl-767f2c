// pointnet_top: PointNet event-position and energy reconstruction engine.
//
// Dataflow, one event at a time (N_PTS PMT readouts in, N_OUT numbers out):
//
//   point_formatter  readout -> 6 features (x, y, z, trigger label, time, charge)
//   conv1            6  -> C1  per point, ReLU          (1x1 convolution = per-point dense)
//   conv2            C1 -> C2  per point, ReLU
//   conv3            C2 -> C3  per point, ReLU
//   global_avg_pool  C3 channels averaged over the N_PTS points of the event
//   dense1           C3 -> D1, ReLU with negative slope 1/8
//   dense2           D1 -> D2, ReLU with negative slope 1/8
//   dense3           D2 -> N_OUT, no activation (vertex x, y, z, energy, two spare)
//   collector        gathers the N_OUT outputs into one result beat
//
// Every stage is a valid/ready stream of one element per beat, so the stages overlap:
// the pointwise layers work on successive points while the pool accumulates, and the
// dense layers of one event run while the next event's points enter. The engine is
// bounded by conv3, which needs 1 + (C3/LANES)*(C2+1+LANES) cycles per point: 33,793
// cycles at the default sizes with LANES = 1, or about 71.8 million cycles for the 2126
// points of an event, followed by about 150,000 cycles of pooling output and dense layers.
//
// Weights and biases are loaded through the cfg port before an event (cfg_layer selects
// the layer, cfg_row the output neuron, cfg_col the input, cfg_bias a bias). The port
// must not be written while an event is in flight.
//
// From the paper: the layer sequence and sizes, the activations, the global average pool,
// the 8-bit input/kernel and 16-bit bias widths, the trigger label and the six outputs of
// the deployed model. This design's own choices: the streaming micro-architecture, the
// number of MAC lanes, the 16-bit width of the final outputs and all interfaces. With
// 8-bit inputs and kernels, a final layer of fewer than 128 inputs cannot exceed 16 bits,
// so the result is never clipped at the deployed sizes.
module pointnet_top
  import pointnet_pkg::*;
#(
  parameter int N_PTS = pointnet_pkg::N_POINTS,
  parameter int NC1   = pointnet_pkg::C1,
  parameter int NC2   = pointnet_pkg::C2,
  parameter int NC3   = pointnet_pkg::C3,
  parameter int ND1   = pointnet_pkg::D1,
  parameter int ND2   = pointnet_pkg::D2,
  parameter int NOUT  = pointnet_pkg::N_OUT,
  parameter int LANES = 1
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // weight and bias loading
  input  logic                             cfg_we,
  input  layer_e                           cfg_layer,
  input  logic                             cfg_bias,
  input  logic [9:0]                       cfg_row,
  input  logic [9:0]                       cfg_col,
  input  logic [15:0]                      cfg_wdata,
  // PMT readouts of an event, one per beat
  input  logic                             pt_valid,
  output logic                             pt_ready,
  input  pmt_point_t                       pt_data,
  // reconstruction result, one beat per event
  output logic                             res_valid,
  input  logic                             res_ready,
  output logic [NOUT-1:0][Y_OUT_W-1:0]     res_data
);

  // streams between the stages
  logic               f_v, f_r;       logic signed [X_W-1:0] f_d;
  logic               c1_v, c1_r;     logic signed [X_W-1:0] c1_d;
  logic               c2_v, c2_r;     logic signed [X_W-1:0] c2_d;
  logic               c3_v, c3_r;     logic signed [X_W-1:0] c3_d;
  logic               p_v, p_r;       logic signed [X_W-1:0] p_d;
  logic               d1_v, d1_r;     logic signed [X_W-1:0] d1_d;
  logic               d2_v, d2_r;     logic signed [X_W-1:0] d2_d;
  logic               d3_v, d3_r, d3_l;
  logic signed [Y_OUT_W-1:0] d3_d;

  logic [5:0] we;
  always_comb begin
    we = '0;
    if (cfg_we && 32'(cfg_layer) < 6) we[cfg_layer] = 1'b1;
  end

  point_formatter u_fmt (
    .clk, .rst_n,
    .pt_valid, .pt_ready, .pt_data,
    .out_valid(f_v), .out_ready(f_r), .out_data(f_d), .out_last()
  );

  xbundle_layer #(.N_IN(N_FEAT), .N_OUT(NC1), .LANES(LANES), .ACT(ACT_RELU)) u_conv1 (
    .clk, .rst_n,
    .cfg_we(we[L_CONV1]), .cfg_bias, .cfg_row, .cfg_col, .cfg_wdata,
    .in_valid(f_v), .in_ready(f_r), .in_data(f_d),
    .out_valid(c1_v), .out_ready(c1_r), .out_data(c1_d), .out_last(), .out_sat()
  );

  xbundle_layer #(.N_IN(NC1), .N_OUT(NC2), .LANES(LANES), .ACT(ACT_RELU)) u_conv2 (
    .clk, .rst_n,
    .cfg_we(we[L_CONV2]), .cfg_bias, .cfg_row, .cfg_col, .cfg_wdata,
    .in_valid(c1_v), .in_ready(c1_r), .in_data(c1_d),
    .out_valid(c2_v), .out_ready(c2_r), .out_data(c2_d), .out_last(), .out_sat()
  );

  xbundle_layer #(.N_IN(NC2), .N_OUT(NC3), .LANES(LANES), .ACT(ACT_RELU)) u_conv3 (
    .clk, .rst_n,
    .cfg_we(we[L_CONV3]), .cfg_bias, .cfg_row, .cfg_col, .cfg_wdata,
    .in_valid(c2_v), .in_ready(c2_r), .in_data(c2_d),
    .out_valid(c3_v), .out_ready(c3_r), .out_data(c3_d), .out_last(), .out_sat()
  );

  global_avg_pool #(.N_CH(NC3), .N_PTS(N_PTS), .X_W(X_W)) u_pool (
    .clk, .rst_n,
    .in_valid(c3_v), .in_ready(c3_r), .in_data(c3_d),
    .out_valid(p_v), .out_ready(p_r), .out_data(p_d), .out_last()
  );

  xbundle_layer #(.N_IN(NC3), .N_OUT(ND1), .LANES(LANES), .ACT(ACT_LEAKY)) u_dense1 (
    .clk, .rst_n,
    .cfg_we(we[L_DENSE1]), .cfg_bias, .cfg_row, .cfg_col, .cfg_wdata,
    .in_valid(p_v), .in_ready(p_r), .in_data(p_d),
    .out_valid(d1_v), .out_ready(d1_r), .out_data(d1_d), .out_last(), .out_sat()
  );

  xbundle_layer #(.N_IN(ND1), .N_OUT(ND2), .LANES(LANES), .ACT(ACT_LEAKY)) u_dense2 (
    .clk, .rst_n,
    .cfg_we(we[L_DENSE2]), .cfg_bias, .cfg_row, .cfg_col, .cfg_wdata,
    .in_valid(d1_v), .in_ready(d1_r), .in_data(d1_d),
    .out_valid(d2_v), .out_ready(d2_r), .out_data(d2_d), .out_last(), .out_sat()
  );

  xbundle_layer #(.N_IN(ND2), .N_OUT(NOUT), .LANES(1), .ACT(ACT_NONE),
                  .Y_W(Y_OUT_W), .Y_FRAC(X_FRAC)) u_dense3 (
    .clk, .rst_n,
    .cfg_we(we[L_DENSE3]), .cfg_bias, .cfg_row, .cfg_col, .cfg_wdata,
    .in_valid(d2_v), .in_ready(d2_r), .in_data(d2_d),
    .out_valid(d3_v), .out_ready(d3_r), .out_data(d3_d), .out_last(d3_l), .out_sat()
  );

  // result collector
  localparam int OW = (NOUT > 1) ? $clog2(NOUT) : 1;
  logic [OW-1:0] opos;
  assign d3_r = !res_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      opos      <= '0;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (d3_v && d3_r) begin
        res_data[opos] <= d3_d;
        if (d3_l) begin
          opos      <= '0;
          res_valid <= 1'b1;
        end else begin
          opos <= opos + 1'b1;
        end
      end
    end
  end

  a_res_stable: assert property (@(posedge clk) disable iff (!rst_n)
    res_valid && !res_ready |=> res_valid && $stable(res_data));

endmodule
