// pointnet_pkg: shared types and constants of the PointNet event-reconstruction engine.
//
// An event is a point cloud of N_POINTS PMT readouts. Each readout carries the PMT
// position (x, y, z), the light arrival time and the integrated charge. A binary trigger
// label is added in hardware, giving N_FEAT = 6 features per point. The network maps the
// 6 x N_POINTS cloud to N_OUT = 6 numbers, of which the first four are the event vertex
// (x, y, z) and the energy.
//
// Number formats. Activations and kernels are 8-bit two's complement with no integer
// bits (seven fraction bits, range [-1, 127/128]). Biases are 16-bit with no integer
// bits (15 fraction bits). The widths follow the deployed model; the placement of the
// binary point (all fraction) follows its "0 integer bits" setting. The scaling of the raw
// detector quantities into that range is left to whoever feeds the engine.
package pointnet_pkg;

  // Event geometry: 1,879 inner plus 247 outer PMTs.
  localparam int N_POINTS = 2126;
  localparam int N_RAW    = 5;      // x, y, z, time, charge
  localparam int N_FEAT   = 6;      // x, y, z, label, time, charge

  // Layer widths of the deployed model.
  localparam int C1 = 64;           // pointwise conv 1
  localparam int C2 = 64;           // pointwise conv 2
  localparam int C3 = 512;          // pointwise conv 3, then global average pool
  localparam int D1 = 256;          // dense 1
  localparam int D2 = 64;           // dense 2
  localparam int N_OUT = 6;         // dense 3 (output)

  // Bit widths.
  localparam int X_W    = 8;        // activation / input
  localparam int X_FRAC = 7;
  localparam int W_W    = 8;        // kernel
  localparam int W_FRAC = 7;
  localparam int B_W    = 16;       // bias
  localparam int B_FRAC = 15;
  localparam int ACC_W  = 32;       // accumulator
  localparam int Y_OUT_W = 16;      // width of the final (un-activated) outputs

  // Value of the trigger label for a PMT that saw light: the closest 8-bit value to 1.0.
  localparam logic signed [X_W-1:0] LABEL_ONE = 8'sd127;

  typedef enum logic [1:0] {
    ACT_NONE  = 2'd0,               // linear output layer
    ACT_RELU  = 2'd1,               // ReLU after each pointwise conv
    ACT_LEAKY = 2'd2                // ReLU with negative slope 1/8 after dense 1 and 2
  } act_e;

  // One PMT readout as it enters the engine.
  typedef struct packed {
    logic signed [X_W-1:0] x;
    logic signed [X_W-1:0] y;
    logic signed [X_W-1:0] z;
    logic signed [X_W-1:0] t;       // arrival time
    logic signed [X_W-1:0] q;       // integrated charge
  } pmt_point_t;

  // Layer indices used by the weight-loading port.
  typedef enum logic [2:0] {
    L_CONV1 = 3'd0, L_CONV2 = 3'd1, L_CONV3 = 3'd2,
    L_DENSE1 = 3'd3, L_DENSE2 = 3'd4, L_DENSE3 = 3'd5
  } layer_e;

endpackage
