// xactivation: activation and requantisation stage at the end of every layer.
//
// The accumulator of a neuron (bias plus the sum of input x kernel products, ACC_FRAC
// fraction bits) is passed through the layer's activation and then brought to the
// output format by an arithmetic right shift of SHIFT bits (dropping fraction bits,
// rounding toward minus infinity) and saturation to a signed Y_W-bit value.
//
//   ACT_RELU  : max(0, acc)                       (pointwise conv layers)
//   ACT_LEAKY : acc >= 0 ? acc : acc >>> 3        (dense 1 and 2, negative slope 0.125)
//   ACT_NONE  : acc                               (output layer)
//
// The three activations and the 1/8 slope are those of the deployed model. Applying the
// activation before the shift, truncating rather than rounding, and saturating are this
// design's choices. Purely combinational; o_sat flags a clipped result.
module xactivation
#(
  parameter int   ACC_W = 32,
  parameter int   Y_W   = 8,
  parameter int   SHIFT = 8,
  parameter pointnet_pkg::act_e ACT = pointnet_pkg::ACT_RELU
) (
  input  logic signed [ACC_W-1:0] i_acc,
  output logic signed [Y_W-1:0]   o_y,
  output logic                    o_sat
);

  localparam logic signed [ACC_W-1:0] Y_MAX = (ACC_W'(1) <<< (Y_W-1)) - 1;
  localparam logic signed [ACC_W-1:0] Y_MIN = -(ACC_W'(1) <<< (Y_W-1));

  logic signed [ACC_W-1:0] activated;
  logic signed [ACC_W-1:0] shifted;

  always_comb begin
    unique case (ACT)
      pointnet_pkg::ACT_RELU:  activated = i_acc[ACC_W-1] ? '0 : i_acc;
      pointnet_pkg::ACT_LEAKY: activated = i_acc[ACC_W-1] ? (i_acc >>> 3) : i_acc;
      default:   activated = i_acc;
    endcase
    shifted = activated >>> SHIFT;
    if (shifted > Y_MAX) begin
      o_y   = Y_MAX[Y_W-1:0];
      o_sat = 1'b1;
    end else if (shifted < Y_MIN) begin
      o_y   = Y_MIN[Y_W-1:0];
      o_sat = 1'b1;
    end else begin
      o_y   = shifted[Y_W-1:0];
      o_sat = 1'b0;
    end
  end

endmodule
