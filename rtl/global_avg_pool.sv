// global_avg_pool: global average pooling over the points of one event.
//
// The last pointwise convolution produces, for every point, an N_CH-channel feature
// vector. This block receives those vectors one element per beat (channel 0 .. N_CH-1 of
// point 0, then of point 1, and so on), keeps one running sum per channel in an
// accumulator memory, and after N_PTS points emits the N_CH channel averages, one per
// beat, with out_last on the last. It then starts the next event; the first point of an
// event overwrites the sums instead of adding to them, so no clearing pass is needed.
// While emitting it does not accept input (in_ready low).
//
// The average is sum / N_PTS, truncated toward zero, computed as
// |sum| * ceil(2^S / N_PTS) >> S with S = 2*clog2(N_PTS) + X_W, which is exact for every
// sum of N_PTS X_W-bit values. Input accepted at one element per cycle; output one
// average per cycle.
//
// From the paper: global averaging over the points, no activation, flattened to a vector
// for the dense layers. This design's own choices: the streaming order, the truncating
// division by reciprocal multiplication and the handshake.
module global_avg_pool #(
  parameter int N_CH  = 512,
  parameter int N_PTS = 2126,
  parameter int X_W   = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic signed [X_W-1:0] in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic signed [X_W-1:0] out_data,
  output logic                  out_last
);

  localparam int PW    = (N_PTS > 1) ? $clog2(N_PTS) : 1;
  localparam int CW    = (N_CH  > 1) ? $clog2(N_CH)  : 1;
  localparam int SUM_W = X_W + PW + 1;
  localparam int S     = 2 * $clog2(N_PTS) + X_W;
  localparam longint unsigned RECIP = ((64'd1 << S) + 64'(N_PTS) - 64'd1) / 64'(N_PTS);

  typedef enum logic {S_ACC, S_EMIT} state_e;
  state_e state;

  logic signed [SUM_W-1:0] amem [N_CH];
  logic [CW-1:0] ch;
  logic [PW-1:0] pt;

  assign in_ready  = (state == S_ACC);
  assign out_valid = (state == S_EMIT);
  assign out_last  = (32'(ch) == N_CH - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_ACC;
      ch    <= '0;
      pt    <= '0;
    end else begin
      unique case (state)
        S_ACC: if (in_valid) begin
          if (32'(ch) == N_CH - 1) begin
            ch <= '0;
            if (32'(pt) == N_PTS - 1) begin
              pt    <= '0;
              state <= S_EMIT;
            end else begin
              pt <= pt + 1'b1;
            end
          end else begin
            ch <= ch + 1'b1;
          end
        end
        S_EMIT: if (out_ready) begin
          if (32'(ch) == N_CH - 1) begin
            ch    <= '0;
            state <= S_ACC;
          end else begin
            ch <= ch + 1'b1;
          end
        end
        default: state <= S_ACC;
      endcase
    end
  end

  // running sums
  always_ff @(posedge clk) begin
    if (state == S_ACC && in_valid) begin
      amem[ch] <= ((pt == '0) ? '0 : amem[ch]) + SUM_W'(in_data);
    end
  end

  // division by N_PTS through the reciprocal
  logic signed [SUM_W-1:0] sum;
  logic        [63:0]      mag;
  logic        [63:0]      quot;
  always_comb begin
    sum      = amem[ch];
    mag      = sum[SUM_W-1] ? 64'(-sum) : 64'(sum);
    quot     = (mag * RECIP) >> S;
    out_data = sum[SUM_W-1] ? -X_W'(quot) : X_W'(quot);
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
