// xbundle_layer: one layer of the PointNet network, y = act(W x + b).
//
// The same engine serves as the kernel-size-1 convolution applied to each point (conv 1 to
// 3) and as the fully connected layer applied to the pooled vector (dense 1 to 3): a 1x1
// convolution over a point cloud is a dense layer applied to every point in turn.
//
// Operation. The layer accepts input vectors of N_IN elements, one per beat, into a
// ping-pong pair of input buffers, so the next vector can arrive while the current one is
// being processed; in_ready falls only when both buffers are full. For a buffered vector
// the layer computes the N_OUT outputs in groups of LANES neurons (state MAC): each cycle one input element is broadcast to LANES multiply-
// accumulate lanes, each of which reads its own kernel from its own weight bank. A group
// takes N_IN issue cycles plus one pipeline drain cycle (the weight read is registered,
// as in a block RAM). The accumulators start at the neuron's bias. The group's results
// pass through xactivation and leave one per beat (state EMIT, valid/ready handshake);
// out_last marks the last output of the vector. The layer then releases the buffer and
// goes on with the other one, if full (state IDLE for one cycle between vectors).
// From the last input of a vector to its last output, without back-pressure and with the
// layer idle before: 1 + (N_OUT/LANES) * (N_IN + 1 + LANES) cycles. A stream of vectors
// runs at one per 1 + (N_OUT/LANES) * (N_IN + 1 + LANES) cycles when the input keeps up.
//
// Weights and biases are written through the cfg port (row = output neuron, col = input
// element), which must only be used while the layer is idle. Neuron o lives in bank
// o % LANES at address (o / LANES) * N_IN + col.
//
// From the paper: the layer types, the widths of input (8), kernel (8) and bias (16), the
// absence of integer bits and the activations. This design's own choices: the ping-pong
// input buffer, the sequential lane structure, LANES, the accumulator width, the bias
// alignment and the handshake.
module xbundle_layer
#(
  parameter int   N_IN   = 64,
  parameter int   N_OUT  = 64,
  parameter int   LANES  = 1,
  parameter int   X_W    = pointnet_pkg::X_W,
  parameter int   X_FRAC = pointnet_pkg::X_FRAC,
  parameter int   W_W    = pointnet_pkg::W_W,
  parameter int   W_FRAC = pointnet_pkg::W_FRAC,
  parameter int   B_W    = pointnet_pkg::B_W,
  parameter int   B_FRAC = pointnet_pkg::B_FRAC,
  parameter int   Y_W    = pointnet_pkg::X_W,
  parameter int   Y_FRAC = pointnet_pkg::X_FRAC,
  parameter int   ACC_W  = pointnet_pkg::ACC_W,
  parameter pointnet_pkg::act_e ACT = pointnet_pkg::ACT_RELU,
  parameter int   RC_W   = 10                 // width of the cfg row / col fields
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight / bias loading
  input  logic                    cfg_we,
  input  logic                    cfg_bias,   // 1: write bias[row], 0: write kernel[row][col]
  input  logic [RC_W-1:0]         cfg_row,
  input  logic [RC_W-1:0]         cfg_col,
  input  logic [15:0]             cfg_wdata,
  // input vector, one element per beat
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [X_W-1:0]   in_data,
  // output vector, one element per beat
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic signed [Y_W-1:0]   out_data,
  output logic                    out_last,
  output logic                    out_sat     // this output was clipped by saturation
);

  localparam int GROUPS    = N_OUT / LANES;
  localparam int DEPTH     = GROUPS * N_IN;
  localparam int PROD_FRAC = X_FRAC + W_FRAC;
  localparam int ACC_FRAC  = (PROD_FRAC > B_FRAC) ? PROD_FRAC : B_FRAC;
  localparam int PSH       = ACC_FRAC - PROD_FRAC;
  localparam int BSH       = ACC_FRAC - B_FRAC;
  localparam int SHIFT     = ACC_FRAC - Y_FRAC;
  localparam int IW        = (N_IN   > 1) ? $clog2(N_IN)   : 1;
  localparam int GW        = (GROUPS > 1) ? $clog2(GROUPS) : 1;
  localparam int LW        = (LANES  > 1) ? $clog2(LANES)  : 1;
  localparam int AW        = (DEPTH  > 1) ? $clog2(DEPTH)  : 1;

  initial begin
    if (N_OUT % LANES != 0) $error("N_OUT must be a multiple of LANES");
    if (SHIFT < 0)          $error("output format has more fraction bits than the accumulator");
  end

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_DRAIN, S_EMIT} state_e;
  state_e state;

  // ---------------------------------------------------------------- storage
  logic signed [W_W-1:0] wmem [LANES][DEPTH];
  logic signed [B_W-1:0] bmem [N_OUT];
  logic signed [X_W-1:0] xbuf [2][N_IN];     // ping-pong input buffer

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_bias) begin
      bmem[32'(cfg_row)] <= cfg_wdata[B_W-1:0];
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_bank_wr
    always_ff @(posedge clk) begin
      if (cfg_we && !cfg_bias && (32'(cfg_row) % LANES == l)) begin
        wmem[l][AW'((32'(cfg_row) / LANES) * N_IN + 32'(cfg_col))] <= cfg_wdata[W_W-1:0];
      end
    end
  end

  // ---------------------------------------------------------------- loader
  // Fills buffer wr_sel; a full buffer waits for the compute side to release it.
  logic [IW-1:0] ld_idx;
  logic          wr_sel, rd_sel;
  logic [1:0]    full;
  logic          ld_done, cp_done;

  assign in_ready = !full[wr_sel];
  assign ld_done  = in_valid && in_ready && (32'(ld_idx) == N_IN - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ld_idx <= '0;
      wr_sel <= 1'b0;
    end else if (in_valid && in_ready) begin
      if (ld_done) begin
        ld_idx <= '0;
        wr_sel <= !wr_sel;
      end else begin
        ld_idx <= ld_idx + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) xbuf[wr_sel][ld_idx] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full <= '0;
    end else begin
      for (int k = 0; k < 2; k++) begin
        if (ld_done && wr_sel == k[0])       full[k] <= 1'b1;
        else if (cp_done && rd_sel == k[0])  full[k] <= 1'b0;
      end
    end
  end

  // ---------------------------------------------------------------- compute
  logic [IW-1:0] idx;      // issue index
  logic [GW-1:0] grp;      // current neuron group
  logic [LW-1:0] lane;     // emit position within the group
  logic [AW-1:0] rd_addr;
  logic          vld_q;    // a product is in the pipeline register
  logic          start;    // a buffered vector begins its first group

  logic signed [W_W-1:0]   w_q   [LANES];
  logic signed [X_W-1:0]   x_q;
  logic signed [ACC_W-1:0] acc   [LANES];
  logic signed [Y_W-1:0]   y     [LANES];
  logic                    y_sat [LANES];

  assign rd_addr   = AW'(32'(grp) * N_IN + 32'(idx));
  assign out_valid = (state == S_EMIT);
  assign out_data  = y[lane];
  assign out_sat   = y_sat[lane];
  assign out_last  = (32'(grp) == GROUPS - 1) && (32'(lane) == LANES - 1);
  assign start     = (state == S_IDLE) && full[rd_sel];
  assign cp_done   = (state == S_EMIT) && out_ready && out_last;

  // bias of lane l for group g, aligned to the accumulator
  function automatic logic signed [ACC_W-1:0] bias_init(input int g, input int l);
    return ACC_W'(bmem[g * LANES + l]) <<< BSH;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      idx    <= '0;
      grp    <= '0;
      lane   <= '0;
      vld_q  <= 1'b0;
      rd_sel <= 1'b0;
    end else begin
      vld_q <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          idx   <= '0;
          grp   <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          vld_q <= 1'b1;
          if (32'(idx) == N_IN - 1) begin
            idx   <= '0;
            state <= S_DRAIN;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_DRAIN: begin
          lane  <= '0;
          state <= S_EMIT;
        end
        S_EMIT: if (out_ready) begin
          if (32'(lane) == LANES - 1) begin
            lane <= '0;
            if (32'(grp) == GROUPS - 1) begin
              grp    <= '0;
              rd_sel <= !rd_sel;
              state  <= S_IDLE;
            end else begin
              grp   <= grp + 1'b1;
              state <= S_MAC;
            end
          end else begin
            lane <= lane + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // registered weight / input read (one pipeline stage)
  always_ff @(posedge clk) begin
    x_q <= xbuf[rd_sel][idx];
    for (int l = 0; l < LANES; l++) w_q[l] <= wmem[l][rd_addr];
  end

  // accumulators: loaded with the bias when a group starts, then one MAC per cycle
  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      if (start) begin
        acc[l] <= bias_init(0, l);
      end else if (state == S_EMIT && out_ready && 32'(lane) == LANES - 1
                   && 32'(grp) != GROUPS - 1) begin
        acc[l] <= bias_init(32'(grp) + 1, l);
      end else if (vld_q) begin
        acc[l] <= acc[l] + ((ACC_W'(x_q) * ACC_W'(w_q[l])) <<< PSH);
      end
    end
  end

  // activation and requantisation per lane
  for (genvar l = 0; l < LANES; l++) begin : g_act
    xactivation #(.ACC_W(ACC_W), .Y_W(Y_W), .SHIFT(SHIFT), .ACT(ACT)) u_act (
      .i_acc(acc[l]), .o_y(y[l]), .o_sat(y_sat[l])
    );
  end

  // handshake rule: an offered output holds until it is taken
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
