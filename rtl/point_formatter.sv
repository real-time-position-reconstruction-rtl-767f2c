// point_formatter: turns one PMT readout into the six network input features.
//
// A readout arrives as one beat of pmt_point_t (x, y, z, time, charge). The formatter adds
// the binary trigger label, which is 0 when time and charge are both exactly 0 (the PMT
// saw no light) and LABEL_ONE otherwise, and sends the six features one per beat in the
// order x, y, z, label, time, charge, with out_last on the charge. A new readout is
// accepted in the cycle the previous one's last feature leaves, so an unstalled stream
// runs at one readout per six cycles.
//
// From the paper: the label rule and the feature order. This design's own choices: the
// value 127 for "1" (1.0 is not representable with seven fraction bits), the serial
// output and the handshake.
module point_formatter
  import pointnet_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  pt_valid,
  output logic                  pt_ready,
  input  pmt_point_t            pt_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic signed [X_W-1:0] out_data,
  output logic                  out_last
);

  pmt_point_t   cur;
  logic         full;
  logic [2:0]   pos;      // feature index 0..5
  logic         label;

  assign label     = (cur.t != '0) || (cur.q != '0);
  assign out_valid = full;
  assign out_last  = (pos == 3'(N_FEAT - 1));
  assign pt_ready  = !full || (out_ready && out_last);

  always_comb begin
    unique case (pos)
      3'd0:    out_data = cur.x;
      3'd1:    out_data = cur.y;
      3'd2:    out_data = cur.z;
      3'd3:    out_data = label ? LABEL_ONE : '0;
      3'd4:    out_data = cur.t;
      default: out_data = cur.q;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full <= 1'b0;
      pos  <= '0;
    end else begin
      if (full && out_ready) pos <= out_last ? '0 : pos + 1'b1;
      if (pt_valid && pt_ready) begin
        full <= 1'b1;
      end else if (full && out_ready && out_last) begin
        full <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (pt_valid && pt_ready) cur <= pt_data;
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
