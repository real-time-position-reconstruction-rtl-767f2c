// tb_point_formatter: sends random PMT readouts (about a third with no light, some with
// only one of time and charge zero) under random back-pressure and checks the six output
// features, the trigger label and out_last. A final burst without back-pressure checks
// the rate of one readout per six cycles.
module tb_point_formatter;
  import pointnet_pkg::*;
  import pointnet_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pt_valid = 0, pt_ready, out_valid, out_ready = 0, out_last;
  pmt_point_t pt_data = '0;
  logic signed [7:0] out_data;
  int checks = 0, failures = 0;
  int expq[$];
  bit randomize_flow = 1;
  int n_out = 0, n_dark = 0, n_lit = 0;
  int unsigned cyc = 0, t_first = 0, t_last = 0;

  point_formatter dut (.clk, .rst_n, .pt_valid, .pt_ready, .pt_data,
                       .out_valid, .out_ready, .out_data, .out_last);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid && out_ready) begin
      int e;
      e = (expq.size() > 0) ? expq.pop_front() : 9999;
      checks++;
      if (int'(out_data) != e) begin
        failures++;
        $display("FAIL feature %0d got %0d exp %0d", n_out, out_data, e);
      end
      checks++;
      if (out_last != (n_out % 6 == 5)) begin
        failures++;
        $display("FAIL out_last at %0d", n_out);
      end
      if (n_out == 0 || !randomize_flow && t_first == 0) t_first <= cyc;
      t_last <= cyc;
      n_out++;
    end
    if (rst_n) out_ready <= randomize_flow ? ($urandom_range(2) != 0) : 1'b1;
  end

  task automatic send(input bit gaps);
    pmt_point_t p;
    int kind = int'($urandom_range(5));
    p.x = 8'(rnd(-128, 127)); p.y = 8'(rnd(-128, 127)); p.z = 8'(rnd(-128, 127));
    p.t = (kind < 2 || kind == 3) ? 8'sd0 : 8'(rnd(1, 127));
    p.q = (kind < 2 || kind == 4) ? 8'sd0 : 8'(rnd(-128, 127));
    if (p.t == 0 && p.q == 0) n_dark++; else n_lit++;
    expq.push_back(p.x); expq.push_back(p.y); expq.push_back(p.z);
    expq.push_back((p.t == 0 && p.q == 0) ? 0 : 127);
    expq.push_back(p.t); expq.push_back(p.q);
    @(negedge clk);
    while (gaps && $urandom_range(3) == 0) @(negedge clk);
    pt_valid = 1; pt_data = p;
    while (!pt_ready) @(negedge clk);
    @(posedge clk);
    #1 pt_valid = 0;
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) send(1);
    while (expq.size() > 0) @(posedge clk);
    randomize_flow = 0;
    repeat (3) @(posedge clk);
    t_first = 0;
    for (int k = 0; k < 20; k++) send(0);
    while (expq.size() > 0) @(posedge clk);
    checks++;
    if (t_last - t_first + 1 != 20 * 6) begin
      failures++;
      $display("FAIL 20 readouts took %0d cycles, expected 120", t_last - t_first + 1);
    end
    checks++;
    if (n_dark == 0 || n_lit == 0) begin
      failures++;
      $display("FAIL label case not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
