// tb_sigmoid_stream: self-checking test of the table-based sigmoid.
//
// Feeds <42,22> values across and beyond the table range [-8, 8) (both clamps,
// both table ends, values a hair below zero) with random gaps and stalls and
// compares each result with the reference model of the table. Also checks
// monotonicity over a sweep and the one-cycle latency of the no-stall run.
module tb_sigmoid_stream;
  import calo_pkg::*;
  import calo_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready, burst;
  logic signed [RA_W-1:0] in_data;
  data_t out_data, prev_out;
  longint expq[$], expv, xs[$];
  int t_first_in = -1, t_first_out = -1, nsweep = 0;

  sigmoid_stream dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) out_ready <= burst || ($urandom_range(3) != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    expv = expq.pop_front();
    checks++;
    if (longint'(out_data) != expv) begin
      failures++;
      $display("mismatch: got %0d expected %0d", out_data, expv);
    end
    if (burst) begin
      if (t_first_out < 0) t_first_out = int'($time / 10);
      else begin
        checks++;
        if (out_data < prev_out) failures++;
      end
      prev_out = out_data;
    end
  end
  always @(posedge clk) if (rst_n && in_valid && in_ready && burst && t_first_in < 0)
    t_first_in = int'($time / 10);

  initial begin
    in_valid = 0; in_data = '0; burst = 0;
    xs = '{0, -1, 1, -(64'sd1 <<< 41), (64'sd1 <<< 41) - 1, -(8 <<< 20), (8 <<< 20) - 1,
           -(8 <<< 20) - 1, (8 <<< 20), 16384, -16384, 16383, -16385};
    for (int i = 0; i < 300; i++) xs.push_back(longint'($urandom_range(33554431)) - 16777216);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    foreach (xs[i]) begin
      expq.push_back(sigmoid(xs[i], RA_F));
      while ($urandom_range(2) == 0) @(posedge clk);
      #1 in_valid = 1; in_data = RA_W'(xs[i]);
      do @(posedge clk); while (!in_ready);
      #1 in_valid = 0;
    end
    while (expq.size() != 0) @(posedge clk);
    burst = 1;
    @(posedge clk);
    // sweep -10 .. 10 in steps of 1/32, back to back
    for (longint x = -(10 <<< 20); x <= (10 <<< 20); x += (1 <<< 15)) begin
      expq.push_back(sigmoid(x, RA_F));
      #1 in_valid = 1; in_data = RA_W'(x);
      do @(posedge clk); while (!in_ready);
      nsweep++;
    end
    #1 in_valid = 0;
    while (expq.size() != 0) @(posedge clk);
    checks++;
    if (t_first_out - t_first_in != 1) begin
      failures++;
      $display("latency %0d", t_first_out - t_first_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
