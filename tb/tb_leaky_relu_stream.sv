// tb_leaky_relu_stream: self-checking test of the leaky ReLU.
//
// Streams random values over the whole <16,6> range plus the edge cases (0,
// -1 LSB, most negative, most positive, ties of the rounding) with random gaps
// and output stalls, and compares each result with the reference model: the
// identity for x >= 0 and the rounded product with the 19/64 slope below. The
// no-stall run checks one element per cycle and a latency of one cycle.
module tb_leaky_relu_stream;
  import calo_pkg::*;
  import calo_ref_pkg::*;

  localparam int NX = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_neg = 0;

  logic in_valid, in_ready, out_valid, out_ready, burst;
  data_t in_data, out_data;
  longint expq[$], expv, xs[$];
  int t_first_in = -1, t_last_in, t_first_out = -1, t_last_out;

  leaky_relu_stream dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
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
    if (burst && t_first_out < 0) t_first_out = int'($time / 10);
    if (burst) t_last_out = int'($time / 10);
  end
  always @(posedge clk) if (rst_n && in_valid && in_ready && burst) begin
    if (t_first_in < 0) t_first_in = int'($time / 10);
    t_last_in = int'($time / 10);
  end

  initial begin
    in_valid = 0; in_data = '0; burst = 0;
    xs = '{0, -1, -32768, 32767, -32, -96, -160, 64, -64};
    for (int i = xs.size(); i < NX; i++) xs.push_back(longint'($urandom_range(65535)) - 32768);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    foreach (xs[i]) begin
      if (i == NX - 50) begin
        while (expq.size() != 0) @(posedge clk);
        burst = 1;
        @(posedge clk);
      end
      expq.push_back(lrelu(xs[i], 19));
      if (xs[i] < 0) n_neg++;
      if (!burst) while ($urandom_range(2) == 0) @(posedge clk);
      #1 in_valid = 1; in_data = data_t'(xs[i]);
      do @(posedge clk); while (!in_ready);
      #1 in_valid = 0;
    end
    while (expq.size() != 0) @(posedge clk);
    checks++;
    if (t_last_in - t_first_in != 49 || t_first_out - t_first_in != 1 || t_last_out - t_last_in != 1) begin
      failures++;
      $display("timing: in %0d..%0d out %0d..%0d", t_first_in, t_last_in, t_first_out, t_last_out);
    end
    checks++;
    if (n_neg < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
