// tb_softmax_stream: self-checking test of the table-based softmax.
//
// Random vectors (narrow spreads, wide spreads that saturate x - max at -32,
// all-equal vectors, a single dominant element) are streamed with random gaps
// and output stalls into an 8-element softmax and compared with the reference
// model of the exp / reciprocal table method. The no-stall run checks the
// three-pass timing: a vector every 3N+1 cycles, first result N+2 cycles after
// the last input.
module tb_softmax_stream;
  import calo_pkg::*;
  import calo_ref_pkg::*;

  localparam int N = 8, NVEC = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready, burst;
  data_t in_data, out_data;
  longint expq[$], expv;
  int t_in[$], t_first_out = -1;

  softmax_stream #(.N(N)) dut (.*);

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
    if (burst && t_first_out < 0) t_first_out = int'($time / 10);
  end
  always @(posedge clk) if (rst_n && in_valid && in_ready && burst) t_in.push_back(int'($time / 10));

  initial begin
    in_valid = 0; in_data = '0; burst = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int v = 0; v < NVEC; v++) begin
      raw_q x, y;
      x.delete();
      if (v == NVEC - 3) begin
        while (expq.size() != 0) @(posedge clk);
        burst = 1;
        @(posedge clk);
      end
      for (int i = 0; i < N; i++)
        case (v % 4)
          0: x.push_back(longint'($urandom_range(4095)) - 2048);
          1: x.push_back(longint'($urandom_range(65535)) - 32768);
          2: x.push_back(1000);
          default: x.push_back((i == v % N) ? 9000 : longint'($urandom_range(1023)) - 512);
        endcase
      y = softmax(x);
      foreach (y[i]) expq.push_back(y[i]);
      foreach (x[i]) begin
        if (!burst) while ($urandom_range(2) == 0) @(posedge clk);
        #1 in_valid = 1; in_data = data_t'(x[i]);
        do @(posedge clk); while (!in_ready);
        #1 in_valid = 0;
      end
    end
    while (expq.size() != 0) @(posedge clk);
    checks++;
    if (t_in[N] - t_in[0] != 3 * N + 1 || t_in[N - 1] - t_in[0] != N - 1 ||
        t_first_out - t_in[N - 1] != N + 2) begin
      failures++;
      $display("timing: period %0d first out %0d", t_in[N] - t_in[0], t_first_out - t_in[N - 1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
