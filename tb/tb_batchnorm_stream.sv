// tb_batchnorm_stream: self-checking test of the folded batch normalisation.
//
// Random <20,8> scales and biases are loaded for N channels (plus a write to
// another layer that must be ignored); vectors of random inputs, including
// values that saturate the <16,6> result, are streamed with random gaps and
// random output stalls. Each result is compared with the reference model,
// which also checks that the channel index wraps at N. The no-stall run checks
// one element per cycle and a latency of one cycle.
module tb_batchnorm_stream;
  import calo_pkg::*;
  import calo_ref_pkg::*;

  localparam int N = 6, NVEC = 30;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready, burst;
  data_t in_data, out_data;
  longint scale[N], bias[N], expq[$], expv;
  int n_in = 0, n_out = 0, t_first_in = -1, t_last_in, t_first_out = -1, t_last_out;

  batchnorm_stream #(.N(N), .ID(4'd6)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [3:0] id, input int row, input int col, input longint v);
    cfg.we = 1; cfg.id = id; cfg.row = 9'(row); cfg.col = 9'(col); cfg.data = 42'(v);
    @(posedge clk); #1;
    cfg.we = 0;
  endtask

  always @(posedge clk) out_ready <= burst || ($urandom_range(3) != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    expv = expq.pop_front();
    checks++;
    if (longint'(out_data) != expv) begin
      failures++;
      $display("mismatch %0d: got %0d expected %0d", n_out, out_data, expv);
    end
    if (burst && t_first_out < 0) t_first_out = int'($time / 10);
    if (burst) t_last_out = int'($time / 10);
    n_out++;
  end
  always @(posedge clk) if (rst_n && in_valid && in_ready && burst) begin
    if (t_first_in < 0) t_first_in = int'($time / 10);
    t_last_in = int'($time / 10);
  end

  initial begin
    cfg = '0; in_valid = 0; in_data = '0; burst = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < N; c++) begin
      scale[c] = longint'($urandom_range(16383)) - 4096;   // about -1 .. 3
      bias[c]  = longint'($urandom_range(32767)) - 16384;  // about -4 .. 4
      wr(4'd6, 0, c, scale[c]);
      wr(4'd6, 1, c, bias[c]);
    end
    wr(4'd5, 0, 0, 42'h12345);
    for (int v = 0; v < NVEC; v++) begin
      if (v == NVEC - 5) begin
        while (expq.size() != 0) @(posedge clk);
        burst = 1;
        @(posedge clk);
      end
      for (int c = 0; c < N; c++) begin
        longint x = (v % 4 == 3) ? longint'($urandom_range(65535)) - 32768
                                 : longint'($urandom_range(8191)) - 4096;
        expq.push_back(bn(x, scale[c], bias[c]));
        if (!burst) while ($urandom_range(2) == 0) @(posedge clk);
        #1 in_valid = 1; in_data = data_t'(x);
        do @(posedge clk); while (!in_ready);
        #1 in_valid = 0;
      end
    end
    while (expq.size() != 0) @(posedge clk);
    checks++;
    if (t_last_in - t_first_in != 5 * N - 1 || t_first_out - t_first_in != 1 ||
        t_last_out - t_last_in != 1) begin
      failures++;
      $display("timing: in %0d..%0d out %0d..%0d", t_first_in, t_last_in, t_first_out, t_last_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
