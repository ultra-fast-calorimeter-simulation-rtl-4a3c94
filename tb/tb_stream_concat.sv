// tb_stream_concat: self-checking test of the stream joiner.
//
// Three sources with 3, 1 and 4 elements per vector each send tagged values
// (source number in the upper bits, running count below) with independent
// random gaps, and the output is stalled at random. The test checks that the
// output carries every element exactly once, in order (all of source 0, then
// 1, then 2), that out_last marks exactly the last element of each joined
// vector, and that with no gaps one element leaves per cycle.
module tb_stream_concat;
  import calo_pkg::*;

  localparam int NS = 3;
  localparam int LEN [NS] = '{3, 1, 4};
  localparam int NVEC = 50;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  in_valid [NS];
  logic  in_ready [NS];
  data_t in_data  [NS];
  logic  out_valid, out_ready, out_last, burst = 0;
  data_t out_data;
  int    nout = 0, t_first = -1, t_last = 0;

  stream_concat #(.N_SRC(NS), .LENS({16'd4, 16'd1, 16'd3})) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sources
  for (genvar s = 0; s < NS; s++) begin : g_src
    int cnt = 0;
    initial begin
      in_valid[s] = 0; in_data[s] = '0;
      @(posedge rst_n);
      while (cnt < NVEC * LEN[s]) begin
        if (!burst) while ($urandom_range(2) == 0) @(posedge clk);
        #1 in_valid[s] = 1; in_data[s] = data_t'((s << 12) | (cnt & 12'hfff));
        do @(posedge clk); while (!in_ready[s]);
        cnt++;
        #1 in_valid[s] = 0;
      end
    end
  end

  always @(posedge clk) out_ready <= burst || ($urandom_range(3) != 0);

  // expected sequence
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int v, pos, s, k, acc;
    v = nout / 8; pos = nout % 8;
    s = 0; acc = 0;
    while (pos >= acc + LEN[s]) begin acc += LEN[s]; s++; end
    k = v * LEN[s] + (pos - acc);
    checks++;
    if (out_data != data_t'((s << 12) | (k & 12'hfff)) || out_last != (pos == 7)) begin
      failures++;
      $display("element %0d: got %h last %0b", nout, out_data, out_last);
    end
    if (burst) begin
      if (t_first < 0) t_first = int'($time / 10);
      t_last = int'($time / 10);
    end
    nout++;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (nout < 40 * 8) @(posedge clk);
    burst = 1;
    while (nout < NVEC * 8) @(posedge clk);
    // the last 8 vectors or so came without gaps
    checks++;
    if (t_last - t_first > NVEC * 8 - 40 * 8 + 4) begin
      failures++;
      $display("burst too slow: %0d cycles", t_last - t_first);
    end
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
