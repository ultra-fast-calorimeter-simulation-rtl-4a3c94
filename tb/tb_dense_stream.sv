// tb_dense_stream: self-checking test of the streaming dense layer.
//
// Two layers with the same input width share one input stream: A uses the
// hidden-layer formats (<6,2> weights, <18,8> products, <20,8> accumulator),
// B the energy-response formats (<16,6> weights, exact products, <42,22>
// accumulator and result). Weights and biases are random, with most weights
// zero as in a pruned network, and are written through the load bus. Vectors
// are sent with random gaps while each output is stalled at random; every
// result is compared with the real-number reference model. A final run with no
// gaps and no stalls checks the timing: one element per cycle, N_IN+2 cycles
// per vector and the first result 3 cycles after the last element.
module tb_dense_stream;
  import calo_pkg::*;
  import calo_ref_pkg::*;

  localparam int NI = 7, NA = 5, NB = 1, NVEC = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  function automatic int cycle();
    return int'($time / 10);
  endfunction

  cfg_t cfg;
  logic in_valid, in_ready, ra, rb;
  data_t in_data;
  logic a_valid, a_ready, b_valid, b_ready;
  data_t a_data;
  logic signed [RA_W-1:0] b_data;
  logic burst;

  dense_stream #(.N_IN(NI), .N_OUT(NA), .ID(4'd2)) dut_a (
    .clk, .rst_n, .cfg, .in_valid(in_valid && rb), .in_ready(ra), .in_data,
    .out_valid(a_valid), .out_ready(a_ready), .out_data(a_data));
  dense_stream #(.N_IN(NI), .N_OUT(NB), .ID(4'd3),
    .W_W(RW_W), .W_F(RW_F), .B_W(RB_W), .B_F(RB_F), .M_W(0), .M_F(0),
    .A_W(RA_W), .A_F(RA_F), .R_W(RA_W), .R_F(RA_F)) dut_b (
    .clk, .rst_n, .cfg, .in_valid(in_valid && ra), .in_ready(rb), .in_data,
    .out_valid(b_valid), .out_ready(b_ready), .out_data(b_data));
  assign in_ready = ra && rb;

  raw_q wa, ba, wb, bb, xin[NVEC];
  longint ea[$], eb[$];
  longint exp_a, exp_b;
  int a_first_out_cycle, last_in_cycle[$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [3:0] id, input int row, input int col, input longint v);
    cfg.we = 1; cfg.id = id; cfg.row = 9'(row); cfg.col = 9'(col); cfg.data = 42'(v);
    @(posedge clk); #1;
    cfg.we = 0;
  endtask

  function automatic longint rnd(int lo, int hi);
    return longint'(lo) + longint'($urandom_range(hi - lo));
  endfunction

  // output checkers
  always @(posedge clk) if (rst_n && a_valid && a_ready) begin
    exp_a = ea.pop_front();
    checks++;
    if (longint'(a_data) != exp_a) begin
      failures++;
      $display("A mismatch: got %0d expected %0d", a_data, exp_a);
    end
  end
  always @(posedge clk) if (rst_n && b_valid && b_ready) begin
    exp_b = eb.pop_front();
    checks++;
    if (longint'(b_data) != exp_b) begin
      failures++;
      $display("B mismatch: got %0d expected %0d", b_data, exp_b);
    end
  end
  always @(posedge clk) begin
    a_ready <= burst ? 1'b1 : ($urandom_range(3) != 0);
    b_ready <= burst ? 1'b1 : ($urandom_range(3) != 0);
  end
  always @(posedge clk) if (burst && a_first_out_cycle < 0 && a_valid && a_ready)
    a_first_out_cycle = cycle();
  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    last_in_cycle.push_back(cycle());
  end

  initial begin
    cfg = '0; in_valid = 0; in_data = '0; burst = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // parameters: ~80 % zero weights, a few saturating extremes
    for (int k = 0; k < NI; k++) for (int j = 0; j < NA; j++) begin
      longint v = ($urandom_range(4) == 0) ? rnd(-32, 31) : 0;
      wa.push_back(v); wr(4'd2, k, j, v);
    end
    for (int j = 0; j < NA; j++) begin longint v = rnd(-128, 127); ba.push_back(v); wr(4'd2, NI, j, v); end
    for (int k = 0; k < NI; k++) begin
      longint v = ($urandom_range(4) == 0) ? rnd(-32768, 32767) : rnd(-600, 600);
      wb.push_back(v); wr(4'd3, k, 0, v);
    end
    begin longint v = rnd(-32768, 32767); bb.push_back(v); wr(4'd3, NI, 0, v); end
    // a write to another layer must not disturb these
    wr(4'd7, 0, 0, 42'h3ff);
    for (int v = 0; v < NVEC; v++) begin
      raw_q ya, yb;
      for (int k = 0; k < NI; k++) xin[v].push_back((v % 5 == 4) ? rnd(-32768, 32767) : rnd(-3000, 3000));
      ya = dense(xin[v], 10, wa, NA, 4, ba, 5, 18, 10, 20, 12, 16, 10);
      yb = dense(xin[v], 10, wb, NB, 10, bb, 10, 0, 0, 42, 20, 42, 20);
      foreach (ya[j]) ea.push_back(ya[j]);
      foreach (yb[j]) eb.push_back(yb[j]);
    end
    // random gaps, first 30 vectors
    for (int v = 0; v < 30; v++)
      for (int k = 0; k < NI; k++) begin
        while ($urandom_range(2) == 0) @(posedge clk);
        #1 in_valid = 1; in_data = data_t'(xin[v][k]);
        do @(posedge clk); while (!in_ready);
        #1 in_valid = 0;
      end
    while (ea.size() != (NVEC - 30) * NA || eb.size() != (NVEC - 30) * NB) @(posedge clk);
    repeat (5) @(posedge clk);
    // timing run: back to back, no stalls
    burst = 1;
    repeat (2) @(posedge clk);
    last_in_cycle.delete();
    a_first_out_cycle = -1;
    begin
      begin
        for (int v = 30; v < NVEC; v++)
          for (int k = 0; k < NI; k++) begin
            #1 in_valid = 1; in_data = data_t'(xin[v][k]);
            do @(posedge clk); while (!in_ready);
          end
        #1 in_valid = 0;
      end
    end
    while (ea.size() != 0 || eb.size() != 0) @(posedge clk);
    // vector v starts at index v*NI of last_in_cycle
    checks++;
    if (last_in_cycle[NI] - last_in_cycle[0] != NI + 2) begin
      failures++;
      $display("vector period %0d, expected %0d", last_in_cycle[NI] - last_in_cycle[0], NI + 2);
    end
    checks++;
    if (last_in_cycle[NI - 1] - last_in_cycle[0] != NI - 1) begin
      failures++;
      $display("elements of a vector not accepted on consecutive cycles");
    end
    checks++;
    if (a_first_out_cycle - last_in_cycle[NI - 1] != 3) begin
      failures++;
      $display("latency %0d, expected 3", a_first_out_cycle - last_in_cycle[NI - 1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
