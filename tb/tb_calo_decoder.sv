// tb_calo_decoder: end-to-end test of the full-size decoder.
//
// The decoder is instantiated with its default sizes (31 -> 32 -> 48 -> 64 ->
// 100 -> 374 -> seven branches). All weights, biases and folded batch-norm
// constants are drawn at random, about 85 % of the dense weights zero as in
// the pruned network, and written through the load bus. Showers are generated
// from latent vectors drawn from an approximate standard normal (sum of
// uniforms) and conditions x_con = log2(E)/22 for the photon energies 2^8 ..
// 2^22 MeV. Every one of the 374 outputs of every shower is compared with a
// layer-by-layer reference model built from calo_ref_pkg.
//
// Phases: (1) one shower alone, to check the pipeline latency against the
// per-block timing: first output 686 cycles and last output 1355 cycles after
// the first latent value is accepted; (2) showers sent back to back with
// random output stalls, so that showers overlap inside the pipeline, the input
// is stalled by a busy layer and the output is back-pressured. Each of these
// mechanisms is counted and must occur.
module tb_calo_decoder;
  import calo_pkg::*;
  import calo_ref_pkg::*;

  localparam int NSHOWER = 6;
  localparam int LAT_FIRST = 686, LAT_LAST = 1355;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t  cfg;
  logic  z_valid, z_ready, c_valid, c_ready, x_valid, x_ready, x_last;
  data_t z_data, c_data, x_data;
  logic  stall_out = 0;

  calo_decoder dut (.*);

  // network parameters as raw fixed-point integers
  raw_q wt[12], bs[12];   // dense layers 1..5, then branches 0..6
  longint bn_s[4][], bn_b[4][];
  localparam int HID [5] = '{N_DEC_IN, N_H1, N_H2, N_H3, N_H4};

  longint expq[$], expv;
  int n_out = 0, n_last = 0, showers_out = 0;
  int t_first_z = -1, t_first_x = -1, t_last_x = -1;
  int n_in_stall = 0, n_backpressure = 0, n_overlap = 0, n_inflight = 0;
  int n_accept_z = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rnd(int lo, int hi);
    return longint'(lo) + longint'($urandom_range(hi - lo));
  endfunction
  function automatic longint sparse(int mag);
    return ($urandom_range(99) < 15) ? rnd(-mag, mag) : 0;
  endfunction

  task automatic wr(input logic [3:0] id, input int row, input int col, input longint v);
    cfg.we = 1; cfg.id = id; cfg.row = 9'(row); cfg.col = 9'(col); cfg.data = 42'(v);
    @(posedge clk); #1;
    cfg.we = 0;
  endtask

  task automatic load_dense(input logic [3:0] id, input int ni, input int no,
                            input int slot, input int wmag, input int bmag);
    for (int k = 0; k < ni; k++)
      for (int j = 0; j < no; j++) begin
        longint v = sparse(wmag);
        wt[slot].push_back(v);
        wr(id, k, j, v);
      end
    for (int j = 0; j < no; j++) begin
      longint v = rnd(-bmag, bmag);
      bs[slot].push_back(v);
      wr(id, ni, j, v);
    end
  endtask

  function automatic raw_q ref_shower(raw_q x);
    raw_q h, y, r;
    h = x;
    for (int l = 0; l < 4; l++) begin
      h = dense(h, 10, wt[l], HID[l+1], 4, bs[l], 5, 18, 10, 20, 12, 16, 10);
      foreach (h[i]) h[i] = lrelu(bn(h[i], bn_s[l][i], bn_b[l][i]), 19);
    end
    h = dense(h, 10, wt[4], N_X, 4, bs[4], 5, 18, 10, 20, 12, 16, 10);
    for (int br = 0; br < 5; br++) begin
      y = softmax(dense(h, 10, wt[5+br], BR_LEN[br], 4, bs[5+br], 5, 18, 10, 20, 12, 16, 10));
      foreach (y[i]) r.push_back(y[i]);
    end
    y = dense(h, 10, wt[10], 1, 10, bs[10], 10, 0, 0, 42, 20, 42, 20);
    r.push_back(sigmoid(y[0], 20));
    y = softmax(dense(h, 10, wt[11], 5, 5, bs[11], 7, 20, 12, 28, 16, 16, 10));
    foreach (y[i]) r.push_back(y[i]);
    return r;
  endfunction

  // output side
  always @(posedge clk) x_ready <= !stall_out || ($urandom_range(2) != 0);

  always @(posedge clk) if (rst_n) begin
    if (x_valid && !x_ready) n_backpressure++;
    if ((z_valid && !z_ready) || (c_valid && !c_ready)) n_in_stall++;
    if (z_valid && z_ready) begin
      if (t_first_z < 0) t_first_z = int'($time / 10);
      if (n_accept_z % N_LATENT == 0) begin
        if (n_inflight > 0) n_overlap++;
        n_inflight++;
      end
      n_accept_z++;
    end
    if (x_valid && x_ready) begin
      expv = expq.pop_front();
      checks++;
      if (longint'(x_data) != expv) begin
        failures++;
        if (failures < 20) $display("shower %0d element %0d: got %0d expected %0d",
                                    showers_out, n_out % N_X, x_data, expv);
      end
      if (t_first_x < 0) t_first_x = int'($time / 10);
      checks++;
      if (x_last != (n_out % N_X == N_X - 1)) failures++;
      if (x_last) begin
        t_last_x = int'($time / 10);
        showers_out++;
        n_inflight--;
      end
      n_out++;
    end
  end

  task automatic send_shower(input int e_log2, input bit gaps);
    raw_q x, y;
    x.delete();
    for (int i = 0; i < N_LATENT; i++) begin
      int s = 0;
      for (int u = 0; u < 12; u++) s += int'($urandom_range(1024));
      x.push_back(longint'(s - 6144));          // ~N(0,1) in <16,6>
    end
    x.push_back(rq(real'(e_log2) / 22.0, 16, 10));
    y = ref_shower(x);
    foreach (y[i]) expq.push_back(y[i]);
    fork
      begin
        for (int i = 0; i < N_LATENT; i++) begin
          if (gaps) while ($urandom_range(3) == 0) @(posedge clk);
          #1 z_valid = 1; z_data = data_t'(x[i]);
          do @(posedge clk); while (!z_ready);
          #1 z_valid = 0;
        end
      end
      begin
        #1 c_valid = 1; c_data = data_t'(x[N_LATENT]);
        do @(posedge clk); while (!c_ready);
        #1 c_valid = 0;
      end
    join
  endtask

  initial begin
    cfg = '0; z_valid = 0; c_valid = 0; z_data = '0; c_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // parameters
    for (int l = 0; l < 4; l++) begin
      load_dense(ID_DENSE1 + 4'(l), HID[l], HID[l+1], l, 12, 16);
      bn_s[l] = new[HID[l+1]];
      bn_b[l] = new[HID[l+1]];
      for (int c = 0; c < HID[l+1]; c++) begin
        bn_s[l][c] = rnd(2048, 6144);
        bn_b[l][c] = rnd(-2048, 2048);
        wr(ID_BN1 + 4'(l), 0, c, bn_s[l][c]);
        wr(ID_BN1 + 4'(l), 1, c, bn_b[l][c]);
      end
    end
    load_dense(ID_DENSE5, N_H4, N_X, 4, 12, 16);
    for (int br = 0; br < 5; br++)
      load_dense(ID_BR0 + 4'(br), N_X, BR_LEN[br], 5 + br, 16, 32);
    load_dense(ID_BR0 + 4'(5), N_X, 1, 10, 400, 1024);
    load_dense(ID_BR0 + 4'(6), N_X, 5, 11, 64, 256);
    $display("parameters loaded at cycle %0d", int'($time / 10));

    // phase 1: one shower alone, no stalls
    send_shower(12, 0);
    while (expq.size() != 0) @(posedge clk);
    checks++;
    if (t_first_x - t_first_z != LAT_FIRST || t_last_x - t_first_z != LAT_LAST) begin
      failures++;
      $display("latency: first %0d last %0d", t_first_x - t_first_z, t_last_x - t_first_z);
    end
    $display("single shower: first output after %0d cycles, last after %0d",
             t_first_x - t_first_z, t_last_x - t_first_z);

    // phase 2: back-to-back showers with output stalls
    stall_out = 1;
    for (int s = 1; s < NSHOWER; s++) send_shower(8 + (s * 3) % 15, s % 2);
    while (expq.size() != 0) @(posedge clk);
    repeat (10) @(posedge clk);

    checks++;
    if (showers_out != NSHOWER) failures++;
    $display("mechanisms: overlapping showers %0d, input stall cycles %0d, output backpressure cycles %0d",
             n_overlap, n_in_stall, n_backpressure);
    checks += 3;
    if (n_overlap == 0) failures++;
    if (n_in_stall == 0) failures++;
    if (n_backpressure == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
