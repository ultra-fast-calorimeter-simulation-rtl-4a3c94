// tb_photon_energies: the decoder over the full photon energy range.
//
// Generates one shower for each of the 15 incident photon energies of the
// photon benchmark, 2^8 .. 2^22 MeV (x_con = 8/22 .. 22/22), back to back at
// full default size with randomly loaded parameters. Besides comparing every
// output bit for bit with the reference model, it checks the properties a
// shower must have whatever the weights: every output (voxel ratios, energy
// response, layer ratios) lies in [0, 1], and the ratios of each calorimeter
// layer, like the five layer ratios, sum to one within the resolution of the
// reciprocal table (between 0.75 and 1.3).
module tb_photon_energies;
  import calo_pkg::*;
  import calo_ref_pkg::*;


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
  int n_out = 0, showers_out = 0;
  int n_bad_sum = 0, n_bad_range = 0;
  real grp_sum = 0.0;
  // index of the last element of each output group; group 5 is the response
  localparam int GRP_END [7] = '{7, 167, 357, 362, 367, 368, 373};

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
    if (x_valid && x_ready) begin
      expv = expq.pop_front();
      checks++;
      if (longint'(x_data) != expv) begin
        failures++;
        if (failures < 20) $display("shower %0d element %0d: got %0d expected %0d",
                                    showers_out, n_out % N_X, x_data, expv);
      end
      checks++;
      if (x_data < 0 || x_data > 1024) begin failures++; n_bad_range++; end
      if (n_out % N_X != 368) grp_sum += real'(x_data) / 1024.0;
      for (int g = 0; g < 7; g++)
        if (n_out % N_X == GRP_END[g] && g != 5) begin
          checks++;
          if (grp_sum < 0.75 || grp_sum > 1.3) begin failures++; n_bad_sum++; end
          grp_sum = 0.0;
        end
      checks++;
      if (x_last != (n_out % N_X == N_X - 1)) failures++;
      if (x_last) showers_out++;
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

    stall_out = 1;
    for (int e = 8; e <= 22; e++) send_shower(e, e % 3 == 0);
    while (expq.size() != 0) @(posedge clk);
    repeat (10) @(posedge clk);
    checks++;
    if (showers_out != 15) failures++;
    $display("showers %0d, group sums out of range %0d, values out of [0,1] %0d",
             showers_out, n_bad_sum, n_bad_range);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
