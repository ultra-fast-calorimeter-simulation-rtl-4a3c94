// calo_decoder: the generative half of a conditional variational autoencoder
// for calorimeter showers, as a streaming fixed-point pipeline.
//
// For each shower the decoder takes a latent vector z (30 values, drawn from a
// standard normal outside this block) and the condition x_con (the incident
// energy as log2(E_inc) / 22), and produces the 374-element vector x-tilde:
// the voxel energy ratios of the five calorimeter layers (8, 160, 190, 5 and 5
// voxels, each layer's ratios summing to one), the energy response ratio, and
// the five layer energy ratios. Structure, in stream order:
//
//   concat(z, x_con) -> 31
//   4 x [dense -> batch norm -> leaky ReLU]        31 -> 32 -> 48 -> 64 -> 100
//   dense                                           100 -> 374
//   broadcast to 7 branch dense layers (each 374 -> n):
//     n = 8, 160, 190, 5, 5  -> softmax    (voxel ratios per layer)
//     n = 1                  -> sigmoid    (energy response ratio)
//     n = 5                  -> softmax    (layer energy ratios)
//   concat(branches) -> 374 = x-tilde
//
// Every dense layer has one multiplier per output neuron and takes one input
// element per cycle (reuse factor = input width). The branch feeding the
// layer-energy softmax uses wider weights (<8,3>, bias <10,3>) and the one
// feeding the sigmoid uses <16,6> weights and a <42,22> accumulator; all other
// dense layers use <6,2> weights and <8,3> biases. Data between layers is
// <16,6>. The layer structure, widths at the ends, formats and reuse factor
// follow the described model; the hidden widths (32/48/64/100), the absence of
// an activation on the 374-wide dense layer, the order of the inputs and
// outputs and the load bus are this design's choices.
//
// Interface: z_* and c_* are valid/ready streams of <16,6> values (30 and 1
// per shower); x_* is the output stream (374 per shower, x_last on the final
// element). All weights, biases and folded batch-norm constants are written
// through cfg before use (layer identifiers in calo_pkg). Showers can follow
// each other back to back; the layers overlap, so the next shower enters while
// the previous one is still in the output branches.
module calo_decoder
  import calo_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  cfg_t  cfg,
  input  logic  z_valid,
  output logic  z_ready,
  input  data_t z_data,
  input  logic  c_valid,
  output logic  c_ready,
  input  data_t c_data,
  output logic  x_valid,
  input  logic  x_ready,
  output data_t x_data,
  output logic  x_last
);

  localparam int HID [5] = '{N_DEC_IN, N_H1, N_H2, N_H3, N_H4};

  // branch lengths packed for the output joiner, branch 0 in the low bits
  function automatic logic [16*N_BRANCH-1:0] pack_lens();
    logic [16*N_BRANCH-1:0] r;
    for (int b = 0; b < N_BRANCH; b++) r[16*b +: 16] = 16'(BR_LEN[b]);
    return r;
  endfunction
  localparam logic [16*N_BRANCH-1:0] OUT_LENS = pack_lens();

  // ------------------------------------------------------------ input concat
  logic  ic_valid [2];
  logic  ic_ready [2];
  data_t ic_data  [2];
  logic  s_valid [13];
  logic  s_ready [13];
  data_t s_data  [13];
  logic  in_last_unused;

  assign ic_valid[0] = z_valid;
  assign ic_valid[1] = c_valid;
  assign ic_data[0]  = z_data;
  assign ic_data[1]  = c_data;
  assign z_ready     = ic_ready[0];
  assign c_ready     = ic_ready[1];

  stream_concat #(.N_SRC(2), .LENS({16'(N_COND), 16'(N_LATENT)})) u_in_concat (
    .clk, .rst_n,
    .in_valid (ic_valid), .in_ready (ic_ready), .in_data (ic_data),
    .out_valid(s_valid[0]), .out_ready(s_ready[0]), .out_data(s_data[0]),
    .out_last (in_last_unused)
  );

  // ------------------------------------------------------------ hidden layers
  // stream s[3h] enters dense h, s[3h+1] its batch norm, s[3h+2] its activation
  for (genvar h = 0; h < 4; h++) begin : g_hidden
    dense_stream #(
      .N_IN(HID[h]), .N_OUT(HID[h+1]), .ID(ID_DENSE1 + CFG_ID_W'(h))
    ) u_dense (
      .clk, .rst_n, .cfg,
      .in_valid (s_valid[3*h]),   .in_ready (s_ready[3*h]),   .in_data (s_data[3*h]),
      .out_valid(s_valid[3*h+1]), .out_ready(s_ready[3*h+1]), .out_data(s_data[3*h+1])
    );
    batchnorm_stream #(.N(HID[h+1]), .ID(ID_BN1 + CFG_ID_W'(h))) u_bn (
      .clk, .rst_n, .cfg,
      .in_valid (s_valid[3*h+1]), .in_ready (s_ready[3*h+1]), .in_data (s_data[3*h+1]),
      .out_valid(s_valid[3*h+2]), .out_ready(s_ready[3*h+2]), .out_data(s_data[3*h+2])
    );
    leaky_relu_stream u_act (
      .clk, .rst_n,
      .in_valid (s_valid[3*h+2]), .in_ready (s_ready[3*h+2]), .in_data (s_data[3*h+2]),
      .out_valid(s_valid[3*h+3]), .out_ready(s_ready[3*h+3]), .out_data(s_data[3*h+3])
    );
  end

  // ------------------------------------------------------------ dense 100 -> 374
  logic  d5_valid, d5_ready;
  data_t d5_data;

  dense_stream #(.N_IN(N_H4), .N_OUT(N_X), .ID(ID_DENSE5)) u_dense5 (
    .clk, .rst_n, .cfg,
    .in_valid (s_valid[12]), .in_ready (s_ready[12]), .in_data (s_data[12]),
    .out_valid(d5_valid),    .out_ready(d5_ready),    .out_data(d5_data)
  );

  // ------------------------------------------------------------ branches
  // broadcast: an element leaves only when all seven branches take it
  logic  br_in_ready [N_BRANCH];
  logic  br_in_valid;
  logic  bd_valid [N_BRANCH];
  logic  bd_ready [N_BRANCH];
  data_t bd_data  [N_BRANCH];
  logic  oc_valid [N_BRANCH];
  logic  oc_ready [N_BRANCH];
  data_t oc_data  [N_BRANCH];

  always_comb begin
    d5_ready = 1'b1;
    for (int b = 0; b < N_BRANCH; b++) d5_ready = d5_ready && br_in_ready[b];
  end
  assign br_in_valid = d5_valid && d5_ready;

  // voxel branches: hidden formats, softmax
  for (genvar b = 0; b < N_CALO; b++) begin : g_voxel
    dense_stream #(.N_IN(N_X), .N_OUT(BR_LEN[b]), .ID(ID_BR0 + CFG_ID_W'(b))) u_dense (
      .clk, .rst_n, .cfg,
      .in_valid (br_in_valid), .in_ready (br_in_ready[b]), .in_data (d5_data),
      .out_valid(bd_valid[b]), .out_ready(bd_ready[b]),    .out_data(bd_data[b])
    );
    softmax_stream #(.N(BR_LEN[b])) u_softmax (
      .clk, .rst_n,
      .in_valid (bd_valid[b]), .in_ready (bd_ready[b]), .in_data (bd_data[b]),
      .out_valid(oc_valid[b]), .out_ready(oc_ready[b]), .out_data(oc_data[b])
    );
  end

  // energy response branch: wide formats, sigmoid
  logic                   r_valid, r_ready;
  logic signed [RA_W-1:0] r_data;

  dense_stream #(
    .N_IN(N_X), .N_OUT(1), .ID(ID_BR0 + CFG_ID_W'(5)),
    .W_W(RW_W), .W_F(RW_F), .B_W(RB_W), .B_F(RB_F), .M_W(0), .M_F(0),
    .A_W(RA_W), .A_F(RA_F), .R_W(RA_W), .R_F(RA_F)
  ) u_dense_resp (
    .clk, .rst_n, .cfg,
    .in_valid (br_in_valid), .in_ready (br_in_ready[5]), .in_data (d5_data),
    .out_valid(r_valid),     .out_ready(r_ready),        .out_data(r_data)
  );
  sigmoid_stream u_sigmoid (
    .clk, .rst_n,
    .in_valid (r_valid),     .in_ready (r_ready),     .in_data (r_data),
    .out_valid(oc_valid[5]), .out_ready(oc_ready[5]), .out_data(oc_data[5])
  );
  assign bd_valid[5] = 1'b0;
  assign bd_ready[5] = 1'b0;
  assign bd_data[5]  = '0;

  // layer energy branch: <8,3> weights, softmax
  dense_stream #(
    .N_IN(N_X), .N_OUT(BR_LEN[6]), .ID(ID_BR0 + CFG_ID_W'(6)),
    .W_W(LW_W), .W_F(LW_F), .B_W(LB_W), .B_F(LB_F), .M_W(LM_W), .M_F(LM_F),
    .A_W(LA_W), .A_F(LA_F)
  ) u_dense_layer (
    .clk, .rst_n, .cfg,
    .in_valid (br_in_valid), .in_ready (br_in_ready[6]), .in_data (d5_data),
    .out_valid(bd_valid[6]), .out_ready(bd_ready[6]),    .out_data(bd_data[6])
  );
  softmax_stream #(.N(BR_LEN[6])) u_softmax_layer (
    .clk, .rst_n,
    .in_valid (bd_valid[6]), .in_ready (bd_ready[6]), .in_data (bd_data[6]),
    .out_valid(oc_valid[6]), .out_ready(oc_ready[6]), .out_data(oc_data[6])
  );

  // ------------------------------------------------------------ output concat
  stream_concat #(.N_SRC(N_BRANCH), .LENS(OUT_LENS)) u_out_concat (
    .clk, .rst_n,
    .in_valid (oc_valid), .in_ready (oc_ready), .in_data (oc_data),
    .out_valid(x_valid),  .out_ready(x_ready),  .out_data(x_data),
    .out_last (x_last)
  );

endmodule
