// dense_stream: quantized fully connected layer on a one-element-per-beat
// stream, with a reuse factor equal to its input width.
//
// A vector of N_IN elements arrives on in_* (valid/ready, one element per
// accepted beat, in index order) and N_OUT results leave on out_* in index
// order. Each of the N_OUT neurons is a dense_lane with its own multiplier,
// so every input element is multiplied by all N_OUT weights of its row in the
// same cycle and each multiplier is reused N_IN times per vector: N_OUT
// multipliers in total, the arrangement the decoder uses for every dense layer.
//
// Timing: an element is accepted per cycle while the layer accumulates. After
// the last element the sums pass (in one cycle) into the lanes' output
// registers, if the previous vector has been fully sent; the layer then
// accepts the next vector while streaming the current one out. in_ready is low
// for two cycles around each vector boundary and while a finished sum waits
// for the output registers. A vector therefore occupies the input for N_IN+2
// cycles when the output keeps up, and its first result appears 3 cycles after
// its last element was accepted.
//
// Parameters are loaded through cfg (see calo_pkg): when cfg.id equals ID,
// row r < N_IN writes weight (r, cfg.col) and row N_IN writes the bias of
// neuron cfg.col. Data formats are parameters; defaults are the hidden-layer
// formats. Pruned (zero) weights are stored like any other weight: the layer
// is programmable, so no multiplier is removed for them.
module dense_stream
  import calo_pkg::*;
#(
  parameter int N_IN  = 4,
  parameter int N_OUT = 3,
  parameter logic [CFG_ID_W-1:0] ID = '0,
  parameter int IN_W = DATA_W, parameter int IN_F = DATA_F,
  parameter int W_W  = HW_W,   parameter int W_F  = HW_F,
  parameter int B_W  = HB_W,   parameter int B_F  = HB_F,
  parameter int M_W  = HM_W,   parameter int M_F  = HM_F,
  parameter int A_W  = HA_W,   parameter int A_F  = HA_F,
  parameter int R_W  = DATA_W, parameter int R_F  = DATA_F
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  cfg_t                  cfg,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic signed [IN_W-1:0] in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic signed [R_W-1:0] out_data
);

  localparam int KW = (N_IN > 1)  ? $clog2(N_IN)  : 1;
  localparam int OW = (N_OUT > 1) ? $clog2(N_OUT) : 1;

  logic [KW-1:0] k;                 // index of the next input element
  logic [OW-1:0] oidx;              // index of the next output element
  logic          p_valid, p_first, p_last;
  logic signed [IN_W-1:0] p_data;
  logic          acc_done;          // a finished vector sits in the accumulators
  logic          out_busy;          // output registers hold unsent results
  logic          load_out;
  logic          accept;
  logic signed [R_W-1:0] lane_q [N_OUT];

  assign in_ready = !acc_done && !(p_valid && p_last);
  assign accept   = in_valid && in_ready;
  assign load_out = acc_done && (!out_busy || (out_ready && oidx == OW'(N_OUT - 1)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k        <= '0;
      p_valid  <= 1'b0;
      p_first  <= 1'b0;
      p_last   <= 1'b0;
      p_data   <= '0;
      acc_done <= 1'b0;
    end else begin
      p_valid <= accept;
      if (accept) begin
        p_first <= (k == '0);
        p_last  <= (k == KW'(N_IN - 1));
        p_data  <= in_data;
        k       <= (k == KW'(N_IN - 1)) ? '0 : k + 1'b1;
      end
      if (p_valid && p_last) acc_done <= 1'b1;
      else if (load_out)     acc_done <= 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_busy <= 1'b0;
      oidx     <= '0;
    end else begin
      if (out_valid && out_ready)
        oidx <= (oidx == OW'(N_OUT - 1)) ? '0 : oidx + 1'b1;
      if (load_out)
        out_busy <= 1'b1;
      else if (out_valid && out_ready && oidx == OW'(N_OUT - 1))
        out_busy <= 1'b0;
    end
  end

  assign out_valid = out_busy;
  assign out_data  = lane_q[oidx];

  for (genvar j = 0; j < N_OUT; j++) begin : g_lane
    logic sel;
    assign sel = cfg.we && cfg.id == ID && cfg.col == CFG_COL_W'(j);
    dense_lane #(
      .N_IN(N_IN), .IN_W(IN_W), .IN_F(IN_F), .W_W(W_W), .W_F(W_F),
      .B_W(B_W), .B_F(B_F), .M_W(M_W), .M_F(M_F), .A_W(A_W), .A_F(A_F),
      .R_W(R_W), .R_F(R_F)
    ) u_lane (
      .clk      (clk),
      .wr_w     (sel && cfg.row < CFG_ROW_W'(N_IN)),
      .wr_b     (sel && cfg.row == CFG_ROW_W'(N_IN)),
      .wr_row   (KW'(cfg.row)),
      .wr_wdata (W_W'(cfg.data)),
      .wr_bdata (B_W'(cfg.data)),
      .rd_en    (accept),
      .rd_addr  (k),
      .p_valid  (p_valid),
      .p_first  (p_first),
      .p_data   (p_data),
      .load_out (load_out),
      .out_q    (lane_q[j])
    );
  end

  // the result stream holds its data while it is stalled
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
