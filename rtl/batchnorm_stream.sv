// batchnorm_stream: per-channel batch normalisation on a one-element-per-beat
// stream, in its inference form y = x * scale[c] + bias[c].
//
// The four trained quantities of a batch-normalisation layer (mean, variance,
// gamma, beta) are folded before loading into one scale
// (gamma / sqrt(var + eps)) and one bias (beta - mean * scale) per channel,
// both <20,8>. The product x * scale is rounded to the product format <18,8>,
// the bias is added and the sum is rounded and saturated to the data format
// <16,6>. The channel index c counts the elements of each N-element vector.
//
// Interface: in_*/out_* are valid/ready streams; one output register, so an
// element leaves one cycle after it is accepted and a new element is accepted
// every cycle while the output is not stalled. Through cfg with cfg.id == ID,
// row 0 writes scale[cfg.col] and row 1 writes bias[cfg.col].
module batchnorm_stream
  import calo_pkg::*;
#(
  parameter int N = 4,
  parameter logic [CFG_ID_W-1:0] ID = ID_BN1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  cfg_t  cfg,
  input  logic  in_valid,
  output logic  in_ready,
  input  data_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output data_t out_data
);

  localparam int CW = (N > 1) ? $clog2(N) : 1;

  logic [BN_W-1:0] scale [N];
  logic [BN_W-1:0] bias  [N];
  logic [CW-1:0]   c;
  logic signed [63:0] prod, y;

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.id == ID && cfg.col < CFG_COL_W'(N)) begin
      if (cfg.row == 0) scale[CW'(cfg.col)] <= BN_W'(cfg.data);
      if (cfg.row == 1) bias[CW'(cfg.col)]  <= BN_W'(cfg.data);
    end
  end

  always_comb begin
    prod = fx_cast(sx(64'(in_data), DATA_W) * sx(64'(scale[c]), BN_W),
                   DATA_F + BN_F, BM_W, BM_F);
    y    = fx_cast(fx_cast(prod, BM_F, 64, BN_F) + sx(64'(bias[c]), BN_W),
                   BN_F, DATA_W, DATA_F);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c         <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        out_valid <= 1'b1;
        out_data  <= DATA_W'(y);
        c         <= (c == CW'(N - 1)) ? '0 : c + 1'b1;
      end
    end
  end

endmodule
