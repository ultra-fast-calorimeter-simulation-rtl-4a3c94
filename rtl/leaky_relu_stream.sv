// leaky_relu_stream: leaky ReLU activation on a one-element-per-beat stream.
//
// y = x for x >= 0 and y = alpha * x otherwise, with alpha held in the slope
// format <12,6> and the product rounded (ties to even) and saturated back to
// the data format <16,6>. The default slope, 19/64 = 0.297, is the
// representable value nearest 0.3, the usual default of the training
// framework; the slope actually trained is not known and is a parameter.
//
// Interface: valid/ready streams with one output register: an element leaves
// one cycle after it is accepted; one element per cycle when not stalled.
module leaky_relu_stream
  import calo_pkg::*;
#(
  parameter logic signed [SL_W-1:0] ALPHA = 12'sd19
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  data_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output data_t out_data
);

  logic signed [63:0] y;

  always_comb begin
    if (in_data >= 0) y = sx(64'(in_data), DATA_W);
    else y = fx_cast(sx(64'(in_data), DATA_W) * sx(64'(ALPHA), SL_W),
                     DATA_F + SL_F, DATA_W, DATA_F);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        out_valid <= 1'b1;
        out_data  <= DATA_W'(y);
      end
    end
  end

endmodule
