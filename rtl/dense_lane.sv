// dense_lane: one output neuron of a streaming dense layer.
//
// The lane owns the weight column of its neuron (one weight per input
// element, in a small RAM of depth N_IN), its bias, one multiplier and one
// accumulator. Each accepted input element reads the weight of that element
// (synchronous read, issued together with rd_en); one cycle later the product
// of the registered input and the weight is rounded to the product format,
// aligned to the accumulator format and added with saturation. The first
// element of a vector starts the sum from the bias. On load_out the final sum
// is rounded and saturated to the result format and held in out_q until the
// next load_out, so that the accumulator can start on the next vector while
// the parent layer streams this one out.
//
// Setting M_W to 0 keeps the product at full precision (used by the layer that
// feeds the energy-response sigmoid, for which no product format is given).
// Weights and bias are written one at a time through wr_* before use.
module dense_lane
  import calo_pkg::*;
#(
  parameter int N_IN = 4,
  parameter int IN_W = DATA_W, parameter int IN_F = DATA_F,
  parameter int W_W  = HW_W,   parameter int W_F  = HW_F,
  parameter int B_W  = HB_W,   parameter int B_F  = HB_F,
  parameter int M_W  = HM_W,   parameter int M_F  = HM_F,
  parameter int A_W  = HA_W,   parameter int A_F  = HA_F,
  parameter int R_W  = DATA_W, parameter int R_F  = DATA_F,
  localparam int KW  = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic                  clk,
  // parameter load
  input  logic                  wr_w,
  input  logic                  wr_b,
  input  logic [KW-1:0]         wr_row,
  input  logic [W_W-1:0]        wr_wdata,
  input  logic [B_W-1:0]        wr_bdata,
  // accumulation
  input  logic                  rd_en,
  input  logic [KW-1:0]         rd_addr,
  input  logic                  p_valid,
  input  logic                  p_first,
  input  logic signed [IN_W-1:0] p_data,
  // result
  input  logic                  load_out,
  output logic signed [R_W-1:0] out_q
);

  logic [W_W-1:0]        wmem [N_IN];
  logic [W_W-1:0]        w_q;
  logic [B_W-1:0]        bias;
  logic signed [A_W-1:0] acc;
  logic signed [63:0]    prod, prod_m, addend, base, sum;
  localparam int PF = (M_W > 0) ? M_F : IN_F + W_F;

  always_ff @(posedge clk) begin
    if (wr_w) wmem[wr_row] <= wr_wdata;
    if (wr_b) bias <= wr_bdata;
    if (rd_en) w_q <= wmem[rd_addr];
  end

  always_comb begin
    prod   = sx(64'(p_data), IN_W) * sx(64'(w_q), W_W);
    prod_m = (M_W > 0) ? fx_cast(prod, IN_F + W_F, M_W, M_F) : prod;
    addend = fx_cast(prod_m, PF, 64, A_F);
    base   = p_first ? fx_cast(sx(64'(bias), B_W), B_F, A_W, A_F) : sx(64'(acc), A_W);
    sum    = fx_cast(base + addend, A_F, A_W, A_F);
  end

  always_ff @(posedge clk) begin
    if (p_valid)  acc   <= A_W'(sum);
    if (load_out) out_q <= R_W'(fx_cast(sx(64'(acc), A_W), A_F, R_W, R_F));
  end

endmodule
