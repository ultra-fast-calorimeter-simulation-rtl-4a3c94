// softmax_stream: table-based softmax over one N-element vector.
//
// Used for each of the five calorimeter-layer voxel branches (the outputs of a
// layer sum to one) and for the five layer-energy ratios. It works in three
// passes over a local buffer, in the numerically stable form
// y_i = exp(x_i - max) / sum_j exp(x_j - max):
//   LOAD  accepts the N inputs (<16,6>) one per cycle and tracks their maximum;
//   EXP   forms d_i = x_i - max (saturated to <16,6>, so d_i lies in [-32, 0]),
//         looks exp(d_i) up in a 1024-entry table addressed by the top ten bits
//         of d_i (a step of 1/16), stores it and adds it to a <20,8> sum;
//   INV   looks 1/sum up in a second 1024-entry table addressed by the top ten
//         bits of the sum in the <18,8> table format (a step of 1/4);
//   OUT   streams y_i = exp(d_i) * (1/sum), rounded and saturated to <16,6>.
// Both tables hold <18,8> values and are computed at elaboration with $exp.
// The table size and the two-table method are this design's choice, following
// common practice for table-based softmax in fixed-point neural-network
// hardware; only the formats are given for the decoder.
//
// Interface: valid/ready streams. in_ready is high only during LOAD, so one
// vector takes N (load) + N (exp) + 1 (inverse) + N (output) cycles when the
// output is not stalled.
module softmax_stream
  import calo_pkg::*;
#(
  parameter int N = 8
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

  localparam int IW = (N > 1) ? $clog2(N) : 1;
  typedef logic [TAB_W-1:0] tab_t [TABLE_SIZE];

  // exp table: entry a holds exp(v), v = signed(a) / 16
  function automatic tab_t mk_exp();
    tab_t r;
    for (int a = 0; a < TABLE_SIZE; a++) begin
      real v, e;
      longint q;
      v = real'($signed(TABLE_AW'(a))) / 16.0;
      e = $exp(v) * real'(1 << TAB_F);
      q = (e >= real'((1 << (TAB_W - 1)) - 1)) ? longint'((1 << (TAB_W - 1)) - 1)
                                                : longint'(e);
      r[a] = TAB_W'(q);
    end
    return r;
  endfunction

  // inverse table: entry a holds 1/v, v = signed(a) / 4 (saturated)
  function automatic tab_t mk_inv();
    tab_t r;
    for (int a = 0; a < TABLE_SIZE; a++) begin
      real v, e;
      longint q;
      v = real'($signed(TABLE_AW'(a))) / 4.0;
      if (v > 0.0) begin
        e = real'(1 << TAB_F) / v;
        q = (e >= real'((1 << (TAB_W - 1)) - 1)) ? longint'((1 << (TAB_W - 1)) - 1)
                                                  : longint'(e);
      end else if (v == 0.0) begin
        q = longint'((1 << (TAB_W - 1)) - 1);
      end else begin
        e = real'(1 << TAB_F) / v;
        q = longint'(e);
      end
      r[a] = TAB_W'(q);
    end
    return r;
  endfunction

  localparam tab_t EXP_TAB = mk_exp();
  localparam tab_t INV_TAB = mk_inv();

  typedef enum logic [1:0] {S_LOAD, S_EXP, S_INV, S_OUT} state_t;
  state_t state;

  data_t               xbuf [N];
  logic [TAB_W-1:0]    ebuf [N];
  logic [IW-1:0]       i;
  data_t               xmax;
  logic [SUM_W-1:0]    sum;
  logic [TAB_W-1:0]    inv;
  logic signed [63:0]  d, sum_next, sum_tab, y;
  logic [TAB_W-1:0]    e_cur;

  always_comb begin
    d        = fx_cast(sx(64'(xbuf[i]), DATA_W) - sx(64'(xmax), DATA_W),
                       DATA_F, DATA_W, DATA_F);
    e_cur    = EXP_TAB[d[DATA_W-1 -: TABLE_AW]];
    sum_next = fx_cast(sx(64'(sum), SUM_W) + fx_cast(64'(e_cur), TAB_F, 64, SUM_F),
                       SUM_F, SUM_W, SUM_F);
    sum_tab  = fx_cast(sx(64'(sum), SUM_W), SUM_F, TAB_W, TAB_F);
    y        = fx_cast(sx(64'(ebuf[i]), TAB_W) * sx(64'(inv), TAB_W),
                       2 * TAB_F, DATA_W, DATA_F);
  end

  assign in_ready  = state == S_LOAD;
  assign out_valid = state == S_OUT;
  assign out_data  = DATA_W'(y);

  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) xbuf[i] <= in_data;
    if (state == S_EXP)              ebuf[i] <= e_cur;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      i     <= '0;
      xmax  <= '0;
      sum   <= '0;
      inv   <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (i == '0 || in_data > xmax) xmax <= in_data;
          if (i == IW'(N - 1)) begin
            i     <= '0;
            sum   <= '0;
            state <= S_EXP;
          end else i <= i + 1'b1;
        end
        S_EXP: begin
          sum <= SUM_W'(sum_next);
          if (i == IW'(N - 1)) begin
            i     <= '0;
            state <= S_INV;
          end else i <= i + 1'b1;
        end
        S_INV: begin
          inv   <= INV_TAB[sum_tab[TAB_W-1 -: TABLE_AW]];
          state <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          if (i == IW'(N - 1)) begin
            i     <= '0;
            state <= S_LOAD;
          end else i <= i + 1'b1;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

endmodule
