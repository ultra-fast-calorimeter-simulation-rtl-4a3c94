// sigmoid_stream: table-based sigmoid for the energy-response output.
//
// The input is the wide <42,22> result of the dense layer that feeds the
// energy response. The table covers [-8, 8) in 1024 steps of 1/64: the address
// is floor(64 x) + 512, clamped to 0..1023, and entry a holds
// 1 / (1 + exp(-(a - 512) / 64)) in the <18,8> table format, computed at
// elaboration. The result is returned in the data format <16,6> (the table
// values need no rounding there). Table size and range are this design's
// choice, after the usual table-based sigmoid of fixed-point neural-network
// hardware; the formats are those of the decoder.
//
// Interface: valid/ready streams with one output register (one cycle of
// latency, one element per cycle).
module sigmoid_stream
  import calo_pkg::*;
#(
  parameter int IN_W = RA_W,
  parameter int IN_F = RA_F
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic signed [IN_W-1:0] in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output data_t                  out_data
);

  typedef logic [TAB_W-1:0] tab_t [TABLE_SIZE];

  function automatic tab_t mk_sig();
    tab_t r;
    for (int a = 0; a < TABLE_SIZE; a++) begin
      real v, s;
      v = real'(a - TABLE_SIZE / 2) / 64.0;
      s = real'(1 << TAB_F) / (1.0 + $exp(-v));
      r[a] = TAB_W'(longint'(s));
    end
    return r;
  endfunction

  localparam tab_t SIG_TAB = mk_sig();

  logic signed [63:0] xi, addr;
  logic [TABLE_AW-1:0] a;

  always_comb begin
    xi   = sx(64'(in_data), IN_W) >>> (IN_F - 6);        // floor(64 x)
    addr = xi + 64'sd512;
    if (addr < 0)                  a = '0;
    else if (addr > 64'sd1023)      a = '1;
    else                           a = TABLE_AW'(addr);
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
        out_data  <= DATA_W'(fx_cast(64'(SIG_TAB[a]), TAB_F, DATA_W, DATA_F));
      end
    end
  end

endmodule
