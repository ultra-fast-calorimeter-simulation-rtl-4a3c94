// stream_concat: joins N_SRC valid/ready streams into one, in a fixed order.
//
// Source s contributes LENS[16*s +: 16] elements per output vector (the lengths
// are packed into one vector parameter, source 0 in the low bits); the output
// carries all elements of source 0, then all of source 1, and so on, with
// out_last marking the final element of the joined vector. The decoder uses it
// twice: at its input to join the latent vector z (30 elements) with the
// condition x_con (1 element), and at its output to join the seven branch
// results into the 374-element vector x-tilde (voxel ratios of the five
// calorimeter layers, then the energy response ratio, then the five layer
// energy ratios). Sources not currently selected see in_ready low.
//
// Timing: purely combinational between the selected source and the output;
// one element per cycle when both sides are ready. State is the selected
// source and the element count within it.
module stream_concat
  import calo_pkg::*;
#(
  parameter int N_SRC = 2,
  parameter logic [16*N_SRC-1:0] LENS = {16'd2, 16'd3}
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid [N_SRC],
  output logic  in_ready [N_SRC],
  input  data_t in_data  [N_SRC],
  output logic  out_valid,
  input  logic  out_ready,
  output data_t out_data,
  output logic  out_last
);

  localparam int SW = (N_SRC > 1) ? $clog2(N_SRC) : 1;

  logic [SW-1:0] src;
  logic [15:0]   cnt;
  logic          src_end;

  always_comb begin
    out_valid = 1'b0;
    out_data  = '0;
    for (int s = 0; s < N_SRC; s++) begin
      in_ready[s] = (src == SW'(s)) && out_ready;
      if (src == SW'(s)) begin
        out_valid = in_valid[s];
        out_data  = in_data[s];
      end
    end
  end

  always_comb begin
    src_end = 1'b0;
    for (int s = 0; s < N_SRC; s++)
      if (src == SW'(s) && cnt == LENS[16*s +: 16] - 16'd1) src_end = 1'b1;
  end

  assign out_last = src_end && src == SW'(N_SRC - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src <= '0;
      cnt <= '0;
    end else if (out_valid && out_ready) begin
      if (src_end) begin
        cnt <= '0;
        src <= (src == SW'(N_SRC - 1)) ? '0 : src + 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
