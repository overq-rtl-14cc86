// overq_pe: one processing element of the weight-stationary OverQ array.
//
// What it does: multiplies the activation slot passing through it by a
// stationary weight and adds the product to the partial sum that flows from
// the PE above to the PE below. OverQ adds three things to a plain MAC PE,
// as drawn in the paper's PE figure: a register that carries the 2-bit OverQ
// state along with the activation, a mux in front of the multiplier that picks
// either this PE's weight or the weight of the PE above ("adjacent weight"),
// and a shifter between multiplier and adder that aligns the product left or
// right.
//
//   state    weight used     product enters the sum shifted left by
//   OQ_NONE  own             ACT_W        (normal weight)
//   OQ_RO    PE above        2*ACT_W      (upper bits of an outlier)
//   OQ_PR    PE above        0            (extra fraction bits)
//   OQ_CASC  PE above        ACT_W        (value moved down one slot)
//
// The partial sum carries ACT_W fraction bits, so "shift right" for precision
// overwrite is exact; that number format is this design's choice.
//
// Interface and timing:
//   x_in/s_in       activation code and state from the left; registered here,
//                   forwarded to the right from the register (x_out/s_out).
//   w_adj_in        stationary weight of the PE above (combinational).
//   w_out           this PE's stationary weight, to the PE below.
//   w_load          while high, the weight register takes w_adj_in: weights
//                   are shifted into a column from the top, one row per
//                   cycle (this loading scheme is this design's choice).
//   psum_in         partial sum from above; psum_out is registered and equals
//                   psum_in + aligned product of the x/s registers, so a
//                   result appears one cycle after x_reg holds the operand.
// The register placement (x, state, sum) follows the PE figure; reset clears
// all registers except the weight, which is cleared too (design choice).
module overq_pe
  import overq_pkg::*;
#(
  parameter int unsigned ACT_W  = DEF_ACT_W,
  parameter int unsigned W_W    = DEF_W_W,
  parameter int unsigned PSUM_W = DEF_PSUM_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [ACT_W-1:0]         x_in,
  input  oq_state_e                s_in,
  output logic [ACT_W-1:0]         x_out,
  output oq_state_e                s_out,
  input  logic                     w_load,
  input  logic signed [W_W-1:0]    w_adj_in,
  output logic signed [W_W-1:0]    w_out,
  input  logic signed [PSUM_W-1:0] psum_in,
  output logic signed [PSUM_W-1:0] psum_out
);

  localparam int unsigned PROD_W = ACT_W + W_W + 1;

  logic [ACT_W-1:0]         x_q;
  oq_state_e                s_q;
  logic signed [W_W-1:0]    w_q;
  logic signed [W_W-1:0]    w_sel;
  logic signed [PROD_W-1:0] prod;
  logic signed [PSUM_W-1:0] prod_ext;
  logic signed [PSUM_W-1:0] prod_aligned;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q      <= '0;
      s_q      <= OQ_NONE;
      w_q      <= '0;
      psum_out <= '0;
    end else begin
      x_q      <= x_in;
      s_q      <= s_in;
      if (w_load) w_q <= w_adj_in;
      psum_out <= psum_in + prod_aligned;
    end
  end

  // Weight mux: any OverQ state other than "none" takes the upper weight.
  assign w_sel = (s_q == OQ_NONE) ? w_q : w_adj_in;

  // Unsigned activation times signed weight.
  assign prod     = $signed({1'b0, x_q}) * w_sel;
  assign prod_ext = PSUM_W'(prod);

  // Shifter.
  always_comb begin
    unique case (s_q)
      OQ_RO:   prod_aligned = prod_ext <<< (2 * ACT_W);
      OQ_PR:   prod_aligned = prod_ext;
      default: prod_aligned = prod_ext <<< ACT_W;
    endcase
  end

  assign x_out = x_q;
  assign s_out = s_q;
  assign w_out = w_q;

endmodule
