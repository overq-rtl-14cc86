// overq_array: ROWS x COLS weight-stationary systolic array of OverQ PEs.
//
// What it does: computes, for every activation vector that enters it, the
// COLS dot products of the vector with the stationary weight columns, with
// the OverQ decoding done inside the PEs. Input channels are mapped to rows
// and output channels to columns, as in the paper's array figure: activation
// slots and their OverQ states enter on the left and move one PE to the right
// per cycle; partial sums enter at the top as zero and move one PE down per
// cycle; each PE also sees the stationary weight of the PE directly above it,
// which is what an overwritten slot multiplies by. Because adjacent channels
// sit in physically adjacent rows, that weight copy is a short vertical wire.
//
// Interface and timing:
//   x_in[r], s_in[r]   slot code and state of row r, entering column 0. The
//                      caller skews the rows: row r of a vector must enter r
//                      cycles after row 0 (see overq_skew).
//   psum_out[c]        column c's dot product, in units of 2^-ACT_W (the
//                      partial sums carry ACT_W fraction bits). For a vector
//                      whose row 0 entered in cycle t, column c's result is
//                      valid in cycle t + ROWS + 1 + c (registered output).
//   w_load, w_load_data[c]
//                      while w_load is high, every column shifts its weights
//                      down by one row and takes w_load_data[c] into row 0.
//                      After ROWS load cycles row r holds the word applied
//                      ROWS-1-r cycles before the last one. Loading while
//                      activations are in flight corrupts their results.
// Row 0 has no PE above it; its adjacent-weight input is the load data, which
// is harmless because the OverQ encoder never gives row 0 a non-zero state.
module overq_array
  import overq_pkg::*;
#(
  parameter int unsigned ROWS   = DEF_ROWS,
  parameter int unsigned COLS   = DEF_COLS,
  parameter int unsigned ACT_W  = DEF_ACT_W,
  parameter int unsigned W_W    = DEF_W_W,
  parameter int unsigned PSUM_W = DEF_PSUM_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [ACT_W-1:0]         x_in        [ROWS],
  input  oq_state_e                s_in        [ROWS],
  input  logic                     w_load,
  input  logic signed [W_W-1:0]    w_load_data [COLS],
  output logic signed [PSUM_W-1:0] psum_out    [COLS]
);

  // Horizontal nets: column index COLS is the unused right-hand edge.
  logic [ACT_W-1:0]         xh [ROWS][COLS+1];
  oq_state_e                sh [ROWS][COLS+1];
  // Vertical nets: row index 0 is the top edge, ROWS the bottom edge.
  logic signed [W_W-1:0]    wv [ROWS+1][COLS];
  logic signed [PSUM_W-1:0] pv [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_left
    assign xh[r][0] = x_in[r];
    assign sh[r][0] = s_in[r];
  end

  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign wv[0][c]     = w_load_data[c];
    assign pv[0][c]     = '0;
    assign psum_out[c]  = pv[ROWS][c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      overq_pe #(
        .ACT_W (ACT_W),
        .W_W   (W_W),
        .PSUM_W(PSUM_W)
      ) u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .x_in    (xh[r][c]),
        .s_in    (sh[r][c]),
        .x_out   (xh[r][c+1]),
        .s_out   (sh[r][c+1]),
        .w_load  (w_load),
        .w_adj_in(wv[r][c]),
        .w_out   (wv[r+1][c]),
        .psum_in (pv[r][c]),
        .psum_out(pv[r+1][c])
      );
    end
  end

endmodule
