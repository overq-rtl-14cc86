// overq_accel: weight-stationary OverQ accelerator layer engine (top level).
//
// What it does: runs one layer of 1x1 convolution / matrix-vector products on
// activation vectors that are already OverQ-encoded, and OverQ-encodes its own
// results for the next layer. The datapath is the one of the paper's
// architecture figure: a ROWS x COLS systolic array of OverQ PEs (input
// channels on rows, output channels on columns) followed by the accumulation
// and rescaling unit, in which the OverQ state of the next layer's activations
// is computed.
//
//   in_code/in_state --> overq_skew --> overq_array --> overq_skew (deskew)
//     --> overq_rescale (accumulate tiles, scale, ReLU) --> overq_encoder
//     --> out_code/out_state
//
// With ROWS == COLS the outputs can be stored and fed back as the next
// layer's input vectors. Activation/weight memories, the sequencer that walks
// tiles and pixels, and the interface to a host are not described in the
// paper and are outside this module: the caller supplies vectors, tile flags
// and accumulator addresses.
//
// Interface and timing:
//   wl_en, wl_data[c]  weight load: ROWS cycles shift one row of weights per
//                      cycle into the top of the array; the word applied last
//                      ends in row 0. Must not overlap with in_valid or with
//                      vectors still in the array.
//   in_valid, in_code[r], in_state[r], in_addr, in_first, in_last
//                      one encoded activation vector per cycle, with its
//                      accumulator address and tile flags (see overq_rescale).
//   casc, pr_en, mult[c], shift[c]
//                      quasi-static configuration: cascade factor (0 = no
//                      range overwrite), precision-overwrite enable, and the
//                      per-column scale factors.
//   out_*              the encoded next-layer vector of a pixel whose last
//                      tile entered LATENCY = ROWS + COLS + 4 cycles earlier,
//                      with its address, the rescaled values before encoding
//                      (out_ext) and per-vector event counts.
module overq_accel
  import overq_pkg::*;
#(
  parameter int unsigned ROWS     = DEF_ROWS,
  parameter int unsigned COLS     = DEF_COLS,
  parameter int unsigned ACT_W    = DEF_ACT_W,
  parameter int unsigned W_W      = DEF_W_W,
  parameter int unsigned PSUM_W   = DEF_PSUM_W,
  parameter int unsigned ACC_W    = DEF_ACC_W,
  parameter int unsigned DEPTH    = DEF_ACC_DEPTH,
  parameter int unsigned SCALE_W  = DEF_SCALE_W,
  parameter int unsigned SHIFT_W  = DEF_SHIFT_W,
  parameter int unsigned CASC_MAX = DEF_CASC_MAX,
  localparam int unsigned AW      = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned EXT_W   = 3 * ACT_W,
  localparam int unsigned CW      = $clog2(CASC_MAX + 1),
  localparam int unsigned NW      = $clog2(COLS + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // configuration
  input  logic [CW-1:0]         casc,
  input  logic                  pr_en,
  input  logic [SCALE_W-1:0]    mult      [COLS],
  input  logic [SHIFT_W-1:0]    shift     [COLS],
  // weight load
  input  logic                  wl_en,
  input  logic signed [W_W-1:0] wl_data   [COLS],
  // activation input
  input  logic                  in_valid,
  input  logic [ACT_W-1:0]      in_code   [ROWS],
  input  oq_state_e             in_state  [ROWS],
  input  logic [AW-1:0]         in_addr,
  input  logic                  in_first,
  input  logic                  in_last,
  // encoded output
  output logic                  out_valid,
  output logic [AW-1:0]         out_addr,
  output logic [ACT_W-1:0]      out_code  [COLS],
  output oq_state_e             out_state [COLS],
  output logic [EXT_W-1:0]      out_ext   [COLS],
  output logic [NW-1:0]         out_n_outlier,
  output logic [NW-1:0]         out_n_covered,
  output logic [NW-1:0]         out_n_cascaded,
  output logic [NW-1:0]         out_n_precision,
  output logic [NW-1:0]         out_n_neg,
  output logic [NW-1:0]         out_n_sat,
  output logic                  out_ev_fwd
);

  localparam int unsigned XS_W    = ACT_W + 2;
  localparam int unsigned ARR_LAT = ROWS + COLS;   // row 0 in -> deskewed out
  localparam int unsigned TAG_W   = AW + 3;

  // ---------------------------------------------------------------- skew
  logic [XS_W-1:0] xs_in  [ROWS];
  logic [XS_W-1:0] xs_skw [ROWS];
  logic [ACT_W-1:0] arr_x [ROWS];
  oq_state_e        arr_s [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_xs
    // Slots are zeroed between vectors so that idle cycles add nothing.
    assign xs_in[r] = in_valid ? {in_state[r], in_code[r]} : '0;
    assign arr_x[r] = xs_skw[r][ACT_W-1:0];
    assign arr_s[r] = oq_state_e'(xs_skw[r][XS_W-1:ACT_W]);
  end

  overq_skew #(.LANES(ROWS), .WIDTH(XS_W), .ASCENDING(1'b1)) u_skew_in (
    .clk(clk), .rst_n(rst_n), .d(xs_in), .q(xs_skw)
  );

  // ---------------------------------------------------------------- array
  logic signed [PSUM_W-1:0] arr_psum [COLS];

  overq_array #(
    .ROWS(ROWS), .COLS(COLS), .ACT_W(ACT_W), .W_W(W_W), .PSUM_W(PSUM_W)
  ) u_array (
    .clk        (clk),
    .rst_n      (rst_n),
    .x_in       (arr_x),
    .s_in       (arr_s),
    .w_load     (wl_en),
    .w_load_data(wl_data),
    .psum_out   (arr_psum)
  );

  // ---------------------------------------------------------------- deskew
  logic [PSUM_W-1:0]        dsk_in  [COLS];
  logic [PSUM_W-1:0]        dsk_out [COLS];
  logic signed [PSUM_W-1:0] res_psum [COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_dsk
    assign dsk_in[c]   = arr_psum[c];
    assign res_psum[c] = $signed(dsk_out[c]);
  end

  overq_skew #(.LANES(COLS), .WIDTH(PSUM_W), .ASCENDING(1'b0)) u_skew_out (
    .clk(clk), .rst_n(rst_n), .d(dsk_in), .q(dsk_out)
  );

  // Tag (valid, address, tile flags) travels alongside the vector.
  logic [TAG_W-1:0] tag_pipe [ARR_LAT];
  logic [TAG_W-1:0] tag_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < ARR_LAT; k++) tag_pipe[k] <= '0;
    end else begin
      tag_pipe[0] <= {in_valid, in_first, in_last, in_addr};
      for (int k = 1; k < ARR_LAT; k++) tag_pipe[k] <= tag_pipe[k-1];
    end
  end
  assign tag_out = tag_pipe[ARR_LAT-1];

  // ---------------------------------------------------------------- rescale
  logic             res_valid;
  logic [AW-1:0]    res_addr;
  logic [EXT_W-1:0] res_ext [COLS];

  overq_rescale #(
    .COLS(COLS), .ACT_W(ACT_W), .PSUM_W(PSUM_W), .ACC_W(ACC_W),
    .DEPTH(DEPTH), .SCALE_W(SCALE_W), .SHIFT_W(SHIFT_W)
  ) u_rescale (
    .clk      (clk),
    .rst_n    (rst_n),
    .mult     (mult),
    .shift    (shift),
    .in_valid (tag_out[TAG_W-1]),
    .psum     (res_psum),
    .addr     (tag_out[AW-1:0]),
    .first    (tag_out[AW+1]),
    .last     (tag_out[AW]),
    .out_valid(res_valid),
    .out_addr (res_addr),
    .ext      (res_ext),
    .n_neg    (out_n_neg),
    .n_sat    (out_n_sat),
    .ev_fwd   (out_ev_fwd)
  );

  // ---------------------------------------------------------------- encoder
  overq_encoder #(.N(COLS), .ACT_W(ACT_W), .CASC_MAX(CASC_MAX)) u_enc (
    .clk        (clk),
    .rst_n      (rst_n),
    .casc       (casc),
    .pr_en      (pr_en),
    .in_valid   (res_valid),
    .ext        (res_ext),
    .out_valid  (out_valid),
    .code       (out_code),
    .state      (out_state),
    .n_outlier  (out_n_outlier),
    .n_covered  (out_n_covered),
    .n_cascaded (out_n_cascaded),
    .n_precision(out_n_precision)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_addr <= '0;
      for (int c = 0; c < COLS; c++) out_ext[c] <= '0;
    end else if (res_valid) begin
      out_addr <= res_addr;
      for (int c = 0; c < COLS; c++) out_ext[c] <= res_ext[c];
    end
  end

  // Weights may only be loaded while no vector is being presented.
  a_no_load_during_stream: assert property (
    @(posedge clk) disable iff (!rst_n) !(wl_en && in_valid)
  ) else $error("weight load overlaps an activation vector");

endmodule
