// overq_encoder: computes the OverQ slot codes and states of an activation
// vector before it enters the systolic array.
//
// What it does: takes N high-precision, non-negative activations along the
// input-channel dimension and packs them into N slots of ACT_W bits, each
// with a 2-bit OverQ state (see overq_pkg). A value is an outlier when its
// integer part does not fit ACT_W bits, i.e. when plain uniform quantization
// would clip it; a value is a zero when its integer part is 0.
//
//   Range overwrite: an outlier at channel i whose nearest following zero is
//   at channel i+k, 1 <= k <= casc, keeps its low ACT_W bits in slot i, puts
//   its high ACT_W bits in slot i+1 (state OQ_RO), and the values of channels
//   i+1 .. i+k-1 move down one slot each (state OQ_CASC); the zero at i+k is
//   overwritten. casc = 1 is range overwrite without cascading; casc = 0
//   turns range overwrite off. An outlier with no zero in reach is clipped.
//   Values moved by a cascade are clipped if they are outliers themselves.
//
//   Precision overwrite (pr_en): a non-outlier at channel i followed by a
//   zero at i+1 keeps its integer code in slot i and puts its ACT_W fraction
//   bits in slot i+1 (state OQ_PR).
//
// The channels are scanned from 0 upwards and the first rule that applies
// wins; outliers therefore have priority over precision overwrite for any
// zero they can reach. The paper defines the two modes, cascading and the
// cascade factor, and says the state is computed in the rescaling unit; the
// scan order, the priority between the modes, clipping of moved outliers and
// truncation (not rounding) of the fraction are this design's choices. The
// scan is written as one pass with a small carry (open cascade, pending
// fraction) and a look-ahead of CASC_MAX channels per lane, i.e. O(N*c)
// logic, which is the cost the paper names for the simplest algorithm.
//
// Interface and timing: ext[i] is {integer part (2*ACT_W bits), fraction
// (ACT_W bits)}, larger values must be saturated by the caller. Outputs are
// registered: in_valid in cycle t gives out_valid, code, state and the
// per-vector counts (outliers, outliers covered by range overwrite, of those
// covered through a cascade of length > 1, precision overwrites) in cycle t+1.
module overq_encoder
  import overq_pkg::*;
#(
  parameter int unsigned N        = DEF_ROWS,
  parameter int unsigned ACT_W    = DEF_ACT_W,
  parameter int unsigned CASC_MAX = DEF_CASC_MAX,
  localparam int unsigned EXT_W   = 3 * ACT_W,
  localparam int unsigned CW      = $clog2(CASC_MAX + 1),
  localparam int unsigned NW      = $clog2(N + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CW-1:0]    casc,
  input  logic             pr_en,
  input  logic             in_valid,
  input  logic [EXT_W-1:0] ext   [N],
  output logic             out_valid,
  output logic [ACT_W-1:0] code  [N],
  output oq_state_e        state [N],
  output logic [NW-1:0]    n_outlier,
  output logic [NW-1:0]    n_covered,
  output logic [NW-1:0]    n_cascaded,
  output logic [NW-1:0]    n_precision
);

  logic [2*ACT_W-1:0] ival   [N];
  logic [ACT_W-1:0]   fval   [N];
  logic               is_zero[N];
  logic               is_out [N];
  logic [ACT_W-1:0]   clipv  [N];
  logic               zero_ahead [N];

  logic [ACT_W-1:0]   code_d  [N];
  oq_state_e          state_d [N];
  logic [NW-1:0]      n_out_d, n_cov_d, n_cas_d, n_pr_d;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      ival[i]    = ext[i][EXT_W-1:ACT_W];
      fval[i]    = ext[i][ACT_W-1:0];
      is_zero[i] = (ival[i] == '0);
      is_out[i]  = (ival[i][2*ACT_W-1:ACT_W] != '0);
      clipv[i]   = is_out[i] ? '1 : ival[i][ACT_W-1:0];
    end
  end

  // Look-ahead: is there a zero among the next casc channels?
  always_comb begin
    for (int i = 0; i < N; i++) begin
      zero_ahead[i] = 1'b0;
      for (int k = 1; k <= CASC_MAX; k++) begin
        if (i + k < N) begin
          if (k <= int'(casc) && is_zero[i + k]) zero_ahead[i] = 1'b1;
        end
      end
    end
  end

  // One pass over the channels with a carry.
  always_comb begin
    logic             cas_open;   // a cascade is moving values down
    logic             cas_first;  // next slot receives the outlier's MSBs
    logic [ACT_W-1:0] carry;      // value moving into the next slot
    logic             pr_pend;    // next slot receives fraction bits
    logic             cas_long;   // open cascade has moved a value
    cas_open  = 1'b0;
    cas_first = 1'b0;
    carry     = '0;
    pr_pend   = 1'b0;
    cas_long  = 1'b0;
    n_out_d   = '0;
    n_cov_d   = '0;
    n_cas_d   = '0;
    n_pr_d    = '0;
    for (int i = 0; i < N; i++) begin
      if (is_out[i]) n_out_d = n_out_d + 1'b1;
      if (cas_open) begin
        code_d[i]  = carry;
        state_d[i] = cas_first ? OQ_RO : OQ_CASC;
        cas_first  = 1'b0;
        if (is_zero[i]) begin
          cas_open = 1'b0;
          if (cas_long) n_cas_d = n_cas_d + 1'b1;
        end else begin
          carry    = clipv[i];
          cas_long = 1'b1;
        end
      end else if (pr_pend) begin
        code_d[i]  = carry;
        state_d[i] = OQ_PR;
        pr_pend    = 1'b0;
      end else if (is_out[i] && zero_ahead[i]) begin
        code_d[i]  = ival[i][ACT_W-1:0];
        state_d[i] = OQ_NONE;
        carry      = ival[i][2*ACT_W-1:ACT_W];
        cas_open   = 1'b1;
        cas_first  = 1'b1;
        cas_long   = 1'b0;
        n_cov_d    = n_cov_d + 1'b1;
      end else if (pr_en && !is_out[i] && (i + 1 < N) && is_zero[(i + 1) % N]) begin
        code_d[i]  = ival[i][ACT_W-1:0];
        state_d[i] = OQ_NONE;
        carry      = fval[i];
        pr_pend    = 1'b1;
        n_pr_d     = n_pr_d + 1'b1;
      end else begin
        code_d[i]  = clipv[i];
        state_d[i] = OQ_NONE;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      n_outlier   <= '0;
      n_covered   <= '0;
      n_cascaded  <= '0;
      n_precision <= '0;
      for (int i = 0; i < N; i++) begin
        code[i]  <= '0;
        state[i] <= OQ_NONE;
      end
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        n_outlier   <= n_out_d;
        n_covered   <= n_cov_d;
        n_cascaded  <= n_cas_d;
        n_precision <= n_pr_d;
        for (int i = 0; i < N; i++) begin
          code[i]  <= code_d[i];
          state[i] <= state_d[i];
        end
      end
    end
  end

endmodule
