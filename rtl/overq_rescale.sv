// overq_rescale: accumulation and rescaling unit at the bottom of the array.
//
// What it does: each array column (output channel) has its own accumulator
// and its own scale factor, as the paper describes for the rescaling unit.
// A dot product that spans more input channels than the array has rows is
// computed in several passes (tiles); the partial results of one output pixel
// are summed here in an accumulator memory of DEPTH entries per column,
// addressed by the caller. When the last tile of a pixel arrives, the total is
// rescaled onto the next layer's activation grid:
//
//   y = max(0, (acc * mult[c]) >>> shift[c])      (ReLU, truncation)
//   ext[c] = min(y, 2^(3*ACT_W) - 1)              (saturation)
//
// ext is a fixed-point value with ACT_W fraction bits and 2*ACT_W integer
// bits: exactly the high-precision form the OverQ encoder needs, which is why
// the paper places the state computation in this unit ("only here the outputs
// are temporarily in higher precision"). The memory organisation, the
// multiply-and-shift scale format, ReLU, truncation and the saturation point
// are this design's choices; the paper gives only the unit's function.
//
// Interface and timing:
//   in_valid, psum[c], addr, first, last: one aligned result vector per
//     cycle. first = this is the pixel's first tile (accumulator starts from
//     zero); last = the pixel is complete and is rescaled and emitted.
//   Pipeline: cycle t input, t+1 read-modify-write of the accumulator, t+2
//     scale, t+3 registered output (out_valid, out_addr, ext, counts of lanes
//     clamped at zero and saturated). A result written in cycle t+1 is
//     forwarded to a vector of the same address one cycle behind it, so back-
//     to-back tiles of one pixel are summed correctly; ev_fwd pulses when that
//     forwarding is used.
module overq_rescale
  import overq_pkg::*;
#(
  parameter int unsigned COLS    = DEF_COLS,
  parameter int unsigned ACT_W   = DEF_ACT_W,
  parameter int unsigned PSUM_W  = DEF_PSUM_W,
  parameter int unsigned ACC_W   = DEF_ACC_W,
  parameter int unsigned DEPTH   = DEF_ACC_DEPTH,
  parameter int unsigned SCALE_W = DEF_SCALE_W,
  parameter int unsigned SHIFT_W = DEF_SHIFT_W,
  localparam int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned EXT_W  = 3 * ACT_W,
  localparam int unsigned NW     = $clog2(COLS + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [SCALE_W-1:0]       mult  [COLS],
  input  logic [SHIFT_W-1:0]       shift [COLS],
  input  logic                     in_valid,
  input  logic signed [PSUM_W-1:0] psum  [COLS],
  input  logic [AW-1:0]            addr,
  input  logic                     first,
  input  logic                     last,
  output logic                     out_valid,
  output logic [AW-1:0]            out_addr,
  output logic [EXT_W-1:0]         ext   [COLS],
  output logic [NW-1:0]            n_neg,
  output logic [NW-1:0]            n_sat,
  output logic                     ev_fwd
);

  localparam int unsigned PROD_W = ACC_W + SCALE_W + 1;

  logic [COLS-1:0][ACC_W-1:0] mem [DEPTH];

  // Stage 1 registers.
  logic                        v1, first1, last1;
  logic [AW-1:0]               addr1;
  logic signed [ACC_W-1:0]     psum1 [COLS];
  logic [COLS-1:0][ACC_W-1:0]  rdata1;
  // Last write, for forwarding.
  logic                        wv_q;
  logic [AW-1:0]               waddr_q;
  logic [COLS-1:0][ACC_W-1:0]  wdata_q;
  // Stage 2 (sum) and stage 3 (scaled) registers.
  logic                        v2;
  logic [AW-1:0]               addr2;
  logic signed [ACC_W-1:0]     sum2 [COLS];

  logic                        fwd;
  logic [COLS-1:0][ACC_W-1:0]  sum1;

  assign fwd = v1 && !first1 && wv_q && (waddr_q == addr1);

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic signed [ACC_W-1:0] base;
      if (first1)   base = '0;
      else if (fwd) base = $signed(wdata_q[c]);
      else          base = $signed(rdata1[c]);
      sum1[c] = base + psum1[c];
    end
  end

  always_ff @(posedge clk) begin
    rdata1 <= mem[addr];
    if (v1) mem[addr1] <= sum1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1      <= 1'b0;
      first1  <= 1'b0;
      last1   <= 1'b0;
      addr1   <= '0;
      wv_q    <= 1'b0;
      waddr_q <= '0;
      wdata_q <= '0;
      v2      <= 1'b0;
      addr2   <= '0;
      ev_fwd  <= 1'b0;
      for (int c = 0; c < COLS; c++) begin
        psum1[c] <= '0;
        sum2[c]  <= '0;
      end
    end else begin
      v1     <= in_valid;
      first1 <= first;
      last1  <= last;
      addr1  <= addr;
      for (int c = 0; c < COLS; c++) psum1[c] <= ACC_W'(psum[c]);
      wv_q    <= v1;
      waddr_q <= addr1;
      wdata_q <= sum1;
      ev_fwd  <= fwd;
      v2      <= v1 && last1;
      addr2   <= addr1;
      for (int c = 0; c < COLS; c++) sum2[c] <= $signed(sum1[c]);
    end
  end

  // Stage 3: scale, ReLU, saturate.
  logic [EXT_W-1:0] ext_d [COLS];
  logic [NW-1:0]    n_neg_d, n_sat_d;

  always_comb begin
    n_neg_d = '0;
    n_sat_d = '0;
    for (int c = 0; c < COLS; c++) begin
      logic signed [PROD_W-1:0] p;
      p = (PROD_W'(sum2[c]) * $signed({1'b0, mult[c]})) >>> shift[c];
      if (p < 0) begin
        ext_d[c] = '0;
        n_neg_d  = n_neg_d + 1'b1;
      end else if (p > $signed(PROD_W'({EXT_W{1'b1}}))) begin
        ext_d[c] = '1;
        n_sat_d  = n_sat_d + 1'b1;
      end else begin
        ext_d[c] = p[EXT_W-1:0];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_addr  <= '0;
      n_neg     <= '0;
      n_sat     <= '0;
      for (int c = 0; c < COLS; c++) ext[c] <= '0;
    end else begin
      out_valid <= v2;
      if (v2) begin
        out_addr <= addr2;
        n_neg    <= n_neg_d;
        n_sat    <= n_sat_d;
        for (int c = 0; c < COLS; c++) ext[c] <= ext_d[c];
      end
    end
  end

endmodule
