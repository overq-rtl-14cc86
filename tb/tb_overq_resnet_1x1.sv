// tb_overq_resnet_1x1: one complete ResNet-18 style 1x1 convolution run
// through the OverQ layer engine at its default size.
//
// The layer is the 1x1 downsampling convolution in front of the third stage
// of ResNet-18: 128 input channels, 256 output channels, a 14 x 14 output
// map (196 pixels). The testbench plays the part of the sequencer that the
// engine leaves outside: the 256 outputs run as 16 column groups of 16, the
// 196 pixels as passes of at most 64 (one per accumulator entry: 64, 64, 64,
// 4), and the 128 input channels as 8 tiles of 16 rows, accumulated in the
// rescaling unit. For every (group, pass, tile) the weights are shifted in,
// the pixels of the pass are streamed back to back, and the array drains.
//
// Inputs are post-ReLU activations, max(0, g) for an approximately normal g,
// so about half are zero, quantized with a clipping threshold of 2.5
// standard deviations and OverQ-encoded (cascade factor 4, precision
// overwrite on) by a reference model kept here. Weights are random 8-bit.
// The per-column scale factor is profiled from the layer itself: it maps one
// standard deviation of the accumulated sum to 6 integer steps, so the
// output encoder sees a similar 2.5 std clipping threshold.
//
// Every output vector is compared with a model: exact dot product of the
// values the input encoding represents, (acc * mult) >>> shift, ReLU,
// saturation and the reference OverQ encoding, including its event counts,
// and it must appear ROWS + COLS + 4 cycles after its last tile entered.
// Range overwrite, precision overwrite, cascading, tile accumulation and ReLU
// must each occur. Input and output outlier coverage and the total cycle
// count are printed.
module tb_overq_resnet_1x1;
  import overq_pkg::*;

  localparam int ROWS    = DEF_ROWS;
  localparam int COLS    = DEF_COLS;
  localparam int B       = DEF_ACT_W;
  localparam int W_W     = DEF_W_W;
  localparam int DEPTH   = DEF_ACC_DEPTH;
  localparam int SCALE_W = DEF_SCALE_W;
  localparam int SHIFT_W = DEF_SHIFT_W;
  localparam int CMAX    = DEF_CASC_MAX;
  localparam int AW      = $clog2(DEPTH);
  localparam int EXT_W   = 3 * B;
  localparam int CW      = $clog2(CMAX + 1);
  localparam int NW      = $clog2(COLS + 1);
  localparam int LAT     = ROWS + COLS + 4;

  localparam int CIN     = 128;
  localparam int COUT    = 256;
  localparam int NPIX    = 14 * 14;
  localparam int KT      = CIN / ROWS;                // input-channel tiles
  localparam int NG      = COUT / COLS;               // output column groups
  localparam int NPASS   = (NPIX + DEPTH - 1) / DEPTH;
  localparam int SHIFT   = 20;
  localparam real CLIP   = 2.5;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [CW-1:0]         casc;
  logic                  pr_en;
  logic [SCALE_W-1:0]    mult      [COLS];
  logic [SHIFT_W-1:0]    shift     [COLS];
  logic                  wl_en;
  logic signed [W_W-1:0] wl_data   [COLS];
  logic                  in_valid;
  logic [B-1:0]          in_code   [ROWS];
  oq_state_e             in_state  [ROWS];
  logic [AW-1:0]         in_addr;
  logic                  in_first, in_last;
  logic                  out_valid;
  logic [AW-1:0]         out_addr;
  logic [B-1:0]          out_code  [COLS];
  oq_state_e             out_state [COLS];
  logic [EXT_W-1:0]      out_ext   [COLS];
  logic [NW-1:0]         out_n_outlier, out_n_covered, out_n_cascaded, out_n_precision;
  logic [NW-1:0]         out_n_neg, out_n_sat;
  logic                  out_ev_fwd;

  overq_accel dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // ---------------------------------------------------------------- reference
  // OverQ encoding of a 16-lane vector (sequential scan).
  typedef struct {
    int     code [16];
    int     st   [16];
    longint eff  [16];   // represented value, units of 2^-B
    int     nout, ncov, ncas, npr;
  } enc_t;

  function automatic enc_t ref_encode(input int ext [16], input int c, input bit pr);
    enc_t e;
    int i, found;
    int lim = (1 << B) - 1;
    int iv [16], fv [16];
    e.nout = 0; e.ncov = 0; e.ncas = 0; e.npr = 0;
    for (int j = 0; j < 16; j++) begin
      iv[j] = ext[j] >> B;
      fv[j] = ext[j] % (1 << B);
      e.code[j] = 0; e.st[j] = OQ_NONE; e.eff[j] = 0;
      if (iv[j] > lim) e.nout++;
    end
    i = 0;
    while (i < 16) begin
      if (iv[i] > lim && c > 0) begin
        found = 0;
        for (int k = 1; k <= c && i + k < 16; k++) if (iv[i + k] == 0) begin found = k; break; end
        if (found > 0) begin
          e.code[i] = iv[i] % (1 << B);
          e.code[i + 1] = iv[i] / (1 << B);
          e.st[i + 1] = OQ_RO;
          e.eff[i] = longint'(iv[i]) << B;
          for (int m = 2; m <= found; m++) begin
            automatic int v = iv[i + m - 1] > lim ? lim : iv[i + m - 1];
            e.code[i + m] = v;
            e.st[i + m] = OQ_CASC;
            e.eff[i + m - 1] = longint'(v) << B;
          end
          e.ncov++;
          if (found > 1) e.ncas++;
          i = i + found + 1;
          continue;
        end
      end
      if (iv[i] <= lim && pr && i + 1 < 16 && iv[i + 1] == 0) begin
        e.code[i] = iv[i];
        e.code[i + 1] = fv[i];
        e.st[i + 1] = OQ_PR;
        e.eff[i] = (longint'(iv[i]) << B) + fv[i];
        e.npr++;
        i = i + 2;
        continue;
      end
      e.code[i] = iv[i] > lim ? lim : iv[i];
      e.eff[i] = longint'(e.code[i]) << B;
      i++;
    end
    return e;
  endfunction

  function automatic real gauss();
    real s = 0.0;
    for (int k = 0; k < 12; k++) s += real'($urandom) / 4294967296.0;
    return s - 6.0;
  endfunction

  // ---------------------------------------------------------------- layer data
  int     Wt   [CIN][COUT];
  enc_t   xin  [NPIX][KT];      // encoded input slots per pixel and tile
  longint acc  [NPIX][COUT];    // exact pre-scale sums
  int     mults [COUT];
  enc_t   xout [NPIX][NG];      // expected encoded outputs
  int     xext [NPIX][COUT];    // expected rescaled values
  int     due  [DEPTH];
  int     cur_g, cur_base, nseen;

  // statistics and mechanism counters
  int in_out, in_cov, out_out, out_cov;
  int m_ro, m_pr, m_casc, m_accum, m_relu, m_sat;

  always @(negedge clk) if (rst_n && out_valid) begin
    int a, p;
    a = int'(out_addr);
    p = cur_base + a;
    nseen++;
    check("latency", cyc, due[a]);
    for (int c = 0; c < COLS; c++) begin
      check($sformatf("px %0d ch %0d ext", p, cur_g * COLS + c), out_ext[c], xext[p][cur_g * COLS + c]);
      check($sformatf("px %0d ch %0d code", p, cur_g * COLS + c), out_code[c], xout[p][cur_g].code[c]);
      check($sformatf("px %0d ch %0d state", p, cur_g * COLS + c), out_state[c], xout[p][cur_g].st[c]);
      if (out_state[c] == OQ_RO)   m_ro++;
      if (out_state[c] == OQ_PR)   m_pr++;
      if (out_state[c] == OQ_CASC) m_casc++;
    end
    check("n_outlier", out_n_outlier, xout[p][cur_g].nout);
    check("n_covered", out_n_covered, xout[p][cur_g].ncov);
    check("n_cascaded", out_n_cascaded, xout[p][cur_g].ncas);
    check("n_precision", out_n_precision, xout[p][cur_g].npr);
    out_out += out_n_outlier;
    out_cov += out_n_covered;
    m_relu  += out_n_neg;
    m_sat   += out_n_sat;
  end

  task automatic load_tile(input int g, input int t);
    for (int r = ROWS - 1; r >= 0; r--) begin
      @(negedge clk);
      wl_en = 1'b1;
      for (int c = 0; c < COLS; c++) wl_data[c] = W_W'(Wt[t * ROWS + r][g * COLS + c]);
    end
    @(negedge clk);
    wl_en = 1'b0;
  endtask

  task automatic run_pass(input int g, input int base, input int np);
    cur_g = g; cur_base = base; nseen = 0;
    for (int t = 0; t < KT; t++) begin
      load_tile(g, t);
      for (int a = 0; a < np; a++) begin
        in_valid = 1'b1;
        in_addr  = AW'(a);
        in_first = (t == 0);
        in_last  = (t == KT - 1);
        if (t > 0) m_accum++;
        for (int r = 0; r < ROWS; r++) begin
          in_code[r]  = B'(xin[base + a][t].code[r]);
          in_state[r] = oq_state_e'(xin[base + a][t].st[r]);
        end
        if (t == KT - 1) due[a] = cyc + LAT;
        @(negedge clk);
      end
      in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0;
      repeat (ROWS + COLS + 2) @(negedge clk);
    end
    repeat (LAT + 2) @(negedge clk);
    check($sformatf("outputs of group %0d pass at %0d", g, base), nseen, np);
  endtask

  initial begin
    int ext [16];
    int t0;
    real step, v, s1, s2, sd;
    wl_en = 1'b0; in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0; in_addr = '0;
    for (int r = 0; r < ROWS; r++) begin in_code[r] = '0; in_state[r] = OQ_NONE; end
    for (int c = 0; c < COLS; c++) begin
      wl_data[c] = '0; mult[c] = '0; shift[c] = SHIFT_W'(SHIFT);
    end
    casc = CW'(CMAX); pr_en = 1'b1;
    in_out = 0; in_cov = 0; out_out = 0; out_cov = 0;
    m_ro = 0; m_pr = 0; m_casc = 0; m_accum = 0; m_relu = 0; m_sat = 0;

    // weights and quantized, encoded inputs
    for (int k = 0; k < CIN; k++)
      for (int o = 0; o < COUT; o++) Wt[k][o] = $urandom_range(0, 255) - 128;
    step = CLIP / real'((1 << B) - 1);
    for (int p = 0; p < NPIX; p++)
      for (int t = 0; t < KT; t++) begin
        for (int r = 0; r < ROWS; r++) begin
          automatic longint q;
          v = gauss();
          q = v > 0.0 ? longint'($floor(v / step * real'(1 << B))) : 0;
          if (q > (1 << EXT_W) - 1) q = (1 << EXT_W) - 1;
          ext[r] = int'(q);
        end
        xin[p][t] = ref_encode(ext, CMAX, 1'b1);
        in_out += xin[p][t].nout;
        in_cov += xin[p][t].ncov;
      end

    // exact sums and profiled scale factors (one std -> 6 integer steps)
    for (int o = 0; o < COUT; o++) begin
      s1 = 0.0; s2 = 0.0;
      for (int p = 0; p < NPIX; p++) begin
        acc[p][o] = 0;
        for (int k = 0; k < CIN; k++)
          acc[p][o] += xin[p][k / ROWS].eff[k % ROWS] * Wt[k][o];
        s1 += real'(acc[p][o]);
        s2 += real'(acc[p][o]) * real'(acc[p][o]);
      end
      sd = $sqrt(s2 / NPIX - (s1 / NPIX) * (s1 / NPIX));
      mults[o] = int'(6.0 * real'(1 << B) * real'(1 << SHIFT) / sd);
      if (mults[o] < 1) mults[o] = 1;
      if (mults[o] > (1 << SCALE_W) - 1) mults[o] = (1 << SCALE_W) - 1;
      for (int p = 0; p < NPIX; p++) begin
        automatic longint y = (acc[p][o] * longint'(mults[o])) >>> SHIFT;
        if (y < 0) y = 0;
        if (y > (1 << EXT_W) - 1) y = (1 << EXT_W) - 1;
        xext[p][o] = int'(y);
      end
    end
    for (int p = 0; p < NPIX; p++)
      for (int g = 0; g < NG; g++) begin
        for (int c = 0; c < COLS; c++) ext[c] = xext[p][g * COLS + c];
        xout[p][g] = ref_encode(ext, CMAX, 1'b1);
      end

    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    t0 = cyc;
    for (int g = 0; g < NG; g++) begin
      for (int c = 0; c < COLS; c++) mult[c] = SCALE_W'(mults[g * COLS + c]);
      for (int pp = 0; pp < NPASS; pp++) begin
        automatic int base = pp * DEPTH;
        automatic int np = (NPIX - base < DEPTH) ? NPIX - base : DEPTH;
        run_pass(g, base, np);
      end
    end

    $display("layer %0d -> %0d channels, %0d pixels: %0d cycles (%0d MACs)",
             CIN, COUT, NPIX, cyc - t0, CIN * COUT * NPIX);
    $display("input outliers %0d covered %0d (%0.1f %%), output outliers %0d covered %0d (%0.1f %%)",
             in_out, in_cov, 100.0 * in_cov / (in_out > 0 ? in_out : 1),
             out_out, out_cov, 100.0 * out_cov / (out_out > 0 ? out_out : 1));
    $display("output states: RO %0d, PR %0d, cascade %0d; accumulating tiles %0d, ReLU %0d, saturated %0d",
             m_ro, m_pr, m_casc, m_accum, m_relu, m_sat);
    if (m_ro == 0)    begin failures++; $display("FAIL no range overwrite"); end
    if (m_pr == 0)    begin failures++; $display("FAIL no precision overwrite"); end
    if (m_casc == 0)  begin failures++; $display("FAIL no cascade"); end
    if (m_accum == 0) begin failures++; $display("FAIL no tile accumulation"); end
    if (m_relu == 0)  begin failures++; $display("FAIL no ReLU clamp"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
