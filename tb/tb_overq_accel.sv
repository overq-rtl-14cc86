// tb_overq_accel: end-to-end test of the OverQ layer engine at its default
// size (16 x 16 array, 4-bit activations, 8-bit weights, cascade factor 4).
//
// Layer 1: a 1x1 convolution with 48 input channels (three tiles of 16) and
// 16 output channels over 64 pixels (every accumulator entry). Random high-precision input activations
// (many zeros, some outliers) are OverQ-encoded here by a reference model,
// per tile of 16 channels. For every tile the weights are shifted in, the
// pixels are streamed back to back, and the array is drained before the next
// load. The expected output of each pixel is worked out here from the values
// the encoding represents: exact dot product, (acc * mult) >>> shift, ReLU,
// saturation, then the same reference OverQ encoding of the 16 results.
// Layer 2 feeds the encoded outputs of layer 1 straight back in as inputs
// (16 channels, one tile) with new weights and another OverQ configuration
// (mode switch: cascade factor 1, no precision overwrite).
//
// Checked: rescaled values, slot codes, states, event counts and addresses of
// every output vector, and that it appears ROWS + COLS + 4 cycles after its
// last tile entered. Each mechanism (range overwrite, precision overwrite,
// cascading on the input and on the output side, outliers left clipped,
// accumulation over tiles, ReLU, saturation, mode switch) must occur at least
// once or a failure is counted.
module tb_overq_accel;
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
  localparam int NP      = DEPTH;         // pixels: one per accumulator entry
  localparam int KT      = 3;             // input-channel tiles of layer 1
  localparam int KMAX    = KT * ROWS;

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
    repeat (20000) @(posedge clk);
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

  // ---------------------------------------------------------------- state
  int     Wt   [KMAX][COLS];
  enc_t   xin  [NP][KT];        // encoded input slots per pixel and tile
  longint acc  [NP][COLS];
  enc_t   xout [NP];            // expected encoded outputs
  int     xext [NP][COLS];      // expected rescaled values
  int     got_code [NP][COLS];  // captured outputs of layer 1
  int     got_st   [NP][COLS];
  int     due  [NP];
  int     nseen;
  int     cur_c;
  bit     cur_pr;

  // mechanism counters
  int m_in_ro, m_in_pr, m_in_casc, m_out_ro, m_out_pr, m_out_casc, m_clip;
  int m_accum, m_relu, m_sat, m_mode;

  always @(negedge clk) if (rst_n && out_valid) begin
    int p;
    p = int'(out_addr);
    nseen++;
    check("latency", cyc, due[p]);
    for (int c = 0; c < COLS; c++) begin
      check($sformatf("px %0d ext[%0d]", p, c), out_ext[c], xext[p][c]);
      check($sformatf("px %0d code[%0d]", p, c), out_code[c], xout[p].code[c]);
      check($sformatf("px %0d state[%0d]", p, c), out_state[c], xout[p].st[c]);
      got_code[p][c] = out_code[c];
      got_st[p][c] = out_state[c];
      if (out_state[c] == OQ_RO)   m_out_ro++;
      if (out_state[c] == OQ_PR)   m_out_pr++;
      if (out_state[c] == OQ_CASC) m_out_casc++;
    end
    check("n_outlier", out_n_outlier, xout[p].nout);
    check("n_covered", out_n_covered, xout[p].ncov);
    check("n_cascaded", out_n_cascaded, xout[p].ncas);
    check("n_precision", out_n_precision, xout[p].npr);
    if (out_n_outlier > out_n_covered) m_clip++;
    m_relu += out_n_neg;
    m_sat  += out_n_sat;
  end

  task automatic load_tile(input int t);
    for (int r = ROWS - 1; r >= 0; r--) begin
      @(negedge clk);
      wl_en = 1'b1;
      for (int c = 0; c < COLS; c++) wl_data[c] = W_W'(Wt[t * ROWS + r][c]);
    end
    @(negedge clk);
    wl_en = 1'b0;
  endtask

  task automatic expect_pixel(input int p, input int kt);
    int e [16];
    for (int c = 0; c < COLS; c++) begin
      longint y;
      acc[p][c] = 0;
      for (int t = 0; t < kt; t++)
        for (int r = 0; r < ROWS; r++)
          acc[p][c] += xin[p][t].eff[r] * Wt[t * ROWS + r][c];
      y = (longint'(int'(acc[p][c])) * longint'(mult[c])) >>> shift[c];
      if (y < 0) y = 0;
      if (y > (1 << EXT_W) - 1) y = (1 << EXT_W) - 1;
      xext[p][c] = int'(y);
      e[c] = int'(y);
    end
    xout[p] = ref_encode(e, cur_c, cur_pr);
  endtask

  task automatic run_layer(input int kt);
    for (int t = 0; t < kt; t++) begin
      load_tile(t);
      for (int p = 0; p < NP; p++) begin
        in_valid = 1'b1;
        in_addr  = AW'(p);
        in_first = (t == 0);
        in_last  = (t == kt - 1);
        if (t > 0) m_accum++;
        for (int r = 0; r < ROWS; r++) begin
          in_code[r]  = B'(xin[p][t].code[r]);
          in_state[r] = oq_state_e'(xin[p][t].st[r]);
          if (in_state[r] == OQ_RO)   m_in_ro++;
          if (in_state[r] == OQ_PR)   m_in_pr++;
          if (in_state[r] == OQ_CASC) m_in_casc++;
        end
        if (t == kt - 1) due[p] = cyc + LAT;
        @(negedge clk);
      end
      in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0;
      repeat (ROWS + COLS + 2) @(negedge clk);
    end
    repeat (LAT + 2) @(negedge clk);
  endtask

  initial begin
    int ext [16];
    wl_en = 1'b0; in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0; in_addr = '0;
    for (int r = 0; r < ROWS; r++) begin in_code[r] = '0; in_state[r] = OQ_NONE; end
    for (int c = 0; c < COLS; c++) begin
      wl_data[c] = '0;
      mult[c]  = SCALE_W'($urandom_range(700, 2200));
      shift[c] = SHIFT_W'(20);
    end
    mult[0] = SCALE_W'(30000);   // drives column 0 into saturation
    casc = CW'(CMAX); pr_en = 1'b1;
    cur_c = CMAX; cur_pr = 1'b1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // ------------------------------------------------------------ layer 1
    for (int k = 0; k < KMAX; k++)
      for (int c = 0; c < COLS; c++) Wt[k][c] = $urandom_range(0, 255) - 128;
    for (int p = 0; p < NP; p++)
      for (int t = 0; t < KT; t++) begin
        for (int r = 0; r < ROWS; r++) begin
          automatic int sel = $urandom_range(0, 99);
          automatic int iv;
          if (sel < 40)      iv = 0;
          else if (sel < 52) iv = $urandom_range(16, 60);
          else if (sel < 56) iv = $urandom_range(61, 255);
          else               iv = $urandom_range(1, 15);
          ext[r] = (iv << B) | $urandom_range(0, (1 << B) - 1);
        end
        xin[p][t] = ref_encode(ext, CMAX, 1'b1);
      end
    for (int p = 0; p < NP; p++) expect_pixel(p, KT);
    nseen = 0;
    run_layer(KT);
    check("layer 1 outputs", nseen, NP);

    // ------------------------------------------------------------ layer 2
    // previous outputs become inputs; new weights; other OverQ mode
    for (int p = 0; p < NP; p++) begin
      for (int r = 0; r < ROWS; r++) begin
        xin[p][0].code[r] = got_code[p][r];
        xin[p][0].st[r]   = got_st[p][r];
        xin[p][0].eff[r]  = xout[p].eff[r];
      end
    end
    for (int k = 0; k < ROWS; k++)
      for (int c = 0; c < COLS; c++) Wt[k][c] = $urandom_range(0, 255) - 128;
    casc = CW'(1); pr_en = 1'b0;
    cur_c = 1; cur_pr = 1'b0;
    m_mode++;
    for (int c = 0; c < COLS; c++) mult[c] = SCALE_W'($urandom_range(1500, 5000));
    for (int p = 0; p < NP; p++) expect_pixel(p, 1);
    nseen = 0;
    run_layer(1);
    check("layer 2 outputs", nseen, NP);

    $display("mechanisms: in RO %0d, in PR %0d, in cascade %0d, out RO %0d, out PR %0d, out cascade %0d",
             m_in_ro, m_in_pr, m_in_casc, m_out_ro, m_out_pr, m_out_casc);
    $display("            clipped-outlier vectors %0d, accumulating tiles %0d, ReLU %0d, saturated %0d, mode switches %0d",
             m_clip, m_accum, m_relu, m_sat, m_mode);
    if (m_in_ro == 0)    begin failures++; $display("FAIL no input range overwrite"); end
    if (m_in_pr == 0)    begin failures++; $display("FAIL no input precision overwrite"); end
    if (m_in_casc == 0)  begin failures++; $display("FAIL no input cascade"); end
    if (m_out_ro == 0)   begin failures++; $display("FAIL no output range overwrite"); end
    if (m_out_pr == 0)   begin failures++; $display("FAIL no output precision overwrite"); end
    if (m_out_casc == 0) begin failures++; $display("FAIL no output cascade"); end
    if (m_clip == 0)     begin failures++; $display("FAIL no clipped outlier"); end
    if (m_accum == 0)    begin failures++; $display("FAIL no tile accumulation"); end
    if (m_relu == 0)     begin failures++; $display("FAIL no ReLU clamp"); end
    if (m_sat == 0)      begin failures++; $display("FAIL no saturation"); end
    if (m_mode == 0)     begin failures++; $display("FAIL no mode switch"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
