// tb_overq_encoder: self-checking test of the OverQ state computation.
//
// Two instances are tested:
//   * a 2-bit, 4-channel encoder driven with the three numeric examples of
//     the OverQ method illustrations (range overwrite, precision overwrite,
//     cascading with c = 3), whose slot codes and states are known exactly;
//   * the default 16-channel, 4-bit encoder driven with random vectors rich
//     in zeros and outliers under every cascade factor 0..4 with and without
//     precision overwrite, compared against a reference model written here
//     as a plain sequential scan (take the channel, look ahead for a zero,
//     jump past the slots it used). Besides codes, states and counts, the
//     test decodes the slots the way the array does (own/upper weight, shift)
//     and checks that a random weighted sum of the slots equals the weighted
//     sum of the values the encoding claims to represent.
module tb_overq_encoder;
  import overq_pkg::*;

  localparam int N     = DEF_ROWS;
  localparam int B     = DEF_ACT_W;
  localparam int CMAX  = DEF_CASC_MAX;
  localparam int EXT_W = 3 * B;
  localparam int CW    = $clog2(CMAX + 1);
  localparam int NW    = $clog2(N + 1);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ small DUT
  logic [CW-1:0] s_casc;
  logic          s_pr, s_iv, s_ov;
  logic [5:0]    s_ext [4];
  logic [1:0]    s_code [4];
  oq_state_e     s_state [4];
  logic [2:0]    s_no, s_nc, s_ncas, s_npr;

  overq_encoder #(.N(4), .ACT_W(2), .CASC_MAX(CMAX)) u_small (
    .clk(clk), .rst_n(rst_n), .casc(s_casc), .pr_en(s_pr), .in_valid(s_iv),
    .ext(s_ext), .out_valid(s_ov), .code(s_code), .state(s_state),
    .n_outlier(s_no), .n_covered(s_nc), .n_cascaded(s_ncas), .n_precision(s_npr)
  );

  // ------------------------------------------------------------ full DUT
  logic [CW-1:0]    casc;
  logic             pr_en, in_valid, out_valid;
  logic [EXT_W-1:0] ext   [N];
  logic [B-1:0]     code  [N];
  oq_state_e        state [N];
  logic [NW-1:0]    n_outlier, n_covered, n_cascaded, n_precision;

  overq_encoder u_dut (
    .clk(clk), .rst_n(rst_n), .casc(casc), .pr_en(pr_en), .in_valid(in_valid),
    .ext(ext), .out_valid(out_valid), .code(code), .state(state),
    .n_outlier(n_outlier), .n_covered(n_covered), .n_cascaded(n_cascaded),
    .n_precision(n_precision)
  );

  // Reference model: sequential scan.
  int r_code [N];
  int r_state[N];
  int r_nout, r_ncov, r_ncas, r_npr;
  // value each channel is represented with, in units of 2^-B
  longint r_eff [N];

  function automatic void ref_encode(input int iv [N], input int fv [N], input int c, input bit pr);
    int i, k, found;
    int lim = (1 << B) - 1;
    r_nout = 0; r_ncov = 0; r_ncas = 0; r_npr = 0;
    for (int j = 0; j < N; j++) begin
      r_code[j] = 0; r_state[j] = OQ_NONE; r_eff[j] = 0;
      if (iv[j] > lim) r_nout++;
    end
    i = 0;
    while (i < N) begin
      if (iv[i] > lim && c > 0) begin
        found = 0;
        for (k = 1; k <= c && i + k < N; k++) if (iv[i + k] == 0) begin found = k; break; end
        if (found > 0) begin
          r_code[i] = iv[i] % (1 << B);
          r_code[i + 1] = iv[i] / (1 << B);
          r_state[i + 1] = OQ_RO;
          r_eff[i] = longint'(iv[i]) << B;
          for (int m = 2; m <= found; m++) begin
            int v = iv[i + m - 1] > lim ? lim : iv[i + m - 1];
            r_code[i + m]  = v;
            r_state[i + m] = OQ_CASC;
            r_eff[i + m - 1] = longint'(v) << B;
          end
          r_ncov++;
          if (found > 1) r_ncas++;
          i = i + found + 1;
          continue;
        end
      end
      if (iv[i] <= lim && pr && i + 1 < N && iv[i + 1] == 0) begin
        r_code[i] = iv[i];
        r_code[i + 1] = fv[i];
        r_state[i + 1] = OQ_PR;
        r_eff[i] = (longint'(iv[i]) << B) + fv[i];
        r_npr++;
        i = i + 2;
        continue;
      end
      r_code[i] = iv[i] > lim ? lim : iv[i];
      r_eff[i] = longint'(r_code[i]) << B;
      i++;
    end
  endfunction

  int hist_state [4];
  int hist_mode [5];

  initial begin
    int iv [N], fv [N];
    int wts [N];
    int c;
    bit pr;
    longint dot_hw, dot_ref;
    s_casc = '0; s_pr = 1'b0; s_iv = 1'b0;
    for (int j = 0; j < 4; j++) s_ext[j] = '0;
    casc = '0; pr_en = 1'b0; in_valid = 1'b0;
    for (int j = 0; j < N; j++) ext[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // ---- Example (a): 11, 111, 00, 10, range overwrite
    @(negedge clk);
    s_casc = 1; s_pr = 1'b1; s_iv = 1'b1;
    s_ext[0] = {4'd3, 2'b00}; s_ext[1] = {4'd7, 2'b00}; s_ext[2] = '0; s_ext[3] = {4'd2, 2'b00};
    @(posedge clk); #1;
    check("ex a valid", s_ov, 1);
    check("ex a code0", s_code[0], 2'b11); check("ex a code1", s_code[1], 2'b11);
    check("ex a code2", s_code[2], 2'b01); check("ex a code3", s_code[3], 2'b10);
    check("ex a st0", s_state[0], OQ_NONE); check("ex a st1", s_state[1], OQ_NONE);
    check("ex a st2", s_state[2], OQ_RO);   check("ex a st3", s_state[3], OQ_NONE);
    // ---- Example (b): 11, 11.1, 00, 10, precision overwrite
    @(negedge clk);
    s_ext[0] = {4'd3, 2'b00}; s_ext[1] = {4'd3, 2'b10}; s_ext[2] = '0; s_ext[3] = {4'd2, 2'b00};
    @(posedge clk); #1;
    check("ex b code1", s_code[1], 2'b11); check("ex b code2", s_code[2], 2'b10);
    check("ex b st2", s_state[2], OQ_PR);  check("ex b st1", s_state[1], OQ_NONE);
    check("ex b npr", s_npr, 1);
    // ---- Example (c): 111, 11, 10, 00, cascade factor 3
    @(negedge clk);
    s_casc = 3;
    s_ext[0] = {4'd7, 2'b00}; s_ext[1] = {4'd3, 2'b00}; s_ext[2] = {4'd2, 2'b00}; s_ext[3] = '0;
    @(posedge clk); #1;
    check("ex c code0", s_code[0], 2'b11); check("ex c code1", s_code[1], 2'b01);
    check("ex c code2", s_code[2], 2'b11); check("ex c code3", s_code[3], 2'b10);
    check("ex c st0", s_state[0], OQ_NONE); check("ex c st1", s_state[1], OQ_RO);
    check("ex c st2", s_state[2], OQ_CASC); check("ex c st3", s_state[3], OQ_CASC);
    check("ex c ncov", s_nc, 1); check("ex c ncas", s_ncas, 1);
    // same with cascade factor 2: the zero is out of reach, outlier clipped
    @(negedge clk);
    s_casc = 2;
    @(posedge clk); #1;
    check("ex c2 code0", s_code[0], 2'b11); check("ex c2 st1", s_state[1], OQ_NONE);
    check("ex c2 ncov", s_nc, 0); check("ex c2 nout", s_no, 1);
    @(negedge clk);
    s_iv = 1'b0;

    // ---- 8-bit outlier 0xA7 over a zero in the 4-bit encoder
    for (int j = 0; j < N; j++) ext[j] = {8'd5, 4'd0};
    ext[1] = {8'hA7, 4'd0}; ext[2] = '0;
    casc = 1; pr_en = 1'b0; in_valid = 1'b1;
    @(posedge clk); #1;
    check("msb code1", code[1], 4'h7); check("msb code2", code[2], 4'hA);
    check("msb st2", state[2], OQ_RO);

    // ---- random vectors
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      c  = t % (CMAX + 1);
      pr = (t / (CMAX + 1)) % 2;
      for (int j = 0; j < N; j++) begin
        automatic int sel = $urandom_range(0, 99);
        if (sel < 40)      iv[j] = 0;
        else if (sel < 58) iv[j] = $urandom_range(1 << B, (1 << (2 * B)) - 1);
        else               iv[j] = $urandom_range(1, (1 << B) - 1);
        fv[j] = $urandom_range(0, (1 << B) - 1);
        ext[j] = EXT_W'((iv[j] << B) | fv[j]);
        wts[j] = $urandom_range(0, 255) - 128;
      end
      casc = CW'(c); pr_en = pr; in_valid = 1'b1;
      ref_encode(iv, fv, c, pr);
      @(posedge clk); #1;
      check("rand valid", out_valid, 1);
      for (int j = 0; j < N; j++) begin
        check($sformatf("rand code[%0d]", j), code[j], r_code[j]);
        check($sformatf("rand state[%0d]", j), state[j], r_state[j]);
        hist_state[state[j]]++;
      end
      check("n_outlier", n_outlier, r_nout);
      check("n_covered", n_covered, r_ncov);
      check("n_cascaded", n_cascaded, r_ncas);
      check("n_precision", n_precision, r_npr);
      // array-style decode of the hardware slots against represented values
      dot_hw = 0; dot_ref = 0;
      for (int j = 0; j < N; j++) begin
        automatic int wsel = (state[j] == OQ_NONE || j == 0) ? wts[j] : wts[j - 1];
        automatic longint p = longint'(code[j]) * wsel;
        case (state[j])
          OQ_RO:   dot_hw += p << (2 * B);
          OQ_PR:   dot_hw += p;
          default: dot_hw += p << B;
        endcase
        dot_ref += r_eff[j] * wts[j];
      end
      check("decoded dot product", dot_hw, dot_ref);
      if (r_ncov > 0) hist_mode[c]++;
    end
    for (int s = 0; s < 4; s++) if (hist_state[s] == 0) begin
      failures++; $display("FAIL state %0d never produced", s);
    end
    for (int m = 1; m <= CMAX; m++) if (hist_mode[m] == 0) begin
      failures++; $display("FAIL cascade factor %0d never covered an outlier", m);
    end
    $display("states none/ro/pr/casc: %0d %0d %0d %0d", hist_state[0], hist_state[1],
             hist_state[2], hist_state[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
