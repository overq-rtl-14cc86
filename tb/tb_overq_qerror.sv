// tb_overq_qerror: quantization error of the OverQ encoder in its four
// configurations, on a bell-shaped post-ReLU activation distribution, swept
// over the clipping threshold.
//
// Activations are drawn as max(0, g) for an approximately normal g (sum of
// twelve uniforms, zero mean, unit deviation), so about half of them are
// zero, and quantized to 4 bits with a clipping threshold of 1.5, 2, 2.5 and
// 3 standard deviations. At each threshold the same vectors go through the
// default encoder as
//   baseline (no OverQ), range overwrite (c = 1), range overwrite with
//   cascading (c = 4), and full OverQ (c = 4 plus precision overwrite).
// The value each channel is represented with is recovered from the encoder's
// slots exactly as the array combines them (a channel's own slot if its state
// is OQ_NONE, plus the next slot if that one borrows this channel's weight),
// and the absolute error against the real value is summed separately for
// outliers (values the 4-bit code would clip) and the rest. Checked, at every
// threshold, as expected from how the modes work: range overwrite lowers the
// outlier error, cascading lowers it further, precision overwrite lowers the
// error of the small values, and full OverQ has the lowest total error.
// Across thresholds the baseline's outlier error must fall and its error on
// the rest must rise, the clipping-versus-precision trade-off that OverQ
// relaxes. The baseline here uses truncation, as the encoder does.
module tb_overq_qerror;
  import overq_pkg::*;

  localparam int N     = DEF_ROWS;
  localparam int B     = DEF_ACT_W;
  localparam int CMAX  = DEF_CASC_MAX;
  localparam int EXT_W = 3 * B;
  localparam int CW    = $clog2(CMAX + 1);
  localparam int NW    = $clog2(N + 1);
  localparam int NVEC  = 8000;
  localparam int NTH   = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [CW-1:0]    casc;
  logic             pr_en, in_valid, out_valid;
  logic [EXT_W-1:0] ext   [N];
  logic [B-1:0]     code  [N];
  oq_state_e        state [N];
  logic [NW-1:0]    n_outlier, n_covered, n_cascaded, n_precision;

  overq_encoder u_dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (4 * NTH * NVEC + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real vals [NVEC][N];
  real err_small [NTH][4], err_large [NTH][4];

  function automatic real gauss();
    real s = 0.0;
    for (int k = 0; k < 12; k++) s += real'($urandom) / 4294967296.0;
    return s - 6.0;
  endfunction

  task automatic check_lt(input string what, input real a, input real b);
    checks++;
    if (!(a < b)) begin
      failures++;
      $display("FAIL %s: %f is not below %f", what, a, b);
    end
  endtask

  initial begin
    real step, rep, v;
    automatic real clips [NTH] = '{1.5, 2.0, 2.5, 3.0};
    automatic int mc [4] = '{0, 1, CMAX, CMAX};
    automatic bit mp [4] = '{1'b0, 1'b0, 1'b0, 1'b1};
    automatic string names [4] = '{"baseline", "range overwrite", "+ cascading", "full OverQ"};
    for (int t = 0; t < NVEC; t++)
      for (int j = 0; j < N; j++) begin
        v = gauss();
        vals[t][j] = v > 0.0 ? v : 0.0;
      end
    casc = '0; pr_en = 1'b0; in_valid = 1'b0;
    for (int j = 0; j < N; j++) ext[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < NTH; k++) begin
      step = clips[k] / real'((1 << B) - 1);
      $display("clipping threshold %.1f std", clips[k]);
      for (int m = 0; m < 4; m++) begin
        err_small[k][m] = 0.0; err_large[k][m] = 0.0;
        for (int t = 0; t < NVEC; t++) begin
          @(negedge clk);
          casc = CW'(mc[m]); pr_en = mp[m]; in_valid = 1'b1;
          for (int j = 0; j < N; j++) begin
            automatic longint q = longint'($floor(vals[t][j] / step * real'(1 << B)));
            if (q > (1 << EXT_W) - 1) q = (1 << EXT_W) - 1;
            ext[j] = EXT_W'(q);
          end
          @(posedge clk); #1;
          for (int j = 0; j < N; j++) begin
            rep = (state[j] == OQ_NONE) ? real'(code[j]) : 0.0;
            if (j + 1 < N) begin
              case (state[j + 1])
                OQ_RO:   rep += real'(code[j + 1]) * real'(1 << B);
                OQ_PR:   rep += real'(code[j + 1]) / real'(1 << B);
                OQ_CASC: rep += real'(code[j + 1]);
                default: ;
              endcase
            end
            rep = rep * step;
            v = (vals[t][j] > rep) ? vals[t][j] - rep : rep - vals[t][j];
            if (vals[t][j] >= step * real'(1 << B)) err_large[k][m] += v;
            else                                    err_small[k][m] += v;
          end
        end
        $display("  %-16s error on outliers %8.1f  on the rest %8.1f  total %8.1f",
                 names[m], err_large[k][m], err_small[k][m], err_large[k][m] + err_small[k][m]);
      end
      check_lt("RO lowers outlier error", err_large[k][1], err_large[k][0]);
      check_lt("cascading lowers outlier error further", err_large[k][2], err_large[k][1]);
      check_lt("PR lowers error on small values", err_small[k][3], err_small[k][2]);
      check_lt("full OverQ lowest total", err_large[k][3] + err_small[k][3],
               err_large[k][2] + err_small[k][2]);
      check_lt("full OverQ below baseline", err_large[k][3] + err_small[k][3],
               err_large[k][0] + err_small[k][0]);
      if (k > 0) begin
        check_lt("baseline outlier error falls with the threshold", err_large[k][0], err_large[k-1][0]);
        check_lt("baseline error on the rest rises with the threshold", err_small[k-1][0], err_small[k][0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
