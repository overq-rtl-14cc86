// tb_overq_coverage: outlier coverage of the OverQ encoder against the
// independent-channel model P_c = 1 - (1 - p0)^c.
//
// Drives the default 16-channel, 4-bit encoder with random vectors in which
// every channel is zero with probability p0 and otherwise a small value, or
// a rare outlier (1 % of the non-zero values). The first sweep uses
// p0 = 0.5, the setting of the "theory" column of the coverage-versus-
// cascade-factor table (50.0, 75.0, 87.5, 93.8 % for c = 1..4). Three more
// sweeps use the zero fractions that table reports for its three ResNet-50
// layers (51.1, 69.1 and 30.3 %), with independent channels, since the
// layers themselves are not available. Coverage is measured for outliers far
// enough from the end of the vector that all c look-ahead channels exist,
// using the encoder's own states (an outlier at i is covered when slot i+1
// holds OQ_RO). Each measured value must lie within 3 percentage points of
// the model; the model ignores the rare case of two outliers competing for
// one zero. At every cascade factor, more zeros must give more coverage.
// Precision overwrite is on, as in the full configuration; it never takes a
// zero from an outlier.
module tb_overq_coverage;
  import overq_pkg::*;

  localparam int N     = DEF_ROWS;
  localparam int B     = DEF_ACT_W;
  localparam int CMAX  = DEF_CASC_MAX;
  localparam int EXT_W = 3 * B;
  localparam int CW    = $clog2(CMAX + 1);
  localparam int NW    = $clog2(N + 1);
  localparam int NVEC  = 80000;
  localparam int NP0   = 4;

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
    repeat (NP0 * CMAX * NVEC + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit is_out [N];
    int outl, cov;
    real meas, theory;
    automatic int p0_pm [NP0] = '{500, 511, 691, 303};   // zero probability, per mille
    real cov_at [NP0][CMAX + 1];
    casc = '0; pr_en = 1'b1; in_valid = 1'b0;
    for (int j = 0; j < N; j++) ext[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int z = 0; z < NP0; z++) begin
      $display("zero fraction %0.1f %%", p0_pm[z] / 10.0);
      for (int c = 1; c <= CMAX; c++) begin
        outl = 0; cov = 0;
        for (int t = 0; t < NVEC; t++) begin
          @(negedge clk);
          casc = CW'(c); in_valid = 1'b1;
          for (int j = 0; j < N; j++) begin
            automatic int iv;
            is_out[j] = 1'b0;
            if ($urandom_range(0, 999) < p0_pm[z]) iv = 0;
            else if ($urandom_range(0, 99) == 0) begin
              iv = $urandom_range(16, 255); is_out[j] = 1'b1;
            end else iv = $urandom_range(1, 15);
            ext[j] = EXT_W'((iv << B) | $urandom_range(0, 15));
          end
          @(posedge clk); #1;
          for (int j = 0; j + CMAX < N; j++) if (is_out[j]) begin
            outl++;
            if (state[j + 1] == OQ_RO) cov++;
          end
        end
        meas   = 100.0 * cov / outl;
        theory = 100.0 * (1.0 - ((1.0 - p0_pm[z] / 1000.0) ** c));
        cov_at[z][c] = meas;
        $display("  cascade factor %0d: outliers %0d covered %0d -> %5.1f %% (model %5.1f %%)",
                 c, outl, cov, meas, theory);
        checks++;
        if (meas < theory - 3.0 || meas > theory + 3.0) begin
          failures++;
          $display("FAIL coverage at p0=%0d/1000, c=%0d off the model", p0_pm[z], c);
        end
      end
    end
    for (int c = 1; c <= CMAX; c++) begin
      checks++;
      if (!(cov_at[3][c] < cov_at[0][c] && cov_at[0][c] < cov_at[2][c])) begin
        failures++;
        $display("FAIL coverage at c=%0d does not grow with the zero fraction", c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
