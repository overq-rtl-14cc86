// tb_overq_array: self-checking test of the OverQ systolic array.
//
// Loads a random weight matrix through the column shift-load path, then
// streams random activation vectors with random OverQ states back to back,
// skewing the rows itself (row r of a vector enters r cycles after row 0).
// Each column's result is predicted here as
//   sum_r code[r] * W[src(r)][c] * scale(state[r]),  src = r for OQ_NONE,
//   r-1 otherwise; scale = 2^B (none, cascade), 2^2B (range), 1 (precision)
// and checked in the cycle the array's timing contract names
// (ROWS + 1 + c cycles after row 0 entered). A second weight matrix is then
// loaded and checked the same way.
module tb_overq_array;
  import overq_pkg::*;

  localparam int ROWS   = DEF_ROWS;
  localparam int COLS   = DEF_COLS;
  localparam int B      = DEF_ACT_W;
  localparam int W_W    = DEF_W_W;
  localparam int PSUM_W = DEF_PSUM_W;
  localparam int NV     = 200;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [B-1:0]             x_in [ROWS];
  oq_state_e                s_in [ROWS];
  logic                     w_load;
  logic signed [W_W-1:0]    w_load_data [COLS];
  logic signed [PSUM_W-1:0] psum_out [COLS];

  overq_array dut (.*);

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

  int W  [ROWS][COLS];
  int VX [NV][ROWS];
  int VS [NV][ROWS];
  int seen [4];

  function automatic longint expect_col(int v, int c);
    longint acc = 0;
    for (int r = 0; r < ROWS; r++) begin
      int src = (VS[v][r] == OQ_NONE) ? r : r - 1;
      longint p = longint'(VX[v][r]) * W[src][c];
      case (VS[v][r])
        OQ_RO:   acc += p << (2 * B);
        OQ_PR:   acc += p;
        default: acc += p << B;
      endcase
    end
    return acc;
  endfunction

  task automatic run_pass();
    int k0;
    // load weights: the word applied last lands in row 0
    for (int r = ROWS - 1; r >= 0; r--) begin
      @(negedge clk);
      w_load = 1'b1;
      for (int c = 0; c < COLS; c++) w_load_data[c] = W_W'(W[r][c]);
    end
    @(negedge clk);
    w_load = 1'b0;
    for (int c = 0; c < COLS; c++) w_load_data[c] = '0;
    // random vectors
    for (int v = 0; v < NV; v++)
      for (int r = 0; r < ROWS; r++) begin
        VX[v][r] = $urandom_range(0, (1 << B) - 1);
        VS[v][r] = (r == 0) ? OQ_NONE : $urandom_range(0, 3);
        seen[VS[v][r]]++;
      end
    k0 = cyc;
    while (cyc - k0 < NV + ROWS + COLS + 2) begin
      for (int r = 0; r < ROWS; r++) begin
        automatic int v = cyc - k0 - r;
        if (v >= 0 && v < NV) begin
          x_in[r] = B'(VX[v][r]);
          s_in[r] = oq_state_e'(VS[v][r]);
        end else begin
          x_in[r] = '0;
          s_in[r] = OQ_NONE;
        end
      end
      for (int c = 0; c < COLS; c++) begin
        automatic int v = cyc - k0 - ROWS - 1 - c;
        if (v >= 0 && v < NV) begin
          checks++;
          if (psum_out[c] != PSUM_W'(expect_col(v, c))) begin
            failures++;
            if (failures < 10)
              $display("FAIL vector %0d col %0d: got %0d expected %0d", v, c,
                       psum_out[c], expect_col(v, c));
          end
        end
      end
      @(negedge clk);
    end
  endtask

  initial begin
    w_load = 1'b0;
    for (int r = 0; r < ROWS; r++) begin x_in[r] = '0; s_in[r] = OQ_NONE; end
    for (int c = 0; c < COLS; c++) w_load_data[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int pass = 0; pass < 2; pass++) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          W[r][c] = (pass == 0 && r == 0) ? -128 : $urandom_range(0, 255) - 128;
      run_pass();
    end
    for (int s = 0; s < 4; s++) if (seen[s] == 0) begin
      failures++; $display("FAIL state %0d never applied", s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
