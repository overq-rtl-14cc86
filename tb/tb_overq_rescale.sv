// tb_overq_rescale: self-checking test of the accumulation and rescaling unit.
//
// Drives random column results for a set of output pixels, each split into
// 1..4 tiles, in three orders: every tile of a pixel back to back (uses the
// read-after-write forwarding), tiles of several pixels interleaved, and
// single-tile pixels. A model kept here accumulates per pixel and column and
// applies (acc * mult) >>> shift, ReLU and saturation to 3*ACT_W bits. Each
// emitted vector is compared with the model, and must appear exactly three
// cycles after its last tile entered. Per-column scale factors are random.
module tb_overq_rescale;
  import overq_pkg::*;

  localparam int COLS    = DEF_COLS;
  localparam int B       = DEF_ACT_W;
  localparam int PSUM_W  = DEF_PSUM_W;
  localparam int DEPTH   = DEF_ACC_DEPTH;
  localparam int SCALE_W = DEF_SCALE_W;
  localparam int SHIFT_W = DEF_SHIFT_W;
  localparam int AW      = $clog2(DEPTH);
  localparam int EXT_W   = 3 * B;
  localparam int NW      = $clog2(COLS + 1);
  localparam int LAT     = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [SCALE_W-1:0]       mult  [COLS];
  logic [SHIFT_W-1:0]       shift [COLS];
  logic                     in_valid, first, last;
  logic signed [PSUM_W-1:0] psum  [COLS];
  logic [AW-1:0]            addr;
  logic                     out_valid;
  logic [AW-1:0]            out_addr;
  logic [EXT_W-1:0]         ext   [COLS];
  logic [NW-1:0]            n_neg, n_sat;
  logic                     ev_fwd;

  overq_rescale dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
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

  longint acc [DEPTH][COLS];
  typedef struct {
    int     due;
    int     a;
    longint val [COLS];
    int     nneg, nsat;
  } exp_t;
  exp_t expq [$];
  int n_fwd = 0, n_negs = 0, n_sats = 0, n_out = 0;

  // Output checker.
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      exp_t e;
      n_out++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        e = expq.pop_front();
        check("latency", cyc, e.due);
        check("out_addr", out_addr, e.a);
        for (int c = 0; c < COLS; c++) check($sformatf("ext[%0d]", c), ext[c], e.val[c]);
        check("n_neg", n_neg, e.nneg);
        check("n_sat", n_sat, e.nsat);
      end
    end
    if (ev_fwd) n_fwd++;
  end

  task automatic send(input int a, input bit f, input bit l);
    exp_t e;
    in_valid = 1'b1; addr = AW'(a); first = f; last = l;
    for (int c = 0; c < COLS; c++) begin
      automatic longint p = longint'($urandom_range(0, 1 << 19)) - (1 << 17);
      psum[c] = PSUM_W'(p);
      acc[a][c] = (f ? 0 : acc[a][c]) + p;
    end
    if (l) begin
      e.due = cyc + LAT; e.a = a; e.nneg = 0; e.nsat = 0;
      for (int c = 0; c < COLS; c++) begin
        automatic longint y = (acc[a][c] * longint'(mult[c])) >>> shift[c];
        if (y < 0) begin y = 0; e.nneg++; end
        else if (y > (1 << EXT_W) - 1) begin y = (1 << EXT_W) - 1; e.nsat++; end
        e.val[c] = y;
      end
      n_negs += e.nneg; n_sats += e.nsat;
      expq.push_back(e);
    end
    @(negedge clk);
    in_valid = 1'b0; first = 1'b0; last = 1'b0;
  endtask

  initial begin
    in_valid = 1'b0; first = 1'b0; last = 1'b0; addr = '0;
    for (int c = 0; c < COLS; c++) begin
      psum[c] = '0;
      mult[c] = SCALE_W'($urandom_range(1, (1 << SCALE_W) - 1));
      shift[c] = SHIFT_W'($urandom_range(19, 26));
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // back to back tiles of one pixel
    for (int px = 0; px < 40; px++) begin
      automatic int nt = $urandom_range(1, 4);
      for (int t = 0; t < nt; t++) send(px % DEPTH, t == 0, t == nt - 1);
    end
    // interleaved pixels, four tiles each, with idle gaps
    for (int grp = 0; grp < 10; grp++) begin
      for (int t = 0; t < 4; t++)
        for (int p = 0; p < 8; p++) begin
          send((grp * 8 + p) % DEPTH, t == 0, t == 3);
          if ($urandom_range(0, 3) == 0) @(negedge clk);
        end
    end
    // single-tile pixels at every address
    for (int a = 0; a < DEPTH; a++) send(a, 1'b1, 1'b1);
    repeat (LAT + 3) @(negedge clk);
    check("all outputs seen", expq.size(), 0);
    if (n_fwd == 0) begin failures++; $display("FAIL forwarding never used"); end
    if (n_negs == 0) begin failures++; $display("FAIL ReLU never clamped"); end
    if (n_sats == 0) begin failures++; $display("FAIL saturation never hit"); end
    $display("outputs %0d forwarded %0d relu %0d saturated %0d", n_out, n_fwd, n_negs, n_sats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
