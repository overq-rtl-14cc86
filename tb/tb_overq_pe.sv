// tb_overq_pe: self-checking test of one OverQ processing element.
//
// Loads a weight through the shift-load path, then streams random activation
// codes, OverQ states, adjacent weights and incoming partial sums. For each
// operand the expected partial sum is computed here from the state table
// (own/upper weight; product scaled by 2^ACT_W, 2^(2*ACT_W), 1 or 2^ACT_W)
// and compared with psum_out one cycle after the operand sits in the PE.
// Also checks the one-cycle forwarding of x and state to the right and the
// weight seen below.
module tb_overq_pe;
  import overq_pkg::*;

  localparam int ACT_W  = DEF_ACT_W;
  localparam int W_W    = DEF_W_W;
  localparam int PSUM_W = DEF_PSUM_W;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic [ACT_W-1:0] x_in, x_out;
  oq_state_e s_in, s_out;
  logic w_load;
  logic signed [W_W-1:0] w_adj_in, w_out;
  logic signed [PSUM_W-1:0] psum_in, psum_out;

  int checks = 0, failures = 0;
  int seen [4] = '{0, 0, 0, 0};

  overq_pe dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic longint aligned(input int x, input int w, input oq_state_e s);
    longint p = longint'(x) * longint'(w);
    case (s)
      OQ_NONE: return p * (1 << ACT_W);
      OQ_RO:   return p * (1 << (2 * ACT_W));
      OQ_PR:   return p;
      default: return p * (1 << ACT_W);
    endcase
  endfunction

  initial begin
    int w_own;
    int px, pw_adj;
    oq_state_e ps;
    longint pp, exp_sum;
    x_in = '0; s_in = OQ_NONE; w_load = 1'b0; w_adj_in = '0; psum_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 4; round++) begin
      // load a new stationary weight
      @(negedge clk);
      w_own = $signed(8'($urandom));
      if (round == 0) w_own = -128;
      w_load = 1'b1; w_adj_in = W_W'(w_own);
      @(negedge clk);
      w_load = 1'b0;
      check("w_out after load", w_out, w_own);
      // first operand
      px = $urandom_range(0, (1 << ACT_W) - 1);
      ps = oq_state_e'($urandom_range(0, 3));
      x_in = ACT_W'(px); s_in = ps;
      for (int k = 0; k < 300; k++) begin
        @(negedge clk);
        // x_q now holds px/ps; present adjacent weight and partial sum
        check("x_out", x_out, px);
        check("s_out", s_out, ps);
        pw_adj = $signed(8'($urandom));
        pp = longint'($signed($urandom)) >>> 4;
        w_adj_in = W_W'(pw_adj);
        psum_in = PSUM_W'(pp);
        exp_sum = pp + aligned(px, (ps == OQ_NONE) ? w_own : pw_adj, ps);
        seen[ps]++;
        // next operand enters at the same edge
        px = (k % 7 == 0) ? (1 << ACT_W) - 1 : $urandom_range(0, (1 << ACT_W) - 1);
        ps = oq_state_e'($urandom_range(0, 3));
        x_in = ACT_W'(px); s_in = ps;
        @(posedge clk); #1;
        check("psum_out", psum_out, longint'($signed(PSUM_W'(exp_sum))));
        check("w kept", w_out, w_own);
      end
    end
    for (int s = 0; s < 4; s++) if (seen[s] == 0) begin
      failures++; $display("FAIL state %0d never exercised", s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
