// overq_skew: triangular delay line that skews or deskews a vector of lanes.
//
// A systolic array needs row r of an activation vector to arrive r cycles
// after row 0, and it delivers column c of a result c cycles after column 0.
// This helper delays lane i by i cycles (ASCENDING = 1, used to skew the array
// input) or by LANES-1-i cycles (ASCENDING = 0, used to realign the array
// output). Lane delays are chains of registers cleared by reset; a lane with
// zero delay is a wire. The skew buffers are not described in the paper; they
// are the standard companion of a systolic array.
module overq_skew #(
  parameter int unsigned LANES     = 16,
  parameter int unsigned WIDTH     = 8,
  parameter bit          ASCENDING = 1'b1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d [LANES],
  output logic [WIDTH-1:0] q [LANES]
);

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    localparam int unsigned DLY = ASCENDING ? i : (LANES - 1 - i);
    if (DLY == 0) begin : g_wire
      assign q[i] = d[i];
    end else begin : g_regs
      logic [WIDTH-1:0] pipe [DLY];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < DLY; k++) pipe[k] <= '0;
        end else begin
          pipe[0] <= d[i];
          for (int k = 1; k < DLY; k++) pipe[k] <= pipe[k-1];
        end
      end
      assign q[i] = pipe[DLY-1];
    end
  end

endmodule
