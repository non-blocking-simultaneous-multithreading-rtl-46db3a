// skew_buffer -- triangular delay line that skews an input vector.
//
// Lane i of d_i appears on d_o i clock cycles later (lane 0 passes
// straight through). Feeding one column of the activation matrix (or one
// row of the weight matrix) per cycle into it produces the diagonal
// wavefront an output-stationary systolic array needs, so that matching
// activations and weights meet in the right PE. The paper only states that
// data enters the array skewed; the shift-register triangle is this
// design's realisation. Registers reset to zero, which the array treats as
// idle data.
module skew_buffer #(
  parameter int unsigned LANES = 16,
  parameter int unsigned W     = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [LANES-1:0][W-1:0] d_i,
  output logic [LANES-1:0][W-1:0] d_o
);

  assign d_o[0] = d_i[0];

  for (genvar i = 1; i < LANES; i++) begin : g_lane
    logic [i-1:0][W-1:0] sr;   // sr[0] is the newest stage
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        sr <= '0;
      end else begin
        sr[0] <= d_i[i];
        for (int k = 1; k < i; k++) sr[k] <= sr[k-1];
      end
    end
    assign d_o[i] = sr[i-1];
  end

endmodule
