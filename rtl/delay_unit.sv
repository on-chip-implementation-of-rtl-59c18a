// delay_unit -- fixed-length register delay line.
//
// Holds the butterfly's A operand back by DEPTH clocks so that it reaches the
// complex adder and subtractor in the same clock as the twiddle product of the
// B operand it is paired with. q is d delayed by DEPTH rising edges (DEPTH = 0
// gives a wire). All stages clear on the asynchronous active-high reset.
// The default depth of 3 matches the three stages of the complex multiplier.
module delay_unit #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 3
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] stage [DEPTH];
    always_ff @(posedge clk or posedge rst) begin
      if (rst) begin
        for (int i = 0; i < DEPTH; i++) stage[i] <= '0;
      end else begin
        stage[0] <= d;
        for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
      end
    end
    assign q = stage[DEPTH-1];
  end

endmodule
