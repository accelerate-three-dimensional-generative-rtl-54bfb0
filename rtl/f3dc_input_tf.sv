// f3dc_input_tf -- 1-D input transformation circuit of the T3(6^3,4^3) F3DC.
//
// Computes OUT = P^T * IN for one line of five input values. Every row of
// P^T has two non-zero +-1 entries, so each output is a single adder or
// subtractor, as drawn in the input transformation circuit of the paper:
//   OUT0 = IN0 - IN2   OUT1 = IN1 + IN2   OUT2 = IN2 - IN1   OUT3 = IN3 - IN1
//   OUT4 = IN1 - IN3   OUT5 = IN2 + IN3   OUT6 = IN3 - IN2   OUT7 = IN4 - IN2
// Rows 0-3 are a 3-output, 2-tap fast-filter input transform on IN0..IN3,
// rows 4-7 the same on IN1..IN4. Combinational; the output is one bit wider
// than the input so that nothing overflows (that width is this design's
// choice). All values are signed two's complement.
module f3dc_input_tf #(
  parameter int W = 16
) (
  input  logic [4:0][W-1:0] in_i,
  output logic [7:0][W:0]   out_o
);
  logic signed [W:0] x [5];

  always_comb begin
    for (int i = 0; i < 5; i++) x[i] = (W+1)'($signed(in_i[i]));
    out_o[0] = x[0] - x[2];
    out_o[1] = x[1] + x[2];
    out_o[2] = x[2] - x[1];
    out_o[3] = x[3] - x[1];
    out_o[4] = x[1] - x[3];
    out_o[5] = x[2] + x[3];
    out_o[6] = x[3] - x[2];
    out_o[7] = x[4] - x[2];
  end
endmodule
