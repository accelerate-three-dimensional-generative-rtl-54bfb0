// f3dc_output_tf -- 1-D output transformation circuit of the T3(6^3,4^3) F3DC.
//
// Computes OUT = A^T * IN, eight EWMM values to six outputs. As in the
// paper's output transformation circuit, the sums IN1+IN2 and IN5+IN6 are
// formed once and shared:
//   OUT0 = IN0 + (IN1+IN2)   OUT1 = IN4 + (IN5+IN6)   OUT2 = IN1 - IN2
//   OUT3 = IN5 - IN6         OUT4 = (IN1+IN2) + IN3   OUT5 = (IN5+IN6) + IN7
// Outputs 0, 2, 4 are the even-phase outputs of one stride phase and 1, 3, 5
// of the other, so the six outputs come out in natural order. Combinational,
// signed, two bits of growth.
module f3dc_output_tf #(
  parameter int W = 30
) (
  input  logic [7:0][W-1:0] in_i,
  output logic [5:0][W+1:0] out_o
);
  logic signed [W+1:0] m [8];
  logic signed [W+1:0] s12, s56;

  always_comb begin
    for (int i = 0; i < 8; i++) m[i] = (W+2)'($signed(in_i[i]));
    s12 = m[1] + m[2];
    s56 = m[5] + m[6];
    out_o[0] = m[0] + s12;
    out_o[1] = m[4] + s56;
    out_o[2] = m[1] - m[2];
    out_o[3] = m[5] - m[6];
    out_o[4] = s12 + m[3];
    out_o[5] = s56 + m[7];
  end
endmodule
