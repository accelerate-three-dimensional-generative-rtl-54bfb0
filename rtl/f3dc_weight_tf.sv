// f3dc_weight_tf -- 1-D weight transformation circuit of the T3(6^3,4^3) F3DC.
//
// Computes OUT = H * IN for one line of the 4-tap kernel. H holds 0, 1 and
// +-1/2, so the paper's circuit uses only wiring, ">>1" shifts and adders:
//   OUT0 = IN3            OUT1 = IN3/2 + IN1/2   OUT2 = IN3/2 - IN1/2
//   OUT3 = IN1            OUT4 = IN2             OUT5 = IN2/2 + IN0/2
//   OUT6 = IN2/2 - IN0/2  OUT7 = IN0
// To keep the halves exact this circuit moves the binary point instead of
// dropping the shifted-out bit: out_o holds 2*OUT, i.e. OUT with one fraction
// bit. The shift by one is then free and the adders see the full operands.
// (A plain arithmetic shift would lose the LSB of odd weights; the fixed-point
// reading is this design's choice.) Combinational, signed, one bit growth.
// The LSB of out_o[0], [3], [4] and [7] (the unhalved rows) is always zero.
module f3dc_weight_tf #(
  parameter int W = 8
) (
  input  logic [3:0][W-1:0] in_i,
  output logic [7:0][W:0]   out_o      // value * 2 (one fraction bit)
);
  logic signed [W:0] g [4];

  always_comb begin
    for (int i = 0; i < 4; i++) g[i] = (W+1)'($signed(in_i[i]));
    out_o[0] = g[3] <<< 1;
    out_o[1] = g[3] + g[1];
    out_o[2] = g[3] - g[1];
    out_o[3] = g[1] <<< 1;
    out_o[4] = g[2] <<< 1;
    out_o[5] = g[2] + g[0];
    out_o[6] = g[2] - g[0];
    out_o[7] = g[0] <<< 1;
  end
endmodule
