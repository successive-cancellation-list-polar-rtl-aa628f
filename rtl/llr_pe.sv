// llr_pe: q-bit LLR processing element holding one f unit and one g unit.
//
// f unit (min-sum form of the check-node update):
//   c = sign(a) XOR sign(b), |c| = min(|a|, |b|)
// g unit (variable-node update with the partial sum u_sum):
//   d = b + a  when u_sum = 0,  d = b - a  when u_sum = 1
// The f unit works directly on the sign-magnitude words. The g unit converts
// a and b to two's complement (S2C), forms the sum and the difference in
// parallel, picks one with u_sum and converts back (C2S, saturating to
// +/-(2^(Q-1)-1)). The output mux gives c for control=0 and d for control=1.
// This is the structure of the PE figure of the architecture; the saturation
// rule is this design's choice. Purely combinational.
module llr_pe #(
  parameter int unsigned Q = llrscl_pkg::Q_DEF
) (
  input  logic [Q-1:0] a,        // sign-magnitude
  input  logic [Q-1:0] b,        // sign-magnitude
  input  logic         u_sum,    // partial sum for the g unit
  input  logic         control,  // 0: f output, 1: g output
  output logic [Q-1:0] y         // c or d, sign-magnitude
);
  // ---- f unit ---------------------------------------------------------
  logic         f_sign;
  logic [Q-2:0] f_mag;
  assign f_sign = a[Q-1] ^ b[Q-1];
  assign f_mag  = (a[Q-2:0] <= b[Q-2:0]) ? a[Q-2:0] : b[Q-2:0];   // Comp&Sel

  // ---- g unit ---------------------------------------------------------
  logic [Q-1:0] a_tc, b_tc;
  logic [Q:0]   sum_tc, dif_tc;
  logic [Q-1:0] sum_sm, dif_sm;
  s2c #(.W(Q)) u_s2c_a (.sm(a), .tc(a_tc));
  s2c #(.W(Q)) u_s2c_b (.sm(b), .tc(b_tc));
  assign sum_tc = {b_tc[Q-1], b_tc} + {a_tc[Q-1], a_tc};   // Adder
  assign dif_tc = {b_tc[Q-1], b_tc} - {a_tc[Q-1], a_tc};   // Subtractor
  c2s #(.WI(Q + 1), .WO(Q)) u_c2s_s (.tc(sum_tc), .sm(sum_sm));
  c2s #(.WI(Q + 1), .WO(Q)) u_c2s_d (.tc(dif_tc), .sm(dif_sm));

  // ---- output muxes -----------------------------------------------------
  logic [Q-1:0] g_out;
  assign g_out = u_sum ? dif_sm : sum_sm;
  assign y     = control ? g_out : {f_sign, f_mag};
endmodule
