// mcu: metric computation unit of the LLR-SCL decoder.
//
// From the parent path metric M (log-probability of the length-(i-1) path,
// two's complement, PMW bits) and the last-stage LLR x of bit i (c or d,
// sign-magnitude Q bits) it forms the metrics of the two child paths:
//   x >= 0:  M0 = M,      M1 = M - x
//   x <  0:  M0 = M + x,  M1 = M
// i.e. the child whose bit disagrees with the sign of x is penalised by |x|.
// As in the MCU figure, x is converted once (S2C), an adder forms M + x and
// a subtractor M - x, and two muxes steered by sign(x) pick the results.
// The results saturate at the most negative PMW-bit value (this design's
// choice; metrics never grow). Purely combinational.
module mcu #(
  parameter int unsigned Q   = llrscl_pkg::Q_DEF,
  parameter int unsigned PMW = llrscl_pkg::PMW_DEF
) (
  input  logic [Q-1:0]   llr,     // inputLLR, sign-magnitude
  input  logic [PMW-1:0] m_prev,  // M_{i-1}
  output logic [PMW-1:0] m0,      // M_{i,0}
  output logic [PMW-1:0] m1       // M_{i,1}
);
  localparam int unsigned W = (PMW > Q ? PMW : Q) + 1;
  localparam logic signed [W-1:0] MIN = {{(W - PMW + 1){1'b1}}, {(PMW - 1){1'b0}}};

  logic [Q-1:0]        llr_tc;
  logic signed [W-1:0] m_ext, x_ext, add_w, sub_w;
  logic [PMW-1:0]      add_s, sub_s;

  s2c #(.W(Q)) u_s2c (.sm(llr), .tc(llr_tc));
  assign m_ext = W'(signed'(m_prev));
  assign x_ext = W'(signed'(llr_tc));
  assign add_w = m_ext + x_ext;   // Adder
  assign sub_w = m_ext - x_ext;   // Subtractor
  // Penalties only ever lower a metric, so only the lower bound can be hit.
  assign add_s = (add_w < MIN) ? PMW'(MIN) : PMW'(add_w);
  assign sub_s = (sub_w < MIN) ? PMW'(MIN) : PMW'(sub_w);

  assign m0 = llr[Q-1] ? add_s  : m_prev;
  assign m1 = llr[Q-1] ? m_prev : sub_s;
endmodule
