// tanh_lut: the 38-entry hyperbolic-tangent table of the LSTM datapath.
//
// Entry i holds round(127 * tanh(i/8)), i = 0..37, so the table spans inputs
// 0 to 4.625 in steps of 1/8 with outputs in Q0.7 (127 ~ 1.0); past the last
// entry tanh is within 0.02 % of one.  Negative inputs use tanh(-x) = -tanh(x).
// The module returns two neighbouring entries, T[idx] and T[idx+1], for linear
// interpolation; an index at or past the end returns the last entry twice.
// It is combinational (a 38 x 7-bit ROM).  The entry count is the paper's; the
// spacing and the output format are this design's choices.
module tanh_lut (
  input  logic [7:0] idx,
  output logic [6:0] y0,   // T[idx]
  output logic [6:0] y1    // T[idx+1]
);

  localparam int unsigned N = 38;
  localparam logic [6:0] T [N] = '{
    7'd0,   7'd16,  7'd31,  7'd46,  7'd59,  7'd70,  7'd81,  7'd89,
    7'd97,  7'd103, 7'd108, 7'd112, 7'd115, 7'd118, 7'd120, 7'd121,
    7'd122, 7'd123, 7'd124, 7'd125, 7'd125, 7'd126, 7'd126, 7'd126,
    7'd126, 7'd127, 7'd127, 7'd127, 7'd127, 7'd127, 7'd127, 7'd127,
    7'd127, 7'd127, 7'd127, 7'd127, 7'd127, 7'd127
  };

  always_comb begin
    if (idx >= 8'(N - 1)) begin
      y0 = T[N-1];
      y1 = T[N-1];
    end else begin
      y0 = T[6'(idx)];
      y1 = T[6'(idx + 8'd1)];
    end
  end

endmodule
