// lcs_predictor -- linear-extrapolation predictor and threshold window.
//
// From the two most recent results of the converter (y1 the latest, y0 the
// one before; each either a quantized or a successfully predicted code) it
// extrapolates the next code along a straight line, pred = 2*y1 - y0, and
// forms the window upper = pred + delta, lower = pred - delta. Prediction by
// extrapolation and the +/- Delta window follow the paper. Clamping all three
// values to the code range [0, 2^N-1] is this design's choice (the paper does
// not say what happens at the rails); the window is formed from the
// unclamped prediction, so a window that runs off one rail keeps its other
// edge. The clamp flags report when an edge was cut.
//
// Purely combinational; no clock. Used once per sampling period by
// lcs_control.
module lcs_predictor #(
  parameter int unsigned N  = 10,  // code width (paper: 10-bit)
  parameter int unsigned DW = 10   // Delta width
) (
  input  logic [N-1:0]  y1,
  input  logic [N-1:0]  y0,
  input  logic [DW-1:0] delta,
  output logic [N-1:0]  pred,
  output logic [N-1:0]  upper,
  output logic [N-1:0]  lower,
  output logic          upper_clamped,
  output logic          lower_clamped
);

  // Wide enough for 2*y1 - y0 +/- delta without wrapping
  localparam int unsigned WW = ((N > DW) ? N : DW) + 3;
  localparam logic signed [WW-1:0] CODE_MAX = WW'((1 << N) - 1);

  logic signed [WW-1:0] p_ext, u_ext, l_ext;

  function automatic logic [N-1:0] clamp(input logic signed [WW-1:0] v);
    if (v < 0)             return '0;
    else if (v > CODE_MAX) return '1;
    else                   return v[N-1:0];
  endfunction

  always_comb begin
    p_ext = (WW'(y1) <<< 1) - WW'(y0);
    u_ext = p_ext + WW'(delta);
    l_ext = p_ext - WW'(delta);
    pred  = clamp(p_ext);
    upper = clamp(u_ext);
    lower = clamp(l_ext);
    upper_clamped = (u_ext > CODE_MAX);
    lower_clamped = (l_ext < 0);
  end

endmodule
