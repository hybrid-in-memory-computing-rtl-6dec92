// adc: BEHAVIOURAL MODEL of one analog-to-digital converter on a crossbar
// line. The real part converts a current; here the current is an integer.
//
// code = saturate(round(i_in / 2^SHIFT)) to a signed OUT_W-bit code, with
// round half up and saturation at -2^(OUT_W-1) and 2^(OUT_W-1)-1. The model is
// combinational; the layer registers what it needs.
//
// From the paper: 8-bit precision and one converter per line. This design's
// own choices: a power-of-two full scale set by SHIFT, and the rounding.
module adc #(
  parameter int unsigned ACC_W = 22,
  parameter int unsigned OUT_W = 8,
  parameter int unsigned SHIFT = 4
) (
  input  logic signed [ACC_W-1:0] i_in,
  output logic signed [OUT_W-1:0] code
);

  localparam logic signed [ACC_W:0] HALF = (SHIFT > 0) ? (ACC_W+1)'(1) <<< (SHIFT - 1) : '0;
  localparam logic signed [ACC_W:0] MAXC = (ACC_W+1)'((1 << (OUT_W - 1)) - 1);
  localparam logic signed [ACC_W:0] MINC = -(ACC_W+1)'(1 << (OUT_W - 1));

  always_comb begin
    logic signed [ACC_W:0] r;
    r = ($signed({i_in[ACC_W-1], i_in}) + HALF) >>> SHIFT;
    if (r > MAXC)      code = MAXC[OUT_W-1:0];
    else if (r < MINC) code = MINC[OUT_W-1:0];
    else               code = r[OUT_W-1:0];
  end

endmodule
