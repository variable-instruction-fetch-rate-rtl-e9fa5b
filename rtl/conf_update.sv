// conf_update: next value of one confidence counter when its branch executes.
//
// The counter splits at the half-way value TH = 2**(CW-1) (8 for 4-bit
// counters): below TH the branch is low confidence, at or above it high
// confidence. The rule follows the paper's pseudo-code literally:
//   prediction correct   : low  -> set to TH;      high -> increment (saturate)
//   prediction incorrect : low  -> increment;      high -> set to TH-1
// Saturation at the top value is this design's choice (the pseudo-code only
// says "increment"). A low counter that is incremented on a wrong prediction
// can thus reach TH, exactly as written.
// Purely combinational; no clock.
module conf_update #(
  parameter int unsigned CW = 4  // counter width (4-bit saturating counters)
) (
  input  logic [CW-1:0] cur,      // present counter value
  input  logic          correct,  // the prediction for this branch was right
  output logic [CW-1:0] nxt       // value to write back
);
  localparam logic [CW-1:0] TH   = CW'(1) << (CW - 1);
  localparam logic [CW-1:0] CMAX = '1;

  logic high;
  assign high = (cur >= TH);

  always_comb begin
    if (correct) nxt = high ? ((cur == CMAX) ? CMAX : cur + CW'(1)) : TH;
    else         nxt = high ? TH - CW'(1) : cur + CW'(1);
  end
endmodule
