// path_metric_unit: LLR-based path metric update of one list path.
//
// For the decision LLR alpha of bit i on this path it forms the metrics of the
// two extensions u = 0 and u = 1 (paper, Eq. 5): an extension that agrees with
// the hard decision of alpha keeps the old metric, the other adds |alpha|.
// alpha = 0 penalises neither. A frozen bit can only be 0, so the u = 1
// extension is marked invalid (the u = 0 extension is valid exactly when the
// path is active, so valid0 is the active input passed through). Metrics are
// unsigned QPM-bit numbers that saturate at their maximum; saturation is this
// design's choice (the paper gives only the width Q_PM). Purely combinational.
module path_metric_unit #(
  parameter int unsigned QA  = 6,
  parameter int unsigned QPM = 8
) (
  input  logic signed [QA-1:0] alpha,
  input  logic [QPM-1:0]       pm_in,
  input  logic                 frozen,
  input  logic                 active,   // this path currently holds a candidate
  output logic [QPM-1:0]       pm0,
  output logic [QPM-1:0]       pm1,
  output logic                 valid0,
  output logic                 valid1
);
  logic [QA-1:0]  mag;

  function automatic logic [QPM-1:0] sat_add(logic [QPM-1:0] p, logic [QA-1:0] m);
    logic [QPM+QA:0] s;
    s = (QPM+QA+1)'(p) + (QPM+QA+1)'(m);
    return (s > (QPM+QA+1)'({QPM{1'b1}})) ? {QPM{1'b1}} : QPM'(s);
  endfunction

  always_comb begin
    mag    = (alpha < 0) ? QA'(-alpha) : QA'(alpha);
    pm0    = (alpha < 0) ? sat_add(pm_in, mag) : pm_in;
    pm1    = (alpha > 0) ? sat_add(pm_in, mag) : pm_in;
    valid0 = active;
    valid1 = active && !frozen;
  end
endmodule
