// prio_enc_cell: one bit-slice of the fixed-priority encoder.
//
// A chain of these cells scans a request vector from the left. s_in (s[n-1])
// is high when a request further left has already been selected (or when the
// whole encoder is blocked). The cell grants its own request only if nothing
// to its left was selected, passes a non-granted request on as r' so that the
// next cascaded port can serve it, and forwards s[n] = s[n-1] | r.
// Purely combinational. The signal names follow the published subblock
// drawing; the three equations follow from its description (select the
// leftmost request, block everything to its right, mask the selected one out
// of R').
module prio_enc_cell (
  input  logic s_in,   // s[n-1]
  input  logic r,      // request of this position
  output logic s_out,  // s[n]
  output logic g,      // grant
  output logic r_out   // r': request left for the next port
);
  always_comb begin
    g     = r & ~s_in;
    r_out = r & s_in;
    s_out = s_in | r;
  end
endmodule
