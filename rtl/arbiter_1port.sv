// arbiter_1port: one port of the spike arbiter, W requests wide.
//
// Selects the leftmost (lowest-index) pending request each cycle. A single
// W-wide priority encoder would put all W slices on one ripple path, so the
// arbiter is a two-level tree of encoders of the same structure: W/BASE_W
// base encoders each handle BASE_W requests, and one higher-level encoder
// picks the leftmost base encoder that has a request. A base grant counts only
// when its group wins the higher level. req_rest is req with the final grant
// masked out and feeds the next cascaded port; no_req is high when req is
// empty. Purely combinational.
// The tree follows the published description; the two levels and BASE_W = 16
// are this design's choice (the width of the base encoders is not published).
module arbiter_1port #(
  parameter int unsigned W      = 128,
  parameter int unsigned BASE_W = 16
) (
  input  logic [W-1:0] req,
  output logic [W-1:0] grant,
  output logic [W-1:0] req_rest,
  output logic         no_req
);
  localparam int unsigned NG = W / BASE_W;

  logic [NG-1:0] grp_req, grp_grant;
  logic [W-1:0]  base_grant;

  for (genvar k = 0; k < NG; k++) begin : g_base
    logic          base_no_req;
    logic [BASE_W-1:0] base_rest_unused;
    priority_encoder #(.W(BASE_W)) u_base (
      .block_all(1'b0),
      .req      (req[k*BASE_W +: BASE_W]),
      .grant    (base_grant[k*BASE_W +: BASE_W]),
      .req_rest (base_rest_unused),
      .no_req   (base_no_req)
    );
    assign grp_req[k] = ~base_no_req;
    assign grant[k*BASE_W +: BASE_W] = base_grant[k*BASE_W +: BASE_W] & {BASE_W{grp_grant[k]}};
  end

  logic [NG-1:0] grp_rest_unused;
  priority_encoder #(.W(NG)) u_top (
    .block_all(1'b0),
    .req      (grp_req),
    .grant    (grp_grant),
    .req_rest (grp_rest_unused),
    .no_req   (no_req)
  );

  assign req_rest = req & ~grant;

  initial begin
    assert (W % BASE_W == 0) else $error("arbiter_1port: W must be a multiple of BASE_W");
  end
endmodule
