// arbiter_mport: P-port spike arbiter for one SRAM array.
//
// P one-port arbiters are cascaded: port 0 sees the request vector R, port k
// sees the requests left over by ports 0..k-1 (R'), so up to P distinct
// requests are granted in the same cycle, each as a one-hot word-line vector
// G[k]. port_valid[k] tells the neurons that read port k carries a real spike
// this cycle; grant_any (the OR of all G[k]) goes back to the requesters to
// clear the served requests, and no_req is high when R is empty. Purely
// combinational; the caller registers G and port_valid (first pipeline
// stage). The cascade follows the published 4-port arbiter; port_valid is
// this design's form of the bit-line validity flags.
module arbiter_mport #(
  parameter int unsigned W      = 128,
  parameter int unsigned P      = 4,
  parameter int unsigned BASE_W = 16
) (
  input  logic [W-1:0]        req,
  output logic [P-1:0][W-1:0] grant,
  output logic [W-1:0]        grant_any,
  output logic [P-1:0]        port_valid,
  output logic                no_req
);
  logic [P:0][W-1:0] rest;
  logic [P-1:0]      port_no_req;
  assign rest[0] = req;

  for (genvar k = 0; k < P; k++) begin : g_port
    arbiter_1port #(.W(W), .BASE_W(BASE_W)) u_port (
      .req     (rest[k]),
      .grant   (grant[k]),
      .req_rest(rest[k+1]),
      .no_req  (port_no_req[k])
    );
    assign port_valid[k] = ~port_no_req[k];
  end

  always_comb begin
    grant_any = '0;
    for (int k = 0; k < P; k++) grant_any |= grant[k];
  end

  assign no_req = port_no_req[0];
endmodule
