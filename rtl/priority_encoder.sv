// priority_encoder: fixed-priority encoder built as a string of identical
// prio_enc_cell slices.
//
// Bit 0 of req is the leftmost, highest-priority position; block_all enters
// the chain on that side. The output grant is one-hot (or zero), req_rest is
// req with the granted bit removed, and no_req is the inverse of the block
// signal leaving the last slice, i.e. high when req is all zero and the
// encoder is not blocked. Purely combinational; the critical path is the
// s-chain through all W slices, which is why the 1-port arbiter uses a tree of
// short encoders (arbiter_1port).
module priority_encoder #(
  parameter int unsigned W = 16
) (
  input  logic         block_all,
  input  logic [W-1:0] req,
  output logic [W-1:0] grant,
  output logic [W-1:0] req_rest,
  output logic         no_req
);
  logic [W:0] s;
  assign s[0] = block_all;

  for (genvar i = 0; i < W; i++) begin : g_slice
    prio_enc_cell u_cell (
      .s_in (s[i]),
      .r    (req[i]),
      .s_out(s[i+1]),
      .g    (grant[i]),
      .r_out(req_rest[i])
    );
  end

  assign no_req = ~s[W];
endmodule
