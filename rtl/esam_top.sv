// esam_top: the four-layer Binary-SNN accelerator (768:256:256:256:10 by
// default), built from cascaded multiport-SRAM tiles.
//
// An input image arrives as a vector of L0_IN spike bits (in_valid/in_ready).
// It is stored in the input spike register, whose bits are the request vector
// of the first tile; each bit is cleared when the tile's arbiters grant it.
// Every tile's neuron spike requests are the request vector of the next tile,
// and that tile's grants clear them, so spikes travel between layers as
// parallel request/grant bits with no address encoding. The last layer's
// spike requests are presented on out_spikes while out_valid is high; out_ack
// clears them and lets the last tile evaluate again.
//
// Layers overlap: while layer k+1 integrates image i, layer k integrates
// image i+1 (each tile holds at most one image, see esam_tile).
//
// Configuration and learning ports, shared by all tiles and steered by
// vth_tile / lrn_tile: thresholds are written one neuron at a time; the
// column port reads or writes the whole incoming weight column of one
// neuron (MUX cycles each way). Tile 0 uses all of lrn_wdata/lrn_rdata,
// the other tiles their low L1_IN bits. Weights must be written before
// inference (SRAM contents are not reset). The learning rule itself is
// not part of this design: a host computes the new column.
module esam_top
  import esam_pkg::*;
#(
  parameter int unsigned N0     = L0_IN,
  parameter int unsigned N1     = L1_IN,
  parameter int unsigned N2     = L2_IN,
  parameter int unsigned N3     = L3_IN,
  parameter int unsigned N4     = L3_OUT,
  parameter int unsigned P      = NUM_PORTS,
  parameter int unsigned ROWS   = ARRAY_ROWS,
  parameter int unsigned COLS   = ARRAY_COLS,
  parameter int unsigned MUX    = TMUX,
  parameter int unsigned BASE_W = ARB_BASE_W,
  parameter int unsigned MW     = VMEM_W,
  parameter int unsigned TW     = VTH_W,
  localparam int unsigned NMAX  = (N1 > N2 ? (N1 > N3 ? N1 : N3) : (N2 > N3 ? N2 : N3)),
  localparam int unsigned AW    = $clog2((NMAX > N4 ? NMAX : N4) > 1 ? (NMAX > N4 ? NMAX : N4) : 2)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // input spikes
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [N0-1:0]         in_spikes,
  // output spikes of the last layer
  output logic                  out_valid,
  output logic [N4-1:0]         out_spikes,
  input  logic                  out_ack,
  // threshold configuration
  input  logic                  vth_we,
  input  logic [1:0]            vth_tile,
  input  logic [AW-1:0]         vth_addr,
  input  logic signed [TW-1:0]  vth_data,
  // column access for learning
  input  logic                  lrn_valid,
  output logic                  lrn_ready,
  input  logic [1:0]            lrn_tile,
  input  logic                  lrn_write,
  input  logic [AW-1:0]         lrn_col,
  input  logic [N0-1:0]         lrn_wdata,
  output logic                  lrn_rsp_valid,
  output logic [N0-1:0]         lrn_rdata
);
  localparam int unsigned NT = 4;

  // ---------------- input spike register ----------------
  logic [N0-1:0] in_req, in_grant;
  logic          in_load, t0_busy;

  assign in_ready = !t0_busy;
  assign in_load  = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       in_req <= '0;
    else if (in_load) in_req <= in_spikes;
    else              in_req <= in_req & ~in_grant;
  end

  // ---------------- tiles ----------------
  logic [N1-1:0] s1, g1;
  logic [N2-1:0] s2, g2;
  logic [N3-1:0] s3, g3;
  logic [N4-1:0] s4, g4;
  logic [NT-1:0] evt, busy, t_lrn_ready, t_rsp_valid, vth_sel, lrn_sel;
  logic          out_pending;

  always_comb begin
    for (int t = 0; t < NT; t++) begin
      vth_sel[t] = vth_we && (int'(vth_tile) == t);
      lrn_sel[t] = lrn_valid && lrn_ready && (int'(lrn_tile) == t);
    end
  end

  logic [N0-1:0] t_rdata_0;
  logic [N1-1:0] t_rdata_1;
  logic [N2-1:0] t_rdata_2;
  logic [N3-1:0] t_rdata_3;

  esam_tile #(.N_IN(N0), .N_OUT(N1), .P(P), .ROWS(ROWS), .COLS(COLS), .MUX(MUX),
              .BASE_W(BASE_W), .VMEM_W(MW), .VTH_W(TW)) u_tile0 (
    .clk, .rst_n,
    .req_i(in_req), .grant_o(in_grant), .in_evt(in_load), .in_busy(t0_busy),
    .spk_o(s1), .grant_i(g1), .out_evt(evt[0]), .out_busy(busy[1]),
    .vth_we(vth_sel[0]), .vth_addr($clog2(N1)'(vth_addr)), .vth_data,
    .lrn_valid(lrn_sel[0]), .lrn_ready(t_lrn_ready[0]), .lrn_write,
    .lrn_col($clog2(N1)'(lrn_col)), .lrn_wdata(lrn_wdata),
    .lrn_rsp_valid(t_rsp_valid[0]), .lrn_rdata(t_rdata_0)
  );

  esam_tile #(.N_IN(N1), .N_OUT(N2), .P(P), .ROWS(ROWS), .COLS(COLS), .MUX(MUX),
              .BASE_W(BASE_W), .VMEM_W(MW), .VTH_W(TW)) u_tile1 (
    .clk, .rst_n,
    .req_i(s1), .grant_o(g1), .in_evt(evt[0]), .in_busy(busy[1]),
    .spk_o(s2), .grant_i(g2), .out_evt(evt[1]), .out_busy(busy[2]),
    .vth_we(vth_sel[1]), .vth_addr($clog2(N2)'(vth_addr)), .vth_data,
    .lrn_valid(lrn_sel[1]), .lrn_ready(t_lrn_ready[1]), .lrn_write,
    .lrn_col($clog2(N2)'(lrn_col)), .lrn_wdata(lrn_wdata[N1-1:0]),
    .lrn_rsp_valid(t_rsp_valid[1]), .lrn_rdata(t_rdata_1)
  );

  esam_tile #(.N_IN(N2), .N_OUT(N3), .P(P), .ROWS(ROWS), .COLS(COLS), .MUX(MUX),
              .BASE_W(BASE_W), .VMEM_W(MW), .VTH_W(TW)) u_tile2 (
    .clk, .rst_n,
    .req_i(s2), .grant_o(g2), .in_evt(evt[1]), .in_busy(busy[2]),
    .spk_o(s3), .grant_i(g3), .out_evt(evt[2]), .out_busy(busy[3]),
    .vth_we(vth_sel[2]), .vth_addr($clog2(N3)'(vth_addr)), .vth_data,
    .lrn_valid(lrn_sel[2]), .lrn_ready(t_lrn_ready[2]), .lrn_write,
    .lrn_col($clog2(N3)'(lrn_col)), .lrn_wdata(lrn_wdata[N2-1:0]),
    .lrn_rsp_valid(t_rsp_valid[2]), .lrn_rdata(t_rdata_2)
  );

  esam_tile #(.N_IN(N3), .N_OUT(N4), .P(P), .ROWS(ROWS), .COLS(COLS), .MUX(MUX),
              .BASE_W(BASE_W), .VMEM_W(MW), .VTH_W(TW)) u_tile3 (
    .clk, .rst_n,
    .req_i(s3), .grant_o(g3), .in_evt(evt[2]), .in_busy(busy[3]),
    .spk_o(s4), .grant_i(g4), .out_evt(evt[3]), .out_busy(out_pending),
    .vth_we(vth_sel[3]), .vth_addr($clog2(N4)'(vth_addr)), .vth_data,
    .lrn_valid(lrn_sel[3]), .lrn_ready(t_lrn_ready[3]), .lrn_write,
    .lrn_col($clog2(N4)'(lrn_col)), .lrn_wdata(lrn_wdata[N3-1:0]),
    .lrn_rsp_valid(t_rsp_valid[3]), .lrn_rdata(t_rdata_3)
  );
  assign busy[0] = t0_busy;

  // ---------------- output register handshake ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       out_pending <= 1'b0;
    else if (evt[3])  out_pending <= 1'b1;
    else if (out_ack) out_pending <= 1'b0;
  end

  assign out_valid  = out_pending;
  assign out_spikes = s4;
  assign g4         = {N4{out_ack && out_pending}};

  // ---------------- learning port steering ----------------
  assign lrn_ready     = &t_lrn_ready;
  assign lrn_rsp_valid = |t_rsp_valid;
  logic [1:0] rsp_tile;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      rsp_tile <= '0;
    else if (lrn_valid && lrn_ready) rsp_tile <= lrn_tile;
  end

  always_comb begin
    unique case (rsp_tile)
      2'd0:    lrn_rdata = t_rdata_0;
      2'd1:    lrn_rdata = N0'(t_rdata_1);
      2'd2:    lrn_rdata = N0'(t_rdata_2);
      default: lrn_rdata = N0'(t_rdata_3);
    endcase
  end
endmodule
