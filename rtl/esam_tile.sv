// esam_tile: one fully connected SNN layer (N_IN inputs, N_OUT IF neurons)
// computed in multiport SRAM.
//
// Structure. The inputs are split into NRG = N_IN/ROWS row groups; each row
// group has its own P-port arbiter and a row of NCG = ceil(N_OUT/COLS)
// arrays that share its word lines. Neuron n sits under column n%COLS of
// column group n/COLS and receives P bit lines from every row group, so up to
// NRG*P input spikes are integrated per cycle.
//
// Pipeline (two stages, as in the published timing budget):
//   stage 1  arbiters grant up to P requests per row group; the grants go back
//            to the requesters (grant_o) and are registered as word lines
//            together with the port valid flags;
//   stage 2  the arrays are read through those word lines and every neuron
//            adds its valid bit lines into Vmem.
// Requests req_i are the spike-request registers of the previous layer (or
// the input register), held high until granted.
//
// Inference framing (this design's own, the source only says tiles are
// cascaded directly). in_evt marks the cycle in which the previous layer
// loaded a complete set of requests; the tile is then pending (in_busy) until
// every request has been served. It then sends R_empty down the pipeline so
// that the neurons compare, fire and reset, and signals out_evt; this happens
// only when the next layer is not busy (out_busy low), otherwise the tile
// stalls with its potentials held. Upstream must not raise in_evt while
// in_busy is high.
//
// Learning and configuration: a tport_ctrl reads or writes the whole N_IN-bit
// weight column of one neuron in MUX cycles per direction through the
// transposed ports of all row-group arrays at once; vth_* write one
// neuron's threshold.
module esam_tile #(
  parameter int unsigned N_IN   = 128,
  parameter int unsigned N_OUT  = 128,
  parameter int unsigned P      = 4,
  parameter int unsigned ROWS   = 128,
  parameter int unsigned COLS   = 128,
  parameter int unsigned MUX    = 4,
  parameter int unsigned BASE_W = 16,
  parameter int unsigned VMEM_W = 12,
  parameter int unsigned VTH_W  = 12,
  localparam int unsigned NRG   = N_IN / ROWS,
  localparam int unsigned NCG   = (N_OUT + COLS - 1) / COLS,
  localparam int unsigned OA_W  = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  localparam int unsigned SEG   = ROWS / MUX
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // spike requests from the previous layer
  input  logic [N_IN-1:0]          req_i,
  output logic [N_IN-1:0]          grant_o,
  input  logic                     in_evt,
  output logic                     in_busy,
  // spike requests of this layer's neurons
  output logic [N_OUT-1:0]         spk_o,
  input  logic [N_OUT-1:0]         grant_i,
  output logic                     out_evt,
  input  logic                     out_busy,
  // thresholds
  input  logic                     vth_we,
  input  logic [OA_W-1:0]          vth_addr,
  input  logic signed [VTH_W-1:0]  vth_data,
  // column access for learning
  input  logic                     lrn_valid,
  output logic                     lrn_ready,
  input  logic                     lrn_write,
  input  logic [OA_W-1:0]          lrn_col,
  input  logic [N_IN-1:0]          lrn_wdata,
  output logic                     lrn_rsp_valid,
  output logic [N_IN-1:0]          lrn_rdata
);
  // ---------------- stage 1: arbitration ----------------
  logic [NRG-1:0][P-1:0][ROWS-1:0] grant;
  logic [NRG-1:0][P-1:0]           pvalid;
  logic [NRG-1:0]                  rg_noreq;

  for (genvar rg = 0; rg < NRG; rg++) begin : g_arb
    arbiter_mport #(.W(ROWS), .P(P), .BASE_W(BASE_W)) u_arb (
      .req       (req_i[rg*ROWS +: ROWS]),
      .grant     (grant[rg]),
      .grant_any (grant_o[rg*ROWS +: ROWS]),
      .port_valid(pvalid[rg]),
      .no_req    (rg_noreq[rg])
    );
  end

  logic pending, all_served, fire_evt;
  logic [NRG-1:0][P-1:0][ROWS-1:0] rwl_q;
  logic [NRG-1:0][P-1:0]           pvalid_q;
  logic                            r_empty_q;

  assign all_served = &rg_noreq;
  assign fire_evt   = pending && all_served && !out_busy;
  assign in_busy    = pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending   <= 1'b0;
      rwl_q     <= '0;
      pvalid_q  <= '0;
      r_empty_q <= 1'b0;
    end else begin
      rwl_q     <= grant;
      pvalid_q  <= pvalid;
      r_empty_q <= fire_evt;
      if (in_evt)        pending <= 1'b1;
      else if (fire_evt) pending <= 1'b0;
    end
  end

  // ---------------- learning column sequencer ----------------
  logic [OA_W-1:0]      t_col;
  logic [$clog2(MUX > 1 ? MUX : 2)-1:0] t_sel;
  logic                 t_we;
  logic [N_IN/MUX-1:0]  t_wdata, t_rdata;

  tport_ctrl #(.NROWS(N_IN), .NCOLS(N_OUT), .MUX(MUX)) u_tport (
    .clk, .rst_n,
    .cmd_valid(lrn_valid), .cmd_ready(lrn_ready), .cmd_write(lrn_write),
    .cmd_col(lrn_col), .cmd_wdata(lrn_wdata),
    .rsp_valid(lrn_rsp_valid), .rsp_rdata(lrn_rdata),
    .t_col, .t_sel, .t_we, .t_wdata, .t_rdata
  );

  // ---------------- stage 2: arrays and neurons ----------------
  // bit lines seen by each column group: [row group][port][column]
  logic [NCG-1:0][NRG-1:0][P-1:0][COLS-1:0] rbl_all;
  logic [NCG-1:0][NRG-1:0][SEG-1:0]         trd_all;

  for (genvar cg = 0; cg < NCG; cg++) begin : g_cg
    localparam int unsigned CW   = ((N_OUT - cg*COLS) < COLS) ? (N_OUT - cg*COLS) : COLS;
    localparam int unsigned CW_A = (CW > 1) ? $clog2(CW) : 1;
    logic sel_cg;
    assign sel_cg = (NCG == 1) ? 1'b1 : (int'(t_col) / COLS == cg);

    for (genvar rg = 0; rg < NRG; rg++) begin : g_rg
      logic [P-1:0][CW-1:0] rbl;
      tsram_array #(.ROWS(ROWS), .COLS(CW), .P(P), .MUX(MUX)) u_array (
        .clk,
        .rwl    (rwl_q[rg]),
        .rbl    (rbl),
        .t_col  (CW_A'(int'(t_col) % COLS)),
        .t_sel  (t_sel),
        .t_we   (t_we && sel_cg),
        .t_wdata(t_wdata[rg*SEG +: SEG]),
        .t_rdata(trd_all[cg][rg])
      );
      for (genvar k = 0; k < P; k++) begin : g_pad
        assign rbl_all[cg][rg][k] = COLS'(rbl[k]);
      end
    end
  end

  always_comb begin
    t_rdata = '0;
    for (int cg = 0; cg < NCG; cg++)
      if (NCG == 1 || int'(t_col) / COLS == cg)
        for (int rg = 0; rg < NRG; rg++) t_rdata[rg*SEG +: SEG] = trd_all[cg][rg];
  end

  for (genvar n = 0; n < N_OUT; n++) begin : g_neuron
    logic [NRG*P-1:0] bl, blv;
    for (genvar rg = 0; rg < NRG; rg++) begin : g_bl
      for (genvar k = 0; k < P; k++) begin : g_p
        assign bl[rg*P + k]  = rbl_all[n / COLS][rg][k][n % COLS];
        assign blv[rg*P + k] = pvalid_q[rg][k];
      end
    end
    if_neuron #(.NB(NRG*P), .VMEM_W(VMEM_W), .VTH_W(VTH_W)) u_neuron (
      .clk, .rst_n,
      .bl      (bl),
      .bl_valid(blv),
      .r_empty (r_empty_q),
      .vth_we  (vth_we && (int'(vth_addr) == n)),
      .vth_in  (vth_data),
      .g       (grant_i[n]),
      .r       (spk_o[n]),
      .vmem    ()
    );
  end

  assign out_evt = r_empty_q;

  initial begin
    assert (N_IN % ROWS == 0) else $error("esam_tile: N_IN must be a multiple of ROWS");
    assert (ROWS % MUX == 0)  else $error("esam_tile: ROWS must be a multiple of MUX");
  end
endmodule
