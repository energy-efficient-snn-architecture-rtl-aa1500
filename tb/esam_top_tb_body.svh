// Shared body of the esam_top testbenches. The including module declares
// localparams N0..N4, P, ROWS, NIMG and instantiates esam_top as "dut" on the
// signals declared here.
//
// Sequence: reset; write every weight column of all four tiles through the
// learning port (and read a few back); write every threshold; stream NIMG
// random spike images through the network while a consumer accepts the
// output spikes after random delays. Each output vector is compared with a
// layer-by-layer reference computed here from the same weights (neuron n of
// a layer fires when the sum over spiking inputs of +1/-1 weights reaches
// its threshold). Mechanisms counted, each must occur at least once:
// input back-pressure, a tile stalled on its successor, several tiles busy
// at once, all P ports of an arbiter used in one cycle, two row-group
// arbiters granting in the same cycle, an image with no spikes, firing and
// silent neurons, column read-back, and a weight column rewritten between
// images (the on-chip learning path).

  logic clk = 0, rst_n = 1;  // pulled low at time 1 so that the asynchronous reset sees an edge
  logic in_valid, in_ready, out_valid, out_ack;
  logic [N0-1:0] in_spikes, lrn_wdata, lrn_rdata;
  logic [N4-1:0] out_spikes;
  logic vth_we, lrn_valid, lrn_ready, lrn_write, lrn_rsp_valid;
  logic [1:0] vth_tile, lrn_tile;
  logic [$bits(dut.vth_addr)-1:0] vth_addr, lrn_col;
  logic signed [$bits(dut.vth_data)-1:0] vth_data;

  localparam int NL = 4;
  localparam int LIN [NL]  = '{N0, N1, N2, N3};
  localparam int LOUT [NL] = '{N1, N2, N3, N4};

  // reference weights: w[l][n] is the incoming column of neuron n of layer l
  logic [N0-1:0] w [NL][];
  int            vth [NL][];
  int checks = 0, failures = 0;
  int n_inbp = 0, n_stall = 0, n_overlap = 0, n_fullport = 0, n_multigrp = 0, n_empty = 0;
  int n_fire = 0, n_silent = 0, n_readback = 0, n_relearn = 0;

  always #5 clk = ~clk;

  function automatic logic [N0-1:0] layer(int l, logic [N0-1:0] x);
    logic [N0-1:0] y = '0;
    for (int n = 0; n < LOUT[l]; n++) begin
      int s = 0;
      for (int i = 0; i < LIN[l]; i++) if (x[i]) s += w[l][n][i] ? 1 : -1;
      y[n] = (s >= vth[l][n]);
    end
    return y;
  endfunction

  function automatic logic [N4-1:0] net(logic [N0-1:0] x);
    logic [N0-1:0] y = x;
    for (int l = 0; l < NL; l++) y = layer(l, y);
    return N4'(y);
  endfunction

  task automatic lrn(int tile, bit wr, int col, logic [N0-1:0] wd, output logic [N0-1:0] rd);
    @(negedge clk);
    while (!lrn_ready) @(negedge clk);
    lrn_valid = 1; lrn_tile = 2'(tile); lrn_write = wr; lrn_col = $bits(lrn_col)'(col); lrn_wdata = wd;
    @(negedge clk);
    lrn_valid = 0;
    while (!lrn_rsp_valid) @(negedge clk);
    rd = lrn_rdata;
  endtask

  function automatic logic [N0-1:0] rand_col(int bits);
    logic [N0-1:0] v = '0;
    for (int i = 0; i < bits; i++) v[i] = 1'($urandom);
    return v;
  endfunction

  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    int busy_tiles, g0;
    if (in_valid && !in_ready) n_inbp++;
    if ((dut.u_tile0.pending && dut.u_tile0.all_served && dut.u_tile0.out_busy) ||
        (dut.u_tile1.pending && dut.u_tile1.all_served && dut.u_tile1.out_busy) ||
        (dut.u_tile2.pending && dut.u_tile2.all_served && dut.u_tile2.out_busy) ||
        (dut.u_tile3.pending && dut.u_tile3.all_served && dut.u_tile3.out_busy)) n_stall++;
    busy_tiles = int'(dut.u_tile0.pending) + int'(dut.u_tile1.pending) + int'(dut.u_tile2.pending) + int'(dut.u_tile3.pending);
    if (busy_tiles >= 2) n_overlap++;
    if (&dut.u_tile0.pvalid[0]) n_fullport++;
    g0 = 0;
    for (int rg = 0; rg < N0 / ROWS; rg++) if (dut.u_tile0.pvalid[rg][0]) g0++;
    if (g0 >= 2) n_multigrp++;
  end

  logic [N0-1:0] img_q [$];
  bit            relearn_pending = 0;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N0-1:0] rd;
    #1 rst_n = 0;
    in_valid = 0; in_spikes = '0; out_ack = 0;
    vth_we = 0; vth_tile = '0; vth_addr = '0; vth_data = '0;
    lrn_valid = 0; lrn_tile = '0; lrn_write = 0; lrn_col = '0; lrn_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int l = 0; l < NL; l++) begin
      w[l] = new[LOUT[l]];
      vth[l] = new[LOUT[l]];
      for (int n = 0; n < LOUT[l]; n++) begin
        w[l][n] = rand_col(LIN[l]);
        lrn(l, 1, n, w[l][n], rd);
      end
    end
    for (int l = 0; l < NL; l++) begin
      for (int n = 0; n < LOUT[l]; n += 37) begin
        lrn(l, 0, n, '0, rd);
        checks++; n_readback++;
        if (rd !== w[l][n]) begin failures++; $display("FAIL read-back tile %0d column %0d", l, n); end
      end
    end
    for (int l = 0; l < NL; l++)
      for (int n = 0; n < LOUT[l]; n++) begin
        @(negedge clk);
        vth[l][n] = $urandom_range(0, 6) - 3;
        vth_we = 1; vth_tile = 2'(l); vth_addr = $bits(vth_addr)'(n); vth_data = $bits(vth_data)'(vth[l][n]);
      end
    @(negedge clk) vth_we = 0;

    fork
      begin : producer
        for (int k = 0; k < NIMG; k++) begin
          logic [N0-1:0] x;
          int dens;
          // learning step between images: rewrite one column of tile 1 once
          // the pipeline has drained (all earlier images answered)
          if (k == NIMG / 2) begin
            while (img_q.size() != 0) @(negedge clk);
            repeat (4) @(negedge clk);
            begin
              int c;
              c = $urandom_range(0, N2 - 1);
              w[1][c] = ~w[1][c] & rand_col(N1);
              lrn(1, 1, c, w[1][c], rd);
              lrn(1, 0, c, '0, rd);
              checks++; n_relearn++;
              if (N1'(rd) !== N1'(w[1][c])) begin failures++; $display("FAIL relearned column"); end
            end
          end
          dens = (k % 5 == 0) ? 0 : $urandom_range(1, 15);
          for (int i = 0; i < N0; i++) x[i] = ($urandom_range(0, 15) < dens);
          if (x == '0) n_empty++;
          @(negedge clk);
          in_valid = 1; in_spikes = x;
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          img_q.push_back(x);
          @(negedge clk) in_valid = 0;
        end
      end
      begin : consumer
        for (int k = 0; k < NIMG; k++) begin
          logic [N4-1:0] e;
          @(negedge clk);
          while (!out_valid) @(negedge clk);
          e = net(img_q[0]);
          void'(img_q.pop_front());
          checks++;
          if (out_spikes !== e) begin failures++; $display("FAIL image %0d out %b exp %b", k, out_spikes, e); end
          n_fire += $countones(out_spikes); n_silent += N4 - $countones(out_spikes);
          repeat ($urandom_range(0, 60)) @(negedge clk);
          out_ack = 1;
          @(negedge clk) out_ack = 0;
        end
      end
    join

    $display("images=%0d input_backpressure=%0d stall_cycles=%0d overlap_cycles=%0d full_port_cycles=%0d multi_group_cycles=%0d empty_images=%0d fired=%0d silent=%0d readbacks=%0d relearned=%0d",
             NIMG, n_inbp, n_stall, n_overlap, n_fullport, n_multigrp, n_empty, n_fire, n_silent, n_readback, n_relearn);
    checks++;
    if (n_inbp == 0 || n_stall == 0 || n_overlap == 0 || n_fullport == 0 || n_multigrp == 0 ||
        n_empty == 0 || n_fire == 0 || n_silent == 0 || n_readback == 0 || n_relearn == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
