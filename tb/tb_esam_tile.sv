// tb_esam_tile: a reduced tile (64 inputs in two 32-row groups, 40 neurons in
// a 32-column and an 8-column array group, 4 ports) checked end to end.
// Weights are written column by column through the learning port and read
// back, thresholds are written, then random spike vectors are streamed in.
// The testbench plays both neighbours: upstream it holds each request until
// granted, downstream it accepts the output spikes after a random delay,
// which makes the tile stall. Each output vector is compared with
// sign-weighted sums computed here, and the latency from loading a vector to
// out_evt must be max over row groups of ceil(spikes/4) + 2 cycles plus the
// stall cycles.
module tb_esam_tile;
  localparam int N_IN = 64, N_OUT = 40, P = 4, ROWS = 32, COLS = 32, MUX = 4;
  localparam int NRG = N_IN / ROWS;
  logic clk = 0, rst_n = 1;  // pulled low at time 1 so that the asynchronous reset sees an edge
  logic [N_IN-1:0] req, grant_o, lrn_wdata, lrn_rdata;
  logic in_evt, in_busy, out_evt, out_busy;
  logic [N_OUT-1:0] spk_o, grant_i;
  logic vth_we, lrn_valid, lrn_ready, lrn_write, lrn_rsp_valid;
  logic [5:0] vth_addr, lrn_col;
  logic signed [11:0] vth_data;

  logic [N_IN-1:0] w [N_OUT];   // w[n][i]: weight from input i to neuron n
  int vth [N_OUT];
  int checks = 0, failures = 0;
  int n_stall = 0, n_multi_group = 0, n_full_port = 0, n_fire = 0, n_silent = 0, n_inf = 0;

  esam_tile #(.N_IN(N_IN), .N_OUT(N_OUT), .P(P), .ROWS(ROWS), .COLS(COLS), .MUX(MUX),
              .BASE_W(8), .VMEM_W(12), .VTH_W(12)) dut (
    .clk, .rst_n, .req_i(req), .grant_o, .in_evt, .in_busy,
    .spk_o, .grant_i, .out_evt, .out_busy,
    .vth_we, .vth_addr, .vth_data,
    .lrn_valid, .lrn_ready, .lrn_write, .lrn_col, .lrn_wdata, .lrn_rsp_valid, .lrn_rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // upstream request register: cleared by grants
  logic [N_IN-1:0] load_vec;
  logic            load;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    req <= '0;
    else if (load) req <= load_vec;
    else      req <= req & ~grant_o;
  end
  assign in_evt = load;

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    int gcount;
    if (dut.pending && dut.all_served && out_busy) n_stall++;
    gcount = $countones(grant_o);
    if (gcount > P) n_multi_group++;
    if (gcount >= P) n_full_port++;
  end

  function automatic logic [N_OUT-1:0] expected(logic [N_IN-1:0] x);
    logic [N_OUT-1:0] e;
    for (int n = 0; n < N_OUT; n++) begin
      int s = 0;
      for (int i = 0; i < N_IN; i++) if (x[i]) s += w[n][i] ? 1 : -1;
      e[n] = (s >= vth[n]);
    end
    return e;
  endfunction

  function automatic int exp_cycles(logic [N_IN-1:0] x);
    int k = 0;
    for (int g = 0; g < NRG; g++) begin
      int c = $countones(x[g*ROWS +: ROWS]);
      if ((c + P - 1) / P > k) k = (c + P - 1) / P;
    end
    return k + 2;
  endfunction

  task automatic lrn(bit wr, int col, logic [N_IN-1:0] wd, output logic [N_IN-1:0] rd);
    @(negedge clk);
    while (!lrn_ready) @(negedge clk);
    lrn_valid = 1; lrn_write = wr; lrn_col = 6'(col); lrn_wdata = wd;
    @(negedge clk);
    lrn_valid = 0;
    while (!lrn_rsp_valid) @(negedge clk);
    rd = lrn_rdata;
  endtask

  logic [N_IN-1:0] queue_in [$];
  int              queue_cyc [$];
  int              queue_t0 [$];
  int              stall_at_start [$];
  int              cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    logic [N_IN-1:0] rd;
    #1 rst_n = 0;
    load = 0; load_vec = '0; out_busy = 0; grant_i = '0;
    vth_we = 0; vth_addr = '0; vth_data = '0;
    lrn_valid = 0; lrn_write = 0; lrn_col = '0; lrn_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weights
    for (int n = 0; n < N_OUT; n++) begin
      w[n] = {$urandom, $urandom};
      lrn(1, n, w[n], rd);
    end
    for (int n = 0; n < N_OUT; n += 3) begin
      lrn(0, n, '0, rd);
      checks++;
      if (rd !== w[n]) begin failures++; $display("FAIL column read %0d", n); end
    end
    // thresholds
    for (int n = 0; n < N_OUT; n++) begin
      @(negedge clk);
      vth[n] = $urandom_range(0, 8) - 4;
      vth_we = 1; vth_addr = 6'(n); vth_data = 12'(vth[n]);
    end
    @(negedge clk) vth_we = 0;

    fork
      // producer
      begin
        for (int n = 0; n < 60; n++) begin
          logic [N_IN-1:0] x;
          int dens;
          dens = (n % 6 == 0) ? 0 : $urandom_range(1, 15);
          for (int i = 0; i < N_IN; i++) x[i] = ($urandom_range(0, 15) < dens);
          @(negedge clk);
          while (in_busy) @(negedge clk);
          load = 1; load_vec = x;
          queue_in.push_back(x);
          queue_cyc.push_back(exp_cycles(x));
          queue_t0.push_back(cyc);
          stall_at_start.push_back(n_stall);
          @(negedge clk) load = 0;
        end
      end
      // consumer
      begin
        for (int n = 0; n < 60; n++) begin
          logic [N_IN-1:0] x;
          logic [N_OUT-1:0] e;
          int lat;
          @(posedge clk);
          while (!out_evt) @(posedge clk);
          // out_evt seen in this cycle: spikes are registered at this edge
          lat = cyc - queue_t0[0];
          #1;
          out_busy = 1;
          x = queue_in.pop_front();
          e = expected(x);
          checks += 2;
          if (spk_o !== e) begin failures++; $display("FAIL inference %0d spikes %h exp %h", n, spk_o, e); end
          if (lat != queue_cyc[0] + (n_stall - stall_at_start[0])) begin
            failures++;
            $display("FAIL inference %0d latency %0d exp %0d + stalls %0d", n, lat, queue_cyc[0], n_stall - stall_at_start[0]);
          end
          void'(queue_cyc.pop_front()); void'(queue_t0.pop_front()); void'(stall_at_start.pop_front());
          n_fire += $countones(spk_o); n_silent += N_OUT - $countones(spk_o);
          n_inf++;
          repeat ($urandom_range(0, 12)) @(negedge clk);
          @(negedge clk) grant_i = spk_o;
          @(negedge clk) begin grant_i = '0; out_busy = 0; end
          checks++;
          if (spk_o != '0) begin failures++; $display("FAIL grants did not clear spikes"); end
        end
      end
    join
    $display("inferences=%0d stall_cycles=%0d multi_group_cycles=%0d full_port_cycles=%0d fired=%0d silent=%0d",
             n_inf, n_stall, n_multi_group, n_full_port, n_fire, n_silent);
    checks++;
    if (n_stall == 0 || n_multi_group == 0 || n_full_port == 0 || n_fire == 0 || n_silent == 0) begin
      failures++; $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
