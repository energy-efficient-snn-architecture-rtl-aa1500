// port_config_harness: drives one esam_tile built with P inference read ports
// (P = 1..4 stand for the 1RW+1R .. 1RW+4R cells) through a fixed set of
// images. Weights, thresholds and images come from an integer hash of their
// indices, so every harness sees identical data whatever its P. The harness
// checks each output vector against reference sums and each latency against
// max over row groups of ceil(spikes/P) + 2 cycles (the next layer is never
// busy here), and reports the total cycles spent integrating.
module port_config_harness #(
  parameter int P = 4
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   cycles_total
);
  localparam int N_IN = 64, N_OUT = 24, ROWS = 32, COLS = 32, NRG = N_IN / ROWS, NIMG = 30;
  logic clk = 0, rst_n = 1;  // pulled low at time 1 so that the asynchronous reset sees an edge
  logic [N_IN-1:0] req, grant_o, lrn_wdata, lrn_rdata;
  logic in_evt, in_busy, out_evt;
  logic [N_OUT-1:0] spk_o;
  logic vth_we, lrn_valid, lrn_ready, lrn_write, lrn_rsp_valid;
  logic [4:0] vth_addr, lrn_col;
  logic signed [11:0] vth_data;

  esam_tile #(.N_IN(N_IN), .N_OUT(N_OUT), .P(P), .ROWS(ROWS), .COLS(COLS), .MUX(4),
              .BASE_W(8), .VMEM_W(12), .VTH_W(12)) dut (
    .clk, .rst_n, .req_i(req), .grant_o, .in_evt, .in_busy,
    .spk_o, .grant_i(spk_o), .out_evt, .out_busy(1'b0),
    .vth_we, .vth_addr, .vth_data,
    .lrn_valid, .lrn_ready, .lrn_write, .lrn_col, .lrn_wdata, .lrn_rsp_valid, .lrn_rdata);

  always #5 clk = ~clk;

  function automatic bit hbit(int a, int b);
    int unsigned h = 32'h9E3779B9 * (a * 7919 + b + 1);
    h = h ^ (h >> 15);
    h = h * 32'h85EBCA6B;
    return h[13];
  endfunction
  function automatic int hval(int a, int b, int mod);
    int unsigned h = 32'h85EBCA6B * (a * 104729 + b + 7);
    h = h ^ (h >> 13);
    h = h * 32'hC2B2AE35;
    return int'(h % mod);
  endfunction

  function automatic logic [N_IN-1:0] image(int k);
    logic [N_IN-1:0] x;
    int dens = (k % 7 == 0) ? 0 : 1 + hval(k, 999, 15);
    for (int i = 0; i < N_IN; i++) x[i] = hval(k, i, 16) < dens;
    return x;
  endfunction

  logic load;
  logic [N_IN-1:0] load_vec;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    req <= '0;
    else if (load) req <= load_vec;
    else           req <= req & ~grant_o;
  end
  assign in_evt = load;

  initial begin
    done = 0; checks = 0; failures = 0; cycles_total = 0;
    load = 0; load_vec = '0; vth_we = 0; vth_addr = '0; vth_data = '0;
    lrn_valid = 0; lrn_write = 0; lrn_col = '0; lrn_wdata = '0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < N_OUT; n++) begin
      @(negedge clk);
      while (!lrn_ready) @(negedge clk);
      for (int i = 0; i < N_IN; i++) lrn_wdata[i] = hbit(n, i);
      lrn_valid = 1; lrn_write = 1; lrn_col = 5'(n);
      @(negedge clk) lrn_valid = 0;
      while (!lrn_rsp_valid) @(negedge clk);
      vth_we = 1; vth_addr = 5'(n); vth_data = 12'(hval(n, 5, 7) - 3);
      @(negedge clk) vth_we = 0;
    end
    for (int k = 0; k < NIMG; k++) begin
      logic [N_IN-1:0] x;
      logic [N_OUT-1:0] e;
      int kmax, lat;
      x = image(k);
      kmax = 0;
      for (int g = 0; g < NRG; g++)
        if (($countones(x[g*ROWS +: ROWS]) + P - 1) / P > kmax) kmax = ($countones(x[g*ROWS +: ROWS]) + P - 1) / P;
      for (int n = 0; n < N_OUT; n++) begin
        int s;
        s = 0;
        for (int i = 0; i < N_IN; i++) if (x[i]) s += hbit(n, i) ? 1 : -1;
        e[n] = s >= hval(n, 5, 7) - 3;
      end
      @(negedge clk);
      load = 1; load_vec = x;
      @(negedge clk) load = 0;
      lat = 1;
      while (!out_evt) begin @(negedge clk); lat++; end
      @(posedge clk); #1;
      checks += 2;
      if (spk_o !== e) begin failures++; $display("FAIL P=%0d image %0d spikes %h exp %h", P, k, spk_o, e); end
      if (lat != kmax + 2) begin failures++; $display("FAIL P=%0d image %0d latency %0d exp %0d", P, k, lat, kmax + 2); end
      cycles_total += lat;
      @(negedge clk);
    end
    done = 1;
  end
endmodule
