// tb_esam_top: end-to-end test of the four-layer network at reduced size
// (64:32:32:32:10, 32x32 arrays, 4 ports), body in esam_top_tb_body.svh.
module tb_esam_top;
  localparam int N0 = 64, N1 = 32, N2 = 32, N3 = 32, N4 = 10, P = 4, ROWS = 32, NIMG = 60;

  `include "esam_top_tb_body.svh"

  esam_top #(.N0(N0), .N1(N1), .N2(N2), .N3(N3), .N4(N4), .P(P), .ROWS(ROWS), .COLS(32),
             .MUX(4), .BASE_W(8), .MW(12), .TW(12)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_spikes, .out_valid, .out_spikes, .out_ack,
    .vth_we, .vth_tile, .vth_addr, .vth_data,
    .lrn_valid, .lrn_ready, .lrn_tile, .lrn_write, .lrn_col, .lrn_wdata, .lrn_rsp_valid, .lrn_rdata);

endmodule
