// tb_esam_top_full: the same end-to-end test on esam_top with every
// parameter at its default: the 768:256:256:256:10 network of 22 arrays of
// 128x128 binary weights with 4 read ports each.
module tb_esam_top_full;
  import esam_pkg::*;
  localparam int N0 = L0_IN, N1 = L1_IN, N2 = L2_IN, N3 = L3_IN, N4 = L3_OUT;
  localparam int P = NUM_PORTS, ROWS = ARRAY_ROWS, NIMG = 40;

  `include "esam_top_tb_body.svh"

  esam_top dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_spikes, .out_valid, .out_spikes, .out_ack,
    .vth_we, .vth_tile, .vth_addr, .vth_data,
    .lrn_valid, .lrn_ready, .lrn_tile, .lrn_write, .lrn_col, .lrn_wdata, .lrn_rsp_valid, .lrn_rdata);

endmodule
