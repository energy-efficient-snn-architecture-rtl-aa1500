// esam_pkg: constants shared by the multiport SRAM compute-in-memory SNN
// accelerator. The array size (128 x 128), the number of inference read ports
// (4, the 1RW+4R cell) and the 4:1 row mux of the transposed port are the
// figures of the published design. The base width of the arbiter tree and the
// membrane/threshold widths are this design's own choices (the source gives
// no numbers for them).
package esam_pkg;
  localparam int unsigned ARRAY_ROWS = 128; // rows = pre-synaptic inputs per array
  localparam int unsigned ARRAY_COLS = 128; // columns = post-synaptic neurons per array
  localparam int unsigned NUM_PORTS  = 4;   // decoupled inference read ports (1RW+4R)
  localparam int unsigned TMUX       = 4;   // row mux factor of the transposed port
  localparam int unsigned ARB_BASE_W = 16;  // width of a base priority encoder in the arbiter tree
  localparam int unsigned VMEM_W     = 12;  // membrane potential width (m)
  localparam int unsigned VTH_W      = 12;  // threshold width (t)

  // Layer sizes of the evaluated fully connected Binary-SNN (768:256:256:256:10)
  localparam int unsigned L0_IN  = 768;
  localparam int unsigned L1_IN  = 256;
  localparam int unsigned L2_IN  = 256;
  localparam int unsigned L3_IN  = 256;
  localparam int unsigned L3_OUT = 10;
endpackage
