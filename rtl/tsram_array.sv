// tsram_array: transposable multiport synapse array (ROWS x COLS binary
// weights), the register-level equivalent of an array of 1RW+4R cells.
//
// Row r holds the weights of pre-synaptic input r; column c those of
// post-synaptic neuron c. Two kinds of access:
//  * Inference: P read ports. rwl[k] is the one-hot (or all-zero) word-line
//    vector of port k; rbl[k] returns the selected row, the value every
//    column's single-ended sense amplifier would report. Up to P different
//    rows are read in the same cycle. Combinational read: in the pipeline the
//    word lines come from a register and rbl feeds the neurons in the same
//    cycle ("SRAM read + neuron" stage).
//  * Transposed Read/Write for learning: the column decoder selects column
//    t_col; a 4:1 row mux means one access reaches ROWS/MUX cells of the
//    column, rows t_sel, t_sel+MUX, t_sel+2*MUX, ... Read is combinational,
//    a write (t_we) takes effect at the rising clock edge.
// The cell contents are not reset (an SRAM powers up random). The port
// counts, array size and mux factor are those of the published macro; the
// interleaved mux order and the all-digital timing are this design's choice.
module tsram_array #(
  parameter int unsigned ROWS = 128,
  parameter int unsigned COLS = 128,
  parameter int unsigned P    = 4,
  parameter int unsigned MUX  = 4,
  localparam int unsigned SEG  = ROWS / MUX,
  localparam int unsigned CA_W = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned MS_W = (MUX > 1) ? $clog2(MUX) : 1
) (
  input  logic                      clk,
  // inference read ports
  input  logic [P-1:0][ROWS-1:0]    rwl,
  output logic [P-1:0][COLS-1:0]    rbl,
  // transposed read/write port
  input  logic [CA_W-1:0]           t_col,
  input  logic [MS_W-1:0]           t_sel,
  input  logic                      t_we,
  input  logic [SEG-1:0]            t_wdata,
  output logic [SEG-1:0]            t_rdata
);
  logic [COLS-1:0] mem [ROWS];

  // Inference bit lines: wired OR of the rows whose word line is high.
  always_comb begin
    for (int k = 0; k < P; k++) begin
      rbl[k] = '0;
      for (int r = 0; r < ROWS; r++)
        if (rwl[k][r]) rbl[k] |= mem[r];
    end
  end

  // Transposed read through the row mux.
  always_comb begin
    for (int i = 0; i < SEG; i++)
      t_rdata[i] = mem[i*MUX + int'(t_sel)][t_col];
  end

  always_ff @(posedge clk) begin
    if (t_we)
      for (int i = 0; i < SEG; i++)
        mem[i*MUX + int'(t_sel)][t_col] <= t_wdata[i];
  end

  // Each inference port drives at most one word line.
  for (genvar k = 0; k < P; k++) begin : g_chk
    a_rwl_onehot: assert property (@(posedge clk) $onehot0(rwl[k]))
      else $error("tsram_array: port %0d has more than one word line high", k);
  end
endmodule
