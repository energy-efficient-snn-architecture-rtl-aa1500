// tport_ctrl: column access sequencer for on-chip learning.
//
// Learning updates the weights of one post-synaptic neuron, i.e. one column.
// The transposed port reaches a column through a 4:1 row mux, so a full
// column is moved in MUX accesses: phase s covers rows s, s+MUX, s+2*MUX, ...
// A command (read or write one column of NROWS bits) is accepted when
// cmd_valid and cmd_ready are both high. The controller then drives the
// transposed port for exactly MUX consecutive cycles (t_sel = 0..MUX-1) and
// raises rsp_valid for one cycle afterwards; for a read, rsp_rdata then holds
// the column. NROWS may span several stacked arrays: all of them are accessed
// in parallel, each array taking its own consecutive slice of t_wdata and
// t_rdata (the tile does the slicing). So a column read costs MUX cycles and a column write MUX cycles, the
// "2 x 4 cycles" of the published design. The command/response handshake is
// this design's own.
module tport_ctrl #(
  parameter int unsigned NROWS = 128,
  parameter int unsigned NCOLS = 128,
  parameter int unsigned MUX   = 4,
  localparam int unsigned SEG  = NROWS / MUX,
  localparam int unsigned CA_W = (NCOLS > 1) ? $clog2(NCOLS) : 1,
  localparam int unsigned MS_W = (MUX > 1) ? $clog2(MUX) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  logic             cmd_write,
  input  logic [CA_W-1:0]  cmd_col,
  input  logic [NROWS-1:0] cmd_wdata,
  output logic             rsp_valid,
  output logic [NROWS-1:0] rsp_rdata,
  // transposed port (towards the arrays); t_rdata/t_wdata bit j is row j*MUX+t_sel
  output logic [CA_W-1:0]  t_col,
  output logic [MS_W-1:0]  t_sel,
  output logic             t_we,
  output logic [SEG-1:0]   t_wdata,
  input  logic [SEG-1:0]   t_rdata
);
  typedef enum logic [0:0] {IDLE, RUN} state_e;
  state_e           state;
  logic             wr_q;
  logic [NROWS-1:0] wbuf;

  assign cmd_ready = (state == IDLE);
  assign t_we      = (state == RUN) && wr_q;

  always_comb begin
    for (int j = 0; j < SEG; j++) t_wdata[j] = wbuf[j*MUX + int'(t_sel)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      wr_q      <= 1'b0;
      wbuf      <= '0;
      t_col     <= '0;
      t_sel     <= '0;
      rsp_valid <= 1'b0;
      rsp_rdata <= '0;
    end else begin
      rsp_valid <= 1'b0;
      unique case (state)
        IDLE: if (cmd_valid) begin
          state <= RUN;
          wr_q  <= cmd_write;
          wbuf  <= cmd_wdata;
          t_col <= cmd_col;
          t_sel <= '0;
        end
        RUN: begin
          if (!wr_q)
            for (int j = 0; j < SEG; j++) rsp_rdata[j*MUX + int'(t_sel)] <= t_rdata[j];
          if (int'(t_sel) == MUX - 1) begin
            state     <= IDLE;
            rsp_valid <= 1'b1;
          end else begin
            t_sel <= t_sel + 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
