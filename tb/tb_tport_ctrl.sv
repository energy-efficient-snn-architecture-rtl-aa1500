// tb_tport_ctrl: a column sequencer in front of a 128x128 array. Writes and
// reads back random columns and checks the data and that each column read
// and each column write occupies the transposed port for exactly 4 cycles
// (4:1 row mux), with the response one cycle after the last access.
module tb_tport_ctrl;
  localparam int NROWS = 128, NCOLS = 128, MUX = 4, SEG = NROWS / MUX;
  logic clk = 0, rst_n = 1;  // pulled low at time 1 so that the asynchronous reset sees an edge
  logic cmd_valid, cmd_ready, cmd_write, rsp_valid;
  logic [6:0] cmd_col, t_col;
  logic [NROWS-1:0] cmd_wdata, rsp_rdata;
  logic [1:0] t_sel;
  logic t_we;
  logic [SEG-1:0] t_wdata, t_rdata;
  logic [3:0][NROWS-1:0] rwl_unused = '0;
  logic [3:0][NCOLS-1:0] rbl_unused;
  logic [NROWS-1:0] ref_col [NCOLS];
  bit written [NCOLS];
  int checks = 0, failures = 0;

  tport_ctrl #(.NROWS(NROWS), .NCOLS(NCOLS), .MUX(MUX)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_write, .cmd_col, .cmd_wdata,
    .rsp_valid, .rsp_rdata, .t_col, .t_sel, .t_we, .t_wdata, .t_rdata);
  tsram_array #(.ROWS(NROWS), .COLS(NCOLS), .P(4), .MUX(MUX)) u_arr (
    .clk, .rwl(rwl_unused), .rbl(rbl_unused), .t_col, .t_sel, .t_we, .t_wdata, .t_rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // busy cycles: cycles in which cmd_ready is low
  task automatic do_cmd(bit wr, int c, logic [NROWS-1:0] wd, output logic [NROWS-1:0] rd, output int busy, output int wes);
    @(negedge clk);
    cmd_valid = 1; cmd_write = wr; cmd_col = 7'(c); cmd_wdata = wd;
    @(posedge clk); #1;
    cmd_valid = 0;
    busy = 0; wes = 0;
    while (!rsp_valid && busy < 100) begin
      if (!cmd_ready) busy++;
      if (t_we) wes++;
      @(posedge clk); #1;
    end
    rd = rsp_rdata;
  endtask

  initial begin
    logic [NROWS-1:0] rd, wd;
    int busy, wes;
    #1 rst_n = 0;
    cmd_valid = 0; cmd_write = 0; cmd_col = '0; cmd_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int c;
      c = $urandom_range(0, NCOLS-1);
      if (!written[c] || $urandom_range(0, 1) == 0) begin
        for (int i = 0; i < NROWS; i += 32) wd[i +: 32] = $urandom;
        do_cmd(1, c, wd, rd, busy, wes);
        ref_col[c] = wd; written[c] = 1;
        checks++;
        if (busy != MUX || wes != MUX) begin failures++; $display("FAIL write busy=%0d we=%0d", busy, wes); end
      end else begin
        do_cmd(0, c, '0, rd, busy, wes);
        checks += 2;
        if (busy != MUX || wes != 0) begin failures++; $display("FAIL read busy=%0d we=%0d", busy, wes); end
        if (rd !== ref_col[c]) begin failures++; $display("FAIL read col %0d: %h exp %h", c, rd, ref_col[c]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
