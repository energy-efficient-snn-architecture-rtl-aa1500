// tb_tsram_array: fills a 128x128, 4-read-port array column by column through
// the transposed port (4 mux phases per column), then checks random
// multi-port row reads and transposed column reads against a reference
// weight matrix kept in the testbench, and finally rewrites random columns.
module tb_tsram_array;
  localparam int ROWS = 128, COLS = 128, P = 4, MUX = 4, SEG = ROWS / MUX;
  logic clk = 0;
  logic [P-1:0][ROWS-1:0] rwl;
  logic [P-1:0][COLS-1:0] rbl;
  logic [6:0] t_col;
  logic [1:0] t_sel;
  logic       t_we;
  logic [SEG-1:0] t_wdata, t_rdata;
  logic [COLS-1:0] ref_w [ROWS];
  int checks = 0, failures = 0;

  tsram_array #(.ROWS(ROWS), .COLS(COLS), .P(P), .MUX(MUX)) dut (.clk, .rwl, .rbl, .t_col, .t_sel, .t_we, .t_wdata, .t_rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_col(int c);
    for (int s = 0; s < MUX; s++) begin
      @(negedge clk);
      t_col = 7'(c); t_sel = 2'(s); t_we = 1;
      for (int i = 0; i < SEG; i++) t_wdata[i] = ref_w[i*MUX + s][c];
    end
    @(negedge clk) t_we = 0;
  endtask

  task automatic check_rows();
    int rsel [P];
    @(negedge clk);
    rwl = '0;
    for (int k = 0; k < P; k++) begin
      rsel[k] = $urandom_range(0, ROWS-1);
      if ($urandom_range(0, 4) != 0) rwl[k][rsel[k]] = 1'b1; else rsel[k] = -1;
    end
    #1;
    for (int k = 0; k < P; k++) begin
      checks++;
      if (rbl[k] !== (rsel[k] < 0 ? '0 : ref_w[rsel[k]])) begin
        failures++; $display("FAIL port %0d row %0d", k, rsel[k]);
      end
    end
  endtask

  task automatic check_col(int c);
    logic [ROWS-1:0] got;
    for (int s = 0; s < MUX; s++) begin
      @(negedge clk);
      t_col = 7'(c); t_sel = 2'(s); #1;
      for (int i = 0; i < SEG; i++) got[i*MUX + s] = t_rdata[i];
    end
    checks++;
    for (int r = 0; r < ROWS; r++) if (got[r] !== ref_w[r][c]) begin
      failures++; $display("FAIL column %0d row %0d", c, r); break;
    end
  endtask

  initial begin
    rwl = '0; t_col = '0; t_sel = '0; t_we = 0; t_wdata = '0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) ref_w[r][c] = 1'($urandom);
    for (int c = 0; c < COLS; c++) write_col(c);
    repeat (300) check_rows();
    repeat (40) check_col($urandom_range(0, COLS-1));
    for (int n = 0; n < 20; n++) begin
      int c;
      c = $urandom_range(0, COLS-1);
      for (int r = 0; r < ROWS; r++) ref_w[r][c] = 1'($urandom);
      write_col(c);
      check_col(c);
    end
    repeat (100) check_rows();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
