// tb_priority_encoder: random and corner request vectors through a 16-wide
// priority encoder, compared with a reference that picks the lowest-index
// set bit; also checks Block All and noR.
module tb_priority_encoder;
  localparam int W = 16;
  logic         block_all, no_req;
  logic [W-1:0] req, grant, req_rest;
  int checks = 0, failures = 0;

  priority_encoder #(.W(W)) dut (.block_all, .req, .grant, .req_rest, .no_req);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    logic [W-1:0] eg;
    eg = '0;
    if (!block_all)
      for (int i = 0; i < W; i++) if (req[i]) begin eg[i] = 1'b1; break; end
    #1;
    checks++;
    if (grant !== eg || req_rest !== (req & ~eg) || no_req !== (!block_all && req == '0)) begin
      failures++;
      $display("FAIL blk=%b req=%h grant=%h exp=%h rest=%h noR=%b", block_all, req, grant, eg, req_rest, no_req);
    end
  endtask

  initial begin
    block_all = 0; req = '0; check();
    for (int i = 0; i < W; i++) begin req = W'(1) << i; check(); end
    req = '1; check();
    for (int n = 0; n < 500; n++) begin
      block_all = ($urandom_range(0, 7) == 0);
      req = W'($urandom) & W'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
