// tb_arbiter_1port: the 128-wide tree arbiter must behave exactly like one
// flat 128-wide priority encoder. Random vectors of several densities,
// single-bit vectors at every position and the empty vector are compared
// with a lowest-index-first reference.
module tb_arbiter_1port;
  localparam int W = 128;
  logic [W-1:0] req, grant, req_rest;
  logic         no_req;
  int checks = 0, failures = 0;

  arbiter_1port #(.W(W), .BASE_W(16)) dut (.req, .grant, .req_rest, .no_req);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rand_vec(int density);  // density in 1/16
    logic [W-1:0] v;
    for (int i = 0; i < W; i++) v[i] = ($urandom_range(0, 15) < density);
    return v;
  endfunction

  task automatic check();
    logic [W-1:0] eg;
    eg = '0;
    for (int i = 0; i < W; i++) if (req[i]) begin eg[i] = 1'b1; break; end
    #1;
    checks++;
    if (grant !== eg || req_rest !== (req & ~eg) || no_req !== (req == '0)) begin
      failures++;
      $display("FAIL req=%h grant=%h exp=%h noR=%b", req, grant, eg, no_req);
    end
  endtask

  initial begin
    req = '0; check();
    for (int i = 0; i < W; i++) begin req = W'(1) << i; check(); end
    for (int n = 0; n < 2000; n++) begin
      req = rand_vec($urandom_range(0, 3) == 0 ? 0 : $urandom_range(1, 15));
      if (n % 7 == 0) req = req & ~((W'(1) << $urandom_range(0, W-1)) - W'(1));  // only high positions
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
