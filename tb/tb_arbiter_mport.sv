// tb_arbiter_mport: 4-port, 128-wide arbiter. Each cycle the four grants must
// be the four lowest-index requests, in order, one-hot, with port_valid set
// exactly for the ports that got one. The testbench then plays the requester
// (clearing granted bits) and checks that k requests drain in ceil(k/4)
// cycles, the throughput of a 4-port array.
module tb_arbiter_mport;
  localparam int W = 128, P = 4;
  logic [W-1:0]        req, grant_any;
  logic [P-1:0][W-1:0] grant;
  logic [P-1:0]        port_valid;
  logic                no_req;
  int checks = 0, failures = 0;

  arbiter_mport #(.W(W), .P(P), .BASE_W(16)) dut (.req, .grant, .grant_any, .port_valid, .no_req);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_comb();
    logic [P-1:0][W-1:0] eg;
    logic [W-1:0] left;
    logic [P-1:0] ev;
    left = req; eg = '0; ev = '0;
    for (int k = 0; k < P; k++)
      for (int i = 0; i < W; i++) if (left[i]) begin eg[k][i] = 1'b1; left[i] = 1'b0; ev[k] = 1'b1; break; end
    #1;
    checks++;
    if (grant !== eg || port_valid !== ev || grant_any !== (req & ~left) || no_req !== (req == '0)) begin
      failures++;
      $display("FAIL req=%h pv=%b exp_pv=%b", req, port_valid, ev);
    end
  endtask

  initial begin
    int k, cycles;
    req = '0; check_comb();
    for (int n = 0; n < 1000; n++) begin
      for (int i = 0; i < W; i++) req[i] = ($urandom_range(0, 15) < (n % 16));
      check_comb();
    end
    // drain test
    for (int n = 0; n < 50; n++) begin
      for (int i = 0; i < W; i++) req[i] = ($urandom_range(0, 99) < (n * 2));
      k = $countones(req);
      cycles = 0;
      #1;
      while (!no_req && cycles < 1000) begin
        req = req & ~grant_any;
        cycles++;
        #1;
      end
      checks++;
      if (cycles != (k + P - 1) / P) begin
        failures++;
        $display("FAIL drain of %0d requests took %0d cycles", k, cycles);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
