// tb_port_configs: the same layer and images run on tiles built with 1, 2, 3
// and 4 inference read ports (the 1RW+1R .. 1RW+4R cell options). Every
// configuration must give identical, correct output spikes and its own
// ceil(spikes/P) + 2 latency; with more ports the total integration time
// must not grow, and 4 ports must be faster than 1.
module tb_port_configs;
  logic [3:0] done;
  int chk [4], fail [4], cyc [4];
  int checks = 0, failures = 0;

  port_config_harness #(.P(1)) u_p1 (.done(done[0]), .checks(chk[0]), .failures(fail[0]), .cycles_total(cyc[0]));
  port_config_harness #(.P(2)) u_p2 (.done(done[1]), .checks(chk[1]), .failures(fail[1]), .cycles_total(cyc[1]));
  port_config_harness #(.P(3)) u_p3 (.done(done[2]), .checks(chk[2]), .failures(fail[2]), .cycles_total(cyc[2]));
  port_config_harness #(.P(4)) u_p4 (.done(done[3]), .checks(chk[3]), .failures(fail[3]), .cycles_total(cyc[3]));

  initial begin
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    #10;
    wait (&done);
    for (int p = 0; p < 4; p++) begin
      checks += chk[p]; failures += fail[p];
      $display("ports=%0d integration_cycles=%0d", p + 1, cyc[p]);
    end
    for (int p = 1; p < 4; p++) begin
      checks++;
      if (cyc[p] > cyc[p-1]) begin failures++; $display("FAIL %0d ports slower than %0d", p + 1, p); end
    end
    checks++;
    if (!(cyc[3] < cyc[0])) begin failures++; $display("FAIL 4 ports not faster than 1"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
