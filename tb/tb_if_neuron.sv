// tb_if_neuron: drives a 4-bit-line IF neuron with random valid/bit-line
// patterns, thresholds, R_empty evaluations and grants, and compares Vmem
// and the spike request r every cycle with a cycle-accurate reference
// (valid '1' -> +1, valid '0' -> -1; on R_empty: r = (Vmem_next >= Vth),
// Vmem -> 0; a grant clears r). Counts how often the neuron fired and how
// often it evaluated without firing.
module tb_if_neuron;
  localparam int NB = 4, MW = 12, TW = 12;
  logic clk = 0, rst_n = 1;  // pulled low at time 1 so that the asynchronous reset sees an edge
  logic [NB-1:0] bl, bl_valid;
  logic r_empty, vth_we, g, r;
  logic signed [TW-1:0] vth_in;
  logic signed [MW-1:0] vmem;
  int checks = 0, failures = 0, fires = 0, nofires = 0;

  // reference state
  int ref_vmem, ref_vth;
  bit ref_r;

  if_neuron #(.NB(NB), .VMEM_W(MW), .VTH_W(TW)) dut (.clk, .rst_n, .bl, .bl_valid, .r_empty, .vth_we, .vth_in, .g, .r, .vmem);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    bl = '0; bl_valid = '0; r_empty = 0; vth_we = 0; g = 0; vth_in = '0;
    ref_vmem = 0; ref_vth = 0; ref_r = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      int d, sum;
      @(negedge clk);
      bl = NB'($urandom); bl_valid = NB'($urandom);
      r_empty = ($urandom_range(0, 19) == 0);
      g = ref_r && ($urandom_range(0, 3) == 0);
      vth_we = ($urandom_range(0, 49) == 0);
      vth_in = TW'($signed($urandom_range(0, 60)) - 30);
      // reference next state
      d = 0;
      for (int i = 0; i < NB; i++) if (bl_valid[i]) d += bl[i] ? 1 : -1;
      sum = ref_vmem + d;
      @(posedge clk);
      if (r_empty) begin
        ref_r = (sum >= ref_vth);
        if (ref_r) fires++; else nofires++;
        ref_vmem = 0;
      end else begin
        ref_vmem = sum;
        if (g) ref_r = 0;
      end
      if (vth_we) ref_vth = int'(vth_in);
      #1;
      checks++;
      if (int'(vmem) != ref_vmem || r !== ref_r) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d vmem=%0d exp=%0d r=%b exp=%b", n, vmem, ref_vmem, r, ref_r);
      end
    end
    checks++;
    if (fires == 0 || nofires == 0) begin failures++; $display("FAIL fires=%0d nofires=%0d", fires, nofires); end
    $display("fires=%0d evaluations_without_fire=%0d", fires, nofires);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
