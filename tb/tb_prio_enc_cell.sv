// tb_prio_enc_cell: exhaustive check of the priority-encoder bit-slice
// against its truth table (grant only if not blocked, pass on if blocked,
// block signal is the OR of block-in and request).
module tb_prio_enc_cell;
  logic s_in, r, s_out, g, r_out;
  int checks = 0, failures = 0;

  prio_enc_cell dut (.s_in, .r, .s_out, .g, .r_out);

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      {s_in, r} = 2'(i);
      #1;
      checks++;
      if (g !== (r && !s_in) || r_out !== (r && s_in) || s_out !== (r || s_in)) begin
        failures++;
        $display("FAIL s_in=%b r=%b -> g=%b r'=%b s=%b", s_in, r, g, r_out, s_out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
