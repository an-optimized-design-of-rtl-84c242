// tb_feynman_gate: exhaustive check of the Feynman gate against its
// published truth table (A B -> P Q: 00->00, 01->01, 10->11, 11->10), and a
// check that the mapping is one-to-one (reversible) and that B = 0 copies A.
module tb_feynman_gate;
  int checks = 0, failures = 0;
  logic a, b, p, q;
  // Expected {P,Q}, indexed by {A,B}.
  localparam logic [1:0] EXP [4] = '{2'b00, 2'b01, 2'b11, 2'b10};

  feynman_gate dut (.a, .b, .p, .q);

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] seen;
    seen = '0;
    for (int i = 0; i < 4; i++) begin
      {a, b} = 2'(i);
      #1;
      checks++;
      if ({p, q} !== EXP[i]) begin
        failures++;
        $display("FAIL A B=%b%b: got P Q=%b%b expected %b", a, b, p, q, EXP[i]);
      end
      checks++;
      if (seen[{p, q}]) begin
        failures++;
        $display("FAIL output %b%b appears twice: not reversible", p, q);
      end
      seen[{p, q}] = 1'b1;
      if (!b) begin
        checks++;
        if (p !== a || q !== a) begin
          failures++;
          $display("FAIL copy mode broken for A=%b", a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
