// tb_new_gate: exhaustive check of the New gate (P = A, Q = AB xor C,
// R = A'C' xor B') against a truth table worked out by hand, a check that
// the mapping is one-to-one, and that with B = 1 output R is NOR(A, C).
module tb_new_gate;
  int checks = 0, failures = 0;
  logic a, b, c, p, q, r;
  // Expected {P,Q,R}, indexed by {A,B,C}.
  localparam logic [2:0] EXP [8] = '{3'b000, 3'b011, 3'b001, 3'b010,
                                     3'b101, 3'b111, 3'b110, 3'b100};

  new_gate dut (.a, .b, .c, .p, .q, .r);

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] seen;
    seen = '0;
    for (int i = 0; i < 8; i++) begin
      {a, b, c} = 3'(i);
      #1;
      checks++;
      if ({p, q, r} !== EXP[i]) begin
        failures++;
        $display("FAIL A B C=%b%b%b: got P Q R=%b%b%b expected %b", a, b, c, p, q, r, EXP[i]);
      end
      checks++;
      if (seen[{p, q, r}]) begin
        failures++;
        $display("FAIL output %b%b%b appears twice: not reversible", p, q, r);
      end
      seen[{p, q, r}] = 1'b1;
      if (b) begin
        checks++;
        if (r !== ~(a | c)) begin
          failures++;
          $display("FAIL R is not NOR(A,C) for A=%b C=%b", a, c);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
