// tb_mux_gate: exhaustive check of the MUX gate against its published truth
// table (Table III of the gate definition, typed in below), a check that
// the mapping is one-to-one, and that with C = 0 output R is A AND B.
module tb_mux_gate;
  int checks = 0, failures = 0;
  logic a, b, c, p, q, r;
  // Expected {P,Q,R}, indexed by {A,B,C}.
  localparam logic [2:0] EXP [8] = '{3'b000, 3'b011, 3'b010, 3'b001,
                                     3'b110, 3'b100, 3'b101, 3'b111};

  mux_gate dut (.a, .b, .c, .p, .q, .r);

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
      if (!c) begin
        checks++;
        if (r !== (a & b)) begin
          failures++;
          $display("FAIL R is not A AND B for A=%b B=%b", a, b);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
