// tb_rev_async_counter: runs the 3-bit reversible ripple counter with a
// random count input cp and compares count and count_n after every rising
// clk edge with a reference down-counter modulo 8 (the stages are clocked by
// the previous stage's Q on its rising edge, so the count descends). Checks
// the reset value, one step per counted edge, and that the quantum cost
// implied by the gate counts is the published 103 and the operator count
// 61/36/30. Counts wrap-arounds
// (0 -> 7, a ripple through all three stages), borrows out of bit 2
// (4 -> 3) and holds (cp = 0) and fails if any never happened.
module tb_rev_async_counter;
  import rev_pkg::*;

  int checks = 0, failures = 0;
  int n_wrap = 0, n_carry = 0, n_hold = 0;
  logic clk = 1'b0, rst_n = 1'b1, cp = 1'b0;
  logic [2:0] count, count_n, ref_count;
  logic [3*JK_GARBAGE:0] garbage;

  rev_async_counter dut (.clk, .rst_n, .cp, .count, .count_n, .garbage);

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic cp_i);
    @(negedge clk);
    cp = cp_i;
    if (cp_i) begin
      if (ref_count == 3'd0) n_wrap++;
      if (ref_count == 3'd4) n_carry++;
      ref_count = ref_count - 3'd1;
    end else begin
      n_hold++;
    end
    @(posedge clk);
    #1;
    checks++;
    if (count !== ref_count || count_n !== ~ref_count) begin
      failures++;
      $display("FAIL t=%0t cp=%b: count=%0d count_n=%b expected %0d", $time, cp_i, count, count_n, ref_count);
    end
  endtask

  initial begin
    ref_count = '0;
    #1 rst_n = 1'b0;  // a real falling edge, so every flop sees the reset
    checks++;
    if (QC_ASYNC_COUNTER != 103) begin
      failures++;
      $display("FAIL quantum cost %0d, expected 103", QC_ASYNC_COUNTER);
    end
    // Published operator count 61 XOR + 36 AND + 30 NOT.
    checks++;
    if (TLC_ASYNC_COUNTER.n_xor != 8'd61 || TLC_ASYNC_COUNTER.n_and != 8'd36 || TLC_ASYNC_COUNTER.n_not != 8'd30) begin
      failures++;
      $display("FAIL operator count %0d/%0d/%0d", TLC_ASYNC_COUNTER.n_xor, TLC_ASYNC_COUNTER.n_and, TLC_ASYNC_COUNTER.n_not);
    end
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (count !== 3'd0) begin
      failures++;
      $display("FAIL reset value %0d", count);
    end
    @(negedge clk) rst_n = 1'b1;
    // Two full cycles of the count with cp held high.
    repeat (16) step(1'b1);
    // Random count enable.
    repeat (500) step(1'($urandom_range(0, 3) != 0));
    checks++;
    if (n_wrap == 0 || n_carry == 0 || n_hold == 0) begin
      failures++;
      $display("FAIL mechanism never seen: wrap=%0d carry=%0d hold=%0d", n_wrap, n_carry, n_hold);
    end
    $display("wraps=%0d carries=%0d holds=%0d", n_wrap, n_carry, n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
