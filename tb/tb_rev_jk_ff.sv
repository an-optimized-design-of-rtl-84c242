// tb_rev_jk_ff: drives the reversible JK flip-flop with random J, K and CP
// for a few hundred clock cycles, plus directed runs of each mode, and
// compares Q and Q' after every rising clk edge with a JK reference model
// (Q+ = J.Q' + K'.Q when CP = 1, hold when CP = 0). Also checks the reset
// value and that an update appears one edge after the inputs (no extra
// latency). Counts how often hold, set, reset, toggle and the CP = 0 hold
// happened and fails if any never did.
module tb_rev_jk_ff;
  import rev_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b1, cp = 1'b0, j = 1'b0, k = 1'b0;
  logic q, q_n;
  logic [JK_GARBAGE-1:0] garbage;
  logic q_ref, q_old;
  int n_mode [5];  // 0 hold, 1 reset, 2 set, 3 toggle, 4 cp low

  rev_jk_ff dut (.clk, .rst_n, .cp, .j, .k, .q, .q_n, .garbage);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic cp_i, input logic j_i, input logic k_i);
    @(negedge clk);
    cp = cp_i; j = j_i; k = k_i;
    if (!cp_i) n_mode[4]++;
    else n_mode[3'({j_i, k_i})]++;
    q_old = q_ref;
    // Reference JK flip-flop.
    if (cp_i) begin
      case ({j_i, k_i})
        2'b00: q_ref = q_ref;
        2'b01: q_ref = 1'b0;
        2'b10: q_ref = 1'b1;
        2'b11: q_ref = ~q_ref;
      endcase
    end
    // Before the edge the output must still be the old value.
    #1;
    checks++;
    if (q !== q_old) begin
      failures++;
      $display("FAIL output changed before the clock edge");
    end
    @(posedge clk);
    #1;
    checks++;
    if (q !== q_ref || q_n !== ~q_ref) begin
      failures++;
      $display("FAIL t=%0t cp=%b j=%b k=%b: q=%b q_n=%b expected q=%b", $time, cp_i, j_i, k_i, q, q_n, q_ref);
    end
  endtask

  initial begin
    q_ref = 1'b0;
    #1 rst_n = 1'b0;  // a real falling edge, so every flop sees the reset
    // Published cost of the flip-flop: quantum cost 34 (4m+2n+4F) and
    // 20 XOR + 12 AND + 10 NOT.
    checks++;
    if (QC_JK != 34 || TLC_JK.n_xor != 8'd20 || TLC_JK.n_and != 8'd12 || TLC_JK.n_not != 8'd10) begin
      failures++;
      $display("FAIL flip-flop cost %0d, operators %0d/%0d/%0d", QC_JK, TLC_JK.n_xor, TLC_JK.n_and, TLC_JK.n_not);
    end
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (q !== 1'b0 || q_n !== 1'b1) begin
      failures++;
      $display("FAIL reset value q=%b q_n=%b", q, q_n);
    end
    @(negedge clk) rst_n = 1'b1;
    // Directed: set, hold, toggle x3, reset, cp low with toggle, set.
    step(1, 1, 0); step(1, 0, 0); step(1, 1, 1); step(1, 1, 1); step(1, 1, 1);
    step(1, 0, 1); step(0, 1, 1); step(0, 1, 0); step(1, 1, 0); step(1, 0, 1);
    // Random.
    repeat (400) step(1'($urandom_range(0, 3) != 0), 1'($urandom), 1'($urandom));
    // Asynchronous reset while set.
    step(1, 1, 0);
    @(negedge clk);
    rst_n = 1'b0;
    #1;
    checks++;
    if (q !== 1'b0 || q_n !== 1'b1) begin
      failures++;
      $display("FAIL asynchronous reset did not clear q");
    end
    for (int m = 0; m < 5; m++) begin
      checks++;
      if (n_mode[m] == 0) begin
        failures++;
        $display("FAIL mode %0d never exercised", m);
      end
    end
    $display("modes: hold=%0d reset=%0d set=%0d toggle=%0d cp_low=%0d",
             n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_mode[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
