// tb_rev_counter_top: end-to-end test of both reversible counters as one
// design, at its only size. Drives clk, an active-low reset and a random
// count input cp, and after every rising clk edge compares the synchronous
// counter with a reference up-counter and the ripple counter with a
// reference down-counter, both modulo 8, and both complementary outputs.
// Also checks that the Feynman copies of CP reach the garbage outputs, and
// applies an asynchronous reset in mid-count. Counts each mechanism: sync
// count, sync wrap (7 -> 0), sync carry into bit 2 (3 -> 4), ripple count,
// full ripple through all stages (0 -> 7), borrow out of bit 2 (4 -> 3),
// hold (cp = 0) and mid-run reset; a mechanism that never happened is a
// failure.
module tb_rev_counter_top;
  import rev_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b1, cp = 1'b0;
  logic [2:0] sync_count, sync_count_n, async_count, async_count_n;
  logic [3*JK_GARBAGE+2:0] sync_garbage;
  logic [3*JK_GARBAGE:0]   async_garbage;
  logic [2:0] ref_up, ref_down;

  typedef enum int {M_SYNC_COUNT, M_SYNC_WRAP, M_SYNC_CARRY, M_ASYNC_COUNT,
                    M_ASYNC_RIPPLE, M_ASYNC_BORROW, M_HOLD, M_RESET, M_NUM} mech_e;
  int n_mech [M_NUM];

  rev_counter_top dut (.clk, .rst_n, .cp, .sync_count, .sync_count_n,
                       .async_count, .async_count_n, .sync_garbage, .async_garbage);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_outputs(input string what);
    checks++;
    if (sync_count !== ref_up || sync_count_n !== ~ref_up) begin
      failures++;
      $display("FAIL %s t=%0t: sync %0d (n %b), expected %0d", what, $time, sync_count, sync_count_n, ref_up);
    end
    checks++;
    if (async_count !== ref_down || async_count_n !== ~ref_down) begin
      failures++;
      $display("FAIL %s t=%0t: async %0d (n %b), expected %0d", what, $time, async_count, async_count_n, ref_down);
    end
  endtask

  task automatic step(input logic cp_i);
    @(negedge clk);
    cp = cp_i;
    #1;
    // The last Feynman copy of CP in each counter ends on a garbage output.
    checks++;
    if (sync_garbage[3*JK_GARBAGE+2] !== cp_i || async_garbage[3*JK_GARBAGE] !== cp_i) begin
      failures++;
      $display("FAIL CP copies on garbage outputs do not follow cp=%b", cp_i);
    end
    if (cp_i) begin
      n_mech[M_SYNC_COUNT]++;
      n_mech[M_ASYNC_COUNT]++;
      if (ref_up == 3'd7)   n_mech[M_SYNC_WRAP]++;
      if (ref_up == 3'd3)   n_mech[M_SYNC_CARRY]++;
      if (ref_down == 3'd0) n_mech[M_ASYNC_RIPPLE]++;
      if (ref_down == 3'd4) n_mech[M_ASYNC_BORROW]++;
      ref_up   = ref_up + 3'd1;
      ref_down = ref_down - 3'd1;
    end else begin
      n_mech[M_HOLD]++;
    end
    @(posedge clk);
    #1;
    check_outputs("count");
  endtask

  initial begin
    ref_up = '0;
    ref_down = '0;
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1;
    check_outputs("reset");
    @(negedge clk) rst_n = 1'b1;
    repeat (20) step(1'b1);
    repeat (300) step(1'($urandom_range(0, 3) != 0));
    // Asynchronous reset in mid-count, away from any clock edge.
    @(negedge clk);
    cp = 1'b1;
    #2 rst_n = 1'b0;
    ref_up = '0;
    ref_down = '0;
    n_mech[M_RESET]++;
    #1;
    check_outputs("mid-run reset");
    @(negedge clk);
    cp = 1'b0;
    rst_n = 1'b1;
    repeat (300) step(1'($urandom_range(0, 3) != 0));
    for (int m = 0; m < M_NUM; m++) begin
      checks++;
      if (n_mech[m] == 0) begin
        failures++;
        $display("FAIL mechanism %s never happened", mech_e'(m));
      end
      $display("%-15s %0d", mech_e'(m), n_mech[m]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
