// tb_ccft_ctrl: checks the step sequence of the control unit at
// (T1, T2) = (13, 9): after an accepted start, step1 is high for exactly T1
// cycles with cyc = 0..T1-1, then step2 for T2 cycles with cyc = 0..T2-1,
// ready only in IDLE and in the last step-2 cycle, done a one-cycle pulse
// after the last step-2 cycle. Also checks that a start while busy is
// ignored and that a start in the last step-2 cycle begins the next
// computation at once.
module tb_ccft_ctrl;
  localparam int T1 = 13;
  localparam int T2 = 9;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic ready, step1, step2, done;
  logic [3:0] cyc;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ccft_ctrl #(.T1(T1), .T2(T2)) dut (.clk, .rst_n, .start, .ready, .step1, .step2, .cyc, .done);

  initial begin : watchdog
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_(input logic e_ready, e_s1, e_s2, e_done, input int e_cyc, input string what);
    checks++;
    if (ready !== e_ready || step1 !== e_s1 || step2 !== e_s2 || done !== e_done ||
        ((e_s1 || e_s2) && int'(cyc) != e_cyc)) begin
      failures++;
      $display("FAIL %s: ready=%b step1=%b step2=%b done=%b cyc=%0d (expected %b %b %b %b %0d)",
               what, ready, step1, step2, done, cyc, e_ready, e_s1, e_s2, e_done, e_cyc);
    end
  endtask

  // One computation whose start has just been accepted; checks every cycle.
  // With next = 1 a new start is given in the last step-2 cycle; prev = 1
  // expects the done pulse of the previous computation in the first cycle.
  task automatic run(input bit next, input bit poke_busy, input bit prev);
    for (int c = 0; c < T1; c++) begin
      @(negedge clk);
      start = poke_busy && (c == 3);  // ignored: busy
      expect_(1'b0, 1'b1, 1'b0, (c == 0) && prev, c, "step1");
    end
    for (int c = 0; c < T2; c++) begin
      @(negedge clk);
      start = next && (c == T2 - 1);
      expect_(c == T2 - 1, 1'b0, 1'b1, 1'b0, c, "step2");
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    expect_(1'b1, 1'b0, 1'b0, 1'b0, 0, "reset");
    rst_n = 1'b1;
    @(negedge clk);
    expect_(1'b1, 1'b0, 1'b0, 1'b0, 0, "idle");
    @(negedge clk);
    expect_(1'b1, 1'b0, 1'b0, 1'b0, 0, "idle, no start");
    start = 1'b1;
    run(1'b0, 1'b1, 1'b0);
    @(negedge clk);
    expect_(1'b1, 1'b0, 1'b0, 1'b1, 0, "done");
    @(negedge clk);
    expect_(1'b1, 1'b0, 1'b0, 1'b0, 0, "idle after done");
    // back to back
    start = 1'b1;
    run(1'b1, 1'b0, 1'b0);
    run(1'b0, 1'b0, 1'b1);
    start = 1'b0;
    @(negedge clk);
    expect_(1'b1, 1'b0, 1'b0, 1'b1, 0, "done after back to back");
    @(negedge clk);
    expect_(1'b1, 1'b0, 1'b0, 1'b0, 0, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
