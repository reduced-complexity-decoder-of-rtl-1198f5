// tb_rs_syndrome_ccft_5x7: the end-to-end test of tb_rs_syndrome_ccft run on
// the faster configuration (T1, T2) = (5, 7): 13 tier-1 and 9 tier-2
// modules, 12 cycles per vector.
//
// Runs, in order: an encoded (2720, 2550) codeword (all syndromes must be
// zero), the codeword with random symbol errors, single errors at the first
// and last positions, and random vectors issued back to back (the next start
// given in the last step-2 cycle). Every syndrome is compared with a
// direct Horner evaluation, and the latency with T1 + T2: done must rise at
// the (T1+T2)-th clock edge after the edge that accepts start.
// A start given while busy must be ignored. Counts how often each
// mechanism occurred (folded step-1 / step-2 cycles, back-to-back start,
// ignored start, zero-syndrome codeword) and fails for one that never did.
module tb_rs_syndrome_ccft_5x7;
  import ccft_pkg::*;
  import tb_gf_pkg::*;

  localparam int T1 = 5;
  localparam int T2 = 7;
  localparam int LAT = T1 + T2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  logic ready, done;
  sym_t rx  [N_SHORT];
  sym_t syn [N_SYN];

  int checks = 0;
  int failures = 0;
  int n_step1 = 0, n_step2 = 0, n_b2b = 0, n_ignored = 0, n_zero_cw = 0, n_ops = 0;

  always #5 clk = ~clk;

  rs_syndrome_ccft #(.T1(T1), .T2(T2)) dut (.clk, .rst_n, .start, .ready, .rx, .syn, .done);

  always @(posedge clk) begin
    if (rst_n && dut.step1) n_step1++;
    if (rst_n && dut.step2) n_step2++;
  end

  initial begin : watchdog
    repeat (4000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int vec [];
  int ref_s [];

  task automatic load(input int v []);
    for (int i = 0; i < N_SHORT; i++) rx[i] = sym_t'(v[i]);
  endtask

  task automatic compare(input int s [], input string what);
    int bad;
    bad = 0;
    for (int j = 0; j < N_SYN; j++) begin
      checks++;
      if (syn[j] !== sym_t'(s[j])) begin
        failures++;
        bad++;
        if (bad <= 3) $display("FAIL %s: S_%0d = %h, expected %h", what, j, syn[j], s[j]);
      end
    end
  endtask

  // Start one computation and wait for done; check the latency.
  task automatic run_one(input int v [], input string what);
    int lat;
    load(v);
    syndromes(v, N_SHORT, N_SYN, ref_s);
    @(negedge clk);
    while (!ready) @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 0;
    // a start while busy must be ignored
    if (!ready) begin
      start = 1'b1;
      n_ignored++;
      @(negedge clk);
      start = 1'b0;
      lat++;
    end
    while (!done) begin
      @(negedge clk);
      lat++;
    end
    checks++;
    if (lat != LAT) begin
      failures++;
      $display("FAIL %s: latency %0d, expected %0d", what, lat, LAT);
    end
    compare(ref_s, what);
    n_ops++;
  endtask

  initial begin
    int msg [];
    int cw [];
    int va [], vb [];
    int sa [], sb [];
    int lat;
    init_tables();
    for (int i = 0; i < N_SHORT; i++) rx[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. valid codeword: all syndromes zero
    msg = new[N_SHORT - N_SYN];
    foreach (msg[i]) msg[i] = $urandom_range(0, Q);
    encode(msg, N_SHORT, N_SYN, cw);
    run_one(cw, "codeword");
    begin
      bit allzero;
      allzero = 1'b1;
      for (int j = 0; j < N_SYN; j++) if (syn[j] != '0) allzero = 1'b0;
      if (allzero) n_zero_cw++;
    end

    // 2. codeword with random errors
    vec = cw;
    for (int e = 0; e < 40; e++) vec[$urandom_range(0, N_SHORT - 1)] ^= $urandom_range(1, Q);
    run_one(vec, "codeword+errors");

    // 3. single errors at the first and the last position
    vec = new[N_SHORT];
    foreach (vec[i]) vec[i] = 0;
    vec[0] = 1;
    run_one(vec, "r_0 = 1");
    vec[0] = 0;
    vec[N_SHORT-1] = 'h5a3;
    run_one(vec, "r_2719");

    // 4. two random vectors back to back
    va = new[N_SHORT];
    vb = new[N_SHORT];
    foreach (va[i]) va[i] = $urandom_range(0, Q);
    foreach (vb[i]) vb[i] = $urandom_range(0, Q);
    syndromes(va, N_SHORT, N_SYN, sa);
    syndromes(vb, N_SHORT, N_SYN, sb);
    @(negedge clk);
    while (!ready) @(negedge clk);
    load(va);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 0;
    while (!ready) begin
      @(negedge clk);
      lat++;
    end
    // last step-2 cycle of vector a: give the next start now
    checks++;
    if (lat != LAT - 1) begin
      failures++;
      $display("FAIL back-to-back: ready after %0d cycles, expected %0d", lat, LAT - 1);
    end
    load(vb);
    start = 1'b1;
    n_b2b++;
    @(negedge clk);
    start = 1'b0;
    checks++;
    if (!done) begin
      failures++;
      $display("FAIL back-to-back: done missing for vector a");
    end
    compare(sa, "back-to-back a");
    @(negedge clk);
    lat = 1;
    while (!done) begin
      @(negedge clk);
      lat++;
    end
    checks++;
    if (lat != LAT) begin
      failures++;
      $display("FAIL back-to-back b: latency %0d", lat);
    end
    compare(sb, "back-to-back b");
    n_ops += 2;

    $display("mechanisms: ops=%0d step1_cycles=%0d step2_cycles=%0d back_to_back=%0d ignored_start=%0d zero_codeword=%0d",
             n_ops, n_step1, n_step2, n_b2b, n_ignored, n_zero_cw);
    checks++;
    if (n_step1 != n_ops * T1 || n_step2 != n_ops * T2) begin
      failures++;
      $display("FAIL folding: step cycles do not match T1, T2 per vector");
    end
    checks++; if (n_b2b == 0) failures++;
    checks++; if (n_ignored == 0) failures++;
    checks++; if (n_zero_cw == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
