// tb_pair_counter: runs two passes of the pair counter at m = 256 and checks
// that every pair index 1..127 is given exactly once with counter values 2k-1
// and 2k, that every multiplication issues at least 5 cycles (multiplier
// latency plus accumulate) after each product it depends on, that the final
// slot respects the same distance, and the pass length 1 + P + B cycles
// (P = 127 pairs, B = 5 idle cycles: 1 near the top of the tree, where no
// pair is ready, and 4 before the final slot).
module tb_pair_counter;
  localparam int LOG2M = 8;
  localparam int M = 1 << LOG2M, P = M / 2 - 1, GAP = 5;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic valid, fin, busy;
  logic [LOG2M-2:0] k;
  logic [LOG2M-1:0] ctr_odd, ctr_even;
  int checks = 0, failures = 0, cyc = 0;
  int t_issue [P+1];
  int n_seen [P+1];
  int t_fin, t_start;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  pair_counter #(.LOG2M(LOG2M), .GAP(GAP)) dut (.clk, .rst_n, .start, .valid, .k,
                                                .ctr_odd, .ctr_even, .fin, .busy);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int tzi(input int x);
    int n = 0;
    while (x % 2 == 0) begin x /= 2; n++; end
    return n;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (valid) begin
      check(k >= 1 && int'(k) <= P, $sformatf("pair index %0d out of range", k));
      check(int'(ctr_odd) == 2 * int'(k) - 1 && int'(ctr_even) == 2 * int'(k),
            "counter values");
      t_issue[k] = cyc;
      n_seen[k]++;
    end
    if (fin) t_fin = cyc;
    check(!(valid && fin), "valid and fin together");
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i <= P; i++) n_seen[i] = 0;
      t_fin = -1;
      @(negedge clk);
      start = 1'b1; t_start = cyc;
      @(negedge clk);
      start = 1'b0;
      while (busy) @(negedge clk);
      for (int kk = 1; kk <= P; kk++) begin
        int v;
        check(n_seen[kk] == 1, $sformatf("pair %0d given %0d times", kk, n_seen[kk]));
        v = 1 + tzi(kk);
        for (int u = 1; u < v; u++)
          check(t_issue[kk] - t_issue[kk - (1 << (u - 1))] >= GAP,
                $sformatf("pair %0d issued %0d cycles after pair %0d", kk,
                          t_issue[kk] - t_issue[kk - (1 << (u - 1))], kk - (1 << (u - 1))));
      end
      for (int u = 1; u < LOG2M; u++)
        check(t_fin - t_issue[M/2 - (1 << (u - 1))] >= GAP, "final slot too early");
      check(t_fin - t_start == 1 + P + 5,
            $sformatf("pass took %0d cycles, expected %0d", t_fin - t_start, 1 + P + 5));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
