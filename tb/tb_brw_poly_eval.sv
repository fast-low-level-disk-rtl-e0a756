// tb_brw_poly_eval: hashes random 255-block strings (m = 256) with the BRW unit
// and compares tau*BRW and tau^2*BRW with the bottom-up reference of
// fast_ref_pkg; also checks single products x*tau and the 4-cycle latency of
// results. Pairs are fed level by level, shuffled within each level, with four
// idle cycles before every level above the first and before the last block: an
// order different from the engine's own, which the unit must accept too. Three
// hashes run back to back, the last under a new tau, so cleared accumulators
// are checked as well.
module tb_brw_poly_eval;
  import fast_ref_pkg::*;
  localparam int LOG2M = 8;
  localparam int M = 1 << LOG2M, P = M / 2 - 1;
  logic clk = 1'b0, rst_n = 1'b0;
  logic tau_load = 1'b0, in_valid = 1'b0, sq_final = 1'b0, out_valid;
  logic [127:0] tau_in = '0, y_odd = '0, y_even = '0, out;
  fast_pkg::brw_op_t in_op = fast_pkg::BOP_PAIR, out_op;
  logic [LOG2M-2:0] in_k = '0;
  int checks = 0, failures = 0, cyc = 0;
  logic [127:0] y [];
  logic [127:0] tau;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  brw_poly_eval #(.LOG2M(LOG2M)) dut (.clk, .rst_n, .tau_load, .tau_in, .in_valid, .in_op,
                                      .in_k, .sq_final, .y_odd, .y_even, .out_valid, .out_op,
                                      .out);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic idle(input int n);
    in_valid = 1'b0;
    repeat (n) @(negedge clk);
  endtask

  // Wait for a result and check it and its latency.
  task automatic expect_out(input int t0, input fast_pkg::brw_op_t op, input logic [127:0] e);
    int n = 0;
    while (!out_valid && n < 20) begin @(negedge clk); n++; end
    check(out_valid && out_op == op, "no result");
    check(out == e, $sformatf("result %h expected %h", out, e));
    check(cyc - t0 == 4, $sformatf("result latency %0d, expected 4", cyc - t0));
  endtask

  task automatic hash(input bit sq);
    int order [$];
    int t0;
    logic [127:0] e;
    y = new[M - 1];
    foreach (y[i]) y[i] = {$urandom, $urandom, $urandom, $urandom};
    for (int v = 1; v < LOG2M; v++) begin
      order.delete();
      for (int i = 0; i < (1 << (LOG2M - 1 - v)); i++) order.push_back((2 * i + 1) << (v - 1));
      order.shuffle();
      if (v > 1) idle(4);
      foreach (order[i]) begin
        in_valid = 1'b1; in_op = fast_pkg::BOP_PAIR; in_k = 7'(order[i]);
        y_odd = y[2 * order[i] - 2]; y_even = y[2 * order[i] - 1];
        @(negedge clk);
      end
    end
    idle(4);
    in_valid = 1'b1; in_op = fast_pkg::BOP_FINAL; sq_final = sq; y_odd = y[M - 2];
    t0 = cyc;
    @(negedge clk);
    in_valid = 1'b0;
    e = brw(tau, y, LOG2M);
    e = sq ? gmul(gmul(tau, tau), e) : gmul(tau, e);
    expect_out(t0, fast_pkg::BOP_FINAL, e);
  endtask

  task automatic new_tau();
    tau = {$urandom, $urandom, $urandom, $urandom};
    tau_load = 1'b1; tau_in = tau;
    @(negedge clk);
    tau_load = 1'b0;
    idle(LOG2M);
  endtask

  initial begin
    logic [127:0] x;
    int t0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    new_tau();
    hash(1'b0);
    hash(1'b1);
    for (int i = 0; i < 5; i++) begin
      x = {$urandom, $urandom, $urandom, $urandom};
      in_valid = 1'b1; in_op = fast_pkg::BOP_SINGLE; y_odd = x; t0 = cyc;
      @(negedge clk);
      in_valid = 1'b0;
      expect_out(t0, fast_pkg::BOP_SINGLE, gmul(x, tau));
    end
    new_tau();
    hash(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
