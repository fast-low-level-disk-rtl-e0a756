// fast_tb_body: end-to-end test bench body for fast_brw2_top, shared by the
// small and the full-size bench. It loads a key, encrypts NSECT random sectors
// with random tweaks (changing the key halfway), answers the engine's block
// requests from an array the way a sector buffer would, and compares every
// ciphertext block with the reference FAST encryption of fast_ref_pkg. It also
// checks that each block leaves exactly once, the cycle count per sector, and
// that every mechanism of the engine was exercised: the tau encryption, the two
// Feistel encryptions, counter pairs on both cores, pair-order block requests,
// drain cycles of the pair schedule, final and single products of the hash
// unit, and a key reload.
module fast_tb_body #(
  parameter int unsigned LOG2M = 3,
  parameter int unsigned NSECT = 3,
  parameter bit          FULL  = 1'b0   // instantiate the top with its defaults
);
  import fast_ref_pkg::*;

  localparam int unsigned M     = 1 << LOG2M;
  localparam logic [127:0] FSTR = '1;
  // cycles from the start cycle to the done cycle (see README): 51 + 2S, with
  // S = slots of one pass of the pair schedule before the last-block slot
  // (m/2 - 1 pairs plus idle cycles): 132 for m = 256, 10 for m = 8.
  function automatic int expected_cycles();
    case (LOG2M)
      8:       return 51 + 2 * 132;
      3:       return 51 + 2 * 10;
      default: return 0;
    endcase
  endfunction

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic key_load = 1'b0, start = 1'b0;
  logic [127:0] key = '0;
  logic key_ready, busy, done;
  logic req_odd_valid, req_odd_tweak, req_even_valid, c_valid;
  logic [LOG2M:0] req_odd_idx, req_even_idx, c_odd_idx, c_even_idx;
  logic [127:0] p_odd, p_even, c_odd, c_even;

  logic [127:0] x [M+1];
  logic [127:0] exp_c [];
  logic [127:0] tweak;
  int  seen [M+1];
  int  checks = 0, failures = 0;
  int  cyc = 0, start_cyc = 0;
  // mechanism counters
  int  n_tau = 0, n_f1 = 0, n_f2 = 0, n_ctr_pairs = 0, n_ooo_req = 0, n_drain = 0;
  int  n_final = 0, n_single = 0, n_keyload = 0;
  int  last_req_odd = 0;

  if (FULL) begin : g_full
    fast_brw2_top dut (.*);
  end else begin : g_small
    fast_brw2_top #(.LOG2M(LOG2M)) dut (.*);
  end

  // Host sector buffer: answers requests in the same cycle.
  always_comb begin
    p_odd  = req_odd_tweak ? tweak : x[req_odd_idx];
    p_even = x[req_even_idx];
  end

  always @(posedge clk) cyc <= cyc + 1;

  // Observe internal events to count mechanisms.
  if (FULL) begin : g_obs_full
    always @(posedge clk) if (rst_n) begin
      if (g_full.dut.u_ctr.odd_valid) begin
        case (g_full.dut.u_ctr.odd_kind)
          fast_pkg::TG_TAU: n_tau++;
          fast_pkg::TG_F1:  n_f1++;
          fast_pkg::TG_F2:  n_f2++;
          fast_pkg::TG_CTR: if (g_full.dut.u_ctr.even_valid) n_ctr_pairs++;
          default: ;
        endcase
      end
      if (g_full.dut.u_ctr.cnt_busy && !g_full.dut.u_ctr.cnt_valid && !g_full.dut.u_ctr.cnt_fin)
        n_drain++;
      if (g_full.dut.u_brw.out_valid)
        if (g_full.dut.u_brw.out_op == fast_pkg::BOP_FINAL) n_final++; else n_single++;
    end
  end else begin : g_obs_small
    always @(posedge clk) if (rst_n) begin
      if (g_small.dut.u_ctr.odd_valid) begin
        case (g_small.dut.u_ctr.odd_kind)
          fast_pkg::TG_TAU: n_tau++;
          fast_pkg::TG_F1:  n_f1++;
          fast_pkg::TG_F2:  n_f2++;
          fast_pkg::TG_CTR: if (g_small.dut.u_ctr.even_valid) n_ctr_pairs++;
          default: ;
        endcase
      end
      if (g_small.dut.u_ctr.cnt_busy && !g_small.dut.u_ctr.cnt_valid && !g_small.dut.u_ctr.cnt_fin)
        n_drain++;
      if (g_small.dut.u_brw.out_valid)
        if (g_small.dut.u_brw.out_op == fast_pkg::BOP_FINAL) n_final++; else n_single++;
    end
  end

  // Requests: count plaintext pairs requested out of natural order.
  always @(posedge clk) if (rst_n && req_odd_valid && !req_odd_tweak && req_even_valid) begin
    if (int'(req_odd_idx) != last_req_odd + 2 && int'(req_odd_idx) > 2) n_ooo_req++;
    last_req_odd = int'(req_odd_idx);
    if (req_even_idx != req_odd_idx + 1) begin
      failures++;
      $display("FAIL: even request %0d does not follow odd request %0d", req_even_idx, req_odd_idx);
    end
  end

  // Output checker.
  always @(posedge clk) if (rst_n && c_valid) begin
    checks += 2;
    if (c_odd_idx < 1 || c_odd_idx > M || c_odd !== exp_c[c_odd_idx]) begin
      failures++;
      $display("FAIL: C%0d = %h expected %h", c_odd_idx, c_odd,
               (c_odd_idx <= M) ? exp_c[c_odd_idx] : '0);
    end
    if (c_even_idx < 1 || c_even_idx > M || c_even !== exp_c[c_even_idx]) begin
      failures++;
      $display("FAIL: C%0d = %h expected %h", c_even_idx, c_even,
               (c_even_idx <= M) ? exp_c[c_even_idx] : '0);
    end
    if (c_odd_idx <= M)  seen[c_odd_idx]++;
    if (c_even_idx <= M) seen[c_even_idx]++;
  end

  task automatic load_key(input logic [127:0] k);
    @(negedge clk);
    key = k; key_load = 1'b1;
    @(negedge clk);
    key_load = 1'b0;
    n_keyload++;
    while (!key_ready) @(negedge clk);
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : main
    int done_cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_key({$urandom, $urandom, $urandom, $urandom});
    check(!busy, "idle after reset");
    for (int s = 0; s < NSECT; s++) begin
      if (s == NSECT / 2 && s != 0) load_key({$urandom, $urandom, $urandom, $urandom});
      for (int i = 0; i <= M; i++) begin
        x[i] = {$urandom, $urandom, $urandom, $urandom};
        seen[i] = 0;
      end
      tweak = {$urandom, $urandom, $urandom, $urandom};
      fast_ref_pkg::fast_enc(key, FSTR, tweak, x, LOG2M, exp_c);
      // start
      start = 1'b1;
      start_cyc = cyc;
      @(negedge clk);
      start = 1'b0;
      while (!done) @(negedge clk);
      done_cyc = cyc;
      check(done_cyc - start_cyc == expected_cycles(),
            $sformatf("sector %0d took %0d cycles, expected %0d", s, done_cyc - start_cyc,
                      expected_cycles()));
      @(negedge clk);
      for (int i = 1; i <= M; i++)
        check(seen[i] == 1, $sformatf("block %0d left %0d times", i, seen[i]));
      $display("sector %0d done in %0d cycles", s, done_cyc - start_cyc);
    end
    // every mechanism must have happened
    check(n_tau == NSECT,            $sformatf("tau encryptions %0d", n_tau));
    check(n_f1 == NSECT && n_f2 == NSECT, $sformatf("Feistel encryptions %0d %0d", n_f1, n_f2));
    check(n_ctr_pairs == NSECT * (M / 2 - 1), $sformatf("counter pairs %0d", n_ctr_pairs));
    check(n_final == 2 * NSECT,      $sformatf("final hash products %0d", n_final));
    check(n_single == 2 * NSECT,     $sformatf("single products %0d", n_single));
    check(n_drain > 0,               "no drain cycles in the pair schedule");
    check(n_ooo_req > 0,             "no out-of-order pair request");
    check(n_keyload >= 2,            "no key reload");
    $display("mechanisms: tau=%0d F1=%0d F2=%0d ctr_pairs=%0d final=%0d single=%0d drain=%0d out_of_order_req=%0d key_loads=%0d",
             n_tau, n_f1, n_f2, n_ctr_pairs, n_final, n_single, n_drain, n_ooo_req, n_keyload);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (NSECT * (expected_cycles() + 40) + 200) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
