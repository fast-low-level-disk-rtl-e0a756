// tb_fast_ctr_mode: checks the counter-mode unit at m = 256. A single-block
// encryption on the odd core must give E_K(m5) 11 cycles later with its tag; a
// counter pass with ctr_en low must start no encryption (the pair counter then
// only paces the plaintext hash); a counter pass with ctr_en high must give,
// for every pair k, C_odd = X_odd ^ E_K(Z ^ (2k-1)) and C_even = X_even ^
// E_K(Z ^ 2k) together, 11 cycles after the pair was counted, with the
// plaintext supplied at that moment. Expected values come from the reference
// AES of fast_ref_pkg.
module tb_fast_ctr_mode;
  import fast_ref_pkg::*;
  localparam int LOG2M = 8;
  localparam int M = 1 << LOG2M, P = M / 2 - 1;
  logic clk = 1'b0, rst_n = 1'b0, key_load = 1'b0;
  logic [127:0] key = '0;
  logic [10:0][127:0] rk;
  logic key_ready;
  logic cnt_start = 1'b0, cnt_valid, cnt_fin, cnt_busy, ctr_en = 1'b0;
  logic [LOG2M-2:0] cnt_k, odd_k;
  logic [127:0] z = '0, m5, p_even, odd_out, even_out, single_blk = '0;
  logic single_valid = 1'b0, odd_valid, even_valid;
  fast_pkg::tag_kind_t single_kind = fast_pkg::TG_NONE, odd_kind;
  logic [127:0] xo [P+1], xe [P+1];
  int t_cnt [P+1], n_out [P+1];
  int checks = 0, failures = 0, cyc = 0, n_any_out = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  aes_key_schedule u_keys (.clk, .rst_n, .key_load, .key, .rk, .key_ready);
  fast_ctr_mode #(.LOG2M(LOG2M)) dut (.clk, .rst_n, .rk, .cnt_start, .cnt_valid, .cnt_k,
    .cnt_fin, .cnt_busy, .ctr_en, .z, .single_valid, .single_kind, .m5, .p_even,
    .odd_valid, .odd_kind, .odd_k, .odd_out, .even_valid, .even_out);

  // the caller's M5: plaintext of the pair leaving, or the single block
  always_comb begin
    m5     = (odd_valid && odd_kind == fast_pkg::TG_CTR) ? xo[odd_k] : single_blk;
    p_even = xe[odd_k];
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (cnt_valid && ctr_en) t_cnt[cnt_k] = cyc;
    if (odd_valid || even_valid) n_any_out++;
    if (odd_valid && odd_kind == fast_pkg::TG_CTR) begin
      n_out[odd_k]++;
      check(even_valid, "even block missing");
      check(odd_out == (xo[odd_k] ^ aes128_enc(key, z ^ 128'(2 * odd_k - 1))),
            $sformatf("odd block of pair %0d", odd_k));
      check(even_out == (xe[odd_k] ^ aes128_enc(key, z ^ 128'(2 * odd_k))),
            $sformatf("even block of pair %0d", odd_k));
      check(cyc - t_cnt[odd_k] == 11, "counter latency");
    end
  end

  initial begin
    logic [127:0] b;
    int t0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    key = {$urandom, $urandom, $urandom, $urandom};
    key_load = 1'b1; @(negedge clk); key_load = 1'b0;
    while (!key_ready) @(negedge clk);
    // single block
    b = {$urandom, $urandom, $urandom, $urandom};
    single_valid = 1'b1; single_kind = fast_pkg::TG_F1; single_blk = b; t0 = cyc;
    @(negedge clk);
    single_valid = 1'b0;
    while (!odd_valid) @(negedge clk);
    check(cyc - t0 == 11, "single-block latency");
    check(odd_kind == fast_pkg::TG_F1 && odd_out == aes128_enc(key, b), "single-block result");
    check(!even_valid, "even core ran on a single block");
    @(negedge clk);
    // counter pass with ctr_en low: pacing only
    n_any_out = 0;
    cnt_start = 1'b1; @(negedge clk); cnt_start = 1'b0;
    while (cnt_busy) @(negedge clk);
    repeat (12) @(negedge clk);
    check(n_any_out == 0, "cores ran with ctr_en low");
    // counter pass with ctr_en high
    for (int i = 0; i <= P; i++) begin
      xo[i] = {$urandom, $urandom, $urandom, $urandom};
      xe[i] = {$urandom, $urandom, $urandom, $urandom};
      n_out[i] = 0;
    end
    z = {$urandom, $urandom, $urandom, $urandom};
    ctr_en = 1'b1;
    cnt_start = 1'b1; @(negedge clk); cnt_start = 1'b0;
    while (cnt_busy) @(negedge clk);
    ctr_en = 1'b0;
    repeat (12) @(negedge clk);
    for (int i = 1; i <= P; i++) check(n_out[i] == 1, $sformatf("pair %0d left %0d times", i, n_out[i]));
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
