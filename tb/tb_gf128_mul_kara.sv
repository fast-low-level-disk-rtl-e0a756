// tb_gf128_mul_kara: streams 300 random operand pairs (one per cycle, with
// gaps) plus edge cases (zero, one, alpha^127 * alpha, all-ones) through the
// multiplier and compares each product with the shift-and-add reference of
// fast_ref_pkg. Checks the 4-cycle latency and that tags follow the products.
module tb_gf128_mul_kara;
  import fast_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, out_valid;
  logic [127:0] a = '0, b = '0, p;
  logic [7:0] in_tag = '0, out_tag;
  int checks = 0, failures = 0, cyc = 0;
  logic [127:0] exp_q [$];
  int tin_q [$], tag_q [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  gf128_mul_kara #(.TAG_W(8)) dut (.clk, .rst_n, .in_valid, .a, .b, .in_tag,
                                   .out_valid, .p, .out_tag);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [127:0] e;
    int t0, tg;
    if (exp_q.size() == 0) check(0, "unexpected output");
    else begin
      e = exp_q.pop_front(); t0 = tin_q.pop_front(); tg = tag_q.pop_front();
      check(p == e, $sformatf("product %h expected %h", p, e));
      check(cyc - t0 == 4, $sformatf("latency %0d, expected 4", cyc - t0));
      check(int'(out_tag) == tg, "tag");
    end
  end

  task automatic send(input logic [127:0] x, input logic [127:0] y, input logic [127:0] e);
    in_valid = 1'b1; a = x; b = y; in_tag = 8'(tag_q.size() + checks);
    exp_q.push_back(e); tin_q.push_back(cyc); tag_q.push_back(int'(in_tag));
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    logic [127:0] x, y;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    send('0, '1, '0);
    send(128'd1, 128'h0123456789abcdef0123456789abcdef, 128'h0123456789abcdef0123456789abcdef);
    send(128'd1 << 127, 128'd2, 128'h87);          // alpha^128 = alpha^7+alpha^2+alpha+1
    send('1, '1, gmul('1, '1));
    for (int i = 0; i < 300; i++) begin
      x = {$urandom, $urandom, $urandom, $urandom};
      y = {$urandom, $urandom, $urandom, $urandom};
      send(x, y, gmul(x, y));
      if (i % 37 == 36) @(negedge clk);
    end
    repeat (6) @(negedge clk);
    check(exp_q.size() == 0, "products lost");
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
