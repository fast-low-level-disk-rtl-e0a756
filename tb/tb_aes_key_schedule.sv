// tb_aes_key_schedule: expands the two cipher keys of the AES standard's
// examples and compares round keys 1 and 10 with the printed values; checks
// that key_ready rises exactly 11 cycles after key_load and that round key 0 is
// the cipher key.
module tb_aes_key_schedule;
  logic clk = 1'b0, rst_n = 1'b0, key_load = 1'b0;
  logic [127:0] key = '0;
  logic [10:0][127:0] rk;
  logic key_ready;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes_key_schedule dut (.clk, .rst_n, .key_load, .key, .rk, .key_ready);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic expand(input logic [127:0] k, input logic [127:0] rk1, input logic [127:0] rk10);
    int n;
    @(negedge clk);
    key = k; key_load = 1'b1;
    @(negedge clk);
    key_load = 1'b0;
    key = '0;
    n = 1;
    while (!key_ready && n < 50) begin @(negedge clk); n++; end
    check(n == 11, $sformatf("key_ready after %0d cycles, expected 11", n));
    check(rk[0] == k, "round key 0");
    check(rk[1] == rk1, $sformatf("round key 1 = %h", rk[1]));
    check(rk[10] == rk10, $sformatf("round key 10 = %h", rk[10]));
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    expand(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'ha0fafe1788542cb123a339392a6c7605,
           128'hd014f9a8c9ee2589e13f0cc8b6630ca6);
    expand(128'h000102030405060708090a0b0c0d0e0f, 128'hd6aa74fdd2af72fadaa678f1d6ab76fe,
           128'h13111d7fe3944a17f307a78b4d2b30c5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
