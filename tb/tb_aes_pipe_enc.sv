// tb_aes_pipe_enc: the two example encryptions of the AES standard, then 200
// random blocks under a random key entered back to back (one per cycle, with a
// few gaps) and compared with the reference AES of fast_ref_pkg. Checks the
// 11-cycle latency, one result per cycle, and that tags follow their blocks.
module tb_aes_pipe_enc;
  import fast_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, key_load = 1'b0;
  logic [127:0] key = '0;
  logic [10:0][127:0] rk;
  logic key_ready;
  logic in_valid = 1'b0, out_valid;
  logic [127:0] din = '0, dout;
  logic [7:0] in_tag = '0, out_tag;
  int checks = 0, failures = 0, cyc = 0;
  logic [127:0] exp_q [$];
  int           tin_q [$];
  int           tag_q [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  aes_key_schedule u_keys (.clk, .rst_n, .key_load, .key, .rk, .key_ready);
  aes_pipe_enc #(.TAG_W(8)) dut (.clk, .rst_n, .rk, .in_valid, .din, .in_tag,
                                 .out_valid, .dout, .out_tag);

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
      check(dout == e, $sformatf("dout %h expected %h", dout, e));
      check(cyc - t0 == 11, $sformatf("latency %0d, expected 11", cyc - t0));
      check(int'(out_tag) == tg, "tag");
    end
  end

  task automatic load(input logic [127:0] k);
    @(negedge clk); key = k; key_load = 1'b1;
    @(negedge clk); key_load = 1'b0;
    while (!key_ready) @(negedge clk);
  endtask

  task automatic send(input logic [127:0] pt, input logic [127:0] e, input int tg);
    in_valid = 1'b1; din = pt; in_tag = 8'(tg);
    exp_q.push_back(e); tin_q.push_back(cyc); tag_q.push_back(tg);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    logic [127:0] k, pt;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    load(128'h000102030405060708090a0b0c0d0e0f);
    send(128'h00112233445566778899aabbccddeeff, 128'h69c4e0d86a7b0430d8cdb78070b4c55a, 1);
    repeat (12) @(negedge clk);
    load(128'h2b7e151628aed2a6abf7158809cf4f3c);
    send(128'h3243f6a8885a308d313198a2e0370734, 128'h3925841d02dc09fbdc118597196a0b32, 2);
    repeat (12) @(negedge clk);
    k = {$urandom, $urandom, $urandom, $urandom};
    load(k);
    for (int i = 0; i < 200; i++) begin
      pt = {$urandom, $urandom, $urandom, $urandom};
      send(pt, aes128_enc(k, pt), i & 255);
      if (i % 50 == 49) @(negedge clk);
    end
    repeat (14) @(negedge clk);
    check(exp_q.size() == 0, "blocks lost in the pipeline");
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
