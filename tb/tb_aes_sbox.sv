// tb_aes_sbox: compares all 256 entries of aes_sbox with the S-box produced by
// the reference generator loop of fast_ref_pkg, and a few entries with values
// printed in the AES standard (S(00)=63, S(01)=7c, S(53)=ed, S(ff)=16).
module tb_aes_sbox;
  logic [7:0] x, y;
  int checks = 0, failures = 0;
  fast_ref_pkg::sbox_t ref_sb;

  aes_sbox dut (.x, .y);

  task automatic check(input logic [7:0] got, input logic [7:0] want, input logic [7:0] in);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL: S(%h) = %h expected %h", in, got, want);
    end
  endtask

  initial begin
    ref_sb = fast_ref_pkg::make_sbox();
    for (int i = 0; i < 256; i++) begin
      x = 8'(i);
      #1;
      check(y, ref_sb[i], x);
    end
    x = 8'h00; #1 check(y, 8'h63, x);
    x = 8'h01; #1 check(y, 8'h7c, x);
    x = 8'h53; #1 check(y, 8'hed, x);
    x = 8'hff; #1 check(y, 8'h16, x);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
