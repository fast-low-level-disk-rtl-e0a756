// gf128_mul_kara: four-stage pipelined Karatsuba multiplier in GF(2^128).
//
// The product a*b mod psi (psi = x^128 + x^7 + x^2 + x + 1) is built by three
// levels of Karatsuba splitting (128 -> 64 -> 32 -> 16 bits), which turn one
// 128x128 carry-less product into 27 products of 16-bit operands:
//   stage 1  registers the 27 pairs of 16-bit Karatsuba operands (the pre-sums),
//   stage 2  registers the 27 schoolbook 16x16 carry-less products,
//   stage 3  recombines them into the 255-bit carry-less product,
//   stage 4  reduces it modulo psi.
// A new operand pair can enter every cycle and its product leaves on p with
// out_valid exactly 4 cycles later; a TAG_W-bit tag travels alongside.
//
// The four stages and the Karatsuba method follow the architecture; how the work
// is divided among the stages is this design's choice.
module gf128_mul_kara #(
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fast_pkg::blk_t   a,
  input  fast_pkg::blk_t   b,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fast_pkg::blk_t   p,
  output logic [TAG_W-1:0] out_tag
);
  import fast_pkg::*;

  // Karatsuba operand j in {0: low half, 1: high half, 2: low^high}.
  function automatic logic [63:0] ksplit64(input logic [127:0] x, input int j);
    return (j == 0) ? x[63:0] : (j == 1) ? x[127:64] : (x[63:0] ^ x[127:64]);
  endfunction
  function automatic logic [31:0] ksplit32(input logic [63:0] x, input int j);
    return (j == 0) ? x[31:0] : (j == 1) ? x[63:32] : (x[31:0] ^ x[63:32]);
  endfunction
  function automatic logic [15:0] ksplit16(input logic [31:0] x, input int j);
    return (j == 0) ? x[15:0] : (j == 1) ? x[31:16] : (x[15:0] ^ x[31:16]);
  endfunction

  logic [15:0] opa_q [27], opb_q [27];
  logic [30:0] pp_q  [27];
  logic [254:0] full_q;
  logic [3:0]             vld_q;
  logic [3:0][TAG_W-1:0]  tag_q;

  // Recombination: three products of half width w -> one of width 2w.
  logic [62:0]  p32 [9];   // 32x32 products
  logic [126:0] p64 [3];   // 64x64 products
  logic [254:0] p128;

  always_comb begin
    for (int i = 0; i < 9; i++) begin
      p32[i] = {32'd0, pp_q[3*i]} ^ ({32'd0, pp_q[3*i] ^ pp_q[3*i+1] ^ pp_q[3*i+2]} << 16)
             ^ ({32'd0, pp_q[3*i+1]} << 32);
    end
    for (int i = 0; i < 3; i++) begin
      p64[i] = {64'd0, p32[3*i]} ^ ({64'd0, p32[3*i] ^ p32[3*i+1] ^ p32[3*i+2]} << 32)
             ^ ({64'd0, p32[3*i+1]} << 64);
    end
    p128 = {128'd0, p64[0]} ^ ({128'd0, p64[0] ^ p64[1] ^ p64[2]} << 64)
         ^ ({128'd0, p64[1]} << 128);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q  <= '0;
      tag_q  <= '0;
      full_q <= '0;
      p      <= '0;
      for (int t = 0; t < 27; t++) begin
        opa_q[t] <= '0;
        opb_q[t] <= '0;
        pp_q[t]  <= '0;
      end
    end else begin
      // stage 1: Karatsuba operand tree; index t = 9*j1 + 3*j2 + j3
      for (int j1 = 0; j1 < 3; j1++)
        for (int j2 = 0; j2 < 3; j2++)
          for (int j3 = 0; j3 < 3; j3++) begin
            opa_q[9*j1+3*j2+j3] <= ksplit16(ksplit32(ksplit64(a, j1), j2), j3);
            opb_q[9*j1+3*j2+j3] <= ksplit16(ksplit32(ksplit64(b, j1), j2), j3);
          end
      // stage 2: 16x16 schoolbook products
      for (int t = 0; t < 27; t++) pp_q[t] <= clmul16(opa_q[t], opb_q[t]);
      // stage 3: recombination
      full_q <= p128;
      // stage 4: reduction
      p      <= gf128_reduce(full_q);
      vld_q  <= {vld_q[2:0], in_valid};
      tag_q  <= {tag_q[2:0], in_tag};
    end
  end

  assign out_valid = vld_q[3];
  assign out_tag   = tag_q[3];
endmodule
