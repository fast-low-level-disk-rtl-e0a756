// aes_pipe_enc: fully pipelined AES-128 encryption core.
//
// Eleven register stages: the input stage applies the initial AddRoundKey
// (round key 0) to the incoming block, and each of the ten following stages is
// one AES round (SubBytes with sixteen table S-boxes, ShiftRows, MixColumns
// except in round 10, AddRoundKey). A new block may enter every cycle; its
// ciphertext appears on dout with out_valid exactly 11 cycles later, so after
// the pipeline fills one block leaves per cycle. A TAG_W-bit tag travels with
// each block so the surrounding control knows what comes out.
//
// The 11-cycle latency and the one-block-per-cycle rate follow the architecture;
// the round keys come from a shared aes_key_schedule and must stay stable while
// blocks are in flight. There is no stall: the pipeline always advances.
module aes_pipe_enc #(
  parameter int unsigned TAG_W = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [10:0][127:0]   rk,
  input  logic                 in_valid,
  input  fast_pkg::blk_t       din,
  input  logic [TAG_W-1:0]     in_tag,
  output logic                 out_valid,
  output fast_pkg::blk_t       dout,
  output logic [TAG_W-1:0]     out_tag
);
  import fast_pkg::*;

  blk_t             st_q  [11];
  logic             vld_q [11];
  logic [TAG_W-1:0] tag_q [11];
  blk_t             sub   [10];   // SubBytes output of round r+1

  for (genvar r = 0; r < 10; r++) begin : g_round
    for (genvar b = 0; b < 16; b++) begin : g_sb
      aes_sbox u_sb (.x(st_q[r][127-8*b -: 8]), .y(sub[r][127-8*b -: 8]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < 11; s++) begin
        vld_q[s] <= 1'b0;
        tag_q[s] <= '0;
        st_q[s]  <= '0;
      end
    end else begin
      st_q[0]  <= din ^ rk[0];
      vld_q[0] <= in_valid;
      tag_q[0] <= in_tag;
      for (int r = 1; r < 11; r++) begin
        st_q[r]  <= (r == 10) ? (shift_rows(sub[r-1]) ^ rk[r])
                              : (mix_columns(shift_rows(sub[r-1])) ^ rk[r]);
        vld_q[r] <= vld_q[r-1];
        tag_q[r] <= tag_q[r-1];
      end
    end
  end

  assign dout      = st_q[10];
  assign out_valid = vld_q[10];
  assign out_tag   = tag_q[10];
endmodule
