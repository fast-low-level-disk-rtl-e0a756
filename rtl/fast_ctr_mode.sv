// fast_ctr_mode: the counter-mode unit of FAST[AES,BRW]-2, two pipelined AES
// cores ("odd" and "even") fed by one pair counter. It also encrypts single
// blocks on the odd core.
//
// Counter mode computes C_i = X_i ^ E_K(Z ^ bin(i)) for the counter values
// i = 1 .. m-2. Per cycle the pair counter gives one odd value 2k-1 and one even
// value 2k. Z ^ (2k-1) enters the odd core through multiplexer M1 and Z ^ 2k
// enters the even core, so both keystream blocks of a pair leave together 11
// cycles later. At that moment the caller presents the matching plaintext
// blocks: the odd one through m5 (the M5 multiplexer output, driven with Podd)
// and the even one on p_even. Multiplexer M2 then gives E_K(...) ^ m5 for
// counter blocks and the bare E_K(...) for single-block encryptions.
//
// Single blocks: with single_valid high and the counter idle, m5 enters the odd
// core (M1 selects M5) with the caller's tag kind; odd_out is E_K(m5) 11 cycles
// later with the same kind. Counter blocks carry kind TG_CTR and their pair
// index k.
//
// The structure (two cores, M1, M2, counter with odd and even outputs, XOR with
// Z) follows the architecture. Counting in the BRW pair order of pair_counter
// rather than 1,2,3,... is this design's choice.
module fast_ctr_mode #(
  parameter int unsigned LOG2M = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [10:0][127:0]    rk,
  // pair counter
  input  logic                  cnt_start,
  output logic                  cnt_valid,
  output logic [LOG2M-2:0]      cnt_k,
  output logic                  cnt_fin,
  output logic                  cnt_busy,
  input  logic                  ctr_en,        // counter values drive the cores
  input  fast_pkg::blk_t        z,
  // single-block path and plaintext for the output XOR (M5 output)
  input  logic                  single_valid,
  input  fast_pkg::tag_kind_t   single_kind,
  input  fast_pkg::blk_t        m5,
  input  fast_pkg::blk_t        p_even,
  // outputs
  output logic                  odd_valid,
  output fast_pkg::tag_kind_t   odd_kind,
  output logic [LOG2M-2:0]      odd_k,
  output fast_pkg::blk_t        odd_out,
  output logic                  even_valid,
  output fast_pkg::blk_t        even_out
);
  import fast_pkg::*;

  localparam int unsigned OTAG_W = 3 + LOG2M - 1;

  logic [LOG2M-1:0] ctr_odd, ctr_even;
  logic             use_ctr;
  blk_t             m1, in_even;
  logic [OTAG_W-1:0] otag_in, otag_out;
  blk_t             aes_odd, aes_even;
  logic             vo, ve;
  logic [LOG2M-2:0] etag_out;

  pair_counter #(.LOG2M(LOG2M)) u_counter (
    .clk, .rst_n,
    .start   (cnt_start),
    .valid   (cnt_valid),
    .k       (cnt_k),
    .ctr_odd (ctr_odd),
    .ctr_even(ctr_even),
    .fin     (cnt_fin),
    .busy    (cnt_busy)
  );

  assign use_ctr = ctr_en && cnt_valid;
  // M1
  assign m1      = use_ctr ? (z ^ 128'(ctr_odd)) : m5;
  assign in_even = z ^ 128'(ctr_even);
  assign otag_in = use_ctr ? {TG_CTR, cnt_k} : {single_kind, cnt_k};

  aes_pipe_enc #(.TAG_W(OTAG_W)) u_aes_odd (
    .clk, .rst_n, .rk,
    .in_valid (use_ctr || single_valid),
    .din      (m1),
    .in_tag   (otag_in),
    .out_valid(vo),
    .dout     (aes_odd),
    .out_tag  (otag_out)
  );

  aes_pipe_enc #(.TAG_W(LOG2M-1)) u_aes_even (
    .clk, .rst_n, .rk,
    .in_valid (use_ctr),
    .din      (in_even),
    .in_tag   (cnt_k),
    .out_valid(ve),
    .dout     (aes_even),
    .out_tag  (etag_out)
  );

  assign odd_valid  = vo;
  assign odd_kind   = tag_kind_t'(otag_out[OTAG_W-1 -: 3]);
  assign odd_k      = otag_out[LOG2M-2:0];
  // M2
  assign odd_out    = (odd_kind == TG_CTR) ? (aes_odd ^ m5) : aes_odd;
  assign even_valid = ve;
  assign even_out   = aes_even ^ p_even;

  // The two cores run in lock step on counter pairs.
  a_pair_sync: assert property (@(posedge clk) disable iff (!rst_n)
    ve |-> (vo && odd_kind == TG_CTR && odd_k == etag_out))
    else $error("fast_ctr_mode: odd and even keystream out of step");
endmodule
