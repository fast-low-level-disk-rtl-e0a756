// fast_brw2_top: FAST[AES,BRW]-2, a tweakable enciphering engine that encrypts
// one disk sector of m = 2^LOG2M 128-bit blocks (m = 256: 4096 bytes) with the
// sector address as the 128-bit tweak T.
//
// Algorithm (encryption), with tau = E_K(fStr) and the BRW hash over the m-1
// blocks X_3..X_m, T:
//   A1 = X1 ^ tau*BRW(X_3..X_m,T)         F1 = X2 ^ tau*A1          (H_tau)
//   F2 = A1 ^ E_K(F1)                      B2 = F1 ^ E_K(F2)         (Feistel)
//   Z  = F1 ^ F2;  C_i = X_i ^ E_K(Z ^ bin(i-2)),  i = 3..m          (counter)
//   C2 = B2 ^ tau^2*BRW(C_3..C_m,T)        C1 = F2 ^ tau*B2          (G'_tau)
//
// Datapath: the counter-mode unit (two pipelined AES cores, odd and even, and
// the pair counter), the BRW hash unit with its single Karatsuba multiplier, the
// shared AES key schedule, the registers A1, F1, F2, B2 and Z, and the
// multiplexers M3..M7 of the architecture; M1 and M2 sit in the counter-mode
// unit and M5 feeds it. A state machine sequences one sector:
//   tau      E_K(fStr) on the odd core                                11 cycles
//   H        127 plaintext pairs into the hash unit in BRW pair order,
//            then T; A1 and F1 by two single products by tau
//   Feistel  E_K(F1) on the odd core; E_K(F2) then, without a gap, the counter
//            pairs on both cores
//   G'       every ciphertext pair leaving the cores goes out and into the hash
//            unit in the same cycle; then T, tau*B2, and C1, C2 leave together.
//
// Host interface: the engine asks for blocks and the host answers in the same
// cycle. When req_odd_valid is high, p_odd must carry block req_odd_idx of the
// sector (1..m), or the tweak T if req_odd_tweak is high; when req_even_valid is
// high, p_even must carry block req_even_idx. Ciphertext leaves two blocks at a
// time on c_odd/c_even with c_valid and their block numbers; blocks 3..m leave
// in BRW pair order, blocks 1 and 2 last, with done. A key is loaded once with
// key_load; start is accepted when key_ready is high and busy is low.
//
// What follows the architecture: the datapath and the roles of the registers
// and multiplexers, feeding odd and even blocks on two ports, the tweak through
// the odd port, the shared key schedule and the 11-cycle cores. This design's
// own choices: the BRW schedule (a list schedule from pair_counter, hence blocks
// requested in that order rather than 1,2,3,...), the request/answer host
// interface, the value of fStr, and the exact cycle budget (315 cycles from
// start to done per sector at m = 256).
module fast_brw2_top #(
  parameter int unsigned   LOG2M = 8,
  parameter logic [127:0]  FSTR  = '1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // key
  input  logic                 key_load,
  input  logic [127:0]         key,
  output logic                 key_ready,
  // control
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // block requests to the host, answered in the same cycle
  output logic                 req_odd_valid,
  output logic                 req_odd_tweak,
  output logic [LOG2M:0]       req_odd_idx,
  output logic                 req_even_valid,
  output logic [LOG2M:0]       req_even_idx,
  input  logic [127:0]         p_odd,
  input  logic [127:0]         p_even,
  // ciphertext out
  output logic                 c_valid,
  output logic [LOG2M:0]       c_odd_idx,
  output logic [LOG2M:0]       c_even_idx,
  output logic [127:0]         c_odd,
  output logic [127:0]         c_even
);
  import fast_pkg::*;

  typedef enum logic [3:0] {
    S_IDLE, S_TAU, S_HASH, S_HFIN, S_A1MUL, S_F1WAIT, S_F1ENC, S_F2WAIT,
    S_F2ENC, S_CTR, S_GB2, S_CWAIT
  } state_t;

  state_t state_q, state_d;

  logic [10:0][127:0] rk;
  blk_t a1_q, f1_q, f2_q, b2_q, z_q, c2_q;

  // counter-mode unit
  logic             cnt_start, cnt_valid, cnt_fin, cnt_busy, ctr_en;
  logic [LOG2M-2:0] cnt_k, odd_k;
  logic             single_valid, odd_valid, even_valid;
  tag_kind_t        single_kind, odd_kind;
  blk_t             m5, odd_out, even_out;

  // hash unit
  logic             tau_load, b_valid, b_sq, b_out_valid;
  brw_op_t          b_op, b_out_op;
  logic [LOG2M-2:0] b_k;
  blk_t             b_yodd, b_yeven, b_out;

  aes_key_schedule u_keys (
    .clk, .rst_n, .key_load, .key, .rk, .key_ready
  );

  fast_ctr_mode #(.LOG2M(LOG2M)) u_ctr (
    .clk, .rst_n, .rk,
    .cnt_start, .cnt_valid, .cnt_k, .cnt_fin, .cnt_busy,
    .ctr_en, .z(z_q),
    .single_valid, .single_kind, .m5, .p_even,
    .odd_valid, .odd_kind, .odd_k, .odd_out,
    .even_valid, .even_out
  );

  brw_poly_eval #(.LOG2M(LOG2M)) u_brw (
    .clk, .rst_n,
    .tau_load, .tau_in(odd_out),
    .in_valid(b_valid), .in_op(b_op), .in_k(b_k), .sq_final(b_sq),
    .y_odd(b_yodd), .y_even(b_yeven),
    .out_valid(b_out_valid), .out_op(b_out_op), .out(b_out)
  );

  // Block numbers of pair k: X_{2k+1} (odd) and X_{2k+2} (even).
  function automatic logic [LOG2M:0] odd_blk(input logic [LOG2M-2:0] kk);
    return {1'b0, kk, 1'b0} + (LOG2M+1)'(1);
  endfunction
  function automatic logic [LOG2M:0] even_blk(input logic [LOG2M-2:0] kk);
    return {1'b0, kk, 1'b0} + (LOG2M+1)'(2);
  endfunction

  logic ctr_out, fin_out, f1_out, f2_out, tau_out;
  assign ctr_out = odd_valid && odd_kind == TG_CTR;
  assign fin_out = odd_valid && odd_kind == TG_FIN;
  assign f1_out  = odd_valid && odd_kind == TG_F1;
  assign f2_out  = odd_valid && odd_kind == TG_F2;
  assign tau_out = odd_valid && odd_kind == TG_TAU;

  always_comb begin
    state_d        = state_q;
    busy           = (state_q != S_IDLE);
    done           = 1'b0;
    req_odd_valid  = 1'b0;
    req_odd_tweak  = 1'b0;
    req_odd_idx    = '0;
    req_even_valid = 1'b0;
    req_even_idx   = '0;
    c_valid        = 1'b0;
    c_odd_idx      = '0;
    c_even_idx     = '0;
    c_odd          = odd_out;     // M6 default: Codd
    c_even         = even_out;    // M7 default: Ceven
    cnt_start      = 1'b0;
    ctr_en         = (state_q == S_CTR);
    single_valid   = 1'b0;
    single_kind    = TG_NONE;
    m5             = p_odd;       // M5 default: Podd
    tau_load       = 1'b0;
    b_valid        = 1'b0;
    b_op           = BOP_PAIR;
    b_k            = cnt_k;
    b_sq           = 1'b0;
    b_yodd         = p_odd;       // M3 default: Podd
    b_yeven        = p_even;      // M4 default: Peven

    unique case (state_q)
      S_IDLE: if (start && key_ready) begin
        single_valid = 1'b1;
        single_kind  = TG_TAU;
        m5           = FSTR;
        state_d      = S_TAU;
      end
      S_TAU: if (tau_out) begin
        tau_load  = 1'b1;
        cnt_start = 1'b1;
        state_d   = S_HASH;
      end
      S_HASH: begin
        if (cnt_valid) begin
          req_odd_valid  = 1'b1;
          req_odd_idx    = odd_blk(cnt_k);
          req_even_valid = 1'b1;
          req_even_idx   = even_blk(cnt_k);
          b_valid        = 1'b1;
        end else if (cnt_fin) begin
          req_odd_valid  = 1'b1;
          req_odd_tweak  = 1'b1;
          b_valid        = 1'b1;
          b_op           = BOP_FINAL;
          state_d        = S_HFIN;
        end
      end
      S_HFIN: if (b_out_valid) begin             // h = tau*BRW ready
        req_odd_valid = 1'b1;
        req_odd_idx   = (LOG2M+1)'(1);
        state_d       = S_A1MUL;
      end
      S_A1MUL: begin                             // tau * A1
        b_valid = 1'b1;
        b_op    = BOP_SINGLE;
        b_yodd  = a1_q;                          // M3 = A1
        state_d = S_F1WAIT;
      end
      S_F1WAIT: if (b_out_valid) begin
        req_even_valid = 1'b1;
        req_even_idx   = (LOG2M+1)'(2);
        state_d        = S_F1ENC;
      end
      S_F1ENC: begin
        single_valid = 1'b1;
        single_kind  = TG_F1;
        m5           = f1_q;
        state_d      = S_F2WAIT;
      end
      S_F2WAIT: if (f1_out) state_d = S_F2ENC;
      S_F2ENC: begin
        single_valid = 1'b1;
        single_kind  = TG_F2;
        m5           = f2_q;
        cnt_start    = 1'b1;
        state_d      = S_CTR;
      end
      S_CTR: begin
        if (cnt_fin) begin                       // end-of-stream marker
          single_valid = 1'b1;
          single_kind  = TG_FIN;
        end
        if (ctr_out) begin                       // ciphertext pair leaves
          req_odd_valid  = 1'b1;
          req_odd_idx    = odd_blk(odd_k);
          req_even_valid = 1'b1;
          req_even_idx   = even_blk(odd_k);
          c_valid        = 1'b1;
          c_odd_idx      = odd_blk(odd_k);
          c_even_idx     = even_blk(odd_k);
          b_valid        = 1'b1;
          b_k            = odd_k;
          b_yodd         = odd_out;              // M3 = Codd
          b_yeven        = even_out;             // M4 = Ceven
        end else if (fin_out) begin
          req_odd_valid  = 1'b1;
          req_odd_tweak  = 1'b1;
          b_valid        = 1'b1;
          b_op           = BOP_FINAL;
          b_sq           = 1'b1;
          state_d        = S_GB2;
        end
      end
      S_GB2: begin                               // tau * B2
        b_valid = 1'b1;
        b_op    = BOP_SINGLE;
        b_yodd  = b2_q;                          // M3 = B2
        state_d = S_CWAIT;
      end
      S_CWAIT: if (b_out_valid && b_out_op == BOP_SINGLE) begin
        c_valid    = 1'b1;
        c_odd_idx  = (LOG2M+1)'(1);
        c_even_idx = (LOG2M+1)'(2);
        c_odd      = f2_q ^ b_out;               // M6 = C1
        c_even     = c2_q;                       // M7 = C2
        done       = 1'b1;
        state_d    = S_IDLE;
      end
      default: state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      a1_q <= '0; f1_q <= '0; f2_q <= '0; b2_q <= '0; z_q <= '0; c2_q <= '0;
    end else begin
      state_q <= state_d;
      if (state_q == S_HFIN && b_out_valid)   a1_q <= p_odd ^ b_out;
      if (state_q == S_F1WAIT && b_out_valid) f1_q <= p_even ^ b_out;
      if (f1_out) begin
        f2_q <= a1_q ^ odd_out;
        z_q  <= f1_q ^ a1_q ^ odd_out;
      end
      if (f2_out) b2_q <= f1_q ^ odd_out;
      if (state_q == S_CWAIT && b_out_valid && b_out_op == BOP_FINAL) c2_q <= b2_q ^ b_out;
    end
  end

  a_pair_out: assert property (@(posedge clk) disable iff (!rst_n)
    ctr_out |-> even_valid)
    else $error("fast_brw2_top: odd ciphertext block without its even partner");
  a_ctr_done_before_fin: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == S_CTR && fin_out) |-> !cnt_busy)
    else $error("fast_brw2_top: counter still running at end-of-stream marker");
endmodule
