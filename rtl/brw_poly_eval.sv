// brw_poly_eval: BRW polynomial hash unit with one pipelined Karatsuba
// multiplier. It evaluates
//     out = tau^e * BRW_tau(Y_1, ..., Y_{m-1}),   e in {1, 2},  m = 2^LOG2M,
// which is h (e = 1) or h' (e = 2) of FAST, and also single products x * tau.
//
// How the BRW tree is computed. For m-1 = 2^L - 1 blocks the BRW polynomial is
// a balanced tree; it takes one multiplication per block pair, 127 for m = 256:
//   pair k = (Y_{2k-1}, Y_{2k}), j = 2k, level v = number of trailing zeros of j
//   level 1:   P_j = (tau ^ Y_{j-1}) * (tau^2 ^ Y_j)
//   level v>1: P_j = (Y_{j-1} ^ P_{j-2} ^ P_{j-4} ^ ... ^ P_{j-2^(v-1)})
//                    * (tau^(2^v) ^ Y_j)
//   BRW = Y_{m-1} ^ P_{m-2} ^ P_{m-4} ^ ... ^ P_{m/2}
// Every product P_j is used exactly once, by the multiplication at
// j + 2^v (or by the final sum when that is m). So instead of storing products,
// the unit keeps one accumulator per consumer (m/4 of them): each product
// leaving the multiplier is XORed into its consumer's accumulator, and the
// consumer reads and clears it when it issues. tau^(2^i) for i < LOG2M come
// from a chain of squarers loaded with tau.
//
// Interface: tau_load/tau_in load the hash key (tau and tau^2 are valid the
// next cycle, tau^(2^i) i cycles later). One operation may be issued per cycle
// on in_valid:
//   BOP_PAIR   y_odd = Y_{2k-1}, y_even = Y_{2k}, pair index k;
//   BOP_FINAL  y_odd = Y_{m-1}; returns tau^e * BRW, e = 2 if sq_final else 1,
//              and leaves the accumulators cleared for the next hash;
//   BOP_SINGLE y_odd = x; returns x * tau.
// Pairs may come in any order in which a consumer issues at least 5 cycles
// after the last product it needs was issued (pair_counter gives such an
// order); an assertion checks it. FINAL and SINGLE results appear on out with
// out_valid 4 cycles after issue; out_op says which.
//
// The pairing of blocks per multiplication and the squarings follow the
// description of BRW; the issue order and the per-consumer accumulators are
// this design's own schedule.
module brw_poly_eval #(
  parameter int unsigned LOG2M = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               tau_load,
  input  fast_pkg::blk_t     tau_in,
  input  logic               in_valid,
  input  fast_pkg::brw_op_t  in_op,
  input  logic [LOG2M-2:0]   in_k,
  input  logic               sq_final,
  input  fast_pkg::blk_t     y_odd,
  input  fast_pkg::blk_t     y_even,
  output logic               out_valid,
  output fast_pkg::brw_op_t  out_op,
  output fast_pkg::blk_t     out
);
  import fast_pkg::*;

  localparam int unsigned NSLOT  = 1 << (LOG2M - 2);   // consumers of products
  localparam int unsigned SLOT_W = (LOG2M > 2) ? LOG2M - 2 : 1;
  localparam int unsigned TAG_W  = 2 + SLOT_W;
  localparam int unsigned POW_W  = $clog2(LOG2M);

  blk_t pow_q [LOG2M];       // pow_q[i] = tau^(2^i)
  blk_t acc_q [NSLOT];

  // ------------------------------------------------------------ issue side
  logic [3:0]        lvl;        // level of the issued pair
  logic [SLOT_W-1:0] src_slot;   // accumulator read by this pair
  logic [SLOT_W-1:0] dst_slot;   // accumulator that receives its product
  logic              rd_acc;     // this issue reads (and clears) src_slot
  blk_t              opa, opb;
  logic [LOG2M-1:0]  kk;

  always_comb begin
    kk       = {1'b0, in_k};
    lvl      = 4'(tz(16'(kk))) + 4'd1;
    // consumer j' = 2k + 2^lvl; slot = j'/4 - 1 = (k + 2^(lvl-1))/2 - 1
    dst_slot = SLOT_W'(((kk + (LOG2M'(1) << (lvl - 4'd1))) >> 1) - 1'b1);
    src_slot = SLOT_W'((kk >> 1) - 1'b1);
    rd_acc   = 1'b0;
    opa      = y_odd;
    opb      = pow_q[0];
    unique case (in_op)
      BOP_PAIR: begin
        if (lvl == 4'd1) begin
          opa = pow_q[0] ^ y_odd;
        end else begin
          opa    = y_odd ^ acc_q[src_slot];
          rd_acc = in_valid;
        end
        opb = pow_q[POW_W'(lvl)] ^ y_even;
      end
      BOP_FINAL: begin
        src_slot = SLOT_W'(NSLOT - 1);
        opa      = y_odd ^ acc_q[NSLOT-1];
        opb      = sq_final ? pow_q[1] : pow_q[0];
        rd_acc   = in_valid;
      end
      default: begin
        opa = y_odd;
        opb = pow_q[0];
      end
    endcase
  end

  // ------------------------------------------------------------ multiplier
  logic             m_vld;
  blk_t             m_p;
  logic [TAG_W-1:0] m_tag;
  brw_op_t          m_op;
  logic [SLOT_W-1:0] m_slot;

  gf128_mul_kara #(.TAG_W(TAG_W)) u_mul (
    .clk, .rst_n,
    .in_valid (in_valid),
    .a        (opa),
    .b        (opb),
    .in_tag   ({in_op, dst_slot}),
    .out_valid(m_vld),
    .p        (m_p),
    .out_tag  (m_tag)
  );

  assign m_op   = brw_op_t'(m_tag[TAG_W-1 -: 2]);
  assign m_slot = m_tag[SLOT_W-1:0];

  // ------------------------------------------------------------ state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LOG2M; i++) pow_q[i] <= '0;
      for (int s = 0; s < NSLOT; s++) acc_q[s] <= '0;
    end else begin
      if (tau_load) begin
        pow_q[0] <= tau_in;
        pow_q[1] <= gf128_sq(tau_in);
      end else begin
        pow_q[1] <= gf128_sq(pow_q[0]);
      end
      for (int i = 2; i < LOG2M; i++) pow_q[i] <= gf128_sq(pow_q[i-1]);
      if (rd_acc) acc_q[src_slot] <= '0;
      if (m_vld && m_op == BOP_PAIR) acc_q[m_slot] <= acc_q[m_slot] ^ m_p;
    end
  end

  assign out_valid = m_vld && (m_op != BOP_PAIR);
  assign out_op    = m_op;
  assign out       = m_p;

  // ------------------------------------------------------------ checks
  // Products still on their way to each accumulator; a consumer must not read
  // its accumulator while any is in flight.
  logic [3:0] pend_q [NSLOT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSLOT; s++) pend_q[s] <= '0;
    end else begin
      for (int s = 0; s < NSLOT; s++)
        pend_q[s] <= pend_q[s]
                   + 4'(in_valid && in_op == BOP_PAIR && dst_slot == SLOT_W'(s))
                   - 4'(m_vld && m_op == BOP_PAIR && m_slot == SLOT_W'(s));
    end
  end

  a_no_hazard: assert property (@(posedge clk) disable iff (!rst_n)
    rd_acc |-> (pend_q[src_slot] == 0 && !(m_vld && m_op == BOP_PAIR && m_slot == src_slot)))
    else $error("brw_poly_eval: accumulator %0d read before its products arrived", src_slot);
endmodule
