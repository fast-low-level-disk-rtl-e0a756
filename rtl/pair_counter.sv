// pair_counter: the "Counter" of the counter-mode unit. It walks the block
// pairs of an m-block sector (m = 2^LOG2M) in the order in which the BRW hash
// unit consumes them, and gives for each pair its odd and even counter values.
//
// The hashed string has m-1 = 2^LOG2M - 1 blocks Y_1..Y_{m-1}. Pair k
// (1 <= k <= m/2-1) is (Y_{2k-1}, Y_{2k}); it is one multiplication of the BRW
// tree, at tree level v = 1 + (trailing zeros of k). The multiplication of pair
// k needs the products of pairs k - 2^(u-1), u = 1 .. v-1, and may issue only
// GAP cycles after each of them (multiplier latency plus one accumulate cycle);
// the last block Y_{m-1} needs pairs m/2 - 2^(u-1), u = 1 .. LOG2M-1.
//
// The issue order is a list schedule fixed at elaboration by gen_order(): in
// every cycle the smallest k whose products are all ready is issued, or the
// cycle stays idle when none is. For m = 256 this gives 127 pairs and 5 idle
// cycles, then the slot for the last block; for small m the top of the tree
// forces more idle cycles. The schedule is a constant table of
// 2^(LOG2M-1)+4*LOG2M entries of LOG2M-1 bits (k, or 0 for idle), so the same
// sequence drives the plaintext hash, the counter mode and the ciphertext hash.
//
// Interface: start (one cycle) begins a pass. Each cycle with valid high gives
// k, ctr_odd = 2k-1 (bit 0 is therefore always 1) and ctr_even = 2k. After the
// last pair, fin is high for one cycle (the slot for the last block), and busy
// falls. Counter values in this order rather than 1,2,3,... is this design's
// choice: it lets the ciphertext pairs flow straight into the hash unit.
module pair_counter #(
  parameter int unsigned LOG2M = 8,
  parameter int unsigned GAP   = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             valid,
  output logic [LOG2M-2:0] k,
  output logic [LOG2M-1:0] ctr_odd,
  output logic [LOG2M-1:0] ctr_even,
  output logic             fin,
  output logic             busy
);
  localparam int unsigned NPAIR = (1 << (LOG2M - 1)) - 1;
  localparam int unsigned NTAB  = NPAIR + 1 + 4 * LOG2M;   // table entries
  localparam int unsigned IDX_W = $clog2(NTAB + 1);
  localparam int unsigned K_W   = LOG2M - 1;

  typedef logic [NTAB-1:0][K_W-1:0] order_t;
  typedef struct packed {
    order_t      tab;   // k per slot, 0 for an idle slot
    logic [15:0] len;   // slot of the last block
  } sched_t;

  // List schedule, computed at elaboration.
  function automatic sched_t gen_order();
    sched_t sc;
    int t_iss [NPAIR+1];
    int left, now, pick;
    bit ok;
    sc = '0;
    for (int i = 0; i <= NPAIR; i++) t_iss[i] = -1;
    left = NPAIR;
    now  = 0;
    while (left > 0 && now < NTAB) begin
      pick = 0;
      for (int kk = 1; kk <= NPAIR && pick == 0; kk++) begin
        if (t_iss[kk] < 0) begin
          ok = 1'b1;
          for (int u = 1; u < LOG2M && ((kk >> (u - 1)) % 2 == 0); u++) begin
            if (t_iss[kk - (1 << (u - 1))] < 0 ||
                now - t_iss[kk - (1 << (u - 1))] < int'(GAP)) ok = 1'b0;
          end
          if (ok) pick = kk;
        end
      end
      if (pick != 0) begin
        sc.tab[now] = K_W'(pick);
        t_iss[pick] = now;
        left--;
      end
      now++;
    end
    // the last block waits for its own products
    for (int u = 1; u < LOG2M; u++) begin
      if (now < t_iss[NPAIR + 1 - (1 << (u - 1))] + int'(GAP))
        now = t_iss[NPAIR + 1 - (1 << (u - 1))] + int'(GAP);
    end
    sc.len = 16'(now);
    return sc;
  endfunction

  localparam sched_t SCHED = gen_order();
  localparam order_t ORDER = SCHED.tab;
  localparam int     LEN   = int'(SCHED.len);

  logic [IDX_W-1:0] idx_q;
  logic             busy_q;

  assign busy     = busy_q;
  assign k        = ORDER[idx_q];
  assign valid    = busy_q && (int'(idx_q) < LEN) && (k != '0);
  assign fin      = busy_q && (int'(idx_q) == LEN);
  assign ctr_even = {k, 1'b0};
  assign ctr_odd  = {k, 1'b1} - (LOG2M)'(2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx_q  <= '0;
      busy_q <= 1'b0;
    end else if (start) begin
      idx_q  <= '0;
      busy_q <= 1'b1;
    end else if (busy_q) begin
      if (int'(idx_q) == LEN) busy_q <= 1'b0;
      else                    idx_q  <= idx_q + 1'b1;
    end
  end
endmodule
