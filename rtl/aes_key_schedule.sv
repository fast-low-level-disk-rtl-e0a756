// aes_key_schedule: AES-128 key expansion, shared by all AES cores of the engine.
//
// A pulse on key_load captures the cipher key as round key 0. The remaining ten
// round keys are then produced one per clock cycle by a single round-key step
// (RotWord, four S-boxes, Rcon, and the chain of XORs across the four words),
// after which key_ready rises and all eleven round keys stay valid in parallel
// on rk until the next key_load. The cores read them directly: the pipelined
// cores need every round key at once.
//
// Timing: key_ready goes high 11 cycles after the key_load cycle (one cycle to
// capture the key, ten to expand it) and low on
// key_load. Sharing one expansion between the cores follows the architecture;
// the one-round-per-cycle sequential expansion is this design's choice.
module aes_key_schedule (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    key_load,
  input  fast_pkg::blk_t          key,
  output logic [10:0][127:0]      rk,
  output logic                    key_ready
);
  import fast_pkg::*;

  logic [3:0]  round_q;      // next round key index to compute, 1..10
  logic [7:0]  rcon_q;
  logic        busy_q;
  blk_t        prev;
  logic [31:0] w3_rot, w3_sub, t0, w0, w1, w2, w3;

  assign prev   = rk[round_q - 4'd1];
  assign w3_rot = {prev[23:0], prev[31:24]};

  for (genvar i = 0; i < 4; i++) begin : g_sb
    aes_sbox u_sb (.x(w3_rot[8*i +: 8]), .y(w3_sub[8*i +: 8]));
  end

  assign t0 = w3_sub ^ {rcon_q, 24'd0};
  assign w0 = prev[127:96] ^ t0;
  assign w1 = prev[95:64]  ^ w0;
  assign w2 = prev[63:32]  ^ w1;
  assign w3 = prev[31:0]   ^ w2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rk        <= '0;
      round_q   <= 4'd1;
      rcon_q    <= 8'h01;
      busy_q    <= 1'b0;
      key_ready <= 1'b0;
    end else if (key_load) begin
      rk[0]     <= key;
      round_q   <= 4'd1;
      rcon_q    <= 8'h01;
      busy_q    <= 1'b1;
      key_ready <= 1'b0;
    end else if (busy_q) begin
      rk[round_q] <= {w0, w1, w2, w3};
      rcon_q      <= xtime8(rcon_q);
      round_q     <= round_q + 4'd1;
      if (round_q == 4'd10) begin
        busy_q    <= 1'b0;
        key_ready <= 1'b1;
      end
    end
  end
endmodule
