// aes_sbox: the AES S-box as a 256-entry, 8-bit wide lookup table.
//
// The table is a package constant computed once at elaboration from the S-box definition
// (multiplicative inverse in GF(2^8), then the affine map), and the lookup is a
// plain 256-way selection, the form that maps onto six-input LUTs as one
// 256x8 multiplexer. Purely combinational.
module aes_sbox (
  input  logic [7:0] x,
  output logic [7:0] y
);
  assign y = fast_pkg::SBOX[x];
endmodule
