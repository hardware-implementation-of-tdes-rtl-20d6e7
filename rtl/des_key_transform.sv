// des_key_transform -- one key-schedule step ("transform i") of DES.
//
// Given the C,D pair held for the current round and the round index, it returns
// the 48-bit round key and the C,D pair for the next round.
//   Encryption, round i = 1..16: C,D are rotated left by 1 or 2 and the round
//   key is PC-2 of the rotated pair, which is also passed on.
//   Decryption needs the keys in the order K16..K1. Because the sixteen left
//   rotations add up to 28 (a full turn), C,D after round 16 equal C0,D0, so
//   K16 = PC-2(C0,D0); each following key is found by rotating right by the
//   amount of the round being undone. The round key is PC-2 of the incoming
//   pair and the right-rotated pair is passed on.
// This reverse-rotation scheme is this design's choice; it lets one register
// and one block serve both directions. Tables are the standard's.
//
// Ports: cd_in[0:55], round[3:0] (0 = first round of the operation),
// encrypt (1 encryption order, 0 decryption order), cd_out[0:55], subkey[0:47].
// Timing: combinational.
module des_key_transform (
  input  logic [0:55] cd_in,
  input  logic [3:0]  round,
  input  logic        encrypt,
  output logic [0:55] cd_out,
  output logic [0:47] subkey
);
  import des_pkg::*;

  logic [0:55] cd_left;
  logic [0:55] cd_sel;

  always_comb begin
    // Encryption round r uses shift(r); decryption round r undoes round 15-r.
    cd_left = rotate_cd(cd_in, key_shift(round), 1'b1);
    cd_out  = encrypt ? cd_left : rotate_cd(cd_in, key_shift(4'd15 - round), 1'b0);
    cd_sel  = encrypt ? cd_left : cd_in;
    for (int i = 0; i < 48; i++) subkey[i] = cd_sel[PC2_TABLE[i] - 1];
  end
endmodule
