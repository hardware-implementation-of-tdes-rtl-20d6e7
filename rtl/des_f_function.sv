// des_f_function -- the DES round function F(R, K).
//
// The 32-bit right half is expanded to 48 bits (E), XORed with the round key,
// cut into eight 6-bit groups each looked up in its S-box (outer two bits pick
// the row, inner four the column) and the 32 result bits are permuted by P.
// The design description names this "Function F" and draws it as a node fed
// by R (32 bits) and the round key (48 bits) giving 32 bits; the E, S and P
// tables inside are those of the DES standard. The S-boxes are plain
// combinational lookups (ROM-like logic), no memory.
//
// Ports: r_in[0:31], subkey[0:47], f_out[0:31]. Timing: combinational.
module des_f_function (
  input  logic [0:31] r_in,
  input  logic [0:47] subkey,
  output logic [0:31] f_out
);
  import des_pkg::*;

  logic [0:47] expanded;
  logic [0:31] s_out;
  logic [0:5]  group;

  always_comb begin
    for (int i = 0; i < 48; i++) expanded[i] = r_in[E_TABLE[i] - 1] ^ subkey[i];
    for (int s = 0; s < 8; s++) begin
      group = expanded[6*s +: 6];
      s_out[4*s +: 4] = SBOX[s][{group[0], group[5], group[1:4]}];
    end
    for (int i = 0; i < 32; i++) f_out[i] = s_out[P_TABLE[i] - 1];
  end
endmodule
