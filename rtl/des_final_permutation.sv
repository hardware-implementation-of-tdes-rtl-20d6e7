// des_final_permutation -- the DES final permutation (IP inverse).
//
// Combinational rewiring applied after the sixteenth round to the block R16,L16
// (the two halves are crossed before it, as in the design's round diagram). It
// undoes the initial permutation, so FP(IP(x)) = x. Table from the DES standard.
//
// Ports: data_in[0:63] = {R16, L16}, data_out[0:63] = ciphertext (or plaintext
// when decrypting). Timing: no clock, zero latency.
module des_final_permutation (
  input  logic [0:63] data_in,
  output logic [0:63] data_out
);
  import des_pkg::*;

  always_comb begin
    for (int i = 0; i < 64; i++) data_out[i] = data_in[FP_TABLE[i] - 1];
  end
endmodule
