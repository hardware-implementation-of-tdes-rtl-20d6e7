// des_key_schedule -- extraction of the 56-bit working key (permuted choice 1).
//
// The 64-bit key carries a parity bit in every eighth position (bits 7, 15,
// ..., 63 counted from 0). This block drops them and reorders the other 56 bits
// into the C0 (bits 0..27) and D0 (bits 28..55) halves that the per-round key
// transforms rotate. Parity is not checked. The PC-1 table is the standard's;
// the 64-in/56-out split is that of the design's block diagram.
//
// Ports: key_in[0:63], cd_out[0:55] = {C0, D0}. Timing: combinational.
module des_key_schedule (
  input  logic [0:63] key_in,
  output logic [0:55] cd_out
);
  import des_pkg::*;

  always_comb begin
    for (int i = 0; i < 56; i++) cd_out[i] = key_in[PC1_TABLE[i] - 1];
  end
endmodule
