// des_initial_permutation -- the DES initial permutation IP.
//
// Purely combinational rewiring of the 64-bit input block, the first step of
// every DES operation. The result is split by the core into L0 (bits 0..31)
// and R0 (bits 32..63). Table from the DES standard (see des_pkg); the step
// itself and its 64-bit width follow the block diagram of the design.
//
// Ports: data_in[0:63] (bit 0 = most significant), data_out[0:63] = IP(data_in).
// Timing: no clock, zero latency.
module des_initial_permutation (
  input  logic [0:63] data_in,
  output logic [0:63] data_out
);
  import des_pkg::*;

  always_comb begin
    for (int i = 0; i < 64; i++) data_out[i] = data_in[IP_TABLE[i] - 1];
  end
endmodule
