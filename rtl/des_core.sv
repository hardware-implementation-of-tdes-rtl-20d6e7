// des_core -- iterative DES encryption/decryption engine.
//
// A pulse on lddata (while the core is idle) captures data_in through the
// initial permutation into the L/R registers, captures key_in through permuted
// choice 1 into the C/D key register, and latches function_select. The core
// then performs one DES round per clock for 16 clocks:
//     L(i) = R(i-1),   R(i) = L(i-1) xor F(R(i-1), K(i))
// with the round key produced on the fly by des_key_transform (reverse order
// for decryption). On the sixteenth round the swapped pair R16,L16 goes
// through the final permutation into the data_out register and des_out_rdy is
// raised.
//
// Ports (names as in the design's DES block symbol): data_in[0:63],
// key_in[0:63], function_select (1 encrypt, 0 decrypt), lddata, reset
// (synchronous, active high), clk; data_out[0:63], core_busy, des_out_rdy.
// Timing: lddata sampled at clock edge 0; core_busy is high after edges 0..15;
// data_out is valid and des_out_rdy high from edge 16 onward, i.e. 16 cycles
// per block. des_out_rdy stays high (data_out held) until the next lddata.
// lddata during core_busy is ignored.
// The round structure and the port list follow the design description; the
// one-round-per-clock schedule, polarities, reset style and the level-type
// ready flag are this implementation's choices.
module des_core (
  input  logic        clk,
  input  logic        reset,
  input  logic [0:63] data_in,
  input  logic [0:63] key_in,
  input  logic        function_select,
  input  logic        lddata,
  output logic [0:63] data_out,
  output logic        core_busy,
  output logic        des_out_rdy
);
  import des_pkg::*;

  logic [0:31] l_q, r_q;
  logic [0:55] cd_q;
  logic [3:0]  round_q;
  des_op_e     op_q;

  logic [0:63] ip_out, fp_in, fp_out;
  logic [0:55] cd_load, cd_next;
  logic [0:47] subkey;
  logic [0:31] f_out, r_next;
  logic        start;

  des_initial_permutation u_ip (.data_in(data_in), .data_out(ip_out));
  des_key_schedule        u_pc1 (.key_in(key_in), .cd_out(cd_load));
  des_key_transform       u_kt (
    .cd_in  (cd_q),
    .round  (round_q),
    .encrypt(op_q == DES_ENCRYPT),
    .cd_out (cd_next),
    .subkey (subkey)
  );
  des_f_function          u_f (.r_in(r_q), .subkey(subkey), .f_out(f_out));

  assign r_next = l_q ^ f_out;
  assign fp_in  = {r_next, r_q};   // R16, L16 (halves crossed after round 16)
  des_final_permutation   u_fp (.data_in(fp_in), .data_out(fp_out));

  assign start = lddata && !core_busy;

  always_ff @(posedge clk) begin
    if (reset) begin
      l_q         <= '0;
      r_q         <= '0;
      cd_q        <= '0;
      round_q     <= '0;
      op_q        <= DES_ENCRYPT;
      data_out    <= '0;
      core_busy   <= 1'b0;
      des_out_rdy <= 1'b0;
    end else if (start) begin
      {l_q, r_q}  <= ip_out;
      cd_q        <= cd_load;
      round_q     <= '0;
      op_q        <= des_op_e'(function_select);
      core_busy   <= 1'b1;
      des_out_rdy <= 1'b0;
    end else if (core_busy) begin
      l_q     <= r_q;
      r_q     <= r_next;
      cd_q    <= cd_next;
      round_q <= round_q + 4'd1;
      if (round_q == 4'(DES_ROUNDS - 1)) begin
        data_out    <= fp_out;
        core_busy   <= 1'b0;
        des_out_rdy <= 1'b1;
      end
    end
  end

  // The core is never busy and ready at the same time.
  assert property (@(posedge clk) disable iff (reset) !(core_busy && des_out_rdy));
endmodule
