// tdes_core -- Triple DES (TDEA, keying in encrypt-decrypt-encrypt order).
//
// Encryption computes O = E_K3(D_K2(E_K1(I))), decryption O = D_K1(E_K2(D_K3(I))).
// Three des_core instances form a chain; pass 1 runs in the first, pass 2 in
// the second, pass 3 in the third. A small sequencer starts each pass in the
// cycle after the previous core reports ready, feeding it the previous core's
// held data_out. The key and DES direction of each pass are:
//     encrypt: pass1 K1/E, pass2 K2/D, pass3 K3/E
//     decrypt: pass1 K3/D, pass2 K2/E, pass3 K1/D
// Two-key TDES (first and third keys equal) is obtained by loading key3 = key1.
//
// Ports (names as in the design's TDES block symbol): data_in[0:63],
// key1_in/key2_in/key3_in[0:63], function_select (1 encrypt, 0 decrypt),
// lddata, ldkey, reset (synchronous, active high), clk; data_out[0:63],
// out_ready.
// Timing: ldkey at a clock edge copies the three keys into key registers.
// Keys must be loaded at least one cycle before the lddata that uses them.
// lddata at edge 0 (while idle) latches function_select and starts pass 1 on
// data_in; out_ready is high from edge 51 on (three 16-cycle passes, two
// hand-over cycles and one cycle for the flag: 51 cycles per block) and stays high,
// with data_out held, until the next lddata. lddata while an operation runs is
// ignored. The operation order is the design's; the three-core chain, the key
// registers and all timing details are this implementation's choices.
module tdes_core (
  input  logic        clk,
  input  logic        reset,
  input  logic [0:63] data_in,
  input  logic [0:63] key1_in,
  input  logic [0:63] key2_in,
  input  logic [0:63] key3_in,
  input  logic        function_select,
  input  logic        lddata,
  input  logic        ldkey,
  output logic [0:63] data_out,
  output logic        out_ready
);
  import des_pkg::*;

  logic [0:63] key1_q, key2_q, key3_q;
  des_op_e     op_q;
  tdes_state_e state_q;

  logic        start;
  logic [2:0]  ld, busy, rdy;
  logic [0:63] pass_out [3];
  logic [0:63] pass_key [3];
  logic [0:63] pass_in  [3];
  logic [2:0]  pass_enc;

  assign start = lddata && (state_q == TDES_IDLE);

  // Pass configuration. Pass 1 takes its operation directly from
  // function_select in the start cycle; passes 2 and 3 use the latched one.
  always_comb begin
    des_op_e op;
    op = start ? des_op_e'(function_select) : op_q;
    pass_key[0] = (op == DES_ENCRYPT) ? key1_q : key3_q;
    pass_key[1] = key2_q;
    pass_key[2] = (op == DES_ENCRYPT) ? key3_q : key1_q;
    pass_enc[0] = (op == DES_ENCRYPT);
    pass_enc[1] = (op != DES_ENCRYPT);
    pass_enc[2] = (op == DES_ENCRYPT);
    pass_in[0]  = data_in;
    pass_in[1]  = pass_out[0];
    pass_in[2]  = pass_out[1];
    ld[0] = start;
    ld[1] = (state_q == TDES_PASS1) && rdy[0];
    ld[2] = (state_q == TDES_PASS2) && rdy[1];
  end

  for (genvar p = 0; p < 3; p++) begin : g_pass
    des_core u_des (
      .clk            (clk),
      .reset          (reset),
      .data_in        (pass_in[p]),
      .key_in         (pass_key[p]),
      .function_select(pass_enc[p]),
      .lddata         (ld[p]),
      .data_out       (pass_out[p]),
      .core_busy      (busy[p]),
      .des_out_rdy    (rdy[p])
    );
  end

  assign data_out = pass_out[2];

  always_ff @(posedge clk) begin
    if (reset) begin
      key1_q    <= '0;
      key2_q    <= '0;
      key3_q    <= '0;
      op_q      <= DES_ENCRYPT;
      state_q   <= TDES_IDLE;
      out_ready <= 1'b0;
    end else begin
      if (ldkey) begin
        key1_q <= key1_in;
        key2_q <= key2_in;
        key3_q <= key3_in;
      end
      unique case (state_q)
        TDES_IDLE:  if (start) begin
                      op_q      <= des_op_e'(function_select);
                      out_ready <= 1'b0;
                      state_q   <= TDES_PASS1;
                    end
        TDES_PASS1: if (ld[1]) state_q <= TDES_PASS2;
        TDES_PASS2: if (ld[2]) state_q <= TDES_PASS3;
        TDES_PASS3: if (rdy[2]) begin
                      out_ready <= 1'b1;
                      state_q   <= TDES_IDLE;
                    end
      endcase
    end
  end

  // Only one of the three cores is working at any time.
  assert property (@(posedge clk) disable iff (reset) $onehot0(busy));
endmodule
