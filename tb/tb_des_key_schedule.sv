// Testbench for des_key_schedule (permuted choice 1): compares the 56-bit
// C0,D0 value with reference values, including the textbook key
// 133457799BBCDFF1 -> F0CCAAF556678F, and checks that the parity bits
// (every eighth bit) have no effect.
module tb_des_key_schedule;
  localparam logic [63:0] PC1_IN [16] = '{
    64'h133457799bbcdff1,
    64'ha170b33839263059,
    64'h953f48f1a09f76b5,
    64'h0fd630f1f29d0da9,
    64'h95e60af593bd04cf,
    64'h0cb1e29c658cda14,
    64'h3898d190f9ebdacc,
    64'h8e81973e0becd7b0,
    64'h2217beaddbc496cb,
    64'h6b4cb2424a23d596,
    64'h8a6a63ec24ede6a4,
    64'h922766581e27a1c0,
    64'h8f6d05584ef8aa38,
    64'hae97ba94d0eda82f,
    64'h1a61dbe22e44158b,
    64'h923a736994e3bf91};
  localparam logic [55:0] PC1_EXP [16] = '{
    56'hf0ccaaf556678f,
    56'h05827fd242098e,
    56'hb94cdae62e326b,
    56'hba1a9c31363e1e,
    56'hbb8a2a396eba49,
    56'h6e5416c44b969a,
    56'hfef43156080f3f,
    56'he760a8c5d6d39c,
    56'hfcb00d5d76e9c6,
    56'hc45b25cbdc2134,
    56'he96efe047f82b0,
    56'hc18c6613736189,
    56'h613ae2a5117fb8,
    56'h7f30e5187abe5e,
    56'h8c2e1a49d70955,
    56'hf12c6ed67504a7};
  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  // Watchdog: give up after a fixed number of cycles.
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  logic [0:63] key;
  logic [0:55] cd, cd_ref;
  des_key_schedule dut (.key_in(key), .cd_out(cd));

  initial begin
    foreach (PC1_IN[i]) begin
      key = PC1_IN[i];
      #1;
      check(cd == PC1_EXP[i], $sformatf("PC1(%h) = %h, expected %h", key, cd, PC1_EXP[i]));
      cd_ref = cd;
      key = PC1_IN[i] ^ 64'h0101010101010101;
      #1;
      check(cd == cd_ref, "parity bits ignored");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
