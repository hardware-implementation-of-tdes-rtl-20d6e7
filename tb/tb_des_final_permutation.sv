// Testbench for des_final_permutation: reference values from an independent
// software DES model, plus the property FP(IP(x)) = x on random blocks using
// the initial-permutation block as the inverse.
module tb_des_final_permutation;
  localparam logic [63:0] FP_IN [16] = '{
    64'h0123456789abcdef,
    64'hf2a74de452e6b438,
    64'h6513270e269e0d37,
    64'h0c5c7fd0a6a3a450,
    64'hd23f0824128b2f33,
    64'h1818e811892f902b,
    64'h9531985d5d9dc9f8,
    64'he8e25d940ed90475,
    64'h36f675cc81e74ef5,
    64'h1600a35a099950d8,
    64'h6b0d549b6f03675a,
    64'h3d9c172411e20b8f,
    64'h8d116ece1738f7d9,
    64'h0f21ddb66cad4a26,
    64'h90c192cfd3ac94af,
    64'hf28c105d1fb17c23};
  localparam logic [63:0] FP_EXP [16] = '{
    64'hff330faa00330faa,
    64'h14f03d06ca7be579,
    64'h5eb7ef2932c64020,
    64'h24a4dc5417ac17a9,
    64'h3afa193cd21b4060,
    64'ha32220f65926048c,
    64'hf900e1aff7128b6e,
    64'h26908fe427527671,
    64'ha6787f0956763fb3,
    64'ha44540a36b040b26,
    64'hf9eb9cd307c8ce01,
    64'hce2e575ad4612032,
    64'hda8dcd67ba2c0f4b,
    64'h744be7ec05b38c25,
    64'h93872b23cc2291ff,
    64'ha3c29999ed6a4970};
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

  logic [0:63] din, dout, ip_out;
  des_final_permutation   dut (.data_in(din), .data_out(dout));
  des_initial_permutation u_ip (.data_in(dout), .data_out(ip_out));

  initial begin
    foreach (FP_IN[i]) begin
      din = FP_IN[i];
      #1;
      check(dout == FP_EXP[i], $sformatf("FP(%h) = %h, expected %h", din, dout, FP_EXP[i]));
    end
    repeat (32) begin
      din = {$urandom, $urandom};
      #1;
      check(ip_out == din, $sformatf("IP(FP(%h)) = %h", din, ip_out));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
