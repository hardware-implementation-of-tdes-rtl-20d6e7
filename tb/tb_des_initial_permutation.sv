// Testbench for des_initial_permutation: applies fixed and random 64-bit
// blocks and compares with reference IP values computed by an independent
// software DES model (itself cross-checked against a library implementation).
// The first vector is the textbook block 0123456789ABCDEF, whose IP is
// CC00CCFF F0AAF0AA. Also checks that the map is a bijection on single bits.
module tb_des_initial_permutation;
  localparam logic [63:0] IP_IN [16] = '{
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
  localparam logic [63:0] IP_EXP [16] = '{
    64'hcc00ccfff0aaf0aa,
    64'h3dd16e066beb8433,
    64'h01a2fdc7209568be,
    64'h8e8e572478740734,
    64'h01934ae221ca66f3,
    64'h044b20b854a4b7a0,
    64'hd8bf397be582fc00,
    64'ha7acdca42b833512,
    64'hee87efb4baa74863,
    64'hc8e90134a404b80d,
    64'hd58c567b08519bf9,
    64'h20178fd5a229c3e4,
    64'hccf25dd3c964ad5c,
    64'h540cbd272cba75c9,
    64'h1a55e89affa0a89c,
    64'h497d5ab823e15a91};
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

  logic [0:63] din, dout;
  des_initial_permutation dut (.data_in(din), .data_out(dout));

  initial begin
    foreach (IP_IN[i]) begin
      din = IP_IN[i];
      #1;
      check(dout == IP_EXP[i], $sformatf("IP(%h) = %h, expected %h", din, dout, IP_EXP[i]));
    end
    for (int b = 0; b < 64; b++) begin
      din = 64'h0;
      din[b] = 1'b1;
      #1;
      check($onehot(dout), $sformatf("single bit %0d maps to one bit", b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
