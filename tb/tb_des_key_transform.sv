// Testbench for des_key_transform: walks two keys through all sixteen rounds
// in encryption order (K1..K16) and in decryption order (K16..K1), applying
// the C,D value each round should see and comparing the round key and the
// C,D value handed on with reference values. The first key is the textbook
// key 133457799BBCDFF1 (K1 = 1B02EFFC7072, K16 = CB3D8B0E17F5).
module tb_des_key_transform;
  localparam logic [55:0] KT_CD [64] = '{
    56'hf0ccaaf556678f,
    56'he19955faaccf1e,
    56'hc332abf5599e3d,
    56'h0ccaaff56678f5,
    56'h332abfc599e3d5,
    56'hccaaff06678f55,
    56'h32abfc399e3d55,
    56'hcaaff0c678f556,
    56'h2abfc339e3d559,
    56'h557f8663c7aab3,
    56'h55fe199f1eaacc,
    56'h57f8665c7aab33,
    56'h5fe19951eaaccf,
    56'h7f866557aab33c,
    56'hfe19955eaaccf1,
    56'hf866557aab33c7,
    56'hf0ccaaf556678f,
    56'hf866557aab33c7,
    56'hfe19955eaaccf1,
    56'h7f866557aab33c,
    56'h5fe19951eaaccf,
    56'h57f8665c7aab33,
    56'h55fe199f1eaacc,
    56'h557f8663c7aab3,
    56'h2abfc339e3d559,
    56'hcaaff0c678f556,
    56'h32abfc399e3d55,
    56'hccaaff06678f55,
    56'h332abfc599e3d5,
    56'h0ccaaff56678f5,
    56'hc332abf5599e3d,
    56'he19955faaccf1e,
    56'h78cc114b0e8227,
    56'hf19822861d044f,
    56'he330451c3a089e,
    56'h8cc11470e8227b,
    56'h330451e3a089ec,
    56'hcc11478e8227b0,
    56'h30451e3a089ec3,
    56'hc11478c8227b0e,
    56'h0451e33089ec3a,
    56'h08a3c66113d874,
    56'h228f19844f61d0,
    56'h8a3c66013d8741,
    56'h28f19824f61d04,
    56'ha3c66083d87411,
    56'h8f19822f61d044,
    56'h3c6608ad874113,
    56'h78cc114b0e8227,
    56'h3c6608ad874113,
    56'h8f19822f61d044,
    56'ha3c66083d87411,
    56'h28f19824f61d04,
    56'h8a3c66013d8741,
    56'h228f19844f61d0,
    56'h08a3c66113d874,
    56'h0451e33089ec3a,
    56'hc11478c8227b0e,
    56'h30451e3a089ec3,
    56'hcc11478e8227b0,
    56'h330451e3a089ec,
    56'h8cc11470e8227b,
    56'he330451c3a089e,
    56'hf19822861d044f};
  localparam logic [47:0] KT_SUB [64] = '{
    48'h1b02effc7072,
    48'h79aed9dbc9e5,
    48'h55fc8a42cf99,
    48'h72add6db351d,
    48'h7cec07eb53a8,
    48'h63a53e507b2f,
    48'hec84b7f618bc,
    48'hf78a3ac13bfb,
    48'he0dbebede781,
    48'hb1f347ba464f,
    48'h215fd3ded386,
    48'h7571f59467e9,
    48'h97c5d1faba41,
    48'h5f43b7f2e73a,
    48'hbf918d3d3f0a,
    48'hcb3d8b0e17f5,
    48'hcb3d8b0e17f5,
    48'hbf918d3d3f0a,
    48'h5f43b7f2e73a,
    48'h97c5d1faba41,
    48'h7571f59467e9,
    48'h215fd3ded386,
    48'hb1f347ba464f,
    48'he0dbebede781,
    48'hf78a3ac13bfb,
    48'hec84b7f618bc,
    48'h63a53e507b2f,
    48'h7cec07eb53a8,
    48'h72add6db351d,
    48'h55fc8a42cf99,
    48'h79aed9dbc9e5,
    48'h1b02effc7072,
    48'h0a0f4337016c,
    48'h3b0251564646,
    48'h0d50ac5ca1c8,
    48'h9201dca0f449,
    48'h1c4a216ab622,
    48'h83392cbc4d2a,
    48'h8826c50c5a52,
    48'h515e28d5e070,
    48'h6488a8c1ca1d,
    48'h92a036531698,
    48'hac0e1299112d,
    48'h66322c027aa4,
    48'h8a94507029b5,
    48'h4c4a7aa3089b,
    48'ha6f108473313,
    48'h961187bc8303,
    48'h961187bc8303,
    48'ha6f108473313,
    48'h4c4a7aa3089b,
    48'h8a94507029b5,
    48'h66322c027aa4,
    48'hac0e1299112d,
    48'h92a036531698,
    48'h6488a8c1ca1d,
    48'h515e28d5e070,
    48'h8826c50c5a52,
    48'h83392cbc4d2a,
    48'h1c4a216ab622,
    48'h9201dca0f449,
    48'h0d50ac5ca1c8,
    48'h3b0251564646,
    48'h0a0f4337016c};
  localparam logic [55:0] KT_NEXT [64] = '{
    56'he19955faaccf1e,
    56'hc332abf5599e3d,
    56'h0ccaaff56678f5,
    56'h332abfc599e3d5,
    56'hccaaff06678f55,
    56'h32abfc399e3d55,
    56'hcaaff0c678f556,
    56'h2abfc339e3d559,
    56'h557f8663c7aab3,
    56'h55fe199f1eaacc,
    56'h57f8665c7aab33,
    56'h5fe19951eaaccf,
    56'h7f866557aab33c,
    56'hfe19955eaaccf1,
    56'hf866557aab33c7,
    56'hf0ccaaf556678f,
    56'hf866557aab33c7,
    56'hfe19955eaaccf1,
    56'h7f866557aab33c,
    56'h5fe19951eaaccf,
    56'h57f8665c7aab33,
    56'h55fe199f1eaacc,
    56'h557f8663c7aab3,
    56'h2abfc339e3d559,
    56'hcaaff0c678f556,
    56'h32abfc399e3d55,
    56'hccaaff06678f55,
    56'h332abfc599e3d5,
    56'h0ccaaff56678f5,
    56'hc332abf5599e3d,
    56'he19955faaccf1e,
    56'hf0ccaaf556678f,
    56'hf19822861d044f,
    56'he330451c3a089e,
    56'h8cc11470e8227b,
    56'h330451e3a089ec,
    56'hcc11478e8227b0,
    56'h30451e3a089ec3,
    56'hc11478c8227b0e,
    56'h0451e33089ec3a,
    56'h08a3c66113d874,
    56'h228f19844f61d0,
    56'h8a3c66013d8741,
    56'h28f19824f61d04,
    56'ha3c66083d87411,
    56'h8f19822f61d044,
    56'h3c6608ad874113,
    56'h78cc114b0e8227,
    56'h3c6608ad874113,
    56'h8f19822f61d044,
    56'ha3c66083d87411,
    56'h28f19824f61d04,
    56'h8a3c66013d8741,
    56'h228f19844f61d0,
    56'h08a3c66113d874,
    56'h0451e33089ec3a,
    56'hc11478c8227b0e,
    56'h30451e3a089ec3,
    56'hcc11478e8227b0,
    56'h330451e3a089ec,
    56'h8cc11470e8227b,
    56'he330451c3a089e,
    56'hf19822861d044f,
    56'h78cc114b0e8227};
  localparam logic [0:0] KT_ENC [64] = '{
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0,
    1'h0};
  localparam logic [3:0] KT_RND [64] = '{
    4'h0,
    4'h1,
    4'h2,
    4'h3,
    4'h4,
    4'h5,
    4'h6,
    4'h7,
    4'h8,
    4'h9,
    4'ha,
    4'hb,
    4'hc,
    4'hd,
    4'he,
    4'hf,
    4'h0,
    4'h1,
    4'h2,
    4'h3,
    4'h4,
    4'h5,
    4'h6,
    4'h7,
    4'h8,
    4'h9,
    4'ha,
    4'hb,
    4'hc,
    4'hd,
    4'he,
    4'hf,
    4'h0,
    4'h1,
    4'h2,
    4'h3,
    4'h4,
    4'h5,
    4'h6,
    4'h7,
    4'h8,
    4'h9,
    4'ha,
    4'hb,
    4'hc,
    4'hd,
    4'he,
    4'hf,
    4'h0,
    4'h1,
    4'h2,
    4'h3,
    4'h4,
    4'h5,
    4'h6,
    4'h7,
    4'h8,
    4'h9,
    4'ha,
    4'hb,
    4'hc,
    4'hd,
    4'he,
    4'hf};
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

  logic [0:55] cd_in, cd_out;
  logic [3:0]  rnd;
  logic        enc;
  logic [0:47] subkey;
  des_key_transform dut (.cd_in(cd_in), .round(rnd), .encrypt(enc), .cd_out(cd_out), .subkey(subkey));

  initial begin
    foreach (KT_CD[i]) begin
      cd_in = KT_CD[i];
      rnd   = KT_RND[i];
      enc   = KT_ENC[i];
      #1;
      check(subkey == KT_SUB[i], $sformatf("vector %0d: subkey %h, expected %h", i, subkey, KT_SUB[i]));
      check(cd_out == KT_NEXT[i], $sformatf("vector %0d: cd_out %h, expected %h", i, cd_out, KT_NEXT[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
