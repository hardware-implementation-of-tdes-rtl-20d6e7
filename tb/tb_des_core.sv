// Testbench for des_core: encrypts and decrypts known blocks (reference
// ciphertexts from a library DES; includes 0123456789ABCDEF under key
// 133457799BBCDFF1 -> 85E813540F0AB405 and "Now is t" under 0123456789ABCDEF
// -> 3FA40E8A984D4815), then decrypts every ciphertext back. Checks the
// 16-cycle latency from lddata to des_out_rdy, core_busy during the rounds,
// that lddata during a run is ignored, and that reset clears the flags.
module tb_des_core;
  localparam logic [63:0] D_IN [16] = '{
    64'h0123456789abcdef,
    64'h4e6f772069732074,
    64'h05c6af0758d5563d,
    64'h7631a992f0ce5835,
    64'h2b0537e65affb229,
    64'h1df9fd789c653938,
    64'h0f17a3007e62aa0a,
    64'hc4aaeac137dc76fb,
    64'h211c70cf49952399,
    64'h3f63af83bd0561e6,
    64'h6415479c65dc9f50,
    64'hdf1582b0eab477d2,
    64'h14a0f9e77f1b103c,
    64'h72fdf2022a96fb1a,
    64'h8ca8181166d22876,
    64'he22571594720771f};
  localparam logic [63:0] D_KEY [16] = '{
    64'h133457799bbcdff1,
    64'h0123456789abcdef,
    64'hd1bc52d9230d977e,
    64'hdd2e16096e36aab0,
    64'h47469a4d8cdb305f,
    64'h6a50df4db4d66a3a,
    64'h5bd86d40fc891b4a,
    64'he25a7605aec6f024,
    64'hf52ddf5d616499c9,
    64'h26a2c0bd3b1287ff,
    64'h2d1c9af0153e7c2a,
    64'h3b61867626bb7dbd,
    64'h3bbbe9eaa8948c89,
    64'h7c26847f0316909e,
    64'h96d0cc5fd4c28c2e,
    64'h43435cc52eae05cf};
  localparam logic [0:0] D_ENC [16] = '{
    1'h1,
    1'h1,
    1'h1,
    1'h0,
    1'h0,
    1'h1,
    1'h1,
    1'h1,
    1'h0,
    1'h0,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h1,
    1'h0};
  localparam logic [63:0] D_EXP [16] = '{
    64'h85e813540f0ab405,
    64'h3fa40e8a984d4815,
    64'h2037092be5f4f61d,
    64'h09236ac86c90341d,
    64'hb1413c5c5a7b863c,
    64'h8e01b0b5a876f5e7,
    64'h46193c49b6d3464d,
    64'hd3ec7e74ce493041,
    64'h6b799e38c6ddbaa4,
    64'hdb7041dd8c3975b5,
    64'h82f7befff49c8f49,
    64'hb7b58c2727310536,
    64'hc28aede4415e412c,
    64'h07f03216e9726798,
    64'hf2dec3924163b842,
    64'h82c5df1cb08f1a45};
  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  // Watchdog: give up after a fixed number of cycles.
  initial begin
    repeat (20000) @(posedge clk);
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

  logic        reset, fsel, lddata;
  logic [0:63] din, key, dout;
  logic        busy, rdy;
  des_core dut (.clk(clk), .reset(reset), .data_in(din), .key_in(key), .function_select(fsel),
                .lddata(lddata), .data_out(dout), .core_busy(busy), .des_out_rdy(rdy));

  task automatic run(input logic [0:63] d, input logic [0:63] k, input logic enc,
                     output logic [0:63] result, input bit poke_during_run);
    int cycles;
    @(negedge clk);
    din = d; key = k; fsel = enc; lddata = 1'b1;
    @(negedge clk);
    lddata = 1'b0;
    din = ~d; key = ~k; fsel = ~enc;   // inputs are latched: change them
    check(busy && !rdy, "busy after load");
    cycles = 0;
    while (!rdy) begin
      if (poke_during_run && cycles == 5) lddata = 1'b1;
      @(negedge clk);
      lddata = 1'b0;
      cycles++;
    end
    check(cycles == 16, $sformatf("latency %0d cycles, expected 16", cycles));
    check(!busy, "not busy when ready");
    result = dout;
    repeat (3) @(negedge clk);
    check(rdy && dout == result, "result held");
  endtask

  initial begin
    logic [0:63] res, back;
    reset = 1'b1; lddata = 1'b0; din = '0; key = '0; fsel = 1'b0;
    repeat (3) @(negedge clk);
    reset = 1'b0;
    check(!busy && !rdy, "idle after reset");
    foreach (D_IN[i]) begin
      run(D_IN[i], D_KEY[i], D_ENC[i], res, i == 3);
      check(res == D_EXP[i], $sformatf("%s(%h,%h) = %h, expected %h", D_ENC[i] ? "E" : "D",
                                       D_IN[i], D_KEY[i], res, D_EXP[i]));
      run(res, D_KEY[i], ~D_ENC[i], back, 1'b0);
      check(back == D_IN[i], $sformatf("inverse gives %h, expected %h", back, D_IN[i]));
    end
    // Reset in the middle of a run.
    @(negedge clk);
    din = D_IN[0]; key = D_KEY[0]; fsel = 1'b1; lddata = 1'b1;
    @(negedge clk);
    lddata = 1'b0;
    repeat (4) @(negedge clk);
    reset = 1'b1;
    @(negedge clk);
    reset = 1'b0;
    check(!busy && !rdy, "reset aborts a run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
