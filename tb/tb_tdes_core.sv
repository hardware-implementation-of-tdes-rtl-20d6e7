// Testbench for tdes_core: three-key and two-key (key3 = key1) TDES
// encryption and decryption against library EDE3 results (first vector is the
// standard example 5468652071756663 under keys 0123456789ABCDEF,
// 23456789ABCDEF01, 456789ABCDEF0123 -> A826FD8CE53B855F). Every result is
// also fed back through the opposite operation. Checks the 51-cycle latency,
// that keys are taken only on ldkey, that lddata during a run is ignored, and
// that with all three keys equal TDES gives the single-DES result.
module tb_tdes_core;
  localparam logic [63:0] T_IN [10] = '{
    64'h5468652071756663,
    64'ha260cd0b7b45145c,
    64'h0fef792866836886,
    64'h113db17d30cbc97d,
    64'h3571810afc132d0d,
    64'h298cb3a570ccec31,
    64'h570dc1951c2442f9,
    64'h0d75985d99c94309,
    64'h000f49c81a358ca0,
    64'h26b94c7f9118bb16};
  localparam logic [63:0] T_K1 [10] = '{
    64'h0123456789abcdef,
    64'h19f9919c895fd7b3,
    64'h5d158a2ff2ee4e45,
    64'h068739fa9d1de2a0,
    64'hdfd43f371200339d,
    64'h9d33a01c353c631c,
    64'h2607679d6050914a,
    64'h4093f6dea268aa87,
    64'h58ee8571f4998d7c,
    64'h5d39d0a89a2ef80f};
  localparam logic [63:0] T_K2 [10] = '{
    64'h23456789abcdef01,
    64'h1f7296ab7961fd92,
    64'hd953ee261d87cec3,
    64'hfe3bfada7cf20724,
    64'h774b15d7fa529ba3,
    64'h7bdc968b7afb2c68,
    64'h15fc899e4fd58dbe,
    64'h1a28f7b324e4e25a,
    64'h57b6fb7ebfeaa155,
    64'h43c71b9abd87a865};
  localparam logic [63:0] T_K3 [10] = '{
    64'h456789abcdef0123,
    64'hd42fddbb7a86f7a2,
    64'h29540a6eb12aa1f6,
    64'h05e999f3842e7fc2,
    64'hf373ca533488f876,
    64'h9d33a01c353c631c,
    64'h2607679d6050914a,
    64'h8b0d590bb0a844e5,
    64'h06ec41adea057543,
    64'h87322e25c215a82a};
  localparam logic [0:0] T_ENC [10] = '{
    1'h1,
    1'h1,
    1'h0,
    1'h1,
    1'h1,
    1'h1,
    1'h0,
    1'h0,
    1'h1,
    1'h0};
  localparam logic [63:0] T_EXP [10] = '{
    64'ha826fd8ce53b855f,
    64'h04786a0696dcd1ff,
    64'h59cb3d22aa0c82f0,
    64'hef01df33062d7c6d,
    64'h4510c322da04244b,
    64'hcc1bd7864fd11040,
    64'h6f9d805ed4b9a6e9,
    64'hd8829d72b55f511f,
    64'h9f2cb84029b861e7,
    64'h61f336721f93edd3};
  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  // Watchdog: give up after a fixed number of cycles.
  initial begin
    repeat (60000) @(posedge clk);
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

  logic        reset, fsel, lddata, ldkey;
  logic [0:63] din, k1, k2, k3, dout;
  logic        rdy;
  tdes_core dut (.clk(clk), .reset(reset), .data_in(din), .key1_in(k1), .key2_in(k2), .key3_in(k3),
                 .function_select(fsel), .lddata(lddata), .ldkey(ldkey), .data_out(dout),
                 .out_ready(rdy));

  task automatic load_keys(input logic [0:63] a, input logic [0:63] b, input logic [0:63] c);
    @(negedge clk);
    k1 = a; k2 = b; k3 = c; ldkey = 1'b1;
    @(negedge clk);
    ldkey = 1'b0;
    k1 = ~a; k2 = ~b; k3 = ~c;          // not loaded: must have no effect
  endtask

  task automatic run(input logic [0:63] d, input logic enc, output logic [0:63] result,
                     input bit poke_during_run);
    int cycles;
    @(negedge clk);
    din = d; fsel = enc; lddata = 1'b1;
    @(negedge clk);
    lddata = 1'b0;
    din = ~d; fsel = ~enc;
    check(!rdy, "ready cleared by lddata");
    cycles = 0;
    while (!rdy && cycles < 200) begin
      if (poke_during_run && cycles == 20) lddata = 1'b1;
      @(negedge clk);
      lddata = 1'b0;
      cycles++;
    end
    check(cycles == 51, $sformatf("latency %0d cycles, expected 51", cycles));
    result = dout;
  endtask

  initial begin
    logic [0:63] res, back;
    reset = 1'b1; lddata = 1'b0; ldkey = 1'b0; din = '0; k1 = '0; k2 = '0; k3 = '0; fsel = 1'b0;
    repeat (3) @(negedge clk);
    reset = 1'b0;
    check(!rdy, "idle after reset");
    foreach (T_IN[i]) begin
      load_keys(T_K1[i], T_K2[i], T_K3[i]);
      run(T_IN[i], T_ENC[i], res, i == 2);
      check(res == T_EXP[i], $sformatf("vector %0d: %h, expected %h", i, res, T_EXP[i]));
      run(res, ~T_ENC[i], back, 1'b0);
      check(back == T_IN[i], $sformatf("vector %0d inverse: %h, expected %h", i, back, T_IN[i]));
    end
    // All keys equal: TDES degenerates to single DES (85E813540F0AB405).
    load_keys(64'h133457799bbcdff1, 64'h133457799bbcdff1, 64'h133457799bbcdff1);
    run(64'h0123456789abcdef, 1'b1, res, 1'b0);
    check(res == 64'h85e813540f0ab405, $sformatf("K1=K2=K3 gives %h", res));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
