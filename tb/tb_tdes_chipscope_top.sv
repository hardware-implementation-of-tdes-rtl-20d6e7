// End-to-end testbench for tdes_chipscope_top. It plays the part of the
// virtual I/O debug core: it drives the 196-bit sync_out bus the way a person
// would from the analyzer (set data and keys, raise ldkey, raise lddata, wait
// for out_ready on the 65-bit sync_in bus) and compares data_out with library
// two-key TDES (EDE2) results. Every result is decrypted again. Mechanisms
// exercised and counted: key load, encryption, decryption, a level held on
// lddata starting only one block, lddata toggled during a run being ignored,
// and reset. The 1-cycle edge detector plus 51-cycle TDES latency is checked.
module tb_tdes_chipscope_top;
  localparam logic [63:0] V_IN [8] = '{
    64'hcfbf33609cfc8652,
    64'hfc241d0bc9d488b1,
    64'hda45e18ac2216b02,
    64'hce5b2a9231f51707,
    64'hd17e44973d4882a5,
    64'hbd68516766934036,
    64'h3a0b9965cda6c6fd,
    64'h8483f8b8332dd331};
  localparam logic [63:0] V_K1 [8] = '{
    64'h5b06258e7e26f36a,
    64'h076b3e36bb2313f5,
    64'h0726e25cfd56a926,
    64'h4787f93bca44eb86,
    64'h4259405278e4b98d,
    64'hb1491e243192b704,
    64'hf4de2c089aea6429,
    64'h727d83495822cb77};
  localparam logic [63:0] V_K2 [8] = '{
    64'hefe09f07cefe2a1f,
    64'hfcf00fecb91ee9e5,
    64'hf47aebdd597a1ecf,
    64'h5d58c705f979d04a,
    64'h38703800149e259b,
    64'h3a12917c1a26f889,
    64'h325b55dd78572976,
    64'h3451d0135675f6ad};
  localparam logic [0:0] V_ENC [8] = '{
    1'h1,
    1'h0,
    1'h1,
    1'h1,
    1'h0,
    1'h0,
    1'h1,
    1'h0};
  localparam logic [63:0] V_EXP [8] = '{
    64'h49d61d19d73fa92f,
    64'h630c6151fcb05f6c,
    64'ha2bf7f903b9cda6a,
    64'hc32617ebdf5102dc,
    64'h9bb3af58680ba6d6,
    64'hde129c20bb0f430b,
    64'h659832d5a18145de,
    64'h8de032c30a1a8ba8};
  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  // Watchdog: give up after a fixed number of cycles.
  initial begin
    repeat (40000) @(posedge clk);
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

  logic [195:0] sync_out;
  logic [64:0]  sync_in;
  tdes_chipscope_top dut (.clk(clk), .vio_sync_out(sync_out), .vio_sync_in(sync_in));

  logic [0:63] data_in, key1, key2;
  logic        fsel, lddata, ldkey, reset;
  assign sync_out = {data_in, key1, key2, fsel, lddata, ldkey, reset};
  wire [0:63] data_out  = sync_in[64:1];
  wire        out_ready = sync_in[0];

  int n_keyload = 0, n_encrypt = 0, n_decrypt = 0, n_held = 0, n_ignored = 0, n_reset = 0;

  task automatic set_keys(input logic [0:63] a, input logic [0:63] b);
    @(negedge clk);
    key1 = a; key2 = b; ldkey = 1'b1;
    repeat (3) @(negedge clk);           // a level, as a person would leave it
    ldkey = 1'b0;
    key1 = ~a; key2 = ~b;                // keys are latched by ldkey
    n_keyload++;
  endtask

  task automatic block(input logic [0:63] d, input logic enc, output logic [0:63] result,
                       input bit hold, input bit poke);
    int cycles;
    @(negedge clk);
    data_in = d; fsel = enc; lddata = 1'b1;
    cycles = 0;
    do begin
      @(negedge clk);
      cycles++;
      if (!hold) lddata = 1'b0;
      if (poke && cycles == 10) lddata = 1'b1;
      if (poke && cycles == 12) lddata = 1'b0;
    end while (!out_ready && cycles < 200);
    // lddata rises before edge 0, the pulse reaches the core at edge 1.
    check(cycles == 52, $sformatf("latency %0d cycles, expected 52", cycles));
    result = data_out;
    if (enc) n_encrypt++; else n_decrypt++;
    if (hold) begin
      repeat (60) @(negedge clk);
      check(out_ready && data_out == result, "held lddata starts only one block");
      lddata = 1'b0;
      n_held++;
    end
    if (poke) n_ignored++;
  endtask

  initial begin
    logic [0:63] res, back;
    data_in = '0; key1 = '0; key2 = '0; fsel = 1'b0; lddata = 1'b0; ldkey = 1'b0; reset = 1'b1;
    repeat (3) @(negedge clk);
    reset = 1'b0;
    n_reset++;
    check(!out_ready, "idle after reset");
    foreach (V_IN[i]) begin
      set_keys(V_K1[i], V_K2[i]);
      block(V_IN[i], V_ENC[i], res, i == 1, i == 2);
      check(res == V_EXP[i], $sformatf("vector %0d: %h, expected %h", i, res, V_EXP[i]));
      block(res, ~V_ENC[i], back, 1'b0, 1'b0);
      check(back == V_IN[i], $sformatf("vector %0d inverse: %h, expected %h", i, back, V_IN[i]));
    end
    // Reset from the bus while a block is running.
    @(negedge clk);
    data_in = V_IN[0]; fsel = 1'b1; lddata = 1'b1;
    repeat (20) @(negedge clk);
    lddata = 1'b0;
    reset = 1'b1;
    @(negedge clk);
    reset = 1'b0;
    repeat (60) @(negedge clk);
    check(!out_ready, "reset aborts the running block");
    n_reset++;
    $display("mechanisms: keyload=%0d encrypt=%0d decrypt=%0d held_lddata=%0d ignored_lddata=%0d reset=%0d",
             n_keyload, n_encrypt, n_decrypt, n_held, n_ignored, n_reset);
    check(n_keyload > 0, "key load exercised");
    check(n_encrypt > 0, "encryption exercised");
    check(n_decrypt > 0, "decryption exercised");
    check(n_held > 0, "held lddata exercised");
    check(n_ignored > 0, "lddata during a run exercised");
    check(n_reset > 1, "reset during a run exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
