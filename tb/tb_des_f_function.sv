// Testbench for des_f_function: reference values of F(R, K) from an
// independent software model, starting with the textbook first round
// F(F0AAF0AA, 1B02EFFC7072) = 234AA9BB, then random operands.
module tb_des_f_function;
  localparam logic [31:0] F_R [32] = '{
    32'hf0aaf0aa,
    32'h5f557203,
    32'h18f135d2,
    32'h8c38fb29,
    32'hb64ce422,
    32'h1012f037,
    32'h907a70c3,
    32'h0f4205b4,
    32'h9e7769b1,
    32'h34b9b5df,
    32'h7f150524,
    32'hae2eb154,
    32'h881ed162,
    32'h6d76b07e,
    32'hc6f87718,
    32'h506bf2ef,
    32'h7731af10,
    32'h95e761d1,
    32'hec66a787,
    32'h7403e430,
    32'h5c90a958,
    32'h4cbd87ad,
    32'h3f98e277,
    32'hcb5c7427,
    32'h2e05319a,
    32'hb2f14c94,
    32'hc7a2ea20,
    32'h3e7d1bfb,
    32'h14f4733f,
    32'h930d6eaf,
    32'h4cdd2055,
    32'h86734721};
  localparam logic [47:0] F_K [32] = '{
    48'h1b02effc7072,
    48'he0097ebff206,
    48'hbabc57ee05cd,
    48'h49b672e6cc3a,
    48'hfaec9be4bcfc,
    48'h1e3912bd4ace,
    48'h6b0a830e07bc,
    48'hc1d32a3af4d4,
    48'h26e85790f82e,
    48'h7d2ceeeacbe2,
    48'h0a096bf46c69,
    48'hab10f646e1f4,
    48'hc3ba13deef86,
    48'h92b18ede0d7a,
    48'he01fca02135e,
    48'h5051d17f9aca,
    48'hb1fe57124242,
    48'h982859a54a7b,
    48'h94747f26144b,
    48'h74c9cc011cdd,
    48'hd708119a72d1,
    48'hf1d617f5e837,
    48'h795e451abd81,
    48'haa05b2715945,
    48'h0f8810a3d6b2,
    48'hb394bb2d420f,
    48'ha5aa4f426dcb,
    48'hfe3b93f448b3,
    48'hd269ae658f33,
    48'h48db72158370,
    48'h62c3b774eb52,
    48'hab2ce3151288};
  localparam logic [31:0] F_EXP [32] = '{
    32'h234aa9bb,
    32'h5b3ceff5,
    32'h9501142f,
    32'h23b8e1f8,
    32'h97b7fc4b,
    32'h84ce4df9,
    32'hb5fdcd63,
    32'h923df8fb,
    32'h46977e7c,
    32'h2be152f1,
    32'hc7ba914a,
    32'h89a58d1f,
    32'hccbadbfb,
    32'hf358d1e8,
    32'h4c55eda9,
    32'he54a288d,
    32'hdc5e688a,
    32'h5621dfec,
    32'h8d31e516,
    32'hc042d270,
    32'he74e70d0,
    32'habfc910c,
    32'h9ce00a34,
    32'h78569e34,
    32'h562571f2,
    32'h94816f95,
    32'h2f57d926,
    32'h3d60c87b,
    32'hc7fb8cb9,
    32'h4f19d9fc,
    32'h5d03c8b3,
    32'hd0da4cd7};
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

  logic [0:31] r, fo;
  logic [0:47] k;
  des_f_function dut (.r_in(r), .subkey(k), .f_out(fo));

  initial begin
    foreach (F_R[i]) begin
      r = F_R[i];
      k = F_K[i];
      #1;
      check(fo == F_EXP[i], $sformatf("F(%h,%h) = %h, expected %h", r, k, fo, F_EXP[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
