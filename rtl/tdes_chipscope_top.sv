// tdes_chipscope_top -- Triple DES core wired for on-chip verification through
// a virtual I/O (VIO) debug core.
//
// On the FPGA the TDES inputs are not pins: a VIO core, reached from a PC over
// JTAG through an ICON controller core, drives 196 synchronous outputs
// (sync_out) into the design and samples 65 synchronous inputs (sync_in) from
// it. Both debug cores are vendor IP and stay outside this module; their two
// buses are its ports. As in the design's VIO schematic, only key1 and key2
// are driven (3 x 64 + 4 = 196 bits), so the core runs two-key TDES with
// key3 = key1.
//
//   vio_sync_out[195:132] data_in      vio_sync_in[64:1] data_out
//   vio_sync_out[131:68]  key1         vio_sync_in[0]    out_ready
//   vio_sync_out[67:4]    key2
//   vio_sync_out[3]       function_select
//   vio_sync_out[2]       lddata (rising edge starts one block)
//   vio_sync_out[1]       ldkey  (rising edge loads the keys)
//   vio_sync_out[0]       reset
//
// VIO outputs are levels toggled by hand, so lddata and ldkey are reduced to a
// one-cycle pulse on their rising edge; reset is passed through as a level.
// Bus widths and the set of signals follow the schematic; the bit order within
// the buses, the edge detection and key3 = key1 are this design's choices.
// Timing: one clock of edge detection, then the 51-cycle TDES operation.
module tdes_chipscope_top (
  input  logic         clk,
  input  logic [195:0] vio_sync_out,
  output logic [64:0]  vio_sync_in
);
  logic [0:63] data_in, key1, key2, data_out;
  logic        function_select, lddata_lvl, ldkey_lvl, reset;
  logic        lddata_q, ldkey_q, out_ready;

  assign data_in         = vio_sync_out[195:132];
  assign key1            = vio_sync_out[131:68];
  assign key2            = vio_sync_out[67:4];
  assign function_select = vio_sync_out[3];
  assign lddata_lvl      = vio_sync_out[2];
  assign ldkey_lvl       = vio_sync_out[1];
  assign reset           = vio_sync_out[0];

  always_ff @(posedge clk) begin
    if (reset) begin
      lddata_q <= 1'b0;
      ldkey_q  <= 1'b0;
    end else begin
      lddata_q <= lddata_lvl;
      ldkey_q  <= ldkey_lvl;
    end
  end

  tdes_core u_tdes (
    .clk            (clk),
    .reset          (reset),
    .data_in        (data_in),
    .key1_in        (key1),
    .key2_in        (key2),
    .key3_in        (key1),
    .function_select(function_select),
    .lddata         (lddata_lvl && !lddata_q),
    .ldkey          (ldkey_lvl && !ldkey_q),
    .data_out       (data_out),
    .out_ready      (out_ready)
  );

  assign vio_sync_in = {data_out, out_ready};
endmodule
