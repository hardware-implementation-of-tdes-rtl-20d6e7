// des_pkg -- constants and helper functions shared by the DES and TDES blocks.
//
// Holds the fixed tables of the Data Encryption Standard (initial and final
// permutations, expansion E, permutation P, permuted choices PC-1 and PC-2, the
// per-round key rotation amounts and the eight S-boxes) together with a generic
// bit-permutation function. The table values are those of the DES standard
// (FIPS 46-3); the design description this RTL follows names the steps
// (initial permutation, key schedule, key transforms, function F, final
// permutation) but leaves the tables to the standard.
//
// Bit numbering follows the standard: vectors are declared [0:N-1], index 0 is
// the most significant bit and corresponds to "bit 1" of the standard. A table
// entry t at output position i means out[i] = in[t-1].
package des_pkg;

  localparam int unsigned DES_ROUNDS = 16;

  // Operation select as carried on function_select (own encoding choice).
  typedef enum logic {
    DES_DECRYPT = 1'b0,
    DES_ENCRYPT = 1'b1
  } des_op_e;

  // Sequencer state of the triple-DES core.
  typedef enum logic [1:0] {
    TDES_IDLE  = 2'd0,
    TDES_PASS1 = 2'd1,
    TDES_PASS2 = 2'd2,
    TDES_PASS3 = 2'd3
  } tdes_state_e;

  typedef byte unsigned tbl64_t [64];
  typedef byte unsigned tbl56_t [56];
  typedef byte unsigned tbl48_t [48];
  typedef byte unsigned tbl32_t [32];

  localparam tbl64_t IP_TABLE = '{
    58, 50, 42, 34, 26, 18, 10,  2,  60, 52, 44, 36, 28, 20, 12,  4,
    62, 54, 46, 38, 30, 22, 14,  6,  64, 56, 48, 40, 32, 24, 16,  8,
    57, 49, 41, 33, 25, 17,  9,  1,  59, 51, 43, 35, 27, 19, 11,  3,
    61, 53, 45, 37, 29, 21, 13,  5,  63, 55, 47, 39, 31, 23, 15,  7};

  localparam tbl64_t FP_TABLE = '{
    40,  8, 48, 16, 56, 24, 64, 32,  39,  7, 47, 15, 55, 23, 63, 31,
    38,  6, 46, 14, 54, 22, 62, 30,  37,  5, 45, 13, 53, 21, 61, 29,
    36,  4, 44, 12, 52, 20, 60, 28,  35,  3, 43, 11, 51, 19, 59, 27,
    34,  2, 42, 10, 50, 18, 58, 26,  33,  1, 41,  9, 49, 17, 57, 25};

  localparam tbl48_t E_TABLE = '{
    32,  1,  2,  3,  4,  5,   4,  5,  6,  7,  8,  9,
     8,  9, 10, 11, 12, 13,  12, 13, 14, 15, 16, 17,
    16, 17, 18, 19, 20, 21,  20, 21, 22, 23, 24, 25,
    24, 25, 26, 27, 28, 29,  28, 29, 30, 31, 32,  1};

  localparam tbl32_t P_TABLE = '{
    16,  7, 20, 21, 29, 12, 28, 17,   1, 15, 23, 26,  5, 18, 31, 10,
     2,  8, 24, 14, 32, 27,  3,  9,  19, 13, 30,  6, 22, 11,  4, 25};

  localparam tbl56_t PC1_TABLE = '{
    57, 49, 41, 33, 25, 17,  9,   1, 58, 50, 42, 34, 26, 18,
    10,  2, 59, 51, 43, 35, 27,  19, 11,  3, 60, 52, 44, 36,
    63, 55, 47, 39, 31, 23, 15,   7, 62, 54, 46, 38, 30, 22,
    14,  6, 61, 53, 45, 37, 29,  21, 13,  5, 28, 20, 12,  4};

  localparam tbl48_t PC2_TABLE = '{
    14, 17, 11, 24,  1,  5,   3, 28, 15,  6, 21, 10,
    23, 19, 12,  4, 26,  8,  16,  7, 27, 20, 13,  2,
    41, 52, 31, 37, 47, 55,  30, 40, 51, 45, 33, 48,
    44, 49, 39, 56, 34, 53,  46, 42, 50, 36, 29, 32};

  // Left-rotation amount of C and D in rounds 1..16 (sum = 28).
  localparam logic [15:0] TWO_BIT_SHIFT = 16'b0011_1111_0111_1110;  // bit 15 = round 1

  // S-boxes: SBOX[s][row*16 + column], row = outer bits, column = inner four bits.
  typedef logic [3:0] sbox_t [64];
  localparam sbox_t SBOX [8] = '{
    '{14, 4,13, 1, 2,15,11, 8, 3,10, 6,12, 5, 9, 0, 7,  0,15, 7, 4,14, 2,13, 1,10, 6,12,11, 9, 5, 3, 8,
       4, 1,14, 8,13, 6, 2,11,15,12, 9, 7, 3,10, 5, 0, 15,12, 8, 2, 4, 9, 1, 7, 5,11, 3,14,10, 0, 6,13},
    '{15, 1, 8,14, 6,11, 3, 4, 9, 7, 2,13,12, 0, 5,10,  3,13, 4, 7,15, 2, 8,14,12, 0, 1,10, 6, 9,11, 5,
       0,14, 7,11,10, 4,13, 1, 5, 8,12, 6, 9, 3, 2,15, 13, 8,10, 1, 3,15, 4, 2,11, 6, 7,12, 0, 5,14, 9},
    '{10, 0, 9,14, 6, 3,15, 5, 1,13,12, 7,11, 4, 2, 8, 13, 7, 0, 9, 3, 4, 6,10, 2, 8, 5,14,12,11,15, 1,
      13, 6, 4, 9, 8,15, 3, 0,11, 1, 2,12, 5,10,14, 7,  1,10,13, 0, 6, 9, 8, 7, 4,15,14, 3,11, 5, 2,12},
    '{ 7,13,14, 3, 0, 6, 9,10, 1, 2, 8, 5,11,12, 4,15, 13, 8,11, 5, 6,15, 0, 3, 4, 7, 2,12, 1,10,14, 9,
      10, 6, 9, 0,12,11, 7,13,15, 1, 3,14, 5, 2, 8, 4,  3,15, 0, 6,10, 1,13, 8, 9, 4, 5,11,12, 7, 2,14},
    '{ 2,12, 4, 1, 7,10,11, 6, 8, 5, 3,15,13, 0,14, 9, 14,11, 2,12, 4, 7,13, 1, 5, 0,15,10, 3, 9, 8, 6,
       4, 2, 1,11,10,13, 7, 8,15, 9,12, 5, 6, 3, 0,14, 11, 8,12, 7, 1,14, 2,13, 6,15, 0, 9,10, 4, 5, 3},
    '{12, 1,10,15, 9, 2, 6, 8, 0,13, 3, 4,14, 7, 5,11, 10,15, 4, 2, 7,12, 9, 5, 6, 1,13,14, 0,11, 3, 8,
       9,14,15, 5, 2, 8,12, 3, 7, 0, 4,10, 1,13,11, 6,  4, 3, 2,12, 9, 5,15,10,11,14, 1, 7, 6, 0, 8,13},
    '{ 4,11, 2,14,15, 0, 8,13, 3,12, 9, 7, 5,10, 6, 1, 13, 0,11, 7, 4, 9, 1,10,14, 3, 5,12, 2,15, 8, 6,
       1, 4,11,13,12, 3, 7,14,10,15, 6, 8, 0, 5, 9, 2,  6,11,13, 8, 1, 4,10, 7, 9, 5, 0,15,14, 2, 3,12},
    '{13, 2, 8, 4, 6,15,11, 1,10, 9, 3,14, 5, 0,12, 7,  1,15,13, 8,10, 3, 7, 4,12, 5, 6,11, 0,14, 9, 2,
       7,11, 4, 1, 9,12,14, 2, 0, 6,10,13,15, 3, 5, 8,  2, 1,14, 7, 4,10, 8,13,15,12, 9, 0, 3, 5, 6,11}};

  // Rotation amount (1 or 2) of round index r = 0..15.
  function automatic logic [1:0] key_shift(input logic [3:0] r);
    return TWO_BIT_SHIFT[4'd15 - r] ? 2'd2 : 2'd1;
  endfunction

  // Rotate each 28-bit half of a C,D pair left or right by 1 or 2.
  function automatic logic [0:55] rotate_cd(input logic [0:55] cd, input logic [1:0] amount,
                                            input logic left);
    logic [0:27] c, d;
    c = cd[0:27];
    d = cd[28:55];
    if (left) begin
      if (amount == 2'd2) begin c = {c[2:27], c[0:1]};   d = {d[2:27], d[0:1]};   end
      else                begin c = {c[1:27], c[0]};     d = {d[1:27], d[0]};     end
    end else begin
      if (amount == 2'd2) begin c = {c[26:27], c[0:25]}; d = {d[26:27], d[0:25]}; end
      else                begin c = {c[27], c[0:26]};    d = {d[27], d[0:26]};    end
    end
    return {c, d};
  endfunction

endpackage
