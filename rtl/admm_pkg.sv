// admm_pkg: number formats, constants and code tables shared by the ADMM-LP
// decoder modules.
//
// Fixed-point formats (all two's complement):
//   LLR            8 bits  = sign + 0 integer + 7 fraction bits      (Q0.7)
//   VN-to-CN / x  11 bits  = sign + 1 integer + 9 fraction bits      (Q1.9)
//   CN-to-VN / lambda 11 bits = sign + 3 integer + 7 fraction bits   (Q3.7)
// The split of bits follows the paper's quantization rules (8-bit LLRs,
// 11-bit internal messages, LLRs with no integer bit, VN-to-CN messages with
// one integer bit, CN-to-VN messages with as many fraction bits as the LLRs,
// check states formatted like CN-to-VN messages).
//
// The pipeline depths per node degree are the ones the paper reports for its
// FPGA build; the node modules pad their own shorter pipelines up to them.
// The circulant shift tables of the two evaluated codes are given as
// SHIFT[row][column] (8-bit entries), NO_TILE marking an all-zero tile; tile (t,c) with shift s
// connects check k of proto-row t to variable (k + s) mod p of proto-column c.
// The tables use ascending packed ranges ([0:R-1][0:S-1]) on purpose, so that
// the literal reads in the same row/column order as the base matrix; lint
// reports these ranges as ASCRANGE, which is expected.
package admm_pkg;

  localparam int LLR_W = 8;   // channel LLR width
  localparam int LLR_F = 7;   // LLR fraction bits
  localparam int V_W   = 11;  // VN-to-CN message / estimate width
  localparam int V_F   = 9;   // VN-to-CN fraction bits
  localparam int C_W   = 11;  // CN-to-VN message / check state width
  localparam int C_F   = 7;   // CN-to-VN fraction bits
  localparam int CN_VW = 14;  // CN internal v = x + lambda, 9 fraction bits

  localparam int V_ONE   = 1 << V_F;        // 1.0 in Q1.9
  localparam int V_HALF  = 1 << (V_F - 1);  // 0.5 in Q1.9
  localparam int C_HALF  = 1 << (C_F - 1);  // 0.5 in Q3.7 (initial CN-to-VN message)

  localparam int ITER_W  = 16;  // iteration counter / cap width

  localparam logic [7:0] NO_TILE = 8'hFF;  // shift-table entry of an all-zero tile

  // Rounded reciprocal 2^rb / k, used for the divisions by a node degree
  // and by the simplex support size.
  function automatic longint recip(input int k, input int rb);
    longint kk = longint'(k);
    return ((longint'(1) << rb) + kk / 2) / kk;
  endfunction

  // Pipeline stages of a variable node of degree d (paper Table I).
  function automatic int vn_latency(input int d);
    case (d)
      1:       return 9;
      2:       return 10;
      3:       return 10;
      default: return 10;
    endcase
  endfunction

  // Pipeline stages of a check node of degree d (paper Table I).
  function automatic int cn_latency(input int d);
    case (d)
      5:       return 46;
      14:      return 53;
      15:      return 53;
      16:      return 54;
      default: return 54;
    endcase
  endfunction

  // [155,64,20] Tanner code: p = 31, 3 x 5 tiles, shift = 5^t * 2^c mod 31.
  localparam int TANNER_P = 31;
  localparam int TANNER_R = 3;
  localparam int TANNER_S = 5;
  localparam logic [0:TANNER_R-1][0:TANNER_S-1][7:0] TANNER_SHIFT = '{
    '{ 1,  2,  4,  8, 16},
    '{ 5, 10, 20,  9, 18},
    '{25, 19,  7, 14, 28}
  };

  // [672,546] rate-13/16 IEEE 802.11ad code: p = 42, 3 x 16 tiles.
  localparam int WIGIG_P = 42;
  localparam int WIGIG_R = 3;
  localparam int WIGIG_S = 16;
  localparam logic [0:WIGIG_R-1][0:WIGIG_S-1][7:0] WIGIG_SHIFT = '{
    '{29, 30,  0,  8, 33, 22, 17,  4, 27, 28, 20, 27, 24, 23, NO_TILE, NO_TILE},
    '{37, 31, 18, 23, 11, 21,  6, 20, 32,  9, 12, 29, 10,  0, 13, NO_TILE},
    '{25, 22,  4, 34, 31,  3, 14, 15,  4,  2, 14, 18, 13, 13, 22, 24}
  };

endpackage
