// cs_pkg: sizes, hierarchy description and LUT construction rules shared by the
// compressed shaping transmitter and receiver.
//
// Sizes that follow the paper: 640 source bits per clock in 20 groups of 32
// bits, 372 source amplitude bits per codeword, one flip parity bit (373 bits
// into the shaping encoder), 404 shaped amplitude bits out of it (101 two-
// dimensional 64-QAM amplitudes of 4 bits, or 202 16-QAM amplitudes of 2 bits).
//
// The layer structure of the hierarchical distribution matcher (DM) is this
// design's own choice, since the paper gives only its totals:
//   layer 1: 101 LUTs, 4-bit address {r1, s1[2:0]} -> 4 output bits.  LUT 100
//            has no parent and takes 4 source bits (s = 4, r = 0).
//   layer 2:  20 LUTs, 4-bit address {r2, s2[2:0]} -> 5 bits, one r1 bit for
//            each of 5 layer-1 LUTs.
//   layer 3:   4 LUTs, 3-bit address {r3, s3[1:0]} -> 5 bits, one r2 bit for
//            each of 5 layer-2 LUTs.
//   layer 4:   1 LUT,  1-bit address {s4}           -> 4 bits, one r3 bit for
//            each layer-3 LUT.
//   source bits: 100*3 + 4 + 20*3 + 4*2 + 1 = 373.
//
// LUT contents follow the paper's rule: input words are ranked by decreasing
// number of zeros (ties by increasing value) and output words by increasing
// energy; rank i of the input maps to rank i of the output. For layer 1 the
// energy is that of the amplitudes; for upper layers, whose outputs are r bits
// of lower LUTs, the number of ones stands in for it (an r bit of 1 moves the
// child LUT to higher-energy outputs). Decoder LUTs invert these; a received
// word that is no codeword decodes to the nearest codeword in Hamming distance,
// ties to the more probable input (this design's choice).
package cs_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int SRC_W     = 640;   // source bits per clock (20 groups x 32)
  localparam int N_GROUPS  = 20;
  localparam int GROUP_W   = 32;
  localparam int K_SA      = 372;   // source amplitude bits per codeword
  localparam int K_F       = K_SA + 1;  // after the flip parity bit
  localparam int DM_OUT_W  = 404;   // shaped amplitude bits per codeword
  // information sign bits per codeword with a rate-5/6 FEC: 64-QAM carries
  // 101 x 6 = 606 coded bits, 101 of them parity, so 202 - 101 = 101 sign
  // bits; 16-QAM carries 202 x 4 = 808 coded bits, about 135 parity, so
  // 404 - 136 = 268 sign bits, filling the 640-bit source word (372 + 268).
  localparam int K_BS64    = 101;
  localparam int K_BS      = SRC_W - K_SA;   // 268, sign path width (16-QAM)

  // ---------------------------------------------------------------- hierarchy
  localparam int N_LAYERS  = 4;
  localparam int T1 = 101, T2 = 20, T3 = 4, T4 = 1;
  localparam int S1 = 3,   S2 = 3,  S3 = 2, S4 = 1;
  localparam int S1_LAST = 4;        // source bits of layer-1 LUT 100
  // offsets of each layer's source bits inside the 373-bit word F
  localparam int OFF1 = 0;
  localparam int OFF2 = OFF1 + (T1 - 1) * S1 + S1_LAST;   // 304
  localparam int OFF3 = OFF2 + T2 * S2;                   // 364
  localparam int OFF4 = OFF3 + T3 * S3;                   // 372

  localparam int ENC_LAT = 4;  // shaping encoder latency, clocks
  localparam int DEC_LAT = 4;  // shaping decoder latency, clocks

  // encoder LUT address and data widths, index = layer - 1
  function automatic int enc_aw(int layer);
    case (layer)
      0: return 4;
      1: return 4;
      2: return 3;
      default: return 1;
    endcase
  endfunction

  function automatic int enc_dw(int layer);
    case (layer)
      0: return 4;
      1: return 5;
      2: return 5;
      default: return 4;
    endcase
  endfunction

  // decoder LUTs are addressed by encoder outputs and return encoder addresses
  function automatic int dec_aw(int layer);
    return enc_dw(layer);
  endfunction

  function automatic int dec_dw(int layer);
    return enc_aw(layer);
  endfunction

  // ---------------------------------------------------------------- LUT write bus
  // One write, broadcast to every LUT RAM of one layer on one side.
  typedef struct packed {
    logic       we;
    logic [1:0] layer;   // 0..3 for layers 1..4
    logic [4:0] addr;
    logic [4:0] data;
  } lut_wr_t;

  typedef logic [31:0][4:0] lut_table_t;   // up to 32 entries of up to 5 bits

  // ---------------------------------------------------------------- table rules
  // (written to keep constant evaluation short: O(N^2) with N <= 32)
  function automatic int popcnt(int v);
    int c;
    c = 0;
    for (int i = 0; i < 5; i++) c += (v >> i) & 1;
    return c;
  endfunction

  // energy of a layer-1 output word: 64-QAM {aQ[1:0], aI[1:0]}, A = 2a + 1;
  // 16-QAM four 1-bit amplitudes, 0 -> 1, 1 -> 3
  function automatic int amp_energy(int v, bit qam16);
    int ai, aq;
    if (qam16) return 4 + 8 * popcnt(v & 15);
    ai = 2 * (v & 3) + 1;
    aq = 2 * ((v >> 2) & 3) + 1;
    return ai * ai + aq * aq;
  endfunction

  typedef int int32_arr_t [32];

  // rank of every nbits-bit word when sorted by key (weight, or layer-1
  // energy), ties by value
  function automatic int32_arr_t ranks(int nbits, bit by_energy, bit qam16);
    int32_arr_t k, r;
    for (int v = 0; v < 32; v++) begin
      k[v] = by_energy ? amp_energy(v, qam16) : popcnt(v);
      r[v] = 0;
    end
    for (int v = 0; v < (1 << nbits); v++)
      for (int u = 0; u < (1 << nbits); u++)
        if (k[u] < k[v] || (k[u] == k[v] && u < v)) r[v]++;
    return r;
  endfunction

  // encoder LUT of a layer: input rank i -> output word of rank i
  function automatic lut_table_t enc_table(int layer, bit qam16);
    lut_table_t t;
    int32_arr_t r_in, r_out, word_of_rank;
    r_in  = ranks(enc_aw(layer), 1'b0, qam16);
    r_out = ranks(enc_dw(layer), layer == 0, qam16);
    for (int v = 0; v < 32; v++) word_of_rank[v] = 0;
    for (int v = 0; v < (1 << enc_dw(layer)); v++) word_of_rank[r_out[v]] = v;
    t = '0;
    for (int a = 0; a < (1 << enc_aw(layer)); a++)
      t[a] = 5'(word_of_rank[r_in[a]]);
    return t;
  endfunction

  // decoder LUT: nearest codeword in Hamming distance, ties to the input of
  // lower rank (the more probable one)
  function automatic lut_table_t dec_table(int layer, bit qam16);
    lut_table_t t, e;
    int32_arr_t r_in;
    int best, best_d, best_r, d;
    e    = enc_table(layer, qam16);
    r_in = ranks(enc_aw(layer), 1'b0, qam16);
    t    = '0;
    for (int w = 0; w < (1 << dec_aw(layer)); w++) begin
      best = 0; best_d = 99; best_r = 99;
      for (int a = 0; a < (1 << enc_aw(layer)); a++) begin
        d = popcnt(w ^ int'(e[a]));
        if (d < best_d || (d == best_d && r_in[a] < best_r)) begin
          best = a; best_d = d; best_r = r_in[a];
        end
      end
      t[w] = 5'(best);
    end
    return t;
  endfunction

endpackage
