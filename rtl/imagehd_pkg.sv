// imagehd_pkg -- constants and types shared by the ImageHD accelerator.
//
// The hypervector (HV) side of the design works on "chunks": PW words of PB bits
// (4 x 64 = 256 bits), the unit every HDC engine (encoder, learning unit, merge
// unit) processes per cycle. A D-bit HV is NCHUNK = D / CHUNK_BITS chunks.
// The CNN side works on a pixel-group stream: one beat carries one INT8 channel
// value for each of P neighbouring pixels of a row.
//
// Paper numbers: P = 2, M = 4, N = 4, tile 32 x 32, PC = 16, PK = 16, PW = 4,
// PB = 64. The hypervector dimension, level count, feature count and cluster
// capacity are not printed in the paper; the defaults here are this design's
// choices (see the README).
package imagehd_pkg;

  // ---- CNN front end ---------------------------------------------------
  localparam int unsigned P_PIX     = 2;    // pixel-parallel PPEs per PCU
  localparam int unsigned M_OCH     = 4;    // output channels per PPE pass
  localparam int unsigned N_DPE     = 4;    // channel-parallel DPEs in the DCU
  localparam int unsigned TILE_H    = 32;
  localparam int unsigned TILE_W    = 32;

  // ---- HDC engines --------------------------------------------------------
  localparam int unsigned PC        = 16;   // feature lanes of the encoder
  localparam int unsigned PK        = 16;   // cluster PEs of the HLU / CMU
  localparam int unsigned PW        = 4;    // words per chunk
  localparam int unsigned PB        = 64;   // bits per word
  localparam int unsigned CHUNK_BITS = PW * PB;

  localparam int unsigned HV_D      = 8192; // hypervector dimension (assumed)
  localparam int unsigned N_FEAT    = 1280; // MobileNetV2 feature width
  localparam int unsigned N_LEVELS  = 16;   // level-table rows (assumed)
  localparam int unsigned K_MAX     = 128;  // cluster memory capacity (assumed)

  typedef logic [CHUNK_BITS-1:0] chunk_t;

  // Saturate a wide signed value to INT8.
  function automatic logic signed [7:0] sat8(input logic signed [31:0] v);
    if (v > 32'sd127)       return 8'sd127;
    else if (v < -32'sd128) return -8'sd128;
    else                    return v[7:0];
  endfunction

  // Requantise an INT32 accumulator: arithmetic right shift with rounding,
  // optional ReLU6 (clip at 6 << 4 = 96 with the Q3.4 activation format
  // assumed here; a plain ReLU when relu6_max is 127), INT8 saturation.
  function automatic logic signed [7:0] requant(input logic signed [31:0] acc,
                                                input logic [4:0] shift,
                                                input logic relu,
                                                input logic signed [7:0] relu_max);
    logic signed [31:0] r;
    logic signed [7:0]  q;
    r = (shift == 0) ? acc : ((acc + (32'sd1 <<< (shift - 1))) >>> shift);
    q = sat8(r);
    if (relu) begin
      if (q < 0)        q = 8'sd0;
      if (q > relu_max) q = relu_max;
    end
    return q;
  endfunction

  // Popcount of one chunk.
  function automatic logic [$clog2(CHUNK_BITS+1)-1:0] popcount_chunk(input chunk_t v);
    logic [$clog2(CHUNK_BITS+1)-1:0] s;
    s = '0;
    for (int i = 0; i < CHUNK_BITS; i++) s += {{($clog2(CHUNK_BITS+1)-1){1'b0}}, v[i]};
    return s;
  endfunction

endpackage
