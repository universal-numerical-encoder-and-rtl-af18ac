// apax_pkg: types, widths and helper functions shared by the APAX encoder.
//
// The encoder turns a stream of integers or floats into self-contained
// encoded blocks. Every stage passes samples with a valid/ready handshake and
// carries a small sideband: first/last-of-block flags and the block's
// configuration (data type, gain, filter class, chosen stream). The widths
// below are this design's choices; the paper fixes only the group size of 4,
// the token sizes (4 and 8 bits) and the header sizes (4 and 6 bytes).
package apax_pkg;

  // Raw input bus: wide enough for the largest type (64-bit double).
  localparam int unsigned IN_W   = 64;
  // Attenuated sample width. Chosen so that the second derivative of an
  // attenuated sample (ATT_W+2 bits) still has an exponent that fits the
  // 5-bit payload of an 8-bit absolute exponent token (at most 31).
  localparam int unsigned ATT_W  = 29;
  // Width of the redundancy remover's output streams.
  localparam int unsigned STR_W  = ATT_W + 2;
  // Width of a group exponent (0..31).
  localparam int unsigned EXP_W  = 5;
  // Block floating point group size (paper: N = 4).
  localparam int unsigned GROUP  = 4;
  // Header sizes in bits (paper: 4 bytes for integers, 6 bytes for floats).
  localparam int unsigned HDR_INT_BITS = 32;
  localparam int unsigned HDR_FLT_BITS = 48;
  localparam int unsigned HDR_W  = HDR_FLT_BITS;
  // Block size field: 64 .. 16384 samples, a multiple of 4.
  localparam int unsigned BLK_W  = 15;
  // Gain: unsigned mantissa with 15 fraction bits (value m / 2^15) and a
  // signed power-of-two exponent.
  localparam int unsigned GM_W   = 16;
  localparam int unsigned GE_W   = 16;

  typedef enum logic [2:0] {
    DT_INT8  = 3'd0,
    DT_INT16 = 3'd1,
    DT_INT32 = 3'd2,
    DT_FLT32 = 3'd3,
    DT_FLT64 = 3'd4
  } dtype_e;

  // Centre-frequency class reported by the signal monitor. It selects which
  // neighbouring samples the redundancy remover combines.
  typedef enum logic [1:0] {
    FC_LOW     = 2'd0,   // baseband:        x[n] - x[n-1]
    FC_QUARTER = 2'd1,   // around fs/4:     x[n] + x[n-2]
    FC_HIGH    = 2'd2    // around fs/2:     x[n] + x[n-1]
  } fc_e;

  // Encoding mode from the profiler: fixed gain, or a gain loop that steers
  // the encoded block size toward a target.
  typedef enum logic {
    MODE_FIXED_GAIN = 1'b0,
    MODE_FIXED_RATE = 1'b1
  } mode_e;

  // Encoding parameters delivered by the (software) profiler.
  typedef struct packed {
    dtype_e             dtype;
    mode_e              mode;
    logic [BLK_W-1:0]   blk_size;     // samples per block, multiple of 4
    logic [GM_W-1:0]    gain_m;       // initial / fixed gain mantissa
    logic signed [GE_W-1:0] gain_e;   // initial / fixed gain exponent
    logic [15:0]        target_words; // fixed-rate target, output words per block
  } enc_params_t;

  // Per-block configuration that travels with the samples.
  typedef struct packed {
    dtype_e                 dtype;
    mode_e                  mode;
    logic [GM_W-1:0]        gain_m;
    logic signed [GE_W-1:0] gain_e;
    fc_e                    fc;
    logic [1:0]             sel;      // stream chosen by the redundancy remover
  } blk_cfg_t;

  // Raw input sample.
  typedef struct packed {
    logic [IN_W-1:0] data;
    logic            first;
    logic            last;
    blk_cfg_t        cfg;
  } raw_smp_t;

  // Attenuated sample.
  typedef struct packed {
    logic signed [ATT_W-1:0] data;
    logic                    first;
    logic                    last;
    blk_cfg_t                cfg;
  } att_smp_t;

  // Sample of the selected stream.
  typedef struct packed {
    logic signed [STR_W-1:0] data;
    logic                    first;
    logic                    last;
    blk_cfg_t                cfg;
  } str_smp_t;

  // Sample handed to the bit packer; hdr/hdr_len are meaningful on 'first'.
  typedef struct packed {
    logic signed [STR_W-1:0] data;
    logic                    first;
    logic                    last;
    logic [HDR_W-1:0]        hdr;
    logic [5:0]              hdr_len;
  } pk_smp_t;

  // Decoded sample in its original type (low bits of data for narrow types).
  typedef struct packed {
    logic [IN_W-1:0] data;
    logic            first;
    logic            last;
    dtype_e          dtype;
  } dec_smp_t;

  // Number of bits needed to hold v in two's complement; 0 for v == 0.
  function automatic logic [EXP_W:0] sig_bits(input logic signed [STR_W-1:0] v);
    logic [STR_W-1:0] u;
    logic [EXP_W:0]   n;
    u = v[STR_W-1] ? ~v : v;
    n = (v == '0) ? '0 : 1;
    for (int i = 0; i < STR_W; i++)
      if (u[i]) n = (EXP_W+1)'(i + 2);
    return n;
  endfunction

  // Width of the integer types.
  function automatic int unsigned dtype_bits(input dtype_e t);
    case (t)
      DT_INT8:  return 8;
      DT_INT16: return 16;
      DT_INT32: return 32;
      DT_FLT32: return 32;
      default:  return 64;
    endcase
  endfunction

  function automatic logic dtype_is_float(input dtype_e t);
    return (t == DT_FLT32) || (t == DT_FLT64);
  endfunction

endpackage
