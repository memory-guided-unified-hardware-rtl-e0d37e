// mgua_pkg: types, constants and helper functions shared by the unified
// FEM / spiking-network / sparse-tensor accelerator.
//
// Precision levels: the four floating-point formats the selector chooses among
// (fp16, bf16, fp32, fp64). The datapath carries integers; a format is
// emulated by truncating each magnitude to that format's significand width
// (round_sig). That emulation is this design's choice; the format names and
// the four precision roles (u_p, u_m, u_q, u_s) follow the method.
//
// Sparsity patterns: 2:4, 1:4, 1:3 structured and one irregular "learned"
// pattern, with 2-bit in-group indices.
//
// Parallelism shape: log2 of M (output channels), V (input channels),
// N (spatial), S (time steps / bit planes) of the spike array.
package mgua_pkg;

  typedef enum logic [1:0] {
    PREC_FP16 = 2'd0,
    PREC_BF16 = 2'd1,
    PREC_FP32 = 2'd2,
    PREC_FP64 = 2'd3
  } prec_e;

  // One precision per role: basis tabulation, geometry, matrix ops, storage.
  typedef struct packed {
    prec_e up;
    prec_e um;
    prec_e uq;
    prec_e us;
  } prec_cfg_t;

  typedef enum logic [1:0] {
    PAT_2_4     = 2'd0,
    PAT_1_4     = 2'd1,
    PAT_1_3     = 2'd2,
    PAT_LEARNED = 2'd3
  } pattern_e;

  typedef struct packed {
    logic [2:0] lg_m;
    logic [2:0] lg_v;
    logic [2:0] lg_n;
    logic [2:0] lg_s;
  } par_cfg_t;

  localparam int PAR_LG_MAX = 4;   // each dimension 1..16

  // Element types of the FEM benchmarks.
  localparam logic [1:0] ELEM_TET = 2'd0;
  localparam logic [1:0] ELEM_HEX = 2'd1;

  // Significand width (with hidden bit) of each format.
  function automatic int unsigned sig_bits(prec_e p);
    case (p)
      PREC_FP16: return 11;
      PREC_BF16: return 8;
      PREC_FP32: return 24;
      default:   return 53;
    endcase
  endfunction

  // One level more precise (saturating at fp64).
  function automatic prec_e prec_up(prec_e p);
    return (p == PREC_FP64) ? PREC_FP64 : prec_e'(p + 2'd1);
  endfunction

  // Keep the `bits` most significant bits of |x| (truncation toward zero).
  function automatic logic signed [63:0] round_sig(logic signed [63:0] x, int unsigned bits);
    logic [63:0] mag;
    int          msb;
    logic [63:0] keep;
    mag = x[63] ? 64'(-x) : 64'(x);
    msb = -1;
    for (int i = 0; i < 64; i++) if (mag[i]) msb = i;
    keep = '1;
    if (msb + 1 > int'(bits)) keep = ~((64'd1 << (msb + 1 - int'(bits))) - 64'd1);
    mag = mag & keep;
    return x[63] ? -$signed(mag) : $signed(mag);
  endfunction

  // Group geometry of a pattern: kept values n out of group size m.
  function automatic int unsigned pat_m(pattern_e p);
    return (p == PAT_1_3) ? 3 : 4;
  endfunction
  function automatic int unsigned pat_n(pattern_e p);
    case (p)
      PAT_2_4:     return 2;
      PAT_1_4:     return 1;
      PAT_1_3:     return 1;
      default:     return 4;
    endcase
  endfunction

endpackage
