// hdp_pkg: types, widths and helper functions shared by the HDP attention
// co-processor.
//
// Q, K and V arrive as 16-bit signed fixed-point numbers (the 16-bit width
// follows the paper; the split into 8 integer and 8 fraction bits is this
// design's choice). HDP works on the integer and fractional parts of each
// number separately. The split truncates toward zero, so a number between -1
// and +1 has integer part 0: this is what makes the dropped fraction x fraction
// product act as near-zero pruning. Because of that the fraction keeps the
// sign of the number and needs 9 bits (-255..255); both components are stored
// as COMP_W = 9-bit signed values so that one memory layout serves all six
// component memories.
//
// Memory words hold WORD_ELEMS = 8 components. For Q and K a word is 8
// consecutive tokens at one feature dimension; for V a word is 8 consecutive
// dimensions of one token (see hdp_core for the address maps).
package hdp_pkg;

  localparam int DATA_W     = 16;  // fixed-point word of Q, K, V and results
  localparam int FRAC_BITS  = 8;   // fraction bits of DATA_W
  localparam int COMP_W     = 9;   // stored integer or fraction component
  localparam int WORD_ELEMS = 8;   // components per memory word
  localparam int WORD_W     = WORD_ELEMS * COMP_W;
  localparam int ACC_W      = 32;  // PE accumulator
  localparam int IMP_W      = 32;  // block importance theta (2 KB / 512 entries)
  localparam int SCORE_W    = 32;  // attention score in Q.FRAC_BITS
  localparam int PROB_W     = 16;  // softmax output, unsigned Q8.8, <= 1.0
  localparam int RHO_W      = 10;  // rho_B: signed, 8 fraction bits, |rho| < 1
  localparam int HEAD_W     = 48;  // theta_Head and tau_H

  typedef logic signed [COMP_W-1:0] comp_t;
  typedef logic signed [DATA_W-1:0] fx_t;

  // The six component memories MEM0..MEM5.
  typedef enum logic [2:0] {
    MEM_IQ = 3'd0, MEM_FQ = 3'd1, MEM_IK = 3'd2,
    MEM_FK = 3'd3, MEM_IV = 3'd4, MEM_FV = 3'd5
  } mem_id_e;

  // What the PE array computes: the integer pass of Q x K^T (4x8 tile), the
  // two fractional products of one kept 2x2 block, or prob x V (2x4 tile).
  typedef enum logic [1:0] {PM_QK = 2'd0, PM_FRAC = 2'd1, PM_PV = 2'd2} pe_mode_e;

  // Which matrix a DRAM load word belongs to.
  typedef enum logic [1:0] {LD_Q = 2'd0, LD_K = 2'd1, LD_V = 2'd2} ld_sel_e;

  // Per-head configuration shared by the control unit and the cores.
  typedef struct packed {
    logic [10:0]                seq_len;   // l, multiple of 8
    logic signed [RHO_W-1:0]    rho_b;     // block pruning ratio, Q.8
    logic [HEAD_W-1:0]          tau_h;     // head pruning threshold
  } hdp_cfg_t;

  // One result tile: 2 rows x 4 dimensions of attention output.
  typedef struct packed {
    logic [4:0]                 head;
    logic [10:0]                row;       // first of the two rows
    logic [7:0]                 dim;       // first of the four dims
    logic [7:0][DATA_W-1:0]     data;      // [r*4+d]
  } out_tile_t;

  // Integer part, truncated toward zero.
  function automatic comp_t int_part(fx_t x);
    logic [DATA_W:0] mag;
    mag = x[DATA_W-1] ? (DATA_W+1)'(-(DATA_W+1)'(x)) : (DATA_W+1)'(x);
    mag = mag >> FRAC_BITS;
    return x[DATA_W-1] ? comp_t'(-mag) : comp_t'(mag);
  endfunction

  // Fractional part with the sign of x: x = int_part*2^FRAC_BITS + frac_part.
  function automatic comp_t frac_part(fx_t x);
    logic signed [DATA_W:0] r;
    r = (DATA_W+1)'(x) - ((DATA_W+1)'(int_part(x)) <<< FRAC_BITS);
    return comp_t'(r);
  endfunction

  // Saturate a wide signed value to DATA_W bits.
  function automatic fx_t sat_fx(logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return fx_t'(v);
  endfunction

endpackage
