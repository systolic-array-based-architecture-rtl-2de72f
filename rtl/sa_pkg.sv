// sa_pkg: sizes and number formats shared by the self-attention accelerator.
//
// The default sizes are those of one DeiT-S attention head: N_TOK = 198 tokens
// (196 patches plus class and distillation tokens), D_MODEL = 384 channels,
// N_HEAD = 6 heads of D_HEAD = 64 channels. All data exchanged between arrays
// are 3-bit codes; every quantizer compares against N_TH = 7 thresholds. The
// running-statistics unit uses a numerator 2^NU = 64 and a prescale factor
// 2^PRESCALE_SH = 32; these numbers follow the paper. The internal widths
// (accumulator, post-MAC value, statistics) are this design's own choice.
package sa_pkg;
  localparam int N_TOK       = 198;
  localparam int D_MODEL     = 384;
  localparam int N_HEAD      = 6;
  localparam int D_HEAD      = D_MODEL / N_HEAD;
  localparam int DW          = 3;    // data code width
  localparam int N_TH        = 7;    // 2^DW - 1 thresholds
  localparam int TAG_W       = 3;    // head index width (N_HEAD <= 8)
  localparam int ACC_W       = 16;   // MAC partial sum width
  localparam int PM_W        = 16;   // post-MAC value width
  localparam int SB_SHIFT    = 8;    // scale fraction bits of Scale+Bias
  localparam int NU          = 6;    // numerator 2^NU
  localparam int PRESCALE_SH = 5;    // prescale s = 2^PRESCALE_SH
  localparam int MU_W        = 24;   // running mean width
  localparam int VAR_W       = 56;   // running M2 width
  localparam int NQ_PF       = 12;   // fraction bits of NormQ parameter P
  localparam int NQ_P_W      = 24;   // width of NormQ parameter P
  localparam int EXP_W       = 16;   // exponential output width
  localparam int SUM_W       = 24;   // exponential sum width
  localparam int SQ_F        = 16;   // fraction bits of ScaleQ step
  localparam int BUS_W       = 64;   // host bus width

  typedef logic [DW-1:0]           code_t;
  typedef logic [TAG_W-1:0]        tag_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic signed [PM_W-1:0]  pm_t;

  // A lane of the systolic datapath: valid bit, head tag and a payload.
  typedef struct packed {
    logic valid;
    tag_t tag;
  } side_t;

  // Maps a threshold count 0..7 to a signed code -4..3 (offset binary).
  function automatic code_t to_signed_code(input code_t c);
    return {~c[DW-1], c[DW-2:0]};
  endfunction
endpackage
