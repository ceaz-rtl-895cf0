// ceaz_pkg: types and constants shared by the compression engine.
//
// The engine turns floating-point values into 10-bit quantization codes
// ("symbols") and Huffman-codes them. The numbers that follow the paper are
// the symbol alphabet (1024 symbols), the lane count (32 for single
// precision), the 32 MB codebook-update chunk and the STD thresholds
// tau0 = 3.05 and tau1 = 4.88. The codeword length limit, the frequency
// unit used for the STD (per mille of the chunk) and the offline default
// code (an exponential-Golomb code) are choices of this design.
// Each module uses only some of these constants, so a lint run on one
// module alone lists the others as unused parameters.
package ceaz_pkg;

  localparam int unsigned NSYM      = 1024;   // symbol alphabet
  localparam int unsigned SYM_W     = 10;     // bits of a symbol
  localparam int unsigned CENTER    = 512;    // symbol of delta = 0
  localparam int unsigned OUTLIER   = 0;      // symbol reserved for unpredictable values
  localparam int unsigned MAX_LEN   = 24;     // longest codeword after truncation
  localparam int unsigned LEN_W     = 5;      // bits of a codeword length
  localparam int unsigned FREQ_W    = 32;     // frequency counter width

  // Thresholds on chi = |sigma0 - sigma1|, unsigned Q16.16.
  localparam logic [31:0] TAU0_Q16  = 32'd199885;  // round(3.05 * 65536)
  localparam logic [31:0] TAU1_Q16  = 32'd319816;  // round(4.88 * 65536)

  // Frequencies are expressed per mille of the chunk before the STD is taken.
  localparam int unsigned FREQ_SCALE = 1000;

  typedef logic [SYM_W-1:0] sym_t;
  typedef logic [LEN_W-1:0] len_t;
  typedef logic [MAX_LEN-1:0] code_t;

  typedef struct packed {
    len_t  len;    // 0 = symbol has no codeword
    code_t code;   // right-aligned codeword, most significant bit sent first
  } cw_t;

  typedef struct packed {
    sym_t              sym;
    logic [FREQ_W-1:0] freq;
  } symfreq_t;

  // Which codeword table the encoder reads.
  typedef enum logic [1:0] {
    CB_OFFLINE = 2'd0,
    CB_ONLINE0 = 2'd1,
    CB_ONLINE1 = 2'd2
  } cb_sel_e;

  // Decision of the online update policy.
  typedef enum logic [1:0] {
    ACT_KEEP    = 2'd0,   // chi <= tau0: keep current codewords
    ACT_BUILD   = 2'd1,   // tau0 < chi < tau1: build a new tree
    ACT_OFFLINE = 2'd2    // chi >= tau1: fall back to offline codewords
  } action_e;

  // Default offline codeword of a symbol: order-0 exponential-Golomb code of
  // the zig-zag mapped prediction error u (delta>0 -> 2delta-1, delta<=0 ->
  // -2delta; the outlier symbol is treated as delta = -512). The codeword is
  // u+1 written in 2*floor(log2(u+1))+1 bits, so it is a complete prefix code
  // and at most 21 bits long.
  function automatic cw_t offline_cw(input sym_t s);
    int unsigned u, v, k;
    int signed   d;
    cw_t         r;
    d = int'(s) - int'(CENTER);
    if (d > 0) u = 2*d - 1;
    else       u = -2*d;
    v = u + 1;
    k = 0;
    for (int i = 0; i < 12; i++) if ((v >> i) > 1) k = i + 1;
    r.len  = len_t'(2*k + 1);
    r.code = code_t'(v);
    return r;
  endfunction

endpackage
