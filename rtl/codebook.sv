// codebook: the codeword tables the encoder lanes read.
//
// Three banks of NSYM entries {length, codeword}: the offline bank and two
// online banks. The offline bank holds the codewords chosen ahead of time for
// the kind of data being compressed (the paper keeps a repository of such
// tables per data type: climate, cosmology, molecular, physics, and an
// average one); the host loads it through the off_* port. After reset it is
// filled with a default code (ceaz_pkg::offline_cw, an exponential-Golomb
// code of the zig-zag prediction error) during NSYM cycles while init_busy
// is high. The two online banks are written by the Huffman code generator
// one symbol per cycle; while one online bank is in use, the generator
// writes the other, so the switch to new codewords is a single select
// change. The ping-pong online banks and the default offline code are
// choices of this design; the paper states only that offline codewords are
// used first and online codewords replace them.
//
// Interface: sel picks the bank read by all N ports; reads are
// combinational (rd_sym -> rd_cw in the same cycle); writes take effect at
// the next edge.
module codebook
  import ceaz_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  output logic         init_busy,
  input  logic         off_we,
  input  sym_t         off_sym,
  input  cw_t          off_cw,
  input  logic         on_we,
  input  logic         on_bank,      // 0: online bank 0, 1: online bank 1
  input  sym_t         on_sym,
  input  cw_t          on_cw,
  input  cb_sel_e      sel,
  input  sym_t [N-1:0] rd_sym,
  output cw_t  [N-1:0] rd_cw
);
  cw_t off_tbl [NSYM];
  cw_t on0_tbl [NSYM];
  cw_t on1_tbl [NSYM];

  logic [SYM_W:0] iptr;
  assign init_busy = !iptr[SYM_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) iptr <= '0;
    else if (init_busy) iptr <= iptr + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (init_busy)   off_tbl[iptr[SYM_W-1:0]] <= offline_cw(iptr[SYM_W-1:0]);
    else if (off_we) off_tbl[off_sym] <= off_cw;
  end

  always_ff @(posedge clk) begin
    if (on_we && !on_bank) on0_tbl[on_sym] <= on_cw;
    if (on_we &&  on_bank) on1_tbl[on_sym] <= on_cw;
  end

  always_comb begin
    for (int l = 0; l < int'(N); l++) begin
      unique case (sel)
        CB_ONLINE0: rd_cw[l] = on0_tbl[rd_sym[l]];
        CB_ONLINE1: rd_cw[l] = on1_tbl[rd_sym[l]];
        default:    rd_cw[l] = off_tbl[rd_sym[l]];
      endcase
    end
  end
endmodule
