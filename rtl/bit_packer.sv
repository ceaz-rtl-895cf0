// bit_packer: packs the N variable-length codewords of every beat into a
// stream of OUT_W-bit words ("pack bits").
//
// The codewords of a beat are concatenated most significant bit first, lane
// 0 first (offsets from a prefix sum of the lengths), and appended to a
// residual buffer of 2*OUT_W bits. Whenever the buffer holds OUT_W bits or
// more, its top OUT_W bits leave as one output word. Because a beat carries
// at most N*MAX_LEN <= OUT_W bits, one output word per cycle always keeps
// up. A flush (used at the end of every chunk) sends the remaining bits,
// zero padded, as a word with out_last set and out_nbits giving the valid
// bit count (0 when nothing was left). The paper only names the packing; the
// word width, bit order and per-chunk flush are this design's choices.
//
// Interface: in_valid beats are taken when adv is high; flush must come in a
// cycle with adv high and no in_valid. The output register is loaded only
// when adv is high, so the surrounding logic must keep adv low while
// out_valid is high and out_ready low. Timing: one cycle from beat to word.
module bit_packer
  import ceaz_pkg::*;
#(
  parameter int unsigned N     = 32,
  parameter int unsigned OUT_W = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     adv,
  input  logic                     in_valid,
  input  cw_t  [N-1:0]             in_cw,
  input  logic                     flush,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [OUT_W-1:0]         out_data,
  output logic [$clog2(OUT_W+1)-1:0] out_nbits,
  output logic                     out_last,
  output logic [$clog2(N*MAX_LEN+1)-1:0] beat_bits
);
  localparam int unsigned BW  = N * MAX_LEN;
  localparam int unsigned BUF = 2 * OUT_W;
  localparam int unsigned FW  = $clog2(BUF + 1);
  localparam int unsigned LW  = $clog2(BW + 1);

  initial assert (BW <= OUT_W) else $fatal(1, "bit_packer: OUT_W must hold one beat");

  logic [BUF-1:0] bufr;
  logic [FW-1:0]  fill;

  // concatenate one beat, MSB aligned in BW bits
  logic [BW-1:0] block;
  logic [LW-1:0] blen;
  always_comb begin
    logic [LW-1:0] off;
    block = '0;
    off   = '0;
    for (int l = 0; l < int'(N); l++) begin
      logic [BW-1:0] c;
      c = BW'(in_cw[l].code) & ((BW'(1) << in_cw[l].len) - BW'(1));
      if (in_cw[l].len != '0)
        block |= c << (LW'(BW) - off - LW'(in_cw[l].len));
      off = off + LW'(in_cw[l].len);
    end
    blen = off;
  end
  assign beat_bits = blen;

  logic [BUF-1:0] merged;
  logic [FW-1:0]  mfill;
  assign merged = bufr | (({block, {(BUF-BW){1'b0}}}) >> fill);
  assign mfill  = fill + FW'(blen);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bufr      <= '0;
      fill      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_nbits <= '0;
      out_last  <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (adv) begin
        if (in_valid) begin
          if (mfill >= FW'(OUT_W)) begin
            out_valid <= 1'b1;
            out_data  <= merged[BUF-1 -: OUT_W];
            out_nbits <= ($bits(out_nbits))'(OUT_W);
            out_last  <= 1'b0;
            bufr      <= merged << OUT_W;
            fill      <= mfill - FW'(OUT_W);
          end else begin
            bufr <= merged;
            fill <= mfill;
          end
        end else if (flush) begin
          out_valid <= 1'b1;
          out_data  <= bufr[BUF-1 -: OUT_W];
          out_nbits <= ($bits(out_nbits))'(fill);
          out_last  <= 1'b1;
          bufr      <= '0;
          fill      <= '0;
        end
      end
    end
  end

  // the output word must be held until it is taken
  assert property (@(posedge clk)
                   out_valid && !out_ready |-> !adv)
    else $error("bit_packer: advanced while the output word was stalled");
  assert property (@(posedge clk) !(flush && in_valid && adv))
    else $error("bit_packer: flush together with a beat");

endmodule
