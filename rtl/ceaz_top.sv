// ceaz_top: the CEAZ lossy compression engine.
//
// A stream of floating-point values (N per beat) is compressed chunk by
// chunk. Three dataflow paths work on it:
//   middle  dual_quant turns the values into 10-bit symbols, the encoder
//           looks up their codewords in the codebook, the bit packer emits
//           the compressed words (out_*). Unpredictable values leave on the
//           outlier side channel (olr_*).
//   top     the histogram counts the symbols of the chunk; at the end of the
//           chunk std_unit computes the STD of the frequencies and
//           update_policy decides whether to keep the codewords, build new
//           ones (huff_codegen, running in the background while the next
//           chunk is encoded, then switching online bank) or fall back to
//           the offline codewords.
//   bottom  bit_counter totals the chunk's bits and eb_adjust, in fixed-ratio
//           mode, rescales the error bound before the next chunk.
// The first chunk after reset is encoded with the offline codewords.
//
// Chunk control (this design's choice, the paper gives no controller): a
// chunk ends after CHUNK_BYTES of input or at a beat with in_last. Input is
// then held off (in_ready low) while the pipeline empties, the packer
// flushes (out_last), and the histogram is drained into the STD unit and the
// code generator (NSYM cycles). If the code generator is still busy with the
// previous chunk's codebook, the drain waits for it. Input resumes once the
// policy has decided and the error bound is updated, about NSYM + 130 cycles
// per chunk (0.4% of a 32 MB chunk at N = 32).
//
// Codebook banks: a codebook built from chunk k is written into the online
// bank not in use and takes over at the first chunk boundary after it is
// complete (unless that boundary decides "offline"). If it is still waiting
// when the next build starts, the new build goes to the other bank.
//
// What a receiver needs besides out_*: st_cb_sel, which is constant while
// a chunk's words are on out_* (it only changes between chunks); the code
// lengths of every built bank on cbw_* (codes are canonical: per length,
// consecutive values in symbol order, as in Deflate); the offline bank it
// loaded itself; and the outlier values on olr_*, in stream order, for
// every value coded as symbol 0.
//
// Timing: a beat's codewords reach the packer three cycles after it is
// taken. Backpressure: out_ready low stalls the whole pipeline.
module ceaz_top
  import ceaz_pkg::*;
#(
  parameter int unsigned N           = 32,          // pipelines (paper: 32 single / 16 double)
  parameter int unsigned DATA_W      = 32,          // 32 single, 64 double precision
  parameter int unsigned Q_W         = 32,          // prequantized integer width
  parameter int unsigned OUT_W       = 1024,        // packed output word
  parameter longint unsigned CHUNK_BYTES = 64'd33554432   // codeword update size, 32 MB
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration
  input  logic                      fixed_ratio,
  input  logic [15:0]               c_target_q8,
  input  logic                      load_scale,
  input  logic [DATA_W-1:0]         scale_in,      // 1/(2*eb) in the data format
  input  logic                      off_we,        // offline codebook load
  input  sym_t                      off_sym,
  input  cw_t                       off_cw,
  // raw data stream (from the memory-to-stream mover)
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [N-1:0][DATA_W-1:0]  in_data,
  input  logic                      in_last,
  // compressed stream (to the network interface)
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [OUT_W-1:0]          out_data,
  output logic [$clog2(OUT_W+1)-1:0] out_nbits,
  output logic                      out_last,
  // outlier side channel
  output logic                      olr_valid,
  output logic [N-1:0]              olr_mask,
  output logic [N-1:0][Q_W-1:0]     olr_q,
  // codebook side channel: code lengths of each newly built online bank
  // (canonical codes are fully given by their lengths)
  output logic                      cbw_valid,
  output logic                      cbw_bank,      // 0: online bank 0, 1: bank 1
  output sym_t                      cbw_sym,
  output len_t                      cbw_len,
  // status
  output cb_sel_e                   st_cb_sel,
  output logic                      st_act_valid,
  output action_e                   st_act,
  output logic [31:0]               st_sigma,
  output logic [31:0]               st_chi,
  output logic [DATA_W-1:0]         st_scale,
  output logic                      st_codegen_busy,
  output logic                      st_wait_codegen,
  output logic [N-1:0]              st_escape,
  output logic [47:0]               st_total_bits,
  output logic signed [15:0]        st_eb_step,    // log2 of the last eb change
  output logic [SYM_W:0]            st_codegen_nsym
);
  localparam longint unsigned BEATS = (CHUNK_BYTES * 8) / (DATA_W * N);
  localparam int unsigned BC_W  = $clog2(BEATS + 1) + 1;
  localparam int unsigned LW    = $clog2(N*MAX_LEN + 1);

  typedef enum logic [2:0] {
    T_INIT, T_RUN, T_FLUSH, T_PACKFLUSH, T_WAITCG, T_DRAIN, T_DECIDE
  } tstate_e;
  tstate_e st;

  logic adv;
  assign adv = !(out_valid && !out_ready);

  // ---------------------------------------------------------------- control
  logic [BC_W-1:0] beat_cnt;
  logic [2:0]      fl_cnt;
  logic            next_first;
  logic            act_seen, eb_seen;
  action_e         act_r;
  logic            take;

  logic            cb_init_busy, h_busy;
  logic            cg_busy, cg_done;
  logic            act_valid;
  action_e         act;
  logic            eb_done;

  assign in_ready = (st == T_RUN) && adv;
  assign take     = in_valid && in_ready;

  cb_sel_e cb_sel;
  logic    cb_pending, resume;
  logic    wr_bank;        // online bank the generator fills
  logic    h_drain_start;
  logic    pk_flush, bc_chunk_end;

  assign h_drain_start = (st == T_WAITCG) && !cg_busy;
  assign pk_flush      = (st == T_PACKFLUSH) && adv;
  assign bc_chunk_end  = pk_flush;
  assign st_wait_codegen = (st == T_WAITCG) && cg_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= T_INIT;
      beat_cnt   <= '0;
      fl_cnt     <= '0;
      next_first <= 1'b1;
      act_seen   <= 1'b0;
      eb_seen    <= 1'b0;
      act_r      <= ACT_KEEP;
    end else begin
      if (act_valid) begin act_seen <= 1'b1; act_r <= act; end
      if (eb_done)   eb_seen <= 1'b1;
      unique case (st)
        T_INIT: if (!cb_init_busy && !h_busy) st <= T_RUN;
        T_RUN: if (take) begin
          next_first <= 1'b0;
          if (in_last || beat_cnt == BC_W'(BEATS - 1)) begin
            st       <= T_FLUSH;
            fl_cnt   <= '0;
            beat_cnt <= '0;
          end else begin
            beat_cnt <= beat_cnt + 1'b1;
          end
        end
        T_FLUSH: if (adv) begin            // let the last beat reach the packer
          fl_cnt <= fl_cnt + 1'b1;
          if (fl_cnt == 3'd3) st <= T_PACKFLUSH;
        end
        T_PACKFLUSH: if (adv) st <= T_WAITCG;
        T_WAITCG: if (!cg_busy) begin
          st       <= T_DRAIN;
          act_seen <= 1'b0;
        end
        T_DRAIN: if (!h_busy) st <= T_DECIDE;
        T_DECIDE: if (resume) begin
          st         <= T_RUN;
          next_first <= 1'b1;
          eb_seen    <= 1'b0;
          act_seen   <= 1'b0;
        end
        default: st <= T_INIT;
      endcase
    end
  end

  // ------------------------------------------------------------ dual-quant
  logic                  dq_valid, dq_first;
  sym_t  [N-1:0]         dq_sym;
  logic  [N-1:0]         dq_outlier;
  logic  [N-1:0][Q_W-1:0] dq_q;
  logic [DATA_W-1:0]     scale;

  dual_quant #(.N(N), .DATA_W(DATA_W), .Q_W(Q_W)) u_dq (
    .clk, .rst_n, .adv,
    .in_valid(take), .in_first(next_first), .in_data, .scale,
    .out_valid(dq_valid), .out_first(dq_first), .out_sym(dq_sym),
    .out_outlier(dq_outlier), .out_q(dq_q)
  );

  // ------------------------------------------------------------- top path
  logic           bin_valid, bin_last;
  sym_t           bin_addr;
  logic [FREQ_W-1:0] bin_freq;
  logic           sigma_valid;
  logic [31:0]    sigma;

  histogram #(.N(N)) u_hist (
    .clk, .rst_n, .in_valid(dq_valid && adv), .in_sym(dq_sym),
    .drain_start(h_drain_start), .busy(h_busy),
    .bin_valid, .bin_last, .bin_addr, .bin_freq
  );

  std_unit u_std (
    .clk, .rst_n, .clear(1'b0), .bin_valid, .bin_last, .bin_freq,
    .sigma_valid, .sigma_q16(sigma)
  );

  update_policy u_pol (
    .clk, .rst_n, .restart(1'b0), .sigma_valid, .sigma_q16(sigma),
    .act_valid, .act, .chi_q16(st_chi)
  );

  logic cg_start, cg_we;
  sym_t cg_sym;
  cw_t  cg_cw;

  assign cg_start = act_valid && (act == ACT_BUILD);

  huff_codegen u_cg (
    .clk, .rst_n, .freq_we(bin_valid), .freq_addr(bin_addr), .freq_data(bin_freq),
    .start(cg_start), .busy(cg_busy), .done(cg_done),
    .cb_we(cg_we), .cb_sym(cg_sym), .cb_cw(cg_cw), .n_kept(st_codegen_nsym)
  );

  // codebook selection: a new online bank takes over at the next chunk
  // boundary, so each chunk is encoded with one codebook throughout
  assign resume = (st == T_DECIDE) && act_seen && (eb_seen || eb_done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cb_sel     <= CB_OFFLINE;
      wr_bank    <= 1'b0;
      cb_pending <= 1'b0;
    end else begin
      // a build writes the bank that will not be in use: if a finished
      // bank is still waiting to take over, that one is about to be live
      if (cg_start) wr_bank <= cb_pending ? !wr_bank : (cb_sel == CB_ONLINE0);
      if (cg_done)  cb_pending <= 1'b1;
      if (resume) begin
        if (act_r == ACT_OFFLINE) begin
          cb_sel     <= CB_OFFLINE;
          cb_pending <= 1'b0;
        end else if (cb_pending) begin
          cb_sel     <= wr_bank ? CB_ONLINE1 : CB_ONLINE0;
          cb_pending <= 1'b0;
        end
      end
    end
  end

  // ---------------------------------------------------------- middle path
  sym_t [N:0] rd_sym;
  cw_t  [N:0] rd_cw;
  sym_t [N-1:0] enc_rd_sym;

  assign rd_sym = {sym_t'(OUTLIER), enc_rd_sym};

  codebook #(.N(N+1)) u_cb (
    .clk, .rst_n, .init_busy(cb_init_busy),
    .off_we, .off_sym, .off_cw,
    .on_we(cg_we), .on_bank(wr_bank), .on_sym(cg_sym), .on_cw(cg_cw),
    .sel(cb_sel), .rd_sym, .rd_cw
  );

  logic                  enc_valid, enc_first;
  cw_t  [N-1:0]          enc_cw;
  logic [N-1:0]          enc_outlier, enc_escape;
  logic [N-1:0][Q_W-1:0] enc_q;

  encoder #(.N(N), .Q_W(Q_W)) u_enc (
    .clk, .rst_n, .adv,
    .in_valid(dq_valid), .in_first(dq_first), .in_sym(dq_sym),
    .in_outlier(dq_outlier), .in_q(dq_q),
    .rd_sym(enc_rd_sym), .rd_cw(rd_cw[N-1:0]), .esc_cw(rd_cw[N]),
    .out_valid(enc_valid), .out_first(enc_first), .out_cw(enc_cw),
    .out_outlier(enc_outlier), .out_escape(enc_escape), .out_q(enc_q)
  );

  logic [LW-1:0] beat_bits;

  bit_packer #(.N(N), .OUT_W(OUT_W)) u_pack (
    .clk, .rst_n, .adv, .in_valid(enc_valid), .in_cw(enc_cw), .flush(pk_flush),
    .out_valid, .out_ready, .out_data, .out_nbits, .out_last, .beat_bits
  );

  assign olr_valid = enc_valid && adv && (enc_outlier != '0);
  assign olr_mask  = enc_outlier;
  assign olr_q     = enc_q;
  assign st_escape = (enc_valid && adv) ? enc_escape : '0;

  // ---------------------------------------------------------- bottom path
  logic        bc_done;
  logic [47:0] chunk_bits, chunk_values;

  bit_counter #(.N(N), .LW(LW), .CW(48)) u_bc (
    .clk, .rst_n, .in_valid(enc_valid && adv), .beat_bits, .chunk_end(bc_chunk_end),
    .chunk_done(bc_done), .chunk_bits, .chunk_values, .total_bits(st_total_bits)
  );

  logic        eb_busy;

  eb_adjust #(.DATA_W(DATA_W), .CW(48)) u_eb (
    .clk, .rst_n, .fixed_ratio, .c_target_q8, .load_scale, .scale_in,
    .chunk_done(bc_done), .chunk_bits, .chunk_values,
    .scale, .busy(eb_busy), .done(eb_done), .last_step(st_eb_step)
  );

  assign st_cb_sel       = cb_sel;
  assign st_act_valid    = act_valid;
  assign st_act          = act;
  assign st_sigma        = sigma;
  assign st_scale        = scale;
  assign st_codegen_busy = cg_busy;
  assign cbw_valid       = cg_we;
  assign cbw_bank        = wr_bank;
  assign cbw_sym         = cg_sym;
  assign cbw_len         = cg_cw.len;

  // input beats are only taken while running
  assert property (@(posedge clk) take |-> st == T_RUN);
  // the encoder's chunk marker trails the dual-quant one by its pipeline stage
  assert property (@(posedge clk) adv && dq_valid && dq_first |=> enc_valid && enc_first)
    else $error("ceaz_top: chunk start lost between dual-quant and encoder");
  // chunk totals only arrive while the adjuster is idle
  assert property (@(posedge clk) !(bc_done && eb_busy))
    else $error("ceaz_top: chunk finished while the error bound was being adjusted");

endmodule
