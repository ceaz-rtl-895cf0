// huff_codegen: builds a canonical, length-limited Huffman codebook from one
// chunk's symbol frequencies (the "adaptively build & canonize Huffman tree"
// block). It runs the seven steps the paper lists, one after another:
//
//   filter     keep the symbols whose frequency is not zero, in symbol order,
//              and note p, the first kept symbol at or above the centre 512
//   sort       the paper's approximate sort (approx_sort, Algorithm 1)
//   build      two-queue Huffman construction: the sorted leaves form one
//              queue, the internal nodes (created in order) the other; each
//              step takes the two smaller heads (2 cycles per internal node)
//   bit length depth of every internal node from the root down, then of
//              every leaf; a count of leaves per depth
//   truncate   limits lengths to MAX_LEN by moving leaf pairs up the tree on
//              the length counts (the JPEG Annex K adjustment)
//   canonize   hands the lengths out again in sorted order: the least
//              frequent leaves get the longest codes
//   codewords  canonical codes: first code of each length from the length
//              counts, then consecutive codes in symbol order
//
// The paper names these steps (and designs only the sort); how each is done
// here is this design's choice. Two further choices: the outlier symbol 0 is
// always kept (with frequency at least 1) so every online codebook has an
// escape code for symbols unseen in the chunk it was built from, and a
// single kept symbol gets a 1-bit code. Depths are limited to 63, which the
// 32-bit frequencies cannot exceed.
//
// Interface: load frequencies through freq_we/addr/data while idle, pulse
// start; the codebook is written out through cb_we/cb_sym/cb_cw (one symbol
// per cycle, all NSYM symbols, length 0 for symbols without code), then done
// pulses. Timing: about 2*NSYM + 4.5*n + 100 cycles for n kept symbols
// (below 8000 cycles for NSYM = 1024, about 26 us at 300 MHz).
module huff_codegen
  import ceaz_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              freq_we,
  input  sym_t              freq_addr,
  input  logic [FREQ_W-1:0] freq_data,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic              cb_we,
  output sym_t              cb_sym,
  output cw_t               cb_cw,
  output logic [SYM_W:0]    n_kept
);
  localparam int unsigned AW  = SYM_W + 1;
  localparam int unsigned DPW = 6;               // depth width
  localparam int unsigned NDP = 1 << DPW;

  typedef enum logic [3:0] {
    G_IDLE, G_FILTER, G_SORT_START, G_SORT, G_BUILD, G_DEPTH_I, G_DEPTH_L,
    G_TRUNC_I, G_TRUNC_J, G_CANON, G_NEXT, G_CODES, G_DONE
  } gstate_e;
  gstate_e st;

  logic [FREQ_W-1:0] freq_mem [NSYM];
  symfreq_t          a_mem    [NSYM];
  symfreq_t          o_mem    [NSYM];
  logic [SYM_W-1:0]  lparent  [NSYM];
  logic [SYM_W-1:0]  iparent  [NSYM];
  logic [FREQ_W-1:0] ifreq    [NSYM];
  logic [DPW-1:0]    idepth   [NSYM];
  len_t              symlen   [NSYM];
  logic [AW-1:0]     cnt      [NDP];
  logic [MAX_LEN:0]  next_code[MAX_LEN+1];

  logic [AW-1:0]     i, n, p, lp, ip, k;
  logic              pf, second;
  logic [FREQ_W-1:0] acc;
  logic [DPW-1:0]    ti, tj;
  len_t              cl;
  logic [AW-1:0]     crem;
  logic [MAX_LEN:0]  ncode;

  assign busy   = (st != G_IDLE);
  assign n_kept = n;

  // ---- approximate sort on a_mem -> o_mem
  logic          srt_start, srt_busy, srt_done;
  logic [AW-1:0] srt_ra_l, srt_ra_h, srt_wa0, srt_wa1;
  logic          srt_we0, srt_we1;
  symfreq_t      srt_wd0, srt_wd1, srt_rd_l, srt_rd_h;

  // the sorter may look one entry past the end of a full table
  assign srt_rd_l = srt_ra_l[SYM_W] ? symfreq_t'('0) : a_mem[srt_ra_l[SYM_W-1:0]];
  assign srt_rd_h = srt_ra_h[SYM_W] ? symfreq_t'('0) : a_mem[srt_ra_h[SYM_W-1:0]];

  approx_sort #(.AW(AW)) u_sort (
    .clk, .rst_n, .start(srt_start), .len(n), .p(pf ? p : n - 1'b1),
    .rd_addr_l(srt_ra_l), .rd_addr_h(srt_ra_h),
    .rd_data_l(srt_rd_l), .rd_data_h(srt_rd_h),
    .wr0_en(srt_we0), .wr0_addr(srt_wa0), .wr0_data(srt_wd0),
    .wr1_en(srt_we1), .wr1_addr(srt_wa1), .wr1_data(srt_wd1),
    .busy(srt_busy), .done(srt_done)
  );
  assign srt_start = (st == G_SORT_START);

  always_ff @(posedge clk) begin
    if (srt_we0) o_mem[srt_wa0[SYM_W-1:0]] <= srt_wd0;
    if (srt_we1) o_mem[srt_wa1[SYM_W-1:0]] <= srt_wd1;
  end

  // ---- frequency table
  always_ff @(posedge clk) begin
    if (freq_we && st == G_IDLE) freq_mem[freq_addr] <= freq_data;
  end

  // ---- filter step view
  logic [FREQ_W-1:0] f_i;
  logic              keep_i;
  assign f_i    = (i == '0 && freq_mem[0] == '0) ? FREQ_W'(1) : freq_mem[i[SYM_W-1:0]];
  assign keep_i = (freq_mem[i[SYM_W-1:0]] != '0) || (i == AW'(OUTLIER));

  // ---- build step view: pick the smaller queue head
  logic              take_leaf;
  logic [FREQ_W-1:0] pick_f;
  assign take_leaf = (lp < n) && ((ip >= k) || (o_mem[lp[SYM_W-1:0]].freq <= ifreq[ip[SYM_W-1:0]]));
  assign pick_f    = take_leaf ? o_mem[lp[SYM_W-1:0]].freq : ifreq[ip[SYM_W-1:0]];

  // ---- depth step view
  logic [DPW-1:0] dchild;
  always_comb begin
    logic [DPW-1:0] pd;
    if (st == G_DEPTH_I) pd = idepth[iparent[k[SYM_W-1:0]]];
    else                 pd = idepth[lparent[lp[SYM_W-1:0]]];
    dchild = (pd == '1) ? pd : pd + 1'b1;
  end

  // ---- codebook output
  assign cb_we      = (st == G_CODES);
  assign cb_sym     = i[SYM_W-1:0];
  assign cb_cw.len  = symlen[i[SYM_W-1:0]];
  assign cb_cw.code = (symlen[i[SYM_W-1:0]] == '0) ? '0 : next_code[symlen[i[SYM_W-1:0]]][MAX_LEN-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= G_IDLE;
      i      <= '0;
      n      <= '0;
      p      <= '0;
      pf     <= 1'b0;
      lp     <= '0;
      ip     <= '0;
      k      <= '0;
      second <= 1'b0;
      acc    <= '0;
      ti     <= '0;
      tj     <= '0;
      cl     <= '0;
      crem   <= '0;
      ncode  <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        G_IDLE: if (start) begin
          st <= G_FILTER;
          i  <= '0;
          n  <= '0;
          pf <= 1'b0;
          for (int d = 0; d < int'(NDP); d++) cnt[d] <= '0;
        end

        // filter: one symbol per cycle
        G_FILTER: begin
          symlen[i[SYM_W-1:0]] <= '0;
          if (keep_i) begin
            a_mem[n[SYM_W-1:0]] <= '{sym: i[SYM_W-1:0], freq: f_i};
            n <= n + 1'b1;
            if (i >= AW'(CENTER) && !pf) begin
              p  <= n;
              pf <= 1'b1;
            end
          end
          i <= i + 1'b1;
          if (i == AW'(NSYM - 1)) st <= G_SORT_START;
        end

        G_SORT_START: st <= G_SORT;   // p is n-1 if nothing lies at or above the centre

        G_SORT: if (srt_done) begin
          lp     <= '0;
          ip     <= '0;
          k      <= '0;
          second <= 1'b0;
          if (n == AW'(1)) begin
            cnt[1] <= AW'(1);
            st     <= G_TRUNC_I;
            ti     <= '0;
          end else begin
            st <= G_BUILD;
          end
        end

        // two-queue tree construction, one child per cycle
        G_BUILD: begin
          if (take_leaf) begin
            lparent[lp[SYM_W-1:0]] <= k[SYM_W-1:0];
            lp <= lp + 1'b1;
          end else begin
            iparent[ip[SYM_W-1:0]] <= k[SYM_W-1:0];
            ip <= ip + 1'b1;
          end
          if (!second) begin
            acc    <= pick_f;
            second <= 1'b1;
          end else begin
            ifreq[k[SYM_W-1:0]] <= acc + pick_f;
            second <= 1'b0;
            k      <= k + 1'b1;
            if (k == n - AW'(2)) st <= G_DEPTH_I;
          end
        end

        // depth of the internal nodes, root (n-2) first
        G_DEPTH_I: begin
          if (k == n - AW'(1)) begin            // first cycle: k was left at n-1
            idepth[k[SYM_W-1:0] - 1'b1] <= '0;
            k <= k - AW'(2);
            if (n == AW'(2)) begin
              st <= G_DEPTH_L;
              lp <= '0;
            end
          end else begin
            idepth[k[SYM_W-1:0]] <= dchild;
            k <= k - 1'b1;
            if (k == '0) begin
              st <= G_DEPTH_L;
              lp <= '0;
            end
          end
        end

        // depth of every leaf -> count per depth
        G_DEPTH_L: begin
          cnt[dchild] <= cnt[dchild] + 1'b1;
          lp <= lp + 1'b1;
          if (lp == n - 1'b1) begin
            st <= G_TRUNC_I;
            ti <= DPW'(NDP - 1);
          end
        end

        // length limiting on the counts
        G_TRUNC_I: begin
          if (ti <= DPW'(MAX_LEN)) begin
            st   <= G_CANON;
            cl   <= len_t'(MAX_LEN);
            crem <= cnt[MAX_LEN];
            lp   <= '0;
          end else if (cnt[ti] == '0) begin
            ti <= ti - 1'b1;
          end else begin
            tj <= ti - DPW'(2);
            st <= G_TRUNC_J;
          end
        end
        G_TRUNC_J: begin
          if (cnt[tj] == '0) begin
            tj <= tj - 1'b1;
          end else begin
            cnt[ti] <= cnt[ti] - AW'(2);
            cnt[tj] <= cnt[tj] - 1'b1;
            if (tj + 1'b1 == ti - 1'b1) begin
              cnt[ti - 1'b1] <= cnt[ti - 1'b1] + AW'(3);
            end else begin
              cnt[ti - 1'b1] <= cnt[ti - 1'b1] + 1'b1;
              cnt[tj + 1'b1] <= cnt[tj + 1'b1] + AW'(2);
            end
            st <= G_TRUNC_I;
          end
        end

        // longest lengths to the least frequent (lowest sorted) leaves
        G_CANON: begin
          if (crem == '0) begin
            cl   <= cl - 1'b1;
            crem <= cnt[DPW'(cl - 1'b1)];
          end else begin
            symlen[o_mem[lp[SYM_W-1:0]].sym] <= cl;
            crem <= crem - 1'b1;
            lp   <= lp + 1'b1;
            if (lp == n - 1'b1) begin
              st    <= G_NEXT;
              cl    <= len_t'(1);
              ncode <= '0;
            end
          end
        end

        // first canonical code of every length
        G_NEXT: begin
          next_code[cl] <= (ncode + (MAX_LEN+1)'(cnt[DPW'(cl - 1'b1)])) << 1;
          ncode         <= (ncode + (MAX_LEN+1)'(cnt[DPW'(cl - 1'b1)])) << 1;
          cl <= cl + 1'b1;
          if (cl == len_t'(MAX_LEN)) begin
            st <= G_CODES;
            i  <= '0;
          end
        end

        // codewords in symbol order
        G_CODES: begin
          if (symlen[i[SYM_W-1:0]] != '0)
            next_code[symlen[i[SYM_W-1:0]]] <= next_code[symlen[i[SYM_W-1:0]]] + 1'b1;
          i <= i + 1'b1;
          if (i == AW'(NSYM - 1)) st <= G_DONE;
        end

        G_DONE: begin
          done <= 1'b1;
          st   <= G_IDLE;
        end
        default: st <= G_IDLE;
      endcase
    end
  end

  // the sorter is only started when idle and only writes inside the table
  assert property (@(posedge clk) !(srt_start && srt_busy))
    else $error("huff_codegen: sorter restarted while busy");
  assert property (@(posedge clk) !(srt_we0 && srt_wa0[SYM_W]) && !(srt_we1 && srt_wa1[SYM_W]))
    else $error("huff_codegen: sorter wrote beyond the table");
endmodule
