// histogram: symbol-frequency collector of the top dataflow path.
//
// Every lane owns a private table of NSYM counters, so N symbols can be
// counted per cycle without write conflicts (a read-modify-write of one
// counter per lane and cycle). At the end of a chunk the tables are drained:
// one bin per cycle is read from all lanes, the N counts are summed and
// presented on bin_*, and the bin is cleared in the same cycle, so the next
// chunk starts from zero. After reset the tables are swept to zero once
// (busy is high for NSYM cycles). The paper names only the histogram; the
// per-lane tables, the combined drain-and-clear sweep and clearing after
// every chunk are choices of this design.
//
// Interface: in_valid with N symbols adds them; drain_start begins a sweep
// (must not overlap counting). Timing: bin b of the sweep appears on
// bin_valid/bin_addr/bin_freq b+1 cycles after drain_start, bin_last marks
// bin NSYM-1, busy is high from drain_start until the last bin is out.
module histogram
  import ceaz_pkg::*;
#(
  parameter int unsigned N   = 32,
  parameter int unsigned CNT = FREQ_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  sym_t [N-1:0]         in_sym,
  input  logic                 drain_start,
  output logic                 busy,
  output logic                 bin_valid,
  output logic                 bin_last,
  output sym_t                 bin_addr,
  output logic [CNT-1:0]       bin_freq
);

  logic [CNT-1:0] tbl [N][NSYM];

  typedef enum logic [1:0] {H_CLEAR, H_IDLE, H_DRAIN} hstate_e;
  hstate_e       st;
  logic [SYM_W:0] ptr;

  assign busy = (st != H_IDLE);

  // sum of one bin over all lanes
  logic [CNT-1:0] bin_sum;
  always_comb begin
    bin_sum = '0;
    for (int l = 0; l < int'(N); l++) bin_sum += tbl[l][ptr[SYM_W-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= H_CLEAR;
      ptr       <= '0;
      bin_valid <= 1'b0;
      bin_last  <= 1'b0;
      bin_addr  <= '0;
      bin_freq  <= '0;
    end else begin
      bin_valid <= 1'b0;
      bin_last  <= 1'b0;
      unique case (st)
        H_CLEAR: begin
          ptr <= ptr + 1'b1;
          if (ptr == (SYM_W+1)'(NSYM - 1)) begin
            st  <= H_IDLE;
            ptr <= '0;
          end
        end
        H_IDLE: begin
          if (drain_start) begin
            st  <= H_DRAIN;
            ptr <= '0;
          end
        end
        H_DRAIN: begin
          bin_valid <= 1'b1;
          bin_addr  <= ptr[SYM_W-1:0];
          bin_freq  <= bin_sum;
          bin_last  <= (ptr == (SYM_W+1)'(NSYM - 1));
          ptr       <= ptr + 1'b1;
          if (ptr == (SYM_W+1)'(NSYM - 1)) begin
            st  <= H_IDLE;
            ptr <= '0;
          end
        end
        default: st <= H_IDLE;
      endcase
    end
  end

  // counter tables: count in H_IDLE, clear the swept bin otherwise
  for (genvar l = 0; l < int'(N); l++) begin : g_lane
    always_ff @(posedge clk) begin
      if (st != H_IDLE)
        tbl[l][ptr[SYM_W-1:0]] <= '0;
      else if (in_valid)
        tbl[l][in_sym[l]] <= tbl[l][in_sym[l]] + 1'b1;
    end
  end

  // a chunk may only be counted while no sweep is running
  assert property (@(posedge clk) in_valid |-> st == H_IDLE)
    else $error("histogram: symbols offered during a sweep");

endmodule
