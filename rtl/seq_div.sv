// seq_div: unsigned restoring divider, one quotient bit per cycle.
//
// A start pulse latches num and den; NW cycles later done pulses and quo
// holds floor(num/den) (all ones when den is 0). Helper of the STD unit and
// of the error-bound adjuster; the paper does not describe it.
module seq_div #(
  parameter int unsigned NW = 64,   // numerator / quotient width
  parameter int unsigned DW = 32    // denominator width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quo
);
  localparam int unsigned CW = $clog2(NW + 1);

  logic [DW-1:0] rem;     // always below d_r, so DW bits hold it
  logic [NW-1:0] n_sh;
  logic [DW-1:0] d_r;
  logic [CW-1:0] cnt;
  logic [DW:0]   trial;

  assign trial = {rem[DW-1:0], n_sh[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      rem  <= '0;
      n_sh <= '0;
      d_r  <= '0;
      cnt  <= '0;
      quo  <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        rem  <= '0;
        n_sh <= num;
        d_r  <= den;
        cnt  <= CW'(NW);
        quo  <= '0;
      end else if (busy) begin
        n_sh <= n_sh << 1;
        if (trial >= {1'b0, d_r}) begin
          rem <= DW'(trial - {1'b0, d_r});
          quo <= {quo[NW-2:0], 1'b1};
        end else begin
          rem <= trial[DW-1:0];
          quo <= {quo[NW-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
