// seq_divider: unsigned restoring divider, one quotient bit per clock.
//
// start loads num and den; WN clocks later done pulses with
// quot = floor(num / den), saturated to all ones when den is zero.
// busy is high in between. Used for the once-per-frame reciprocal of the
// MRC and for the EVM ratio.
//
// Note: the top bit of the partial remainder only decides the subtraction
// and is never stored.
module seq_divider #(
  parameter int WN = 48,
  parameter int WD = 34
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic [WN-1:0] num,
  input  logic [WD-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [WN-1:0] quot
);
  logic [WN-1:0]   q;
  logic [WD:0]     rem;
  logic [WD-1:0]   d;
  logic [$clog2(WN+1)-1:0] cnt;
  logic [WD:0]     trial;

  assign trial = {rem[WD-1:0], q[WN-1]};

  always_ff @(posedge clk) begin
    if (rst) begin
      q <= '0; rem <= '0; d <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0; quot <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        q    <= num;
        rem  <= '0;
        d    <= den;
        cnt  <= ($clog2(WN+1))'(WN);
        busy <= 1'b1;
      end else if (busy) begin
        // shift the next numerator bit into the remainder, subtract if it fits
        if (trial >= {1'b0, d}) begin
          rem <= trial - {1'b0, d};
          q   <= {q[WN-2:0], 1'b1};
        end else begin
          rem <= trial;
          q   <= {q[WN-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          if (d == '0) quot <= '1;
          else quot <= (trial >= {1'b0, d}) ? {q[WN-2:0], 1'b1} : {q[WN-2:0], 1'b0};
        end
      end
    end
  end
endmodule
