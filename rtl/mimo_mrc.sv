// mimo_mrc: maximum-ratio combining of the two receive antennas.
//
// With the effective gains g_r from channel estimation (g_r = A h_r, A the
// training amplitude 3 QS), each symbol is combined as
//   z = (sum_r conj(g_r) x_r) * inv >> 30,  inv = floor(A 2^30 / sum_r |g_r|^2),
// which co-phases the antennas, weights them by their gain and normalises
// the result back to the transmitted constellation scale (a +3 level comes
// out as 3 QS). inv is computed once per frame by a 48-cycle sequential
// divider started by gains_valid; until it is ready (about six symbols into
// the pilots) no symbols are passed on, and a new frame (first training
// symbol) clears it. inv saturates at 2^25 - 1 (channels weaker than about
// 0.1 of nominal). MRC is the paper's; the normalisation arithmetic is this
// design's. Output registered, one clock after sym_valid.
module mimo_mrc
  import mesh_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        gains_valid,
  input  cplx_t       g [NANT],
  input  logic        sym_valid,
  input  cplx_t       sym [NANT],
  input  phase_e      sym_phase,
  input  logic [15:0] sym_idx,
  output logic        out_valid,
  output cplx_t       z,
  output phase_e      out_phase,
  output logic [15:0] out_idx,
  output logic        ready
);
  localparam int  FR  = 30;
  localparam longint AMP = 3 * QS;

  logic [33:0] pwr;
  logic        dbusy, ddone;
  logic [47:0] dq;
  logic [24:0] inv;
  logic signed [35:0] n_re, n_im;

  always_comb begin
    pwr = '0;
    for (int r = 0; r < NANT; r++)
      pwr += 34'($signed(g[r].re) * $signed(g[r].re)) + 34'($signed(g[r].im) * $signed(g[r].im));
  end

  seq_divider #(.WN(48), .WD(34)) u_div (
    .clk, .rst, .start(gains_valid), .num(48'(AMP << FR)), .den(pwr),
    .busy(dbusy), .done(ddone), .quot(dq)
  );

  always_comb begin
    n_re = '0;
    n_im = '0;
    for (int r = 0; r < NANT; r++) begin
      n_re += 36'($signed(g[r].re) * $signed(sym[r].re)) + 36'($signed(g[r].im) * $signed(sym[r].im));
      n_im += 36'($signed(g[r].re) * $signed(sym[r].im)) - 36'($signed(g[r].im) * $signed(sym[r].re));
    end
  end

  function automatic logic signed [SW-1:0] scale(input logic signed [35:0] n, input logic [24:0] k);
    logic signed [63:0] p;
    p = (64'(n) * $signed({39'd0, k}) + (64'sd1 <<< (FR - 1))) >>> FR;
    if (p > 64'sd32767)       return 16'sh7FFF;
    else if (p < -64'sd32768) return 16'sh8000;
    else                      return p[SW-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      ready <= 1'b0; inv <= '0; out_valid <= 1'b0; z <= '0;
      out_phase <= PH_IDLE; out_idx <= '0;
    end else begin
      out_valid <= 1'b0;
      if (ddone) begin
        inv   <= (dq > 48'h1FFFFFF) ? 25'h1FFFFFF : dq[24:0];
        ready <= 1'b1;
      end
      if (sym_valid && sym_phase == PH_TR1 && sym_idx == 0) ready <= 1'b0;
      if (sym_valid && ready && !dbusy && (sym_phase == PH_PIL || sym_phase == PH_PAY)) begin
        out_valid <= 1'b1;
        z         <= '{scale(n_re, inv), scale(n_im, inv)};
        out_phase <= sym_phase;
        out_idx   <= sym_idx;
      end
    end
  end
endmodule
