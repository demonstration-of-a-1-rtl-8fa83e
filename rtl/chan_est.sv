// chan_est: channel gain estimation from the MIMO training intervals.
//
// During the first training interval only transmit antenna 1 is on, during
// the second only antenna 2. For each receive antenna r and interval t it
// correlates the symbol-spaced samples with the known +-1 training chips
// from the training LUT: H(r,t) = sum_n c(n) x_r(n). At the last symbol of
// the second interval it outputs h(r,t) = H(r,t) / TRAIN_LEN (a shift),
// i.e. the channel times the training amplitude, and the effective gain
// g_r = h(r,1) + h(r,2) seen by data sent from both antennas; gains_valid
// pulses one clock later. The sample at the timing peak is the channel's
// dominant tap, so this single-tap estimate is what normalises the MRC
// output. Training-based estimation and dominant-tap normalisation are the
// paper's; the estimator arithmetic is this design's.
//
// Note: tr_addr is the symbol index slice, passed straight to the training
// table, which answers combinationally.
module chan_est
  import mesh_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        sym_valid,
  input  cplx_t       sym [NANT],
  input  phase_e      sym_phase,
  input  logic [15:0] sym_idx,
  output logic [$clog2(TRAIN_LEN)-1:0] tr_addr,
  input  logic        tr_bit,
  output logic        gains_valid,
  output cplx_t       g [NANT],
  output cplx_t       h [NANT][NANT]   // h[r][t]
);
  localparam int LT = $clog2(TRAIN_LEN);
  localparam int AW = 16 + LT + 2;
  logic signed [AW-1:0] acc_re [NANT][NANT];
  logic signed [AW-1:0] acc_im [NANT][NANT];
  logic signed [AW-1:0] nre [NANT][NANT];
  logic signed [AW-1:0] nim [NANT][NANT];
  logic                 tsel;
  logic                 in_tr, last;

  assign tr_addr = sym_idx[LT-1:0];
  assign in_tr   = sym_valid && (sym_phase == PH_TR1 || sym_phase == PH_TR2);
  assign tsel    = (sym_phase == PH_TR2);
  assign last    = in_tr && tsel && sym_idx == 16'(TRAIN_LEN - 1);

  function automatic logic signed [SW-1:0] sat16(input logic signed [AW-1:0] v);
    if (v > AW'(32767))       return 16'sh7FFF;
    else if (v < -AW'(32768)) return 16'sh8000;
    else                      return v[SW-1:0];
  endfunction

  // accumulator values after this symbol
  always_comb begin
    for (int r = 0; r < NANT; r++)
      for (int t = 0; t < NANT; t++) begin
        nre[r][t] = acc_re[r][t];
        nim[r][t] = acc_im[r][t];
        if (in_tr && 32'(tsel) == t) begin
          if (sym_idx == 0) begin
            nre[r][t] = '0;
            nim[r][t] = '0;
          end
          nre[r][t] = tr_bit ? nre[r][t] + AW'(sym[r].re) : nre[r][t] - AW'(sym[r].re);
          nim[r][t] = tr_bit ? nim[r][t] + AW'(sym[r].im) : nim[r][t] - AW'(sym[r].im);
        end
      end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      acc_re <= '{default: '0};
      acc_im <= '{default: '0};
      gains_valid <= 1'b0;
      g <= '{default: '0};
      h <= '{default: '0};
    end else begin
      gains_valid <= 1'b0;
      acc_re <= nre;
      acc_im <= nim;
      if (last) begin
        gains_valid <= 1'b1;
        for (int r = 0; r < NANT; r++) begin
          for (int t = 0; t < NANT; t++)
            h[r][t] <= '{sat16(nre[r][t] >>> LT), sat16(nim[r][t] >>> LT)};
          g[r] <= '{sat16((nre[r][0] + nre[r][1]) >>> LT), sat16((nim[r][0] + nim[r][1]) >>> LT)};
        end
      end
    end
  end
endmodule
