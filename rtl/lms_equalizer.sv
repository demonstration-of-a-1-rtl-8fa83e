// lms_equalizer: adaptive symbol-spaced equalizer after MRC.
//
// A NT-tap complex FIR on the symbol-spaced MRC output,
//   y(n) = sum_k w_k z(n-k) >> 14   (w in Q2.14, centre tap starts at 1.0),
// adapted by least mean squares, w_k += e(n) conj(z(n-k)) >> MU_SHIFT, with
// e = d - y. During the pilots d is the known pilot (QPSK from the training
// LUT); during data it is the nearest 16-QAM point of y (decision directed).
// The output for a symbol leaves CENTER = NT/2 symbols after the symbol
// entered (the centre tap is the reference), with its frame section and
// index. sync (new frame) resets the taps and the delay line. adapt = 0
// freezes the taps. The paper applies adaptive symbol-spaced equalization
// after MRC; tap count, step size and pilot training are this design's.
// Registered output, one clock after in_valid.
//
// Note: the two training-table addresses differ only in their last bit,
// which is constant 0 for tr_addr_a and 1 for tr_addr_b (a pilot is a bit
// pair).
module lms_equalizer
  import mesh_pkg::*;
#(
  parameter int NT       = 5,
  parameter int MU_SHIFT = 18
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        sync,
  input  logic        adapt,
  input  logic        in_valid,
  input  cplx_t       z,
  input  phase_e      in_phase,
  input  logic [15:0] in_idx,
  output logic [$clog2(TRAIN_LEN)-1:0] tr_addr_a,
  output logic [$clog2(TRAIN_LEN)-1:0] tr_addr_b,
  input  logic        tr_bit_a,
  input  logic        tr_bit_b,
  output logic        out_valid,
  output cplx_t       y,
  output phase_e      out_phase,
  output logic [15:0] out_idx,
  output cplx_t       err
);
  localparam int CENTER = NT / 2;
  localparam int WW = 20;                // tap width, Q.14
  localparam int PW = 40;
  localparam logic signed [SW-1:0] P3 = SW'(3 * QS);
  localparam logic signed [SW-1:0] M3 = SW'(-3 * QS);

  logic signed [WW-1:0] w_re [NT];
  logic signed [WW-1:0] w_im [NT];
  cplx_t       zl [NT];        // zl[0] = newest
  cplx_t       dl [NT-1];
  phase_e      tp [NT];
  logic [15:0] ti [NT];
  phase_e      tph [NT-1];
  logic [15:0] tix [NT-1];
  logic [NT-1:0] vl;
  logic [NT-2:0] vq;
  logic signed [PW-1:0] acc_re, acc_im;
  cplx_t       yc, dref, e;

  function automatic logic signed [SW-1:0] sat(input logic signed [PW-1:0] v);
    if (v > PW'(32767))       return 16'sh7FFF;
    else if (v < -PW'(32768)) return 16'sh8000;
    else                      return v[SW-1:0];
  endfunction

  always_comb begin
    zl[0] = z;
    tp[0] = in_phase;
    ti[0] = in_idx;
    vl[0] = 1'b1;
    for (int k = 1; k < NT; k++) begin
      zl[k] = dl[k-1];
      tp[k] = tph[k-1];
      ti[k] = tix[k-1];
      vl[k] = vq[k-1];
    end
    acc_re = '0;
    acc_im = '0;
    for (int k = 0; k < NT; k++) begin
      acc_re += PW'(w_re[k]) * PW'(zl[k].re) - PW'(w_im[k]) * PW'(zl[k].im);
      acc_im += PW'(w_re[k]) * PW'(zl[k].im) + PW'(w_im[k]) * PW'(zl[k].re);
    end
    yc = '{sat(acc_re >>> 14), sat(acc_im >>> 14)};
  end

  // pilot address of the symbol at the centre tap
  assign tr_addr_a = ($clog2(TRAIN_LEN))'({ti[CENTER], 1'b0});
  assign tr_addr_b = ($clog2(TRAIN_LEN))'({ti[CENTER], 1'b1});

  always_comb begin
    if (tp[CENTER] == PH_PIL)
      dref = '{tr_bit_a ? P3 : M3, tr_bit_b ? P3 : M3};
    else
      dref = '{gray_level(gray_slice(yc.re)), gray_level(gray_slice(yc.im))};
    e = '{SW'(dref.re - yc.re), SW'(dref.im - yc.im)};
  end

  always_ff @(posedge clk) begin
    if (rst || sync) begin
      for (int k = 0; k < NT; k++) begin
        w_re[k] <= (k == CENTER) ? WW'(16384) : '0;
        w_im[k] <= '0;
      end
      dl <= '{default: '0};
      tph <= '{default: PH_IDLE};
      tix <= '{default: '0};
      vq <= '0;
      out_valid <= 1'b0;
      if (rst) begin
        y <= '0; err <= '0; out_phase <= PH_IDLE; out_idx <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        for (int k = 1; k < NT; k++) begin
          dl[k-1]  <= zl[k-1];
          tph[k-1] <= tp[k-1];
          tix[k-1] <= ti[k-1];
          vq[k-1]  <= vl[k-1];
        end
        if (vl[CENTER]) begin
          out_valid <= 1'b1;
          y         <= yc;
          err       <= e;
          out_phase <= tp[CENTER];
          out_idx   <= ti[CENTER];
          if (adapt)
            for (int k = 0; k < NT; k++) begin
              w_re[k] <= w_re[k] + WW'((PW'(e.re) * PW'(zl[k].re) + PW'(e.im) * PW'(zl[k].im)) >>> MU_SHIFT);
              w_im[k] <= w_im[k] + WW'((PW'(e.im) * PW'(zl[k].re) - PW'(e.re) * PW'(zl[k].im)) >>> MU_SHIFT);
            end
        end
      end
    end
  end
endmodule
