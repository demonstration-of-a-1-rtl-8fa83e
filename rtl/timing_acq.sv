// timing_acq: symbol timing acquisition and receive frame sequencing.
//
// Works on the correlator's 4-samples-per-symbol stream (OSR = 4). It keeps
// T(m) = metric(m) + metric(m-1) + metric(m-2), a 3-sample moving sum of the
// correlation metric. On the first detector flag it watches T for SEARCH
// more samples and takes the sample where T is largest; the correlation
// peak, i.e. the last preamble chip, is the middle of that 3-sample window.
// From then on one sample in OSR, starting OSR samples after the peak, is a
// symbol-spaced sample: the samples themselves are taken from a DLY-sample
// delay line so that the symbols that arrived during the search are not
// lost. Each emitted symbol carries its frame section and index: TRAIN_LEN
// symbols of training on antenna 1, TRAIN_LEN on antenna 2, PILOT_LEN
// pilots, then data symbols (index from 0) until frame_done from the
// deframer or MAX_SYMS data symbols. Then it re-arms on the next flag.
// Timing acquisition with a moving-average timing metric is the paper's;
// the window lengths and the absence of tracking after acquisition are this
// design's choices.
module timing_acq
  import mesh_pkg::*;
#(
  parameter int OSR      = 4,
  parameter int MW       = 30,
  parameter int SEARCH   = 10,
  parameter int DLY      = 16,
  parameter int MAX_SYMS = 16384
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          valid,
  input  logic [MW-1:0] metric,
  input  logic          flag,
  input  cplx_t         din [NANT],
  input  logic          frame_done,
  output logic          sym_valid,
  output cplx_t         sym [NANT],
  output phase_e        sym_phase,
  output logic [15:0]   sym_idx,
  output logic          sync,       // pulse: a frame was acquired
  output logic          busy
);
  typedef enum logic [1:0] {S_IDLE, S_SEARCH, S_TRACK} st_e;
  st_e st;

  logic [15:0]   m;           // index of the sample at din
  logic [MW+1:0] t_cur, best;
  logic [MW-1:0] m1, m2;
  logic [15:0]   best_m, next_m;
  logic [$clog2(SEARCH+1)-1:0] scnt;
  cplx_t         dl [DLY][NANT];
  logic [$clog2(DLY)-1:0] dptr;
  phase_e        ph;
  logic [15:0]   cnt;

  assign t_cur = (MW+2)'(metric) + (MW+2)'(m1) + (MW+2)'(m2);
  assign busy  = (st != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_IDLE; m <= '0; m1 <= '0; m2 <= '0; best <= '0; best_m <= '0;
      next_m <= '0; scnt <= '0; dptr <= '0; ph <= PH_TR1; cnt <= '0;
      sym_valid <= 1'b0; sym_phase <= PH_IDLE; sym_idx <= '0; sync <= 1'b0;
      sym <= '{default: '0};
      dl  <= '{default: '0};
    end else begin
      sym_valid <= 1'b0;
      sync      <= 1'b0;
      if (valid) begin
        m    <= m + 1'b1;
        m2   <= m1;
        m1   <= metric;
        dl[dptr] <= din;
        dptr <= (dptr == ($clog2(DLY))'(DLY - 1)) ? '0 : dptr + 1'b1;
        case (st)
          S_IDLE: if (flag) begin
            st     <= S_SEARCH;
            scnt   <= ($clog2(SEARCH+1))'(SEARCH);
            best   <= t_cur;
            best_m <= m;
          end
          S_SEARCH: begin
            if (t_cur > best) begin
              best   <= t_cur;
              best_m <= m;
            end
            if (scnt == 1) begin
              st     <= S_TRACK;
              // peak = centre of the best 3-sample window = best_m - 1;
              // first training symbol one symbol (OSR samples) later
              next_m <= ((t_cur > best) ? m : best_m) - 16'd1 + 16'(OSR);
              ph     <= PH_TR1;
              cnt    <= '0;
              sync   <= 1'b1;
            end
            scnt <= scnt - 1'b1;
          end
          default: begin // S_TRACK
            // dl[dptr] holds the sample with index m - DLY
            if (m - 16'(DLY) == next_m) begin
              next_m    <= next_m + 16'(OSR);
              sym_valid <= 1'b1;
              sym       <= dl[dptr];
              sym_phase <= ph;
              sym_idx   <= cnt;
              cnt       <= cnt + 1'b1;
              case (ph)
                PH_TR1: if (cnt == 16'(TRAIN_LEN - 1)) begin ph <= PH_TR2; cnt <= '0; end
                PH_TR2: if (cnt == 16'(TRAIN_LEN - 1)) begin ph <= PH_PIL; cnt <= '0; end
                PH_PIL: if (cnt == 16'(PILOT_LEN - 1)) begin ph <= PH_PAY; cnt <= '0; end
                default: if (cnt == 16'(MAX_SYMS - 1)) st <= S_IDLE;
              endcase
            end
          end
        endcase
      end
      if (frame_done && st == S_TRACK) st <= S_IDLE;
    end
  end
endmodule
