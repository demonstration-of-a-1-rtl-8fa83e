// evm_meter: per-frame error vector magnitude.
//
// While gate is high it accumulates the error energy sum |y - d|^2 and the
// reference energy sum |d|^2 of the frame's data symbols. At frame_end it
// divides them with a sequential divider and reports
//   evm2 = floor(2^16 sum|y-d|^2 / sum|d|^2)   (EVM squared, Q16; EVM in % is
//   100 sqrt(evm2 / 65536)),
// pulsing evm_valid when done (about 50 clocks later), and restarts the
// sums. EVM from gated measurements is the paper's; the Q16 squared form is
// this design's (the square root is left to software).
module evm_meter
  import mesh_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        valid,
  input  logic        gate,
  input  logic        frame_end,
  input  cplx_t       y,
  input  cplx_t       d,
  output logic [31:0] evm2,
  output logic        evm_valid,
  output logic        busy        // division in progress
);
  logic [47:0] se, sd;
  logic [31:0] pe, pd;
  logic signed [SW:0] er, ei;
  logic        ddone;
  logic [63:0] q;

  assign er = (SW+1)'(y.re) - (SW+1)'(d.re);
  assign ei = (SW+1)'(y.im) - (SW+1)'(d.im);
  assign pe = 32'(er * er) + 32'(ei * ei);
  assign pd = 32'($signed(d.re) * $signed(d.re)) + 32'($signed(d.im) * $signed(d.im));

  seq_divider #(.WN(64), .WD(48)) u_div (
    .clk, .rst, .start(frame_end), .num({se, 16'd0}), .den(sd),
    .busy(busy), .done(ddone), .quot(q)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      se <= '0; sd <= '0; evm2 <= '0; evm_valid <= 1'b0;
    end else begin
      evm_valid <= 1'b0;
      if (frame_end) begin
        se <= '0;
        sd <= '0;
      end else if (valid && gate) begin
        se <= se + 48'(pe);
        sd <= sd + 48'(pd);
      end
      if (ddone) begin
        evm2      <= (q > 64'hFFFFFFFF) ? 32'hFFFFFFFF : q[31:0];
        evm_valid <= 1'b1;
      end
    end
  end
endmodule
