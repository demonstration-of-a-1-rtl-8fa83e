// sync_fifo: single-clock first-word-fall-through FIFO with valid/ready on
// both sides (AXI4-Stream style) and a fill-level output.
//
// The transmitter buffers the payload bytes that the processing system
// streams in over AXI4-Stream DMA here, and each receive band buffers its
// decoded bytes here before the AXI4-Stream switch. Storage is a plain
// array (DEPTH words, DEPTH a power of two) read combinationally at the read
// pointer, so m_data is valid in the same cycle as m_valid. A word written
// into an empty FIFO appears on m_data one cycle later. s_ready is low only
// when the FIFO is full. Depth and width are this design's choices; the
// paper only says the data is "buffered in FIFOs".
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 4096
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       s_valid,
  output logic                       s_ready,
  input  logic [W-1:0]               s_data,
  output logic                       m_valid,
  input  logic                       m_ready,
  output logic [W-1:0]               m_data,
  output logic [$clog2(DEPTH):0]     count
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic          push, pop;

  assign s_ready = (count != (AW+1)'(DEPTH));
  assign m_valid = (count != '0);
  assign m_data  = mem[rptr];
  assign push    = s_valid && s_ready;
  assign pop     = m_valid && m_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= s_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // Nothing is popped from an empty FIFO.
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !(pop && count == '0));
endmodule
