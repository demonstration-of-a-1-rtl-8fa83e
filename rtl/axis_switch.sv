// axis_switch: AXI4-Stream packet switch from the receive bands to the DMA.
//
// N byte streams (one per received node/band) share one AXI4-Stream output
// to the processing system's DMA. Arbitration is round-robin and packet
// based: once a stream is granted it keeps the output until its tlast beat
// is accepted, so frames are never interleaved. m_tid carries the number
// of the band the packet came from, so software can tell the received
// nodes apart. The paper uses AXI4-Stream data switching to separate the
// UAV streams; round-robin packet arbitration is this design's choice.
// A grant takes effect one clock after the previous packet ends; the data
// path itself is combinational (tvalid/tready/tdata pass straight through).
module axis_switch #(
  parameter int N = 3,
  parameter int W = 8
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [N-1:0]         s_tvalid,
  output logic [N-1:0]         s_tready,
  input  logic [W-1:0]         s_tdata [N],
  input  logic [N-1:0]         s_tlast,
  output logic                 m_tvalid,
  input  logic                 m_tready,
  output logic [W-1:0]         m_tdata,
  output logic                 m_tlast,
  output logic [$clog2(N)-1:0] m_tid
);
  localparam int IW = $clog2(N);
  logic          locked;
  logic [IW-1:0] sel, nxt;
  logic          found;

  // next requester after sel, round robin
  always_comb begin
    nxt   = sel;
    found = 1'b0;
    for (int i = 1; i <= N; i++) begin
      logic [IW-1:0] c;
      c = IW'((int'(sel) + i) % N);
      if (!found && s_tvalid[c]) begin
        nxt   = IW'(c);
        found = 1'b1;
      end
    end
  end

  always_comb begin
    s_tready = '0;
    m_tvalid = locked && s_tvalid[sel];
    m_tdata  = s_tdata[sel];
    m_tlast  = s_tlast[sel];
    m_tid    = sel;
    if (locked) s_tready[sel] = m_tready;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      locked <= 1'b0;
      sel    <= IW'(N - 1);
    end else if (!locked) begin
      if (found) begin
        sel    <= nxt;
        locked <= 1'b1;
      end
    end else if (m_tvalid && m_tready && m_tlast) begin
      locked <= 1'b0;
    end
  end

  // a granted packet is not taken away before its last beat
  a_hold: assert property (@(posedge clk) disable iff (rst)
    (m_tvalid && !m_tready) |=> (m_tvalid && $stable(m_tdata) && $stable(m_tid)));
endmodule
