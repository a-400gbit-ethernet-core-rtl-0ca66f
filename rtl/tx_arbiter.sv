// tx_arbiter -- chooses, frame by frame, whether the streaming path or the CPU path
// sends next, and queues the chosen frames in a FIFO in front of the MAC.
//
// Both inputs deliver whole frames from their TX ring buffers. When no frame is in
// progress the arbiter grants the input that has data, alternating between the two
// when both have (round robin), and keeps the grant until that frame's tlast has
// entered the FIFO, so frames are never interleaved. The FIFO decouples the MAC's
// ready from the ring buffers. Throughput is one beat per clock. An arbitration
// module with a FIFO towards the MAC follows the design this RTL follows; the
// round-robin policy and the FIFO depth are choices of this design.
module tx_arbiter
  import eth400g_pkg::*;
#(
  parameter int FIFO_DEPTH = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  // input 0: streaming data path
  input  logic  s0_valid,
  output logic  s0_ready,
  input  axis_t s0_axis,
  // input 1: CPU data path
  input  logic  s1_valid,
  output logic  s1_ready,
  input  axis_t s1_axis,
  // to the MAC
  output logic  m_valid,
  input  logic  m_ready,
  output axis_t m_axis,
  output logic  frame_out
);
  logic busy, grant, last_grant;   // grant: 0 = streaming, 1 = CPU
  logic f_ready;

  // grant chosen at a frame boundary
  logic pick;
  always_comb begin
    if (s0_valid && s1_valid) pick = !last_grant;
    else                      pick = s1_valid;
  end
  wire sel = busy ? grant : pick;

  wire   f_valid = sel ? s1_valid : s0_valid;
  axis_t f_axis;
  assign f_axis   = sel ? s1_axis : s0_axis;
  assign s0_ready = f_ready && !sel;
  assign s1_ready = f_ready &&  sel;
  wire   f_take   = f_valid && f_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; grant <= 1'b0; last_grant <= 1'b1;
    end else if (f_take) begin
      busy       <= !f_axis.tlast;
      grant      <= sel;
      last_grant <= sel;
    end
  end

  axis_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .s_valid(f_valid), .s_ready(f_ready), .s_axis(f_axis),
    .m_valid, .m_ready, .m_axis, .level()
  );

  assign frame_out = m_valid && m_ready && m_axis.tlast;

  assert property (@(posedge clk) disable iff (!rst_n) !(s0_ready && s1_ready))
    else $error("tx_arbiter: both inputs granted");
endmodule
