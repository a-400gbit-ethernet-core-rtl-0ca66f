// rx_ring_buffer -- receive-side ring buffer: frames from the MAC are stored whole
// before the RX filter looks at them.
//
// The MAC's receive stream has no back-pressure, so this block never stalls it.
// Beats are written in arrival order into the head slot of a pkt_ring_buffer; the
// frame is committed on its last beat. A frame is dropped instead when no slot was
// free at its first beat (overflow), when it is longer than a slot (oversize) or
// when the MAC flags it bad on its last beat (rx_err, e.g. an FCS error). One pulse
// per received frame on frame_in, and one on each kind of drop, feed the statistics
// counters. Storing received frames in a ring buffer and filtering them afterwards
// follows the design this RTL follows; the drop rules are choices of this design.
module rx_ring_buffer
  import eth400g_pkg::*;
#(
  parameter int NSLOTS     = 8,
  parameter int SLOT_BEATS = 128
) (
  input  logic  clk,
  input  logic  rst_n,
  // from the MAC
  input  logic  s_valid,
  input  axis_t s_axis,
  input  logic  s_err,
  // to the RX filter
  output logic  m_valid,
  input  logic  m_ready,
  output axis_t m_axis,
  // events
  output logic  frame_in,
  output logic  drop_overflow,
  output logic  drop_error
);
  localparam int BW = $clog2(SLOT_BEATS);

  logic          in_frame, dropping, oversize;
  logic [BW-1:0] beat;
  logic          wr_ready;

  wire first = s_valid && !in_frame;
  // a frame is dropped as a whole if there was no slot when it began
  wire drop_now = first ? !wr_ready : dropping;
  // beats past the end of a slot: the frame is longer than SLOT_BEATS
  wire too_long = oversize && !first;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_frame <= 1'b0; dropping <= 1'b0; oversize <= 1'b0; beat <= '0;
    end else if (s_valid) begin
      if (s_axis.tlast) begin
        in_frame <= 1'b0; dropping <= 1'b0; oversize <= 1'b0; beat <= '0;
      end else begin
        in_frame <= 1'b1;
        dropping <= drop_now;
        oversize <= too_long || (!first && beat == '1);
        beat     <= first ? BW'(1) : (beat == '1 ? beat : beat + 1'b1);
      end
    end
  end

  wire [BW-1:0] wbeat = first ? '0 : beat;
  wire do_write  = s_valid && !drop_now && !too_long;
  wire do_commit = s_valid && s_axis.tlast && !drop_now && !too_long && !s_err;

  pkt_ring_buffer #(.NSLOTS(NSLOTS), .SLOT_BEATS(SLOT_BEATS)) u_ring (
    .clk, .rst_n,
    .wr_ready,
    .wr_en            (do_write),
    .wr_beat          (wbeat),
    .wr_data          (s_axis.tdata),
    .wr_wmask         ('1),
    .hdr_en           (1'b0),
    .hdr_data         ('0),
    .commit           (do_commit),
    .commit_beats     ({1'b0, wbeat} + 1'b1),
    .commit_last_bytes(count_of(s_axis.tkeep)),
    .m_valid, .m_ready, .m_axis,
    .used             ()
  );

  assign frame_in      = s_valid && s_axis.tlast;
  assign drop_overflow = s_valid && s_axis.tlast && drop_now;
  assign drop_error    = s_valid && s_axis.tlast && !drop_now && (too_long || s_err);
endmodule
