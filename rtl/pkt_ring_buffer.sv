// pkt_ring_buffer -- store-and-forward packet ring buffer, one frame per slot.
//
// The buffer is a ring of NSLOTS slots of SLOT_BEATS 1024-bit beats. A writer fills
// the slot at the head of the ring beat by beat (in any order, with 32-bit word
// enables so a CPU can fill it word by word) and then commits it with the frame's
// beat count and the byte count of its last beat; only then does the frame become
// visible to the reader, which emits it on an AXI-Stream master at one beat per
// clock. A writer that never commits simply leaves the slot to be overwritten, which
// is how a frame is dropped. wr_ready says the head slot is free.
//
// Beat 0 of every slot lives in a register of its own (hdr_*). A second write port
// reaches it, so a framer can write the header beat in the same cycle as the last
// payload beat; writes to beat 0 through the main port land there too.
//
// Timing: a committed frame's first beat is valid two cycles after the commit; the
// read port then streams without gaps while m_ready holds. The ring buffers are
// named in the design this RTL follows; their size and this slot organisation are
// choices of this design.
module pkt_ring_buffer
  import eth400g_pkg::*;
#(
  parameter int NSLOTS     = 8,
  parameter int SLOT_BEATS = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // write side
  output logic                          wr_ready,
  input  logic                          wr_en,
  input  logic [$clog2(SLOT_BEATS)-1:0] wr_beat,
  input  logic [DATA_W-1:0]             wr_data,
  input  logic [DATA_W/32-1:0]          wr_wmask,
  input  logic                          hdr_en,
  input  logic [DATA_W-1:0]             hdr_data,
  input  logic                          commit,
  input  logic [$clog2(SLOT_BEATS):0]   commit_beats,      // 1..SLOT_BEATS
  input  logic [CNT_W-1:0]              commit_last_bytes, // 1..BYTES
  // read side
  output logic                          m_valid,
  input  logic                          m_ready,
  output axis_t                         m_axis,
  // status
  output logic [$clog2(NSLOTS):0]       used
);
  localparam int SW = $clog2(NSLOTS);
  localparam int BW = $clog2(SLOT_BEATS);

  logic [DATA_W-1:0] mem [NSLOTS*SLOT_BEATS];
  logic [DATA_W-1:0] hdr_q [NSLOTS];
  logic [BW:0]       nbeats_q [NSLOTS];
  logic [CNT_W-1:0]  lastb_q [NSLOTS];

  logic [SW-1:0] wr_slot, rd_slot;
  logic [SW:0]   count;
  logic [BW-1:0] rd_beat;

  assign wr_ready = (count != (SW+1)'(NSLOTS));
  assign used     = count;

  // ---------------- write ----------------
  always_ff @(posedge clk) begin
    if (wr_en && wr_beat != '0)
      for (int w = 0; w < DATA_W/32; w++)
        if (wr_wmask[w]) mem[{wr_slot, wr_beat}][32*w +: 32] <= wr_data[32*w +: 32];
    if (wr_en && wr_beat == '0)
      for (int w = 0; w < DATA_W/32; w++)
        if (wr_wmask[w]) hdr_q[wr_slot][32*w +: 32] <= wr_data[32*w +: 32];
    if (hdr_en) hdr_q[wr_slot] <= hdr_data;
    if (commit) begin
      nbeats_q[wr_slot] <= commit_beats;
      lastb_q[wr_slot]  <= commit_last_bytes;
    end
  end

  // ---------------- read ----------------
  // issue: read the next beat into the output register when it is empty or drained
  logic  out_valid, out_last;
  logic [CNT_W-1:0] out_lastb;
  logic [DATA_W-1:0] out_data;
  logic  have_frame, issue, issue_last;

  assign have_frame = (count != '0);
  assign issue      = have_frame && (!out_valid || m_ready);
  assign issue_last = ({1'b0, rd_beat} == nbeats_q[rd_slot] - 1'b1);

  always_ff @(posedge clk) begin
    if (issue) out_data <= (rd_beat == '0) ? hdr_q[rd_slot] : mem[{rd_slot, rd_beat}];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_slot <= '0; rd_slot <= '0; count <= '0; rd_beat <= '0;
      out_valid <= 1'b0; out_last <= 1'b0; out_lastb <= '0;
    end else begin
      if (issue) begin
        out_last  <= issue_last;
        out_lastb <= lastb_q[rd_slot];
        if (issue_last) begin
          rd_beat <= '0;
          rd_slot <= rd_slot + 1'b1;
        end else begin
          rd_beat <= rd_beat + 1'b1;
        end
      end
      if (issue) out_valid <= 1'b1;
      else if (m_ready) out_valid <= 1'b0;
      if (commit) wr_slot <= wr_slot + 1'b1;
      count <= count + (SW+1)'(commit) - (SW+1)'(issue && issue_last);
    end
  end

  assign m_valid       = out_valid;
  assign m_axis.tdata  = out_data;
  assign m_axis.tlast  = out_last;
  assign m_axis.tkeep  = out_last ? keep_of(out_lastb) : '1;

  // a frame is released only when its last beat has been read out, so the slot of
  // the frame being read is never overwritten
  assert property (@(posedge clk) disable iff (!rst_n) commit |-> wr_ready)
    else $error("pkt_ring_buffer: commit with no free slot");
  assert property (@(posedge clk) disable iff (!rst_n)
                   commit |-> (commit_beats != '0 && commit_beats <= (BW+1)'(SLOT_BEATS)))
    else $error("pkt_ring_buffer: bad commit length");
  assert property (@(posedge clk) disable iff (!rst_n) !(hdr_en && wr_en && wr_beat == '0))
    else $error("pkt_ring_buffer: two writes to beat 0");
endmodule
