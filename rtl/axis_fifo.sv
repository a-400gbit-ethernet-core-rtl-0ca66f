// axis_fifo -- synchronous first-in first-out queue of AXI-Stream beats.
//
// DEPTH entries (a power of two). s_ready is high while an entry is free; m_valid
// while one is held. A beat written in one cycle can be read the next. Data are read
// from the storage array combinationally, so the array maps to distributed RAM.
module axis_fifo
  import eth400g_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   s_valid,
  output logic                   s_ready,
  input  axis_t                  s_axis,
  output logic                   m_valid,
  input  logic                   m_ready,
  output axis_t                  m_axis,
  output logic [$clog2(DEPTH):0] level
);
  localparam int AW = $clog2(DEPTH);
  axis_t mem [DEPTH];
  logic [AW:0] wp, rp;

  assign level   = wp - rp;
  assign s_ready = (level != (AW+1)'(DEPTH));
  assign m_valid = (wp != rp);
  assign m_axis  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) if (s_valid && s_ready) mem[wp[AW-1:0]] <= s_axis;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0;
    end else begin
      if (s_valid && s_ready) wp <= wp + 1'b1;
      if (m_valid && m_ready) rp <= rp + 1'b1;
    end
  end
endmodule
