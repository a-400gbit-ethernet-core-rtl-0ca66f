// arp_cache -- table from destination IP address to destination MAC address.
//
// The TX framer takes the destination MAC of every frame from this table; the CPU
// fills it over the control bus (after running ARP in software). It holds ENTRIES
// 48-bit MAC addresses indexed by the low byte of the IPv4 address, so one /24
// subnet can be reached. The CPU writes either 32-bit half of an entry (hi=0: MAC
// bits [31:0], hi=1: bits [47:32]) and reads it back through port A; the framer
// looks up through port B. Both read ports are registered: data appear one cycle
// after the index. The cache itself is named by the design this RTL follows; its
// size, the indexing by the low IP byte and the port layout are choices made here.
module arp_cache #(
  parameter int ENTRIES = 256
) (
  input  logic                       clk,
  // CPU side
  input  logic                       wr_en,
  input  logic [$clog2(ENTRIES)-1:0] wr_idx,
  input  logic                       wr_hi,
  input  logic [31:0]                wr_data,
  input  logic [$clog2(ENTRIES)-1:0] rd_idx_a,
  output logic [47:0]                rd_mac_a,
  // framer side
  input  logic [$clog2(ENTRIES)-1:0] rd_idx_b,
  output logic [47:0]                rd_mac_b
);
  logic [31:0] lo_mem [ENTRIES];
  logic [15:0] hi_mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (wr_en && !wr_hi) lo_mem[wr_idx] <= wr_data;
    if (wr_en &&  wr_hi) hi_mem[wr_idx] <= wr_data[15:0];
    rd_mac_a <= {hi_mem[rd_idx_a], lo_mem[rd_idx_a]};
    rd_mac_b <= {hi_mem[rd_idx_b], lo_mem[rd_idx_b]};
  end
endmodule
