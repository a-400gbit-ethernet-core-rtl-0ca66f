// dcmac_loopback_model -- behavioural stand-in for the hard MAC/PHY, for simulation
// only: it loops the transmit stream back to the receive stream after LAT cycles,
// as a link to itself would. hold forces tx_ready low (the MAC not taking data);
// corrupt makes the next frame that is sent arrive with rx_err on its last beat, as
// a frame with a bad FCS would. It models neither line coding nor timing of the link.
module dcmac_loopback_model
  import eth400g_pkg::*;
#(
  parameter int LAT = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  hold,
  input  logic  corrupt,
  input  logic  tx_valid,
  output logic  tx_ready,
  input  axis_t tx_axis,
  output logic  rx_valid,
  output axis_t rx_axis,
  output logic  rx_err
);
  logic  v_pipe [LAT];
  axis_t d_pipe [LAT];
  logic  e_pipe [LAT];
  logic  bad_frame, bad_pending;

  assign tx_ready = !hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin v_pipe[i] <= 1'b0; d_pipe[i] <= '0; e_pipe[i] <= 1'b0; end
      bad_frame <= 1'b0; bad_pending <= 1'b0;
    end else begin
      if (corrupt) bad_pending <= 1'b1;
      v_pipe[0] <= tx_valid && tx_ready;
      d_pipe[0] <= tx_axis;
      e_pipe[0] <= tx_valid && tx_ready && tx_axis.tlast && (bad_frame || bad_pending);
      if (tx_valid && tx_ready) begin
        if (tx_axis.tlast) begin bad_frame <= 1'b0; if (bad_pending) bad_pending <= 1'b0; end
        else if (bad_pending) begin bad_frame <= 1'b1; bad_pending <= 1'b0; end
      end
      for (int i = 1; i < LAT; i++) begin
        v_pipe[i] <= v_pipe[i-1]; d_pipe[i] <= d_pipe[i-1]; e_pipe[i] <= e_pipe[i-1];
      end
    end
  end
  assign rx_valid = v_pipe[LAT-1];
  assign rx_axis  = d_pipe[LAT-1];
  assign rx_err   = e_pipe[LAT-1];
endmodule
