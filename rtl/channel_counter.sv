// channel_counter -- the multi-channel photon counter.
//
// One CNT_W-bit counter per channel counts the photon edges delivered by the
// input interface while run is high. bin_end closes the bin: all counters are
// copied into the snapshot registers at once (so all channels close on the same
// clock edge) and restart from zero; a photon edge in that same clock is counted
// in the new bin. snap_valid pulses one clock after bin_end, and the snapshot
// holds until the next bin end, giving the writer a whole bin to read it.
// Counters are cleared while run is low. A 32-bit count cannot wrap within the
// longest bin (1023 us) at any realistic clock.
// That the instrument bins photon pulses of several channels at once is given;
// one counter word per channel and the same-clock rule are this design's choices.
module channel_counter #(
  parameter int unsigned NCH_MAX = 4,
  parameter int unsigned CNT_W   = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         run,
  input  logic [NCH_MAX-1:0]           photon_rise,
  input  logic                         bin_end,
  output logic [NCH_MAX-1:0][CNT_W-1:0] snap,
  output logic                         snap_valid
);

  logic [NCH_MAX-1:0][CNT_W-1:0] live;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      live       <= '0;
      snap       <= '0;
      snap_valid <= 1'b0;
    end else begin
      snap_valid <= bin_end;
      for (int c = 0; c < NCH_MAX; c++) begin
        if (!run) begin
          live[c] <= '0;
        end else if (bin_end) begin
          snap[c] <= live[c];
          live[c] <= CNT_W'(photon_rise[c]);
        end else begin
          live[c] <= live[c] + CNT_W'(photon_rise[c]);
        end
      end
    end
  end

endmodule
