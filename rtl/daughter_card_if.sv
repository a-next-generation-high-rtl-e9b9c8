// daughter_card_if -- entry point of the conditioned TTL signals into the FPGA.
//
// The signal conditioning box drives photon pulses (one line per channel), the
// TTL IRIG-B time code, the 1 or 10 MHz GPS frequency standard and the GPS 1PPS
// through the cable to the card. All of them are asynchronous to the FPGA clock.
// Each line passes a STAGES-flop synchroniser; photon, frequency-standard and 1PPS
// lines then go through a rising-edge detector that gives a one-clock pulse per
// edge. IRIG-B is passed on as a synchronised level because its decoder measures
// pulse widths.
//
// Timing: an input edge appears as a pulse STAGES+1 clocks later. The clock must
// be faster than twice the frequency standard and than the photon pulse rate
// set by the monostables of the conditioning box, so that no edge is missed.
// That the card has such an interface is stated for the instrument; the
// synchroniser and edge detector are this design's own choice.
module daughter_card_if #(
  parameter int unsigned NCH_MAX = 4,
  parameter int unsigned STAGES  = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NCH_MAX-1:0] photon_in,
  input  logic               irig_in,
  input  logic               fstd_in,
  input  logic               pps_in,
  output logic [NCH_MAX-1:0] photon_rise,
  output logic               irig_lvl,
  output logic               fstd_rise,
  output logic               pps_rise
);

  localparam int unsigned N = NCH_MAX + 3;  // photons, fstd, pps, irig

  logic [N-1:0] sync_q [STAGES];
  logic [N-1:0] last_q;
  logic [N-1:0] lvl;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < STAGES; s++) sync_q[s] <= '0;
      last_q <= '0;
    end else begin
      sync_q[0] <= {irig_in, pps_in, fstd_in, photon_in};
      for (int s = 1; s < STAGES; s++) sync_q[s] <= sync_q[s-1];
      last_q <= sync_q[STAGES-1];
    end
  end

  assign lvl = sync_q[STAGES-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      photon_rise <= '0;
      fstd_rise   <= 1'b0;
      pps_rise    <= 1'b0;
      irig_lvl    <= 1'b0;
    end else begin
      photon_rise <= lvl[NCH_MAX-1:0] & ~last_q[NCH_MAX-1:0];
      fstd_rise   <= lvl[NCH_MAX]     & ~last_q[NCH_MAX];
      pps_rise    <= lvl[NCH_MAX+1]   & ~last_q[NCH_MAX+1];
      irig_lvl    <= lvl[NCH_MAX+2];
    end
  end

endmodule
