// scb_model -- behavioural model (not synthesizable) of the signal conditioning
// box that sits between the instruments and the card.
//
// Each analog input goes through a comparator and then a non-retriggerable
// monostable, which gives a fixed-width TTL pulse on each comparator rising
// edge and ignores further edges while the pulse lasts. The reference levels
// are those of the instrument: -0.35 V for the negative-going (0 to -0.7 V)
// photon-counter outputs, so a pulse below -0.35 V fires, +1.5 V for the
// amplitude-modulated IRIG-B carrier (peaks of 2.5 V in the high part, 0.75 V in
// the low part), and 0 V for the 1 or 10 MHz frequency standard. The 1PPS is
// already a logic signal and is only buffered. The monostable widths are not
// known and are parameters here (in ns).
module scb_model #(
  parameter int unsigned NCH         = 4,
  parameter realtime     PHOT_MONO   = 20ns,
  parameter realtime     IRIG_MONO   = 1200ns,
  parameter realtime     FSTD_MONO   = 20ns
) (
  input  real          sr400_v [NCH],
  input  real          irig_v,
  input  real          fstd_v,
  input  logic         pps_cmos,
  output logic [NCH-1:0] photon_ttl,
  output logic         irig_ttl,
  output logic         fstd_ttl,
  output logic         pps_ttl
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [NCH-1:0] cmp_ph;
  logic           cmp_irig, cmp_fs;

  always_comb begin
    for (int c = 0; c < NCH; c++) cmp_ph[c] = (sr400_v[c] < -0.35);
    cmp_irig = (irig_v > 1.5);
    cmp_fs   = (fstd_v > 0.0);
  end

  assign pps_ttl = pps_cmos;

  initial begin
    photon_ttl = '0;
    irig_ttl   = 1'b0;
    fstd_ttl   = 1'b0;
  end

  for (genvar c = 0; c < NCH; c++) begin : g_ph
    always @(posedge cmp_ph[c]) begin
      if (!photon_ttl[c]) begin
        photon_ttl[c] = 1'b1;
        #(PHOT_MONO) photon_ttl[c] = 1'b0;
      end
    end
  end

  always @(posedge cmp_irig) begin
    if (!irig_ttl) begin
      irig_ttl = 1'b1;
      #(IRIG_MONO) irig_ttl = 1'b0;
    end
  end

  always @(posedge cmp_fs) begin
    if (!fstd_ttl) begin
      fstd_ttl = 1'b1;
      #(FSTD_MONO) fstd_ttl = 1'b0;
    end
  end
endmodule
