// chisdas_top -- FPGA logic of a GPS-timed multi-channel photon-counting card.
//
// The card records photon pulses from up to four photometer channels in time
// bins of 1..1023 us that start exactly on a chosen UT second. Time comes from a
// GPS receiver in three forms: the IRIG-B time code (which second it is), the
// 1PPS pulse (when the second starts) and a 1 or 10 MHz frequency standard (the
// clock that times the bins). Data go into the card's SRAM as records of a
// 5-DWORD housekeeping header plus 8192 bins, and from there by bus-master
// transfer into PC memory through the FIFOs of the card's PCI interface chip.
//
// Data flow:
//   daughter_card_if  synchronises the TTL inputs, gives edge pulses
//   irigb_decoder     IRIG-B -> UT second of the next 1PPS
//   pci_addon_if      instruction words in, data words out
//   obs_control       IDLE/ARMED/RUN; starts on the 1PPS of the start second
//   obs_timer         us tick, bins, records, 40-bit master counter
//   channel_counter   per-channel photon counts per bin
//   record_writer     header + bin words
//   sram_buffer       SRAM ring of transfer-sized regions, stream to PCI
// A new (non-stop) instruction clears the SRAM ring and the error flags.
//
// Ports: all inputs except clk/rst_n are asynchronous TTL lines or the two
// FIFOs of the PCI chip and the synchronous SRAM port (see the submodules for
// their timing). status gives the state and the sticky error flags; utc is the
// last decoded IRIG-B frame time; sram_level the words stored and not yet
// read; xfer_done pulses at the end of every
// bus-master transfer. clk must be faster than twice the frequency standard and
// give at least NCH_MAX+5 clocks per bin (e.g. 40 MHz with a 10 MHz standard).
// The list of parts and what they do follow the instrument's description; the
// single clock domain and all encodings are this design's choices.
module chisdas_top
  import chisdas_pkg::*;
#(
  parameter int unsigned NCH_MAX     = 4,
  parameter int unsigned RECORD_BINS = 8192,
  parameter int unsigned SRAM_AW     = 17,
  parameter int unsigned US_PER_MS   = 1000
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               fs_10mhz,
  // conditioned TTL inputs
  input  logic [NCH_MAX-1:0] photon_in,
  input  logic               irig_in,
  input  logic               fstd_in,
  input  logic               pps_in,
  // PCI interface chip, add-on FIFOs
  input  logic               in_empty,
  output logic               in_rd,
  input  logic [31:0]        in_data,
  input  logic               out_full,
  output logic               out_wr,
  output logic [31:0]        out_data,
  output logic               xfer_done,
  // local SRAM
  output logic [SRAM_AW-1:0] sram_addr,
  output logic               sram_we,
  output logic               sram_re,
  output logic [31:0]        sram_wdata,
  input  logic [31:0]        sram_rdata,
  // monitoring
  output status_t            status,
  output utc_t               utc,
  output logic [SRAM_AW:0]   sram_level
);

  logic [NCH_MAX-1:0] photon_rise;
  logic               irig_lvl, fstd_rise, pps_rise;
  logic               us_tick, bin_end, rec_open;
  hk_t                hk;
  logic               time_valid, frame_err;
  logic [SOD_W-1:0]   sod_next;
  logic               instr_valid;
  logic [31:0]        instr_word;
  obs_state_e         state;
  logic               start, run;
  instr_t             cfg;
  logic [NCH_MAX-1:0][31:0] snap;
  logic               snap_valid;
  logic               wr_valid;
  logic [31:0]        wr_data;
  logic               overrun, overflow;
  logic               s_valid, s_ready;
  logic [31:0]        s_data;
  logic [XFER_W-1:0]  xfer_sel;
  logic               arm;
  logic               irig_err;

  // the instruction's channel field is two bits wide
  if (NCH_MAX < 1 || NCH_MAX > 4) begin : g_nch_check
    $error("NCH_MAX must be 1..4");
  end

  assign arm = instr_valid && (instr_word[14:5] != '0);

  // transfer size, at most half the SRAM so that two regions always exist
  always_comb begin
    xfer_sel = xfer_size_words(cfg.xfer_code);
    if (32'(xfer_sel) > (32'd1 << (SRAM_AW - 1))) xfer_sel = XFER_W'(32'd1 << (SRAM_AW - 1));
  end

  daughter_card_if #(.NCH_MAX(NCH_MAX)) u_dc (
    .clk, .rst_n, .photon_in, .irig_in, .fstd_in, .pps_in,
    .photon_rise, .irig_lvl, .fstd_rise, .pps_rise);

  obs_timer #(.RECORD_BINS(RECORD_BINS)) u_tim (
    .clk, .rst_n, .fstd_rise, .fs_10mhz, .start, .run, .res_us(cfg.res_us),
    .us_tick, .bin_end, .rec_open, .hk);

  irigb_decoder #(.US_PER_MS(US_PER_MS)) u_irig (
    .clk, .rst_n, .us_tick, .irig_lvl, .pps_rise,
    .time_valid, .sod_next, .utc, .frame_err);

  pci_addon_if u_pci (
    .clk, .rst_n, .clear(arm),
    .in_empty, .in_rd, .in_data, .instr_valid, .instr_word,
    .out_full, .out_wr, .out_data,
    .s_valid, .s_data, .s_ready, .xfer_words(xfer_sel), .xfer_done);

  obs_control u_ctl (
    .clk, .rst_n, .instr_valid, .instr(instr_t'(instr_word)), .pps_rise,
    .time_valid, .sod_next, .state, .start, .run, .cfg);

  channel_counter #(.NCH_MAX(NCH_MAX), .CNT_W(32)) u_cnt (
    .clk, .rst_n, .run, .photon_rise, .bin_end, .snap, .snap_valid);

  record_writer #(.NCH_MAX(NCH_MAX)) u_wr (
    .clk, .rst_n, .clear(arm), .nch_m1(cfg.nch_m1), .instr_word(32'(cfg)),
    .rec_open, .hk, .snap_valid, .snap, .wr_valid, .wr_data, .overrun);

  sram_buffer #(.SRAM_AW(SRAM_AW)) u_sb (
    .clk, .rst_n, .clear(arm), .wr_valid, .wr_data, .xfer_words(xfer_sel),
    .sram_addr, .sram_we, .sram_re, .sram_wdata, .sram_rdata,
    .out_valid(s_valid), .out_data(s_data), .out_ready(s_ready), .overflow, .level(sram_level));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        irig_err <= 1'b0;
    else if (arm)      irig_err <= 1'b0;
    else if (frame_err) irig_err <= 1'b1;
  end

  assign status = '{state: state, time_valid: time_valid, irig_err: irig_err,
                    overrun: overrun, overflow: overflow};

endmodule
