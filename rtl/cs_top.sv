// cs_top: compressed shaping demonstrator - transmitter, error insertion,
// receiver and monitors on one chip, as in the paper's FPGA implementation.
//
// Data path (data clock clk, one codeword per clock):
//   source_gen  -> 640 nonuniform source bits S with target mark ratio
//                  ratio/40; S_a = S[371:0] (amplitude bits), S_s =
//                  S[639:372] (sign bits). With a rate-5/6 FEC a codeword
//                  has room for 268 information sign bits in 16-QAM (all of
//                  S is used, 640 bits per clock) and 101 in 64-QAM (S_s
//                  bits above the lowest 101 are set to 0 and not carried,
//                  473 bits per clock).
//   bitflip_enc -> F (373 bits), hidm_enc -> B_a (404 amplitude bits);
//   bit_scrambler on S_s -> U_s. B_a and U_s are brought out (tx_*) where
//   the FEC encoder and QAM mapper, not part of this design, would connect.
//   err_insert  -> B_a with sparse errors (assumed post-FEC BER),
//   hidm_dec -> F^, bitflip_dec -> S_a^; U_s delayed and descrambled -> S_s^.
// Monitors: pmf_monitor on B_a, ber_monitor "post-FEC" (B_a vs. errored B_a),
// ber_monitor "system" (S vs. S^). Delay lines align the paths.
//
// Control (control clock cclk): dm_ctrl keeps register copies of all DM LUT
// contents, refreshes the encoder and decoder RAMs intermittently (soft error
// protection) and reloads them on a modulation change (qam16). Its ready
// flag is synchronised into the data domain; the source starts only when it
// is set and src_en is high.
//
// Some internal signals are left unconnected on purpose: the source's cycle
// index, the scrambler's valid (equal to the source valid), the per-word
// error-insertion flag and the post-FEC errored-word count; the monitors
// that matter are brought out.
//
// Latency: tx outputs 5 clocks after the source word, recovered source
// (rx_*) 11 clocks after it. ratio, qam16, err_en, err_interval are
// quasi-static settings.
module cs_top
  import cs_pkg::*;
#(
  parameter int REFRESH_DIV = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     cclk,
  input  logic                     crst,
  // settings
  input  logic                     src_en,
  input  logic [5:0]               ratio,          // target P_S(1) = ratio/40
  input  logic                     qam16,          // 1: 16-QAM, 0: 64-QAM
  input  logic                     err_en,
  input  logic [63:0]              err_interval,   // post-FEC BER = 1/interval
  input  logic                     mon_clr,
  input  logic                     cfg_we,         // layer-1 LUT reprogramming (cclk)
  input  logic [3:0]               cfg_addr,
  input  logic [3:0]               cfg_data,
  // transmitter outputs towards FEC encoder / QAM mapper
  output logic                     tx_valid,
  output logic [K_BS-1:0]          tx_us,          // 64-QAM: bits [100:0] used
  output logic [DM_OUT_W-1:0]      tx_ba,
  // recovered source
  output logic                     rx_valid,
  output logic [K_SA+K_BS-1:0]     rx_s,
  // monitors
  output logic                     lut_ready,
  output logic [31:0]              refresh_sweeps,  // cclk domain
  output logic [15:0][47:0]        pmf_hist,
  output logic [63:0]              fec_errs,
  output logic [63:0]              fec_bits,
  output logic [63:0]              sys_errs,
  output logic [63:0]              sys_bits,
  output logic [63:0]              sys_err_words,
  output logic [63:0]              ins_errs
);

  localparam int SW = K_SA + K_BS;              // source bits carried
  localparam int TX_LAT = 1 + ENC_LAT;          // bit flip + DM encoder
  localparam int RX_LAT = TX_LAT + 1 + DEC_LAT + 1;

  // ---------------------------------------------------------------- control domain
  lut_wr_t enc_wr, dec_wr;
  logic    c_ready;

  dm_ctrl #(.REFRESH_DIV(REFRESH_DIV)) u_ctrl (
    .cclk, .crst, .qam16, .cfg_we, .cfg_addr, .cfg_data,
    .enc_wr, .dec_wr, .ready(c_ready), .sweeps(refresh_sweeps)
  );

  logic [1:0] ready_sync;
  always_ff @(posedge clk) begin
    if (rst) ready_sync <= '0;
    else     ready_sync <= {ready_sync[0], c_ready};
  end
  assign lut_ready = ready_sync[1];

  // ---------------------------------------------------------------- source
  logic [N_GROUPS*GROUP_W-1:0] src;
  logic                        src_valid;
  logic [$clog2(N_GROUPS)-1:0] src_cidx;

  source_gen #(.N_GROUPS(N_GROUPS), .GROUP_W(GROUP_W)) u_src (
    .clk, .rst, .en(src_en && lut_ready), .ratio, .src, .src_valid,
    .cycle_idx(src_cidx)
  );

  logic [K_SA-1:0] s_a;
  logic [K_BS-1:0] s_s, s_mask;
  assign s_mask = qam16 ? '1 : K_BS'({K_BS64{1'b1}});
  assign s_a    = src[K_SA-1:0];
  assign s_s    = src[K_SA +: K_BS] & s_mask;

  // ---------------------------------------------------------------- transmitter
  logic           f_valid;
  logic [K_F-1:0] f;
  bitflip_enc #(.K(K_SA)) u_bfe (
    .clk, .rst, .s_valid(src_valid), .s(s_a), .f_valid, .f
  );

  logic                ba_valid;
  logic [DM_OUT_W-1:0] ba;
  hidm_enc u_enc (
    .clk, .rst, .f_valid, .f, .a_valid(ba_valid), .a(ba), .wclk(cclk), .wr(enc_wr)
  );

  logic            us_valid;
  logic [K_BS-1:0] us, us_d;
  bit_scrambler #(.W(K_BS)) u_scr (
    .clk, .rst, .din_valid(src_valid), .din(s_s), .dout_valid(us_valid), .dout(us)
  );
  delay_line #(.W(K_BS), .D(TX_LAT - 1)) u_us_dly (
    .clk, .rst, .din(us), .dout(us_d)
  );

  assign tx_valid = ba_valid;
  assign tx_ba    = ba;
  assign tx_us    = us_d;

  pmf_monitor #(.N_AMP(T1)) u_pmf (
    .clk, .rst, .clr(mon_clr), .qam16, .valid(ba_valid), .a(ba), .hist(pmf_hist)
  );

  // ---------------------------------------------------------------- error insertion
  logic                bh_valid, err_now;
  logic [DM_OUT_W-1:0] bh, ba_d1;
  err_insert #(.W(DM_OUT_W)) u_err (
    .clk, .rst, .en(err_en), .interval(err_interval), .din_valid(ba_valid),
    .din(ba), .dout_valid(bh_valid), .dout(bh), .err_now, .n_err(ins_errs)
  );
  delay_line #(.W(DM_OUT_W), .D(1)) u_ba_dly (.clk, .rst, .din(ba), .dout(ba_d1));

  logic [63:0] fec_err_words;
  ber_monitor #(.W(DM_OUT_W)) u_fec_ber (
    .clk, .rst, .clr(mon_clr), .valid(bh_valid), .ref_bits(ba_d1), .rcv_bits(bh),
    .nbits($clog2(DM_OUT_W+1)'(DM_OUT_W)),
    .errs(fec_errs), .bits(fec_bits), .err_words(fec_err_words)
  );

  // ---------------------------------------------------------------- receiver
  logic           fh_valid;
  logic [K_F-1:0] fh;
  hidm_dec u_dec (
    .clk, .rst, .a_valid(bh_valid), .a(bh), .f_valid(fh_valid), .f(fh),
    .wclk(cclk), .wr(dec_wr)
  );

  logic            sah_valid;
  logic [K_SA-1:0] sah;
  bitflip_dec #(.K(K_SA)) u_bfd (
    .clk, .rst, .f_valid(fh_valid), .f(fh), .s_valid(sah_valid), .s(sah)
  );

  // sign bits: U_s waits in a delay line for the amplitude path, then descrambled
  logic [K_BS:0]   us_rx;
  logic            ssh_valid;
  logic [K_BS-1:0] ssh;
  delay_line #(.W(K_BS + 1), .D(RX_LAT - TX_LAT - 1)) u_us_rx_dly (
    .clk, .rst, .din({tx_valid, tx_us}), .dout(us_rx)
  );
  bit_scrambler #(.W(K_BS)) u_dscr (
    .clk, .rst, .din_valid(us_rx[K_BS]), .din(us_rx[K_BS-1:0]),
    .dout_valid(ssh_valid), .dout(ssh)
  );

  assign rx_valid = sah_valid;
  assign rx_s     = {ssh, sah};

  // ---------------------------------------------------------------- system BER
  logic [SW-1:0] s_ref;
  delay_line #(.W(SW), .D(RX_LAT)) u_src_dly (
    .clk, .rst, .din({s_s, s_a}), .dout(s_ref)
  );
  ber_monitor #(.W(SW)) u_sys_ber (
    .clk, .rst, .clr(mon_clr), .valid(rx_valid), .ref_bits(s_ref), .rcv_bits(rx_s),
    .nbits(qam16 ? $clog2(SW+1)'(SW) : $clog2(SW+1)'(K_SA + K_BS64)),
    .errs(sys_errs), .bits(sys_bits), .err_words(sys_err_words)
  );

  // both receiver halves leave together
  a_rx_align : assert property (@(posedge clk) disable iff (rst) sah_valid == ssh_valid);

endmodule
