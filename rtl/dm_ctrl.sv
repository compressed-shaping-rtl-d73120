// dm_ctrl: control-domain keeper of the DM LUT contents (soft error protection
// and reconfiguration) for both the shaping encoder and decoder.
//
// Block RAM bits can be flipped by radiation-induced soft errors. This block
// holds a copy of every encoder and decoder LUT table in registers and
// rewrites the RAMs from that copy, one entry per step, in an endless sweep
// over (layer 1..4, address 0..31); a step writes the entry at that address of
// the layer into every encoder LUT RAM (enc_wr) and every decoder LUT RAM
// (dec_wr) of the layer at once, where the address exists. After reset and
// after every change of the modulation it sweeps once at full speed and then
// raises ready; afterwards it steps only every REFRESH_DIV control clocks, so
// that the RAMs are refreshed intermittently. Any RAM bit upset is repaired at
// the latest one sweep (128 * REFRESH_DIV control clocks) later.
//
// The register copies reset to the tables built by the rules of cs_pkg for
// the selected modulation (qam16 = 1: 16-QAM, else 64-QAM; only layer 1
// differs). Layer 1 can be reprogrammed entry by entry (cfg_we, cfg_addr,
// cfg_data): encoder entry cfg_addr gets cfg_data and decoder entry cfg_data
// gets cfg_addr, so a permutation written in full stays invertible. The
// paper gives the purpose (register copies, intermittent refresh, separate
// control clock, software-reconfigurable contents); sweep order, rates and
// the configuration port are this design's.
//
// Timing: everything runs on cclk. enc_wr/dec_wr are registered; ready is a
// cclk-domain level (synchronise it before use in the data domain). qam16 is a
// quasi-static setting.
module dm_ctrl
  import cs_pkg::*;
#(
  parameter int REFRESH_DIV = 16
) (
  input  logic        cclk,
  input  logic        crst,
  input  logic        qam16,
  input  logic        cfg_we,
  input  logic [3:0]  cfg_addr,
  input  logic [3:0]  cfg_data,
  output lut_wr_t     enc_wr,
  output lut_wr_t     dec_wr,
  output logic        ready,
  output logic [31:0] sweeps      // completed refresh sweeps
);

  localparam lut_table_t E1_64 = enc_table(0, 1'b0);
  localparam lut_table_t E1_16 = enc_table(0, 1'b1);
  localparam lut_table_t D1_64 = dec_table(0, 1'b0);
  localparam lut_table_t D1_16 = dec_table(0, 1'b1);
  localparam lut_table_t E2 = enc_table(1, 1'b0);
  localparam lut_table_t E3 = enc_table(2, 1'b0);
  localparam lut_table_t E4 = enc_table(3, 1'b0);
  localparam lut_table_t D2 = dec_table(1, 1'b0);
  localparam lut_table_t D3 = dec_table(2, 1'b0);
  localparam lut_table_t D4 = dec_table(3, 1'b0);
  localparam int DIVW = (REFRESH_DIV > 1) ? $clog2(REFRESH_DIV) : 1;

  lut_table_t      enc_g [N_LAYERS];
  lut_table_t      dec_g [N_LAYERS];
  logic            mode_q;
  logic            fast;
  logic [1:0]      layer;
  logic [4:0]      addr;
  logic [DIVW-1:0] div;
  logic            step;

  assign step = fast || (int'(div) == 0);

  always_ff @(posedge cclk) begin
    if (crst || qam16 != mode_q) begin
      enc_g[0] <= qam16 ? E1_16 : E1_64;
      dec_g[0] <= qam16 ? D1_16 : D1_64;
      enc_g[1] <= E2;  enc_g[2] <= E3;  enc_g[3] <= E4;
      dec_g[1] <= D2;  dec_g[2] <= D3;  dec_g[3] <= D4;
      mode_q   <= qam16;
      fast     <= 1'b1;
      ready    <= 1'b0;
      layer    <= '0;
      addr     <= '0;
      div      <= '0;
      enc_wr   <= '0;
      dec_wr   <= '0;
      if (crst) sweeps <= '0;
    end else begin
      if (cfg_we) begin
        enc_g[0][cfg_addr] <= 5'(cfg_data);
        dec_g[0][cfg_data] <= 5'(cfg_addr);
      end
      div <= (int'(div) == REFRESH_DIV - 1 || REFRESH_DIV <= 1) ? '0 : div + 1'b1;
      enc_wr <= '0;
      dec_wr <= '0;
      if (step) begin
        enc_wr.we    <= int'(addr) < (1 << enc_aw(int'(layer)));
        enc_wr.layer <= layer;
        enc_wr.addr  <= addr;
        enc_wr.data  <= enc_g[layer][addr];
        dec_wr.we    <= int'(addr) < (1 << dec_aw(int'(layer)));
        dec_wr.layer <= layer;
        dec_wr.addr  <= addr;
        dec_wr.data  <= dec_g[layer][addr];
        addr <= addr + 1'b1;
        if (addr == 5'd31) begin
          layer <= layer + 1'b1;
          if (layer == 2'd3) begin
            sweeps <= sweeps + 1'b1;
            fast   <= 1'b0;
            ready  <= 1'b1;
          end
        end
      end
    end
  end

endmodule
