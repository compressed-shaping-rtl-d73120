// tb_dm_ctrl: records the refresh writes of dm_ctrl into shadow copies of the
// encoder and decoder LUT RAMs and checks: after the first (fast) sweep the
// copies equal the reference tables and ready is set; later steps come every
// REFRESH_DIV clocks; a reprogrammed layer-1 entry pair reaches both the
// encoder and the inverse decoder tables within two sweeps; a switch to
// 16-QAM drops ready and reloads the 16-QAM tables.
// Runs with REFRESH_DIV = 4 to keep the sweeps short; one control clock;
// watchdog after 20000 clocks. The golden register copies and intermittent
// refresh are the original protection scheme; the sweep order, broadcast
// writes and ready flag are this design's.
module tb_dm_ctrl;
  import cs_pkg::*;
  import tb_cs_model_pkg::*;
  localparam int DIV = 4;

  logic cclk = 0, crst = 1, qam16 = 0, cfg_we = 0, ready;
  logic [3:0] cfg_addr = '0, cfg_data = '0;
  lut_wr_t enc_wr, dec_wr;
  logic [31:0] sweeps;
  always #5 cclk = ~cclk;

  dm_ctrl #(.REFRESH_DIV(DIV)) dut (.cclk, .crst, .qam16, .cfg_we, .cfg_addr, .cfg_data,
                                    .enc_wr, .dec_wr, .ready, .sweeps);

  int checks = 0, failures = 0;
  int er [4][32], dr [4][32];
  int last_step = -1, cyc = 0, gap_bad = 0, gaps = 0;

  always @(posedge cclk) begin
    cyc <= cyc + 1;
    if (enc_wr.we) er[enc_wr.layer][enc_wr.addr] <= int'(enc_wr.data);
    if (dec_wr.we) dr[dec_wr.layer][dec_wr.addr] <= int'(dec_wr.data);
    if (ready && dec_wr.we && dec_wr.layer == 2'd1) begin
      if (last_step >= 0 && dec_wr.addr != 0) begin
        gaps++;
        if (cyc - last_step != DIV) gap_bad++;
      end
      last_step <= cyc;
    end
  end

  task automatic compare(tab_t et, tab_t dt, string what);
    for (int l = 0; l < 4; l++) begin
      for (int a = 0; a < (1 << EAW[l]); a++) begin
        checks++;
        if (er[l][a] != et[l][a]) begin
          failures++;
          $display("%s enc L%0d[%0d] = %0d, expected %0d", what, l + 1, a, er[l][a], et[l][a]);
        end
      end
      for (int w = 0; w < (1 << EDW[l]); w++) begin
        checks++;
        if (dr[l][w] != dt[l][w]) begin
          failures++;
          $display("%s dec L%0d[%0d] = %0d, expected %0d", what, l + 1, w, dr[l][w], dt[l][w]);
        end
      end
    end
  endtask

  task automatic wait_sweeps(int n);
    int s0 = int'(sweeps);
    while (int'(sweeps) < s0 + n) @(negedge cclk);
    repeat (2) @(negedge cclk);
  endtask

  initial begin
    tab_t et, dt;
    int t0;
    repeat (3) @(negedge cclk);
    crst = 0;
    t0 = cyc;
    while (!ready) @(negedge cclk);
    checks++;
    if (cyc - t0 > 140) begin failures++; $display("first sweep took %0d", cyc - t0); end
    repeat (2) @(negedge cclk);
    compare(enc_tabs(0), dec_tabs(0), "64-QAM");
    wait_sweeps(1);
    checks++;
    if (gaps < 20 || gap_bad != 0) begin failures++; $display("refresh gaps %0d bad %0d", gaps, gap_bad); end
    // reprogram: swap the layer-1 outputs of addresses 0 and 1
    et = enc_tabs(0);
    dt = dec_tabs(0);
    @(negedge cclk) cfg_we = 1; cfg_addr = 4'd0; cfg_data = 4'(et[0][1]);
    @(negedge cclk) cfg_we = 1; cfg_addr = 4'd1; cfg_data = 4'(et[0][0]);
    @(negedge cclk) cfg_we = 0;
    begin
      int tmp; tmp = et[0][0];
      et[0][0] = et[0][1];
      et[0][1] = tmp;
      dt[0][et[0][0]] = 0;
      dt[0][et[0][1]] = 1;
    end
    wait_sweeps(2);
    compare(et, dt, "reprogrammed");
    // modulation switch
    @(negedge cclk) qam16 = 1;
    repeat (2) @(negedge cclk);
    checks++;
    if (ready) begin failures++; $display("ready stayed high across mode switch"); end
    while (!ready) @(negedge cclk);
    repeat (2) @(negedge cclk);
    compare(enc_tabs(1), dec_tabs(1), "16-QAM");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge cclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
