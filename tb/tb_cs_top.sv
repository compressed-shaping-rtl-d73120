// tb_cs_top: end-to-end run of the whole compressed shaping demonstrator at
// its default sizes (640-bit source, 372/373 -> 404-bit hierarchical DM).
//
// Every transmitted word is checked against the reference model (bit
// flipping + hierarchical DM encoder on the source word), every received word
// against the model decoder applied to the word after error insertion, and
// the monitors against each other. The run goes through:
//   1. start-up: the source waits for the LUT RAMs to be loaded (stall);
//   2. mark ratios 0.5, 0.3, 0.1, 0.7, 0.9 with error-free transfer; the
//      amplitude entropy from the PMF monitor must fall as P_S(1) leaves 0.5
//      and be symmetric about 0.5 (bit flipping);
//   3. error insertion (sparse errors): system errors stay a small multiple of
//      the inserted ones;
//   4. a soft error planted in an encoder LUT RAM, repaired by the refresh;
//   5. a switch to 16-QAM (268 instead of 101 sign bits per word, checked by
//      the bit count of the system BER monitor) and a reprogrammed layer-1 LUT.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_cs_top;
  import cs_pkg::*;
  import tb_cs_model_pkg::*;

  logic clk = 0, rst = 1, cclk = 0, crst = 1;
  always #2 clk = ~clk;       // data clock
  always #5 cclk = ~cclk;     // control clock

  logic        src_en = 0, qam16 = 0, err_en = 0, mon_clr = 0, cfg_we = 0;
  logic [5:0]  ratio = 6'd20;
  logic [63:0] err_interval = 64'd2027;
  logic [3:0]  cfg_addr = '0, cfg_data = '0;
  logic        tx_valid, rx_valid, lut_ready;
  logic [K_BS-1:0]      tx_us;
  logic [DM_OUT_W-1:0]  tx_ba;
  logic [K_SA+K_BS-1:0] rx_s;
  logic [31:0]          refresh_sweeps;
  logic [15:0][47:0]    pmf_hist;
  logic [63:0] fec_errs, fec_bits, sys_errs, sys_bits, sys_err_words, ins_errs;

  cs_top dut (.*);

  int checks = 0, failures = 0;
  tab_t et, dt;
  bit   tx_check = 1;

  // mechanism counters
  int n_stall = 0, n_flip = 0, n_noflip = 0, n_mask0 = 0, n_mask2 = 0;
  int n_ins = 0, n_seu_repair = 0, n_mode = 0, n_cfg = 0, n_sweep = 0, n_rx_err_words = 0;

  logic [DM_OUT_W-1:0]  tx_exp_q[$];
  logic [K_SA+K_BS-1:0] rx_exp_q[$];

  function automatic logic [K_F-1:0] flip_model(logic [K_SA-1:0] s);
    if ($countones(s) * 2 > K_SA) return {1'b1, ~s};
    return {1'b0, s};
  endfunction

  function automatic logic [K_SA-1:0] unflip_model(logic [K_F-1:0] f);
    return f[K_F-1] ? ~f[K_SA-1:0] : f[K_SA-1:0];
  endfunction

  logic [K_BS-1:0] ss_q[$];
  always @(negedge clk) begin
    if (src_en && !lut_ready && !rst) n_stall++;
    if (dut.src_valid) begin
      logic [K_F-1:0] fm;
      fm = flip_model(dut.s_a);
      if (fm[K_F-1]) n_flip++; else n_noflip++;
      for (int g = 0; g < N_GROUPS; g++) begin
        if (dut.u_src.mask[g] == 2'd0) n_mask0++;
        if (dut.u_src.mask[g] == 2'd2) n_mask2++;
      end
      tx_exp_q.push_back(model_enc(fm, et));
      ss_q.push_back(dut.s_s);
    end
    if (tx_valid) begin
      if (tx_check) begin
        checks++;
        if (tx_ba !== tx_exp_q[0]) begin
          failures++;
          if (failures < 5) $display("tx word differs from model");
        end
      end
      void'(tx_exp_q.pop_front());
    end
    if (dut.bh_valid) begin
      if (dut.err_now) n_ins++;
      rx_exp_q.push_back({ss_q[0], unflip_model(model_dec(dut.bh, dt))});
      void'(ss_q.pop_front());
    end
    if (rx_valid) begin
      checks++;
      if (rx_s !== rx_exp_q[0]) begin
        failures++;
        if (failures < 5) $display("rx word differs from model");
      end
      void'(rx_exp_q.pop_front());
    end
  end

  task automatic words(int n);
    int k = 0;
    src_en = 1;
    while (k < n) begin
      @(negedge clk);
      if (dut.src_valid) k++;
    end
  endtask

  task automatic drain();
    src_en = 0;
    repeat (20) @(negedge clk);
  endtask

  task automatic clear_mon();
    @(negedge clk) mon_clr = 1;
    @(negedge clk) mon_clr = 0;
  endtask

  function automatic real entropy();
    real tot = 0, h = 0, p;
    for (int b = 0; b < 16; b++) tot += real'(pmf_hist[b]);
    for (int b = 0; b < 16; b++)
      if (pmf_hist[b] != 0) begin
        p = real'(pmf_hist[b]) / tot;
        h -= p * $ln(p) / $ln(2.0);
      end
    return h;
  endfunction

  task automatic wait_sweeps(int n);
    int s0;
    @(negedge cclk) s0 = int'(refresh_sweeps);
    while (int'(refresh_sweeps) < s0 + n) @(negedge cclk);
    n_sweep += n;
  endtask

  task automatic measure(int r, output real h);
    ratio = 6'(r);
    words(30);
    drain();
    clear_mon();
    words(300);
    drain();
    h = entropy();
    $display("P_S(1) = %0.3f: H(A_c) = %0.3f bit per 2D amplitude (system errors %0d)", r / 40.0, h, sys_errs);
  endtask

  initial begin
    real h[5];
    real h16[2];
    longint e_sys, e_ins;
    et = enc_tabs(0);
    dt = dec_tabs(0);
    repeat (4) @(negedge cclk);
    crst = 0;
    rst = 0;
    // ---- 1./2. start-up stall, then mark ratios, error free
    src_en = 1;
    while (!lut_ready) @(negedge clk);
    n_sweep++;
    measure(20, h[0]);
    measure(12, h[1]);
    measure(4, h[2]);
    measure(28, h[3]);
    measure(36, h[4]);
    checks += 4;
    if (!(h[0] > h[1] && h[1] > h[2])) begin failures++; $display("entropy not falling"); end
    if (!(h[0] > h[3] && h[3] > h[4])) begin failures++; $display("entropy not falling above 0.5"); end
    if (h[1] - h[3] > 0.05 || h[3] - h[1] > 0.05) begin failures++; $display("not symmetric"); end
    if (h[0] < 3.0 || h[0] > 4.0) begin failures++; $display("H at 0.5 out of range"); end
    checks += 2;
    if (sys_errs != 0 || fec_errs != 0) begin failures++; $display("errors without error insertion"); end
    if (sys_bits != 64'(300) * 64'(K_SA + K_BS64)) begin failures++; $display("64-QAM: %0d bits carried", sys_bits); end

    // ---- 3. error insertion
    ratio = 6'd12;
    clear_mon();
    err_en = 1;
    words(1000);
    drain();
    err_en = 0;
    e_sys = longint'(sys_errs);
    e_ins = longint'(ins_errs);
    $display("inserted %0d errors, system output errors %0d (x%0.2f)", e_ins, e_sys,
             real'(e_sys) / real'(e_ins));
    n_rx_err_words = int'(sys_err_words);
    checks += 2;
    if (fec_errs != ins_errs || e_ins < 150) begin failures++; $display("post-FEC count"); end
    if (e_sys < e_ins || e_sys > 16 * e_ins) begin failures++; $display("error multiplication"); end

    // ---- 4. soft error in an encoder RAM, repaired by the refresh
    ratio = 6'd4;
    clear_mon();
    tx_check = 0;
    dut.u_enc.g_l1[7].u_ram.mem[0] = 4'hF;   // upset: entry of the all-zero input
    words(100);
    drain();
    checks++;
    if (sys_errs == 0) begin failures++; $display("upset had no effect"); end
    wait_sweeps(2);
    clear_mon();
    tx_check = 1;
    words(200);
    drain();
    checks++;
    if (sys_errs != 0) begin failures++; $display("upset not repaired"); end
    else n_seu_repair++;

    // ---- 5. 16-QAM and layer-1 reprogramming
    @(negedge cclk) qam16 = 1;
    et = enc_tabs(1);
    dt = dec_tabs(1);
    n_mode++;
    repeat (4) @(negedge clk);
    checks++;
    if (lut_ready) begin failures++; $display("ready high during reload"); end
    src_en = 1;
    while (!lut_ready) @(negedge clk);
    n_sweep++;
    measure(20, h16[0]);
    measure(8, h16[1]);
    checks += 2;
    if (!(h16[0] > h16[1])) begin failures++; $display("16-QAM entropy"); end
    if (pmf_hist[4] != 0 || pmf_hist[15] != 0) begin failures++; $display("16-QAM bins"); end
    checks++;
    if (sys_bits != 64'(300) * 64'(K_SA + K_BS)) begin failures++; $display("16-QAM: %0d bits carried", sys_bits); end
    // reprogram: swap the outputs of addresses 1 and 2 (traffic stopped)
    begin
      int t1; t1 = et[0][1];
      @(negedge cclk) cfg_we = 1; cfg_addr = 4'd1; cfg_data = 4'(et[0][2]);
      @(negedge cclk) cfg_we = 1; cfg_addr = 4'd2; cfg_data = 4'(t1);
      @(negedge cclk) cfg_we = 0;
      et[0][1] = et[0][2];
      et[0][2] = t1;
      dt[0][et[0][1]] = 1;
      dt[0][et[0][2]] = 2;
      n_cfg++;
    end
    wait_sweeps(2);
    clear_mon();
    ratio = 6'd16;
    words(300);
    drain();
    checks++;
    if (sys_errs != 0) begin failures++; $display("errors after reprogramming: %0d in %0d words", sys_errs, sys_err_words); end

    // ---- mechanisms
    $display("stall=%0d flip=%0d noflip=%0d mask0=%0d mask1forced=%0d inserted=%0d rx_err_words=%0d",
             n_stall, n_flip, n_noflip, n_mask0, n_mask2, n_ins, n_rx_err_words);
    $display("seu_repair=%0d mode_switch=%0d reprogram=%0d sweeps_waited=%0d",
             n_seu_repair, n_mode, n_cfg, n_sweep);
    checks += 10;
    if (n_stall == 0) failures++;
    if (n_flip == 0) failures++;
    if (n_noflip == 0) failures++;
    if (n_mask0 == 0) failures++;
    if (n_mask2 == 0) failures++;
    if (n_ins == 0) failures++;
    if (n_seu_repair == 0) failures++;
    if (n_mode == 0) failures++;
    if (n_cfg == 0) failures++;
    if (n_rx_err_words == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
