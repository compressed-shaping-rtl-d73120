// tb_cs_workloads: the two measurements of the hardware demonstration, run on
// the whole chip at its default sizes.
//
//   A. Amplitude entropy against source mark ratio: for 64-QAM and 16-QAM,
//      P_S(1) = 0.05, 0.15, ..., 0.95. The entropy H(A_c) comes from the
//      testbench's own histogram of the transmitted amplitude words, which
//      must equal the chip's PMF monitor. H(A_c) must peak at 0.5, fall
//      monotonically away from it and be symmetric about it (bit flipping).
//   B. Back-to-back error insertion: for both modulations and P_S(1) = 0.3,
//      0.5 and 0.7, assumed post-FEC BERs of 1e-4 and 1e-5, each until 50
//      errors have been inserted. The testbench counts system output errors
//      itself (source word against recovered word). That count must equal the
//      chip's system BER monitor; the post-FEC monitor must equal the inserted
//      count; and the system BER must stay within 0.1..60 times the post-FEC
//      BER (below 1 is possible: a 16-QAM word carries 640 source bits for
//      404 amplitude bits, and many single errors cost one source bit; above,
//      a hit on the flip parity bit costs 372 source bits at once). Lower BERs (down to 1e-15) only stretch the run: the interval
//      register is 64 bits wide.
//
// The sweep points and BERs are those of the demonstration; the bounds of the
// checks are this testbench's. Data clock 4 ns, control clock 10 ns; a
// watchdog ends the run after 600000 data clocks.
module tb_cs_workloads;
  import cs_pkg::*;

  logic clk = 0, rst = 1, cclk = 0, crst = 1;
  always #2 clk = ~clk;
  always #5 cclk = ~cclk;

  logic        src_en = 0, qam16 = 0, err_en = 0, mon_clr = 0, cfg_we = 0;
  logic [5:0]  ratio = 6'd20;
  logic [63:0] err_interval = 64'd10000;
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

  // own histogram of the transmitted amplitudes
  longint hist[16];
  always @(negedge clk)
    if (tx_valid)
      for (int j = 0; j < T1; j++)
        if (qam16) begin
          hist[tx_ba[4*j +: 2]]++;
          hist[tx_ba[4*j + 2 +: 2]]++;
        end else begin
          hist[tx_ba[4*j +: 4]]++;
        end

  // own system error count: source word against recovered word
  logic [K_SA+K_BS-1:0] src_q[$];
  longint own_errs = 0;
  always @(negedge clk) begin
    if (dut.src_valid) src_q.push_back({dut.s_s, dut.s_a});
    if (rx_valid) begin
      own_errs += $countones(rx_s ^ src_q[0]);
      void'(src_q.pop_front());
    end
  end

  task automatic drain();
    src_en = 0;
    repeat (20) @(negedge clk);
  endtask

  task automatic clear_all();
    @(negedge clk) mon_clr = 1;
    for (int b = 0; b < 16; b++) hist[b] = 0;
    own_errs = 0;
    @(negedge clk) mon_clr = 0;
  endtask

  task automatic words(int n);
    int k = 0;
    src_en = 1;
    while (k < n) begin
      @(negedge clk);
      if (dut.src_valid) k++;
    end
  endtask

  task automatic set_mode(bit q);
    drain();
    qam16 = q;
    repeat (10) @(negedge cclk);
    while (!lut_ready) @(negedge clk);
  endtask

  function automatic real entropy();
    real tot = 0, h = 0, p;
    for (int b = 0; b < 16; b++) tot += real'(hist[b]);
    for (int b = 0; b < 16; b++)
      if (hist[b] != 0) begin
        p = real'(hist[b]) / tot;
        h -= p * $ln(p) / $ln(2.0);
      end
    return h;
  endfunction

  task automatic sweep_entropy(bit q);
    real h[10];
    int  hist_ok;
    set_mode(q);
    for (int i = 0; i < 10; i++) begin
      ratio = 6'(2 + 4 * i);
      words(20);
      drain();
      clear_all();
      words(200);
      drain();
      hist_ok = 1;
      for (int b = 0; b < 16; b++) if (longint'(pmf_hist[b]) != hist[b]) hist_ok = 0;
      checks++;
      if (!hist_ok) begin failures++; $display("PMF monitor differs from own histogram"); end
      h[i] = entropy();
      $display("%s P_S(1) = %0.2f: H(A_c) = %0.3f", q ? "16-QAM" : "64-QAM", (2 + 4 * i) / 40.0, h[i]);
    end
    for (int i = 0; i < 4; i++) begin
      checks += 2;
      if (!(h[i] < h[i+1])) begin failures++; $display("H not rising below 0.5 at point %0d", i); end
      if (!(h[9-i] < h[8-i])) begin failures++; $display("H not falling above 0.5 at point %0d", 9 - i); end
    end
    for (int i = 0; i < 5; i++) begin
      checks++;
      if (h[i] - h[9-i] > 0.06 || h[9-i] - h[i] > 0.06) begin
        failures++; $display("H not symmetric at point %0d", i);
      end
    end
  endtask

  task automatic ber_point(bit q, int r, longint interval);
    real ber_fec, ber_sys;
    longint ins0;
    ratio = 6'(r);
    err_interval = 64'(interval);
    words(20);
    drain();
    clear_all();
    ins0 = longint'(ins_errs);   // counts since reset
    err_en = 1;
    src_en = 1;
    while (longint'(ins_errs) - ins0 < 50) @(negedge clk);
    drain();
    err_en = 0;
    ber_fec = real'(fec_errs) / real'(fec_bits);
    ber_sys = real'(sys_errs) / real'(sys_bits);
    $display("%s P_S(1) = %0.2f: assumed post-FEC BER %0.2e, system output BER %0.2e (x%0.1f)",
             q ? "16-QAM" : "64-QAM", r / 40.0, ber_fec, ber_sys, ber_sys / ber_fec);
    checks += 3;
    if (longint'(sys_errs) != own_errs) begin
      failures++; $display("system BER monitor %0d, own count %0d", sys_errs, own_errs);
    end
    if (longint'(fec_errs) != longint'(ins_errs) - ins0) begin failures++; $display("post-FEC monitor differs from inserted count"); end
    if (ber_sys < 0.1 * ber_fec || ber_sys > 60.0 * ber_fec) begin failures++; $display("error multiplication out of range"); end
  endtask

  initial begin
    repeat (4) @(negedge cclk);
    crst = 0;
    rst = 0;
    while (!lut_ready) @(negedge clk);
    sweep_entropy(0);
    sweep_entropy(1);
    for (int q = 0; q < 2; q++) begin
      set_mode(q[0]);
      for (int i = 0; i < 3; i++) begin
        ber_point(q[0], 12 + 8 * i, 10_000);
        ber_point(q[0], 12 + 8 * i, 100_000);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
