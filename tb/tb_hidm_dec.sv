// tb_hidm_dec: loads the decoder LUT RAMs from the reference model, feeds
// encoder words computed by the model (error free, then with one or two bit
// errors) and checks: error-free words come back exactly, errored words equal
// the model's nearest-codeword decoding, a single amplitude-bit error corrupts
// only a few source bits, and the latency is 4 clocks at one word per clock.
// Full size (373 <-> 404 bits), one data clock, LUT writes on a second
// clock before the run; watchdog after 20000 clocks. Hierarchical decoding is
// the original scheme; the layer sizes and error fill are this design's.
module tb_hidm_dec;
  import cs_pkg::*;
  import tb_cs_model_pkg::*;

  logic clk = 0, wclk = 0, rst = 1;
  always #2 clk = ~clk;
  always #5 wclk = ~wclk;

  logic                a_valid = 0;
  logic [DM_OUT_W-1:0] a = '0;
  logic                f_valid;
  logic [K_F-1:0]      f;
  lut_wr_t             wr = '0;

  hidm_dec dut (.clk, .rst, .a_valid, .a, .f_valid, .f, .wclk, .wr);

  int checks = 0, failures = 0;
  tab_t et, dt;
  logic [K_F-1:0] exp_q[$], src_q[$];
  int sent_cycle[$];
  int cyc = 0, n_out = 0, max_err = 0, sum_err = 0, n_err_words = 0;
  bit errored[$];
  always @(posedge clk) cyc <= cyc + 1;

  task automatic load(bit qam16);
    et = enc_tabs(qam16);
    dt = dec_tabs(qam16);
    for (int l = 0; l < 4; l++)
      for (int ad = 0; ad < (1 << EDW[l]); ad++) begin
        @(negedge wclk);
        wr.we = 1; wr.layer = 2'(l); wr.addr = 5'(ad); wr.data = 5'(dt[l][ad]);
      end
    @(negedge wclk) wr = '0;
  endtask

  always @(negedge clk) begin
    if (f_valid) begin
      int ne;
      checks++;
      if (f !== exp_q[0]) begin
        failures++;
        if (failures < 5) $display("mismatch: got %h exp %h", f, exp_q[0]);
      end
      checks++;
      if (cyc - sent_cycle[0] != DEC_LAT) begin
        failures++;
        $display("latency %0d", cyc - sent_cycle[0]);
      end
      ne = $countones(f ^ src_q[0]);
      if (errored[0]) begin
        sum_err += ne;
        n_err_words++;
        if (ne > max_err) max_err = ne;
      end else begin
        checks++;
        if (ne != 0) begin failures++; $display("error-free word decoded wrongly"); end
      end
      void'(exp_q.pop_front()); void'(src_q.pop_front());
      void'(sent_cycle.pop_front()); void'(errored.pop_front());
      n_out++;
    end
  end

  task automatic run(int n);
    logic [K_F-1:0]      w;
    logic [DM_OUT_W-1:0] cw;
    bit                  e;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      for (int b = 0; b < K_F; b++) w[b] = ($urandom_range(999) < 100 * (i % 6));
      cw = model_enc(w, et);
      e  = (i % 3 == 0);
      if (e) cw[$urandom_range(DM_OUT_W - 1)] ^= 1'b1;
      a = cw; a_valid = 1;
      exp_q.push_back(model_dec(cw, dt));
      src_q.push_back(w);
      errored.push_back(e);
      sent_cycle.push_back(cyc);
    end
    @(negedge clk) a_valid = 0;
    repeat (8) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    load(1'b0);
    run(300);
    load(1'b1);
    run(300);
    checks++;
    if (n_out != 600) begin failures++; $display("outputs %0d", n_out); end
    // one amplitude-bit error must stay local: at most the bits of one
    // branch of the hierarchy (3 + 3 + 2 + 1 = 9 here, bounded loosely)
    checks++;
    if (max_err > 16 || n_err_words == 0) begin
      failures++;
      $display("error spread: max %0d over %0d words", max_err, n_err_words);
    end
    $display("single amplitude-bit error: mean %0.2f, max %0d source bit errors",
             real'(sum_err) / n_err_words, max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
