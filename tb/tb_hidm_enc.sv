// tb_hidm_enc: loads the encoder LUT RAMs with tables from the reference
// model, sends words of various densities (one per clock), and checks every
// output word against the model, the latency of 4 clocks, full throughput,
// and that zero-heavy inputs give lower energy than dense ones. Both 64-QAM
// and 16-QAM layer-1 tables are run.
// Full size (373 -> 404 bits), one data clock, LUT writes on a second clock
// before the run; watchdog after 20000 clocks. The hierarchy and sorting rule
// are the original scheme; the layer sizes and labelling are this design's.
module tb_hidm_enc;
  import cs_pkg::*;
  import tb_cs_model_pkg::*;

  logic clk = 0, wclk = 0, rst = 1;
  always #2 clk = ~clk;
  always #5 wclk = ~wclk;

  logic                f_valid = 0;
  logic [K_F-1:0]      f = '0;
  logic                a_valid;
  logic [DM_OUT_W-1:0] a;
  lut_wr_t             wr = '0;

  hidm_enc dut (.clk, .rst, .f_valid, .f, .a_valid, .a, .wclk, .wr);

  int checks = 0, failures = 0;
  tab_t et;
  logic [DM_OUT_W-1:0] exp_q[$];
  int sent_cycle[$];
  int cyc = 0;
  int n_out = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic load(bit qam16);
    et = enc_tabs(qam16);
    for (int l = 0; l < 4; l++)
      for (int ad = 0; ad < (1 << EAW[l]); ad++) begin
        @(negedge wclk);
        wr.we = 1; wr.layer = 2'(l); wr.addr = 5'(ad); wr.data = 5'(et[l][ad]);
      end
    @(negedge wclk) wr = '0;
  endtask

  function automatic logic [K_F-1:0] rnd_word(int p1000);
    logic [K_F-1:0] w;
    for (int i = 0; i < K_F; i++) w[i] = ($urandom_range(999) < p1000);
    return w;
  endfunction

  // output checker
  always @(negedge clk) begin
    if (a_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        if (a !== exp_q[0]) begin
          failures++;
          if (failures < 5) $display("mismatch: got %h exp %h", a, exp_q[0]);
        end
        checks++;
        if (cyc - sent_cycle[0] != ENC_LAT) begin
          failures++;
          $display("latency %0d", cyc - sent_cycle[0]);
        end
        void'(exp_q.pop_front());
        void'(sent_cycle.pop_front());
        n_out++;
      end
    end
  end

  task automatic run(bit qam16, int n);
    int e_lo, e_hi;
    logic [K_F-1:0] w;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      w = rnd_word((i % 5) * 125);    // densities 0 .. 0.5
      f = w; f_valid = 1;
      exp_q.push_back(model_enc(w, et));
      sent_cycle.push_back(cyc);
    end
    @(negedge clk) f_valid = 0;
    repeat (8) @(negedge clk);
    // energy ordering: an all-zero word gives the minimum energy of all
    e_lo = word_energy(model_enc('0, et), qam16);
    e_hi = word_energy(model_enc(rnd_word(500), et), qam16);
    checks++;
    if (!(e_lo < e_hi)) begin failures++; $display("energy order"); end
    checks++;
    if (e_lo != 101 * (qam16 ? 4 : 2)) begin failures++; $display("min energy %0d", e_lo); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    load(1'b0);
    run(1'b0, 200);
    load(1'b1);
    run(1'b1, 200);
    checks++;
    if (n_out != 400) begin failures++; $display("outputs %0d", n_out); end
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
