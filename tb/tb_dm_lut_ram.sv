// tb_dm_lut_ram: writes every entry on the slow write clock, reads them back
// on the fast read clock and checks the registered (one rclk) read timing
// and that a rewrite replaces the entry.
// Write clock 10 ns, read clock 4 ns, AW = DW = 5; watchdog after 5000 read
// clocks. RAM-based LUTs follow the original; the port arrangement is this
// design's.
module tb_dm_lut_ram;
  localparam int AW = 5, DW = 5;
  logic wclk = 0, rclk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [DW-1:0] wdata = '0, rdata;
  always #5 wclk = ~wclk;
  always #2 rclk = ~rclk;

  dm_lut_ram #(.AW(AW), .DW(DW)) dut (.wclk, .we, .waddr, .wdata, .rclk, .raddr, .rdata);

  int checks = 0, failures = 0;
  logic [DW-1:0] model [2**AW];

  task automatic write_all(int salt);
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge wclk);
      we = 1; waddr = AW'(a); wdata = DW'(a * 7 + salt); model[a] = DW'(a * 7 + salt);
    end
    @(negedge wclk) we = 0;
  endtask

  task automatic read_all();
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge rclk) raddr = AW'(a);
      @(negedge rclk);
      checks++;
      if (rdata !== model[a]) begin failures++; $display("addr %0d got %0d", a, rdata); end
    end
  endtask

  initial begin
    write_all(3);
    read_all();
    write_all(11);
    read_all();
    // registered read: the value changes only after a read clock edge
    @(negedge rclk) raddr = 5'd1;
    @(negedge rclk) raddr = 5'd2;
    #1;
    checks++;
    if (rdata !== model[1]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge rclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
