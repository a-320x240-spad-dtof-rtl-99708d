// tb_pixel_cluster: the cluster TDC with asynchronous pixel pulses.
// A free-running counter stands in for the LFSR. Checks: the value present
// at the rising edge of the first enabled pixel pulse is stored; a later
// pulse of another pixel overwrites it (last photon) and both address bits
// are set; a disabled pixel (vsel=0) does nothing; overlapping pulses give
// one sample; RST clears data and address; counter mode counts edges.
module tb_pixel_cluster;
  logic rst = 1'b0, cnt_mode = 1'b0;
  logic [3:0] pix = '0, vsel = 4'hF;
  logic [5:0] lfsr = '0, data;
  logic [3:0] addr;
  int checks = 0, failures = 0;

  pixel_cluster dut (.rst, .pix, .vsel, .cnt_mode, .lfsr, .data, .addr);

  always #10 lfsr = lfsr + 1'b1;   // 20-unit "gates"

  task automatic chk(logic [5:0] d, logic [3:0] a, string what);
    checks++;
    if (data !== d || addr !== a) begin
      failures++;
      $display("FAIL %s: data %0d addr %b, exp %0d %b", what, data, addr, d, a);
    end
  endtask

  task automatic fire(int p);
    pix[p] = 1'b1; #3 pix[p] = 1'b0;
  endtask

  initial begin
    logic [5:0] v;
    #2 rst = 1'b1; #3 rst = 1'b0;
    chk(0, 4'b0000, "after reset");
    #100; #5;                          // middle of a gate
    v = lfsr; fire(2);
    chk(v, 4'b0100, "first photon");
    #40; v = lfsr; fire(0);
    chk(v, 4'b0101, "second photon overwrites time");
    vsel = 4'b0111; #40; fire(3);
    chk(v, 4'b0101, "disabled pixel ignored");
    vsel = 4'hF;
    #40; v = lfsr;
    pix[1] = 1'b1; #1 pix[3] = 1'b1; #2 pix[1] = 1'b0; #1 pix[3] = 1'b0;
    chk(v, 4'b1111, "overlapping pulses: one sample, both addresses");
    #1 rst = 1'b1; #1 rst = 1'b0;
    chk(0, 4'b0000, "RST clears");
    cnt_mode = 1'b1;
    for (int i = 0; i < 70; i++) begin #4 fire(i % 4); end
    chk(6'(70 % 64), 4'b1111, "counter mode wraps at 64");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
