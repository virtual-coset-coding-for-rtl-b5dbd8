// tb_vcc_coset_rom: self-checking test of vcc_coset_rom.
//
// Entries 0..3 must be the four kernels of the worked example; entries
// 4..15 must follow the fill rule (16-bit Galois LFSR, feedback 0xB400,
// seed 0xACE1, seven steps per entry), recomputed here bit by bit; all
// entries must be distinct.
module tb_vcc_coset_rom;
  import vcc_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  kernel_t k [16];
  vcc_coset_rom u_dut (.kernels_o(k));

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [15:0] s;
    #1;
    check(k[0] == 16'b1010100111011011, "R0");
    check(k[1] == 16'b0100011111110100, "R1");
    check(k[2] == 16'b0011001001100011, "R2");
    check(k[3] == 16'b1010110001000111, "R3");
    s = 16'hACE1;
    for (int i = 0; i < 16; i++) begin
      for (int n = 0; n < 7; n++) begin
        bit fb;
        fb = s[0];
        s  = {1'b0, s[15:1]};
        if (fb) s = s ^ 16'hB400;
      end
      if (i >= 4) check(k[i] == s, $sformatf("entry %0d", i));
    end
    for (int i = 0; i < 16; i++)
      for (int j = i + 1; j < 16; j++)
        check(k[i] != k[j], "distinct entries");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
