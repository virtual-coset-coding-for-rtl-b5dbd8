// tb_vcc_unit: self-checking test of vcc_unit (512-bit lines, 8 words).
//
// Random lines with random stored content and stuck cells are encoded in
// both cell modes and cost orders. Each word must match the reference
// encoder, with kernels generated from the encrypted word (MLC) or taken
// from the ROM (SLC); enc_valid_o must follow enc_valid_i after exactly one
// cycle and last one cycle. The encoded line is then fed to the decode path,
// which must return the encrypted line one cycle later, while the encode
// inputs already carry a different line.
module tb_vcc_unit;
  import vcc_pkg::*;
  import vcc_ref_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         mlc, sawf, ev, dv, evo, dvo;
  logic [511:0] ed_keep;
  logic [511:0] ed, eo, code, dc, dd;
  logic [63:0]  eoa, aux, da;
  logic [575:0] est;

  vcc_unit u_dut (
    .clk, .rst_n, .mlc_i(mlc), .opt_saw_first_i(sawf),
    .enc_valid_i(ev), .enc_data_i(ed), .enc_old_i(eo), .enc_old_aux_i(eoa),
    .enc_stuck_i(est), .enc_valid_o(evo), .enc_code_o(code), .enc_aux_o(aux),
    .dec_valid_i(dv), .dec_code_i(dc), .dec_aux_i(da), .dec_valid_o(dvo),
    .dec_data_o(dd));

  kern_arr_t rom;
  kernel_t   rom_k [16];
  vcc_coset_rom u_rom (.kernels_o(rom_k));   // the ROM itself is checked in its own test

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ev = 0; dv = 0; mlc = 0; sawf = 0;
    ed = '0; eo = '0; eoa = '0; est = '0; dc = '0; da = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) rom[i] = rom_k[i];
    for (int t = 0; t < 40; t++) begin
      mlc  = t[0];
      sawf = t[1];
      @(negedge clk);
      for (int w = 0; w < 16; w++) begin
        ed[32*w +: 32] = $urandom;
        eo[32*w +: 32] = $urandom;
      end
      for (int w = 0; w < 2; w++) eoa[32*w +: 32] = $urandom;
      for (int w = 0; w < 18; w++) est[32*w +: 32] = $urandom & $urandom & $urandom;
      ev = 1;
      @(negedge clk);
      ev = 0;
      check(evo == 1'b1, "encode latency one cycle");
      for (int w = 0; w < 8; w++) begin
        logic [63:0] rx;
        logic [7:0]  ra;
        int          rb;
        kern_arr_t   ks;
        ks = mlc ? gen(ed[511-64*w -: 64], 16) : rom;
        encode(ed[511-64*w -: 64], eo[511-64*w -: 64], eoa[63-8*w -: 8],
               est[575-72*w -: 72], ks, 16, mlc, sawf, rx, ra, rb);
        check(code[511-64*w -: 64] == rx, $sformatf("t=%0d word %0d code", t, w));
        check(aux[63-8*w -: 8] == ra, $sformatf("t=%0d word %0d aux", t, w));
      end
      dc = code;
      da = aux;
      ed_keep = ed;
      for (int w = 0; w < 16; w++) ed[32*w +: 32] = $urandom;   // encode side moves on
      dv = 1;
      @(negedge clk);
      dv = 0;
      check(evo == 1'b0, "encode valid lasts one cycle");
      check(dvo == 1'b1, "decode latency one cycle");
      check(dd == ed_keep, $sformatf("t=%0d decode round trip", t));
      @(negedge clk);
      check(dvo == 1'b0, "decode valid lasts one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
