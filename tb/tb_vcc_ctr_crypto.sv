// tb_vcc_ctr_crypto: self-checking test of vcc_ctr_crypto.
//
// Random writes and reads go through the unit with the stand-in pad model;
// the engines' request-ready is stalled at random. Checked: the engine
// input blocks are {counter, address, engine index}; a write uses counter+1
// and a read the stored counter; the result is the line XOR the four pads
// in order; decrypting an encrypted line with its new counter returns the
// plaintext; the request reaches the engines one cycle after acceptance and
// the result follows the pads by one cycle; req_ready_o is low while busy.
module tb_vcc_ctr_crypto;
  import vcc_pkg::*;

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

  logic         rv, rr, rw, arv, arr, asv, ov, ow, stall_n;
  logic [31:0]  ra;
  logic [63:0]  rc, oc;
  logic [511:0] rd, od;
  logic [127:0] blk [4];
  logic [127:0] pad [4];
  logic [255:0] key = {8{32'h0badf00d}};
  logic         m_ready;

  vcc_ctr_crypto u_dut (
    .clk, .rst_n, .req_valid_i(rv), .req_ready_o(rr), .req_write_i(rw),
    .req_addr_i(ra), .req_ctr_i(rc), .req_data_i(rd),
    .aes_req_valid_o(arv), .aes_req_ready_i(arr), .aes_blk_o(blk),
    .aes_rsp_valid_i(asv), .aes_pad_i(pad),
    .rsp_valid_o(ov), .rsp_write_o(ow), .rsp_ctr_o(oc), .rsp_data_o(od));

  aes_pad_model #(.LAT(3)) u_aes (
    .clk, .rst_n, .key, .req_valid(arv && stall_n), .req_ready(m_ready),
    .blk, .rsp_valid(asv), .pad);

  assign arr = m_ready && stall_n;

  int stalls = 0;
  always @(negedge clk) begin
    stall_n <= ($urandom % 3) != 0;
    if (arv && !arr) stalls++;
  end

  initial begin
    #500000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit wr, input logic [31:0] a, input logic [63:0] c,
                     input logic [511:0] d, output logic [63:0] c_o,
                     output logic [511:0] d_o);
    logic [127:0] p [4];
    int t_acc, t_aes, t_pad, cyc;
    @(negedge clk);
    check(rr == 1'b1, "ready when idle");
    rv = 1; rw = wr; ra = a; rc = c; rd = d;
    @(negedge clk);
    rv = 0;
    check(rr == 1'b0, "not ready while busy");
    check(arv == 1'b1, "engine request one cycle after accept");
    for (int e = 0; e < 4; e++)
      check(blk[e] == {wr ? c + 64'd1 : c, 30'b0, a, 2'(e)}, "engine input block");
    cyc = 0;
    while (!asv) begin @(negedge clk); cyc++; if (cyc > 100) break; end
    for (int e = 0; e < 4; e++) p[e] = pad[e];
    @(negedge clk);
    check(ov == 1'b1, "result one cycle after the pads");
    check(ow == wr, "write flag");
    check(oc == (wr ? c + 64'd1 : c), "counter");
    check(od == (d ^ {p[0], p[1], p[2], p[3]}), "line xor pads");
    c_o = oc;
    d_o = od;
    @(negedge clk);
    check(ov == 1'b0, "result lasts one cycle");
  endtask

  initial begin
    logic [63:0]  c1, c2;
    logic [511:0] e1, p1;
    rv = 0; rw = 0; ra = '0; rc = '0; rd = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      logic [511:0] pt;
      logic [31:0]  a;
      logic [63:0]  c;
      for (int w = 0; w < 16; w++) pt[32*w +: 32] = $urandom;
      a = $urandom;
      c = {$urandom, $urandom};
      run(1'b1, a, c, pt, c1, e1);
      check(e1 != pt, "ciphertext differs from plaintext");
      run(1'b0, a, c1, e1, c2, p1);
      check(p1 == pt, "decrypt returns plaintext");
      check(c2 == c1, "read keeps counter");
    end
    check(stalls > 0, "engine stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
