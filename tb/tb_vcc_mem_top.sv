// tb_vcc_mem_top: end-to-end test of vcc_mem_top at its default parameters.
//
// A behavioural memory of NA lines holds, per line, the stored code words,
// aux bits, counter and a fault map of stuck cells (about 1% of the bits,
// fixed per line, lines 0 and 1 fault-free); a stuck cell keeps its stored value whatever is written.
// Memory starts with random content. Three phases: MLC with energy first,
// MLC with stuck-at-wrong (SAW) first, SLC with energy first. In each phase
// random write-backs and reads are issued, sometimes together. Checked:
//  - every read of a line whose last write had no SAW cell returns the
//    plaintext written (encrypt, encode, store, decode, decrypt);
//  - the stored counter is the previous one plus one;
//  - each written word matches the reference encoder run on the ciphertext
//    (ciphertext recomputed from the pads the engines produced);
//  - with SAW first, fewer SAW cells in total than writing the unencoded
//    ciphertext would leave;
//  - encoded MLC energy is below unencoded energy;
//  - results follow the engines' pads by 1 cycle (read) and 2 (write).
// Mechanisms that must each happen at least once: write, read, read and
// write arriving together (read first), engine stall, inverted partition,
// kernel other than 0, SAW avoided, SAW remaining, mode switch to SLC, both
// cost orders.
module tb_vcc_mem_top;
  import vcc_pkg::*;
  import vcc_ref_pkg::*;

  localparam int NA = 8;

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

  logic         mlc, sawf;
  logic         wv, wr_rdy, mwv, rv, rd_rdy, lv, arv, arr, asv, stall_n, m_ready;
  logic [31:0]  wa, mwa, ra, la;
  logic [511:0] wl, woc, mwc, rc, ll;
  logic [63:0]  woa, mwx, rx;
  logic [63:0]  woctr, mwctr, rctr;
  logic [575:0] wst;
  logic [127:0] blk [4];
  logic [127:0] pad [4];
  logic [255:0] key = {4{64'h0123456789abcdef}};

  vcc_mem_top u_dut (
    .clk, .rst_n, .mlc_i(mlc), .opt_saw_first_i(sawf),
    .wr_valid_i(wv), .wr_ready_o(wr_rdy), .wr_addr_i(wa), .wr_line_i(wl),
    .wr_old_code_i(woc), .wr_old_aux_i(woa), .wr_old_ctr_i(woctr), .wr_stuck_i(wst),
    .mem_wr_valid_o(mwv), .mem_wr_addr_o(mwa), .mem_wr_code_o(mwc),
    .mem_wr_aux_o(mwx), .mem_wr_ctr_o(mwctr),
    .rd_valid_i(rv), .rd_ready_o(rd_rdy), .rd_addr_i(ra), .rd_code_i(rc),
    .rd_aux_i(rx), .rd_ctr_i(rctr),
    .llc_rd_valid_o(lv), .llc_rd_addr_o(la), .llc_rd_line_o(ll),
    .aes_req_valid_o(arv), .aes_req_ready_i(arr), .aes_blk_o(blk),
    .aes_rsp_valid_i(asv), .aes_pad_i(pad));

  aes_pad_model #(.LAT(5)) u_aes (
    .clk, .rst_n, .key, .req_valid(arv && stall_n), .req_ready(m_ready),
    .blk, .rsp_valid(asv), .pad);
  assign arr = m_ready && stall_n;

  // behavioural memory
  logic [511:0] m_code  [NA];
  logic [63:0]  m_aux   [NA];
  logic [63:0]  m_ctr   [NA];
  logic [575:0] m_stuck [NA];
  logic [511:0] m_plain [NA];
  bit           m_valid [NA];   // written in this phase
  bit           m_clean [NA];   // last write had no SAW cell

  int n_wr, n_rd, n_both, n_stall, n_inv, n_kern, n_saw_avoid, n_saw_left, n_slc, n_sawf, n_ef;
  longint e_enc, e_raw, saw_enc, saw_raw;
  int n_exact;
  logic [127:0] last_pad [4];

  always @(negedge clk) begin
    stall_n <= ($urandom % 4) != 0;
    if (arv && !arr) n_stall++;
  end
  always @(posedge clk) if (asv) for (int e = 0; e < 4; e++) last_pad[e] <= pad[e];

  // latency: with the pads valid in cycle c, a read result is valid in
  // cycle c+1 (pads latched) and a write result in cycle c+2 (then encoded)
  int cyc_now = 0, cyc_pad = -100;
  always @(posedge clk) begin
    cyc_now <= cyc_now + 1;
    if (asv) cyc_pad <= cyc_now;
    if (rst_n && lv)  check(cyc_now - cyc_pad == 1, "read result 1 cycle after the pads");
    if (rst_n && mwv) check(cyc_now - cyc_pad == 2, $sformatf("write result 2 cycles after the pads, got %0d", cyc_now - cyc_pad));
  end

  initial begin
    #5000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [575:0] rand_faults();
    logic [575:0] f;
    for (int b = 0; b < 576; b++) f[b] = ($urandom % 100) == 0;
    return f;
  endfunction

  // complete a write that the controller accepted
  task automatic finish_write(int idx, logic [511:0] plain);
    int cyc;
    logic [511:0] ct;
    logic [575:0] st;
    int saw_lines;
    cyc = 0;
    while (!mwv) begin @(negedge clk); cyc++; if (cyc > 200) break; end
    check(mwv, "write completes");
    check(mwa == 32'(idx * 64), "write address");
    check(mwctr == m_ctr[idx] + 64'd1, "counter incremented");
    ct = plain ^ {last_pad[0], last_pad[1], last_pad[2], last_pad[3]};
    st = m_stuck[idx];
    saw_lines = 0;
    for (int w = 0; w < 8; w++) begin
      logic [63:0] x0;
      logic [7:0]  a0;
      int          b0, e, s, eu, su, sx;
      kern_arr_t   ks, rom;
      if (!mlc) begin
        rom[0] = 16'b1010100111011011; rom[1] = 16'b0100011111110100;
        rom[2] = 16'b0011001001100011; rom[3] = 16'b1010110001000111;
        begin
          logic [15:0] s16;
          s16 = 16'hACE1;
          for (int i = 0; i < 16; i++) begin
            for (int n = 0; n < 7; n++) s16 = s16[0] ? ((s16 >> 1) ^ 16'hB400) : (s16 >> 1);
            if (i >= 4) rom[i] = s16;
          end
        end
        ks = rom;
      end else ks = gen(ct[511-64*w -: 64], 16);
      encode(ct[511-64*w -: 64], m_code[idx][511-64*w -: 64], m_aux[idx][63-8*w -: 8],
             st[575-72*w -: 72], ks, 16, mlc, sawf, x0, a0, b0);
      check(mwc[511-64*w -: 64] == x0, $sformatf("word %0d matches reference", w));
      check(mwx[63-8*w -: 8] == a0, $sformatf("aux %0d matches reference", w));
      if (a0[3:0] != 0) n_inv++;
      if (a0[7:4] != 0) n_kern++;
      // SAW and energy of the chosen word (with aux) and of the raw ciphertext
      cost({16'b0, mwc[511-64*w -: 64]}, {16'b0, m_code[idx][511-64*w -: 64]},
           {8'b0, st[575-72*w -: 72]} >> 8, 64, mlc, e, s);
      begin
        int ea, sa;
        cost({72'b0, mwx[63-8*w -: 8]}, {72'b0, m_aux[idx][63-8*w -: 8]},
             {72'b0, st[575-72*w-64 -: 8]}, 8, mlc, ea, sa);
        e += ea; s += sa;
      end
      cost({16'b0, ct[511-64*w -: 64]}, {16'b0, m_code[idx][511-64*w -: 64]},
           {8'b0, st[575-72*w -: 72]} >> 8, 64, mlc, eu, su);
      if (mlc) begin e_enc += e; e_raw += eu; end
      if (sawf) begin saw_enc += s; saw_raw += su; end
      if (su > 0 && s == 0) n_saw_avoid++;
      if (s > 0) begin n_saw_left++; saw_lines++; end
    end
    // store, stuck cells keep their value
    for (int w = 0; w < 8; w++) begin
      logic [71:0] nw, ow, sk;
      nw = {mwc[511-64*w -: 64], mwx[63-8*w -: 8]};
      ow = {m_code[idx][511-64*w -: 64], m_aux[idx][63-8*w -: 8]};
      sk = st[575-72*w -: 72];
      if (mlc) for (int b = 0; b < 72; b += 2) if (sk[b] || sk[b+1]) sk[b +: 2] = 2'b11;
      nw = (nw & ~sk) | (ow & sk);
      m_code[idx][511-64*w -: 64] = nw[71:8];
      m_aux[idx][63-8*w -: 8]     = nw[7:0];
    end
    m_ctr[idx]   = mwctr;
    m_plain[idx] = plain;
    m_valid[idx] = 1;
    m_clean[idx] = (saw_lines == 0);
    n_wr++;
  endtask

  task automatic finish_read(int idx);
    int cyc;
    cyc = 0;
    while (!lv) begin @(negedge clk); cyc++; if (cyc > 200) break; end
    check(lv, "read completes");
    check(la == 32'(idx * 64), "read address");
    if (m_clean[idx]) begin
      check(ll == m_plain[idx], $sformatf("read back line %0d", idx));
      n_exact++;
    end
    n_rd++;
  endtask

  task automatic drive_read(int idx);
    rv = 1; ra = 32'(idx * 64); rc = m_code[idx]; rx = m_aux[idx]; rctr = m_ctr[idx];
  endtask

  task automatic drive_write(int idx, logic [511:0] plain);
    wv = 1; wa = 32'(idx * 64); wl = plain; woc = m_code[idx]; woa = m_aux[idx];
    woctr = m_ctr[idx]; wst = m_stuck[idx];
  endtask

  initial begin
    wv = 0; rv = 0; mlc = 1; sawf = 0;
    wa = '0; wl = '0; woc = '0; woa = '0; woctr = '0; wst = '0;
    ra = '0; rc = '0; rx = '0; rctr = '0;
    for (int i = 0; i < NA; i++) begin
      for (int w = 0; w < 16; w++) m_code[i][32*w +: 32] = $urandom;
      m_aux[i]   = {$urandom, $urandom};
      m_ctr[i]   = {$urandom, $urandom};
      m_stuck[i] = (i < 2) ? '0 : rand_faults();   // lines 0 and 1 fault-free
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int ph = 0; ph < 3; ph++) begin
      mlc  = (ph != 2);
      sawf = (ph == 1);
      if (!mlc) n_slc++;
      if (sawf) n_sawf++; else n_ef++;
      for (int i = 0; i < NA; i++) m_valid[i] = 0;
      for (int t = 0; t < 40; t++) begin
        int idx, idx2;
        logic [511:0] plain;
        idx = $urandom % NA;
        for (int w = 0; w < 16; w++) plain[32*w +: 32] = $urandom;
        @(negedge clk);
        if (m_valid[idx] && ($urandom % 3 == 0)) begin
          // read and write together: read must go first
          idx2 = (idx + 1) % NA;
          drive_read(idx);
          drive_write(idx2, plain);
          #1 check(rd_rdy && !wr_rdy, "read has priority");
          @(negedge clk);
          rv = 0;
          finish_read(idx);
          n_both++;
          while (!wr_rdy) @(negedge clk);
          woc = m_code[idx2]; woa = m_aux[idx2]; woctr = m_ctr[idx2];
          @(negedge clk);
          wv = 0;
          finish_write(idx2, plain);
        end else if (m_valid[idx] && $urandom % 2 == 0) begin
          drive_read(idx);
          @(negedge clk);
          rv = 0;
          finish_read(idx);
        end else begin
          drive_write(idx, plain);
          @(negedge clk);
          wv = 0;
          finish_write(idx, plain);
        end
      end
    end
    check(n_wr > 0, "writes happened");
    check(n_rd > 0, "reads happened");
    check(n_both > 0, "read/write collision happened");
    check(n_stall > 0, "engine stall happened");
    check(n_inv > 0, "inverted partitions used");
    check(n_kern > 0, "kernel other than 0 chosen");
    check(n_saw_avoid > 0, "SAW cells avoided");
    check(n_saw_left > 0, "SAW cells remaining seen");
    check(n_slc > 0 && n_sawf > 0 && n_ef > 0, "modes and cost orders used");
    check(e_enc < e_raw, "encoding lowers MLC write energy");
    check(saw_enc < saw_raw, "SAW first leaves fewer SAW cells than unencoded");
    check(n_exact > 0, "exact read-backs happened");
    $display("mechanisms: writes=%0d reads=%0d collisions=%0d stalls=%0d inverted_words=%0d kernel_nonzero_words=%0d saw_avoided_words=%0d saw_left_words=%0d",
             n_wr, n_rd, n_both, n_stall, n_inv, n_kern, n_saw_avoid, n_saw_left);
    $display("SAW cells with SAW first: encoded %0d, unencoded %0d; exact read-backs %0d",
             saw_enc, saw_raw, n_exact);
    $display("MLC energy: encoded %0d, unencoded %0d (%0d%% saved)", e_enc, e_raw,
             (e_raw - e_enc) * 100 / e_raw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
