// aes_pad_model: behavioural stand-in for the four AES engines of the
// counter-mode encryption unit. NOT AES: each pad is a keyed mixing of the
// 128-bit input block (a few rounds of xorshift-multiply on 64-bit halves),
// deterministic and input-sensitive, which is all the datapath tests need.
// Accepts a request when req_valid && req_ready (always ready) and returns
// the four pads LAT cycles later with a one-cycle rsp_valid.
module aes_pad_model #(
  parameter int unsigned LAT = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [255:0] key,
  input  logic         req_valid,
  output logic         req_ready,
  input  logic [127:0] blk [4],
  output logic         rsp_valid,
  output logic [127:0] pad [4]
);

  function automatic logic [63:0] mix(logic [63:0] v);
    v ^= v >> 33; v *= 64'hff51afd7ed558ccd;
    v ^= v >> 33; v *= 64'hc4ceb9fe1a85ec53;
    v ^= v >> 33;
    return v;
  endfunction

  function automatic logic [127:0] prf(logic [127:0] b, logic [255:0] k);
    logic [63:0] h, l;
    h = b[127:64] ^ k[255:192];
    l = b[63:0]   ^ k[191:128];
    for (int r = 0; r < 3; r++) begin
      h = mix(h ^ l ^ k[127:64]);
      l = mix(l ^ h ^ k[63:0]);
    end
    return {h, l};
  endfunction

  int unsigned cnt;
  logic        busy;

  assign req_ready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= 0;
      rsp_valid <= 1'b0;
      for (int e = 0; e < 4; e++) pad[e] <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (req_valid && !busy) begin
        busy <= 1'b1;
        cnt  <= LAT;
        for (int e = 0; e < 4; e++) pad[e] <= prf(blk[e], key);
      end else if (busy) begin
        if (cnt <= 1) begin
          busy      <= 1'b0;
          rsp_valid <= 1'b1;
        end
        cnt <= cnt - 1;
      end
    end
  end
endmodule
