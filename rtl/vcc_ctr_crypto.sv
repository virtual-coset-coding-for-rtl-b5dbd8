// vcc_ctr_crypto: counter-mode encryption/decryption unit for 512-bit lines.
//
// Each line has a counter stored next to it in memory. On a write the
// counter is incremented by one and the new value is used; on a read the
// stored value is used. Four AES engines (outside this module) each turn one
// 128-bit input block {counter, line address, engine index} into a 128-bit
// pad under the secret key; the four pads cover the line (engine e covers
// line[511-128e -: 128]) and are XORed with it. Because the counter changes
// on every write, a pad is never reused for the same address. Encryption and
// decryption are the same XOR. The packing of the engine input block and the
// counter and address widths are this design's choices.
//
// Protocol: a request is taken when req_valid_i && req_ready_o. The unit then
// raises aes_req_valid_o until aes_req_ready_i, waits for aes_rsp_valid_i,
// and shows the result on rsp_* for one cycle (rsp_valid_o). One request is
// in flight at a time; req_ready_o is high only when idle. The latency is
// therefore 3 cycles plus the engines' latency.
module vcc_ctr_crypto
  import vcc_pkg::*;
#(
  parameter int unsigned CTR_W  = 64,
  parameter int unsigned ADDR_W = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // request
  input  logic                 req_valid_i,
  output logic                 req_ready_o,
  input  logic                 req_write_i,   // 1: encrypt a write-back
  input  logic [ADDR_W-1:0]    req_addr_i,
  input  logic [CTR_W-1:0]     req_ctr_i,     // counter stored with the line
  input  logic [LINE_BITS-1:0] req_data_i,
  // AES engines
  output logic                 aes_req_valid_o,
  input  logic                 aes_req_ready_i,
  output logic [PAD_BITS-1:0]  aes_blk_o [N_ENGINES],
  input  logic                 aes_rsp_valid_i,
  input  logic [PAD_BITS-1:0]  aes_pad_i [N_ENGINES],
  // result
  output logic                 rsp_valid_o,
  output logic                 rsp_write_o,
  output logic [CTR_W-1:0]     rsp_ctr_o,     // counter to store (writes)
  output logic [LINE_BITS-1:0] rsp_data_o
);

  localparam int unsigned EW = $clog2(N_ENGINES);
  localparam int unsigned AFW = PAD_BITS - CTR_W - EW;   // address field

  initial begin
    assert (ADDR_W <= AFW) else $error("vcc_ctr_crypto: address does not fit the AES block");
  end

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT, S_DONE} state_t;
  state_t state_q;

  logic                 write_q;
  logic [ADDR_W-1:0]    addr_q;
  logic [CTR_W-1:0]     ctr_q;
  logic [LINE_BITS-1:0] data_q;

  assign req_ready_o     = (state_q == S_IDLE);
  assign aes_req_valid_o = (state_q == S_REQ);
  assign rsp_valid_o     = (state_q == S_DONE);
  assign rsp_write_o     = write_q;
  assign rsp_ctr_o       = ctr_q;
  assign rsp_data_o      = data_q;

  always_comb begin
    for (int e = 0; e < int'(N_ENGINES); e++)
      aes_blk_o[e] = {ctr_q, AFW'(addr_q), EW'(e)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      write_q <= 1'b0;
      addr_q  <= '0;
      ctr_q   <= '0;
      data_q  <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (req_valid_i) begin
          write_q <= req_write_i;
          addr_q  <= req_addr_i;
          ctr_q   <= req_write_i ? req_ctr_i + 1'b1 : req_ctr_i;
          data_q  <= req_data_i;
          state_q <= S_REQ;
        end
        S_REQ:  if (aes_req_ready_i) state_q <= S_WAIT;
        S_WAIT: if (aes_rsp_valid_i) begin
          for (int e = 0; e < int'(N_ENGINES); e++)
            data_q[LINE_BITS-1-e*PAD_BITS -: PAD_BITS] <=
              data_q[LINE_BITS-1-e*PAD_BITS -: PAD_BITS] ^ aes_pad_i[e];
          state_q <= S_DONE;
        end
        S_DONE: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Pads arrive only for a request that was issued.
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    aes_rsp_valid_i |-> state_q == S_WAIT);

endmodule
