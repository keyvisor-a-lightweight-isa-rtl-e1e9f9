// kv_mem_model -- behavioural model of the L1 data-cache port seen by
// KeyVisor, for testbenches.
//
// Behavioural model, not synthesizable.  A word-addressed RAM of WORDS
// 64-bit words at byte address 0.  A request is accepted when req_ready is
// high (ready is withheld on random cycles when STALLS is set, to exercise
// the handshake; stall_en can switch this at run time); LAT cycles later
// resp_valid pulses, with the read data for
// reads.  Writes honour the byte mask.  Testbenches use the backdoor tasks
// and the mem array directly.
module kv_mem_model #(
  parameter int WORDS  = 4096,
  parameter int LAT    = 2,
  parameter bit STALLS = 1'b1
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        req_valid_i,
  output logic        req_ready_o,
  input  logic [63:0] req_addr_i,
  input  logic        req_we_i,
  input  logic [63:0] req_wdata_i,
  input  logic [7:0]  req_mask_i,
  output logic        resp_valid_o,
  output logic [63:0] resp_rdata_o
);
  logic [63:0] mem [WORDS];
  int          cnt;
  int unsigned nreq;
  logic        pend;
  bit          stall_en = STALLS;   // testbenches may switch stalls off

  initial for (int i = 0; i < WORDS; i++) mem[i] = '0;

  always @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      req_ready_o  <= 1'b0;
      resp_valid_o <= 1'b0;
      resp_rdata_o <= '0;
      pend         <= 1'b0;
      cnt          <= 0;
      nreq         <= 0;
    end else begin
      resp_valid_o <= 1'b0;
      if (req_valid_i && req_ready_o) begin
        int unsigned w;
        w = int'(req_addr_i[3 +: 20]) % WORDS;
        assert (req_addr_i[2:0] == 3'b000) else $error("unaligned access %h", req_addr_i);
        if (req_we_i) begin
          for (int b = 0; b < 8; b++) if (req_mask_i[b]) mem[w][8*b +: 8] = req_wdata_i[8*b +: 8];
        end
        resp_rdata_o <= mem[w];
        pend         <= 1'b1;
        cnt          <= LAT;
        nreq         <= nreq + 1;
        req_ready_o  <= 1'b0;
      end else if (pend) begin
        if (cnt <= 1) begin
          resp_valid_o <= 1'b1;
          pend         <= 1'b0;
          req_ready_o  <= stall_en ? ($urandom_range(0, 3) != 0) : 1'b1;
        end else cnt <= cnt - 1;
      end else begin
        req_ready_o <= stall_en ? ($urandom_range(0, 3) != 0) : 1'b1;
      end
    end
  end

  function automatic logic [7:0] rd_byte(input longint unsigned a);
    return mem[(a >> 3) % WORDS][8*(a % 8) +: 8];
  endfunction
  function automatic void wr_byte(input longint unsigned a, input logic [7:0] v);
    mem[(a >> 3) % WORDS][8*(a % 8) +: 8] = v;
  endfunction
endmodule
