// kv_iv_gen -- collision-free IV generator.
//
// A 96-bit Fibonacci linear feedback shift register with four taps
// (96, 94, 49, 47), the maximal-length tap set for n = 96 from the Xilinx
// LFSR tap table.  The register is shifted once for every IV that is handed
// out (next_i), so an IV can repeat only after 2^96 - 1 requests.  The same
// generator supplies IV_handle for new key handles and IV_data for
// encryptions; the two users never request in the same cycle.
//
// Interface: iv_o shows the current state (the next IV to be used); a
// one-cycle next_i pulse advances it, the new value is visible the cycle
// after.  Reset loads SEED (must be non-zero: the all-zero state is the
// lock-up state of the XOR form).
//
// From the paper: four taps, n = 96, maximal cycle, stepped per IV.  Own
// choices: XOR (not XNOR) feedback, shift direction and the reset seed; a
// production part would seed from the CPU's TRNG.
module kv_iv_gen #(
  parameter int unsigned N    = 96,
  parameter logic [95:0] SEED = 96'h5EED_0C0F_FEE1_DEAD_BEEF_0001
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         next_i,
  output logic [N-1:0] iv_o
);
  logic [N-1:0] lfsr_q;
  logic         fb;

  // taps 96, 94, 49, 47 (1-based)
  assign fb = lfsr_q[N-1] ^ lfsr_q[N-3] ^ lfsr_q[48] ^ lfsr_q[46];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)     lfsr_q <= SEED[N-1:0];
    else if (next_i) lfsr_q <= {lfsr_q[N-2:0], fb};
  end

  assign iv_o = lfsr_q;

  initial assert (N == 96) else $error("kv_iv_gen: tap set is for N = 96");
  // the all-zero state can never be reached from a non-zero seed
  a_nonzero: assert property (@(posedge clk_i) disable iff (!rst_ni) lfsr_q != '0);
endmodule
