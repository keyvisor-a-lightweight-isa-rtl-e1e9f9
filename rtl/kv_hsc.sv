// kv_hsc -- Handle State Cache (HSC) with the handle allowlist.
//
// A WAYS-way set-associative table with SETS sets that keeps, for every
// valid key handle, the part of its policy that changes or must stay secret:
// the 8-bit usage counter and the 64-bit binding ID.  A handle is located by
// its 96-bit IV_handle: the low log2(SETS) bits select the set and the
// remaining bits are the tag stored in, and compared against, every way of
// that set.  Validity is not kept in the table but in a separate
// WAYS*SETS-bit register (bit way*SETS + set), so that revocation only
// clears one flip-flop.  Next to each valid bit sit two kind bits (bound,
// PMP-bound) used by the revoke-by-ID sweep.
//
// Interface and timing:
//  * lookup_i with iv_i: one cycle later rsp_valid_o is high with hit_o,
//    hit_way_o, hit_state_o, hit_kind_o (entry whose tag matches and whose
//    valid bit is set) and free_o / free_way_o (lowest way of the set that
//    is invalid).  The table is read synchronously, as an SRAM would be.
//  * wr_i with wr_iv_i, wr_way_i: writes tag, state and kind, and sets the
//    valid bit to wr_valid_i (0 revokes the entry).
//  * sweep_i with sweep_id_i, sweep_pmp_i: walks all sets, one per cycle
//    (SETS + 3 cycles from sweep_i to sweep_done_o), and clears the valid bit of every
//    valid bound entry whose binding equals the ID and whose kind matches.
//    sweep_done_o pulses at the end; sweep_cnt_o counts revoked entries.
//  Requests are accepted only while busy_o is low.
//
// From the paper: 2 ways x 64 sets, index = IV[5:0], tag = IV[95:6],
// 8-bit counter, 64-bit binding, 128-bit valid register, revocation of all
// handles bound to an ID by walking the HSC entries.  Own choices: the
// kind bits, synchronous read, lowest-free-way allocation and the sweep
// schedule.  The optional swapping of entries to RAM is not built.
module kv_hsc
  import kv_pkg::*;
#(
  parameter int unsigned WAYS = 2,
  parameter int unsigned SETS = 64
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  output logic                     busy_o,
  // lookup
  input  logic                     lookup_i,
  input  logic [IV_W-1:0]          iv_i,
  output logic                     rsp_valid_o,
  output logic                     hit_o,
  output logic [$clog2(WAYS)-1:0]  hit_way_o,
  output hsc_state_t               hit_state_o,
  output hsc_kind_t                hit_kind_o,
  output logic                     free_o,
  output logic [$clog2(WAYS)-1:0]  free_way_o,
  // write / revoke
  input  logic                     wr_i,
  input  logic [IV_W-1:0]          wr_iv_i,
  input  logic [$clog2(WAYS)-1:0]  wr_way_i,
  input  hsc_state_t               wr_state_i,
  input  hsc_kind_t                wr_kind_i,
  input  logic                     wr_valid_i,
  // revoke all handles bound to one ID
  input  logic                     sweep_i,
  input  logic [BIND_W-1:0]        sweep_id_i,
  input  logic                     sweep_pmp_i,
  output logic                     sweep_done_o,
  output logic [$clog2(WAYS*SETS):0] sweep_cnt_o,
  // allowlist, for observation
  output logic [WAYS*SETS-1:0]     valid_o
);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned TAG_W = IV_W - IDX_W;
  localparam int unsigned WAY_W = $clog2(WAYS);

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    hsc_state_t       state;
  } line_t;

  line_t                 mem [WAYS][SETS];
  line_t                 rd_q [WAYS];
  logic [WAYS*SETS-1:0]  valid_q;
  hsc_kind_t             kind_q [WAYS*SETS];

  logic [IDX_W-1:0]      rd_idx, rd_idx_q;
  logic [TAG_W-1:0]      tag_q;
  logic                  lookup_q;

  // sweep state
  logic                  sweeping_q, sweep_rd_q;
  logic [IDX_W:0]        sweep_set_q;
  logic [BIND_W-1:0]     sweep_id_q;
  logic                  sweep_pmp_q;
  logic [$clog2(WAYS*SETS):0] cnt_q;

  assign busy_o = sweeping_q;

  // one shared read port: the sweep or a lookup
  always_comb begin
    if (sweeping_q) rd_idx = sweep_set_q[IDX_W-1:0];
    else            rd_idx = iv_i[IDX_W-1:0];
  end

  always_ff @(posedge clk_i) begin
    for (int w = 0; w < WAYS; w++) rd_q[w] <= mem[w][rd_idx];
    if (wr_i) mem[wr_way_i][wr_iv_i[IDX_W-1:0]] <= '{tag: wr_iv_i[IV_W-1:IDX_W], state: wr_state_i};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      lookup_q <= 1'b0;
      rd_idx_q <= '0;
      tag_q    <= '0;
    end else begin
      lookup_q <= lookup_i && !sweeping_q;
      rd_idx_q <= rd_idx;
      if (lookup_i) tag_q <= iv_i[IV_W-1:IDX_W];
    end
  end

  // ------------------------------------------------------ lookup result
  always_comb begin
    hit_o       = 1'b0;
    hit_way_o   = '0;
    hit_state_o = '0;
    hit_kind_o  = '0;
    free_o      = 1'b0;
    free_way_o  = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (valid_q[w*SETS + int'(rd_idx_q)] && rd_q[w].tag == tag_q) begin
        hit_o       = 1'b1;
        hit_way_o   = WAY_W'(w);
        hit_state_o = rd_q[w].state;
        hit_kind_o  = kind_q[w*SETS + int'(rd_idx_q)];
      end
      if (!valid_q[w*SETS + int'(rd_idx_q)]) begin
        free_o     = 1'b1;
        free_way_o = WAY_W'(w);
      end
    end
  end
  assign rsp_valid_o = lookup_q;

  // ------------------------------------------- valid bits and the sweep
  logic [WAYS-1:0]             sweep_match;
  logic [$clog2(WAYS*SETS):0]  sweep_nmatch;
  always_comb begin
    sweep_nmatch = '0;
    for (int w = 0; w < WAYS; w++) begin
      sweep_match[w] = valid_q[w*SETS + int'(rd_idx_q)] &&
                       kind_q[w*SETS + int'(rd_idx_q)].bound &&
                       kind_q[w*SETS + int'(rd_idx_q)].pmp == sweep_pmp_q &&
                       rd_q[w].state.binding == sweep_id_q;
      sweep_nmatch = sweep_nmatch + {{$clog2(WAYS*SETS){1'b0}}, sweep_match[w]};
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q     <= '0;
      sweeping_q  <= 1'b0;
      sweep_rd_q  <= 1'b0;
      sweep_set_q <= '0;
      sweep_id_q  <= '0;
      sweep_pmp_q <= 1'b0;
      cnt_q       <= '0;
      sweep_done_o <= 1'b0;
      for (int e = 0; e < WAYS*SETS; e++) kind_q[e] <= '0;
    end else begin
      sweep_done_o <= 1'b0;
      if (wr_i) begin
        valid_q[int'(wr_way_i)*SETS + int'(wr_iv_i[IDX_W-1:0])] <= wr_valid_i;
        kind_q [int'(wr_way_i)*SETS + int'(wr_iv_i[IDX_W-1:0])] <= wr_kind_i;
      end
      if (sweep_i && !sweeping_q) begin
        sweeping_q  <= 1'b1;
        sweep_rd_q  <= 1'b0;
        sweep_set_q <= '0;
        sweep_id_q  <= sweep_id_i;
        sweep_pmp_q <= sweep_pmp_i;
        cnt_q       <= '0;
      end else if (sweeping_q) begin
        // set sweep_set_q is being read this cycle; set rd_idx_q was read
        // last cycle and is compared now
        sweep_rd_q <= (sweep_set_q < (IDX_W+1)'(SETS));
        if (sweep_set_q < (IDX_W+1)'(SETS)) sweep_set_q <= sweep_set_q + 1'b1;
        if (sweep_rd_q) begin
          for (int w = 0; w < WAYS; w++)
            if (sweep_match[w]) valid_q[w*SETS + int'(rd_idx_q)] <= 1'b0;
          cnt_q <= cnt_q + sweep_nmatch;
        end
        if (!sweep_rd_q && sweep_set_q == (IDX_W+1)'(SETS)) begin
          sweeping_q   <= 1'b0;
          sweep_done_o <= 1'b1;
        end
      end
    end
  end

  assign sweep_cnt_o = cnt_q;
  assign valid_o     = valid_q;

  // a single entry is written at a time, never during a sweep
  a_no_wr_in_sweep: assert property (@(posedge clk_i) disable iff (!rst_ni) !(wr_i && sweeping_q));
endmodule
