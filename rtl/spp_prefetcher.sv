// spp_prefetcher: signature-path prefetcher working on 256-byte DRAM cache
// blocks.
//
// The prefetcher learns, per 4 KiB page, the sequence of block deltas
// between consecutive FAM-bound LLC read misses, compresses that history
// into a signature, and predicts the next deltas from a table indexed by
// the signature.
//
//  * Signature table (ST_ENTRIES entries, direct mapped by page number):
//    page number, last accessed block offset in the page, signature.
//  * Pattern table (PT_ENTRIES entries, indexed by the low signature bits):
//    signature (as tag), signature weight, and DELTAS (delta, weight) pairs.
//  * Global history table (GHR_ENTRIES entries): when a lookahead walk leaves
//    its page, the signature, the offset and the delta are kept here, so that
//    the first miss in the next page starts from a learned signature instead
//    of from zero.
//
// Training (one train_valid/train_ready handshake per miss, one cycle):
//    delta      = offset_now - offset_last                (within the page)
//    signature  = (signature << SIG_SHIFT) ^ enc(delta)   (SIG_BITS wide)
//    pattern table entry of the NEW signature: signature weight + 1 and the
//    weight of this delta + 1 (a new delta replaces the lowest-weight pair).
// Deltas are encoded sign-magnitude, so a positive delta enters the
// signature as its own value (0x2 -> 0x2).
//
// Lookahead (one candidate per cycle on cand_valid/cand_ready): from the new
// signature and the current offset, take the highest-weight delta of the
// pattern table entry, emit the block at offset+delta, fold the delta into a
// speculative signature and repeat, at most DEGREE times, until the table
// has no delta for the signature or the walk leaves the page. done pulses
// when the walk ends; train_ready is low during the walk.
//
// Following the paper: the two tables, their fields, the signature formula
// with a 4-bit shift, four delta/weight pairs per entry, the global history
// table, recursive lookahead, sub-page blocks, training on the node physical
// address. Updating the entry of the newly generated signature follows the
// paper's worked example (its pattern table changes the 0x44222 entry after
// the access that produces signature 0x44222). The table sizes are twice
// those of the original signature-path prefetcher (the paper's "2x"); the
// 12-bit signature, the 4-bit weights with halving on saturation, the degree
// of 4 and the direct-mapped signature table are this design's choices.
module spp_prefetcher
  import fam_pkg::*;
#(
  parameter int unsigned ST_ENTRIES  = 512,
  parameter int unsigned PT_ENTRIES  = 1024,
  parameter int unsigned GHR_ENTRIES = 16,
  parameter int unsigned SIG_BITS    = 12,
  parameter int unsigned SIG_SHIFT   = 4,
  parameter int unsigned DELTAS      = 4,
  parameter int unsigned DEGREE      = 4,
  parameter int unsigned CNT_BITS    = 4,
  parameter int unsigned PG_BLOCKS   = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // training: block number of a FAM-bound LLC read miss
  input  logic                train_valid,
  output logic                train_ready,
  input  blk_t                train_blk,
  // prefetch candidates
  output logic                cand_valid,
  input  logic                cand_ready,
  output blk_t                cand_blk,
  output logic                done,
  // signature produced by the last training access (observation)
  output logic [SIG_BITS-1:0] last_sig
);
  localparam int unsigned OFF_W  = $clog2(PG_BLOCKS);
  localparam int unsigned DLT_W  = OFF_W + 1;              // sign-magnitude delta
  localparam int unsigned PGN_W  = BLK_W - OFF_W;
  localparam int unsigned STI_W  = $clog2(ST_ENTRIES);
  localparam int unsigned PTI_W  = $clog2(PT_ENTRIES);
  localparam int unsigned GHI_W  = $clog2(GHR_ENTRIES);
  localparam int unsigned DIX_W  = $clog2(DELTAS);
  localparam logic [CNT_BITS-1:0] CMAX = '1;

  typedef logic [SIG_BITS-1:0] sig_t;
  typedef logic [DLT_W-1:0]    dlt_t;     // {sign, magnitude}
  typedef logic [OFF_W-1:0]    off_t;

  typedef struct packed {
    logic               valid;
    logic [PGN_W-1:0]   page;
    off_t               last;
    sig_t               sig;
  } st_entry_t;

  typedef struct packed {
    logic               valid;
    sig_t               sig;
    logic [CNT_BITS-1:0] csig;
    dlt_t  [DELTAS-1:0]  dlt;
    logic [DELTAS-1:0][CNT_BITS-1:0] w;
  } pt_entry_t;

  typedef struct packed {
    logic valid;
    sig_t sig;
    off_t off;
    dlt_t dlt;
  } ghr_entry_t;

  st_entry_t  st  [ST_ENTRIES];
  pt_entry_t  pt  [PT_ENTRIES];
  ghr_entry_t ghr [GHR_ENTRIES];
  logic [ST_ENTRIES-1:0] st_valid;
  logic [PT_ENTRIES-1:0] pt_valid;
  logic [GHI_W-1:0]      ghr_wp;

  function automatic sig_t sig_next(sig_t s, dlt_t d);
    return sig_t'((s << SIG_SHIFT) ^ sig_t'(d));
  endfunction

  // ---------------------------------------------------------------- state
  typedef enum logic [0:0] {S_IDLE, S_LOOK} state_e;
  state_e state;
  sig_t   la_sig;            // speculative signature of the walk
  off_t   la_off;            // offset reached by the walk
  logic [PGN_W-1:0] la_page;
  logic [$clog2(DEGREE+1)-1:0] la_cnt;

  assign train_ready = (state == S_IDLE);

  // ---------------------------------------------------------------- training
  logic [PGN_W-1:0] t_page;
  off_t             t_off;
  logic [STI_W-1:0] t_sti;
  st_entry_t        t_st;
  logic             t_st_hit;
  logic signed [OFF_W+1:0] t_diff;
  dlt_t             t_dlt;
  logic             t_dlt_zero;
  sig_t             t_sig_new;     // signature after this access
  logic             t_ghr_hit;
  sig_t             t_ghr_sig;
  logic [PTI_W-1:0] t_pti;
  pt_entry_t        t_pt_old, t_pt_new;
  logic             t_do_pt;
  logic             found, sat;
  logic [DIX_W-1:0] fidx, vidx;

  always_comb begin
    t_page   = train_blk[BLK_W-1:OFF_W];
    t_off    = train_blk[OFF_W-1:0];
    t_sti    = t_page[STI_W-1:0];
    t_st     = st[t_sti];
    t_st_hit = st_valid[t_sti] && (t_st.page == t_page);
    t_diff   = $signed({2'b00, t_off}) - $signed({2'b00, t_st.last});
    t_dlt    = (t_diff < 0) ? {1'b1, OFF_W'(-t_diff)} : {1'b0, OFF_W'(t_diff)};
    t_dlt_zero = (t_diff == 0);

    // global history: a walk that left a page at offset o with delta d
    // predicts the first access of the next page at o + d - PG_BLOCKS
    // (or o - d + PG_BLOCKS going down).
    t_ghr_hit = 1'b0;
    t_ghr_sig = '0;
    for (int g = 0; g < GHR_ENTRIES; g++) begin
      logic [OFF_W+1:0] tgt;
      if (ghr[g].dlt[DLT_W-1])
        tgt = (OFF_W+2)'(ghr[g].off) + (OFF_W+2)'(PG_BLOCKS) - (OFF_W+2)'(ghr[g].dlt[OFF_W-1:0]);
      else
        tgt = (OFF_W+2)'(ghr[g].off) + (OFF_W+2)'(ghr[g].dlt[OFF_W-1:0]) - (OFF_W+2)'(PG_BLOCKS);
      if (!t_ghr_hit && ghr[g].valid && tgt == (OFF_W+2)'(t_off)) begin
        t_ghr_hit = 1'b1;
        t_ghr_sig = sig_next(ghr[g].sig, ghr[g].dlt);
      end
    end

    if (t_st_hit)
      t_sig_new = t_dlt_zero ? t_st.sig : sig_next(t_st.sig, t_dlt);
    else
      t_sig_new = t_ghr_hit ? t_ghr_sig : '0;

    // pattern table update for the new signature
    t_do_pt  = t_st_hit && !t_dlt_zero;
    t_pti    = t_sig_new[PTI_W-1:0];
    t_pt_old = pt[t_pti];
    t_pt_new = t_pt_old;
    found = 1'b0; fidx = '0; vidx = '0; sat = 1'b0;
    if (!pt_valid[t_pti] || t_pt_old.sig != t_sig_new) begin
      t_pt_new        = '0;
      t_pt_new.valid  = 1'b1;
      t_pt_new.sig    = t_sig_new;
      t_pt_new.csig   = CNT_BITS'(1);
      t_pt_new.dlt[0] = t_dlt;
      t_pt_new.w[0]   = CNT_BITS'(1);
    end else begin
      for (int k = 0; k < DELTAS; k++) begin
        if (!found && t_pt_old.w[k] != '0 && t_pt_old.dlt[k] == t_dlt) begin
          found = 1'b1; fidx = DIX_W'(k);
        end
        if (t_pt_old.w[k] < t_pt_old.w[vidx]) vidx = DIX_W'(k);
      end
      sat = (t_pt_old.csig == CMAX) || (found && t_pt_old.w[fidx] == CMAX);
      if (sat) begin
        t_pt_new.csig = t_pt_old.csig >> 1;
        for (int k = 0; k < DELTAS; k++) t_pt_new.w[k] = t_pt_old.w[k] >> 1;
      end
      t_pt_new.csig = t_pt_new.csig + 1'b1;
      if (found) begin
        t_pt_new.w[fidx] = t_pt_new.w[fidx] + 1'b1;
      end else begin
        t_pt_new.dlt[vidx] = t_dlt;
        t_pt_new.w[vidx]   = CNT_BITS'(1);
      end
    end
  end

  // ---------------------------------------------------------------- lookahead
  logic [PTI_W-1:0] l_pti;
  pt_entry_t        l_pt;
  logic             l_have;
  dlt_t             l_dlt;
  logic [OFF_W+1:0] l_tgt;
  logic             l_inpage;

  always_comb begin
    logic [CNT_BITS-1:0] best;
    l_pti  = la_sig[PTI_W-1:0];
    l_pt   = pt[l_pti];
    l_have = 1'b0;
    l_dlt  = '0;
    best   = '0;
    if (pt_valid[l_pti] && l_pt.sig == la_sig) begin
      for (int k = 0; k < DELTAS; k++) begin
        if (l_pt.w[k] > best) begin
          best   = l_pt.w[k];
          l_dlt  = l_pt.dlt[k];
          l_have = 1'b1;
        end
      end
    end
    if (l_dlt[DLT_W-1]) l_tgt = (OFF_W+2)'(la_off) - (OFF_W+2)'(l_dlt[OFF_W-1:0]);
    else                l_tgt = (OFF_W+2)'(la_off) + (OFF_W+2)'(l_dlt[OFF_W-1:0]);
    l_inpage = (l_tgt < (OFF_W+2)'(PG_BLOCKS));   // negative wraps to a large value
  end

  assign cand_valid = (state == S_LOOK) && l_have && l_inpage &&
                      (la_cnt < ($clog2(DEGREE+1))'(DEGREE));
  assign cand_blk   = {la_page, l_tgt[OFF_W-1:0]};

  // ---------------------------------------------------------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      st_valid <= '0;
      pt_valid <= '0;
      ghr_wp   <= '0;
      la_sig   <= '0;
      la_off   <= '0;
      la_page  <= '0;
      la_cnt   <= '0;
      done     <= 1'b0;
      last_sig <= '0;
      for (int g = 0; g < GHR_ENTRIES; g++) ghr[g] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (train_valid) begin
          st_valid[t_sti] <= 1'b1;
          if (t_do_pt) pt_valid[t_pti] <= 1'b1;
          la_sig   <= t_sig_new;
          la_off   <= t_off;
          la_page  <= t_page;
          la_cnt   <= '0;
          last_sig <= t_sig_new;
          state    <= S_LOOK;
        end
        S_LOOK: begin
          if (cand_valid) begin
            if (cand_ready) begin
              la_sig <= sig_next(la_sig, l_dlt);
              la_off <= l_tgt[OFF_W-1:0];
              la_cnt <= la_cnt + 1'b1;
            end
          end else begin
            // walk ends; remember a page-leaving delta for the next page
            if (l_have && !l_inpage && la_cnt < ($clog2(DEGREE+1))'(DEGREE)) begin
              ghr[ghr_wp] <= '{valid: 1'b1, sig: la_sig, off: la_off, dlt: l_dlt};
              ghr_wp      <= ghr_wp + 1'b1;
            end
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // table storage (no reset; valid bits above)
  always_ff @(posedge clk) begin
    if (state == S_IDLE && train_valid) begin
      st[t_sti] <= '{valid: 1'b1, page: t_page, last: t_off, sig: t_sig_new};
      if (t_do_pt) pt[t_pti] <= t_pt_new;
    end
  end
endmodule
