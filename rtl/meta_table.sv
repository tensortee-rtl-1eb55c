// meta_table: the CPU-side Meta Table of TenAnalyzer.
//
// Each valid entry describes one detected tensor as a run of cachelines
// starting at `base`, `stride` lines apart, `len` lines long (`last` is kept
// alongside so that no multiplier is needed), with one version number and one
// tensor MAC shared by all its lines, plus the write-tracking flags UF/BS.
//
// Lookup (combinational, two independent ports: one for core requests, one
// for metadata queries from the transfer protocol) classifies an address as
//   hit_in       base <= va <= last and (va-base)/64 is a multiple of stride
//   hit_boundary va == last + stride*64 (the next line the stream would touch)
//   miss         neither
// The lowest-numbered matching entry wins; hit_in beats hit_boundary.
// `lk_first` / `lk_last` flag the tensor's edges for the write dataflow.
//
// Updates, one per clock, in priority order:
//   inval  clear entry inval_idx (an assertion of the write flow failed);
//   wr     overwrite entry wr_idx with wr_entry (extend, UF/BS/VN updates);
//   ins    insert ins_entry. Valid entries that overlap its range are dropped
//          (a transfer descriptor supersedes partial detections). Then the
//          RECENT most recently inserted entries are tried for a merge: an
//          entry with the same stride and VN, not updating and with the same
//          BS, that ends one stride before the new run or starts one stride
//          after it absorbs it (the two 1-D merge directions; the tensor
//          MACs, XORs of line MACs, are XORed together). Otherwise the
//          lowest free entry, or a round-robin victim, is written.
// Only power-of-two strides are tracked (the alignment test is a mask).
// The source's 2-D / 3-D tile merging with inferred dimensions is not built.
module meta_table #(
  parameter int unsigned ENTRIES = 512,
  parameter int unsigned RECENT  = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // lookup port (core requests)
  input  tee_pkg::addr_t        lk_va,
  output tee_pkg::lookup_e      lk_res,
  output logic [$clog2(ENTRIES)-1:0] lk_idx,
  output tee_pkg::meta_entry_t  lk_entry,
  output logic                  lk_first,
  output logic                  lk_last,
  // query port (transfer protocol): entry that holds q_va as a line
  input  tee_pkg::addr_t        q_va,
  output logic                  q_hit,
  output tee_pkg::meta_entry_t  q_entry,
  // updates
  input  logic                  inval,
  input  logic [$clog2(ENTRIES)-1:0] inval_idx,
  input  logic                  wr,
  input  logic [$clog2(ENTRIES)-1:0] wr_idx,
  input  tee_pkg::meta_entry_t  wr_entry,
  input  logic                  ins,
  input  tee_pkg::meta_entry_t  ins_entry,
  output logic                  ins_merged,     // pulse: last insert merged
  output logic [$clog2(ENTRIES)-1:0] ins_idx_o, // entry written by last insert
  output logic [$clog2(ENTRIES+1)-1:0] n_valid
);
  import tee_pkg::*;
  localparam int unsigned IW = $clog2(ENTRIES);

  meta_entry_t tab [ENTRIES];
  logic [IW-1:0] recent_q [RECENT];
  logic [IW-1:0] rr_q;

  function automatic logic in_range(input meta_entry_t e, input addr_t va);
    addr_t off;
    off = (va - e.base) >> LINE_SH;
    return e.valid && va >= e.base && va <= e.last && va[LINE_SH-1:0] == '0 &&
           ((off & addr_t'(e.stride - 1'b1)) == '0);
  endfunction

  function automatic addr_t step(input meta_entry_t e);
    return addr_t'(e.stride) << LINE_SH;
  endfunction

  // ------------------------------------------------------------ lookup --
  always_comb begin
    logic found_in, found_b;
    logic [IW-1:0] i_in, i_b;
    found_in = 1'b0; found_b = 1'b0; i_in = '0; i_b = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (in_range(tab[i], lk_va)) begin found_in = 1'b1; i_in = IW'(i); end
      if (tab[i].valid && lk_va == tab[i].last + step(tab[i])) begin found_b = 1'b1; i_b = IW'(i); end
    end
    lk_res   = found_in ? LK_HIT_IN : (found_b ? LK_HIT_BND : LK_MISS);
    lk_idx   = found_in ? i_in : i_b;
    lk_entry = tab[lk_idx];
    lk_first = found_in && lk_va == tab[i_in].base;
    lk_last  = found_in && lk_va == tab[i_in].last;
  end

  always_comb begin
    logic [IW-1:0] qi;
    q_hit = 1'b0; qi = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (in_range(tab[i], q_va)) begin q_hit = 1'b1; qi = IW'(i); end
    q_entry = tab[qi];
  end

  // ------------------------------------------------------- insert plan --
  logic            free_found;
  logic [IW-1:0]   free_idx;
  logic [ENTRIES-1:0] overlap;
  logic            mrg_lo, mrg_hi;    // merge below / above a recent entry
  logic [IW-1:0]   mrg_idx;
  meta_entry_t     new_e;

  always_comb begin
    free_found = 1'b0; free_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      overlap[i] = tab[i].valid && tab[i].base <= ins_entry.last && ins_entry.base <= tab[i].last;
      if (!tab[i].valid) begin free_found = 1'b1; free_idx = IW'(i); end
    end
    mrg_lo = 1'b0; mrg_hi = 1'b0; mrg_idx = '0;
    for (int r = RECENT - 1; r >= 0; r--) begin
      meta_entry_t e;
      e = tab[recent_q[r]];
      if (e.valid && !overlap[recent_q[r]] && !e.uf && !ins_entry.uf && e.bs == ins_entry.bs &&
          e.stride == ins_entry.stride && e.vn == ins_entry.vn) begin
        if (e.last + step(e) == ins_entry.base) begin
          mrg_lo = 1'b1; mrg_hi = 1'b0; mrg_idx = recent_q[r];
        end else if (ins_entry.last + step(ins_entry) == e.base) begin
          mrg_hi = 1'b1; mrg_lo = 1'b0; mrg_idx = recent_q[r];
        end
      end
    end
    new_e = tab[mrg_idx];
    if (mrg_lo) begin
      new_e.last = ins_entry.last;
      new_e.len  = new_e.len + ins_entry.len;
      new_e.mac  = new_e.mac ^ ins_entry.mac;
    end else if (mrg_hi) begin
      new_e.base = ins_entry.base;
      new_e.len  = new_e.len + ins_entry.len;
      new_e.mac  = new_e.mac ^ ins_entry.mac;
    end else begin
      new_e = ins_entry;
      new_e.valid = 1'b1;
    end
  end

  logic [IW-1:0] tgt;
  assign tgt = (mrg_lo || mrg_hi) ? mrg_idx : (free_found ? free_idx : rr_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) tab[i] <= '0;
      for (int r = 0; r < RECENT; r++) recent_q[r] <= IW'(r);
      rr_q       <= '0;
      ins_merged <= 1'b0;
      ins_idx_o  <= '0;
    end else begin
      ins_merged <= 1'b0;
      if (inval) begin
        tab[inval_idx].valid <= 1'b0;
      end else if (wr) begin
        tab[wr_idx] <= wr_entry;
      end else if (ins) begin
        for (int i = 0; i < ENTRIES; i++)
          if (overlap[i]) tab[i].valid <= 1'b0;
        tab[tgt]   <= new_e;
        ins_merged <= mrg_lo || mrg_hi;
        ins_idx_o  <= tgt;
        if (!(mrg_lo || mrg_hi) && !free_found) rr_q <= rr_q + 1'b1;
        recent_q[0] <= tgt;
        for (int r = 1; r < RECENT; r++) recent_q[r] <= recent_q[r-1];
      end
    end
  end

  always_comb begin
    n_valid = '0;
    for (int i = 0; i < ENTRIES; i++) n_valid = n_valid + tab[i].valid;
  end

endmodule
