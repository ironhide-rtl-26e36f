// home_table: local-homing table of the shared last-level cache.
//
// The shared L2 is physically split into one slice per tile. Instead of
// hashing every page over all slices, each page is homed on exactly one
// slice ("local homing"), and a page of a cluster may only be homed on a tile
// of that same cluster; so one cluster's data never sits in, or travels to, a
// slice of the other. The table has PG_PER_REGION entries per DRAM region,
// indexed by {region, low page-number bits}; the owner cluster of an entry is
// the owner of its region.
//
//  * lookup: lookup_addr -> lookup_home / lookup_hit, combinational.
//  * set:    set_valid with an entry index and a home tile. Refused
//            (set_err, one cycle) when the tile is not in the page owner's
//            cluster under the current binding.
//  * re-home: remap_start with the mask of re-allocated tiles and the new
//            secure-tile mask. The table walks all entries, one per cycle;
//            for each page homed on a re-allocated tile it first unmaps it
//            (unmap_valid until unmap_ack: the old home slice writes the
//            page's dirty lines back to memory), then gives it a new home,
//            round-robin over the tiles of the page owner's cluster in the new
//            binding, or leaves it unmapped when that cluster has no tiles.
//            remap_done pulses at the end.
// The unmap/set-home/remap order is the described page re-allocation; the
// table size, indexing and round-robin choice of the new home are this
// design's own.
module home_table
  import ih_pkg::*;
#(
  parameter int unsigned PG_PER_REGION = 64,
  parameter int unsigned NT            = NUM_TILES,
  localparam int unsigned PAGES = PG_PER_REGION * NUM_REGIONS,
  localparam int unsigned PGW   = $clog2(PAGES),
  localparam int unsigned LPW   = $clog2(PG_PER_REGION),
  localparam int unsigned HW    = $clog2(NT)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NT-1:0]          secure_core_mask,
  input  logic [NUM_REGIONS-1:0] secure_region_mask,
  // lookup
  input  logic [PADDR_W-1:0]     lookup_addr,
  output logic [HW-1:0]          lookup_home,
  output logic                   lookup_hit,
  // set home of one page
  input  logic                   set_valid,
  input  logic [PGW-1:0]         set_idx,
  input  logic [HW-1:0]          set_home,
  output logic                   set_err,
  // re-home the pages of re-allocated tiles
  input  logic                   remap_start,
  input  logic [NT-1:0]          moved_mask,
  input  logic [NT-1:0]          new_secure_mask,
  output logic                   remap_busy,
  output logic                   remap_done,
  output logic                   unmap_valid,
  output logic [PADDR_W-1:0]     unmap_addr,
  output logic [HW-1:0]          unmap_home,
  input  logic                   unmap_ack
);

  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_UNMAP} state_e;

  logic [HW-1:0]    home_q  [PAGES];
  logic [PAGES-1:0] valid_q;
  state_e           state_q;
  logic [PGW-1:0]   i_q;
  logic [NT-1:0]    moved_q, newm_q;
  logic [HW-1:0]    rr_q [2];         // next candidate per cluster

  logic [PGW-1:0]   lk_idx;
  logic             own_sec;          // owner cluster of entry i_q
  logic [HW-1:0]    cand;
  logic             cand_ok;

  function automatic logic [PGW-1:0] index_of(input logic [PADDR_W-1:0] a);
    return {region_of(a), a[PAGE_BITS +: LPW]};
  endfunction

  assign lk_idx      = index_of(lookup_addr);
  assign lookup_home = home_q[lk_idx];
  assign lookup_hit  = valid_q[lk_idx];

  assign set_err = set_valid &&
                   (secure_core_mask[set_home] != secure_region_mask[set_idx[PGW-1 -: RW]]);

  assign own_sec     = secure_region_mask[i_q[PGW-1 -: RW]];
  assign remap_busy  = (state_q != S_IDLE);
  assign unmap_valid = (state_q == S_UNMAP);
  assign unmap_home  = home_q[i_q];
  always_comb begin
    unmap_addr = '0;
    unmap_addr[PADDR_W-1 -: RW]   = i_q[PGW-1 -: RW];
    unmap_addr[PAGE_BITS +: LPW]  = i_q[LPW-1:0];
  end

  // Next tile of the owner cluster in the new binding, from its pointer on.
  logic [31:0] t;  // candidate tile index
  always_comb begin
    t       = 0;
    cand    = '0;
    cand_ok = 1'b0;
    for (int k = 0; k < int'(NT); k++) begin
      t = (int'(rr_q[own_sec]) + k) % int'(NT);
      if (!cand_ok && newm_q[t] == own_sec) begin
        cand    = HW'(t);
        cand_ok = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q    <= '0;
      state_q    <= S_IDLE;
      i_q        <= '0;
      moved_q    <= '0;
      newm_q     <= '0;
      rr_q[0]    <= '0;
      rr_q[1]    <= '0;
      remap_done <= 1'b0;
      for (int p = 0; p < int'(PAGES); p++) home_q[p] <= '0;
    end else begin
      remap_done <= 1'b0;
      case (state_q)
        S_IDLE: begin
          if (set_valid && !set_err) begin
            home_q[set_idx]  <= set_home;
            valid_q[set_idx] <= 1'b1;
          end
          if (remap_start) begin
            moved_q <= moved_mask;
            newm_q  <= new_secure_mask;
            i_q     <= '0;
            state_q <= S_SCAN;
          end
        end
        S_SCAN: begin
          if (valid_q[i_q] && moved_q[home_q[i_q]]) state_q <= S_UNMAP;
          else if (int'(i_q) == int'(PAGES) - 1) begin
            remap_done <= 1'b1;
            state_q    <= S_IDLE;
          end else i_q <= i_q + 1'b1;
        end
        S_UNMAP: if (unmap_ack) begin
          valid_q[i_q] <= cand_ok;
          home_q[i_q]  <= cand;
          if (cand_ok) rr_q[own_sec] <= (int'(cand) == int'(NT) - 1) ? '0 : cand + 1'b1;
          if (int'(i_q) == int'(PAGES) - 1) begin
            remap_done <= 1'b1;
            state_q    <= S_IDLE;
          end else begin
            i_q     <= i_q + 1'b1;
            state_q <= S_SCAN;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
