// step3_search: Step 3 of Promatch, matching an existing singleton.
//
// A singleton is a live vertex of degree 0. For every singleton j and every
// other live vertex i whose #dependent is 0 (so removing i strands nobody),
// the path-table group of (j,i) is read; the pair with the lowest group wins,
// the first one found on a tie. Reads are issued one per cycle and compared
// one cycle later, so a search over S singletons and V vertices takes S*V
// cycles plus two. It runs beside the edge pipeline, as in the published
// design; the controller uses its result only when Steps 2.1 and 2.2 found
// nothing. `start` samples nothing: the vertex arrays must stay constant until
// `busy` falls. `stop` ends a search early (its partial result is then
// meaningless); a new `start` clears `best`, so a search with no singleton
// leaves `best` empty after two cycles. The result `best` carries j in .a, i in .b and the group,
// zero-extended, in .w.
module step3_search
  import promatch_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  logic      stop,
  input  logic [MAX_V-1:0] alive,
  input  cnt_t      deg [MAX_V],
  input  cnt_t      dep [MAX_V],
  input  det_idx_t  vidx [MAX_V],
  input  logic [V_W:0] vcount,
  // path table read port (1-cycle latency)
  output logic      pt_rd_en,
  output det_idx_t  pt_rd_i,
  output det_idx_t  pt_rd_j,
  input  pcat_t     pt_rd_data,
  output cand_t     best,
  output logic      busy
);
  logic [MAX_V-1:0] single_rem;
  logic             active;
  logic             have_j;
  vid_t             j, i;
  logic             pend, pend_ok;
  vid_t             pend_i, pend_j;
  logic             found;
  vid_t             first;

  always_comb begin
    found = 1'b0;
    first = '0;
    for (int k = MAX_V - 1; k >= 0; k--) begin
      if (single_rem[k]) begin
        found = 1'b1;
        first = vid_t'(k);
      end
    end
  end

  assign pt_rd_en = active && have_j;
  assign pt_rd_i  = vidx[j];
  assign pt_rd_j  = vidx[i];
  assign busy     = active || pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      single_rem <= '0;
      active     <= 1'b0;
      have_j     <= 1'b0;
      j          <= '0;
      i          <= '0;
      pend       <= 1'b0;
      pend_ok    <= 1'b0;
      pend_i     <= '0;
      pend_j     <= '0;
      best       <= '0;
    end else begin
      pend <= 1'b0;
      if (start) begin
        for (int v = 0; v < MAX_V; v++)
          single_rem[v] <= alive[v] && (deg[v] == '0);
        active <= 1'b1;
        have_j <= 1'b0;
        best   <= '0;
      end else if (stop) begin
        active     <= 1'b0;
        have_j     <= 1'b0;
        single_rem <= '0;
      end else if (active) begin
        if (!have_j) begin
          if (found) begin
            j               <= first;
            i               <= '0;
            have_j          <= 1'b1;
            single_rem[first] <= 1'b0;
          end else begin
            active <= 1'b0;
          end
        end else begin
          // read for (j,i) issued this cycle
          pend    <= 1'b1;
          pend_ok <= alive[i] && (i != j) && (dep[i] == '0);
          pend_i  <= i;
          pend_j  <= j;
          if ((V_W+1)'(i) + 1'b1 == vcount) have_j <= 1'b0;
          else i <= i + 1'b1;
        end
      end
      // compare the group returned for last cycle's read
      if (pend && pend_ok && (!best.valid || weight_t'(pt_rd_data) < best.w))
        best <= '{valid: 1'b1, a: pend_j, b: pend_i, w: weight_t'(pt_rd_data)};
    end
  end
endmodule
