// subgraph_generator: builds the decoding subgraph of a syndrome.
//
// Phase 1 (collect): a priority encoder picks the lowest remaining flipped bit
// of the syndrome each cycle and appends its index to the vertex array; a
// node-to-slot map remembers which vertex slot each flipped bit received. This
// takes one cycle per flipped bit. More than MAX_V flipped bits set
// `overflow` and end the build.
// Phase 2 (edges): for every vertex, its NBR_SLOTS forward-neighbour entries
// are read from the edge table, one per cycle; an entry whose neighbour bit
// is also flipped becomes a subgraph edge {slot, neighbour's slot, weight},
// appended to the edges register. This takes vcount*NBR_SLOTS cycles plus one
// of read latency.
// `done` pulses for one cycle at the end. The published design names this
// block and says its vertex array holds the flipped-bit indices; the two
// phases and their timing are this design's choice. In the published design
// this work overlaps syndrome extraction, so it is not charged to the 960 ns
// decoding budget here either.
module subgraph_generator
  import promatch_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [N_DET-1:0] syndrome,
  // edge table read port
  output logic       et_rd_en,
  output det_idx_t   et_rd_node,
  output logic [$clog2(NBR_SLOTS)-1:0] et_rd_slot,
  input  nbr_entry_t et_rd_data,
  // vertex array
  output det_idx_t   vidx [MAX_V],
  output logic [V_W:0] vcount,
  // edge output toward the edges register
  output logic       push,
  output sub_edge_t  push_edge,
  output logic       overflow,
  output logic       done
);
  localparam int unsigned SW = $clog2(NBR_SLOTS);

  typedef enum logic [1:0] {G_IDLE, G_COLLECT, G_EDGES, G_DRAIN} gstate_e;
  gstate_e state;

  logic [N_DET-1:0] rem;
  vid_t             slot_of [N_DET];
  logic             found;
  det_idx_t         first;

  // lowest set bit of the remaining syndrome
  always_comb begin
    found = 1'b0;
    first = '0;
    for (int k = N_DET - 1; k >= 0; k--) begin
      if (rem[k]) begin
        found = 1'b1;
        first = det_idx_t'(k);
      end
    end
  end

  vid_t           cur_v;
  logic [SW-1:0]  cur_s;
  logic           rd_pend;
  vid_t           pend_v;

  assign et_rd_en   = (state == G_EDGES);
  assign et_rd_node = vidx[cur_v];
  assign et_rd_slot = cur_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= G_IDLE;
      rem      <= '0;
      vcount   <= '0;
      cur_v    <= '0;
      cur_s    <= '0;
      rd_pend  <= 1'b0;
      pend_v   <= '0;
      push     <= 1'b0;
      push_edge <= '0;
      overflow <= 1'b0;
      done     <= 1'b0;
      for (int v = 0; v < MAX_V; v++) vidx[v] <= '0;
    end else begin
      done    <= 1'b0;
      push    <= 1'b0;
      rd_pend <= 1'b0;
      // returned edge-table entry (read issued last cycle)
      if (rd_pend && et_rd_data.valid && syndrome[et_rd_data.nbr]) begin
        push      <= 1'b1;
        push_edge <= '{valid: 1'b1, a: pend_v, b: slot_of[et_rd_data.nbr], w: et_rd_data.w};
      end
      unique case (state)
        G_IDLE: if (start) begin
          rem      <= syndrome;
          vcount   <= '0;
          overflow <= 1'b0;
          state    <= G_COLLECT;
        end
        G_COLLECT: begin
          if (!found) begin
            cur_v <= '0;
            cur_s <= '0;
            state <= (vcount == '0) ? G_DRAIN : G_EDGES;
          end else if (vcount == (V_W+1)'(MAX_V)) begin
            overflow <= 1'b1;
            state    <= G_DRAIN;
          end else begin
            vidx[vcount[V_W-1:0]] <= first;
            rem[first]            <= 1'b0;
            vcount                <= vcount + 1'b1;
          end
        end
        G_EDGES: begin
          rd_pend <= 1'b1;
          pend_v  <= cur_v;
          if (cur_s == SW'(NBR_SLOTS - 1)) begin
            cur_s <= '0;
            if ((V_W+1)'(cur_v) + 1'b1 == vcount) state <= G_DRAIN;
            else cur_v <= cur_v + 1'b1;
          end else begin
            cur_s <= cur_s + 1'b1;
          end
        end
        G_DRAIN: begin
          // wait for the last read and push to land
          if (!rd_pend && !push) begin
            done  <= 1'b1;
            state <= G_IDLE;
          end
        end
        default: state <= G_IDLE;
      endcase
    end
  end

  // node-to-slot map (not reset: written before it is read)
  always_ff @(posedge clk) begin
    if (state == G_COLLECT && found && vcount != (V_W+1)'(MAX_V))
      slot_of[first] <= vcount[V_W-1:0];
  end
endmodule
