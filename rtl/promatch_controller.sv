// promatch_controller: the adaptive predecoding loop of Promatch.
//
// For a syndrome of Hamming weight above HW_MAIN it builds the decoding
// subgraph, then repeats rounds until the coverage check says the main
// decoder can finish the rest in the time left:
//   UPD     refresh degree and #dependent arrays (update_subgraph, 2 cycles)
//   CHECK   coverage test; stop if sufficient, abort if over budget
//   PASS    stream every live subgraph edge through the edge pipeline, one
//           per cycle; Step 3 searches singleton paths beside it
//   DRAIN   wait for the pipeline to empty, and for the Step 3 search only
//           if its result can be used (isolated pairs fall short and Steps
//           2.1 and 2.2 are empty); otherwise the search is stopped
//   SELECT  apply isolated pairs (Step 1), all at once but no more than the
//           coverage target needs; if the weight is still too high, apply the
//           single best remaining candidate in the order Step 2.1, 2.2, 3
//           (only when 2.1 and 2.2 are empty), 4.1, 4.2
// Matched vertices leave the live mask, their edges leave the edges register
// and their bits are cleared in the syndrome register (through `kill`).
// Syndromes of weight <= HW_MAIN bypass the predecoder (`bypass`). More than
// MAX_V flipped bits or MAX_E subgraph edges end the run with `overflow` and
// the syndrome untouched; a run that finds nothing to match ends with `stuck`.
//
// The round structure, the step priorities and the one-pair-per-round rule for
// Steps 2 to 4 follow the published algorithm. Applying only as many isolated
// pairs as needed, the cycle counter starting when the subgraph is ready, and
// the exit flags are this design's choices. The budget counter `elapsed`
// counts cycles from the end of subgraph generation.
//
// The edge count output of the edges register is left open: the controller
// tracks live edges with its own mask. Bit 'valid' of the selected candidate
// is not read, because the step code already says whether one was chosen.
module promatch_controller
  import promatch_pkg::*;
#(
  parameter int unsigned NPAIR = MAX_V / 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,        // syndrome register just loaded
  input  logic [N_DET-1:0] syn,          // syndrome register contents
  input  logic [IDX_W:0]   syn_hw,       // its Hamming weight
  // edge table read port
  output logic             et_rd_en,
  output det_idx_t         et_rd_node,
  output logic [$clog2(NBR_SLOTS)-1:0] et_rd_slot,
  input  nbr_entry_t       et_rd_data,
  // path table read port
  output logic             pt_rd_en,
  output det_idx_t         pt_rd_i,
  output det_idx_t         pt_rd_j,
  input  pcat_t            pt_rd_data,
  // syndrome modification
  output logic             kill_en,
  output logic [MAX_V-1:0] kill,
  output det_idx_t         vidx [MAX_V],
  // result
  output logic             done,
  output logic             busy,
  output logic             bypass,
  output logic             overflow,
  output logic             aborted,
  output logic             stuck,
  output logic [CYC_W-1:0] elapsed,
  output logic [7:0]       rounds,
  output logic [15:0]      pm_weight,    // summed weight of the prematched pairs
  output det_idx_t         m_a [NPAIR],  // prematched pairs (syndrome indices)
  output det_idx_t         m_b [NPAIR],
  output step_e            m_step [NPAIR],
  output logic [$clog2(NPAIR+1)-1:0] m_count
);
  typedef enum logic [2:0] {S_IDLE, S_GEN, S_UPD, S_CHECK, S_PASS, S_DRAIN, S_SELECT, S_DONE} state_e;
  state_e state;

  // ---------------- subgraph generation and storage ----------------
  logic       gen_start, gen_push, gen_ovf, gen_done;
  sub_edge_t  gen_edge;
  logic [V_W:0] vcount;
  sub_edge_t  edges [MAX_E];
  sub_edge_t  rd_edge;
  logic       e_ovf;
  logic [E_W-1:0] rd_idx;

  subgraph_generator u_gen (
    .clk, .rst_n, .start(gen_start), .syndrome(syn),
    .et_rd_en, .et_rd_node, .et_rd_slot, .et_rd_data,
    .vidx, .vcount, .push(gen_push), .push_edge(gen_edge),
    .overflow(gen_ovf), .done(gen_done));

  edges_register u_er (
    .clk, .rst_n, .clear(gen_start), .push(gen_push), .push_edge(gen_edge),
    .kill_en, .kill, .rd_idx, .rd_edge, .edges, .count(), .overflow(e_ovf));

  logic upd_start, upd_done;
  cnt_t deg [MAX_V];
  cnt_t dep [MAX_V];

  update_subgraph u_upd (
    .clk, .rst_n, .start(upd_start), .edges, .deg, .dep, .done(upd_done));

  // ---------------- edge pipeline and Step 3 ----------------
  logic      pipe_clear, pipe_in_valid, pipe_busy;
  cand_t     cand [4];
  vid_t      iso_a [MAX_V/2];
  vid_t      iso_b [MAX_V/2];
  weight_t   iso_w [MAX_V/2];
  logic [$clog2(MAX_V/2+1)-1:0] iso_count;

  edge_pipeline u_pipe (
    .clk, .rst_n, .clear(pipe_clear), .in_valid(pipe_in_valid), .in_edge(rd_edge),
    .deg, .dep, .cand, .iso_a, .iso_b, .iso_w, .iso_count, .busy(pipe_busy));

  logic [MAX_V-1:0] alive;
  logic      s3_start, s3_stop, s3_busy, s3_needed;
  cand_t     s3_best;

  step3_search u_s3 (
    .clk, .rst_n, .start(s3_start), .stop(s3_stop), .alive, .deg, .dep, .vidx, .vcount,
    .pt_rd_en, .pt_rd_i, .pt_rd_j, .pt_rd_data, .best(s3_best), .busy(s3_busy));

  // ---------------- coverage ----------------
  logic [IDX_W:0] hw_cur, target_hw;
  logic           sufficient, over_budget;

  coverage_check u_cov (
    .hw(hw_cur), .elapsed, .target_hw, .sufficient, .over_budget);

  // ---------------- pass sequencing: live edges only ----------------
  logic [MAX_E-1:0] pend_e;
  logic             e_found;
  logic [E_W-1:0]   e_first;

  always_comb begin
    e_found = 1'b0;
    e_first = '0;
    for (int k = MAX_E - 1; k >= 0; k--) begin
      if (pend_e[k]) begin
        e_found = 1'b1;
        e_first = E_W'(k);
      end
    end
  end

  assign rd_idx        = e_first;
  assign pipe_in_valid = (state == S_PASS) && e_found;

  // ---------------- selection (combinational) ----------------
  logic [MAX_V-1:0] sel_kill;
  logic [$clog2(MAX_V/2+1)-1:0] k_iso;
  logic [IDX_W:0]   hw_after;
  logic             one_valid;
  cand_t            one;
  step_e            one_step;
  logic [15:0]      sel_w;

  always_comb begin
    logic [IDX_W:0] excess;
    sel_kill  = '0;
    sel_w     = '0;
    one_valid = 1'b0;
    one       = '0;
    one_step  = ST_NONE;
    excess    = (hw_cur > target_hw) ? hw_cur - target_hw : '0;
    // isolated pairs needed: ceil(excess / 2), capped by what exists
    if ((excess + 1'b1) >> 1 < (IDX_W+1)'(iso_count))
      k_iso = ($clog2(MAX_V/2+1))'((excess + 1'b1) >> 1);
    else
      k_iso = iso_count;
    for (int p = 0; p < MAX_V/2; p++) begin
      if (p < int'(k_iso)) begin
        sel_kill[iso_a[p]] = 1'b1;
        sel_kill[iso_b[p]] = 1'b1;
        sel_w              = sel_w + 16'(iso_w[p]);
      end
    end
    hw_after = hw_cur - (IDX_W+1)'({k_iso, 1'b0});
    // the Step 3 result matters only if isolated pairs do not suffice and
    // Steps 2.1 and 2.2 found nothing
    s3_needed = (hw_after > target_hw) && !cand[C_S21].valid && !cand[C_S22].valid;
    if (hw_after > target_hw) begin
      if (cand[C_S21].valid)      begin one = cand[C_S21]; one_step = ST_21; end
      else if (cand[C_S22].valid) begin one = cand[C_S22]; one_step = ST_22; end
      else if (s3_best.valid)     begin one = s3_best;     one_step = ST_3;  end
      else if (cand[C_S41].valid) begin one = cand[C_S41]; one_step = ST_41; end
      else if (cand[C_S42].valid) begin one = cand[C_S42]; one_step = ST_42; end
      one_valid = (one_step != ST_NONE);
      if (one_valid) begin
        sel_kill[one.a] = 1'b1;
        sel_kill[one.b] = 1'b1;
        sel_w           = sel_w + 16'(one.w);
        hw_after        = hw_after - (IDX_W+1)'(2);
      end
    end
  end

  // candidate stores are emptied in CHECK, the cycle before a pass starts
  assign pipe_clear = (state == S_CHECK);
  assign s3_stop    = (state == S_SELECT);
  assign kill_en = (state == S_SELECT) && (sel_kill != '0);
  assign kill    = sel_kill;
  assign busy    = (state != S_IDLE);

  // ---------------- main FSM ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      gen_start  <= 1'b0;
      upd_start  <= 1'b0;
      s3_start   <= 1'b0;
      done       <= 1'b0;
      bypass     <= 1'b0;
      overflow   <= 1'b0;
      aborted      <= 1'b0;
      stuck      <= 1'b0;
      elapsed    <= '0;
      rounds     <= '0;
      pm_weight  <= '0;
      hw_cur     <= '0;
      alive      <= '0;
      pend_e     <= '0;
      m_count    <= '0;
      for (int p = 0; p < NPAIR; p++) begin
        m_a[p]    <= '0;
        m_b[p]    <= '0;
        m_step[p] <= ST_NONE;
      end
    end else begin
      gen_start  <= 1'b0;
      upd_start  <= 1'b0;
      s3_start   <= 1'b0;
      done       <= 1'b0;
      if (state != S_IDLE && state != S_GEN && state != S_DONE && elapsed != '1)
        elapsed <= elapsed + 1'b1;

      unique case (state)
        S_IDLE: if (start) begin
          bypass    <= 1'b0;
          overflow  <= 1'b0;
          aborted     <= 1'b0;
          stuck     <= 1'b0;
          elapsed   <= '0;
          rounds    <= '0;
          pm_weight <= '0;
          m_count   <= '0;
          hw_cur    <= syn_hw;
          if (syn_hw <= (IDX_W+1)'(HW_MAIN)) begin
            bypass <= 1'b1;
            state  <= S_DONE;
          end else begin
            gen_start <= 1'b1;
            state     <= S_GEN;
          end
        end
        S_GEN: if (gen_done) begin
          if (gen_ovf || e_ovf) begin
            overflow <= 1'b1;
            state    <= S_DONE;
          end else begin
            for (int v = 0; v < MAX_V; v++) alive[v] <= (v < int'(vcount));
            upd_start <= 1'b1;
            state     <= S_UPD;
          end
        end
        S_UPD: if (upd_done) state <= S_CHECK;
        S_CHECK: begin
          if (over_budget) begin
            aborted <= 1'b1;
            state <= S_DONE;
          end else if (sufficient) begin
            state <= S_DONE;
          end else begin
            s3_start   <= 1'b1;
            for (int e = 0; e < MAX_E; e++) pend_e[e] <= edges[e].valid;
            rounds     <= rounds + 1'b1;
            state      <= S_PASS;
          end
        end
        S_PASS: begin
          if (e_found) pend_e[e_first] <= 1'b0;
          else         state <= S_DRAIN;
        end
        // wait for the Step 3 search only when its result can be used
        S_DRAIN: if (!pipe_busy && !s3_start && (!s3_busy || !s3_needed)) state <= S_SELECT;
        S_SELECT: begin
          if (sel_kill == '0) begin
            stuck <= 1'b1;
            state <= S_DONE;
          end else begin
            alive     <= alive & ~sel_kill;
            hw_cur    <= hw_after;
            pm_weight <= pm_weight + sel_w;
            for (int p = 0; p < MAX_V/2; p++) begin
              if (p < int'(k_iso)) begin
                m_a[int'(m_count) + p]    <= vidx[iso_a[p]];
                m_b[int'(m_count) + p]    <= vidx[iso_b[p]];
                m_step[int'(m_count) + p] <= ST_1;
              end
            end
            if (one_valid) begin
              m_a[int'(m_count) + int'(k_iso)]    <= vidx[one.a];
              m_b[int'(m_count) + int'(k_iso)]    <= vidx[one.b];
              m_step[int'(m_count) + int'(k_iso)] <= one_step;
            end
            m_count   <= m_count + k_iso + ($clog2(NPAIR+1))'(one_valid);
            upd_start <= 1'b1;
            state     <= S_UPD;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
