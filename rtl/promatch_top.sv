// promatch_top: Promatch adaptive predecoder in front of a real-time MWPM
// main decoder, optionally raced against Astrea-G.
//
// Data flow. A syndrome (N_DET bits, all d+1 rounds of one stabilizer type)
// is loaded into the syndrome register with `syn_valid`. If its Hamming
// weight is at most HW_MAIN it goes straight to the main decoder. Otherwise
// the controller builds the decoding subgraph from the edge table and
// prematches pairs of flipped bits round by round until the main decoder can
// finish the rest within the time budget; each prematch clears two bits of
// the syndrome register. When predecoding ends, `md_valid` pulses and
// `md_syndrome` / `md_hw` hold the (possibly modified) syndrome for the main
// decoder, and the prematched pairs are listed on `pm_a`/`pm_b`.
//
// The main decoder (Astrea) and Astrea-G are external: the main decoder
// returns the weight of its matching on `md_done`/`md_weight`, Astrea-G its
// own complete solution weight on `ag_valid`/`ag_weight`. The top adds the
// prematch weight to the main decoder's weight and `sel_valid`/`sel_use_ag`
// report which solution wins. The Promatch side counts as failed when the
// main decoder fails or the predecoder overflowed or ran out of time. If
// Astrea-G is not used, tie `ag_valid` high with `ag_fail` set.
//
// Tables. The edge table and the path table are written through their load
// ports before decoding (`et_wr_*`, `pt_wr_*`); they hold the decoding graph,
// which is fixed for a given code and noise model.
//
// Timing. `ready` is high when a new syndrome may be loaded. A bypassed
// syndrome reaches the main decoder 3 cycles after `syn_valid`; otherwise the
// subgraph build takes about HW + HW*NBR_SLOTS cycles and every round takes
// (live edges + 8) cycles, or more when Step 3 searches a longer list.
module promatch_top
  import promatch_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // table load ports
  input  logic             et_wr_en,
  input  det_idx_t         et_wr_node,
  input  logic [$clog2(NBR_SLOTS)-1:0] et_wr_slot,
  input  nbr_entry_t       et_wr_data,
  input  logic             pt_wr_en,
  input  det_idx_t         pt_wr_i,
  input  det_idx_t         pt_wr_j,
  input  pcat_t            pt_wr_data,
  // syndrome input
  input  logic             syn_valid,
  input  logic [N_DET-1:0] syn_in,
  output logic             ready,
  // toward the main decoder
  output logic             md_valid,
  output logic [N_DET-1:0] md_syndrome,
  output logic [IDX_W:0]   md_hw,
  output logic             pm_bypass,
  output logic             pm_overflow,
  output logic             pm_aborted,
  output logic             pm_stuck,
  output logic [CYC_W-1:0] pm_cycles,
  output logic [7:0]       pm_rounds,
  output det_idx_t         pm_a [MAX_V/2],
  output det_idx_t         pm_b [MAX_V/2],
  output step_e            pm_step [MAX_V/2],
  output logic [$clog2(MAX_V/2+1)-1:0] pm_count,
  // from the main decoder
  input  logic             md_done,
  input  logic             md_fail,
  input  logic [15:0]      md_weight,
  // from Astrea-G
  input  logic             ag_valid,
  input  logic             ag_fail,
  input  logic [15:0]      ag_weight,
  // final choice
  output logic             sel_valid,
  output logic             sel_use_ag
);
  logic                   load_q;
  logic                   et_rd_en, pt_rd_en;
  det_idx_t               et_rd_node, pt_rd_i, pt_rd_j;
  logic [$clog2(NBR_SLOTS)-1:0] et_rd_slot;
  nbr_entry_t             et_rd_data;
  pcat_t                  pt_rd_data;
  logic                   kill_en;
  logic [MAX_V-1:0]       kill;
  det_idx_t               vidx [MAX_V];
  logic                   pm_done, pm_busy;
  logic [15:0]            pm_weight;

  edge_table u_et (
    .clk, .wr_en(et_wr_en), .wr_node(et_wr_node), .wr_slot(et_wr_slot), .wr_data(et_wr_data),
    .rd_en(et_rd_en), .rd_node(et_rd_node), .rd_slot(et_rd_slot), .rd_data(et_rd_data));

  path_table u_pt (
    .clk, .wr_en(pt_wr_en), .wr_i(pt_wr_i), .wr_j(pt_wr_j), .wr_data(pt_wr_data),
    .rd_en(pt_rd_en), .rd_i(pt_rd_i), .rd_j(pt_rd_j), .rd_data(pt_rd_data));

  syndrome_register u_syn (
    .clk, .rst_n, .load(syn_valid && ready), .syn_in,
    .kill_en, .kill, .vidx, .syn(md_syndrome), .hw(md_hw));

  // the controller starts one cycle after the load, when the register holds it
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) load_q <= 1'b0;
    else        load_q <= syn_valid && ready;
  end

  promatch_controller u_ctl (
    .clk, .rst_n, .start(load_q), .syn(md_syndrome), .syn_hw(md_hw),
    .et_rd_en, .et_rd_node, .et_rd_slot, .et_rd_data,
    .pt_rd_en, .pt_rd_i, .pt_rd_j, .pt_rd_data,
    .kill_en, .kill, .vidx,
    .done(pm_done), .busy(pm_busy), .bypass(pm_bypass), .overflow(pm_overflow),
    .aborted(pm_aborted), .stuck(pm_stuck), .elapsed(pm_cycles), .rounds(pm_rounds),
    .pm_weight, .m_a(pm_a), .m_b(pm_b), .m_step(pm_step), .m_count(pm_count));

  assign ready    = !pm_busy && !load_q;
  assign md_valid = pm_done;

  solution_select #(.TW(16)) u_sel (
    .clk, .rst_n,
    .pm_valid(md_done), .pm_fail(md_fail || pm_aborted || pm_overflow), .pm_weight(pm_weight + md_weight),
    .ag_valid, .ag_fail, .ag_weight,
    .sel_valid, .use_ag(sel_use_ag));
endmodule
