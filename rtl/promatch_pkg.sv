// promatch_pkg: types and constants shared by the Promatch predecoder.
//
// The code distance D sets every size. The decoding graph of one stabilizer
// type has (D*D-1)/2 detectors per round over D+1 rounds; for D=13 that is
// 84*14 = 1176 nodes. This count reproduces the Path Table sizes of the
// published design (1176^2 entries of 2 bits = 345 KB for D=13, 720^2 * 2 bit
// = 129 KB for D=11), which is why it is used here. Subgraph capacities
// (MAX_V flipped bits, MAX_E subgraph edges), the edge-table slot count and the
// weight width are choices of this design; the published design does not
// state them.
// Every module imports the whole package, so a lint of one module reports the
// constants that only other modules use; that is expected.
package promatch_pkg;

  // Code and graph sizes
  parameter int unsigned D          = 13;
  parameter int unsigned DET_PER_RD = (D*D - 1) / 2;      // 84 for D=13
  parameter int unsigned N_DET      = DET_PER_RD * (D + 1); // 1176 for D=13
  parameter int unsigned IDX_W      = $clog2(N_DET);

  // Subgraph capacities (own choice)
  parameter int unsigned MAX_V      = 64;   // flipped bits held in the vertex array
  parameter int unsigned V_W        = $clog2(MAX_V);
  parameter int unsigned MAX_E      = 128;  // subgraph edges held in the edges register
  parameter int unsigned E_W        = $clog2(MAX_E);
  parameter int unsigned NBR_SLOTS  = 8;    // forward-neighbour slots per node in the edge table
  parameter int unsigned CNT_W      = 5;    // width of degree and #dependent counters

  // Weights
  parameter int unsigned W_W        = 8;    // edge weight width
  parameter int unsigned PATH_W     = 2;    // path-table cell: one of four path-weight groups

  // Main decoder and timing
  parameter int unsigned HW_MAIN    = 10;   // main decoder handles HW <= 10
  parameter int unsigned BUDGET_CYC = 240;  // 960 ns at 250 MHz
  parameter int unsigned CYC_W      = 10;

  typedef logic [IDX_W-1:0]  det_idx_t;
  typedef logic [V_W-1:0]    vid_t;
  typedef logic [W_W-1:0]    weight_t;
  typedef logic [CNT_W-1:0]  cnt_t;
  typedef logic [PATH_W-1:0] pcat_t;

  // One edge of the decoding subgraph: two vertex-array slots and the weight.
  typedef struct packed {
    logic    valid;
    vid_t    a;
    vid_t    b;
    weight_t w;
  } sub_edge_t;

  // One entry of the edge table: a forward neighbour and the edge weight.
  typedef struct packed {
    logic     valid;
    det_idx_t nbr;
    weight_t  w;
  } nbr_entry_t;

  // A matching candidate (used for Steps 2.1, 2.2, 3, 4.1, 4.2).
  typedef struct packed {
    logic    valid;
    vid_t    a;
    vid_t    b;
    weight_t w;
  } cand_t;

  // Step classes of the candidate register, in priority order.
  typedef enum logic [1:0] {
    C_S21 = 2'd0,
    C_S22 = 2'd1,
    C_S41 = 2'd2,
    C_S42 = 2'd3
  } cand_class_e;

  // Step through which a pair was matched (reported per round).
  typedef enum logic [2:0] {
    ST_NONE = 3'd0,
    ST_1    = 3'd1,
    ST_21   = 3'd2,
    ST_22   = 3'd3,
    ST_3    = 3'd4,
    ST_41   = 3'd5,
    ST_42   = 3'd6
  } step_e;

endpackage
