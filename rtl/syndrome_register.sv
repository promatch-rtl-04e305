// syndrome_register: the syndrome being predecoded.
//
// Loaded with a fresh syndrome on `load`. When vertices are matched, `kill`
// (a mask over vertex slots) together with the vertex array names the
// syndrome bits to clear; all of them clear in one cycle. The register feeds
// the main decoder and reports its Hamming weight (population count,
// combinational). The published design shows this register between the
// predecoder and the main decoder; its interface is this design's choice.
module syndrome_register
  import promatch_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [N_DET-1:0] syn_in,
  input  logic             kill_en,
  input  logic [MAX_V-1:0] kill,
  input  det_idx_t         vidx [MAX_V],
  output logic [N_DET-1:0] syn,
  output logic [IDX_W:0]   hw
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      syn <= '0;
    end else if (load) begin
      syn <= syn_in;
    end else if (kill_en) begin
      for (int v = 0; v < MAX_V; v++)
        if (kill[v]) syn[vidx[v]] <= 1'b0;
    end
  end

  always_comb begin
    hw = '0;
    for (int k = 0; k < N_DET; k++) hw = hw + (IDX_W+1)'(syn[k]);
  end
endmodule
