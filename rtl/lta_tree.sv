// lta_tree: Loser-Takes-All tree with indexer.
//
// Finds the smallest of N distances and the index of the row holding it. The tree has
// log2(N) stages of two-input "keep the smaller" nodes; each node carries the index of its
// winner along with the value, which is the index tracking the paper calls the indexer.
// Inputs whose valid bit is low never win (empty CAM rows). On equal values the lower index
// wins. any_valid is low when no input is valid; min_val and min_idx are then 0.
//
// The log2(N)-stage tree and the index tracking follow the paper. In silicon the tree
// compares match-line currents; here it compares integers. The tree is purely
// combinational; the caller registers its result. Tie-breaking is this design's choice.
module lta_tree #(
  parameter int unsigned N  = 128,
  parameter int unsigned W  = 12,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0][W-1:0] val,
  input  logic [N-1:0]        valid,
  output logic [W-1:0]        min_val,
  output logic [IW-1:0]       min_idx,
  output logic                any_valid
);
  localparam int unsigned LV = $clog2(N);        // number of stages
  localparam int unsigned P  = 1 << LV;          // padded leaf count

  // node arrays, level 0 = leaves
  logic [W-1:0]  nv [LV+1][P];
  logic [IW-1:0] ni [LV+1][P];
  logic          nk [LV+1][P];

  always_comb begin
    for (int i = 0; i < P; i++) begin
      nv[0][i] = (i < N) ? val[i]   : '0;
      nk[0][i] = (i < N) ? valid[i] : 1'b0;
      ni[0][i] = IW'(i);
    end
    for (int l = 1; l <= LV; l++) begin
      for (int i = 0; i < P; i++) begin
        nv[l][i] = '0; ni[l][i] = '0; nk[l][i] = 1'b0;
      end
      for (int i = 0; i < (P >> l); i++) begin
        // right child wins only if valid and strictly smaller (or left invalid)
        if (nk[l-1][2*i+1] && (!nk[l-1][2*i] || (nv[l-1][2*i+1] < nv[l-1][2*i]))) begin
          nv[l][i] = nv[l-1][2*i+1]; ni[l][i] = ni[l-1][2*i+1]; nk[l][i] = 1'b1;
        end else begin
          nv[l][i] = nv[l-1][2*i];   ni[l][i] = ni[l-1][2*i];   nk[l][i] = nk[l-1][2*i];
        end
      end
    end
    any_valid = nk[LV][0];
    min_val   = any_valid ? nv[LV][0] : '0;
    min_idx   = any_valid ? ni[LV][0] : '0;
  end
endmodule
