// neuraltree: single-path (top-down) inference engine of the NeuralTree
// classifier.
//
// The tree is a complete binary tree of N_NODES internal nodes stored in
// heap order (children of node n are 2n+1 and 2n+2) and N_NODES+1 leaves.
// During a feature-extraction window the features of the current node arrive
// one per TDM slot (feat_valid); each is multiplied by the weight of that
// node and slot, read from the parameter memory, and accumulated in a single
// MAC (at most 64 MACs per window). At win_done the comparator tests
//     sum_k f_k * w_k  >  TH * 2^th_shift
// which is the split p = sigmoid(f'w - TH) > 0.5. "Yes" goes to the left
// child, "no" to the right one. When the child is a leaf, its class label is
// read from the decision LUT, class_valid pulses for one clock and the walk
// restarts at the root. The accumulator clears after every decision.
// From the paper: one MAC with a z^-1 accumulator, comparator with TH, node
// address counter, decision LUT, sigmoid split, most-probable-path traversal
// (Fig. 13). This design's own: heap addressing, fixed depth, the left/right
// convention, widths and the threshold shift.
module neuraltree
  import nt_pkg::*;
#(
  parameter int unsigned N_NODES = 15,
  parameter int unsigned FEAT_W  = 16,
  parameter int unsigned W_W     = 12,
  parameter int unsigned TH_W    = 12,
  parameter int unsigned ACC_W   = 48,
  parameter int unsigned CLASS_W = 3
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     feat_valid,
  input  logic signed [FEAT_W-1:0] feat,
  input  logic signed [W_W-1:0]    weight,
  input  logic signed [TH_W-1:0]   th,
  input  logic [4:0]               th_shift,
  input  logic                     win_done,
  output logic [3:0]               node,
  output logic [3:0]               leaf,
  input  logic [CLASS_W-1:0]       leaf_label,
  output logic                     class_valid,
  output logic [CLASS_W-1:0]       class_label,
  output logic                     went_left,   // direction of the last decision
  output logic [6:0]               mac_count    // MACs in the current window
);
  logic signed [ACC_W-1:0] acc;
  logic signed [ACC_W-1:0] th_s;
  logic                    yes;
  logic [4:0]              child;

  always_comb begin
    th_s  = ACC_W'(th) <<< th_shift;
    yes   = acc > th_s;
    child = yes ? 5'({node, 1'b1}) : 5'({node, 1'b0}) + 5'd2;
    leaf  = 4'(child - 5'(N_NODES));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; node <= '0; class_valid <= 1'b0; class_label <= '0;
      went_left <= 1'b0; mac_count <= '0;
    end else begin
      class_valid <= 1'b0;
      if (!en) begin
        acc <= '0; node <= '0; mac_count <= '0;
      end else if (win_done) begin
        went_left <= yes;
        acc       <= '0;
        mac_count <= '0;
        if (child >= 5'(N_NODES)) begin
          class_valid <= 1'b1;
          class_label <= leaf_label;
          node        <= '0;
        end else begin
          node <= child[3:0];
        end
      end else if (feat_valid) begin
        acc       <= acc + ACC_W'(feat) * ACC_W'(weight);
        mac_count <= mac_count + 7'd1;
      end
    end
  end
endmodule
