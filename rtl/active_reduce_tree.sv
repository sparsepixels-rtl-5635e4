// active_reduce_tree: finds the leftmost active leaf of a vector, and returns its index and
// the data attached to it, with the recursive binary split used by the sparse input
// reduction.
//
// A vector of N leaves is split into a left part holding the largest power of two below N
// and a right part holding the rest; each part is reduced by a copy of this module and the
// two results are merged by the pairwise combiner "take the left one if it is active,
// otherwise the right one, otherwise nothing". Pairs and single leaves end the recursion,
// so the tree is ceil(log2(N)) combiners deep. Each leaf is one pixel: its activity bit
// (the caller has compared it with the threshold and removed pixels taken in earlier
// passes) and DB bits of data (the pixel's features), which travel up with the index as
// the (value, index) pairs of the published combiner do.
//
// Interface: act[N] and data (leaf j in bits [j*DB +: DB]) in; found, idx (index of the
// leftmost active leaf) and dout (its data) out; idx and dout are 0 if no leaf is active.
// Purely combinational.
//
// Lint note: when this module is linted on its own, as the top, Verilator 5 does not
// expand the copies of the module inside itself. It then reports found_l/found_r,
// idx_l/idx_r and dout_l/dout_r as undriven and act as unused. These signals are driven by
// the u_left/u_right instances. Inside sparse_input_reduce the recursion is expanded and
// none of these warnings appear; the input reduction testbench exercises the tree there.
module active_reduce_tree #(
  parameter int unsigned N     = 8,
  parameter int unsigned IDX_W = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned DB    = 8
) (
  input  logic [N-1:0]    act,
  input  logic [N*DB-1:0] data,
  output logic            found,
  output logic [IDX_W-1:0] idx,
  output logic [DB-1:0]   dout
);

  if (N == 1) begin : g_leaf
    assign found = act[0];
    assign idx   = '0;
    assign dout  = act[0] ? data : '0;
  end else begin : g_split
    // N == 2 splits into two single leaves
    localparam int unsigned NL = 1 << ($clog2(N) - 1);  // largest power of two below N
    localparam int unsigned NR = N - NL;

    logic             found_l, found_r;
    logic [IDX_W-1:0] idx_l, idx_r;
    logic [DB-1:0]    dout_l, dout_r;

    active_reduce_tree #(.N(NL), .IDX_W(IDX_W), .DB(DB)) u_left (
      .act(act[NL-1:0]), .data(data[NL*DB-1:0]), .found(found_l), .idx(idx_l), .dout(dout_l));
    active_reduce_tree #(.N(NR), .IDX_W(IDX_W), .DB(DB)) u_right (
      .act(act[N-1:NL]), .data(data[N*DB-1:NL*DB]), .found(found_r), .idx(idx_r), .dout(dout_r));

    // pairwise combiner on the two subtree results
    always_comb begin
      if (found_l) begin
        found = 1'b1;
        idx   = idx_l;
        dout  = dout_l;
      end else if (found_r) begin
        found = 1'b1;
        idx   = idx_r + IDX_W'(NL);
        dout  = dout_r;
      end else begin
        found = 1'b0;
        idx   = '0;
        dout  = '0;
      end
    end
  end

endmodule
