// cr_sorter - sorting unit of the check-agnosia post-processor.
//
// It holds the reliability delta_c of every check in its own registers
// (captured from the decoder's check-node adders when capture_i is high) and
// then extracts the LAMBDA least reliable checks, in increasing order of
// delta_c, as the paper's sorting unit does: a pipelined comparator tree of
// depth D = ceil(log2 M) is traversed ceil(LAMBDA/2) times, and each pass
// delivers two checks, so the list is complete after exactly
// ceil(LAMBDA/2) * ceil(log2 M) cycles (45 cycles for M = 441, LAMBDA = 10).
//
// Tree: a binary heap over the M leaves (padded to 2^D with empty leaves).
// Every node keeps the two smallest candidates {delta, index} of its subtree
// and merges its children with three comparisons. The D-1 lower tree levels
// are registered; the root is combinational and its two candidates are
// written to the list, and marked as taken, at the last cycle of a pass.
// Taken and padding leaves count as larger than every real check. Equal
// delta values are ordered by increasing check index.
//
// The paper counts |C|-1 comparators for the tree; keeping two minima per
// node, which its cycle count of ceil(LAMBDA/2) passes implies, takes about
// three per node. The cycle count is the paper's; the node circuit is this
// design's choice.
//
// Interface: capture_i (one cycle) loads delta_i and starts sorting; done_o
// rises when list_o / list_delta_o hold the LAMBDA checks and stays high
// until the next capture or abort_i. busy_o is high while sorting.
module cr_sorter
  import ca_pkg::*;
#(
  parameter int unsigned M      = 441,
  parameter int unsigned LAMBDA = 10,
  localparam int unsigned CIW = $clog2(M)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           capture_i,
  input  logic           abort_i,
  input  rel_t           delta_i      [M],
  output logic           busy_o,
  output logic           done_o,
  output logic [CIW-1:0] list_o       [LAMBDA],
  output rel_t           list_delta_o [LAMBDA]
);

  localparam int unsigned D   = $clog2(M);
  localparam int unsigned NP  = 1 << D;
  localparam int unsigned P   = (LAMBDA + 1) / 2;
  localparam int unsigned CW  = (D > 1) ? $clog2(D) : 1;
  localparam int unsigned PW  = (P > 1) ? $clog2(P) : 1;

  typedef struct packed {
    logic           nok;   // 1: empty (taken or padding) candidate
    rel_t           v;
    logic [CIW-1:0] idx;
  } cand_t;

  typedef struct packed {
    cand_t a;              // smallest of the subtree
    cand_t b;              // second smallest
  } node_t;

  typedef enum logic [1:0] {S_IDLE, S_SORT, S_DONE} state_t;

  // Sort key: empty candidates are larger than every real one.
  typedef logic [DW:0] key_t;

  function automatic key_t key(logic nok, rel_t v);
    return {nok, v};
  endfunction

  // x covers lower indices than y, so ties go to x.
  function automatic node_t merge(node_t x, node_t y);
    node_t r;
    if (key(x.a.nok, x.a.v) <= key(y.a.nok, y.a.v)) begin
      r.a = x.a;
      r.b = (key(x.b.nok, x.b.v) <= key(y.a.nok, y.a.v)) ? x.b : y.a;
    end else begin
      r.a = y.a;
      r.b = (key(x.a.nok, x.a.v) <= key(y.b.nok, y.b.v)) ? x.a : y.b;
    end
    return r;
  endfunction

  state_t         state;
  rel_t           dreg  [M];
  logic [M-1:0]   taken;
  logic [CW-1:0]  cyc;
  logic [PW-1:0]  pass;
  node_t          leaf  [NP];
  node_t          src   [2*NP];   // value seen by the parent of heap node j
  node_t          nd    [NP];     // merged value of internal node i (1..NP-1)
  node_t          nq    [NP];     // registered internal nodes (2..NP-1)
  node_t          root;

  for (genvar i = 0; i < NP; i++) begin : g_leaf
    if (i < M) begin : g_real
      assign leaf[i].a = '{nok: taken[i], v: dreg[i], idx: CIW'(i)};
    end else begin : g_pad
      assign leaf[i].a = '{nok: 1'b1, v: '1, idx: '1};
    end
    assign leaf[i].b = '{nok: 1'b1, v: '1, idx: '1};
    assign src[NP + i] = leaf[i];
  end

  assign nd[0]  = '0;
  assign nq[0]  = '0;
  assign nq[1]  = '0;
  assign src[0] = '0;
  assign src[1] = '0;
  for (genvar i = 1; i < NP; i++) begin : g_node
    assign nd[i] = merge(src[2*i], src[2*i+1]);
    if (i >= 2) begin : g_reg
      assign src[i] = nq[i];
      always_ff @(posedge clk) nq[i] <= nd[i];
    end
  end
  assign root = nd[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      taken <= '0;
      cyc   <= '0;
      pass  <= '0;
      for (int k = 0; k < LAMBDA; k++) begin
        list_o[k]       <= '0;
        list_delta_o[k] <= '0;
      end
    end else if (capture_i) begin
      state <= S_SORT;
      dreg  <= delta_i;
      taken <= '0;
      cyc   <= '0;
      pass  <= '0;
    end else if (abort_i) begin
      state <= S_IDLE;
    end else if (state == S_SORT) begin
      if (cyc == CW'(D - 1)) begin
        cyc <= '0;
        list_o[2*pass]       <= root.a.idx;
        list_delta_o[2*pass] <= root.a.v;
        taken[root.a.idx]    <= 1'b1;
        if (2*pass + 1 < LAMBDA) begin
          list_o[2*pass+1]       <= root.b.idx;
          list_delta_o[2*pass+1] <= root.b.v;
          taken[root.b.idx]      <= 1'b1;
        end
        pass <= pass + 1'b1;
        if (pass == PW'(P - 1)) state <= S_DONE;
      end else begin
        cyc <= cyc + 1'b1;
      end
    end
  end

  assign busy_o = (state == S_SORT);
  assign done_o = (state == S_DONE);

  initial assert (LAMBDA >= 1 && LAMBDA <= M) else $error("LAMBDA must lie in 1..M");

endmodule
