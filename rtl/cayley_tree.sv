// cayley_tree: a finite Cayley tree of order ETA with H levels, built from one
// imc_root and N-1 imc_node instances, N = 1 + (ETA+1)(1 + ETA + ... +
// ETA^(H-2)) (the paper's Proposition 1; 10 nodes for ETA = 2, H = 3).
//
// Nodes are numbered breadth first (cayley_pkg). Each node drives one state
// bit; a node reads its parent's bit and its children's bits, and nothing
// else moves between nodes. Leaves (level H-1) see 0 on their child inputs.
// The control bundle (op, init, run, lock, clr_perm) is broadcast to every
// node, as the paper's platform schematic broadcasts its clock, reset and flag
// inputs. Words are loaded through one write port: waddr = 0 writes the root
// (the search key), waddr = i writes node i together with its "empty" flag.
//
// Outputs: the root's state (the search answer) and word (the max or min),
// and per node its match flag and its permanent memory-link flag. Index 0 of
// those vectors is the root, which has neither flag; it reads 0 and 1.
//
// The tree shape follows the paper. The single write port, the empty flags
// and the breadth-first numbering are this design's choices.
module cayley_tree
  import cayley_pkg::*;
#(
  parameter int unsigned W   = 4,
  parameter int unsigned ETA = 2,
  parameter int unsigned H   = 3,
  localparam int unsigned N  = num_nodes(ETA, H),
  localparam int unsigned AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          wempty,
  input  imc_op_e       op,
  input  logic          init,
  input  logic          run,
  input  logic          lock,
  input  logic          clr_perm,
  output logic          root_state,
  output logic [W-1:0]  root_word,
  output logic [N-1:0]  match_vec,
  output logic [N-1:0]  lm_perm_vec
);

  logic [N-1:0] st;

  initial begin
    assert (H >= 2) else $error("cayley_tree needs at least two levels");
    assert (ETA >= 1) else $error("cayley_tree needs order >= 1");
  end

  // ---------------------------------------------------------------------
  // Root
  // ---------------------------------------------------------------------
  logic [ETA:0] root_kids;
  for (genvar c = 0; c <= ETA; c++) begin : g_root_kids
    assign root_kids[c] = st[1 + c];
  end

  imc_root #(.W(W), .ETA(ETA)) u_root (
    .clk         (clk),
    .rst         (rst),
    .we          (we && waddr == AW'(0)),
    .wdata       (wdata),
    .op          (op),
    .init        (init),
    .run         (run),
    .child_state (root_kids),
    .state       (st[0]),
    .word        (root_word)
  );

  assign root_state   = st[0];
  assign match_vec[0] = 1'b0;
  assign lm_perm_vec[0] = 1'b1;

  // ---------------------------------------------------------------------
  // Non-root nodes
  // ---------------------------------------------------------------------
  for (genvar i = 1; i < N; i++) begin : g_node
    localparam int unsigned LV   = node_level(ETA, H, i);
    localparam bit          LEAF = (LV == H - 1);
    localparam int unsigned PAR  = parent_index(ETA, H, i);

    logic [ETA-1:0] kids;
    for (genvar c = 0; c < ETA; c++) begin : g_kid
      if (LEAF) begin : g_none
        assign kids[c] = 1'b0;
      end else begin : g_link
        assign kids[c] = st[child_index(ETA, H, i, c)];
      end
    end

    imc_node #(.W(W), .ETA(ETA), .IS_LEAF(LEAF)) u_node (
      .clk         (clk),
      .rst         (rst),
      .we          (we && waddr == AW'(i)),
      .wdata       (wdata),
      .wempty      (wempty),
      .op          (op),
      .init        (init),
      .run         (run),
      .lock        (lock),
      .clr_perm    (clr_perm),
      .par_state   (st[PAR]),
      .child_state (kids),
      .state       (st[i]),
      .match       (match_vec[i]),
      .lm_perm     (lm_perm_vec[i])
    );
  end

endmodule
