// cayley_imc_top: the Cayley-tree in-memory computing platform. A list of
// W-bit elements is held one per non-root node of a Cayley tree of order ETA
// with H levels (defaults: order 2, 3 levels, 4-bit words, i.e. a root and 9
// element nodes, the size of the paper's FPGA realisation). The nodes search
// the list for a key, find its max or min, or sort it, by passing single bits
// between neighbours; no word ever leaves the memory except the answer, which
// appears in the root.
//
// Interface:
//  * load port: we/waddr/wdata/wempty writes node waddr (1..N-1); wempty = 1
//    marks the node as holding no element. waddr = 0 writes the root word.
//    Load only while the platform is idle.
//  * command port: cmd_valid/cmd_ready/cmd/key. CMD_SEARCH answers in
//    found, CMD_MAX and CMD_MIN in result, each with a done pulse.
//    CMD_SORT_DESC / CMD_SORT_ASC stream each distinct value, largest
//    (smallest) first, on rep_valid/rep_value with rep_count = the number of
//    elements equal to it, then pulse done.
// Latencies from the accepting clock edge to done: search W+2H+1 cycles,
// max/min W+H+1, sort 2(W+H+1) per distinct value plus 1.
//
// The tree, nodes and step counts follow the paper; the ports and the count
// of equal elements that accompanies each sorted value are this design's
// (the paper leaves copying the equal elements out to a standard bulk copy).
module cayley_imc_top
  import cayley_pkg::*;
#(
  parameter int unsigned W   = 4,
  parameter int unsigned ETA = 2,
  parameter int unsigned H   = 3,
  localparam int unsigned N  = num_nodes(ETA, H),
  localparam int unsigned AW = $clog2(N),
  localparam int unsigned NW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst,
  // load port
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          wempty,
  // command port
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  imc_cmd_e      cmd,
  input  logic [W-1:0]  key,
  // answers
  output logic          busy,
  output logic          done,
  output logic          found,
  output logic [W-1:0]  result,
  output logic          rep_valid,
  output logic [W-1:0]  rep_value,
  output logic [NW-1:0] rep_count
);

  imc_op_e       op;
  logic          init, run, lock, clr_perm, key_we;
  logic [W-1:0]  key_data;
  logic          root_state;
  logic [W-1:0]  root_word;
  logic [N-1:0]  match_vec, lm_perm_vec;
  logic [NW-1:0] match_count;
  logic          all_locked;

  // number of nodes whose word equals the key of the last search phase 1
  always_comb begin
    match_count = '0;
    for (int i = 1; i < int'(N); i++) match_count = match_count + NW'(match_vec[i]);
  end
  assign all_locked = &lm_perm_vec;

  imc_sequencer #(.W(W), .H(H), .N(N)) u_seq (
    .clk         (clk),
    .rst         (rst),
    .cmd_valid   (cmd_valid),
    .cmd_ready   (cmd_ready),
    .cmd         (cmd),
    .key         (key),
    .busy        (busy),
    .done        (done),
    .found       (found),
    .result      (result),
    .rep_valid   (rep_valid),
    .rep_value   (rep_value),
    .rep_count   (rep_count),
    .op          (op),
    .init        (init),
    .run         (run),
    .lock        (lock),
    .clr_perm    (clr_perm),
    .key_we      (key_we),
    .key_data    (key_data),
    .root_state  (root_state),
    .root_word   (root_word),
    .match_count (match_count),
    .all_locked  (all_locked)
  );

  cayley_tree #(.W(W), .ETA(ETA), .H(H)) u_tree (
    .clk         (clk),
    .rst         (rst),
    .we          (key_we || (we && !busy)),
    .waddr       (key_we ? AW'(0) : waddr),
    .wdata       (key_we ? key_data : wdata),
    .wempty      (wempty),
    .op          (op),
    .init        (init),
    .run         (run),
    .lock        (lock),
    .clr_perm    (clr_perm),
    .root_state  (root_state),
    .root_word   (root_word),
    .match_vec   (match_vec),
    .lm_perm_vec (lm_perm_vec)
  );

endmodule
