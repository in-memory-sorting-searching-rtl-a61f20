// imc_sequencer: drives the broadcast controls of the Cayley tree for one
// command at a time: a search, a max, a min, or a sort (descending through
// repeated max, ascending through repeated min).
//
// Every operation is: one init cycle (the flag reset of the paper), then a
// fixed number of run cycles, one time step each, then one cycle in which the
// answer is taken from the root. The run lengths follow from the one-level-
// per-clock movement of bits in the tree (W word bits, H levels):
//   search        W + 2H - 1 run steps  -> W + 2H + 1 cycles with init and result
//   max / min     W + H - 1  run steps  -> W + H + 1 cycles (the paper's w+h+1)
//   search ph. 1  W + H - 1  run steps  (the last key bit reaches the leaves)
// Sorting repeats Phase A (max or min into the root) and Phase B (search
// phase 1 with the root's word as the key, then a lock cycle that disables
// for good the memory link of every matching node and reports the value and
// the number of matching nodes). One round takes 2(W+H+1) cycles: the
// paper's w+h+1 per phase, with its flag reset being the init cycle that
// opens each phase. The loop ends at the init of a Phase A that finds every
// memory link disabled, so an all-empty tree reports nothing.
//
// Handshake: a command is taken when cmd_valid and cmd_ready are both high
// (cmd_ready = not busy). On acceptance the permanent link flags are reloaded
// from the empty flags (clr_perm) and, for a search, the key is written to the
// root. done is high for one cycle, the result cycle; found and result show
// the answer from that cycle on and hold it until the next one. During a sort
// rep_valid pulses once per distinct value with rep_value and rep_count.
//
// The step counts and the phase order are the paper's (Procedure 5); the
// command encoding, the handshake, reporting after Phase B (so that the count
// of equal elements comes with the value) and the end test are this design's.
module imc_sequencer
  import cayley_pkg::*;
#(
  parameter int unsigned W   = 4,
  parameter int unsigned H   = 3,
  parameter int unsigned N   = 10,
  localparam int unsigned NW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst,
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
  output logic [NW-1:0] rep_count,
  // tree controls
  output imc_op_e       op,
  output logic          init,
  output logic          run,
  output logic          lock,
  output logic          clr_perm,
  output logic          key_we,
  output logic [W-1:0]  key_data,
  // tree status
  input  logic          root_state,
  input  logic [W-1:0]  root_word,
  input  logic [NW-1:0] match_count,
  input  logic          all_locked
);

  localparam int unsigned SEARCH_STEPS = W + 2 * H - 1;
  localparam int unsigned PASS_STEPS   = W + H - 1;
  localparam int unsigned SW           = $clog2(SEARCH_STEPS + 1);

  typedef enum logic [2:0] {
    S_IDLE,
    S_INIT,
    S_RUN,
    S_FIN,
    S_LOCK
  } seq_state_e;

  seq_state_e    st;
  logic [SW-1:0] step;
  logic          sorting;
  imc_op_e       pass_op;      // OP_MAX or OP_MIN while sorting
  logic [SW-1:0] last_step;
  logic          accept;
  logic          found_q;
  logic [W-1:0]  result_q;
  logic          sort_end;     // Phase A init finds every memory link disabled
  logic          fin_last;     // result cycle of a search, max or min

  assign cmd_ready = (st == S_IDLE);
  assign busy      = (st != S_IDLE);
  assign accept    = cmd_valid && cmd_ready;

  assign sort_end  = (st == S_INIT) && sorting && (op != OP_IDENT) && all_locked;
  assign fin_last  = (st == S_FIN) && !(sorting && op != OP_SEARCH);
  assign init      = (st == S_INIT) && !sort_end;
  assign done      = sort_end || fin_last;
  assign found     = (fin_last && op == OP_SEARCH) ? root_state : found_q;
  assign result    = (fin_last && op != OP_SEARCH) ? root_word  : result_q;
  assign run       = (st == S_RUN);
  assign lock      = (st == S_LOCK);
  assign clr_perm  = accept;
  assign key_we    = accept && (cmd == CMD_SEARCH);
  assign key_data  = key;

  assign rep_valid = (st == S_LOCK);
  assign rep_value = root_word;
  assign rep_count = match_count;

  assign last_step = (op == OP_SEARCH) ? SW'(SEARCH_STEPS - 1) : SW'(PASS_STEPS - 1);

  always_ff @(posedge clk) begin
    if (rst) begin
      st      <= S_IDLE;
      step    <= '0;
      sorting <= 1'b0;
      pass_op <= OP_MAX;
      op      <= OP_IDLE;
      found_q <= 1'b0;
      result_q <= '0;
    end else begin
      unique case (st)
        S_IDLE: begin
          if (accept) begin
            st <= S_INIT;
            unique case (cmd)
              CMD_SEARCH:    begin op <= OP_SEARCH; sorting <= 1'b0; end
              CMD_MAX:       begin op <= OP_MAX;    sorting <= 1'b0; end
              CMD_MIN:       begin op <= OP_MIN;    sorting <= 1'b0; end
              CMD_SORT_DESC: begin op <= OP_MAX;    sorting <= 1'b1; pass_op <= OP_MAX; end
              CMD_SORT_ASC:  begin op <= OP_MIN;    sorting <= 1'b1; pass_op <= OP_MIN; end
              default:       st <= S_IDLE;
            endcase
          end
        end
        S_INIT: begin
          if (sort_end) begin
            // every element has been reported
            st   <= S_IDLE;
            op   <= OP_IDLE;
          end else begin
            st   <= S_RUN;
            step <= '0;
          end
        end
        S_RUN: begin
          step <= step + SW'(1);
          if (step == last_step) st <= (op == OP_IDENT) ? S_LOCK : S_FIN;
        end
        S_FIN: begin
          if (op == OP_SEARCH) begin
            found_q <= root_state;
            st    <= S_IDLE;
            op    <= OP_IDLE;
          end else if (sorting) begin
            // Phase B: find the nodes that hold the value now in the root
            op <= OP_IDENT;
            st <= S_INIT;
          end else begin
            result_q <= root_word;
            st     <= S_IDLE;
            op     <= OP_IDLE;
          end
        end
        S_LOCK: begin
          // next Phase A
          op <= pass_op;
          st <= S_INIT;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // The tree takes one kind of control at a time.
  assert property (@(posedge clk) disable iff (rst) $onehot0({init, run, lock}))
    else $error("imc_sequencer: more than one tree control active");
  // Commands are only taken when idle.
  assert property (@(posedge clk) disable iff (rst) accept |-> st == S_IDLE)
    else $error("imc_sequencer: command accepted while busy");

endmodule
