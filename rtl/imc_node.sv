// imc_node: one non-root node of the Cayley tree (an intermediate node, or a
// leaf when IS_LEAF = 1). It is a memory word with a few flags and a bit-serial
// processing element; it talks to its neighbours only through one-bit state
// links.
//
// Flags: state (the bit this node shows its neighbours), start (the initiate
// signal has been seen), match (the word still equals the key so far), one link
// flag l_c per child and the memory link l_m (1 = input ignored). l_m also has a
// permanent copy, lm_perm, which the sorting loop sets for nodes whose value
// has been reported; the per-operation reset (init) never clears it.
//
// Operations, chosen by the broadcast op code and stepped once per clock while
// run is high, one step being one "time step" of the paper:
//  * OP_SEARCH / OP_IDENT (receive-search and send-search). After the initiate
//    bit from the parent the node copies the parent's state for W steps, so the
//    key streams past it MSB first one level per clock, and clears match at the
//    first bit that differs from its word. That is phase 1; OP_IDENT stops
//    there. In phase 2 (OP_SEARCH only) state = match OR (states of the
//    children), after which match is cleared, so a match climbs one level per
//    clock towards the root.
//  * OP_MAX / OP_MIN (receive-max and send-max). A leaf starts with state = 1
//    as the initiate signal, then sends the MSB of its word each step and
//    rotates the word left. An intermediate node copies the initiate, then
//    each step forms the OR (max) or AND (min) of the bits of its enabled
//    children and, if l_m = 0, of its own MSB, shows it as state and rotates
//    its word. An enabled input whose bit differs from that result gets its
//    link flag set and is ignored for the rest of the operation.
// After W rotations the word is back where it started.
//
// Interface: rst (synchronous, active high) clears everything; we loads wdata
// into the word and wempty into the "no element" flag. init applies the reset
// values of the flags for the operation in op; lock sets lm_perm when match is
// 1; clr_perm reloads lm_perm from the empty flag. Port names follow the
// paper's node schematic where it has one: par_state is its p input, and
// child_state[0]/[1] its l and r inputs for order 2.
//
// Paper versus own choices: the flag updates follow the paper's procedures.
// The following are this design's: (1) the OR/AND and the link disables use
// the result over all enabled inputs, where the printed procedure compares a
// child's bit with a partly built OR; (2) in phase 2 a node ignores its
// children until its own step count reaches W+3, i.e. until the children have
// turned to sending upward, since in the paper a child sends its state to its
// parent only once it is past phase 1; (3) a node whose l_m is permanently
// disabled sends the neutral bit (0 for max, 1 for min); (4) the empty flag,
// the lock and clr_perm controls, and the encodings are this design's own.
module imc_node
  import cayley_pkg::*;
#(
  parameter int unsigned W       = 4,  // word size in bits
  parameter int unsigned ETA     = 2,  // order of the tree (children per node)
  parameter bit          IS_LEAF = 1'b0
) (
  input  logic           clk,
  input  logic           rst,
  // word load
  input  logic           we,
  input  logic [W-1:0]   wdata,
  input  logic           wempty,
  // broadcast controls
  input  imc_op_e        op,
  input  logic           init,
  input  logic           run,
  input  logic           lock,
  input  logic           clr_perm,
  // state links
  input  logic           par_state,
  input  logic [ETA-1:0] child_state,
  output logic           state,
  // status
  output logic           match,
  output logic           lm_perm
);

  localparam int unsigned CW   = $clog2(W + 4);
  localparam int unsigned P2GO = W + 3;   // step at which children are read in phase 2
  localparam int unsigned IW   = (W > 1) ? $clog2(W) : 1;

  logic [W-1:0]   word;
  logic           start;
  logic           empty;
  logic           lm;
  logic [ETA-1:0] lc;
  logic [CW-1:0]  cnt;

  // ---------------------------------------------------------------------
  // Combinational step functions
  // ---------------------------------------------------------------------
  logic           is_min;
  logic [ETA-1:0] child_en;
  logic           mem_en;
  logic           red;          // OR (max) or AND (min) over enabled inputs
  logic           msb;
  logic           key_bit_ok;   // received key bit equals the word's bit
  logic           kids_up;      // OR of children's states in phase 2
  logic [IW-1:0]  bidx;         // word bit compared at this step, MSB first

  assign is_min   = (op == OP_MIN);
  assign msb      = word[W-1];
  assign child_en = IS_LEAF ? '0 : ~lc;
  assign mem_en   = ~lm;

  always_comb begin
    if (is_min)
      red = (&(child_state | ~child_en)) & (msb | ~mem_en);
    else
      red = (|(child_state & child_en)) | (msb & mem_en);
  end

  assign bidx       = IW'(CW'(W) - cnt);
  assign key_bit_ok = (cnt >= CW'(1) && cnt <= CW'(W)) ? (par_state == word[bidx]) : 1'b1;
  assign kids_up    = IS_LEAF ? 1'b0 : ((cnt >= CW'(P2GO)) && (|child_state));

  // ---------------------------------------------------------------------
  // Registers
  // ---------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (rst) begin
      word    <= '0;
      empty   <= 1'b1;
      lm_perm <= 1'b1;
      lm      <= 1'b1;
      state   <= 1'b0;
      start   <= 1'b0;
      match   <= 1'b0;
      lc      <= '0;
      cnt     <= '0;
    end else if (we) begin
      word    <= wdata;
      empty   <= wempty;
      lm_perm <= wempty;
    end else if (clr_perm) begin
      lm_perm <= empty;
    end else if (lock) begin
      if (match) lm_perm <= 1'b1;
    end else if (init) begin
      cnt   <= '0;
      lc    <= '0;
      lm    <= lm_perm;
      match <= ~empty;
      if (IS_LEAF && (op == OP_MAX || op == OP_MIN)) begin
        state <= 1'b1;                 // initiate signal of the leaves
        start <= 1'b1;
      end else begin
        state <= 1'b0;
        start <= 1'b0;
      end
    end else if (run) begin
      unique case (op)
        OP_SEARCH, OP_IDENT: begin
          if (!start) begin
            // wait for the initiate bit from the parent
            state <= par_state;
            if (par_state) begin
              start <= 1'b1;
              cnt   <= CW'(1);
            end
          end else if (cnt <= CW'(W)) begin
            // phase 1: forward the key bit, compare it with the word
            state <= par_state;
            if (!key_bit_ok) match <= 1'b0;
            cnt   <= cnt + CW'(1);
          end else if (op == OP_SEARCH) begin
            // phase 2: send the match upward, OR in the children's
            state <= match | kids_up;
            match <= 1'b0;
            if (cnt < CW'(P2GO)) cnt <= cnt + CW'(1);
          end
        end
        OP_MAX, OP_MIN: begin
          if (IS_LEAF) begin
            if (cnt < CW'(W)) begin
              state <= lm ? is_min : msb;
              word  <= {word[W-2:0], word[W-1]};
              cnt   <= cnt + CW'(1);
            end
          end else if (!start) begin
            // pass the initiate signal of the children upward
            state <= |child_state;
            if (|child_state) start <= 1'b1;
          end else if (cnt < CW'(W)) begin
            state <= red;
            for (int c = 0; c < int'(ETA); c++)
              if (child_en[c] && child_state[c] != red) lc[c] <= 1'b1;
            if (mem_en && msb != red) lm <= 1'b1;
            word  <= {word[W-2:0], word[W-1]};
            cnt   <= cnt + CW'(1);
          end
        end
        default: ;
      endcase
    end
  end

endmodule
