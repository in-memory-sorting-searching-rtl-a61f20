// imc_root: the root node of the Cayley tree. It has ETA+1 children and no
// parent; in the paper's order-2 schematic its ports l, r and p are the left,
// right and middle child (child_state[0], [1] and [2] here).
//
// Search (OP_SEARCH, and OP_IDENT which is phase 1 only): the word holds the
// key. init sets state = 1, which is the initiate signal the children see on
// the first run step; the next W steps put the key on state MSB first. In
// OP_SEARCH the root then clears state and, from step W+2 on (when its
// children have turned to phase 2), ORs the children's states into it; once
// 1 it stays 1. state is then the "found" answer.
//
// Max / min (OP_MAX, OP_MIN): init clears the word (after W shifts its old
// content is gone in any case), the flags and the child links. The root waits for the initiate
// signal from its children, then for W steps forms the OR (max) or AND (min)
// of the enabled children's bits, disables each enabled child whose bit
// differs from it, and shifts the result into the word from the right. After
// W steps the word holds the max (min), MSB first.
//
// Timing: one init cycle, then one step per clock while run is high. The
// sequencer knows how many steps each operation takes.
//
// Paper versus own choices: the sequence of states follows the paper's
// procedures for the root. The clear of state after the last key bit is this
// design's: the printed procedure keeps state = 1 if the key's last bit is 1,
// which would report "found" for any such key. The result/shift ordering is
// the paper's (write the MSB, then rotate left), written as a shift-in.
module imc_root
  import cayley_pkg::*;
#(
  parameter int unsigned W   = 4,
  parameter int unsigned ETA = 2
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         we,
  input  logic [W-1:0] wdata,
  input  imc_op_e      op,
  input  logic         init,
  input  logic         run,
  input  logic [ETA:0] child_state,
  output logic         state,
  output logic [W-1:0] word
);

  localparam int unsigned CW = $clog2(W + 3);
  localparam int unsigned IW = (W > 1) ? $clog2(W) : 1;

  logic         start;
  logic [ETA:0] lc;
  logic [ETA:0] child_en;
  logic [CW-1:0] cnt;
  logic         red;
  logic [IW-1:0] bidx;   // key bit sent at this step, MSB first

  assign bidx = IW'(CW'(W - 1) - cnt);

  assign child_en = ~lc;

  always_comb begin
    if (op == OP_MIN) red = &(child_state | ~child_en);
    else              red = |(child_state & child_en);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      word  <= '0;
      state <= 1'b0;
      start <= 1'b0;
      lc    <= '0;
      cnt   <= '0;
    end else if (we) begin
      word <= wdata;
    end else if (init) begin
      cnt <= '0;
      lc  <= '0;
      if (op == OP_MAX || op == OP_MIN) begin
        word  <= '0;
        state <= 1'b0;
        start <= 1'b0;
      end else begin
        state <= 1'b1;       // initiate signal
        start <= 1'b1;
      end
    end else if (run) begin
      unique case (op)
        OP_SEARCH, OP_IDENT: begin
          if (cnt < CW'(W)) begin
            state <= word[bidx];      // key, MSB first
            cnt   <= cnt + CW'(1);
          end else if (cnt < CW'(W + 2)) begin
            state <= 1'b0;
            cnt   <= cnt + CW'(1);
          end else if (op == OP_SEARCH) begin
            state <= state | (|child_state);
          end
        end
        OP_MAX, OP_MIN: begin
          if (!start) begin
            if (|child_state) start <= 1'b1;
          end else if (cnt < CW'(W)) begin
            state <= red;
            for (int c = 0; c <= int'(ETA); c++)
              if (child_en[c] && child_state[c] != red) lc[c] <= 1'b1;
            word <= {word[W-2:0], red};
            cnt  <= cnt + CW'(1);
          end
        end
        default: ;
      endcase
    end
  end

endmodule
