// hg_cell: one hourglass sorting cell, a two-input merge node with two output registers.
//
// The cell receives two ascending streams (left and right) and emits their merge, ascending.
// Each cycle it compares the keys offered by its two inputs and picks the lower one; an input
// whose valid is low is treated as exhausted and the other is taken regardless of the
// comparison. The picked value goes into register 0 (D0/V0) if that is empty, otherwise into
// register 1 (D1/V1), unless register 0 is being read in the same cycle, in which case the new
// value replaces it directly. When both registers are full the cell stops reading; when register
// 0 is then read, register 1 shifts into it. The output is always register 0, so V1 implies V0
// and D1 >= D0. Because the cell can take and give a value in the same cycle, a chain of cells
// passes one value per cycle with no empty gaps ("bubbles").
//
// Interface: three valid/ready streams (l_*, r_* in, out_* out); a transfer happens in a cycle
// where valid and ready are both 1. l_ready/r_ready depend only on V1 and the comparison of the
// inputs, and out_valid/out_data come straight from register 0: no combinational path runs from
// out_ready to any input-side signal, so the critical path is one comparator and a few muxes
// whatever the tree depth. Elements are {key, index}; only the KEY_W upper bits are compared,
// the IDX_W lower bits (0 allowed) travel along as the element's position in the input array.
// Timing: a value accepted at a clock edge is visible on out_* right after that edge.
//
// Following the paper (Algorithm 3 and Fig. 4): the "<" comparator with D_L on its left input,
// the select rule "left if (D_L < D_R and V_L) or (not D_L < D_R and not V_R)", R_in = not V1,
// the four register cases, and the output taken from register 0. On equal keys this rule takes
// the right input, as Algorithm 3 and the "<" of Fig. 4 state; the text elsewhere claims
// stability "if we give preference to the leftmost sub-tree", which would need "<=". This design
// follows the algorithm and the figure, so equal keys leave in right-to-left input order.
// Algorithm 3's line "D_out, V_out <- D_0, R_0" is read as V_out = V0, and its shift case is
// read as also emptying register 1. Carrying an index is the paper's option; the synchronous
// reset and placing the index below the key, uncompared, are this
// design's own choices.
module hg_cell #(
  parameter int unsigned KEY_W = 32,  // width of the compared key
  parameter int unsigned IDX_W = 0    // width of the index carried below the key (0 = none)
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [KEY_W+IDX_W-1:0] l_data,
  input  logic                   l_valid,
  output logic                   l_ready,
  input  logic [KEY_W+IDX_W-1:0] r_data,
  input  logic                   r_valid,
  output logic                   r_ready,
  output logic [KEY_W+IDX_W-1:0] out_data,
  output logic                   out_valid,
  input  logic                   out_ready
);

  localparam int unsigned EW = KEY_W + IDX_W;

  logic [EW-1:0] d0_q, d1_q;
  logic          v0_q, v1_q;

  // Selection stage (comparator and input muxes of Fig. 4).
  logic          lt;      // D_L < D_R on the key bits
  logic          sel_l;   // 1: the left input is the candidate
  logic [EW-1:0] d_sel;
  logic          v_sel;
  logic          r_int;   // R: the cell can take a value (register 1 is empty)

  always_comb begin
    lt      = l_data[EW-1 -: KEY_W] < r_data[EW-1 -: KEY_W];
    sel_l   = lt ? l_valid : !r_valid;
    d_sel   = sel_l ? l_data  : r_data;
    v_sel   = sel_l ? l_valid : r_valid;
    r_int   = !v1_q;
    l_ready = sel_l  && r_int;
    r_ready = !sel_l && r_int;
  end

  // Register stage (the four cases of Algorithm 3).
  always_ff @(posedge clk) begin
    if (rst) begin
      v0_q <= 1'b0;
      v1_q <= 1'b0;
    end else if (!v0_q) begin
      // IN: fill the empty first register.
      d0_q <= d_sel;
      v0_q <= v_sel;
    end else if (!v1_q) begin
      if (out_ready) begin
        // Simultaneous IN/OUT: register 0 is read and refilled from the input.
        d0_q <= d_sel;
        v0_q <= v_sel;
      end else begin
        // IN: output stalled, park the new value in the second register.
        d1_q <= d_sel;
        v1_q <= v_sel;
      end
    end else if (out_ready) begin
      // OUT: both full, register 0 is read and register 1 shifts down.
      d0_q <= d1_q;
      v0_q <= 1'b1;
      v1_q <= 1'b0;
    end
  end

  assign out_data  = d0_q;
  assign out_valid = v0_q;

  // Register 1 is only ever occupied on top of register 0, and never holds a smaller key.
  a_v1_implies_v0: assert property (@(posedge clk) disable iff (rst) v1_q |-> v0_q);
  a_d1_not_below_d0: assert property (@(posedge clk) disable iff (rst)
      v1_q |-> d1_q[EW-1 -: KEY_W] >= d0_q[EW-1 -: KEY_W]);
  // Stream rule: a value offered on the output stays until it is taken.
  a_out_stable: assert property (@(posedge clk) disable iff (rst)
      out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
