// hg_leaf: one input (first-layer) register of the hourglass sorter.
//
// The sorter takes its whole input array in parallel. Each element is captured in one of these
// registers (data plus a valid flag) and waits there until the first-level sorting cell takes
// it. The register then reports itself empty, which tells the cell below that this leaf will
// send nothing more. A leaf loaded with in_valid = 0 is empty from the start, which is how an
// array shorter than the sorter is presented.
//
// Interface: load/in_data/in_valid capture a new element at the next clock edge; out_* is a
// valid/ready stream (a transfer happens in a cycle where out_valid and out_ready are both 1,
// and the register is emptied at that edge). rst (synchronous, active high) empties it.
// Timing: out_valid rises one cycle after load. load wins over a transfer in the same cycle.
//
// Following the paper: the leaf registers exist (its Fig. 3 draws them above the first cell
// level, and its register counts equal (N-1) cells x 2(w+1) plus N leaves x (w+1) bits). The load
// strobe, its priority and the reset are this design's own choices; the paper does not describe
// how the array is written into the leaves.
module hg_leaf #(
  parameter int unsigned EW = 32  // element width (key plus optional index)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          load,
  input  logic [EW-1:0] in_data,
  input  logic          in_valid,
  output logic [EW-1:0] out_data,
  output logic          out_valid,
  input  logic          out_ready
);

  logic [EW-1:0] d_q;
  logic          v_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      v_q <= 1'b0;
    end else if (load) begin
      v_q <= in_valid;
      d_q <= in_data;
    end else if (v_q && out_ready) begin
      v_q <= 1'b0;
    end
  end

  assign out_data  = d_q;
  assign out_valid = v_q;

endmodule
