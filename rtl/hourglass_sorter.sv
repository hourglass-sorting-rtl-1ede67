// hourglass_sorter: parallel-in, serial-out "hourglass" sorter of N keys of W bits.
//
// The whole input array is written in one cycle into N leaf registers (hg_leaf). Below them a
// binary tree of hg_cell merge nodes, ceil(log2 N) levels deep, narrows the array to one
// serial output, lowest key first. Every cell only ever talks to its two parents and its one
// child through registered valid/ready handshakes, so the clock period does not grow with N.
// Each cell has two output registers and can take and give a value in the same cycle; once the
// first value has reached the root, the rest follow with no empty cycles.
//
// Levels that are not a power of two keep every cell, including one that has only a left
// parent (its right input is tied to "empty"), so all values of a level reach the next level
// in the same cycle and none can overtake another.
//
// Interface:
//   load, in_data[N], in_valid[N]  write the array into the leaves at the next clock edge; a
//                                  leaf with in_valid = 0 stays empty (shorter arrays).
//   out_data, out_index, out_valid, out_ready
//                                  valid/ready stream of the sorted keys. out_index is the leaf
//                                  position of the key when INDEX_EN = 1, else 0.
//   rst                            synchronous, active high; empties every register.
// Timing: with out_ready held high, out_valid first rises right after clock edge e0 + LEVELS,
// where e0 is the edge that captures load and LEVELS = ceil(log2 N), and then stays high for
// exactly as many cycles as there were valid inputs: the last of n keys is taken at edge
// e0 + LEVELS + n (10 + 1024 at the default size). Backpressure (out_ready = 0) stalls the
// stream and loses nothing. A new array should be loaded only after the previous one has
// left the tree (or after rst); loading earlier mixes the two arrays.
//
// Following the paper: the tree of two-register cells, the leaf registers, the handling of
// odd-sized levels (its Fig. 5) and the optional index registers (log2 N bits per register,
// not included in the paper's results, hence off by default). Equal keys leave in
// right-to-left input order (see hg_cell). The load strobe, the reset and the port layout are
// this design's own choices.
module hourglass_sorter
  import hourglass_pkg::*;
#(
  parameter int unsigned N        = 1024,  // number of input elements
  parameter int unsigned W        = 32,    // key width
  parameter bit          INDEX_EN = 1'b0,  // carry each key's input position along with it
  localparam int unsigned IW_PORT = (N > 1) ? $clog2(N) : 1
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    load,
  input  logic [N-1:0][W-1:0]     in_data,
  input  logic [N-1:0]            in_valid,
  output logic [W-1:0]            out_data,
  output logic [IW_PORT-1:0]      out_index,
  output logic                    out_valid,
  input  logic                    out_ready
);

  localparam int unsigned LEVELS = num_levels(N);
  localparam int unsigned NODES  = total_nodes(N);
  localparam int unsigned IDX_W  = INDEX_EN ? IW_PORT : 0;
  localparam int unsigned EW     = W + IDX_W;
  localparam int unsigned ROOT   = NODES - 1;

  initial begin
    assert (N >= 2) else $fatal(1, "hourglass_sorter needs N >= 2");
  end

  // One stream per node (leaf or cell), flat-indexed as in hourglass_pkg.
  logic [EW-1:0] node_data  [NODES];
  logic          node_valid [NODES];
  logic          node_ready [NODES];

  // Level 0: the leaf registers.
  for (genvar i = 0; i < N; i++) begin : g_leaf
    logic [EW-1:0] elem;
    if (INDEX_EN) begin : g_idx
      assign elem = {in_data[i], IW_PORT'(i)};
    end else begin : g_noidx
      assign elem = in_data[i];
    end
    hg_leaf #(.EW(EW)) u_leaf (
      .clk       (clk),
      .rst       (rst),
      .load      (load),
      .in_data   (elem),
      .in_valid  (in_valid[i]),
      .out_data  (node_data[i]),
      .out_valid (node_valid[i]),
      .out_ready (node_ready[i])
    );
  end

  // Levels 1..LEVELS: the sorting cells. Cell j of level l merges nodes 2j and 2j+1 of level
  // l-1; when 2j+1 does not exist the right input is permanently empty.
  for (genvar l = 1; l <= LEVELS; l++) begin : g_level
    localparam int unsigned CNT      = level_count(N, l);
    localparam int unsigned PCNT     = level_count(N, l - 1);
    localparam int unsigned OFF      = level_offset(N, l);
    localparam int unsigned POFF     = level_offset(N, l - 1);
    for (genvar j = 0; j < CNT; j++) begin : g_node
      localparam int unsigned LI = POFF + 2 * j;
      localparam int unsigned RI = POFF + 2 * j + 1;
      logic [EW-1:0] r_data;
      logic          r_valid;
      logic          r_ready;
      if (2 * j + 1 < PCNT) begin : g_two
        assign r_data          = node_data[RI];
        assign r_valid         = node_valid[RI];
        assign node_ready[RI]  = r_ready;
      end else begin : g_one
        // Only a left parent: the right input never offers a value.
        assign r_data  = '0;
        assign r_valid = 1'b0;
      end
      hg_cell #(.KEY_W(W), .IDX_W(IDX_W)) u_cell (
        .clk       (clk),
        .rst       (rst),
        .l_data    (node_data[LI]),
        .l_valid   (node_valid[LI]),
        .l_ready   (node_ready[LI]),
        .r_data    (r_data),
        .r_valid   (r_valid),
        .r_ready   (r_ready),
        .out_data  (node_data[OFF + j]),
        .out_valid (node_valid[OFF + j]),
        .out_ready (node_ready[OFF + j])
      );
    end
  end

  // Root output.
  assign out_data         = node_data[ROOT][EW-1 -: W];
  assign out_valid        = node_valid[ROOT];
  assign node_ready[ROOT] = out_ready;
  if (INDEX_EN) begin : g_out_idx
    assign out_index = node_data[ROOT][IW_PORT-1:0];
  end else begin : g_out_noidx
    assign out_index = '0;
  end

endmodule
