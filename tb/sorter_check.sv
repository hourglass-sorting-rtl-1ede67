// sorter_check: drives one hourglass_sorter instance through random sorts and checks them.
//
// Used by tb_hourglass_sorter, once per tree size. Each trial loads a random array (keys of W
// bits, so ties occur; in some trials a random set of leaves is left empty), then reads the
// stream with out_ready either held high or random. The expected stream is the array sorted
// here by key ascending, equal keys by descending input position (the tie rule of the cells),
// and both key and out_index are compared. Some trials read only the m lowest keys and then
// reset the tree, as a consumer that needs only the smallest values does. With out_ready held high it also checks the
// latency: the first output is offered ceil(log2 N) clock edges after the edge that loads the
// leaves, then one output per cycle, the last taken at edge ceil(log2 N) + n. It counts how often each mechanism of the sorter was exercised and reports totals
// when done.
module sorter_check
  import hourglass_pkg::*;
#(
  parameter int unsigned N      = 8,
  parameter int unsigned W      = 4,
  parameter int unsigned TRIALS = 40
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_stream,     // back-to-back outputs (cell read and refilled in one cycle)
  output int   n_stall,      // cycles the root offered a value that was not taken
  output int   n_reg1,       // cycles the root cell held a value in its second register
  output int   n_shift,      // root shifts of register 1 into register 0
  output int   n_empty_leaf, // leaves loaded empty (arrays shorter than N)
  output int   n_single,     // values passed through single-parent cells
  output int   n_tie,        // equal keys in consecutive outputs
  output int   n_latency,    // trials where the latency ceil(log2 N) + n was measured
  output int   n_early       // trials that read only the m lowest keys and then reset the tree
);
  localparam int unsigned LEVELS = num_levels(N);
  localparam int unsigned IW = $clog2(N);

  logic               rst, load, out_valid, out_ready;
  logic [N-1:0][W-1:0] in_data;
  logic [N-1:0]       in_valid;
  logic [W-1:0]       out_data;
  logic [IW-1:0]      out_index;

  hourglass_sorter #(.N(N), .W(W), .INDEX_EN(1'b1)) dut (.*);

  // Observation of the root cell's registers (for the mechanism counters only).
  wire root_v1 = dut.g_level[LEVELS].g_node[0].u_cell.v1_q;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL N=%0d %s at %0t", N, what, $time);
    end
  endtask

  // Values passing through the cells that have only a left parent.
  int single_cnt;
  initial single_cnt = 0;
  for (genvar l = 1; l <= LEVELS; l++) begin : g_l
    if (level_count(N, l - 1) % 2 == 1) begin : g_odd
      localparam int unsigned J = level_count(N, l) - 1;
      always @(posedge clk)
        if (dut.g_level[l].g_node[J].u_cell.l_valid && dut.g_level[l].g_node[J].u_cell.l_ready)
          single_cnt <= single_cnt + 1;
    end
  end

  initial begin
    longint unsigned ref_q[$];
    int oi, cyc, first, n, m, gap, prev_key;
    bit mode_rand, of, partial, early;
    done = 1'b0; checks = 0; failures = 0;
    n_stream = 0; n_stall = 0; n_reg1 = 0; n_shift = 0; n_empty_leaf = 0;
    n_tie = 0; n_latency = 0; n_early = 0;
    rst = 1'b1; load = 1'b0; in_data = '0; in_valid = '0; out_ready = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int t = 0; t < TRIALS; t++) begin
      mode_rand = t % 2 == 1;
      partial = t % 4 >= 2;
      early = t % 8 == 5;
      ref_q.delete();
      for (int i = 0; i < N; i++) begin
        in_data[i]  = W'($urandom);
        in_valid[i] = partial ? ($urandom % 3 != 0) : 1'b1;
        if (in_valid[i])
          ref_q.push_back({32'(in_data[i]), 32'(N - 1 - i)});
        else
          n_empty_leaf++;
      end
      ref_q.sort();
      n = ref_q.size();
      m = (early && n > 1) ? 1 + int'($urandom % (n - 1)) : n;
      load = 1'b1;
      @(posedge clk); #1;
      load = 1'b0;
      in_data = '1;
      // cycle 0 is the load cycle; now in cycle 1
      oi = 0; cyc = 1; first = -1; gap = 0; prev_key = -1;
      while (oi < m && cyc < 8 * N + 50) begin
        out_ready = mode_rand ? ($urandom % 3 != 0) : 1'b1;
        #1;
        of = out_valid && out_ready;
        if (out_valid && !out_ready) n_stall++;
        if (root_v1) n_reg1++;
        if (root_v1 && out_ready) n_shift++;
        if (of) begin
          check(out_data == W'(ref_q[oi] >> 32), $sformatf("key %0d", oi));
          check(out_index == IW'(N - 1 - ref_q[oi][31:0]), $sformatf("index %0d", oi));
          if (int'(out_data) == prev_key) n_tie++;
          prev_key = int'(out_data);
          if (first < 0) first = cyc;
          else if (oi != cyc - first) gap = 1;
          if (oi > 0 && first >= 0 && oi == cyc - first) n_stream++;
          oi++;
        end
        @(posedge clk); #1;
        cyc++;
      end
      check(oi == m, "all elements out");
      if (m < n) begin
        // Only the m lowest keys were wanted: discard the rest with a reset.
        rst = 1'b1;
        @(posedge clk); #1;
        rst = 1'b0;
        n_early++;
      end
      out_ready = 1'b1; #1;
      check(!out_valid, "tree empty after the array");
      if (!mode_rand && m == n && n > 0) begin
        check(first == int'(LEVELS) + 1, $sformatf("first output %0d edges after the load edge (got %0d)", LEVELS, first - 1));
        check(gap == 0, "no bubble in the output stream");
        check(cyc - 1 == int'(LEVELS) + n, "array out in log2(N) + n cycles");
        n_latency++;
      end
      @(posedge clk); #1;
    end
    n_single = single_cnt;
    done = 1'b1;
  end
endmodule
