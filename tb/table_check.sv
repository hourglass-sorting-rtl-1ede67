// table_check: one sort on an hourglass_sorter built for one configuration (N keys of W bits,
// no index registers), used by tb_hourglass_table.
//
// Loads a random full array, reads the output with out_ready held high and checks every key
// against the array sorted here, the first key ceil(log2 N) clock edges after the edge that loads
// the leaves, and the whole array out after ceil(log2 N) + N edges with no gap.
module table_check #(
  parameter int unsigned N = 64,
  parameter int unsigned W = 8
) (
  input  logic clk,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures,
  output int   latency     // edges from the load edge to the last transfer
);
  localparam int unsigned LEVELS = $clog2(N);

  logic                rst, load, out_valid, out_ready;
  logic [N-1:0][W-1:0] in_data;
  logic [N-1:0]        in_valid;
  logic [W-1:0]        out_data;
  logic [LEVELS-1:0]   out_index;

  hourglass_sorter #(.N(N), .W(W)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %0dx%0d %s at %0t", N, W, what, $time);
    end
  endtask

  initial begin
    longint unsigned ref_q[$];
    int oi, cyc, first;
    bit gap;
    done = 1'b0; checks = 0; failures = 0; latency = 0;
    rst = 1'b1; load = 1'b0; in_valid = '0; out_ready = 1'b1;
    for (int i = 0; i < N; i++) in_data[i] = '0;
    wait (start);
    @(posedge clk); #1;
    rst = 1'b0;
    for (int i = 0; i < N; i++) begin
      in_data[i] = W'({$urandom, $urandom});
      in_valid[i] = 1'b1;
      ref_q.push_back(longint'(in_data[i]));
    end
    ref_q.sort();
    load = 1'b1;
    @(posedge clk); #1;
    load = 1'b0;
    oi = 0; cyc = 1; first = -1; gap = 1'b0;
    while (oi < N && cyc < 4 * N) begin
      if (out_valid) begin
        check(64'(out_data) == ref_q[oi], $sformatf("key %0d", oi));
        if (first < 0) first = cyc;
        else if (oi != cyc - first) gap = 1'b1;
        oi++;
      end
      @(posedge clk); #1;
      cyc++;
    end
    latency = cyc - 1;
    check(oi == N, "all keys out");
    check(!out_valid, "tree empty afterwards");
    check(first - 1 == int'(LEVELS), $sformatf("first key after %0d edges (got %0d)", LEVELS, first - 1));
    check(!gap, "keys on consecutive cycles");
    check(latency == int'(LEVELS + N), $sformatf("latency %0d+%0d (got %0d)", LEVELS, N, latency));
    done = 1'b1;
  end
endmodule
