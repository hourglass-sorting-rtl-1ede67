// tb_hourglass_full: the hourglass sorter at its default size (N = 1024 keys of 32 bits).
//
// Loads one random array into all 1024 leaves and reads the output with out_ready held high.
// Checks every key against the array sorted here, that the first key is offered 10 clock edges
// after the edge that loads the leaves, that the 1024 keys then leave on 1024 consecutive
// cycles (10 + 1024 in all), and that the tree is empty afterwards. A second array, with a
// quarter of the leaves empty, is then read under random backpressure and checked the same way.
module tb_hourglass_full;
  localparam int unsigned N = 1024;
  localparam int unsigned W = 32;
  localparam int unsigned LEVELS = 10;

  logic                clk;
  logic                rst, load, out_valid, out_ready;
  logic [N-1:0][W-1:0] in_data;
  logic [N-1:0]        in_valid;
  logic [W-1:0]        out_data;
  logic [9:0]          out_index;  // index registers are off at the default size
  int                  checks = 0, failures = 0;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  hourglass_sorter dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one_sort(input bit backpressure);
    int unsigned ref_q[$];
    int oi, cyc, first, n;
    bit gap;
    ref_q.delete();
    for (int i = 0; i < N; i++) begin
      in_data[i]  = $urandom;
      in_valid[i] = backpressure ? ($urandom % 4 != 0) : 1'b1;
      if (in_valid[i]) ref_q.push_back(in_data[i]);
    end
    ref_q.sort();
    n = ref_q.size();
    load = 1'b1;
    @(posedge clk); #1;
    load = 1'b0;
    oi = 0; cyc = 1; first = -1; gap = 1'b0;
    while (oi < n && cyc < 4 * N) begin
      out_ready = backpressure ? ($urandom % 2 == 0) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        check(out_data == ref_q[oi], $sformatf("key %0d", oi));
        if (first < 0) first = cyc;
        else if (oi != cyc - first) gap = 1'b1;
        oi++;
      end
      @(posedge clk); #1;
      cyc++;
    end
    check(oi == n, "all keys out");
    out_ready = 1'b1; #1;
    check(!out_valid, "tree empty afterwards");
    if (!backpressure) begin
      check(first - 1 == int'(LEVELS), $sformatf("first key after %0d edges (got %0d)", LEVELS, first - 1));
      check(!gap, "keys on consecutive cycles");
      check(cyc - 1 == int'(LEVELS + N), $sformatf("array out after %0d edges (got %0d)", LEVELS + N, cyc - 1));
    end
    @(posedge clk); #1;
  endtask

  initial begin
    rst = 1'b1; load = 1'b0; in_valid = '0; out_ready = 1'b0;
    for (int i = 0; i < N; i++) in_data[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    one_sort(1'b0);
    one_sort(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
