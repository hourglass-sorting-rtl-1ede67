// tb_hourglass_table: the sorter at the sizes of the published resource/latency table.
//
// Builds one sorter for each table size N in {64, 128, 256, 512}, cycling through the table's
// key widths (64x8, 128x16, 256x32, 512x8), and sorts one random array on each, checking the
// keys and the latency log2(N) + N (6+64 ... 9+512). The other rows differ from these only in
// the width, which changes no control logic; the 1024-key rows are run at 1024 x 32 by
// tb_hourglass_full. (Building all fifteen configurations takes the simulator's compiler
// several minutes longer for no further coverage.)
module tb_hourglass_table;
  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  localparam int K = 4;
  localparam int unsigned NS [K] = '{64, 128, 256, 512};
  localparam int unsigned WS [K] = '{8, 16, 32, 8};

  logic start;
  logic d [K];
  int   c [K], f [K], lat [K];

  for (genvar a = 0; a < K; a++) begin : g_cfg
    table_check #(.N(NS[a]), .W(WS[a])) u (
      .clk, .start, .done(d[a]), .checks(c[a]), .failures(f[a]), .latency(lat[a]));
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

  initial begin
    int checks, failures;
    bit all_done;
    start = 1'b0;
    repeat (2) @(posedge clk);
    start = 1'b1;
    do begin
      @(posedge clk);
      all_done = 1'b1;
      for (int k = 0; k < K; k++) all_done &= d[k];
    end while (!all_done);
    checks = 0; failures = 0;
    for (int k = 0; k < K; k++) begin
      checks += c[k]; failures += f[k];
      $display("config %0dx%0d latency %0d+%0d", NS[k], WS[k], lat[k] - NS[k], NS[k]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
