// tb_hourglass_sorter: end-to-end testbench of the hourglass sorter at small sizes.
//
// Runs random sorts on four trees at once (through sorter_check): N = 2, N = 6 (the odd tree
// of the paper's Fig. 5), N = 8 and N = 13, with index registers enabled and narrow keys so that
// equal keys are common. It checks sorted order, the tie order, the carried indices, the
// latency and the absence of bubbles, and it fails if any of these mechanisms was never
// exercised: back-to-back streaming, output stall, use of the second register and its shift,
// empty leaves, single-parent cells, equal keys, the latency measurement, and reading only
// the m lowest keys followed by a reset.
module tb_hourglass_sorter;
  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  localparam int K = 4;
  logic d [K];
  int c [K], f [K], s [K], st [K], r1 [K], sh [K], el [K], sg [K], ti [K], la [K], ea [K];

  sorter_check #(.N(2),  .W(2), .TRIALS(60)) u2  (.clk, .done(d[0]), .checks(c[0]), .failures(f[0]),
    .n_stream(s[0]), .n_stall(st[0]), .n_reg1(r1[0]), .n_shift(sh[0]), .n_empty_leaf(el[0]),
    .n_single(sg[0]), .n_tie(ti[0]), .n_latency(la[0]), .n_early(ea[0]));
  sorter_check #(.N(6),  .W(3), .TRIALS(80)) u6  (.clk, .done(d[1]), .checks(c[1]), .failures(f[1]),
    .n_stream(s[1]), .n_stall(st[1]), .n_reg1(r1[1]), .n_shift(sh[1]), .n_empty_leaf(el[1]),
    .n_single(sg[1]), .n_tie(ti[1]), .n_latency(la[1]), .n_early(ea[1]));
  sorter_check #(.N(8),  .W(4), .TRIALS(80)) u8  (.clk, .done(d[2]), .checks(c[2]), .failures(f[2]),
    .n_stream(s[2]), .n_stall(st[2]), .n_reg1(r1[2]), .n_shift(sh[2]), .n_empty_leaf(el[2]),
    .n_single(sg[2]), .n_tie(ti[2]), .n_latency(la[2]), .n_early(ea[2]));
  sorter_check #(.N(13), .W(5), .TRIALS(80)) u13 (.clk, .done(d[3]), .checks(c[3]), .failures(f[3]),
    .n_stream(s[3]), .n_stall(st[3]), .n_reg1(r1[3]), .n_shift(sh[3]), .n_empty_leaf(el[3]),
    .n_single(sg[3]), .n_tie(ti[3]), .n_latency(la[3]), .n_early(ea[3]));

  int checks, failures;

  task automatic mech(input string name, input int count);
    checks++;
    $display("mechanism %-22s %0d", name, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism %s never happened", name);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

  initial begin
    int ts, tst, tr1, tsh, tel, tsg, tti, tla, tea;
    wait (d[0] && d[1] && d[2] && d[3]);
    checks = 0; failures = 0;
    ts = 0; tst = 0; tr1 = 0; tsh = 0; tel = 0; tsg = 0; tti = 0; tla = 0; tea = 0;
    for (int k = 0; k < K; k++) begin
      checks += c[k]; failures += f[k];
      ts += s[k]; tst += st[k]; tr1 += r1[k]; tsh += sh[k];
      tel += el[k]; tsg += sg[k]; tti += ti[k]; tla += la[k]; tea += ea[k];
    end
    mech("back-to-back stream", ts);
    mech("output stall", tst);
    mech("second register used", tr1);
    mech("register 1 shift", tsh);
    mech("empty leaves", tel);
    mech("single-parent cell", tsg);
    mech("equal keys", tti);
    mech("latency measured", tla);
    mech("m lowest, then reset", tea);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
