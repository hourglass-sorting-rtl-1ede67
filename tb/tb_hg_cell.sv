// tb_hg_cell: self-checking testbench of one hourglass sorting cell.
//
// Two behavioural sources offer ascending random streams (4-bit keys, so ties are frequent)
// on the left and right inputs; both become valid in the same cycle and stay valid until
// exhausted, as the cells of a tree do. Each element carries a tag (left 0..7, right 8..15) in
// the index field. The expected output is the merge computed here: lower key first, equal
// keys right first (the rule of the cell). Checked: every output element and the element count;
// with out_ready held high, the first output one cycle after the sources start and then one
// output per cycle with no gap; under a stall, that the cell takes exactly two values (R = not
// V1) and then drops both ready outputs; under random out_ready, that nothing is lost. Every
// cycle it checks that the input ready equals not V1 and does not change with out_ready.
module tb_hg_cell;
  localparam int unsigned KEY_W = 4;
  localparam int unsigned IDX_W = 4;
  localparam int unsigned EW = KEY_W + IDX_W;

  logic          clk;
  initial clk = 1'b0;
  logic          rst;
  logic [EW-1:0] l_data, r_data, out_data;
  logic          l_valid, l_ready, r_valid, r_ready, out_valid, out_ready;
  int            checks = 0, failures = 0;

  always #5 clk = ~clk;

  hg_cell #(.KEY_W(KEY_W), .IDX_W(IDX_W)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [EW-1:0] ls[$], rs[$], exp_q[$];

  // Build two sorted streams and their expected merge.
  task automatic make_streams(input int nl, input int nr);
    int unsigned kl[$], kr[$];
    int i, j;
    ls.delete(); rs.delete(); exp_q.delete();
    for (int k = 0; k < nl; k++) kl.push_back($urandom % 16);
    for (int k = 0; k < nr; k++) kr.push_back($urandom % 16);
    kl.sort(); kr.sort();
    for (int k = 0; k < nl; k++) ls.push_back({KEY_W'(kl[k]), IDX_W'(k)});
    for (int k = 0; k < nr; k++) rs.push_back({KEY_W'(kr[k]), IDX_W'(8 + k)});
    i = 0; j = 0;
    while (i < nl || j < nr) begin
      if (j >= nr || (i < nl && kl[i] < kr[j])) begin exp_q.push_back(ls[i]); i++; end
      else begin exp_q.push_back(rs[j]); j++; end
    end
  endtask

  // Run one merge. mode 0: out_ready always 1; 1: random; 2: stall 4 cycles first, then 1.
  task automatic run(input int mode);
    int li, ri, oi, cyc, first, last_gap;
    bit lf, rf, of;
    li = 0; ri = 0; oi = 0; cyc = 0; first = -1; last_gap = 0;
    rst = 1'b1;
    @(posedge clk); #1;
    rst = 1'b0;
    while (oi < exp_q.size() && cyc < 200) begin
      l_valid = li < ls.size(); l_data = l_valid ? ls[li] : EW'($urandom);
      r_valid = ri < rs.size(); r_data = r_valid ? rs[ri] : EW'($urandom);
      case (mode)
        0: out_ready = 1'b1;
        1: out_ready = ($urandom % 3) != 0;
        default: out_ready = cyc >= 4;
      endcase
      #1;
      if (mode == 2 && cyc == 3 && exp_q.size() >= 2)
        check(dut.v0_q && dut.v1_q && !l_ready && !r_ready, "both registers full, ready low");
      if (mode == 2 && cyc < 2)
        check((l_ready || r_ready) || (!l_valid && !r_valid), "ready while register 1 empty");
      // R_in = not V1, and out_ready must not reach the input side combinationally.
      check((l_ready || r_ready) == !dut.v1_q, "input ready equals not V1");
      begin
        logic lr, rr;
        lr = l_ready; rr = r_ready;
        out_ready = !out_ready; #1;
        check(l_ready == lr && r_ready == rr, "no path from out_ready to input ready");
        out_ready = !out_ready; #1;
      end
      lf = l_valid && l_ready; rf = r_valid && r_ready; of = out_valid && out_ready;
      check(!(lf && rf), "one input at a time");
      if (of) begin
        check(out_data == exp_q[oi], $sformatf("merge order element %0d", oi));
        if (first < 0) first = cyc;
        if (mode == 0 && oi != cyc - first) last_gap = 1;
        oi++;
      end
      @(posedge clk); #1;
      if (lf) li++;
      if (rf) ri++;
      cyc++;
    end
    check(oi == exp_q.size(), "all elements out");
    check(li == ls.size() && ri == rs.size(), "all elements taken");
    out_ready = 1'b1; #1;
    check(!out_valid, "empty at end");
    if (mode == 0 && exp_q.size() > 0) begin
      check(first == 1, $sformatf("first output one cycle after start (got %0d)", first));
      check(last_gap == 0, "no bubble in the output stream");
    end
  endtask

  initial begin
    rst = 1'b1; l_valid = 1'b0; r_valid = 1'b0; l_data = '0; r_data = '0; out_ready = 1'b0;
    repeat (2) @(posedge clk);
    for (int t = 0; t < 300; t++) begin
      make_streams($urandom % 9, $urandom % 9);
      run(t % 3);
    end
    // Both inputs empty from the start: nothing comes out.
    make_streams(0, 0);
    run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
