// tb_hg_leaf: self-checking testbench of the input leaf register.
//
// Loads random elements (some with valid = 0), then checks that the register offers the
// element one cycle later, holds it while out_ready is low, empties itself at the first
// transfer, gives load priority over a transfer in the same cycle, and is emptied by reset.
module tb_hg_leaf;
  localparam int unsigned EW = 12;

  logic          clk;
  initial clk = 1'b0;
  logic          rst, load, in_valid, out_valid, out_ready;
  logic [EW-1:0] in_data, out_data;
  int            checks = 0, failures = 0;

  always #5 clk = ~clk;

  hg_leaf #(.EW(EW)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t: valid=%0b data=%h", what, $time, out_valid, out_data);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [EW-1:0] v;
    logic          vv;
    rst = 1'b1; load = 1'b0; in_valid = 1'b0; in_data = '0; out_ready = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    check(!out_valid, "empty after reset");
    for (int t = 0; t < 200; t++) begin
      v  = EW'($urandom);
      vv = ($urandom % 4) != 0;
      // load
      load = 1'b1; in_data = v; in_valid = vv; out_ready = 1'b0;
      @(posedge clk); #1;
      load = 1'b0; in_data = ~v;
      check(out_valid == vv, "valid after load");
      if (vv) check(out_data == v, "data after load");
      // stall for a random number of cycles: value must be held
      repeat ($urandom % 3) begin
        @(posedge clk); #1;
        check(out_valid == vv, "held while not ready");
        if (vv) check(out_data == v, "data held while not ready");
      end
      if ($urandom % 5 == 0) begin
        // load in the same cycle as a transfer: the new element wins
        out_ready = 1'b1; load = 1'b1; in_data = ~v; in_valid = 1'b1;
        @(posedge clk); #1;
        load = 1'b0; out_ready = 1'b0;
        check(out_valid && out_data == ~v, "load beats transfer");
      end
      // transfer
      out_ready = 1'b1;
      @(posedge clk); #1;
      out_ready = 1'b0;
      check(!out_valid, "empty after transfer");
      @(posedge clk); #1;
      check(!out_valid, "stays empty");
    end
    // reset empties a loaded leaf
    load = 1'b1; in_valid = 1'b1; in_data = 'h5a5;
    @(posedge clk); #1;
    load = 1'b0; rst = 1'b1;
    @(posedge clk); #1;
    rst = 1'b0;
    check(!out_valid, "reset empties");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
