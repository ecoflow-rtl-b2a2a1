// tb_io_queue: self-checking test of the 8-entry I/O queue.
// Random pushes and pops are compared against a SystemVerilog queue model:
// data order, occupancy, full/empty flags at depth 8 and one-word-per-cycle
// streaming when both sides are always ready.
module tb_io_queue;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [3:0]  count;
  int checks = 0, failures = 0;
  logic [15:0] model[$];

  io_queue #(.W(16), .DEPTH(8)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!out_valid && in_ready && count == 0, "empty after reset");
    // fill to full
    for (int k = 0; k < 10; k++) begin
      in_valid = 1; in_data = 16'(100 + k);
      @(posedge clk);
      if (in_ready) model.push_back(in_data);
      @(negedge clk);
    end
    in_valid = 0;
    check(count == 8 && !in_ready, "full at 8 entries");
    check(model.size() == 8, "exactly 8 accepted");
    // random traffic
    for (int cyc = 0; cyc < 3000; cyc++) begin
      in_valid  = ($urandom % 3) != 0;
      in_data   = 16'($urandom);
      out_ready = ($urandom % 2) != 0;
      #1;
      check(out_valid == (model.size() != 0), "out_valid matches model");
      if (out_valid && model.size() != 0) check(out_data == model[0], "head data");
      check(in_ready == (model.size() < 8), "in_ready matches model");
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      @(negedge clk);
      check(32'(count) == model.size(), "count");
    end
    // drain, then stream 20 words with both sides ready: 1 word/cycle
    in_valid = 0; out_ready = 1;
    while (out_valid) @(negedge clk);
    model.delete();
    begin
      int got = 0, cyc = 0;
      in_valid = 1;
      while (got < 20) begin
        in_data = 16'(500 + cyc);
        @(posedge clk);
        if (out_valid && out_ready) begin
          check(out_data == 16'(500 + got), "stream order");
          got++;
        end
        @(negedge clk);
        cyc++;
      end
      check(cyc == 21, $sformatf("streaming 20 words took %0d cycles, expected 21", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
