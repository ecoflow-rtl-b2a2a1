// tb_global_buffer: test of the 27-bank global buffer at full size.
// Writes a pattern to words spread over every bank (first, last and random
// words of each bank), reads them back with the one-cycle read latency,
// checks that a read and a write in the same cycle both happen, and that
// addresses past the last bank read as zero.
module tb_global_buffer;
  import ecoflow_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic     rd_en, wr_en;
  gb_addr_t rd_addr, wr_addr;
  data_t    rd_data, wr_data;
  int checks = 0, failures = 0;
  data_t model [gb_addr_t];

  global_buffer dut (.*);

  function automatic data_t pat(gb_addr_t a);
    return data_t'(a * 16'd40503 + 16'h1234);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gb_addr_t addrs[$];
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = 0;
    for (int b = 0; b < 27; b++) begin
      addrs.push_back(gb_addr_t'(b * 2048));
      addrs.push_back(gb_addr_t'(b * 2048 + 2047));
      addrs.push_back(gb_addr_t'(b * 2048 + ($urandom % 2048)));
    end
    @(negedge clk);
    foreach (addrs[k]) begin
      wr_en = 1; wr_addr = addrs[k]; wr_data = pat(addrs[k]);
      model[addrs[k]] = pat(addrs[k]);
      @(negedge clk);
    end
    wr_en = 0;
    foreach (addrs[k]) begin
      rd_en = 1; rd_addr = addrs[k];
      @(negedge clk);
      check(rd_data == model[addrs[k]], $sformatf("read addr %0d got %h exp %h", addrs[k], rd_data, model[addrs[k]]));
    end
    // simultaneous read of bank 0 and write of bank 5, then read back
    rd_en = 1; rd_addr = 0; wr_en = 1; wr_addr = gb_addr_t'(5*2048 + 7); wr_data = 16'hbeef;
    @(negedge clk);
    check(rd_data == model[0], "read during write, other bank");
    wr_en = 0; rd_addr = gb_addr_t'(5*2048 + 7);
    @(negedge clk);
    check(rd_data == 16'hbeef, "write during read landed");
    // beyond 27 banks: writes ignored, reads zero
    wr_en = 1; wr_addr = gb_addr_t'(27*2048 + 3); wr_data = 16'h5555; rd_en = 0;
    @(negedge clk);
    wr_en = 0; rd_en = 1; rd_addr = gb_addr_t'(27*2048 + 3);
    @(negedge clk);
    check(rd_data == 0, "out-of-range reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
