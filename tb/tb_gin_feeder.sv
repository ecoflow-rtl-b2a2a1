// tb_gin_feeder: test of the multicast feeder.
// A 64-word memory with one cycle of read latency stands in for the global
// buffer.  Descriptors with random addresses and tags are loaded, the feeder
// is started, and the tagged words it sends are compared with the
// descriptor list in order.  With the network always ready the stream must
// run at one word per cycle; with random readiness nothing may be lost; busy
// must fall after the last word.
module tb_gin_feeder;
  import ecoflow_pkg::*;
  localparam int ND = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       desc_we, start, busy, rd_en, mc_valid, mc_ready;
  logic [5:0] desc_addr;
  mc_desc_t   desc_data;
  logic [6:0] count;
  gb_addr_t   rd_addr;
  data_t      rd_data;
  mc_pkt_t    mc_data;
  data_t      mem [64];
  mc_desc_t   descs [ND];
  int checks = 0, failures = 0;

  gin_feeder #(.DESC_DEPTH(64)) dut (.*);

  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_addr[5:0]];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    desc_we = 0; start = 0; mc_ready = 1; desc_addr = 0; desc_data = '0; count = 0;
    foreach (mem[k]) mem[k] = data_t'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (descs[k]) begin
      descs[k] = '{addr: gb_addr_t'($urandom % 64), row_tag: mc_id_t'($urandom), col_tag: mc_id_t'($urandom)};
      desc_we = 1; desc_addr = 6'(k); desc_data = descs[k];
      @(negedge clk);
    end
    desc_we = 0;
    for (int pass = 0; pass < 2; pass++) begin
      int got, cyc, first;
      got = 0; cyc = 0; first = -1;
      start = 1; count = 7'(ND);
      @(negedge clk);
      start = 0;
      while (got < ND && cyc < 2000) begin
        mc_ready = (pass == 0) ? 1'b1 : ($urandom % 2 == 0);
        @(posedge clk);
        if (mc_valid && mc_ready) begin
          if (first < 0) first = cyc;
          check(mc_data.row_tag == descs[got].row_tag && mc_data.col_tag == descs[got].col_tag,
                $sformatf("tags of word %0d", got));
          check(mc_data.data == mem[descs[got].addr[5:0]], $sformatf("data of word %0d", got));
          got++;
        end
        cyc++;
        @(negedge clk);
      end
      check(got == ND, "all words sent");
      if (pass == 0) begin
        check(first == 2, $sformatf("first word after %0d cycles, expected 2", first));
        check(cyc - first == ND, $sformatf("%0d words took %0d cycles", ND, cyc - first));
      end
      repeat (3) @(negedge clk);
      check(!busy && !mc_valid, $sformatf("pass %0d idle after the last word (busy=%0b)", pass, busy));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
