// tb_gon: test of the global output network on a 3 x 4 array.
// Every PE position offers a list of result packets; the test checks that
// each packet reaches the output exactly once and in per-PE order, that the
// network moves one packet per cycle when the buffer always accepts, that
// with all PEs requesting the grants rotate round-robin (each PE served
// once in every 12 packets), and that backpressure holds the output stable.
module tb_gon;
  import ecoflow_pkg::*;
  localparam int R = 3, C = 4, N = R * C, PER = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     in_valid [R][C], in_ready [R][C];
  gon_pkt_t in_data  [R][C];
  logic     out_valid, out_ready;
  gon_pkt_t out_data;
  int checks = 0, failures = 0;
  int sent [N], got [N];

  gon #(.ROWS(R), .COLS(C)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // packet k of PE p: address = p*256 + k, data = p*1000 + k
  always_comb
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        int p;
        p = r * C + c;
        in_valid[r][c] = rst_n && sent[p] < PER;
        in_data[r][c]  = '{addr: gb_addr_t'(p * 256 + sent[p]), data: psum_t'(p * 1000 + sent[p])};
      end

  always @(posedge clk)
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        if (in_valid[r][c] && in_ready[r][c]) sent[r*C+c] <= sent[r*C+c] + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total = 0, cyc = 0, first = -1, last_p = -1;
    int order [$];
    int at [$];
    gon_pkt_t held;
    foreach (sent[p]) begin sent[p] = 0; got[p] = 0; end
    out_ready = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // phase 1: always ready, all PEs requesting
    while (total < N * PER && cyc < 5000) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        int p, k;
        p = int'(out_data.addr) / 256;
        k = int'(out_data.addr) % 256;
        if (first < 0) first = cyc;
        check(p < N && k == got[p], $sformatf("packet order from PE %0d", p));
        check(out_data.data == psum_t'(p * 1000 + k), "packet data");
        if (p < N) got[p]++;
        order.push_back(p);
        at.push_back(cyc);
        total++;
      end
      cyc++;
      // random backpressure in the second half
      @(negedge clk);
      if (out_valid && !out_ready) check(out_data == held, "output held under backpressure");
      held = out_data;
      out_ready = (total < N * PER / 2) ? 1'b1 : (($urandom % 3) != 0);
    end
    foreach (got[p]) check(got[p] == PER, $sformatf("PE %0d delivered %0d", p, got[p]));
    // first N*PER/2 packets, all PEs busy: each window of N grants covers every PE
    for (int w = 0; w + N <= N * PER / 2; w += N) begin
      bit seen [N];
      foreach (seen[p]) seen[p] = 0;
      for (int k = w; k < w + N; k++) seen[order[k]] = 1;
      foreach (seen[p]) check(seen[p], $sformatf("round-robin window %0d misses PE %0d", w, p));
    end
    check(order.size() >= N * PER / 2, "enough packets");
    // throughput while always ready: one packet per cycle
    check(at[N*PER/2-1] - at[0] == N*PER/2-1,
          $sformatf("%0d packets took %0d cycles", N*PER/2, at[N*PER/2-1] - at[0] + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
