// tb_gin: test of the global input network on a 3 x 4 array.
// Row IDs and column IDs are configured so that PEs belong to several
// multicast groups; random tagged words are sent and every PE's received
// list is compared with the list worked out from the ID sets.  Broadcast
// words must reach every PE in order.  With the PEs always ready each
// channel moves one word per cycle with one cycle of latency; with random
// PE readiness nothing is lost or duplicated.
module tb_gin;
  import ecoflow_pkg::*;
  localparam int R = 3, C = 4, NW = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    bc_valid, bc_ready, mc_valid, mc_ready;
  data_t   bc_data;
  mc_pkt_t mc_data;
  logic    id_we, id_is_row, id_en, bc_en_we, bc_en_val;
  logic [7:0] id_row, id_col, id_slot;
  mc_id_t  id_val;
  logic    w_valid [R][C], w_ready [R][C], i_valid [R][C], i_ready [R][C];
  data_t   w_data, i_data;
  logic    ev_bcast, ev_mcast, ev_mcast_multi, ev_stall;
  int checks = 0, failures = 0, n_multi = 0, n_stall = 0;

  gin #(.ROWS(R), .COLS(C)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ID sets: row r holds {r, r+3}; PE (r,c) holds {c, c+4, 9 if c even}
  function automatic bit row_has(int r, int t);  return t == r || t == r + 3; endfunction
  function automatic bit col_has(int c, int t);  return t == c || t == c + 4 || (c % 2 == 0 && t == 9); endfunction

  task automatic set_id(bit is_row, int r, int c, int k, int v);
    @(negedge clk);
    id_we = 1; id_is_row = is_row; id_row = 8'(r); id_col = 8'(c); id_slot = 8'(k);
    id_val = mc_id_t'(v); id_en = 1;
    @(negedge clk);
    id_we = 0;
  endtask

  // expected and received streams per PE
  data_t exp_i [R][C][$], got_i [R][C][$], got_w [R][C][$];
  bit    rand_ready;

  always @(posedge clk) begin
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        if (i_valid[r][c] && i_ready[r][c]) got_i[r][c].push_back(i_data);
        if (w_valid[r][c] && w_ready[r][c]) got_w[r][c].push_back(w_data);
      end
    if (ev_mcast_multi) n_multi++;
    if (ev_stall) n_stall++;
  end

  always @(negedge clk)
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        i_ready[r][c] = !rand_ready || ($urandom % 3 != 0);
        w_ready[r][c] = !rand_ready || ($urandom % 4 != 0);
      end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sent_cyc [$], got_cyc [$];
    bc_valid = 0; mc_valid = 0; bc_data = 0; mc_data = '0; id_we = 0;
    id_is_row = 0; id_row = 0; id_col = 0; id_slot = 0; id_val = 0; id_en = 0;
    bc_en_we = 0; bc_en_val = 0;
    rand_ready = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < R; r++) begin
      set_id(1, r, 0, 0, r);
      set_id(1, r, 0, 3, r + 3);
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        bc_en_we = 1; bc_en_val = 1; id_row = 8'(r); id_col = 8'(c);
        @(negedge clk);
        bc_en_we = 0;
        set_id(0, r, c, 1, c);
        set_id(0, r, c, 4, c + 4);
        if (c % 2 == 0) set_id(0, r, c, 2, 9);
      end
    end
    // phase A: PEs always ready, one word per cycle on both channels
    for (int pass = 0; pass < 2; pass++) begin
      rand_ready = (pass == 1);
      for (int k = 0; k < NW; k++) begin
        int rt, ct;
        rt = $urandom % 7; ct = (k % 5 == 0) ? 9 : $urandom % 10;
        @(negedge clk);
        bc_valid = 1; bc_data = data_t'(k + 1000 * pass);
        mc_valid = 1; mc_data = '{row_tag: mc_id_t'(rt), col_tag: mc_id_t'(ct), data: data_t'(k + 1000 * pass)};
        for (int r = 0; r < R; r++)
          for (int c = 0; c < C; c++)
            if (row_has(r, rt) && col_has(c, ct)) exp_i[r][c].push_back(data_t'(k + 1000 * pass));
        // hold until both channels took their word
        begin
          bit bdone, mdone;
          bdone = 0; mdone = 0;
          while (!(bdone && mdone)) begin
            @(posedge clk);
            if (bc_valid && bc_ready) begin bdone = 1; end
            if (mc_valid && mc_ready) begin mdone = 1; end
            @(negedge clk);
            if (bdone) bc_valid = 0;
            if (mdone) mc_valid = 0;
            if (pass == 0) check(bdone && mdone, "always-ready network accepts every cycle");
          end
        end
      end
      @(negedge clk);
      bc_valid = 0; mc_valid = 0;
      rand_ready = 0;
      repeat (10) @(negedge clk);
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          check(got_i[r][c] == exp_i[r][c],
                $sformatf("pass %0d PE(%0d,%0d) multicast got %0d words, expected %0d",
                          pass, r, c, got_i[r][c].size(), exp_i[r][c].size()));
          check(got_w[r][c].size() == NW, $sformatf("PE(%0d,%0d) broadcast count %0d", r, c, got_w[r][c].size()));
          for (int k = 0; k < got_w[r][c].size(); k++)
            if (got_w[r][c][k] != data_t'(k + 1000 * pass)) begin
              check(0, "broadcast order"); break;
            end
          got_i[r][c].delete(); exp_i[r][c].delete(); got_w[r][c].delete();
        end
    end
    check(n_multi > 0, "some words reached several PEs");
    check(n_stall > 0, "backpressure happened with random readiness");
    // latency: a word accepted at edge t is delivered at edge t+1
    @(negedge clk);
    bc_valid = 1; bc_data = 16'h77;
    @(posedge clk); #1;
    bc_valid = 0;
    check(w_valid[0][0] && w_data == 16'h77, "1-cycle broadcast latency");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
