// tb_pe_array: test of a 2 x 3 PE array and its vertical psum links.
// Every PE multiplies a broadcast weight by its own ifmap word.  In each
// column the bottom PE sends its product up, the top PE adds it to its own
// product and writes the sum to the GON; in column 2 both PEs also keep a
// second, private label that they write to the GON directly.  The test
// checks every result, the number of upward transfers, that start reaches
// all PEs and that all_done rises only after the last PE is finished.
module tb_pe_array;
  import ecoflow_pkg::*;
  localparam int R = 2, C = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       start, prog_we, len_we;
  logic [7:0] prog_row, prog_col, prog_addr;
  pe_instr_t  prog_data;
  logic [8:0] len_data;
  logic       w_valid [R][C], w_ready [R][C], i_valid [R][C], i_ready [R][C];
  data_t      w_data, i_data;
  logic       gon_valid [R][C], gon_ready [R][C];
  gon_pkt_t   gon_data [R][C];
  logic       all_done;
  logic [15:0] n_mac, n_gated, n_vert;
  int checks = 0, failures = 0, vert = 0, macs = 0;
  psum_t results [int];

  pe_array #(.ROWS(R), .COLS(C)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic pe_instr_t mk(bit mac, bit init, bit add_in, int p, out_sel_e out, int addr);
    pe_instr_t s;
    s = '0;
    s.w_pop = 1; s.i_pop = 1;
    s.mac = mac; s.acc_init = init; s.add_in = add_in; s.p_addr = PA_W'(p);
    s.out = out; s.out_addr = gb_addr_t'(addr);
    return s;
  endfunction

  task automatic put(int r, int c, int k, pe_instr_t s);
    @(negedge clk);
    prog_we = 1; prog_row = 8'(r); prog_col = 8'(c); prog_addr = 8'(k); prog_data = s;
    @(negedge clk);
    prog_we = 0;
  endtask

  task automatic set_len(int r, int c, int n);
    @(negedge clk);
    len_we = 1; prog_row = 8'(r); prog_col = 8'(c); len_data = 9'(n);
    @(negedge clk);
    len_we = 0;
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        gon_ready[r][c] <= 1'b1;
        if (gon_valid[r][c] && gon_ready[r][c]) results[int'(gon_data[r][c].addr)] = gon_data[r][c].data;
      end
    vert += int'(n_vert);
    macs += int'(n_mac);
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t wv [2];
  data_t iv [R][C][2];

  initial begin
    start = 0; prog_we = 0; len_we = 0; prog_row = 0; prog_col = 0; prog_addr = 0;
    prog_data = '0; len_data = 0; w_data = 0; i_data = 0;
    foreach (w_valid[r, c]) begin w_valid[r][c] = 0; i_valid[r][c] = 0; gon_ready[r][c] = 1; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    wv[0] = 7; wv[1] = -3;
    foreach (iv[r, c, k]) iv[r][c][k] = data_t'(r * 10 + c * 3 + k + 1);
    for (int c = 0; c < C; c++) begin
      // bottom PE: p0 = w0*i0 (+ w1*i1 in a second label for column 2), send p0 up
      put(1, c, 0, mk(1, 1, 0, 0, OUT_UP, 0));
      put(1, c, 1, mk(1, 1, 0, 1, (c == 2) ? OUT_GON : OUT_NONE, 200 + c));
      // top PE: p0 = w0*i0 + below -> GON
      put(0, c, 0, mk(1, 1, 1, 0, OUT_GON, 100 + c));
      put(0, c, 1, mk(1, 1, 0, 1, (c == 2) ? OUT_GON : OUT_NONE, 300 + c));
      set_len(1, c, 2);
      set_len(0, c, 2);
    end
    @(negedge clk);
    check(all_done, "idle before start");
    start = 1;
    @(negedge clk);
    start = 0;
    check(!all_done, "all PEs started");
    // ifmap words: each PE gets its two words through its own i_valid
    for (int k = 0; k < 2; k++) begin
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          i_data = iv[r][c][k];
          i_valid[r][c] = 1;
          @(negedge clk);
          check(i_ready[r][c], "ifmap queue accepts");
          i_valid[r][c] = 0;
        end
      w_data = wv[k];
      foreach (w_valid[r, c]) w_valid[r][c] = 1;
      @(negedge clk);
      foreach (w_valid[r, c]) w_valid[r][c] = 0;
    end
    begin
      int guard = 0;
      while (!all_done && guard < 100) begin @(negedge clk); guard++; end
    end
    repeat (3) @(negedge clk);
    check(all_done, "all PEs done");
    for (int c = 0; c < C; c++) begin
      psum_t e;
      e = psum_t'(wv[0] * iv[0][c][0] + wv[0] * iv[1][c][0]);
      check(results.exists(100 + c) && results[100 + c] == e,
            $sformatf("column %0d vertical sum %0d expected %0d", c, results[100 + c], e));
    end
    check(results.exists(202) && results[202] == psum_t'(wv[1] * iv[1][2][1]), "bottom private label");
    check(results.exists(302) && results[302] == psum_t'(wv[1] * iv[0][2][1]), "top private label");
    check(results.size() == 5, $sformatf("%0d results written, expected 5", results.size()));
    check(vert == C, $sformatf("%0d upward transfers, expected %0d", vert, C));
    check(macs == 2 * R * C, $sformatf("%0d MACs counted, expected %0d", macs, 2 * R * C));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
