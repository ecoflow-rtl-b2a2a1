// tb_ecoflow_top: end-to-end test of the EcoFlow accelerator at its default
// size (13 x 15 PEs, 27-bank buffer).
//
// The testbench plays the part of the offline compiler.  For each layer it
// works out the zero-free schedule, writes the PE programs, multicast IDs
// and feeder descriptors through the configuration port, fills the buffer,
// streams the broadcast operand, waits for the accelerator to finish and
// compares every result in the buffer with a direct evaluation of the
// convolution done here.
//
// Transposed convolution (input gradients), error Ne x Ne, filter K x K,
// stride S, output O = S(Ne-1)+K, out[S*a+r][S*b+c] += w[r][c] * e[a][b]:
//   * PE(a,b) owns error e[a][b] (one PE per error element);
//   * weights are broadcast in the order w00, w10, w20, w01, ... and every
//     PE uses one per cycle;
//   * in step idx (weight w[r][c], c = idx / K) PE(a,b) multiplies by the
//     error of column (b - floor(c/S)) mod Ne of its row: the circular
//     shift that puts every product of one output in one PE column;
//   * errors are multicast with tag (a, b); PE(a,b) subscribes to the
//     columns it uses, so each PE is in several groups;
//   * outputs made in one PE row are written to the buffer directly; outputs
//     spread over several rows are summed up the column: the bottom PE sends
//     with its last product of the output, each PE above adds it in an extra
//     step placed after its own last product and after the send below (in
//     send order), and the top PE writes the total.
// Dilated convolution (filter gradients), ifmap H x H, error Ne x Ne,
// stride S, gradient Kf = H - S(Ne-1), dw[r][c] = sum i[r+Sa][c+Sb]*e[a][b]:
//   * PE(r,c) computes dw[r][c] locally;
//   * errors are broadcast; ifmap i[y][x] is multicast with tag (y, x); the
//     X-bus of row r holds row IDs {r + S*a}, PE(r,c) column IDs {c + S*b}.
// Layers run: the paper's Fig. 5 example (Ne=2, K=3, S=2), its Fig. 7
// ifmap/error sizes (H=5, Ne=2, S=2, here on a 3 x 3 PE block), a larger
// transposed layer with a zero weight (clock gating), a stride-4 transposed
// layer, a 5x5/stride-2 layer whose sums pass through three PE rows, a
// 13 x 13 error on 169 PEs, a 13 x 13 dilated layer on 9 x 9 PEs, and a
// dilated layer with a 6 x 6 error run as four 3 x 3 blocks (6 IDs would not
// fit an X-bus or a PE; each block needs 3) whose psums go to the buffer
// after each run and are multicast back at the start of the next.
// Each mechanism must be seen at least once: multicast to several PEs,
// vertical psum accumulation, clock-gated MACs, GIN backpressure, GON writes.
// MAC counts must equal the number of non-padding products, and the
// Fig. 5 layer must run at one weight per cycle.
module tb_ecoflow_top;
  import ecoflow_pkg::*;
  localparam int ROWS = 13, COLS = 15;
  localparam int EBASE = 0, OBASE = 8192;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t      cfg;
  logic      start, busy, bc_valid, bc_ready, host_wr_en, host_rd_en;
  logic [10:0] feed_count;
  data_t     bc_data, host_wr_data, host_rd_data;
  gb_addr_t  host_wr_addr, host_rd_addr;
  perf_t     perf;

  ecoflow_top dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------
  // host-side helpers
  // ------------------------------------------------------------------
  task automatic cfg_send(cfg_target_e t, int row, int col, int index, logic [63:0] data);
    cfg.valid = 1; cfg.target = t; cfg.row = 8'(row); cfg.col = 8'(col);
    cfg.index = 16'(index); cfg.data = data;
    @(negedge clk);
    cfg.valid = 0;
  endtask

  task automatic gb_write(int addr, data_t d);
    host_wr_en = 1; host_wr_addr = gb_addr_t'(addr); host_wr_data = d;
    @(negedge clk);
    host_wr_en = 0;
  endtask

  task automatic gb_read(int addr, output data_t d);
    host_rd_en = 1; host_rd_addr = gb_addr_t'(addr);
    @(negedge clk);
    host_rd_en = 0;
    d = host_rd_data;
  endtask

  // PEs and rows configured by the last layer, cleared before the next
  int used_pe [$];
  int used_row [$];

  task automatic clear_config();
    foreach (used_pe[k]) begin
      int r, c;
      r = used_pe[k] / COLS; c = used_pe[k] % COLS;
      cfg_send(CFG_PROG_LEN, r, c, 0, 0);
      cfg_send(CFG_BC_EN, r, c, 0, 0);
      for (int s = 0; s < NUM_IDS; s++) cfg_send(CFG_COL_ID, r, c, s, 0);
    end
    foreach (used_row[k])
      for (int s = 0; s < NUM_IDS; s++) cfg_send(CFG_ROW_ID, used_row[k], 0, s, 0);
    used_pe.delete();
    used_row.delete();
  endtask

  task automatic load_pe(int r, int c, pe_instr_t prog[$], int ids[$]);
    foreach (prog[k]) cfg_send(CFG_PROG, r, c, k, 64'(prog[k]));
    cfg_send(CFG_PROG_LEN, r, c, 0, 64'(prog.size()));
    cfg_send(CFG_BC_EN, r, c, 0, 1);
    foreach (ids[k]) cfg_send(CFG_COL_ID, r, c, k, 64'(ids[k]) | (64'(1) << ID_W));
    used_pe.push_back(r * COLS + c);
  endtask

  task automatic load_row(int r, int ids[$]);
    foreach (ids[k]) cfg_send(CFG_ROW_ID, r, 0, k, 64'(ids[k]) | (64'(1) << ID_W));
    used_row.push_back(r);
  endtask

  // start, stream the broadcast words, wait for busy to fall
  task automatic run(int ndesc, data_t bq[$], output int cycles);
    int sent, t0;
    sent = 0;
    feed_count = 11'(ndesc);
    start = 1;
    @(negedge clk);
    start = 0;
    t0 = cyc;
    while (busy || sent < bq.size()) begin
      bc_valid = sent < bq.size();
      if (sent < bq.size()) bc_data = bq[sent];
      @(posedge clk);
      if (bc_valid && bc_ready) sent++;
      @(negedge clk);
      if (cyc - t0 > 100000) break;
    end
    bc_valid = 0;
    cycles = cyc - t0;
  endtask

  function automatic data_t rnd_val();
    int v;
    v = int'($urandom % 15) - 7;
    if (v == 0) v = 3;
    return data_t'(v);
  endfunction

  function automatic pe_instr_t blank();
    pe_instr_t s;
    s = '0;
    s.out = OUT_NONE;
    return s;
  endfunction

  // mechanism tallies over all layers
  perf_t p0;
  int n_layers_multi_id = 0;
  int n_reload = 0;

  // PE rows that hold products of transposed-convolution output row y
  function automatic int lo_row(int y, int K, int S);
    return (y - K + 1 <= 0) ? 0 : (y - K + 1 + S - 1) / S;
  endfunction
  function automatic int hi_row(int y, int Ne, int S);
    return (y / S > Ne - 1) ? Ne - 1 : y / S;
  endfunction

  // ------------------------------------------------------------------
  // transposed convolution
  // ------------------------------------------------------------------
  task automatic transposed(string name, int Ne, int K, int S, bit zero_w, bit check_rate);
    int O, cycles, nprod;
    data_t e [][], w [][];
    int gold [][];
    data_t bq [$];
    perf_t pa;
    O = S * (Ne - 1) + K;
    $display("-- %s: transposed conv, error %0dx%0d, filter %0dx%0d, stride %0d, output %0dx%0d",
             name, Ne, Ne, K, K, S, O, O);
    e = new[Ne]; foreach (e[a]) e[a] = new[Ne];
    w = new[K];  foreach (w[r]) w[r] = new[K];
    gold = new[O]; foreach (gold[y]) gold[y] = new[O];
    foreach (e[a, b]) e[a][b] = rnd_val();
    foreach (w[r, c]) w[r][c] = rnd_val();
    if (zero_w) w[0][1] = 0;
    foreach (gold[y, x]) gold[y][x] = 0;
    foreach (e[a, b]) foreach (w[r, c]) gold[S*a + r][S*b + c] += int'(e[a][b]) * int'(w[r][c]);
    nprod = 0;
    foreach (e[a, b]) foreach (w[r, c]) if (w[r][c] != 0) nprod++;

    clear_config();
    foreach (e[a, b]) gb_write(EBASE + a * Ne + b, e[a][b]);
    foreach (gold[y, x]) gb_write(OBASE + y * O + x, 16'h7777);
    // descriptors: errors in raster order, tag (row a, column b)
    foreach (e[a, b]) cfg_send(CFG_DESC, 0, 0, a * Ne + b,
                               64'(mc_desc_t'{addr: gb_addr_t'(EBASE + a * Ne + b),
                                              row_tag: mc_id_t'(a), col_tag: mc_id_t'(b)}));
    for (int a = 0; a < Ne; a++) begin
      int ids [$];
      ids.push_back(a);
      load_row(a, ids);
    end
    // One column at a time, bottom row first: a PE must know in which order
    // and after which step the PE below sends each psum up.
    for (int b = 0; b < Ne; b++) begin
      int snd_l [$], snd_p [$];   // labels the PE below sends up, in order, and the step
      snd_l.delete(); snd_p.delete();
      for (int a = Ne - 1; a >= 0; a--) begin
        pe_instr_t prog [$];
        int cols [$], lab_at [$], nl [$], np [$];
        int slot_of [int];
        int last_idx [int];
        int extra [int][$];
        int nslot, running;
        prog.delete(); cols.delete(); lab_at.delete(); nl.delete(); np.delete();
        slot_of.delete(); last_idx.delete(); extra.delete();
        // error columns used by this PE (ascending = arrival order)
        for (int bp = 0; bp < Ne; bp++)
          for (int c = 0; c < K; c++)
            if (((b - c / S) % Ne + Ne) % Ne == bp) begin cols.push_back(bp); break; end
        check(cols.size() <= NUM_IDS, "multicast IDs per PE fit");
        if (cols.size() > 1) n_layers_multi_id++;
        foreach (cols[k]) begin
          pe_instr_t s;
          s = blank(); s.i_pop = 1; s.i_store = 1; s.i_addr = IA_W'(k);
          prog.push_back(s);
        end
        // label (output index) of each step; weight idx = r + K*c
        for (int idx = 0; idx < K * K; idx++) begin
          int r, c, bp, x;
          r = idx % K; c = idx / K;
          bp = ((b - c / S) % Ne + Ne) % Ne;
          x = S * bp + c;
          // every product of output (y,x) sits in PE column floor(x/S) mod Ne
          check(b == (x / S) % Ne, "circular shift keeps each output in one PE column");
          lab_at.push_back((S * a + r) * O + x);
          last_idx[(S * a + r) * O + x] = idx;
        end
        // a psum from below is added after the later of this PE's last
        // product of that label and the step at which the PE below sends it,
        // never before one that was sent earlier
        running = -1;
        foreach (snd_l[k]) begin
          int st;
          check(last_idx.exists(snd_l[k]), "rows of one output are consecutive");
          st = last_idx[snd_l[k]];
          if (snd_p[k] > st) st = snd_p[k];
          if (running > st) st = running;
          running = st;
          extra[st].push_back(snd_l[k]);
        end
        nslot = 0;
        for (int idx = 0; idx < K * K; idx++) begin
          int l, lo, hi;
          pe_instr_t s;
          l = lab_at[idx];
          lo = lo_row(l / O, K, S); hi = hi_row(l / O, Ne, S);
          s = blank();
          s.w_pop = 1; s.mac = 1;
          foreach (cols[k]) if (cols[k] == ((b - (idx / K) / S) % Ne + Ne) % Ne) s.i_addr = IA_W'(k);
          if (!slot_of.exists(l)) begin
            slot_of[l] = nslot++;
            s.acc_init = 1;
          end
          s.p_addr = PA_W'(slot_of[l]);
          if (idx == last_idx[l]) begin
            if (lo == hi) begin
              // output made in this PE row only: write it
              s.out = OUT_GON; s.out_addr = gb_addr_t'(OBASE + l);
            end else if (a == hi) begin
              // bottom of its column segment: pass the psum up
              s.out = OUT_UP; nl.push_back(l); np.push_back(idx);
            end
          end
          prog.push_back(s);
          if (extra.exists(idx))
            foreach (extra[idx][k]) begin
              int l2;
              pe_instr_t t;
              l2 = extra[idx][k];
              t = blank(); t.add_in = 1; t.p_addr = PA_W'(slot_of[l2]);
              if (a == lo_row(l2 / O, K, S)) begin
                t.out = OUT_GON; t.out_addr = gb_addr_t'(OBASE + l2);
              end else begin
                t.out = OUT_UP; nl.push_back(l2); np.push_back(idx);
              end
              prog.push_back(t);
            end
        end
        check(nslot <= PSUM_SPAD, "labels fit the psum register file");
        load_pe(a, b, prog, cols);
        snd_l = nl; snd_p = np;
      end
    end
    // weights broadcast in the order w00, w10, w20, w01, ...
    for (int idx = 0; idx < K * K; idx++) bq.push_back(w[idx % K][idx / K]);
    pa = perf;
    @(negedge clk);
    run(Ne * Ne, bq, cycles);
    foreach (gold[y, x]) begin
      data_t d;
      gb_read(OBASE + y * O + x, d);
      check(d == data_t'(gold[y][x]), $sformatf("%s out[%0d][%0d] = %0d, expected %0d", name, y, x, d, gold[y][x]));
    end
    check(perf.macs - pa.macs == Ne * Ne * K * K,
          $sformatf("%s: %0d MACs issued, expected %0d (no padding zeros)", name, perf.macs - pa.macs, Ne*Ne*K*K));
    check(perf.macs - pa.macs - (perf.gated - pa.gated) == nprod,
          $sformatf("%s: %0d ungated MACs, expected %0d", name, perf.macs - pa.macs - (perf.gated - pa.gated), nprod));
    $display("   %0d cycles, %0d MACs (%0d gated); on the zero-padded error it would be %0d MACs",
             cycles, perf.macs - pa.macs, perf.gated - pa.gated, O * O * K * K);
    if (check_rate)
      check(cycles <= K * K + 30, $sformatf("%s: %0d cycles for %0d weights", name, cycles, K * K));
  endtask

  // ------------------------------------------------------------------
  // dilated convolution
  // ------------------------------------------------------------------
  // nsplit > 1 cuts the error into nsplit x nsplit blocks run one after the
  // other, so each run needs only the row and column IDs of its own block.
  // Every run writes its psums to the buffer; the next run multicasts them
  // back first (tag (20+r, 20+c), one extra ID per X-bus and per PE) and
  // each PE starts from that value (acc_init + add_op), not from the value
  // left in its register file.
  task automatic dilated(string name, int H, int Ne, int S, int nsplit);
    int Kf, cycles, total;
    data_t im [][], e [][];
    int gold [][];
    perf_t pa;
    Kf = H - S * (Ne - 1);
    $display("-- %s: dilated conv, ifmap %0dx%0d, error %0dx%0d dilated by %0d, gradient %0dx%0d, %0d pass(es)",
             name, H, H, Ne, Ne, S, Kf, Kf, nsplit * nsplit);
    im = new[H]; foreach (im[y]) im[y] = new[H];
    e = new[Ne]; foreach (e[a]) e[a] = new[Ne];
    gold = new[Kf]; foreach (gold[r]) gold[r] = new[Kf];
    foreach (im[y, x]) im[y][x] = rnd_val();
    foreach (e[a, b]) e[a][b] = rnd_val();
    foreach (gold[r, c]) begin
      gold[r][c] = 0;
      foreach (e[a, b]) gold[r][c] += int'(im[r + S*a][c + S*b]) * int'(e[a][b]);
    end
    clear_config();
    foreach (im[y, x]) gb_write(EBASE + y * H + x, im[y][x]);
    foreach (gold[r, c]) gb_write(OBASE + r * Kf + c, 16'h7777);
    pa = perf;
    total = 0;
    for (int p = 0; p < nsplit * nsplit; p++) begin
      int a0, a1, b0, b1, n;
      data_t bq [$];
      bq.delete();
      // error block rows a0 .. a1-1, columns b0 .. b1-1
      a0 = (p / nsplit) * Ne / nsplit; a1 = (p / nsplit + 1) * Ne / nsplit;
      b0 = (p % nsplit) * Ne / nsplit; b1 = (p % nsplit + 1) * Ne / nsplit;
      n = (a1 - a0) * (b1 - b0);
      if (p > 0) clear_config();
      // descriptors: psums of the previous run (if any), then the ifmap
      for (int k = 0; k < ((p > 0) ? Kf * Kf : 0); k++)
        cfg_send(CFG_DESC, 0, 0, k,
                 64'(mc_desc_t'{addr: gb_addr_t'(OBASE + k), row_tag: mc_id_t'(20 + k / Kf),
                                col_tag: mc_id_t'(20 + k % Kf)}));
      foreach (im[y, x]) cfg_send(CFG_DESC, 0, 0, ((p > 0) ? Kf * Kf : 0) + y * H + x,
                                  64'(mc_desc_t'{addr: gb_addr_t'(EBASE + y * H + x),
                                                 row_tag: mc_id_t'(y), col_tag: mc_id_t'(x)}));
      for (int r = 0; r < Kf; r++) begin
        int ids [$];
        ids.delete();
        for (int a = a0; a < a1; a++) ids.push_back(r + S * a);
        if (nsplit > 1) ids.push_back(20 + r);
        check(ids.size() <= NUM_IDS, "row IDs per X-bus fit");
        load_row(r, ids);
        for (int c = 0; c < Kf; c++) begin
          pe_instr_t prog [$];
          int cids [$];
          prog.delete(); cids.delete();
          for (int b = b0; b < b1; b++) cids.push_back(c + S * b);
          if (nsplit > 1) cids.push_back(20 + c);
          check(cids.size() <= NUM_IDS, "column IDs per PE fit");
          if (p > 0) begin
            pe_instr_t s;
            s = blank();
            s.i_pop = 1; s.add_op = 1; s.acc_init = 1;
            prog.push_back(s);
            n_reload++;
          end
          for (int k = 0; k < n; k++) begin
            pe_instr_t s;
            s = blank();
            s.w_pop = 1; s.i_pop = 1; s.mac = 1; s.acc_init = (k == 0 && p == 0);
            if (k == n - 1) begin
              s.out = OUT_GON; s.out_addr = gb_addr_t'(OBASE + r * Kf + c);
            end
            prog.push_back(s);
          end
          load_pe(r, c, prog, cids);
        end
      end
      for (int a = a0; a < a1; a++)
        for (int b = b0; b < b1; b++) bq.push_back(e[a][b]);
      @(negedge clk);
      run(((p > 0) ? Kf * Kf : 0) + H * H, bq, cycles);
      total += cycles;
    end
    foreach (gold[r, c]) begin
      data_t d;
      gb_read(OBASE + r * Kf + c, d);
      check(d == data_t'(gold[r][c]), $sformatf("%s dw[%0d][%0d] = %0d, expected %0d", name, r, c, d, gold[r][c]));
    end
    check(perf.macs - pa.macs == Kf * Kf * Ne * Ne,
          $sformatf("%s: %0d MACs, expected %0d", name, perf.macs - pa.macs, Kf*Kf*Ne*Ne));
    $display("   %0d cycles, %0d MACs; dilated (padded) error would need %0d MACs",
             total, perf.macs - pa.macs, Kf * Kf * (S*(Ne-1)+1) * (S*(Ne-1)+1));
  endtask

  // ------------------------------------------------------------------
  initial begin
    cfg = '0; start = 0; feed_count = 0; bc_valid = 0; bc_data = 0;
    host_wr_en = 0; host_rd_en = 0; host_wr_addr = 0; host_rd_addr = 0; host_wr_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    p0 = perf;
    transposed("fig5", 2, 3, 2, 0, 1);
    dilated("fig7", 5, 2, 2, 1);
    transposed("t4x4_k4_s2_zero_weight", 4, 4, 2, 1, 0);
    transposed("t3x3_k4_s4", 3, 4, 4, 0, 0);
    transposed("t5x5_k5_s2", 5, 5, 2, 0, 0);
    transposed("t13x13_k3_s2", 13, 3, 2, 0, 0);
    dilated("d13_e3_s2", 13, 3, 2, 1);
    dilated("d13_e6_s2_four_passes", 13, 6, 2, 2);
    $display("mechanisms: multicast-to-many=%0d multi-ID PEs=%0d vertical=%0d gated=%0d gin_stall=%0d gon=%0d bcast=%0d psum reloads=%0d",
             perf.mcast_multi - p0.mcast_multi, n_layers_multi_id, perf.vert - p0.vert,
             perf.gated - p0.gated, perf.gin_stall - p0.gin_stall, perf.gon - p0.gon, perf.bcast - p0.bcast,
             n_reload);
    check(perf.mcast_multi - p0.mcast_multi > 0, "multicast to several PEs happened");
    check(n_layers_multi_id > 0, "a PE subscribed to several multicast groups");
    check(perf.vert - p0.vert > 0, "vertical psum accumulation happened");
    check(perf.gated - p0.gated > 0, "zero-operand clock gating happened");
    check(perf.gin_stall - p0.gin_stall > 0, "GIN backpressure happened");
    check(perf.gon - p0.gon > 0, "GON writes happened");
    check(perf.bcast - p0.bcast > 0, "broadcast happened");
    check(n_reload > 0, "psums reloaded from the buffer between passes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
