// tb_pe: test of one EcoFlow PE.
// Programs are written into the PE and run against data pushed into its
// queues; results leaving on the GON and the upward psum link are compared
// with sums computed here.  Covered: a 16-step dot product streamed at one
// MAC per cycle with the result 3 cycles after the last issue (2-stage
// multiplier + 1-stage accumulator) plus one queue cycle; two labels
// interleaved in separate psum registers with operands kept in the spads;
// adding a psum from below and sending upward, with the upward link stalled
// for a while; clock gating of MACs with a zero operand; and a psum
// reloaded through the multicast queue (add_op) before further MACs.
module tb_pe;
  import ecoflow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       start, prog_we, len_we;
  logic [7:0] prog_addr;
  pe_instr_t  prog_data;
  logic [8:0] len_data;
  logic       w_in_valid, w_in_ready, i_in_valid, i_in_ready;
  data_t      w_in_data, i_in_data;
  logic       pin_valid, pin_ready, pout_valid, pout_ready, gon_valid, gon_ready;
  psum_t      pin_data, pout_data;
  gon_pkt_t   gon_data;
  logic       done, ev_mac, ev_gated;
  int checks = 0, failures = 0, cyc = 0;
  int mac_cycles [$];
  int n_gated = 0;

  pe dut (.*);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ev_mac) mac_cycles.push_back(cyc);
    if (ev_gated) n_gated++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic pe_instr_t step(bit w_pop, bit w_store, int w_addr, bit i_pop, bit i_store,
                                     int i_addr, bit mac, bit acc_init, bit add_in, int p_addr,
                                     out_sel_e out, int out_addr);
    pe_instr_t s;
    s = '0;
    s.w_pop = w_pop; s.w_store = w_store; s.w_addr = WA_W'(w_addr);
    s.i_pop = i_pop; s.i_store = i_store; s.i_addr = IA_W'(i_addr);
    s.mac = mac; s.acc_init = acc_init; s.add_in = add_in; s.p_addr = PA_W'(p_addr);
    s.out = out; s.out_addr = gb_addr_t'(out_addr);
    return s;
  endfunction

  pe_instr_t prog [$];
  task automatic load_and_start();
    foreach (prog[k]) begin
      @(negedge clk);
      prog_we = 1; prog_addr = 8'(k); prog_data = prog[k];
    end
    @(negedge clk);
    prog_we = 0; len_we = 1; len_data = 9'(prog.size());
    @(negedge clk);
    len_we = 0; start = 1;
    @(negedge clk);
    start = 0;
  endtask

  // queue feeders
  data_t wq [$], iq [$];
  always @(negedge clk) begin
    w_in_valid = wq.size() > 0; if (wq.size() > 0) w_in_data = wq[0];
    i_in_valid = iq.size() > 0; if (iq.size() > 0) i_in_data = iq[0];
  end
  always @(posedge clk) begin
    if (w_in_valid && w_in_ready) void'(wq.pop_front());
    if (i_in_valid && i_in_ready) void'(iq.pop_front());
  end

  task automatic wait_gon(output gon_pkt_t p, output int at);
    int guard = 0;
    while (!(gon_valid && gon_ready) && guard < 200) begin @(posedge clk); #1; guard++; end
    p = gon_data; at = cyc;
    @(posedge clk); #1;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gon_pkt_t p;
    int at;
    start = 0; prog_we = 0; len_we = 0; prog_addr = 0; prog_data = '0; len_data = 0;
    pin_valid = 0; pin_data = 0; pout_ready = 1; gon_ready = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(done, "idle after reset");

    // ---- 1: 16-term dot product, operands straight from the queues ----
    begin
      int exp;
      exp = 0;
      prog.delete();
      for (int k = 0; k < 16; k++) begin
        data_t a, b;
        a = data_t'($signed($urandom % 200) - 100);
        b = data_t'($signed($urandom % 200) - 100);
        if (a == 0) a = 1;
        if (b == 0) b = 1;
        wq.push_back(a); iq.push_back(b);
        exp += int'(a) * int'(b);
        prog.push_back(step(1, 0, 0, 1, 0, 0, 1, k == 0, 0, 3, (k == 15) ? OUT_GON : OUT_NONE, 42));
      end
      mac_cycles.delete();
      load_and_start();
      wait_gon(p, at);
      check(p.addr == 42 && p.data == psum_t'(exp), $sformatf("dot product %0d, expected %0d", p.data, exp));
      check(mac_cycles.size() == 16 && mac_cycles[15] - mac_cycles[0] == 15,
            "one MAC per cycle while operands are queued");
      // last issue at edge L (ev_mac seen at L+1): S1 at L+1, S2 L+2, S3 L+3,
      // accumulate + queue write at L+4, visible on gon_* during cycle L+4
      check(at - mac_cycles[15] == 3, $sformatf("result latency %0d cycles after last MAC event", at - mac_cycles[15]));
      repeat (3) @(negedge clk);
      check(done, "done after program");
    end

    // ---- 2: two interleaved labels, operands reused from the spads ----
    begin
      data_t w0, w1, e0, e1;
      int s0, s1;
      w0 = 3; w1 = -7; e0 = 11; e1 = 5;
      prog.delete();
      wq.push_back(w0); wq.push_back(w1); iq.push_back(e0); iq.push_back(e1);
      prog.push_back(step(1, 1, 10, 1, 1, 20, 1, 1, 0, 0, OUT_NONE, 0));  // p0 = w0*e0
      prog.push_back(step(1, 1, 11, 1, 1, 21, 1, 1, 0, 1, OUT_NONE, 0));  // p1 = w1*e1
      prog.push_back(step(0, 0, 10, 0, 0, 21, 1, 0, 0, 0, OUT_NONE, 0));  // p0 += w0*e1
      prog.push_back(step(0, 0, 11, 0, 0, 20, 1, 0, 0, 1, OUT_NONE, 0));  // p1 += w1*e0
      prog.push_back(step(0, 0, 11, 0, 0, 21, 1, 0, 0, 0, OUT_GON, 100)); // p0 += w1*e1 -> out
      prog.push_back(step(0, 0, 0, 0, 0, 0, 0, 0, 0, 1, OUT_GON, 101));   // send p1
      s0 = w0*e0 + w0*e1 + w1*e1;
      s1 = w1*e1 + w1*e0;
      load_and_start();
      wait_gon(p, at);
      check(p.addr == 100 && p.data == psum_t'(s0), $sformatf("label 0 sum %0d expected %0d", p.data, s0));
      wait_gon(p, at);
      check(p.addr == 101 && p.data == psum_t'(s1), $sformatf("label 1 sum %0d expected %0d", p.data, s1));
    end

    // ---- 3: add a psum from below, send up; upward link stalled ----
    begin
      int exp;
      int guard;
      prog.delete();
      wq.push_back(6); iq.push_back(-4);
      prog.push_back(step(1, 0, 0, 1, 0, 0, 1, 1, 1, 2, OUT_UP, 0));   // p2 = 6*-4 + below
      pout_ready = 0;
      load_and_start();
      repeat (6) @(negedge clk);
      check(!pout_valid, "waits for the psum from below");
      pin_valid = 1; pin_data = 1000;
      @(negedge clk);
      pin_valid = 0;
      repeat (4) @(negedge clk);
      check(pout_valid && pout_data == 976, $sformatf("upward psum %0d expected 976", pout_data));
      repeat (3) @(negedge clk);
      check(pout_valid && pout_data == 976 && !done, "held while the PE above is not ready");
      pout_ready = 1;
      @(negedge clk);
      pout_ready = 0;
      guard = 0;
      while (!done && guard < 20) begin @(negedge clk); guard++; end
      check(done && !pout_valid, "sent once, then done");
      pout_ready = 1;
      exp = 0;
    end

    // ---- 4: clock gating on zero operands ----
    begin
      int g0;
      g0 = n_gated;
      prog.delete();
      wq.push_back(0); iq.push_back(9);
      wq.push_back(4); iq.push_back(0);
      wq.push_back(2); iq.push_back(8);
      prog.push_back(step(1, 0, 0, 1, 0, 0, 1, 1, 0, 4, OUT_NONE, 0));
      prog.push_back(step(1, 0, 0, 1, 0, 0, 1, 0, 0, 4, OUT_NONE, 0));
      prog.push_back(step(1, 0, 0, 1, 0, 0, 1, 0, 0, 4, OUT_GON, 7));
      load_and_start();
      wait_gon(p, at);
      check(p.data == 16, $sformatf("sum with gated products %0d expected 16", p.data));
      check(n_gated - g0 == 2, $sformatf("%0d gated MACs, expected 2", n_gated - g0));
    end

    // ---- 5: reload a psum from the multicast queue (add_op), then MACs ----
    begin
      pe_instr_t s;
      int m0;
      m0 = mac_cycles.size();
      prog.delete();
      iq.push_back(-1234);                       // psum stored by an earlier pass
      wq.push_back(5); iq.push_back(7);
      wq.push_back(-3); iq.push_back(2);
      s = step(0, 0, 0, 1, 0, 0, 0, 1, 0, 6, OUT_NONE, 0);
      s.add_op = 1;                              // p6 = reloaded psum
      prog.push_back(s);
      prog.push_back(step(1, 0, 0, 1, 0, 0, 1, 0, 0, 6, OUT_NONE, 0));
      prog.push_back(step(1, 0, 0, 1, 0, 0, 1, 0, 0, 6, OUT_GON, 9));
      load_and_start();
      wait_gon(p, at);
      check(p.addr == 9 && p.data == psum_t'(-1234 + 35 - 6),
            $sformatf("reloaded psum plus MACs %0d expected %0d", p.data, -1234 + 35 - 6));
      check(mac_cycles.size() - m0 == 2, "a reload is not counted as a MAC");
    end

    // ---- 5: reload a psum from the multicast queue (add_op), then MACs ----
    begin
      pe_instr_t s;
      int m0;
      m0 = mac_cycles.size();
      prog.delete();
      iq.push_back(-1234);                       // psum stored by an earlier pass
      wq.push_back(5); iq.push_back(7);
      wq.push_back(-3); iq.push_back(2);
      s = step(0, 0, 0, 1, 0, 0, 0, 1, 0, 6, OUT_NONE, 0);
      s.add_op = 1;                              // p6 = reloaded psum
      prog.push_back(s);
      prog.push_back(step(1, 0, 0, 1, 0, 0, 1, 0, 0, 6, OUT_NONE, 0));
      prog.push_back(step(1, 0, 0, 1, 0, 0, 1, 0, 0, 6, OUT_GON, 9));
      load_and_start();
      wait_gon(p, at);
      check(p.addr == 9 && p.data == psum_t'(-1234 + 35 - 6),
            $sformatf("reloaded psum plus MACs %0d expected %0d", p.data, -1234 + 35 - 6));
      check(mac_cycles.size() - m0 == 2, "a reload is not counted as a MAC");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
