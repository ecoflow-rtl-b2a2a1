// pe: one EcoFlow processing element.
//
// A PE owns three register files (ifmap 75 x 16 b, filter 224 x 16 b,
// psum 24 x 32 b), a multiplier and an adder, four I/O queues and a small
// program memory.  The program is the per-PE "FSM" that the offline compiler
// produces: a list of pe_instr_t steps, run once from step 0 after start.
// Each step may
//   * take its weight from the head of the broadcast queue (optionally also
//     keeping it in the filter spad) or from the filter spad,
//   * take its ifmap/error operand from the head of the multicast queue
//     (optionally keeping it in the ifmap spad) or from the ifmap spad,
//   * multiply-accumulate into psum register p_addr, starting a new label
//     (acc_init) or adding to the running one,
//   * add a psum arriving from the PE below (add_in),
//   * add the ifmap/error operand itself (add_op): a partial sum stored in
//     the global buffer by an earlier pass and multicast back to this PE;
//     it goes through the multiplier with a weight of 1, so it has the same
//     3-cycle latency as a MAC but is not counted as one,
//   * send the resulting sum up the column (OUT_UP) or to the global buffer
//     through the GON (OUT_GON, with the buffer address in the step).
// Because psum registers are addressed per step, products of several labels
// can be interleaved in one PE, as the EcoFlow schedules require.
//
// Pipeline (Table 4: 2-stage multiplier, 1-stage accumulator, 1-cycle
// register latency):
//   issue -> S1 operands registered -> S2 product stage 1 -> S3 product
//   stage 2, accumulate and write back/send at the end of S3.
// A step issues when the queues it pops are non-empty; a step in S3 that
// must pop a psum from below or push to a full queue stalls the pipeline.
// With operands ready the PE issues one MAC per cycle; the sum of a step
// issued in cycle t is written in cycle t+3.  Consecutive steps may use the
// same psum register without bubbles because S3 reads and writes it.
//
// Clock gating (Table 4, "zero operations"): when either operand is zero
// the multiplier registers are not loaded and the product counts as zero.
//
// done is high while the PE is idle (after reset, and after the last step of
// a started program has left S3).  Program words are written through
// prog_we/prog_addr/prog_data while the PE is idle; prog_len sets how many
// steps run.  A PE whose length is 0 does nothing when started.
module pe
  import ecoflow_pkg::*;
#(
  parameter int unsigned PROG_DEPTH = 256,
  parameter int unsigned QDEPTH     = 8,
  parameter int unsigned PROG_AW    = $clog2(PROG_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  // program load
  input  logic            prog_we,
  input  logic [PROG_AW-1:0] prog_addr,
  input  pe_instr_t       prog_data,
  input  logic            len_we,
  input  logic [PROG_AW:0] len_data,
  // broadcast input (filter / error stream)
  input  logic            w_in_valid,
  output logic            w_in_ready,
  input  data_t           w_in_data,
  // multicast input (ifmap / error elements)
  input  logic            i_in_valid,
  output logic            i_in_ready,
  input  data_t           i_in_data,
  // local network: psum from the PE below
  input  logic            pin_valid,
  output logic            pin_ready,
  input  psum_t           pin_data,
  // local network: psum to the PE above
  output logic            pout_valid,
  input  logic            pout_ready,
  output psum_t           pout_data,
  // global output network
  output logic            gon_valid,
  input  logic            gon_ready,
  output gon_pkt_t        gon_data,
  // status
  output logic            done,
  output logic            ev_mac,
  output logic            ev_gated
);

  // ---------------- program ----------------
  pe_instr_t            prog [PROG_DEPTH];
  logic [PROG_AW:0]     prog_len;
  logic [PROG_AW:0]     pc;
  logic                 running;
  pe_instr_t            ins;

  always_ff @(posedge clk) begin
    if (prog_we) prog[prog_addr] <= prog_data;
  end

  // ---------------- queues -----------------
  logic  wq_valid, wq_pop, iq_valid, iq_pop, pq_valid, pq_pop;
  data_t wq_data, iq_data;
  psum_t pq_data;
  logic  oq_in_valid, oq_in_ready;
  gon_pkt_t oq_in_data;

  io_queue #(.W(DATA_W), .DEPTH(QDEPTH)) u_wq (
    .clk, .rst_n, .in_valid(w_in_valid), .in_ready(w_in_ready), .in_data(w_in_data),
    .out_valid(wq_valid), .out_ready(wq_pop), .out_data(wq_data), .count());
  io_queue #(.W(DATA_W), .DEPTH(QDEPTH)) u_iq (
    .clk, .rst_n, .in_valid(i_in_valid), .in_ready(i_in_ready), .in_data(i_in_data),
    .out_valid(iq_valid), .out_ready(iq_pop), .out_data(iq_data), .count());
  io_queue #(.W(PSUM_W), .DEPTH(QDEPTH)) u_pq (
    .clk, .rst_n, .in_valid(pin_valid), .in_ready(pin_ready), .in_data(pin_data),
    .out_valid(pq_valid), .out_ready(pq_pop), .out_data(pq_data), .count());
  io_queue #(.W($bits(gon_pkt_t)), .DEPTH(QDEPTH)) u_oq (
    .clk, .rst_n, .in_valid(oq_in_valid), .in_ready(oq_in_ready), .in_data(oq_in_data),
    .out_valid(gon_valid), .out_ready(gon_ready), .out_data(gon_data), .count());

  // ---------------- register files ---------
  data_t wspad [FILTER_SPAD];
  data_t ispad [IFMAP_SPAD];
  psum_t pspad [PSUM_SPAD];

  // ---------------- pipeline registers -----
  typedef struct packed {
    logic      v;
    logic      zero;   // multiplier gated, product is zero
    pe_instr_t ins;
  } stage_t;

  stage_t s1, s2, s3;
  data_t  s1_a, s1_b;
  psum_t  s2_prod, s3_prod;

  // ---------------- S3: accumulate ---------
  logic  s3_need_in, s3_block, adv;
  psum_t s3_base, s3_sum;

  assign s3_need_in = s3.v && s3.ins.add_in;
  assign s3_block   = s3.v && ((s3.ins.add_in && !pq_valid) ||
                               (s3.ins.out == OUT_UP  && !pout_ready) ||
                               (s3.ins.out == OUT_GON && !oq_in_ready));
  assign adv        = !s3_block;

  always_comb begin
    s3_base = s3.ins.acc_init ? '0 : pspad[s3.ins.p_addr];
    s3_sum  = s3_base
            + (((s3.ins.mac || s3.ins.add_op) && !s3.zero) ? s3_prod : '0)
            + (s3.ins.add_in ? pq_data : '0);
  end

  assign pq_pop      = s3_need_in && adv;
  assign pout_valid  = s3.v && s3.ins.out == OUT_UP  && (!s3.ins.add_in || pq_valid);
  assign pout_data   = s3_sum;
  assign oq_in_valid = s3.v && s3.ins.out == OUT_GON && (!s3.ins.add_in || pq_valid);
  assign oq_in_data  = '{addr: s3.ins.out_addr, data: s3_sum};

  always_ff @(posedge clk) begin
    if (s3.v && adv && (s3.ins.mac || s3.ins.add_op || s3.ins.add_in || s3.ins.acc_init))
      pspad[s3.ins.p_addr] <= s3_sum;
  end

  // ---------------- issue ------------------
  logic  can_issue, issue;
  data_t op_w, op_i;
  logic  op_zero;

  assign ins       = prog[pc[PROG_AW-1:0]];
  assign can_issue = running && (pc < prog_len) && adv;
  assign issue     = can_issue && (!ins.w_pop || wq_valid) && (!ins.i_pop || iq_valid);
  assign wq_pop    = issue && ins.w_pop;
  assign iq_pop    = issue && ins.i_pop;
  // add_op passes the ifmap operand through the multiplier with a weight of 1
  assign op_w      = ins.add_op ? data_t'(1) : ins.w_pop ? wq_data : wspad[ins.w_addr];
  assign op_i      = ins.i_pop ? iq_data : ispad[ins.i_addr];
  assign op_zero   = (op_w == '0) || (op_i == '0);

  always_ff @(posedge clk) begin
    if (issue && ins.w_pop && ins.w_store) wspad[ins.w_addr] <= wq_data;
    if (issue && ins.i_pop && ins.i_store) ispad[ins.i_addr] <= iq_data;
  end

  // ---------------- control and datapath registers ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1       <= '0;
      s2       <= '0;
      s3       <= '0;
      pc       <= '0;
      running  <= 1'b0;
      prog_len <= '0;
      ev_mac   <= 1'b0;
      ev_gated <= 1'b0;
    end else begin
      ev_mac   <= issue && ins.mac;
      ev_gated <= issue && ins.mac && op_zero;
      if (len_we) prog_len <= len_data;
      if (start) begin
        running <= 1'b1;
        pc      <= '0;
      end else if (running && pc == prog_len && !s1.v && !s2.v && !s3.v) begin
        running <= 1'b0;
      end else if (issue) begin
        pc <= pc + 1'b1;
      end
      if (adv) begin
        s3 <= s2;
        s2 <= s1;
        s1 <= '{v: issue, zero: (ins.mac || ins.add_op) && op_zero, ins: ins};
      end
    end
  end

  // Multiplier datapath registers: not loaded when the operation is gated.
  always_ff @(posedge clk) begin
    if (adv) begin
      if (issue && (ins.mac || ins.add_op) && !op_zero) begin
        s1_a <= op_w;
        s1_b <= op_i;
      end
      if (s1.v && (s1.ins.mac || s1.ins.add_op) && !s1.zero) s2_prod <= psum_t'(s1_a) * psum_t'(s1_b);
      if (s2.v && (s2.ins.mac || s2.ins.add_op) && !s2.zero) s3_prod <= s2_prod;
    end
  end

  assign done = !running;

  // Local-link handshake: a psum offered upward is held until taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   pout_valid && !pout_ready |=> pout_valid && $stable(pout_data));

endmodule
