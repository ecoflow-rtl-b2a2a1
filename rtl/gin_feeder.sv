// gin_feeder: streams global-buffer words onto the GIN multicast channel.
//
// EcoFlow's compiler decides, for every ifmap or error element, to which
// multicast group it goes and in which order the elements are sent.  This
// block replays that decision: it holds a table of DESC_DEPTH descriptors
// {buffer address, row tag, column tag}, written through the desc_* port.
// After start it walks descriptors 0 .. count-1 in order, reads each word
// from the buffer and offers {row tag, column tag, word} on the multicast
// channel.
//
// Timing: buffer reads have one cycle of latency; a two-entry output queue
// and a credit count let the feeder keep one read in flight while the head
// waits, so with mc_ready high it sends one word per cycle after a 2-cycle
// start-up.  busy is high from start until the last word has been taken.
//
// From the paper: multicast groups determined at compile time, inputs read
// from the global buffer.  Own choices: the descriptor table and its size.
module gin_feeder
  import ecoflow_pkg::*;
#(
  parameter int unsigned DESC_DEPTH = 1024,
  parameter int unsigned DA_W       = $clog2(DESC_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          desc_we,
  input  logic [DA_W-1:0] desc_addr,
  input  mc_desc_t      desc_data,
  input  logic          start,
  input  logic [DA_W:0] count,
  output logic          busy,
  output logic          rd_en,
  output gb_addr_t      rd_addr,
  input  data_t         rd_data,
  output logic          mc_valid,
  input  logic          mc_ready,
  output mc_pkt_t       mc_data
);
  mc_desc_t      table_q [DESC_DEPTH];
  logic [DA_W:0] idx, n;
  logic          inflight;
  mc_id_t        rtag_q, ctag_q;
  logic          q_in_ready;
  logic [1:0]    q_count;
  mc_desc_t      d;
  mc_pkt_t       q_in;

  assign q_in = '{row_tag: rtag_q, col_tag: ctag_q, data: rd_data};

  always_ff @(posedge clk) begin
    if (desc_we) table_q[desc_addr] <= desc_data;
  end

  assign d       = table_q[idx[DA_W-1:0]];
  assign rd_en   = busy && idx < n &&
                   (32'(q_count) + 32'(inflight) - 32'(mc_valid && mc_ready)) < 2;
  assign rd_addr = d.addr;

  io_queue #(.W($bits(mc_pkt_t)), .DEPTH(2)) u_q (
    .clk, .rst_n,
    .in_valid(inflight), .in_ready(q_in_ready),
    .in_data(q_in),
    .out_valid(mc_valid), .out_ready(mc_ready), .out_data(mc_data),
    .count(q_count));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      idx      <= '0;
      n        <= '0;
      inflight <= 1'b0;
      rtag_q   <= '0;
      ctag_q   <= '0;
    end else begin
      inflight <= rd_en;
      if (rd_en) begin
        rtag_q <= d.row_tag;
        ctag_q <= d.col_tag;
        idx    <= idx + 1'b1;
      end
      if (start) begin
        busy <= 1'b1;
        idx  <= '0;
        n    <= count;
      end else if (busy && idx == n && !inflight && !mc_valid) begin
        busy <= 1'b0;
      end
    end
  end

  // The credit check guarantees the queue has room for every returning read.
  assert property (@(posedge clk) disable iff (!rst_n) inflight |-> q_in_ready);
endmodule
