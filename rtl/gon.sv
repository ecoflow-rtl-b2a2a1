// gon: global output network.
//
// Collects finished results (gradients, ofmap values) from the GON output
// queue of every PE and delivers them, one per cycle, to the global buffer
// write port.  Each result packet carries its buffer address, set by the
// PE program step that produced it.  A round-robin arbiter picks one
// requesting PE per cycle, starting after the PE granted last, so no PE
// waits for more than ROWS*COLS-1 grants of others.
//
// Timing: the granted packet is registered (1-cycle network latency,
// Table 4) and held on out_* until out_ready.  With out_ready high the
// network moves one packet per cycle.
//
// From the paper: a global output network carrying results from the PEs to
// the buffer, any PE may write a final value.  Own choices: round-robin
// arbitration and the address travelling with the data (32-bit value plus
// 16-bit address fits the paper's 64-bit GON).
module gon
  import ecoflow_pkg::*;
#(
  parameter int unsigned ROWS = 13,
  parameter int unsigned COLS = 15
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid [ROWS][COLS],
  output logic     in_ready [ROWS][COLS],
  input  gon_pkt_t in_data  [ROWS][COLS],
  output logic     out_valid,
  input  logic     out_ready,
  output gon_pkt_t out_data
);
  localparam int unsigned N  = ROWS * COLS;
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last, pick;
  logic          found, take;

  // flattened view, index = row*COLS + col
  logic     req [N];
  gon_pkt_t dat [N];
  always_comb
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        req[r*COLS+c] = in_valid[r][c];
        dat[r*COLS+c] = in_data[r][c];
      end

  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int k = 1; k <= N; k++) begin
      logic [IW-1:0] idx;
      idx = IW'((int'(last) + k) % N);
      if (!found && req[idx]) begin
        found = 1'b1;
        pick  = idx;
      end
    end
  end

  assign take = found && (!out_valid || out_ready);

  always_comb
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        in_ready[r][c] = take && (pick == IW'(r*COLS+c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last      <= IW'(N-1);
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        out_valid <= 1'b1;
        out_data  <= dat[pick];
        last      <= pick;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
