// pe_array: the ROWS x COLS grid of EcoFlow PEs and its local network.
//
// Row 0 is the top row.  Each PE's upward psum output feeds the psum input
// queue of the PE directly above it in the same column: this is the local
// point-to-point network over which EcoFlow accumulates partial sums
// vertically.  The top row has no PE above it, so its upward output is never
// accepted (a program must not send up from row 0), and the bottom row
// receives nothing from below.  Broadcast and multicast inputs and GON
// outputs are brought out per PE so the networks can be wired around the
// array.  Programs are written into one PE at a time, selected by
// prog_row/prog_col; start reaches all PEs in the same cycle.
//
// Timing: a psum sent up is in the upper PE's queue one cycle later
// (1-cycle network latency).  all_done is high when every PE is idle.
// The event outputs count, per cycle, the PEs that issued a MAC, issued a
// clock-gated MAC and passed a psum upward.
//
// From the paper: the array size (13 x 15), the upward vertical
// accumulation links.  Own choices: the row numbering and the program load
// path.
module pe_array
  import ecoflow_pkg::*;
#(
  parameter int unsigned ROWS       = 13,
  parameter int unsigned COLS       = 15,
  parameter int unsigned PROG_DEPTH = 256,
  parameter int unsigned QDEPTH     = 8,
  parameter int unsigned PROG_AW    = $clog2(PROG_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            prog_we,
  input  logic            len_we,
  input  logic [7:0]      prog_row,
  input  logic [7:0]      prog_col,
  input  logic [PROG_AW-1:0] prog_addr,
  input  pe_instr_t       prog_data,
  input  logic [PROG_AW:0] len_data,
  input  logic            w_valid [ROWS][COLS],
  output logic            w_ready [ROWS][COLS],
  input  data_t           w_data,
  input  logic            i_valid [ROWS][COLS],
  output logic            i_ready [ROWS][COLS],
  input  data_t           i_data,
  output logic            gon_valid [ROWS][COLS],
  input  logic            gon_ready [ROWS][COLS],
  output gon_pkt_t        gon_data  [ROWS][COLS],
  output logic            all_done,
  output logic [15:0]     n_mac,
  output logic [15:0]     n_gated,
  output logic [15:0]     n_vert
);
  logic  up_valid [ROWS][COLS];
  logic  up_ready [ROWS][COLS];
  psum_t up_data  [ROWS][COLS];
  logic  done     [ROWS][COLS];
  logic  ev_mac   [ROWS][COLS];
  logic  ev_gated [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      logic  sel, dn_valid, dn_ready;
      psum_t dn_data;
      assign sel = (prog_row == 8'(r)) && (prog_col == 8'(c));

      if (r == ROWS - 1) begin : g_bottom
        assign dn_valid = 1'b0;
        assign dn_data  = '0;
      end else begin : g_inner
        assign dn_valid = up_valid[r+1][c];
        assign dn_data  = up_data[r+1][c];
      end

      if (r == 0) begin : g_top
        assign up_ready[r][c] = 1'b0;
      end

      pe #(.PROG_DEPTH(PROG_DEPTH), .QDEPTH(QDEPTH)) u_pe (
        .clk, .rst_n, .start,
        .prog_we(prog_we && sel), .prog_addr, .prog_data,
        .len_we(len_we && sel), .len_data,
        .w_in_valid(w_valid[r][c]), .w_in_ready(w_ready[r][c]), .w_in_data(w_data),
        .i_in_valid(i_valid[r][c]), .i_in_ready(i_ready[r][c]), .i_in_data(i_data),
        .pin_valid(dn_valid),
        .pin_ready(dn_ready),
        .pin_data(dn_data),
        .pout_valid(up_valid[r][c]), .pout_ready(up_ready[r][c]), .pout_data(up_data[r][c]),
        .gon_valid(gon_valid[r][c]), .gon_ready(gon_ready[r][c]), .gon_data(gon_data[r][c]),
        .done(done[r][c]), .ev_mac(ev_mac[r][c]), .ev_gated(ev_gated[r][c]));

      if (r < ROWS - 1) begin : g_link
        assign up_ready[r+1][c] = dn_ready;
      end
    end
  end

  always_comb begin
    all_done = 1'b1;
    n_mac    = '0;
    n_gated  = '0;
    n_vert   = '0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        if (!done[r][c]) all_done = 1'b0;
        if (ev_mac[r][c])   n_mac++;
        if (ev_gated[r][c]) n_gated++;
        if (r > 0 && up_valid[r][c] && up_ready[r][c]) n_vert++;
      end
  end
endmodule
