// gin: global input network of the EcoFlow array.
//
// Two channels feed every PE:
//   * the broadcast channel carries one 16-bit word per transfer to every PE
//     (filter weights in the forward and input-gradient passes, errors in the
//     filter-gradient pass);
//   * the multicast channel carries a word tagged with a (row tag, column
//     tag) pair.  As in Eyeriss it is a vertical Y-bus feeding one X-bus per
//     PE row; an X-bus passes the word on when the row tag matches one of its
//     row IDs, and a PE on it takes the word when the column tag matches one
//     of its column IDs.  EcoFlow's change is that each X-bus and each PE
//     hold NUM_IDS IDs instead of one, so a PE can subscribe to several
//     multicast groups (mcast_id_match does the comparison).
// The ID registers are written through the id_* configuration port and are
// cleared (all slots disabled) by reset.  Each PE also has a broadcast
// enable bit (bc_en_*), cleared by reset: only enabled PEs receive broadcast
// words and only they can hold the broadcast channel back, so idle PEs never
// block it.
//
// Timing: each channel has one register stage (1-cycle network latency,
// Table 4).  A word accepted in cycle t is offered to the PEs' input queues
// from cycle t+1 and is delivered to all its destinations in the same cycle,
// once every destination queue has room.  Until then it waits and the channel
// stops accepting (backpressure, counted by ev_stall).  Sustained rate is one
// word per cycle per channel.  A multicast word that matches no PE is
// dropped.
//
// From the paper: the broadcast and multicast networks, multiple row IDs per
// X-bus and column IDs per PE, five 5-bit IDs.  Own choices: the handshake,
// the all-destinations-at-once delivery, one word per transfer on each
// channel (the paper sizes the input buses at 80 + 32 bits).
module gin
  import ecoflow_pkg::*;
#(
  parameter int unsigned ROWS = 13,
  parameter int unsigned COLS = 15
) (
  input  logic        clk,
  input  logic        rst_n,
  // sources
  input  logic        bc_valid,
  output logic        bc_ready,
  input  data_t       bc_data,
  input  logic        mc_valid,
  output logic        mc_ready,
  input  mc_pkt_t     mc_data,
  // ID configuration
  input  logic        id_we,
  input  logic        id_is_row,
  input  logic [7:0]  id_row,
  input  logic [7:0]  id_col,
  input  logic [7:0]  id_slot,
  input  mc_id_t      id_val,
  input  logic        id_en,
  input  logic        bc_en_we,
  input  logic        bc_en_val,
  // to the PEs' input queues
  output logic        w_valid [ROWS][COLS],
  input  logic        w_ready [ROWS][COLS],
  output data_t       w_data,
  output logic        i_valid [ROWS][COLS],
  input  logic        i_ready [ROWS][COLS],
  output data_t       i_data,
  // events
  output logic        ev_bcast,
  output logic        ev_mcast,
  output logic        ev_mcast_multi,
  output logic        ev_stall
);

  // ---------------- ID registers ----------------
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned CW = (COLS > 1) ? $clog2(COLS) : 1;
  localparam int unsigned KW = (NUM_IDS > 1) ? $clog2(NUM_IDS) : 1;
  logic [RW-1:0] wr_r;
  logic [CW-1:0] wr_c;
  logic [KW-1:0] wr_k;
  assign wr_r = RW'(id_row);
  assign wr_c = CW'(id_col);
  assign wr_k = KW'(id_slot);

  mc_id_t row_ids [ROWS][NUM_IDS];
  logic   row_en  [ROWS][NUM_IDS];
  mc_id_t col_ids [ROWS][COLS][NUM_IDS];
  logic   col_en  [ROWS][COLS][NUM_IDS];
  logic   bc_en   [ROWS][COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int k = 0; k < NUM_IDS; k++) begin
          row_ids[r][k] <= '0;
          row_en[r][k]  <= 1'b0;
          for (int c = 0; c < COLS; c++) begin
            bc_en[r][c]      <= 1'b0;
            col_ids[r][c][k] <= '0;
            col_en[r][c][k]  <= 1'b0;
          end
        end
    end else if (bc_en_we && id_row < 8'(ROWS) && id_col < 8'(COLS)) begin
      bc_en[wr_r][wr_c] <= bc_en_val;
    end else if (id_we && id_slot < 8'(NUM_IDS) && id_row < 8'(ROWS)) begin
      if (id_is_row) begin
        row_ids[wr_r][wr_k] <= id_val;
        row_en[wr_r][wr_k]  <= id_en;
      end else if (id_col < 8'(COLS)) begin
        col_ids[wr_r][wr_c][wr_k] <= id_val;
        col_en[wr_r][wr_c][wr_k]  <= id_en;
      end
    end
  end

  // ---------------- broadcast channel ----------------
  logic  bq_v, bc_all_ready, bc_fire;
  data_t bq_d;

  always_comb begin
    bc_all_ready = 1'b1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        if (bc_en[r][c] && !w_ready[r][c]) bc_all_ready = 1'b0;
  end

  assign bc_fire  = bq_v && bc_all_ready;
  assign bc_ready = !bq_v || bc_fire;
  assign w_data   = bq_d;

  always_comb
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        w_valid[r][c] = bc_fire && bc_en[r][c];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bq_v <= 1'b0;
      bq_d <= '0;
    end else if (bc_ready) begin
      bq_v <= bc_valid;
      if (bc_valid) bq_d <= bc_data;
    end
  end

  // ---------------- multicast channel ----------------
  logic    mq_v, mc_fire, mc_all_ready;
  mc_pkt_t mq_d;
  logic    row_hit [ROWS];
  logic    col_hit [ROWS][COLS];
  logic    dest    [ROWS][COLS];
  int unsigned n_dest;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    mcast_id_match #(.NUM_IDS(NUM_IDS), .ID_W(ID_W)) u_xbus (
      .tag(mq_d.row_tag), .ids(row_ids[r]), .id_en(row_en[r]), .hit(row_hit[r]));
    for (genvar c = 0; c < COLS; c++) begin : g_col
      mcast_id_match #(.NUM_IDS(NUM_IDS), .ID_W(ID_W)) u_pe (
        .tag(mq_d.col_tag), .ids(col_ids[r][c]), .id_en(col_en[r][c]), .hit(col_hit[r][c]));
    end
  end

  always_comb begin
    mc_all_ready = 1'b1;
    n_dest       = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        dest[r][c] = row_hit[r] && col_hit[r][c];
        if (dest[r][c]) n_dest++;
        if (dest[r][c] && !i_ready[r][c]) mc_all_ready = 1'b0;
      end
  end

  assign mc_fire  = mq_v && mc_all_ready;
  assign mc_ready = !mq_v || mc_fire;
  assign i_data   = mq_d.data;

  always_comb
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        i_valid[r][c] = mc_fire && dest[r][c];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mq_v <= 1'b0;
      mq_d <= '0;
    end else if (mc_ready) begin
      mq_v <= mc_valid;
      if (mc_valid) mq_d <= mc_data;
    end
  end

  assign ev_bcast       = bc_fire;
  assign ev_mcast       = mc_fire && n_dest != 0;
  assign ev_mcast_multi = mc_fire && n_dest > 1;
  assign ev_stall       = (bq_v && !bc_fire) || (mq_v && !mc_fire);

endmodule
