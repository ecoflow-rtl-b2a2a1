// ecoflow_top: the EcoFlow accelerator.
//
// An Eyeriss-style spatial accelerator whose hardware is unchanged for
// direct convolutions but which can also run transposed and dilated
// convolutions without multiplying by the zeros those convolutions insert.
// The zero-free schedule is worked out offline; the hardware only needs
// programmable PEs (pe), a multicast network in which a PE can belong to
// several groups (gin with mcast_id_match), vertical psum links (pe_array)
// and an output network (gon) into a banked global buffer (global_buffer).
// The feeder (gin_feeder) reads ifmap/error words, and the psums an earlier
// pass stored, from the buffer and sends them into their multicast groups; the broadcast stream (filters, or errors
// for filter gradients) comes from off-chip memory on the bc_* port.
//
// Use:
//   1. Fill the buffer through host_wr_* and load, through cfg, each used
//      PE's program, length and broadcast enable, the X-bus row IDs and PE
//      column IDs, and the feeder descriptors (see ecoflow_pkg::cfg_t).
//      PEs whose length stays 0 do nothing; configuration persists across
//      runs, so PEs used before must be given length 0 and disabled.
//   2. Pulse start with feed_count = number of descriptors to send.  Offer
//      the broadcast words on bc_* in the order the programs consume them.
//   3. busy falls when every PE has finished, the feeder is empty and every
//      result has been written into the buffer.  Read results through
//      host_rd_* (one-cycle latency).
// Results are written as 16-bit words, saturated from the 32-bit sums.
// host_wr_* takes priority over the GON for the buffer write port; the
// feeder owns the read port while busy.  perf counts events since reset.
//
// From the paper: the block structure (Fig. 2), array and buffer sizes,
// networks, ID counts and queue depth (Table 4, Sec. 4.4).  Own choices: the
// configuration port, the saturation of results and the status counters.
module ecoflow_top
  import ecoflow_pkg::*;
#(
  parameter int unsigned ROWS       = 13,
  parameter int unsigned COLS       = 15,
  parameter int unsigned PROG_DEPTH = 256,
  parameter int unsigned DESC_DEPTH = 1024,
  parameter int unsigned GB_BANKS   = 27,
  parameter int unsigned GB_WORDS   = 2048,
  parameter int unsigned QDEPTH     = 8,
  parameter int unsigned DA_W       = $clog2(DESC_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cfg_t          cfg,
  input  logic          start,
  input  logic [DA_W:0] feed_count,
  output logic          busy,
  // broadcast stream from off-chip memory
  input  logic          bc_valid,
  output logic          bc_ready,
  input  data_t         bc_data,
  // buffer fill / drain
  input  logic          host_wr_en,
  input  gb_addr_t      host_wr_addr,
  input  data_t         host_wr_data,
  input  logic          host_rd_en,
  input  gb_addr_t      host_rd_addr,
  output data_t         host_rd_data,
  output perf_t         perf
);
  localparam int unsigned PROG_AW = $clog2(PROG_DEPTH);

  // ---------------- configuration decode ----------------
  logic cfg_prog, cfg_len, cfg_id, cfg_desc;
  assign cfg_prog = cfg.valid && cfg.target == CFG_PROG;
  assign cfg_len  = cfg.valid && cfg.target == CFG_PROG_LEN;
  assign cfg_id   = cfg.valid && (cfg.target == CFG_ROW_ID || cfg.target == CFG_COL_ID);
  assign cfg_desc = cfg.valid && cfg.target == CFG_DESC;

  // ---------------- wires between blocks ----------------
  logic     w_valid [ROWS][COLS], w_ready [ROWS][COLS];
  logic     i_valid [ROWS][COLS], i_ready [ROWS][COLS];
  data_t    w_data, i_data;
  logic     pg_valid [ROWS][COLS], pg_ready [ROWS][COLS];
  gon_pkt_t pg_data  [ROWS][COLS];
  logic     go_valid, go_ready;
  gon_pkt_t go_data;
  logic     mc_valid, mc_ready;
  mc_pkt_t  mc_data;
  logic     fd_busy, fd_rd_en;
  gb_addr_t fd_rd_addr;
  data_t    gb_rd_data;
  logic     all_done;
  logic [15:0] n_mac, n_gated, n_vert;
  logic     ev_bcast, ev_mcast, ev_mcast_multi, ev_stall;

  gin_feeder #(.DESC_DEPTH(DESC_DEPTH)) u_feeder (
    .clk, .rst_n,
    .desc_we(cfg_desc), .desc_addr(DA_W'(cfg.index)), .desc_data(mc_desc_t'(cfg.data[$bits(mc_desc_t)-1:0])),
    .start, .count(feed_count), .busy(fd_busy),
    .rd_en(fd_rd_en), .rd_addr(fd_rd_addr), .rd_data(gb_rd_data),
    .mc_valid, .mc_ready, .mc_data);

  gin #(.ROWS(ROWS), .COLS(COLS)) u_gin (
    .clk, .rst_n,
    .bc_valid, .bc_ready, .bc_data,
    .mc_valid, .mc_ready, .mc_data,
    .id_we(cfg_id), .id_is_row(cfg.target == CFG_ROW_ID),
    .id_row(cfg.row), .id_col(cfg.col), .id_slot(cfg.index[7:0]),
    .id_val(cfg.data[ID_W-1:0]), .id_en(cfg.data[ID_W]),
    .bc_en_we(cfg.valid && cfg.target == CFG_BC_EN), .bc_en_val(cfg.data[0]),
    .w_valid, .w_ready, .w_data, .i_valid, .i_ready, .i_data,
    .ev_bcast, .ev_mcast, .ev_mcast_multi, .ev_stall);

  pe_array #(.ROWS(ROWS), .COLS(COLS), .PROG_DEPTH(PROG_DEPTH), .QDEPTH(QDEPTH)) u_array (
    .clk, .rst_n, .start,
    .prog_we(cfg_prog), .len_we(cfg_len), .prog_row(cfg.row), .prog_col(cfg.col),
    .prog_addr(PROG_AW'(cfg.index)), .prog_data(pe_instr_t'(cfg.data[INSTR_W-1:0])),
    .len_data((PROG_AW+1)'(cfg.data)),
    .w_valid, .w_ready, .w_data, .i_valid, .i_ready, .i_data,
    .gon_valid(pg_valid), .gon_ready(pg_ready), .gon_data(pg_data),
    .all_done, .n_mac, .n_gated, .n_vert);

  gon #(.ROWS(ROWS), .COLS(COLS)) u_gon (
    .clk, .rst_n,
    .in_valid(pg_valid), .in_ready(pg_ready), .in_data(pg_data),
    .out_valid(go_valid), .out_ready(go_ready), .out_data(go_data));

  // ---------------- global buffer ports ----------------
  data_t gon_word;
  always_comb begin
    if (go_data.data > psum_t'(32767))        gon_word = 16'sh7fff;
    else if (go_data.data < psum_t'(-32768))  gon_word = 16'sh8000;
    else                                      gon_word = data_t'(go_data.data);
  end
  assign go_ready = !host_wr_en;

  global_buffer #(.BANKS(GB_BANKS), .BANK_WORDS(GB_WORDS)) u_gb (
    .clk,
    .rd_en(fd_busy ? fd_rd_en : host_rd_en),
    .rd_addr(fd_busy ? fd_rd_addr : host_rd_addr),
    .rd_data(gb_rd_data),
    .wr_en(host_wr_en || go_valid),
    .wr_addr(host_wr_en ? host_wr_addr : go_data.addr),
    .wr_data(host_wr_en ? host_wr_data : gon_word));
  assign host_rd_data = gb_rd_data;

  // ---------------- run control ----------------
  logic any_pg;
  logic [1:0] settle;
  always_comb begin
    any_pg = 1'b0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        if (pg_valid[r][c]) any_pg = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      settle <= '0;
      perf   <= '0;
    end else begin
      if (start) begin
        busy   <= 1'b1;
        settle <= 2'd2;
      end else if (settle != 0) begin
        settle <= settle - 1'b1;
      end else if (busy && all_done && !fd_busy && !any_pg && !go_valid) begin
        busy <= 1'b0;
      end
      if (busy) perf.cycles <= perf.cycles + 1;
      perf.macs        <= perf.macs  + 32'(n_mac);
      perf.gated       <= perf.gated + 32'(n_gated);
      perf.vert        <= perf.vert  + 32'(n_vert);
      perf.bcast       <= perf.bcast       + 32'(ev_bcast);
      perf.mcast       <= perf.mcast       + 32'(ev_mcast);
      perf.mcast_multi <= perf.mcast_multi + 32'(ev_mcast_multi);
      perf.gin_stall   <= perf.gin_stall   + 32'(ev_stall);
      perf.gon         <= perf.gon + 32'(go_valid && go_ready);
    end
  end
endmodule
