// ecoflow_pkg: types and constants shared by the EcoFlow accelerator RTL.
//
// The accelerator is an Eyeriss-style spatial array whose PEs run a small
// program (the per-PE "FSM" produced by the offline compiler) and whose
// multicast network lets one PE subscribe to several multicast groups.
// This package holds the data widths, the PE instruction word, the packets
// carried by the global input network (GIN) and global output network (GON),
// and the configuration-port command.
//
// Taken from the paper: 16-bit operands, 8-entry I/O queues, register-file
// sizes 75/224/24, a 13 x 15 array, a 27-bank 108 KB buffer, five 5-bit
// multicast IDs per X-bus and per PE.  This design's own choices: integer
// (not bfloat16) arithmetic with a 32-bit accumulator, the instruction
// encoding, the 16-bit buffer address and the config command format.
package ecoflow_pkg;

  // ---- data ---------------------------------------------------------------
  localparam int unsigned DATA_W  = 16;  // operand width ("we train using 16 bits")
  localparam int unsigned PSUM_W  = 32;  // accumulator width (own choice)
  localparam int unsigned GB_AW   = 16;  // global-buffer word address width
  localparam int unsigned ID_W    = 5;   // width of one multicast row/col ID
  localparam int unsigned NUM_IDS = 5;   // IDs per X-bus and per PE

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [PSUM_W-1:0] psum_t;
  typedef logic [GB_AW-1:0]         gb_addr_t;
  typedef logic [ID_W-1:0]          mc_id_t;

  // ---- PE register files (Table: ifmap 75, filter 224, psum 24) -----------
  localparam int unsigned IFMAP_SPAD  = 75;
  localparam int unsigned FILTER_SPAD = 224;
  localparam int unsigned PSUM_SPAD   = 24;
  localparam int unsigned IA_W = $clog2(IFMAP_SPAD);   // 7
  localparam int unsigned WA_W = $clog2(FILTER_SPAD);  // 8
  localparam int unsigned PA_W = $clog2(PSUM_SPAD);    // 5

  // Where the result of an instruction's accumulate stage is sent.
  typedef enum logic [1:0] {
    OUT_NONE = 2'd0,  // keep it in the psum register file
    OUT_UP   = 2'd1,  // local network: to the PE above in the same column
    OUT_GON  = 2'd2   // global output network: to the global buffer
  } out_sel_e;

  // One step of a PE program.  Every field is independent, so one step can
  // load operands, multiply-accumulate, add a psum from below and send.
  typedef struct packed {
    logic              w_pop;     // weight operand = head of broadcast queue (else filter spad)
    logic              w_store;   // also write the popped weight to filter spad[w_addr]
    logic [WA_W-1:0]   w_addr;
    logic              i_pop;     // ifmap operand = head of multicast queue (else ifmap spad)
    logic              i_store;   // also write the popped value to ifmap spad[i_addr]
    logic [IA_W-1:0]   i_addr;
    logic              mac;       // add w*i to the accumulation
    logic              acc_init;  // accumulation starts from 0 (new label) instead of psum[p_addr]
    logic              add_in;    // pop the psum arriving from the PE below and add it
    logic              add_op;    // add the ifmap/error operand itself (a psum read back from the buffer)
    logic [PA_W-1:0]   p_addr;    // psum register (one per label in flight)
    out_sel_e          out;       // where the resulting sum goes
    gb_addr_t          out_addr;  // buffer address when out == OUT_GON
  } pe_instr_t;

  localparam int unsigned INSTR_W = $bits(pe_instr_t);

  // Multicast packet on the GIN Y-bus.
  typedef struct packed {
    mc_id_t row_tag;
    mc_id_t col_tag;
    data_t  data;
  } mc_pkt_t;

  // Result packet on the GON.
  typedef struct packed {
    gb_addr_t addr;
    psum_t    data;
  } gon_pkt_t;

  // ---- configuration port ---------------------------------------------------
  typedef enum logic [2:0] {
    CFG_PROG     = 3'd0,  // PE(row,col) program word [index] <= data
    CFG_PROG_LEN = 3'd1,  // PE(row,col) program length <= data
    CFG_ROW_ID   = 3'd2,  // X-bus (row) ID slot [index] <= data[ID_W-1:0], enable data[ID_W]
    CFG_COL_ID   = 3'd3,  // PE(row,col) ID slot [index] <= data[ID_W-1:0], enable data[ID_W]
    CFG_DESC     = 3'd4,  // feeder descriptor [index] <= data (mc_desc_t)
    CFG_BC_EN    = 3'd5   // PE(row,col) takes broadcast words <= data[0]
  } cfg_target_e;

  typedef struct packed {
    logic         valid;
    cfg_target_e  target;
    logic [7:0]   row;
    logic [7:0]   col;
    logic [15:0]  index;
    logic [63:0]  data;
  } cfg_t;

  // Feeder descriptor: which buffer word to send and to which group.
  typedef struct packed {
    gb_addr_t addr;
    mc_id_t   row_tag;
    mc_id_t   col_tag;
  } mc_desc_t;

  // Event counters reported by the top.
  typedef struct packed {
    logic [31:0] cycles;        // cycles while running
    logic [31:0] macs;          // multiply-accumulates issued
    logic [31:0] gated;         // MACs whose multiplier was clock-gated (zero operand)
    logic [31:0] bcast;         // broadcast words delivered
    logic [31:0] mcast;         // multicast words delivered
    logic [31:0] mcast_multi;   // multicast words delivered to more than one PE
    logic [31:0] vert;          // psums passed to the PE above
    logic [31:0] gon;           // results written to the buffer
    logic [31:0] gin_stall;     // cycles a GIN word waited for a full queue
  } perf_t;

endpackage
