// resparc_pkg -- sizes and shared types of the RESPARC spiking-network core.
//
// The numbers marked "paper" are the published configuration: 64-bit
// architecture (one spike packet = 64 spikes), 64x64 memristive crossbars
// (MCA) with 4-bit (16-level) conductances, four MCAs per macro processing
// engine (mPE), 4x4 mPEs and 3x3 programmable switches per NeuroCell.
// Everything else (buffer depths, register map, address widths, number of
// NeuroCells) is a choice of this implementation.
package resparc_pkg;

  // ---- paper numbers ------------------------------------------------------
  localparam int PKT_W    = 64;   // spike packet width ("64 bit" architecture)
  localparam int MCA_N    = 64;   // MCA rows = columns (RESPARC-64)
  localparam int W_BITS   = 4;    // 16 conductance levels
  localparam int N_MCA    = 4;    // MCAs per mPE
  localparam int NC_DIM   = 4;    // mPE grid is NC_DIM x NC_DIM
  localparam int N_MPE    = NC_DIM * NC_DIM;
  localparam int SW_DIM   = NC_DIM - 1;  // switches sit between mPEs: 3x3
  localparam int N_SW     = SW_DIM * SW_DIM;

  // ---- implementation choices --------------------------------------------
  localparam int CUR_W    = W_BITS + $clog2(MCA_N);  // column "current", exact sum
  localparam int VMEM_W   = 16;   // membrane potential (saturating)
  localparam int N_TGT    = 2;    // tBUFF entries per MCA
  localparam int MAX_STEP = 5;    // time-multiplex steps per evaluation (C1..C4 + C_ext)
  localparam int SRAM_AW  = 10;   // input memory: 1024 x 64 bit
  localparam int N_CMD    = 32;   // global command table entries
  localparam int SW_LINES = 8;    // 4 mPE lines + 2 row + 2 column switch lines
  localparam int TAG_W    = 2;    // NeuroCell tag x / y width

  // time-multiplex source select of a neuron group (inputs of the Fig. 4 mux)
  typedef enum logic [2:0] {
    SRC_NONE = 3'd0,
    SRC_C1   = 3'd1,
    SRC_C2   = 3'd2,
    SRC_C3   = 3'd3,
    SRC_C4   = 3'd4,
    SRC_CEXT = 3'd5
  } src_sel_e;

  // switch address: iAddress = {SW_ID, mPE_ID, MCA_ID} (Fig. 6).
  // mpe_id is the corner (0 top-left, 1 top-right, 2 bottom-left,
  // 3 bottom-right) of the destination mPE around switch sw_id.
  typedef struct packed {
    logic [3:0] sw_id;
    logic [1:0] mpe_id;
    logic [1:0] mca_id;
  } sw_addr_t;

  typedef struct packed {
    logic [PKT_W-1:0] data;
    sw_addr_t         addr;
  } sw_pkt_t;

  // tBUFF entry: either a switch address or an input-memory address
  typedef struct packed {
    logic               to_io;
    logic [SRAM_AW-1:0] addr;   // to_io ? SRAM word : {2'b0, sw_addr_t}
  } target_t;

  // configuration write (one register, 32 bit), routed by NeuroCell / unit
  typedef struct packed {
    logic        we;
    logic [3:0]  nc;     // NeuroCell index
    logic [4:0]  unit;   // 0..15 mPE, 16..24 switch, 31 NeuroCell control
    logic [7:0]  addr;   // register within the unit
    logic [31:0] data;
  } cfg_wr_t;

  // crossbar programming write (one device)
  typedef struct packed {
    logic        we;
    logic [3:0]  nc;
    logic [3:0]  mpe;
    logic [1:0]  mca;
    logic [5:0]  row;
    logic [5:0]  col;
    logic [W_BITS-1:0] g;
  } wprog_t;

  // IO_BUS broadcast beat towards the NeuroCells
  typedef struct packed {
    logic [TAG_W-1:0] x_lo, x_hi, y_lo, y_hi;
    logic [3:0]       mpe;
    logic [1:0]       mca;
    logic [PKT_W-1:0] data;
  } io_bcast_t;

  // global command (one entry of the Global Control Unit table)
  typedef enum logic [1:0] {
    CMD_END   = 2'd0,   // end of time step
    CMD_BCAST = 2'd1,   // read SRAM word, broadcast to tagged NeuroCells
    CMD_RUN   = 2'd2    // start tagged NeuroCells, wait for their event flags
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e           op;
    logic [SRAM_AW-1:0] sram_addr;
    logic [TAG_W-1:0]  x_lo, x_hi, y_lo, y_hi;
    logic [3:0]        mpe;
    logic [1:0]        mca;
  } gcmd_t;

endpackage
