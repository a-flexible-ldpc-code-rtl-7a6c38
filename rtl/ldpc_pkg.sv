// ldpc_pkg: constants and types shared by the NoC-based flexible LDPC decoder.
//
// The defaults describe the main configuration: a 5 x 5 torus of 25 nodes
// sized for every IEEE 802.16e (WiMAX) code. Extrinsic values are 8-bit two's
// complement numbers with 1 fractional bit ("8_1"), the check degree bound is
// N_d = 20, routing-element FIFOs are 7 deep and the circular configuration
// buffers hold B = 767 words. These numbers come from the paper. The number
// of checks per PE (47 = ceil(1152/25), the largest WiMAX check count over 25
// PEs), the port encoding, the configuration-word packing and the 11-bit
// CNT/CMP word are this design's own choices.
package ldpc_pkg;

  // ---------------- sizes -------------------------------------------------
  parameter int unsigned NOC_N     = 5;            // n x n torus
  parameter int unsigned QW        = 8;            // extrinsic width (8_1)
  parameter int unsigned ND        = 20;           // max check degree N_d
  parameter int unsigned NPC       = 47;           // max checks per PE N_pc
  parameter int unsigned MEM_DEPTH = NPC * ND;     // 940 locations
  parameter int unsigned MEM_AW    = 10;           // WAG word width (paper: 10 bits)
  parameter int unsigned FIFO_LEN  = 7;            // router input FIFO length
  parameter int unsigned CB_DEPTH  = 767;          // circular buffer capacity B
  parameter int unsigned CB_AW     = 10;
  parameter int unsigned NPORT     = 5;            // N, E, S, W, local
  parameter int unsigned SEL_W     = 3;            // crossbar select per output
  parameter int unsigned RM_W      = NPORT * SEL_W;  // 15 bits, as in the paper
  parameter int unsigned BLK_W     = 6;            // check block index (0..46)
  parameter int unsigned DEG_W     = 5;            // check degree (0..20)
  parameter int unsigned CNT_W     = BLK_W + DEG_W;  // 11-bit CNT/CMP word
  parameter int unsigned ID_W      = 3;            // node id on a row bus
  parameter int unsigned ITER_W    = 4;            // It_max up to 15
  // 1/alpha with alpha = 1.15, as an unsigned Q0.7 factor: 111/128 = 0.867
  parameter int unsigned ALPHA_INV_Q7 = 111;

  // ---------------- port numbering ---------------------------------------
  typedef enum logic [2:0] {
    P_NORTH = 3'd0,
    P_EAST  = 3'd1,
    P_SOUTH = 3'd2,
    P_WEST  = 3'd3,
    P_LOCAL = 3'd4,
    P_NONE  = 3'd7       // crossbar output idle in this cycle
  } port_e;

  // ---------------- flits --------------------------------------------------
  // Zero-overhead NoC: a flit is the extrinsic value only, no header.
  typedef struct packed {
    logic          valid;
    logic [QW-1:0] data;
  } flit_t;

  // ---------------- configuration bus (one per torus row) ------------------
  // node_id = ID_IDLE means that no node is addressed in this cycle.
  parameter logic [ID_W-1:0] ID_IDLE = '1;

  typedef struct packed {
    logic [ID_W-1:0]   node_id;
    logic [MEM_AW-1:0] wag;
    logic [RM_W-1:0]   rm;
    logic [CNT_W-1:0]  cnt;
  } cfg_bus_t;                                     // 3+10+15+11 = 39 lines

  // CNT/CMP word: degree 0 means "no check starts in this cycle".
  typedef struct packed {
    logic [DEG_W-1:0] deg;
    logic [BLK_W-1:0] blk;
  } cnt_word_t;

  // ---------------- arithmetic helpers ------------------------------------
  // Saturate a wider signed value to the symmetric range [-(2^(QW-1)-1), 2^(QW-1)-1].
  function automatic logic signed [QW-1:0] sat(input logic signed [QW+1:0] v);
    logic signed [QW+1:0] hi, lo;
    hi = (QW+2)'(2**(QW-1) - 1);
    lo = -hi;
    if (v > hi)      return hi[QW-1:0];
    else if (v < lo) return lo[QW-1:0];
    else             return v[QW-1:0];
  endfunction

endpackage
