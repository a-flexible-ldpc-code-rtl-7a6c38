// ldpc_noc_decoder: fully flexible LDPC decoder built on a torus NoC.
//
// N x N nodes (5 x 5 = 25 for the WiMAX decoder) form a 2D torus: every node
// links to its north, east, south and west neighbours, the edges wrapping
// around. Each node has a routing element and a layered normalized min-sum
// processing element (PE). The parity checks of the code are partitioned over
// the PEs off-line; whenever a PE finishes a check, each updated bit value
// L(q_j) travels through the NoC to the PE that holds the next check (next
// layer) using bit j. No flit carries an address: what every router does in
// every cycle, where every arriving value is stored, and when every check
// starts are all stored in per-node circular configuration buffers, derived
// off-line for each code by a cycle-accurate simulation of the NoC.
//
// Configuration: one bus per torus row (cfg_bus[r]) writes the buffers of
// that row's nodes one node at a time; cfg_upload_start points every
// buffer's write pointer past the current code, cfg_switch/cfg_len announce
// the new code's iteration length, and the switch takes effect at the next
// iteration boundary or at once if idle, so a new code can be loaded while
// the old one is decoding.
//
// Decoding: the channel LLRs are written into the PEs' L(q_j) memories
// through the llr_* port (node index = row*N + column) while idle; start runs
// it_max iterations of the stored schedule, each lasting the code's k cycles;
// done pulses at the end. Every PE's updated values are visible on
// soft_valid/soft_data; those of the last layer in the last iteration are the
// decoder's soft outputs.
// Topology, node structure, buses and circular buffers follow the paper; the
// LLR load port, the soft-output taps and the start/done control are this
// design's choices.
// Parameters: N (torus size, 5 for WiMAX, 4 for the WiFi configuration) and
// FIFO_DEPTH (router input FIFO length, 7 for WiMAX, 3 for WiFi).
// Lint notes: the routers' FIFO levels are left open (observation only).
module ldpc_noc_decoder
  import ldpc_pkg::*;
#(
  parameter int unsigned N          = NOC_N,
  parameter int unsigned FIFO_DEPTH = FIFO_LEN   // router input FIFO length
) (
  input  logic              clk,
  input  logic              rst_n,
  // frame control
  input  logic              start,
  input  logic [ITER_W-1:0] it_max,
  output logic              busy,
  output logic              done,
  output logic [ITER_W-1:0] iter,
  // configuration buses, one per row
  input  cfg_bus_t          cfg_bus [N],
  input  logic              cfg_upload_start,
  input  logic              cfg_switch,
  input  logic [CB_AW-1:0]  cfg_len,
  // channel LLR load
  input  logic              llr_we,
  input  logic [7:0]        llr_node,
  input  logic [MEM_AW-1:0] llr_addr,
  input  logic [QW-1:0]     llr_data,
  // updated bit values leaving each PE
  output logic              soft_valid[N*N],
  output logic [QW-1:0]     soft_data [N*N]
);
  logic run, frame_start;
  logic iter_last [N*N];

  // link_out[node][port] ; port 0 N, 1 E, 2 S, 3 W
  logic          lo_valid[N*N][4];
  logic [QW-1:0] lo_data [N*N][4];
  logic          li_valid[N*N][4];
  logic [QW-1:0] li_data [N*N][4];

  decode_ctrl u_ctrl (
    .clk, .rst_n, .start, .it_max, .iter_last(iter_last[0]),
    .run, .frame_start, .done, .iter
  );
  assign busy = run;

  for (genvar r = 0; r < N; r++) begin : g_row
    for (genvar c = 0; c < N; c++) begin : g_col
      localparam int unsigned ID  = r * N + c;
      localparam int unsigned IDN = ((r + N - 1) % N) * N + c;   // north neighbour
      localparam int unsigned IDS = ((r + 1) % N) * N + c;       // south neighbour
      localparam int unsigned IDE = r * N + (c + 1) % N;         // east neighbour
      localparam int unsigned IDW = r * N + (c + N - 1) % N;     // west neighbour

      // a flit entering from the north was sent south by the north neighbour
      assign li_valid[ID][0] = lo_valid[IDN][2];
      assign li_data[ID][0]  = lo_data[IDN][2];
      assign li_valid[ID][1] = lo_valid[IDE][3];
      assign li_data[ID][1]  = lo_data[IDE][3];
      assign li_valid[ID][2] = lo_valid[IDS][0];
      assign li_data[ID][2]  = lo_data[IDS][0];
      assign li_valid[ID][3] = lo_valid[IDW][1];
      assign li_data[ID][3]  = lo_data[IDW][1];

      noc_node #(.NODE_ID(ID_W'(c)), .FIFO_DEPTH(FIFO_DEPTH)) u_node (
        .clk, .rst_n, .run, .frame_start,
        .bus(cfg_bus[r]), .upload_start(cfg_upload_start),
        .switch_req(cfg_switch), .switch_len(cfg_len),
        .iter_last(iter_last[ID]),
        .link_in_valid(li_valid[ID]), .link_in_data(li_data[ID]),
        .link_out_valid(lo_valid[ID]), .link_out_data(lo_data[ID]),
        .llr_we(llr_we && (llr_node == 8'(ID))), .llr_addr, .llr_data,
        .soft_valid(soft_valid[ID]), .soft_data(soft_data[ID]),
        .fifo_count()
      );
    end
  end
endmodule
