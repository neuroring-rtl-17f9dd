// neuroring_pkg: types and constants shared by the NeuroRing core.
//
// Synapse packet (64 bits). The published packet holds a 32-bit weight, a
// 2-bit synchronisation field, a 22-bit destination and an 8-bit delay; the
// bit positions are this design's choice:
//   [63:56] delay   8 bit  (after the fetch stage: absolute arrival step mod 256)
//   [55:34] dst    22 bit  global neuron index (data), origin core id (tokens)
//   [33:32] sync    2 bit  SYNC_NONE data / SYNC_LOCAL / SYNC_GLOBAL
//   [31:0]  weight 32 bit  IEEE-754 float (data), step number (global token)
//
// HBM is reached through one 256-bit AXI4 master per core. Only the fields
// this design uses are carried; the AXI handshake signals (valid/ready) are
// separate ports.
package neuroring_pkg;

  localparam int LANES      = 8;     // NPU lanes / accumulators per core
  localparam int PKT_BITS   = 64;
  localparam int AXI_DW     = 256;   // HBM burst and weight-stream width
  localparam int AXI_AW     = 64;
  localparam int DST_BITS   = 22;
  localparam int DELAY_BITS = 8;
  localparam int PKTS_PER_BEAT = AXI_DW / PKT_BITS;  // 4

  typedef enum logic [1:0] {
    SYNC_NONE   = 2'd0,
    SYNC_LOCAL  = 2'd1,
    SYNC_GLOBAL = 2'd2
  } sync_e;

  typedef struct packed {
    logic [DELAY_BITS-1:0] delay;
    logic [DST_BITS-1:0]   dst;
    sync_e                 sync;
    logic [31:0]           weight;
  } syn_pkt_t;

  // Neuron state kept per neuron in the NPU state memories. v is the
  // membrane potential relative to E_L.
  typedef struct packed {
    logic [31:0] v;
    logic [31:0] i_syn;
    logic [15:0] ref_cnt;
  } neuron_state_t;

  // Neuron-model constants written by the host (all relative to E_L).
  //   v'  = v*p22 + i*p21 + c20          (c20 = I_DC*R*(1-p22))
  //   i'  = i*p11 + w
  typedef struct packed {
    logic        poisson;         // 1: lane acts as a Poisson generator
    logic [31:0] p11;
    logic [31:0] p21;
    logic [31:0] p22;
    logic [31:0] c20;
    logic [31:0] v_th;
    logic [31:0] v_reset;
    logic [31:0] v_init;
    logic [15:0] ref_steps;       // refractory period in steps
    logic [31:0] poisson_thresh;  // spike if 32-bit random < thresh
  } lif_cfg_t;

  // Run-time arguments of one core (kernel arguments on the host side).
  typedef struct packed {
    logic [31:0]       num_steps;
    logic [AXI_AW-1:0] syn_base;  // synapse-list region
    logic [AXI_AW-1:0] rec_base;  // spike-recording region
    lif_cfg_t          lif;
  } core_cfg_t;

  // AXI4 request fields (burst type INCR, size 32 bytes implied).
  typedef struct packed {
    logic [AXI_AW-1:0] addr;
    logic [7:0]        len;
  } axi_addr_t;

  typedef struct packed {
    logic [AXI_DW-1:0] data;
    logic              last;
  } axi_data_t;

  // One NPU output entry: spike bits of the LANES neurons updated together.
  typedef struct packed {
    logic [LANES-1:0] mask;
    logic [15:0]      word;
    logic             last;
  } spk_mask_t;

  // Request to an accumulator: neuron offset in its range, delay slot, weight.
  typedef struct packed {
    logic [15:0] nidx;
    logic [7:0]  step;   // absolute arrival step mod 256
    logic [31:0] weight;
  } acc_req_t;

endpackage
