// morph_pkg: types and constants shared by the Morph 3D-CNN accelerator.
//
// Sizes follow the evaluated configuration: 6 clusters of 16 PEs, 8 vector
// lanes per PE, 8-bit activations and weights, 1 MB L2, 64 KB L1 per
// cluster and 16 KB L0 per PE, each buffer split into 16 banks.  The psum
// width (32 bits), the loop-nest depth of the programmable FSMs (8 loops),
// the counter and address widths and the number of event triggers (2) are
// this design's choices; the paper leaves them open.
//
// mk_loop() turns a loop nest given as bounds and absolute strides into the
// bound/step registers of a loop_fsm (steps are deltas applied when a loop
// increments after its inner loops wrap).  It is the arithmetic that
// configuration software performs before a layer starts.
package morph_pkg;

  // Datapath
  localparam int unsigned P        = 8;    // activation / weight bits
  localparam int unsigned PSUM_W   = 32;   // psum bits (>= 2P + log2(RSTC))
  localparam int unsigned VW       = 8;    // vector lanes per PE (Table 2)
  // Array
  localparam int unsigned M        = 6;    // clusters per chip (Table 2)
  localparam int unsigned N        = 16;   // PEs per cluster (Table 2)
  // Buffers: 16 banks at every level (Sec. V-B)
  localparam int unsigned NB       = 16;
  localparam int unsigned L2_W     = 64;   // L2 word = L2->L1 bus width
  localparam int unsigned L1_W     = 32;   // L1 word = L1->L0 bus width
  localparam int unsigned L0_W     = P;    // L0 word = one activation
  localparam int unsigned L2_DEPTH = (1024*1024*8) / (NB*L2_W); // words/bank
  localparam int unsigned L1_DEPTH = (64*1024*8)   / (NB*L1_W);
  localparam int unsigned L0_DEPTH = (16*1024*8)   / (NB*L0_W);

  // Programmable loop FSM
  localparam int unsigned D        = 8;    // loop levels per FSM
  localparam int unsigned CW       = 16;   // loop bound / counter bits
  localparam int unsigned AW       = 20;   // address register bits
  localparam int unsigned NT       = 2;    // event triggers per FSM

  typedef enum logic [1:0] {DT_IN = 2'd0, DT_WT = 2'd1, DT_PS = 2'd2, DT_NONE = 2'd3} dtype_e;

  typedef struct packed {
    logic [D-1:0][CW-1:0] bound;     // b_j, loop j runs i_j = 0 .. b_j-1 (b_j >= 1)
    logic [D-1:0][AW-1:0] step;      // s_j, added when loop j increments
    logic [AW-1:0]        base;      // first address
    logic [NT-1:0][D-1:0] ev_mask;   // trigger t fires when loop j terminates and ev_mask[t][j]
  } loop_cfg_t;

  // Contiguous bank ranges per data type (index 0 inputs, 1 weights, 2 psums)
  typedef struct packed {
    logic [2:0][4:0] base;
    logic [2:0][5:0] count;
  } bank_cfg_t;

  // Network mask registers of one transfer (Sec. IV-B3)
  typedef struct packed {
    logic [31:0]   mask;
    logic [31:0]   last_mask;
    logic [CW-1:0] last_round;   // index of the final round (0: one round)
  } net_cfg_t;

  // Per-PE programs (broadcast to every PE of every cluster)
  typedef struct packed {
    loop_cfg_t [2:0] recv;     // L0 write FSMs for fills from the L1 network
    loop_cfg_t       cin;      // compute: input read FSM
    loop_cfg_t       cwt;      // compute: weight read FSM (loop 0 = vector lanes)
    loop_cfg_t       cps_rd;   // compute: psum reload FSM
    loop_cfg_t       cps_wr;   // compute: psum unload FSM
    loop_cfg_t       up;       // psum drain to the L1
    logic            reload;   // reload accumulators before each output group
  } pe_cfg_t;

  // Per-cluster L1 control programs (same for every cluster)
  typedef struct packed {
    loop_cfg_t [2:0] recv;     // L1 write FSMs for fills from the L2 network
    loop_cfg_t [2:0] down;     // L1 read FSMs feeding the local networks
    net_cfg_t  [2:0] net;      // PE masks of the local networks
    loop_cfg_t       up_wr;    // L1 write FSM for psums drained from a PE
    loop_cfg_t       up_rd;    // L1 read FSM for psums sent to the L2
    logic [7:0]      up_sel;   // PE whose psums are drained
  } l1_cfg_t;

  // L2 control programs
  typedef struct packed {
    loop_cfg_t [2:0] down;     // L2 read FSMs feeding the global networks
    net_cfg_t  [2:0] net;      // cluster masks of the global networks
    loop_cfg_t       up_wr;    // L2 write FSM for psums drained from a cluster
    logic [7:0]      up_sel;   // cluster whose psums are drained
  } l2_cfg_t;

  // Builds a loop_cfg_t from absolute strides.
  function automatic loop_cfg_t mk_loop(input logic [AW-1:0] base,
                                        input int unsigned bnd [D],
                                        input int          stride [D],
                                        input logic [NT-1:0][D-1:0] ev);
    loop_cfg_t c;
    int acc;
    c.base    = base;
    c.ev_mask = ev;
    acc = 0;
    for (int j = 0; j < D; j++) begin
      c.bound[j] = CW'(bnd[j] == 0 ? 1 : bnd[j]);
      c.step[j]  = AW'(stride[j] - acc);
      acc += stride[j] * ((bnd[j] == 0 ? 1 : bnd[j]) - 1);
    end
    return c;
  endfunction

endpackage
