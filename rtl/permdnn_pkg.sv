// permdnn_pkg: sizes, types and small helper functions shared by the
// PermDNN engine.
//
// The numeric defaults are the configuration of the 32-PE engine: 8 16-bit
// multipliers and 128 24-bit accumulators per PE, 16 weight sub-banks of
// 32 bits x 2048, a 48-bit x 2048 permutation SRAM, 4-bit weight sharing,
// 16-bit activations, 8 activation banks of 64 bits x 2048 and a 32 x 32-bit
// activation FIFO. The fixed-point format (8 fractional bits), the layer
// configuration record and the host load port are this design's own.
package permdnn_pkg;

  // ---------------- engine sizes ----------------
  localparam int unsigned N_PE       = 32;    // processing elements
  localparam int unsigned N_MUL      = 8;     // multipliers per PE
  localparam int unsigned N_ACC      = 128;   // accumulators per PE
  localparam int unsigned G_ACC      = N_ACC / N_MUL; // accumulators per bank (g)
  localparam int unsigned Q          = 16;    // activation / weight width
  localparam int unsigned ACC_W      = 24;    // accumulator width
  localparam int unsigned FRAC       = 8;     // fractional bits of Q-bit values
  localparam int unsigned TAG_W      = 4;     // weight-sharing tag width
  localparam int unsigned N_WSUB     = 16;    // weight SRAM sub-banks
  localparam int unsigned WSUB_W     = 32;    // sub-bank width (N_MUL tags)
  localparam int unsigned WSUB_DEPTH = 2048;
  localparam int unsigned WADDR_W    = $clog2(N_WSUB * WSUB_DEPTH); // 15
  localparam int unsigned PERM_W     = 48;    // permutation SRAM width
  localparam int unsigned PERM_DEPTH = 2048;
  localparam int unsigned PADDR_W    = $clog2(PERM_DEPTH);
  localparam int unsigned PV_W       = PERM_W / N_MUL; // 6-bit PermV field
  localparam int unsigned N_ACTMB    = 8;     // activation SRAM banks
  localparam int unsigned W_ACTM     = 64;    // activation bank width
  localparam int unsigned ACT_DEPTH  = 2048;
  localparam int unsigned ACT_LANES  = W_ACTM / Q; // activations per word (4)
  localparam int unsigned AIDX_W     = 16;    // activation index (64K vector)
  localparam int unsigned FIFO_W     = 32;    // {value, index}
  localparam int unsigned FIFO_DEPTH = 32;
  localparam int unsigned P_MAX      = G_ACC; // largest p one bank can hold
  localparam int unsigned P_W        = $clog2(P_MAX + 1); // 5 bits
  localparam int unsigned SLOT_W     = $clog2(G_ACC);      // accumulator slot
  localparam int unsigned T_W        = 8;     // cycle-in-column counter
  localparam int unsigned NBR_W      = 9;     // block rows per PE (<= 2048/p)
  localparam int unsigned RECIP_S    = 24;    // reciprocal shift

  typedef logic signed [Q-1:0]     act_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic [AIDX_W-1:0]       aidx_t;

  // activation function selected per layer
  typedef enum logic [0:0] { ACT_RELU = 1'b0, ACT_TANH = 1'b1 } act_fn_e;

  // targets of the host load port
  typedef enum logic [1:0] {
    HOST_WEIGHT = 2'd0,  // one 32-bit weight-tag row of one PE
    HOST_PERM   = 2'd1,  // one 48-bit permutation row of one PE
    HOST_LUT    = 2'd2,  // one 16-bit entry of one PE's weight LUT
    HOST_ACT    = 2'd3   // one 64-bit activation word (global word address)
  } host_sel_e;

  // one entry of the activation FIFO: a non-zero x_j and its column index j
  typedef struct packed {
    act_t  val;
    aidx_t idx;
  } xent_t;

  // per-layer configuration, held stable while the engine is busy
  typedef struct packed {
    logic [AIDX_W:0]     n_in;      // length of x (columns of W)
    logic [NBR_W-1:0]    nbr;       // block rows (p x p sub-matrices) per PE
    logic [P_W-1:0]      p;         // size of each permuted diagonal block
    logic [AIDX_W-1:0]   in_base;   // activation index of x_0 (multiple of 4)
    logic [AIDX_W-1:0]   out_base;  // activation index of y_0 (multiple of 4)
    logic [WADDR_W-1:0]  w_base;    // first weight-tag row of this layer
    logic [PADDR_W-1:0]  perm_base; // first permutation row of this layer
    act_fn_e             act_fn;
  } layer_cfg_t;

  // broadcast from the main controller to every PE, one per cycle
  typedef struct packed {
    logic                valid;
    logic                clear;     // zero all accumulators (start of a pass)
    act_t                x;         // non-zero activation x_j
    logic [P_W-1:0]      d;         // j mod p
    logic [T_W-1:0]      t;         // cycle within the column (block-row group)
    logic [SLOT_W-1:0]   slot;      // accumulator slot inside the pass
    logic [WADDR_W-1:0]  waddr;     // weight-tag row  = w_base + j*K + t
    logic [PADDR_W-1:0]  paddr;     // permutation row = perm_base + (j/p)*K + t
  } pe_cmd_t;

  // ceil(2^RECIP_S / p) for 1 <= p <= 64; zero otherwise. Written as a loop of
  // constant quotients so that it maps to a small table, not a divider.
  function automatic logic [RECIP_S:0] recip_of(input logic [6:0] p);
    logic [RECIP_S:0] r;
    r = '0;
    for (int i = 1; i <= 64; i++)
      if (p == 7'(i)) r = (RECIP_S+1)'(((64'd1 << RECIP_S) + 64'(i) - 1) / 64'(i));
    return r;
  endfunction

  // floor(num / p) by reciprocal multiplication. Exact for num < 2^16 and
  // p <= 64 because num * (ceil(2^24/p)*p - 2^24) < 2^24.
  function automatic logic [AIDX_W-1:0] div_by_p(input logic [AIDX_W-1:0] num,
                                                 input logic [6:0] p);
    logic [AIDX_W+RECIP_S:0] prod;
    prod = (AIDX_W+RECIP_S+1)'(num) * (AIDX_W+RECIP_S+1)'(recip_of(p));
    return AIDX_W'(prod >> RECIP_S);
  endfunction

  // block-row groups (multiplier cycles) per column: K = ceil(nbr / N_MUL)
  function automatic logic [T_W-1:0] cycles_per_col(input logic [NBR_W-1:0] nbr);
    return T_W'((32'(nbr) + N_MUL - 1) / N_MUL);
  endfunction

  // slots per bank per pass: f = floor(g / p)
  function automatic logic [SLOT_W:0] slots_per_pass(input logic [P_W-1:0] p);
    return (SLOT_W+1)'(div_by_p(AIDX_W'(G_ACC), 7'(p)));
  endfunction

endpackage
