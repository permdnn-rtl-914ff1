// main_ctrl: main controller of the PermDNN engine.
//
// It runs one fully-connected layer a = W x, y = act(a), column by column:
// every non-zero x_j (popped from the activation FIFO with its index j) is
// broadcast to all PEs for K = ceil(nbr/N_MUL) cycles, cycle t serving block
// rows t*N_MUL .. t*N_MUL+N_MUL-1 of every PE. Zero x_j never reach it.
//
// Case 1 / Case 2 of the paper: each accumulator bank has G = N_ACC/N_MUL
// registers, enough for f = floor(G/p) blocks per multiplier. If K <= f the
// whole column fits (one pass). Otherwise the layer is run in
// P = ceil(K/f) passes: pass q streams all of x again but only issues cycles
// t = q*f .. min(K,(q+1)f)-1, then writes out the finished rows before the
// accumulators are reused. Case 3 (fewer rows per PE than p*N_MUL, several
// columns at once) is not supported: a layer needs nbr >= 1 and p <= G.
//
// Per pass: clear accumulators, start the activation selector, stream, wait
// for the PE pipeline to drain, start the routing network, wait for it.
// For column j and cycle t it issues weight row w_base + j*K + t and
// permutation row perm_base + (j div p)*K + t; j div p and j mod p come from
// a reciprocal multiplication (no divider).
//
// Interface: pulse 'start' with cfg stable until 'done' (one-cycle pulse at
// the end). Statistics outputs count issued columns, passes and cycles in
// which the PEs waited for the FIFO.
// Column-wise processing, zero skipping, the passes and the group write after
// each pass are the paper's; the FSM, address formulas and drain wait are
// this design's.
module main_ctrl
  import permdnn_pkg::*;
#(
  parameter int unsigned PIPE_DRAIN = 4   // PE pipeline depth after issue
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  layer_cfg_t        cfg,
  output logic              busy,
  output logic              done,
  // activation selector
  output logic              rd_start,
  input  logic              rd_done,
  // activation FIFO
  input  logic              fifo_empty,
  input  xent_t             fifo_head,
  output logic              fifo_pop,
  // PE array broadcast
  output pe_cmd_t           cmd,
  // routing network
  output logic              rt_start,
  output logic [AIDX_W-1:0] rt_lo,
  output logic [7:0]        rt_rows,
  output logic [AIDX_W-1:0] stride,
  input  logic              rt_done,
  // statistics
  output logic [31:0]       n_cols,
  output logic [31:0]       n_passes,
  output logic [31:0]       n_starve
);
  typedef enum logic [2:0] { S_IDLE, S_CLEAR, S_STREAM, S_DRAIN, S_WRITE, S_WWAIT, S_DONE } state_e;
  state_e state;

  logic [T_W-1:0]    K, t0, t1, t_cur;
  logic [SLOT_W:0]   f;
  logic [T_W-1:0]    q;
  logic [AIDX_W-1:0] nr;           // rows per PE = nbr * p
  logic              have_cur;
  act_t              x_cur;
  logic [AIDX_W-1:0] j_cur, g_cur;
  logic [P_W-1:0]    d_cur;
  logic [3:0]        drain;
  logic [AIDX_W-1:0] g_head;
  logic              last_t;

  always_comb begin
    K      = cycles_per_col(cfg.nbr);
    f      = slots_per_pass(cfg.p);
    nr     = AIDX_W'(cfg.nbr) * AIDX_W'(cfg.p);
    stride = (nr + AIDX_W'(ACT_LANES - 1)) & ~AIDX_W'(ACT_LANES - 1);
    t0     = T_W'(q * T_W'(f));
    t1     = (32'(t0) + 32'(f) > 32'(K)) ? K : T_W'(t0 + T_W'(f));
    rt_lo  = AIDX_W'(t0) * AIDX_W'(N_MUL) * AIDX_W'(cfg.p);
    rt_rows = (AIDX_W'(t1) * AIDX_W'(N_MUL) * AIDX_W'(cfg.p) > nr)
              ? 8'(nr - rt_lo) : 8'(AIDX_W'(t1 - t0) * AIDX_W'(N_MUL) * AIDX_W'(cfg.p));
    g_head = div_by_p(fifo_head.idx, 7'(cfg.p));
    last_t = (t_cur == t1 - 1'b1);
    fifo_pop = (state == S_STREAM) && !fifo_empty && (!have_cur || last_t);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; q <= '0; have_cur <= 1'b0; cmd <= '0;
      x_cur <= '0; j_cur <= '0; g_cur <= '0; d_cur <= '0; t_cur <= '0;
      drain <= '0; rd_start <= 1'b0; rt_start <= 1'b0; done <= 1'b0;
      n_cols <= '0; n_passes <= '0; n_starve <= '0;
    end else begin
      cmd      <= '0;
      rd_start <= 1'b0;
      rt_start <= 1'b0;
      done     <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          q <= '0; n_cols <= '0; n_passes <= '0; n_starve <= '0;
          state <= S_CLEAR;
        end
        S_CLEAR: begin
          cmd.clear <= 1'b1;
          rd_start  <= 1'b1;
          have_cur  <= 1'b0;
          n_passes  <= n_passes + 1;
          state     <= S_STREAM;
        end
        S_STREAM: begin
          if (have_cur) begin
            cmd.valid <= 1'b1;
            cmd.x     <= x_cur;
            cmd.d     <= d_cur;
            cmd.t     <= t_cur;
            cmd.slot  <= SLOT_W'(t_cur - t0);
            cmd.waddr <= cfg.w_base + WADDR_W'(j_cur * AIDX_W'(K)) + WADDR_W'(t_cur);
            cmd.paddr <= cfg.perm_base + PADDR_W'(g_cur * AIDX_W'(K)) + PADDR_W'(t_cur);
            t_cur     <= t_cur + 1'b1;
          end
          if (fifo_pop) begin
            have_cur <= 1'b1;
            x_cur    <= fifo_head.val;
            j_cur    <= fifo_head.idx;
            g_cur    <= g_head;
            d_cur    <= P_W'(fifo_head.idx - g_head * AIDX_W'(cfg.p));
            t_cur    <= t0;
            n_cols   <= n_cols + 1;
          end else if (have_cur && last_t) begin
            have_cur <= 1'b0;
          end
          if (!have_cur && fifo_empty && !rd_start) begin
            if (rd_done) begin
              drain <= 4'(PIPE_DRAIN);
              state <= S_DRAIN;
            end else begin
              n_starve <= n_starve + 1;
            end
          end
        end
        S_DRAIN: begin
          if (drain == 0) begin
            rt_start <= 1'b1;
            state    <= S_WRITE;
          end else drain <= drain - 1'b1;
        end
        S_WRITE: state <= S_WWAIT;
        S_WWAIT: if (rt_done) begin
          if (t1 == K) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            q     <= q + 1'b1;
            state <= S_CLEAR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
