// pe_ctrl: controller of one processing element.
//
// It receives the main controller's per-cycle broadcast (pe_cmd_t) and turns
// it into the PE's local control: SRAM enables and addresses, the load enable
// of the weight registers, and a delay line that keeps the activation x, the
// column offset d, the accumulator slot, the clear request and the
// per-multiplier lane enables aligned with the data as it moves through the
// PE pipeline:
//   cycle c   : command arrives; weight and permutation SRAMs are read
//   cycle c+1 : SRAM data valid; LUT output loaded into the weight registers
//   cycle c+2 : weight registers x activation -> product registers
//   cycle c+3 : accumulation selector adds each product into its accumulator
// Multiplier m is enabled in cycle t of a column only if block row
// t*N_MUL + m exists in this PE (t*N_MUL + m < nbr); otherwise it idles
// (the d > 0 case of the paper's Case 1).
// While no command is valid, the host load port may write either SRAM.
// The paper names a PE controller driven by main-controller signals but does
// not describe it; this pipeline split is this design's own.
module pe_ctrl
  import permdnn_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  pe_cmd_t             cmd,
  input  logic [NBR_W-1:0]    nbr,
  // host load port (used only while the engine is idle)
  input  logic                host_wsram_we,
  input  logic                host_psram_we,
  input  logic [WADDR_W-1:0]  host_addr,
  // SRAM control
  output logic                wsram_en,
  output logic                wsram_we,
  output logic [WADDR_W-1:0]  wsram_addr,
  output logic                psram_en,
  output logic                psram_we,
  output logic [PADDR_W-1:0]  psram_addr,
  // stage c+1: load weight registers
  output logic                wreg_en,
  // stage c+2: multiply
  output logic                mul_valid,
  output act_t                mul_x,
  // stage c+3: accumulate
  output logic [N_MUL-1:0]    acc_valid,
  output logic                acc_clear,
  output logic [P_W-1:0]      acc_d,
  output logic [SLOT_W-1:0]   acc_slot
);
  typedef struct packed {
    logic              valid;
    logic              clear;
    act_t              x;
    logic [P_W-1:0]    d;
    logic [SLOT_W-1:0] slot;
    logic [N_MUL-1:0]  lane;
  } ctl_t;

  ctl_t s0, s1, s2, s3;

  always_comb begin
    s0.valid = cmd.valid;
    s0.clear = cmd.clear;
    s0.x     = cmd.x;
    s0.d     = cmd.d;
    s0.slot  = cmd.slot;
    for (int m = 0; m < N_MUL; m++)
      s0.lane[m] = (32'(cmd.t) * N_MUL + 32'(m)) < 32'(nbr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0; s2 <= '0; s3 <= '0;
    end else begin
      s1 <= s0; s2 <= s1; s3 <= s2;
    end
  end

  // SRAM port: engine reads have priority over host writes
  always_comb begin
    wsram_en   = cmd.valid || host_wsram_we;
    wsram_we   = !cmd.valid && host_wsram_we;
    wsram_addr = cmd.valid ? cmd.waddr : host_addr;
    psram_en   = cmd.valid || host_psram_we;
    psram_we   = !cmd.valid && host_psram_we;
    psram_addr = cmd.valid ? cmd.paddr : host_addr[PADDR_W-1:0];
  end

  assign wreg_en   = s1.valid;
  assign mul_valid = s2.valid;
  assign mul_x     = s2.x;
  assign acc_valid = s3.valid ? s3.lane : '0;
  assign acc_clear = s3.clear;
  assign acc_d     = s3.d;
  assign acc_slot  = s3.slot;
endmodule
