// mensa_top: Mensa-G, the Mensa accelerator framework instantiated for the
// Google edge models: three independent accelerators, each specialised for a
// group of layer families, replacing the single monolithic PE array of an
// edge TPU.
//   Pascal   (pascal_accel)   32x32 PEs, on the CPU die      families 1, 2
//   Pavlov   (pavlov_accel)    8x8  PEs, in 3D-stacked DRAM  family 3 (LSTM)
//   Jacquard (jacquard_accel) 16x16 PEs, in 3D-stacked DRAM  families 4, 5
// The accelerators share no resources. A software runtime decides for every
// layer which accelerator runs it; this module receives that decision as a
// command (accelerator + layer descriptor) and dispatches it. As in the
// paper's scheduler, layers never run concurrently: a command is accepted
// only while no accelerator is busy, and activations move between
// accelerators through DRAM, whose side of every buffer and stream is a port
// of this module (the DRAM itself is not part of the design).
//
// Interface: cmd_valid/cmd_ready handshake; cmd_accel selects the target and
// only the matching cfg field is used. layer_done pulses one cycle when the
// running layer has delivered its last output. accel_switches counts layers
// that ran on a different accelerator than the layer before (each such
// switch means activations travel through DRAM).
// Timing: the selected accelerator starts the cycle after the command is
// accepted; see each accelerator for its own timing.
// rst_n resets the control flops asynchronously and also disables the
// concurrent assertions; lint reports that second, non-flop use as a
// synchronous one, which is harmless.
module mensa_top
  import mensa_pkg::*;
#(
  // Pascal
  parameter int unsigned PA_ROWS       = 32,
  parameter int unsigned PA_COLS       = 32,
  parameter int unsigned PA_RF_DEPTH   = 8,
  parameter int unsigned PA_PBUF_BYTES = 128 * 1024,
  parameter int unsigned PA_ABUF_BYTES = 256 * 1024,
  // Pavlov
  parameter int unsigned PV_ROWS       = 8,
  parameter int unsigned PV_COLS       = 8,
  parameter int unsigned PV_WREG_DEPTH = 512,
  parameter int unsigned PV_PSUM_DEPTH = 64,
  parameter int unsigned PV_ABUF_BYTES = 128 * 1024,
  // Jacquard
  parameter int unsigned JQ_ROWS       = 16,
  parameter int unsigned JQ_COLS       = 16,
  parameter int unsigned JQ_JW_DEPTH   = 16,
  parameter int unsigned JQ_PBUF_BYTES = 128 * 1024,
  parameter int unsigned JQ_ABUF_BYTES = 128 * 1024,
  localparam int unsigned PA_NPE = PA_ROWS * PA_COLS,
  localparam int unsigned PV_NPE = PV_ROWS * PV_COLS,
  localparam int unsigned JQ_NPE = JQ_ROWS * JQ_COLS,
  localparam int unsigned PA_PAW = $clog2(PA_PBUF_BYTES),
  localparam int unsigned PA_AAW = $clog2(PA_ABUF_BYTES / PA_NPE),
  localparam int unsigned PV_AAW = $clog2(PV_ABUF_BYTES),
  localparam int unsigned JQ_PAW = $clog2(JQ_PBUF_BYTES / JQ_NPE),
  localparam int unsigned JQ_AAW = $clog2(JQ_ABUF_BYTES / JQ_NPE)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // layer commands from the runtime
  input  logic                          cmd_valid,
  output logic                          cmd_ready,
  input  accel_e                        cmd_accel,
  input  pascal_cfg_t                   cmd_pascal,
  input  pavlov_cfg_t                   cmd_pavlov,
  input  jacquard_cfg_t                 cmd_jacquard,
  output logic                          layer_done,
  output logic [2:0]                    accel_busy,     // {Jacquard, Pavlov, Pascal}
  output logic [CNT_W-1:0]              accel_switches,
  // Pascal DRAM side
  input  logic                          pa_pbuf_we,
  input  logic [PA_PAW-1:0]             pa_pbuf_addr,
  input  data_t                         pa_pbuf_wdata,
  input  logic                          pa_abuf_we,
  input  logic [PA_AAW-1:0]             pa_abuf_addr,
  input  logic [PA_NPE-1:0][DATA_W-1:0] pa_abuf_wdata,
  output logic                          pa_out_valid,
  input  logic                          pa_out_ready,
  output logic [PA_COLS-1:0][ACC_W-1:0] pa_out_data,
  output logic [CNT_W-1:0]              pa_out_tile,
  output logic [CNT_W-1:0]              pa_out_filt,
  output logic [CNT_W-1:0]              pa_out_row,
  // Pavlov DRAM side
  input  logic                          pv_abuf_we,
  input  logic [PV_AAW-1:0]             pv_abuf_addr,
  input  data_t                         pv_abuf_wdata,
  input  logic                          pv_w_valid,
  output logic                          pv_w_ready,
  input  logic [PV_NPE-1:0][DATA_W-1:0] pv_w_data,
  output logic                          pv_out_valid,
  input  logic                          pv_out_ready,
  output logic [PV_NPE-1:0][ACC_W-1:0]  pv_out_data,
  output logic [CNT_W-1:0]              pv_out_t,
  output logic                          pv_w_stall,
  // Jacquard DRAM side
  output logic                          jq_pbuf_free,
  input  logic                          jq_pbuf_we,
  input  logic [JQ_PAW-1:0]             jq_pbuf_addr,
  input  logic [JQ_NPE-1:0][DATA_W-1:0] jq_pbuf_wdata,
  input  logic                          jq_abuf_we,
  input  logic [JQ_AAW-1:0]             jq_abuf_addr,
  input  logic [JQ_NPE-1:0][DATA_W-1:0] jq_abuf_wdata,
  output logic                          jq_out_valid,
  input  logic                          jq_out_ready,
  output acc_t                          jq_out_data,
  output logic [CNT_W-1:0]              jq_out_t,
  output logic [CNT_W-1:0]              jq_out_f
);

  // ---------------- layer dispatcher ----------------
  logic [2:0] start_q, done_v;
  accel_e     last_accel;
  logic       any_layer;
  pascal_cfg_t   pa_cfg_q;
  pavlov_cfg_t   pv_cfg_q;
  jacquard_cfg_t jq_cfg_q;

  assign cmd_ready  = (accel_busy == '0) && (start_q == '0);
  assign layer_done = |done_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_q        <= '0;
      last_accel     <= ACC_PASCAL;
      any_layer      <= 1'b0;
      accel_switches <= '0;
    end else begin
      start_q <= '0;
      if (cmd_valid && cmd_ready) begin
        start_q[cmd_accel] <= 1'b1;
        last_accel <= cmd_accel;
        any_layer  <= 1'b1;
        if (any_layer && cmd_accel != last_accel) accel_switches <= accel_switches + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (cmd_valid && cmd_ready) begin
      pa_cfg_q <= cmd_pascal;
      pv_cfg_q <= cmd_pavlov;
      jq_cfg_q <= cmd_jacquard;
    end
  end

  // ---------------- accelerators ----------------
  pascal_accel #(
    .ROWS(PA_ROWS), .COLS(PA_COLS), .RF_DEPTH(PA_RF_DEPTH),
    .PBUF_BYTES(PA_PBUF_BYTES), .ABUF_BYTES(PA_ABUF_BYTES)
  ) u_pascal (
    .clk, .rst_n,
    .start(start_q[ACC_PASCAL]), .cfg(pa_cfg_q), .busy(accel_busy[0]), .done(done_v[0]),
    .pbuf_we(pa_pbuf_we), .pbuf_addr(pa_pbuf_addr), .pbuf_wdata(pa_pbuf_wdata),
    .abuf_we(pa_abuf_we), .abuf_addr(pa_abuf_addr), .abuf_wdata(pa_abuf_wdata),
    .out_valid(pa_out_valid), .out_ready(pa_out_ready), .out_data(pa_out_data),
    .out_tile(pa_out_tile), .out_filt(pa_out_filt), .out_row(pa_out_row)
  );

  pavlov_accel #(
    .ROWS(PV_ROWS), .COLS(PV_COLS), .WREG_DEPTH(PV_WREG_DEPTH),
    .PSUM_DEPTH(PV_PSUM_DEPTH), .ABUF_BYTES(PV_ABUF_BYTES)
  ) u_pavlov (
    .clk, .rst_n,
    .start(start_q[ACC_PAVLOV]), .cfg(pv_cfg_q), .busy(accel_busy[1]), .done(done_v[1]),
    .abuf_we(pv_abuf_we), .abuf_addr(pv_abuf_addr), .abuf_wdata(pv_abuf_wdata),
    .w_valid(pv_w_valid), .w_ready(pv_w_ready), .w_data(pv_w_data),
    .out_valid(pv_out_valid), .out_ready(pv_out_ready), .out_data(pv_out_data),
    .out_t(pv_out_t), .w_stall(pv_w_stall)
  );

  jacquard_accel #(
    .ROWS(JQ_ROWS), .COLS(JQ_COLS), .JW_DEPTH(JQ_JW_DEPTH),
    .PBUF_BYTES(JQ_PBUF_BYTES), .ABUF_BYTES(JQ_ABUF_BYTES)
  ) u_jacquard (
    .clk, .rst_n,
    .start(start_q[ACC_JACQUARD]), .cfg(jq_cfg_q), .busy(accel_busy[2]), .done(done_v[2]),
    .pbuf_free(jq_pbuf_free), .pbuf_we(jq_pbuf_we), .pbuf_addr(jq_pbuf_addr), .pbuf_wdata(jq_pbuf_wdata),
    .abuf_we(jq_abuf_we), .abuf_addr(jq_abuf_addr), .abuf_wdata(jq_abuf_wdata),
    .out_valid(jq_out_valid), .out_ready(jq_out_ready), .out_data(jq_out_data),
    .out_t(jq_out_t), .out_f(jq_out_f)
  );

  // ---------------- checks ----------------
  a_one_layer: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(accel_busy))
    else $error("mensa_top: two layers running at once");
  a_known_accel: assert property (@(posedge clk) disable iff (!rst_n) (cmd_valid && cmd_ready) |->
                                  (cmd_accel != accel_e'(2'd3)))
    else $error("mensa_top: unknown accelerator");

endmodule
