// pavlov_accel: Pavlov, the LSTM-centric accelerator of Mensa-G for layer
// family 3 (LSTM gates and fully-connected layers: huge parameter footprint,
// almost no parameter reuse, low MAC intensity). It sits in the logic layer
// of 3D-stacked memory.
//
// Structure (paper): an 8 x 8 = 64 PE array, 512 B of private weight
// registers per PE, no accelerator-level parameter buffer (parameters stream
// directly from DRAM into the PEs) and a 128 kB activation buffer.
// Dataflow (paper): one MVM O = I x W over a set of T samples. PE j holds
// column j of W; each weight W_ij is fetched once and stays in the PE while
// the activations I_ti of all samples t are multicast, one per cycle, to all
// PEs; PE j accumulates O_tj over the rows i (temporal reduction). Scheduling
// all input MVMs of an LSTM layer back to back (then the hidden MVMs) is the
// driver's job: each MVM is one command here.
//
// Design choices: one command covers one tile of NPE output columns,
// n_rows <= 512 rows and n_samples <= PSUM_DEPTH samples. The weight stream
// (w_valid/w_ready, beat i = row i, byte j for PE j) is accepted while the
// layer runs; the row loop stalls whenever row i has not arrived yet, so
// fetching overlaps computing. Activation I[t][i] lives at byte
// act_base + i*n_samples + t. Outputs leave as one sample t (all NPE columns,
// 32-bit) per beat with valid/ready.
//
// Timing: with a weight beat every cycle, n_rows*n_samples MAC cycles after
// the first row arrives, one flush cycle, then n_samples drain beats.
module pavlov_accel
  import mensa_pkg::*;
#(
  parameter int unsigned ROWS       = 8,
  parameter int unsigned COLS       = 8,
  parameter int unsigned WREG_DEPTH = 512,        // 512 B of weight registers per PE
  parameter int unsigned PSUM_DEPTH = 64,
  parameter int unsigned ABUF_BYTES = 128 * 1024,
  localparam int unsigned NPE = ROWS * COLS,
  localparam int unsigned AAW = $clog2(ABUF_BYTES),
  localparam int unsigned WW  = $clog2(WREG_DEPTH),
  localparam int unsigned TW  = $clog2(PSUM_DEPTH)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // layer command
  input  logic                       start,
  input  pavlov_cfg_t                cfg,
  output logic                       busy,
  output logic                       done,
  // activation-buffer fill (only while idle)
  input  logic                       abuf_we,
  input  logic [AAW-1:0]             abuf_addr,
  input  data_t                      abuf_wdata,
  // parameter stream straight from DRAM, one row of the column tile per beat
  input  logic                       w_valid,
  output logic                       w_ready,
  input  logic [NPE-1:0][DATA_W-1:0] w_data,
  // outputs, one sample per beat
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [NPE-1:0][ACC_W-1:0]  out_data,
  output logic [CNT_W-1:0]           out_t,
  // cycles the row loop waited for parameters (for profiling)
  output logic                       w_stall
);

  typedef enum logic [1:0] {S_IDLE, S_COMPUTE, S_FLUSH, S_DRAIN} state_e;
  state_e      state;
  pavlov_cfg_t c;

  logic [CNT_W-1:0]  i, t, w_cnt, dt;
  logic [ADDR_W-1:0] a_ptr;

  assign busy    = (state != S_IDLE);
  assign w_ready = busy && (w_cnt < c.n_rows);

  logic w_take;
  assign w_take = w_valid && w_ready;

  // ---------------- activation buffer ----------------
  logic           issue;
  logic           a_en;
  logic [AAW-1:0] a_addr;
  data_t          a_rdata;

  assign issue   = (state == S_COMPUTE) && (i < w_cnt);   // row i has arrived
  assign w_stall = (state == S_COMPUTE) && !(i < w_cnt);
  assign a_en    = busy ? issue : abuf_we;
  assign a_addr  = busy ? AAW'(a_ptr) : abuf_addr;

  sram_buffer #(.WIDTH(DATA_W), .DEPTH(ABUF_BYTES)) u_abuf (
    .clk, .en(a_en), .we(!busy), .addr(a_addr), .wdata(abuf_wdata), .rdata(a_rdata)
  );

  // ---------------- issue -> MAC pipeline register ----------------
  logic          s1_valid, s1_first;
  logic [WW-1:0] s1_row;
  logic [TW-1:0] s1_t;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= issue;
  end
  always_ff @(posedge clk) begin
    s1_first <= (i == '0);
    s1_row   <= WW'(i);
    s1_t     <= TW'(t);
  end

  // ---------------- PEs ----------------
  for (genvar j = 0; j < NPE; j++) begin : g_pe
    acc_t ps;
    pavlov_pe #(.WREG_DEPTH(WREG_DEPTH), .PSUM_DEPTH(PSUM_DEPTH)) u_pe (
      .clk,
      .w_we    (w_take),
      .w_waddr (WW'(w_cnt)),
      .w_wdata (w_data[j]),
      .mac_en  (s1_valid),
      .row     (s1_row),
      .t_idx   (s1_t),
      .first   (s1_first),
      .act_in  (a_rdata),          // spatial multicast of I_ti
      .rd_t    (TW'(dt)),
      .psum_out(ps)
    );
    assign out_data[j] = ps;
  end

  assign out_valid = (state == S_DRAIN);
  assign out_t     = dt;

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      c     <= '0;
      {i, t, w_cnt, dt} <= '0;
      a_ptr <= '0;
    end else begin
      done <= 1'b0;
      if (w_take) w_cnt <= w_cnt + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          c     <= cfg;
          {i, t, w_cnt, dt} <= '0;
          a_ptr <= cfg.act_base;
          state <= S_COMPUTE;
        end
        S_COMPUTE: if (issue) begin
          a_ptr <= a_ptr + 1'b1;
          if (t == c.n_samples - 1'b1) begin
            t <= '0;
            if (i == c.n_rows - 1'b1) state <= S_FLUSH;
            else                      i <= i + 1'b1;
          end else begin
            t <= t + 1'b1;
          end
        end
        S_FLUSH: state <= S_DRAIN;
        S_DRAIN: if (out_ready) begin
          if (dt == c.n_samples - 1'b1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            dt <= dt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- checks ----------------
  a_no_fill_busy: assert property (@(posedge clk) disable iff (!rst_n) !(busy && abuf_we))
    else $error("pavlov_accel: buffer fill while a layer is running");
  a_cfg_ok: assert property (@(posedge clk) disable iff (!rst_n) (state == S_IDLE && start) |->
                             (cfg.n_rows != 0 && cfg.n_rows <= CNT_W'(WREG_DEPTH) &&
                              cfg.n_samples != 0 && cfg.n_samples <= CNT_W'(PSUM_DEPTH)))
    else $error("pavlov_accel: bad layer descriptor");

endmodule
