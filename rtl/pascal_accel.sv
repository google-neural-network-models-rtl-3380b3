// pascal_accel: Pascal, the compute-centric accelerator of Mensa-G for layer
// families 1 and 2 (standard and pointwise convolutions with high MAC
// intensity and small parameter footprints).
//
// Structure (paper): a ROWS x COLS = 32 x 32 PE array, a 128 kB parameter
// buffer and a 256 kB activation buffer; it sits on the CPU die.
// Dataflow (paper): for an output tile, every PE (i,j) builds its own output
// element O_ij = sum_k I_ijk * W_k by temporal reduction in its register file,
// while the controller reads one weight W_k per cycle and multicasts it to
// all PEs, so all PEs work on the same channel k in the same cycle. There is
// no spatial reduction.
//
// Design choices: the activation buffer is one PE-array-wide word per
// (tile, channel): word act_base + tile*K + k holds I_ijk for all PEs, PE
// p = i*COLS + j taking byte p; the parameter buffer holds W[f][k] at byte
// par_base + f*K + k. Several filters (n_filt <= RF_DEPTH) are computed per
// pass: for each k the activation word is read once and reused for every
// filter f (loop order k outer, f inner). Standard convolutions run in the
// same way once im2col has laid out their windows as channels. Outputs are
// 32-bit sums, drained one PE row (COLS values) per beat with valid/ready.
// Both buffers are filled through the DMA ports while the accelerator is idle.
//
// Timing: start is taken in IDLE. Per tile, K*n_filt issue cycles (one MAC per
// PE per cycle, i.e. the whole array busy), one flush cycle, then
// ROWS*n_filt drain beats; done pulses with the last accepted beat.
module pascal_accel
  import mensa_pkg::*;
#(
  parameter int unsigned ROWS       = 32,
  parameter int unsigned COLS       = 32,
  parameter int unsigned RF_DEPTH   = 8,
  parameter int unsigned PBUF_BYTES = 128 * 1024,
  parameter int unsigned ABUF_BYTES = 256 * 1024,
  localparam int unsigned NPE        = ROWS * COLS,
  localparam int unsigned ABUF_DEPTH = ABUF_BYTES / NPE,
  localparam int unsigned PAW        = $clog2(PBUF_BYTES),
  localparam int unsigned AAW        = $clog2(ABUF_DEPTH),
  localparam int unsigned RW         = (RF_DEPTH > 1) ? $clog2(RF_DEPTH) : 1
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // layer command
  input  logic                             start,
  input  pascal_cfg_t                      cfg,
  output logic                             busy,
  output logic                             done,
  // buffer fill from DRAM (only while idle)
  input  logic                             pbuf_we,
  input  logic [PAW-1:0]                   pbuf_addr,
  input  data_t                            pbuf_wdata,
  input  logic                             abuf_we,
  input  logic [AAW-1:0]                   abuf_addr,
  input  logic [NPE-1:0][DATA_W-1:0]       abuf_wdata,
  // output activations, one PE row per beat
  output logic                             out_valid,
  input  logic                             out_ready,
  output logic [COLS-1:0][ACC_W-1:0]       out_data,
  output logic [CNT_W-1:0]                 out_tile,
  output logic [CNT_W-1:0]                 out_filt,
  output logic [CNT_W-1:0]                 out_row
);

  typedef enum logic [1:0] {S_IDLE, S_COMPUTE, S_FLUSH, S_DRAIN} state_e;
  state_e      state;
  pascal_cfg_t c;

  logic [CNT_W-1:0] k, f, tile, dr, df;
  logic [ADDR_W-1:0] a_ptr;

  // ---------------- buffers ----------------
  logic                       p_en, a_en;
  logic [PAW-1:0]             p_addr;
  logic [AAW-1:0]             a_addr;
  data_t                      p_rdata;
  logic [NPE-1:0][DATA_W-1:0] a_rdata;
  logic                       issue, issue_act;

  assign issue     = (state == S_COMPUTE);
  assign issue_act = issue && (f == '0);

  always_comb begin
    if (busy) begin
      p_en   = issue;
      p_addr = PAW'(c.par_base + ADDR_W'(f) * ADDR_W'(c.k_len) + ADDR_W'(k));
      a_en   = issue_act;
      a_addr = AAW'(a_ptr);
    end else begin
      p_en   = pbuf_we;
      p_addr = pbuf_addr;
      a_en   = abuf_we;
      a_addr = abuf_addr;
    end
  end

  sram_buffer #(.WIDTH(DATA_W), .DEPTH(PBUF_BYTES)) u_pbuf (
    .clk, .en(p_en), .we(!busy), .addr(p_addr), .wdata(pbuf_wdata), .rdata(p_rdata)
  );
  sram_buffer #(.WIDTH(NPE*DATA_W), .DEPTH(ABUF_DEPTH)) u_abuf (
    .clk, .en(a_en), .we(!busy), .addr(a_addr), .wdata(abuf_wdata), .rdata(a_rdata)
  );

  // ---------------- issue -> MAC pipeline register ----------------
  logic          s1_valid, s1_act, s1_clear;
  logic [RW-1:0] s1_f;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= issue;
  end
  always_ff @(posedge clk) begin
    s1_act   <= issue_act;
    s1_clear <= (k == '0);
    s1_f     <= RW'(f);
  end

  // ---------------- PE array ----------------
  acc_t pe_acc [NPE];

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    pascal_pe #(.RF_DEPTH(RF_DEPTH)) u_pe (
      .clk,
      .mac_en  (s1_valid),
      .act_load(s1_act),
      .act_in  (a_rdata[p]),
      .w_in    (p_rdata),          // spatial multicast of W_k
      .rf_idx  (s1_f),
      .clear   (s1_clear),
      .rd_idx  (RW'(df)),
      .acc_out (pe_acc[p])
    );
  end

  // drain: row dr of accumulator df
  always_comb begin
    for (int j = 0; j < COLS; j++) out_data[j] = pe_acc[int'(dr) * COLS + j];
  end
  assign out_valid = (state == S_DRAIN);
  assign out_tile  = tile;
  assign out_filt  = df;
  assign out_row   = dr;
  assign busy      = (state != S_IDLE);

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      c     <= '0;
      {k, f, tile, dr, df} <= '0;
      a_ptr <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c     <= cfg;
          {k, f, tile, dr, df} <= '0;
          a_ptr <= cfg.act_base;
          state <= S_COMPUTE;
        end
        S_COMPUTE: begin
          if (f == c.n_filt - 1'b1) begin
            f     <= '0;
            a_ptr <= a_ptr + 1'b1;
            if (k == c.k_len - 1'b1) begin
              k     <= '0;
              state <= S_FLUSH;
            end else begin
              k <= k + 1'b1;
            end
          end else begin
            f <= f + 1'b1;
          end
        end
        S_FLUSH: state <= S_DRAIN;
        S_DRAIN: if (out_ready) begin
          if (dr == CNT_W'(ROWS - 1)) begin
            dr <= '0;
            if (df == c.n_filt - 1'b1) begin
              df <= '0;
              if (tile == c.n_tiles - 1'b1) begin
                done  <= 1'b1;
                state <= S_IDLE;
              end else begin
                tile  <= tile + 1'b1;
                state <= S_COMPUTE;
              end
            end else begin
              df <= df + 1'b1;
            end
          end else begin
            dr <= dr + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- checks ----------------
  a_no_fill_busy: assert property (@(posedge clk) disable iff (!rst_n) !(busy && (pbuf_we || abuf_we)))
    else $error("pascal_accel: buffer fill while a layer is running");
  a_cfg_ok: assert property (@(posedge clk) disable iff (!rst_n) (state == S_IDLE && start) |->
                             (cfg.k_len != 0 && cfg.n_tiles != 0 && cfg.n_filt != 0 && cfg.n_filt <= CNT_W'(RF_DEPTH)))
    else $error("pascal_accel: bad layer descriptor");

endmodule
