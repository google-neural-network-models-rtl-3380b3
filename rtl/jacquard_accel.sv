// jacquard_accel: Jacquard, the data-centric accelerator of Mensa-G for
// layer families 4 and 5 (deep convolutions with large parameter footprints
// and depthwise convolutions: low-to-moderate parameter reuse, little
// activation reuse). It sits in the logic layer of 3D-stacked memory.
//
// Structure (paper): a 16 x 16 = 256 PE array, a 128 kB parameter buffer and
// a 128 kB activation buffer.
// Dataflow (paper): parameters are stored in PE registers and reused over
// many cycles (temporal reuse); the input activations are multicast into the
// array, every PE computes a partial sum, and the interconnect gathers the
// partial sums into one output activation (jacquard_reduce).
//
// Design choices: the computation is O[t][f] = sum_p I[t][p] * W[f][p], i.e.
// a dot product of length NPE between input vector t (one activation-buffer
// word, element p to PE p; e.g. an im2col window) and weight vector f (one
// parameter-buffer word, element p stored in PE p). A pass first loads
// n_filt <= JW_DEPTH weight vectors into the PE registers (n_filt cycles),
// then for each input vector t, read once, iterates over the weight vectors
// f, producing one output activation per cycle. Outputs leave with
// valid/ready; when the consumer stalls, the whole pipeline holds.
// The parameter buffer is read only during the short load phase, so the DRAM
// side may write it at any other time (pbuf_free high), also while a layer
// computes: the next pass's parameters are fetched behind the current pass's
// computation, which is how the paper's temporal parameter reuse hides the
// off-chip access latency. The activation buffer is filled while idle.
//
// Timing: n_filt load cycles, then n_vec*n_filt issue cycles at one output
// per cycle (all NPE PEs doing one MAC each), with a pipeline latency of
// 2 + log2(NPE) cycles from issue to output.
module jacquard_accel
  import mensa_pkg::*;
#(
  parameter int unsigned ROWS       = 16,
  parameter int unsigned COLS       = 16,
  parameter int unsigned JW_DEPTH   = 16,
  parameter int unsigned PBUF_BYTES = 128 * 1024,
  parameter int unsigned ABUF_BYTES = 128 * 1024,
  localparam int unsigned NPE   = ROWS * COLS,
  localparam int unsigned PDEP  = PBUF_BYTES / NPE,
  localparam int unsigned ADEP  = ABUF_BYTES / NPE,
  localparam int unsigned PAW   = $clog2(PDEP),
  localparam int unsigned AAW   = $clog2(ADEP),
  localparam int unsigned FW    = (JW_DEPTH > 1) ? $clog2(JW_DEPTH) : 1,
  localparam int unsigned TAG_W = 2 * CNT_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // layer command
  input  logic                       start,
  input  jacquard_cfg_t              cfg,
  output logic                       busy,
  output logic                       done,
  // buffer fill from DRAM: parameters whenever pbuf_free, activations while idle
  output logic                       pbuf_free,
  input  logic                       pbuf_we,
  input  logic [PAW-1:0]             pbuf_addr,
  input  logic [NPE-1:0][DATA_W-1:0] pbuf_wdata,
  input  logic                       abuf_we,
  input  logic [AAW-1:0]             abuf_addr,
  input  logic [NPE-1:0][DATA_W-1:0] abuf_wdata,
  // output activations, one per beat
  output logic                       out_valid,
  input  logic                       out_ready,
  output acc_t                       out_data,
  output logic [CNT_W-1:0]           out_t,
  output logic [CNT_W-1:0]           out_f
);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_COMPUTE, S_WAIT} state_e;
  state_e        state;
  jacquard_cfg_t c;

  logic [CNT_W-1:0]  lf, t, f;
  logic [2*CNT_W-1:0] out_cnt, total;
  logic [ADDR_W-1:0] a_ptr;
  logic              adv;

  assign busy = (state != S_IDLE);
  assign adv  = !(out_valid && !out_ready);

  // ---------------- buffers ----------------
  logic                       load_issue, issue, issue_act;
  logic                       p_en, a_en;
  logic [PAW-1:0]             p_addr;
  logic [AAW-1:0]             a_addr;
  logic [NPE-1:0][DATA_W-1:0] p_rdata, a_rdata;

  assign load_issue = (state == S_LOAD);
  assign issue      = (state == S_COMPUTE) && adv;
  assign issue_act  = issue && (f == '0);

  assign pbuf_free = !load_issue;
  assign p_en   = load_issue || pbuf_we;
  assign p_addr = load_issue ? PAW'(c.par_base + ADDR_W'(lf)) : pbuf_addr;
  assign a_en   = busy ? issue_act : abuf_we;
  assign a_addr = busy ? AAW'(a_ptr) : abuf_addr;

  sram_buffer #(.WIDTH(NPE*DATA_W), .DEPTH(PDEP)) u_pbuf (
    .clk, .en(p_en), .we(!load_issue), .addr(p_addr), .wdata(pbuf_wdata), .rdata(p_rdata)
  );
  sram_buffer #(.WIDTH(NPE*DATA_W), .DEPTH(ADEP)) u_abuf (
    .clk, .en(a_en), .we(!busy), .addr(a_addr), .wdata(abuf_wdata), .rdata(a_rdata)
  );

  // ---------------- pipeline registers ----------------
  logic          ld_valid;
  logic [FW-1:0] ld_idx;
  logic          s1_valid, s1_act, s2_valid;
  logic [FW-1:0] s1_f;
  logic [TAG_W-1:0] s1_tag, s2_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_valid <= 1'b0;
      s1_valid <= 1'b0;
      s2_valid <= 1'b0;
    end else begin
      ld_valid <= load_issue;
      if (adv) begin
        s1_valid <= issue;
        s2_valid <= s1_valid;
      end
    end
  end
  always_ff @(posedge clk) begin
    ld_idx <= FW'(lf);
    if (adv) begin
      s1_act <= issue_act;
      s1_f   <= FW'(f);
      s1_tag <= {t, f};
      s2_tag <= s1_tag;
    end
  end

  // ---------------- PE array ----------------
  acc_t psum [NPE];

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    jacquard_pe #(.JW_DEPTH(JW_DEPTH)) u_pe (
      .clk,
      .w_we    (ld_valid),
      .w_idx   (ld_idx),
      .w_data  (p_rdata[p]),
      .en      (adv),
      .act_load(s1_act),
      .act_in  (a_rdata[p]),
      .f_idx   (s1_f),
      .psum    (psum[p])
    );
  end

  // ---------------- partial-sum gather ----------------
  logic [TAG_W-1:0] o_tag;

  jacquard_reduce #(.N(NPE), .TAG_W(TAG_W)) u_reduce (
    .clk, .rst_n,
    .en       (adv),
    .in_valid (s2_valid),
    .in_tag   (s2_tag),
    .in_psum  (psum),
    .out_valid(out_valid),
    .out_tag  (o_tag),
    .out_sum  (out_data)
  );
  assign {out_t, out_f} = o_tag;

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      c     <= '0;
      {lf, t, f} <= '0;
      out_cnt <= '0;
      total   <= '0;
      a_ptr   <= '0;
    end else begin
      done <= 1'b0;
      if (busy && out_valid && out_ready) begin
        out_cnt <= out_cnt + 1'b1;
        if (out_cnt == total - 1'b1) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
      end
      unique case (state)
        S_IDLE: if (start) begin
          c       <= cfg;
          {lf, t, f} <= '0;
          out_cnt <= '0;
          total   <= cfg.n_vec * cfg.n_filt;
          a_ptr   <= cfg.act_base;
          state   <= S_LOAD;
        end
        S_LOAD: begin
          if (lf == c.n_filt - 1'b1) state <= S_COMPUTE;
          else                       lf <= lf + 1'b1;
        end
        S_COMPUTE: if (issue) begin
          if (f == c.n_filt - 1'b1) begin
            f     <= '0;
            a_ptr <= a_ptr + 1'b1;
            if (t == c.n_vec - 1'b1) state <= S_WAIT;
            else                     t <= t + 1'b1;
          end else begin
            f <= f + 1'b1;
          end
        end
        default: ;  // S_WAIT: until the last output has been accepted (above)
      endcase
    end
  end

  // ---------------- checks ----------------
  a_no_act_fill_busy: assert property (@(posedge clk) disable iff (!rst_n) !(busy && abuf_we))
    else $error("jacquard_accel: activation fill while a layer is running");
  a_no_par_fill_load: assert property (@(posedge clk) disable iff (!rst_n) !(load_issue && pbuf_we))
    else $error("jacquard_accel: parameter fill during the weight load");
  a_cfg_ok: assert property (@(posedge clk) disable iff (!rst_n) (state == S_IDLE && start) |->
                             (cfg.n_filt != 0 && cfg.n_filt <= CNT_W'(JW_DEPTH) && cfg.n_vec != 0))
    else $error("jacquard_accel: bad layer descriptor");

endmodule
