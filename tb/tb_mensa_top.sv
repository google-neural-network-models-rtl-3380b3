// tb_mensa_top: end-to-end test of Mensa-G at its full size (32x32 Pascal,
// 8x8 Pavlov, 16x16 Jacquard, paper-sized buffers). It plays the DRAM and the
// runtime: it fills every accelerator's buffers with random int8 data, then
// sends a sequence of six layers (Pascal, Jacquard, Pavlov, Pavlov, Pascal,
// Jacquard) back to back, writes the last layer's Jacquard weights while the
// first Jacquard layer computes (parameter prefetch), streams Pavlov's parameters with random gaps, applies random
// backpressure to every output, and checks every output value against sums
// computed here. It also counts the mechanisms of the design and fails if one
// never happened: command hold-off while a layer runs (no concurrent layers),
// Pavlov's wait for parameters, Jacquard's parameter prefetch, output
// backpressure on each accelerator,
// and the switch between accelerators (checked against the expected count).
module tb_mensa_top;
  import mensa_pkg::*;
  // must match the defaults of mensa_top
  localparam int PA_R = 32, PA_C = 32, PA_NPE = PA_R * PA_C;
  localparam int PV_NPE = 64, JQ_NPE = 256;
  localparam int PA_PAW = $clog2(128*1024), PA_AAW = $clog2(256*1024 / PA_NPE);
  localparam int PV_AAW = $clog2(128*1024);
  localparam int JQ_PAW = $clog2(128*1024 / JQ_NPE), JQ_AAW = $clog2(128*1024 / JQ_NPE);

  logic clk = 0, rst_n;
  logic cmd_valid, cmd_ready, layer_done;
  accel_e cmd_accel;
  pascal_cfg_t cmd_pascal;
  pavlov_cfg_t cmd_pavlov;
  jacquard_cfg_t cmd_jacquard;
  logic [2:0] accel_busy;
  logic [CNT_W-1:0] accel_switches;
  logic pa_pbuf_we, pa_abuf_we;
  logic [PA_PAW-1:0] pa_pbuf_addr;
  data_t pa_pbuf_wdata;
  logic [PA_AAW-1:0] pa_abuf_addr;
  logic [PA_NPE-1:0][DATA_W-1:0] pa_abuf_wdata;
  logic pa_out_valid, pa_out_ready;
  logic [PA_C-1:0][ACC_W-1:0] pa_out_data;
  logic [CNT_W-1:0] pa_out_tile, pa_out_filt, pa_out_row;
  logic pv_abuf_we;
  logic [PV_AAW-1:0] pv_abuf_addr;
  data_t pv_abuf_wdata;
  logic pv_w_valid, pv_w_ready;
  logic [PV_NPE-1:0][DATA_W-1:0] pv_w_data;
  logic pv_out_valid, pv_out_ready, pv_w_stall;
  logic [PV_NPE-1:0][ACC_W-1:0] pv_out_data;
  logic [CNT_W-1:0] pv_out_t;
  logic jq_pbuf_free, jq_pbuf_we, jq_abuf_we;
  logic [JQ_PAW-1:0] jq_pbuf_addr;
  logic [JQ_AAW-1:0] jq_abuf_addr;
  logic [JQ_NPE-1:0][DATA_W-1:0] jq_pbuf_wdata, jq_abuf_wdata;
  logic jq_out_valid, jq_out_ready;
  acc_t jq_out_data;
  logic [CNT_W-1:0] jq_out_t, jq_out_f;

  mensa_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- layer list ----------------
  localparam int NL = 6;
  accel_e lay_acc [NL] = '{ACC_PASCAL, ACC_JACQUARD, ACC_PAVLOV, ACC_PAVLOV, ACC_PASCAL, ACC_JACQUARD};
  int     lay_idx [NL] = '{0, 0, 0, 1, 1, 1};     // index among that accelerator's layers
  // Pascal layers: K, F, tiles, act_base, par_base
  int pa_K [2] = '{3, 2}, pa_F [2] = '{2, 1}, pa_T [2] = '{1, 2};
  int pa_ab [2] = '{0, 16}, pa_pb [2] = '{0, 64};
  int pa_act [2][2][3][PA_NPE];   // [layer][tile][k][pe]
  int pa_w   [2][2][3];           // [layer][filter][k]
  // Jacquard layers: F, T, act_base, par_base (layer 1's weights are prefetched)
  int jq_F [2] = '{2, 3}, jq_T [2] = '{4, 2}, jq_ab [2] = '{5, 20}, jq_pb [2] = '{9, 40};
  int jq_I [2][4][JQ_NPE];
  int jq_W [2][3][JQ_NPE];
  // Pavlov layers: R, T, act_base
  int pv_R [2] = '{6, 2}, pv_T [2] = '{3, 2}, pv_ab [2] = '{0, 100};
  int pv_I [2][3][6];             // [layer][t][i]
  int pv_W [2][6][PV_NPE];        // [layer][i][j]

  // ---------------- DRAM side: buffer fill ----------------
  task automatic fill_buffers();
    for (int l = 0; l < 2; l++) begin
      for (int tl = 0; tl < pa_T[l]; tl++)
        for (int k = 0; k < pa_K[l]; k++) begin
          for (int p = 0; p < PA_NPE; p++) begin
            pa_act[l][tl][k][p] = int'($signed(8'($urandom)));
            pa_abuf_wdata[p] = 8'(pa_act[l][tl][k][p]);
          end
          pa_abuf_we = 1; pa_abuf_addr = PA_AAW'(pa_ab[l] + tl*pa_K[l] + k);
          @(negedge clk);
        end
      pa_abuf_we = 0;
      for (int f = 0; f < pa_F[l]; f++)
        for (int k = 0; k < pa_K[l]; k++) begin
          pa_w[l][f][k] = int'($signed(8'($urandom)));
          pa_pbuf_we = 1; pa_pbuf_addr = PA_PAW'(pa_pb[l] + f*pa_K[l] + k);
          pa_pbuf_wdata = data_t'(pa_w[l][f][k]);
          @(negedge clk);
        end
      pa_pbuf_we = 0;
    end
    for (int l = 0; l < 2; l++)
      for (int t = 0; t < jq_T[l]; t++) begin
        for (int p = 0; p < JQ_NPE; p++) begin
          jq_I[l][t][p] = int'($signed(8'($urandom))); jq_abuf_wdata[p] = 8'(jq_I[l][t][p]);
        end
        jq_abuf_we = 1; jq_abuf_addr = JQ_AAW'(jq_ab[l] + t);
        @(negedge clk);
      end
    jq_abuf_we = 0;
    for (int l = 0; l < 2; l++)
      for (int f = 0; f < jq_F[l]; f++) begin
        for (int p = 0; p < JQ_NPE; p++) jq_W[l][f][p] = int'($signed(8'($urandom)));
        if (l == 0) begin   // layer 1's weights are written later, while layer 0 runs
          for (int p = 0; p < JQ_NPE; p++) jq_pbuf_wdata[p] = 8'(jq_W[l][f][p]);
          jq_pbuf_we = 1; jq_pbuf_addr = JQ_PAW'(jq_pb[l] + f);
          @(negedge clk);
        end
      end
    jq_pbuf_we = 0;
    for (int l = 0; l < 2; l++) begin
      for (int i = 0; i < pv_R[l]; i++)
        for (int t = 0; t < pv_T[l]; t++) begin
          pv_I[l][t][i] = int'($signed(8'($urandom)));
          pv_abuf_we = 1; pv_abuf_addr = PV_AAW'(pv_ab[l] + i*pv_T[l] + t);
          pv_abuf_wdata = data_t'(pv_I[l][t][i]);
          @(negedge clk);
        end
      for (int i = 0; i < pv_R[l]; i++)
        for (int j = 0; j < PV_NPE; j++) pv_W[l][i][j] = int'($signed(8'($urandom)));
    end
    pv_abuf_we = 0;
  endtask

  // ---------------- mechanism counters ----------------
  int prefetch = 0, holdoff = 0, pv_wait = 0, pa_bp = 0, pv_bp = 0, jq_bp = 0, layers_done = 0;
  int pa_beats = 0, pv_beats = 0, jq_beats = 0;

  initial begin
    int cmd_i, cur_pa, cur_pv, cur_jq, wrow, exp_pa_beats, exp_pv_beats, exp_jq_beats;
    rst_n = 0; cmd_valid = 0; cmd_accel = ACC_PASCAL;
    cmd_pascal = '0; cmd_pavlov = '0; cmd_jacquard = '0;
    pa_pbuf_we = 0; pa_abuf_we = 0; pa_pbuf_addr = 0; pa_abuf_addr = 0; pa_pbuf_wdata = 0; pa_abuf_wdata = '0;
    pv_abuf_we = 0; pv_abuf_addr = 0; pv_abuf_wdata = 0; pv_w_valid = 0; pv_w_data = '0;
    jq_pbuf_we = 0; jq_abuf_we = 0; jq_pbuf_addr = 0; jq_abuf_addr = 0; jq_pbuf_wdata = '0; jq_abuf_wdata = '0;
    pa_out_ready = 1; pv_out_ready = 1; jq_out_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    fill_buffers();

    exp_pa_beats = 0;
    for (int l = 0; l < 2; l++) exp_pa_beats += pa_T[l] * pa_F[l] * PA_R;
    exp_pv_beats = pv_T[0] + pv_T[1];
    exp_jq_beats = jq_T[0] * jq_F[0] + jq_T[1] * jq_F[1];

    cmd_i = 0; cur_pa = -1; cur_pv = -1; cur_jq = -1; wrow = 0;
    while (layers_done < NL) begin
      // runtime: next command, held until accepted
      cmd_valid = (cmd_i < NL);
      if (cmd_i < NL) begin
        int x;
        x = lay_idx[cmd_i];
        cmd_accel = lay_acc[cmd_i];
        cmd_pascal = '{k_len: CNT_W'(pa_K[x]), n_filt: CNT_W'(pa_F[x]), n_tiles: CNT_W'(pa_T[x]),
                       act_base: ADDR_W'(pa_ab[x]), par_base: ADDR_W'(pa_pb[x])};
        cmd_pavlov = '{n_rows: CNT_W'(pv_R[x]), n_samples: CNT_W'(pv_T[x]), act_base: ADDR_W'(pv_ab[x])};
        cmd_jacquard = '{n_filt: CNT_W'(jq_F[x]), n_vec: CNT_W'(jq_T[x]),
                         act_base: ADDR_W'(jq_ab[x]), par_base: ADDR_W'(jq_pb[x])};
      end
      // DRAM: Pavlov parameter stream with gaps
      pv_w_valid = (cur_pv >= 0) && (wrow < pv_R[cur_pv]) && ($urandom_range(3) == 0);
      for (int j = 0; j < PV_NPE; j++)
        pv_w_data[j] = (cur_pv >= 0 && wrow < pv_R[cur_pv]) ? 8'(pv_W[cur_pv][wrow][j]) : 8'($urandom);
      // DRAM: prefetch Jacquard layer 1's weights while layer 0 computes
      jq_pbuf_we = 0;
      if (cur_jq == 0 && accel_busy[2] && jq_pbuf_free && prefetch < jq_F[1]) begin
        for (int p = 0; p < JQ_NPE; p++) jq_pbuf_wdata[p] = 8'(jq_W[1][prefetch][p]);
        jq_pbuf_we = 1; jq_pbuf_addr = JQ_PAW'(jq_pb[1] + prefetch);
        prefetch++;
      end
      pa_out_ready = 1'($urandom_range(1));
      pv_out_ready = 1'($urandom_range(1));
      jq_out_ready = 1'($urandom_range(1));
      #1;
      if (cmd_valid && !cmd_ready && accel_busy != 0) holdoff++;
      if (pv_w_stall) pv_wait++;
      if (pa_out_valid && !pa_out_ready) pa_bp++;
      if (pv_out_valid && !pv_out_ready) pv_bp++;
      if (jq_out_valid && !jq_out_ready) jq_bp++;
      // Pascal output check
      if (pa_out_valid && pa_out_ready) begin
        for (int j = 0; j < PA_C; j++) begin
          int s;
          s = 0;
          for (int k = 0; k < pa_K[cur_pa]; k++)
            s += pa_act[cur_pa][pa_out_tile][k][int'(pa_out_row)*PA_C + j] * pa_w[cur_pa][pa_out_filt][k];
          checks++;
          if ($signed(pa_out_data[j]) != s) begin
            failures++; $display("pascal layer %0d: got %0d exp %0d", cur_pa, $signed(pa_out_data[j]), s);
          end
        end
        pa_beats++;
      end
      // Pavlov output check
      if (pv_out_valid && pv_out_ready) begin
        for (int j = 0; j < PV_NPE; j++) begin
          int s;
          s = 0;
          for (int i = 0; i < pv_R[cur_pv]; i++) s += pv_I[cur_pv][pv_out_t][i] * pv_W[cur_pv][i][j];
          checks++;
          if ($signed(pv_out_data[j]) != s) begin
            failures++; $display("pavlov layer %0d: got %0d exp %0d", cur_pv, $signed(pv_out_data[j]), s);
          end
        end
        pv_beats++;
      end
      // Jacquard output check
      if (jq_out_valid && jq_out_ready) begin
        int s;
        s = 0;
        for (int p = 0; p < JQ_NPE; p++) s += jq_I[cur_jq][jq_out_t][p] * jq_W[cur_jq][jq_out_f][p];
        checks++;
        if (jq_out_data != s) begin failures++; $display("jacquard: got %0d exp %0d", jq_out_data, s); end
        jq_beats++;
      end
      if (pv_w_valid && pv_w_ready) wrow++;
      if (cmd_valid && cmd_ready) begin
        if (lay_acc[cmd_i] == ACC_PASCAL) cur_pa = lay_idx[cmd_i];
        if (lay_acc[cmd_i] == ACC_JACQUARD) cur_jq = lay_idx[cmd_i];
        if (lay_acc[cmd_i] == ACC_PAVLOV) begin cur_pv = lay_idx[cmd_i]; wrow = 0; end
        cmd_i++;
      end
      @(negedge clk);
      if (layer_done) layers_done++;
    end
    cmd_valid = 0;
    repeat (3) @(negedge clk);

    checks++; if (pa_beats != exp_pa_beats) begin failures++; $display("pascal beats %0d exp %0d", pa_beats, exp_pa_beats); end
    checks++; if (pv_beats != exp_pv_beats) begin failures++; $display("pavlov beats %0d exp %0d", pv_beats, exp_pv_beats); end
    checks++; if (jq_beats != exp_jq_beats) begin failures++; $display("jacquard beats %0d exp %0d", jq_beats, exp_jq_beats); end
    checks++; if (accel_switches != 4) begin failures++; $display("accelerator switches %0d exp 4", accel_switches); end
    checks++; if (prefetch != jq_F[1]) begin failures++; $display("jacquard prefetch %0d of %0d", prefetch, jq_F[1]); end
    checks++; if (holdoff == 0) begin failures++; $display("command hold-off never happened"); end
    checks++; if (pv_wait == 0) begin failures++; $display("pavlov parameter wait never happened"); end
    checks++; if (pa_bp == 0)   begin failures++; $display("pascal backpressure never happened"); end
    checks++; if (pv_bp == 0)   begin failures++; $display("pavlov backpressure never happened"); end
    checks++; if (jq_bp == 0)   begin failures++; $display("jacquard backpressure never happened"); end
    checks++; if (accel_busy != 0 || !cmd_ready) begin failures++; $display("not idle at the end"); end
    $display("prefetched weight vectors %0d", prefetch);
    $display("layers %0d, switches %0d, hold-off %0d, pavlov wait %0d, backpressure pa/pv/jq %0d/%0d/%0d",
             layers_done, accel_switches, holdoff, pv_wait, pa_bp, pv_bp, jq_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
