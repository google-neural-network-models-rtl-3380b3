// tb_layer_families: runs one representative layer of each layer family on
// the full-size Mensa-G (mensa_top at its defaults) and checks both the
// results, against a direct reference computation, and the cycle counts.
//   family 1/2 on Pascal:   3x3 convolution, 3 input channels, 34x34 input,
//                           8 filters, lowered with im2col (K = 27)
//   family 3 on Pavlov:     LSTM input MVM, 16 cells x 4 gates = 64 columns,
//                           128 inputs, 16 time steps, weights streamed
//   family 4 on Jacquard:   768-long dot products (3 passes of 256), 16 filters,
//                           8 output positions; passes summed by the testbench
//   family 5 on Jacquard:   3x3 depthwise convolution of 16 channels packed in
//                           one input vector, one weight vector per channel
// Layer sizes are illustrative (the evaluated models' sizes are not public).
module tb_layer_families;
  import mensa_pkg::*;
  localparam int PA_NPE = 1024, PV_NPE = 64, JQ_NPE = 256, LV = 8;
  localparam int PA_PAW = 17, PA_AAW = 8, PV_AAW = 17, JQ_PAW = 9, JQ_AAW = 9;

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
  logic [31:0][ACC_W-1:0] pa_out_data;
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
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int s8();
    return int'($signed(8'($urandom)));
  endfunction

  task automatic check_eq(string what, int got, int expv);
    checks++;
    if (got != expv) begin failures++; $display("%s: got %0d exp %0d", what, got, expv); end
  endtask

  // ---------------- family 1/2: Pascal 3x3 convolution via im2col ----------------
  int img [3][34][34];
  int cw [8][3][3][3];
  int pa_res [8][32][32];
  task automatic family12();
    int K = 27, F = 8, busy;
    for (int c = 0; c < 3; c++) for (int y = 0; y < 34; y++) for (int x = 0; x < 34; x++) img[c][y][x] = s8();
    for (int f = 0; f < F; f++) for (int c = 0; c < 3; c++) for (int dy = 0; dy < 3; dy++) for (int dx = 0; dx < 3; dx++)
      cw[f][c][dy][dx] = s8();
    // im2col: channel k = c*9 + dy*3 + dx, PE p = i*32 + j holds img[c][i+dy][j+dx]
    for (int k = 0; k < K; k++) begin
      int c, dy, dx;
      c = k / 9; dy = (k % 9) / 3; dx = k % 3;
      for (int i = 0; i < 32; i++) for (int j = 0; j < 32; j++) pa_abuf_wdata[i*32 + j] = 8'(img[c][i+dy][j+dx]);
      pa_abuf_we = 1; pa_abuf_addr = PA_AAW'(k);
      @(negedge clk);
      for (int f = 0; f < F; f++) begin
        pa_abuf_we = 0;
        pa_pbuf_we = 1; pa_pbuf_addr = PA_PAW'(f*K + k); pa_pbuf_wdata = data_t'(cw[f][c][dy][dx]);
        @(negedge clk);
      end
      pa_pbuf_we = 0;
    end
    cmd_pascal = '{k_len: 16'(K), n_filt: 16'(F), n_tiles: 16'd1, act_base: '0, par_base: '0};
    cmd_valid = 1; cmd_accel = ACC_PASCAL;
    @(negedge clk);
    cmd_valid = 0;
    busy = 0;
    while (!layer_done) begin
      if (accel_busy[0]) busy++;
      if (pa_out_valid) for (int j = 0; j < 32; j++) pa_res[pa_out_filt][pa_out_row][j] = int'($signed(pa_out_data[j]));
      @(negedge clk);
    end
    for (int f = 0; f < F; f++) for (int i = 0; i < 32; i++) for (int j = 0; j < 32; j++) begin
      int s;
      s = 0;
      for (int c = 0; c < 3; c++) for (int dy = 0; dy < 3; dy++) for (int dx = 0; dx < 3; dx++)
        s += img[c][i+dy][j+dx] * cw[f][c][dy][dx];
      check_eq("conv3x3", pa_res[f][i][j], s);
    end
    check_eq("pascal busy cycles", busy, K*F + 1 + 32*F);
    $display("family 1/2: %0d MACs in %0d busy cycles (%0d MAC cycles)", K*F*PA_NPE, busy, K*F);
  endtask

  // ---------------- family 3: Pavlov LSTM input MVM ----------------
  int x [16][128];
  int wx [128][64];
  int pv_res [16][64];
  task automatic family3();
    int R = 128, T = 16, busy, wrow;
    for (int t = 0; t < T; t++) for (int i = 0; i < R; i++) x[t][i] = s8();
    for (int i = 0; i < R; i++) for (int j = 0; j < 64; j++) wx[i][j] = s8();
    for (int i = 0; i < R; i++) for (int t = 0; t < T; t++) begin
      pv_abuf_we = 1; pv_abuf_addr = PV_AAW'(i*T + t); pv_abuf_wdata = data_t'(x[t][i]);
      @(negedge clk);
    end
    pv_abuf_we = 0;
    cmd_pavlov = '{n_rows: 16'(R), n_samples: 16'(T), act_base: '0};
    cmd_valid = 1; cmd_accel = ACC_PAVLOV;
    @(negedge clk);
    cmd_valid = 0;
    busy = 0; wrow = 0;
    while (!layer_done) begin
      pv_w_valid = (wrow < R);
      for (int j = 0; j < 64; j++) pv_w_data[j] = (wrow < R) ? 8'(wx[wrow][j]) : 8'h00;
      #1;
      if (accel_busy[1]) busy++;
      if (pv_w_valid && pv_w_ready) wrow++;
      if (pv_out_valid) for (int j = 0; j < 64; j++) pv_res[pv_out_t][j] = int'($signed(pv_out_data[j]));
      @(negedge clk);
    end
    pv_w_valid = 0;
    for (int t = 0; t < T; t++) for (int j = 0; j < 64; j++) begin
      int s;
      s = 0;
      for (int i = 0; i < R; i++) s += x[t][i] * wx[i][j];
      check_eq("lstm gate", pv_res[t][j], s);
    end
    check_eq("pavlov busy cycles", busy, R*T + T + 2);
    $display("family 3: %0d MACs in %0d busy cycles (%0d MAC cycles)", R*T*64, busy, R*T);
  endtask

  // ---------------- Jacquard: one pass (n_filt weight vectors, n_vec inputs) ----------------
  int jq_res [16][16];
  task automatic jq_pass(int F, int T, int abase, int pbase, output int busy);
    cmd_jacquard = '{n_filt: 16'(F), n_vec: 16'(T), act_base: 20'(abase), par_base: 20'(pbase)};
    cmd_valid = 1; cmd_accel = ACC_JACQUARD;
    @(negedge clk);
    cmd_valid = 0;
    busy = 0;
    while (!layer_done) begin
      if (accel_busy[2]) busy++;
      if (jq_out_valid) jq_res[jq_out_t][jq_out_f] = int'(jq_out_data);
      @(negedge clk);
    end
  endtask

  // ---------------- family 4: long dot products in passes ----------------
  int a4 [8][768];
  int w4 [16][768];
  task automatic family4();
    int F = 16, T = 8, busy, tot;
    int acc [8][16];
    for (int t = 0; t < T; t++) for (int e = 0; e < 768; e++) a4[t][e] = s8();
    for (int f = 0; f < F; f++) for (int e = 0; e < 768; e++) w4[f][e] = s8();
    for (int t = 0; t < T; t++) for (int f = 0; f < F; f++) acc[t][f] = 0;
    tot = 0;
    for (int ps = 0; ps < 3; ps++) begin
      for (int t = 0; t < T; t++) begin
        for (int p = 0; p < 256; p++) jq_abuf_wdata[p] = 8'(a4[t][ps*256 + p]);
        jq_abuf_we = 1; jq_abuf_addr = JQ_AAW'(ps*T + t);
        @(negedge clk);
      end
      jq_abuf_we = 0;
      for (int f = 0; f < F; f++) begin
        for (int p = 0; p < 256; p++) jq_pbuf_wdata[p] = 8'(w4[f][ps*256 + p]);
        jq_pbuf_we = 1; jq_pbuf_addr = JQ_PAW'(ps*F + f);
        @(negedge clk);
      end
      jq_pbuf_we = 0;
    end
    for (int ps = 0; ps < 3; ps++) begin
      jq_pass(F, T, ps*T, ps*F, busy);
      tot += busy;
      check_eq("jacquard pass busy cycles", busy, F + LV + 2 + T*F);
      for (int t = 0; t < T; t++) for (int f = 0; f < F; f++) acc[t][f] += jq_res[t][f];
    end
    for (int t = 0; t < T; t++) for (int f = 0; f < F; f++) begin
      int s;
      s = 0;
      for (int e = 0; e < 768; e++) s += a4[t][e] * w4[f][e];
      check_eq("dot768", acc[t][f], s);
    end
    $display("family 4: %0d MACs in %0d busy cycles", 768*F*T, tot);
  endtask

  // ---------------- family 5: depthwise 3x3, 16 channels per vector ----------------
  int a5 [16][10][10];
  int w5 [16][9];
  task automatic family5();
    int busy;
    for (int c = 0; c < 16; c++) for (int y = 0; y < 10; y++) for (int xx = 0; xx < 10; xx++) a5[c][y][xx] = s8();
    for (int c = 0; c < 16; c++) for (int k = 0; k < 9; k++) w5[c][k] = s8();
    // input vector t = output pixel (ty, tx) of an 4x4 patch; element c*9+k = a5[c][ty+k/3][tx+k%3]
    for (int t = 0; t < 16; t++) begin
      jq_abuf_wdata = '0;
      for (int c = 0; c < 16; c++) for (int k = 0; k < 9; k++)
        jq_abuf_wdata[c*9 + k] = 8'(a5[c][t/4 + k/3][t%4 + k%3]);
      jq_abuf_we = 1; jq_abuf_addr = JQ_AAW'(100 + t);
      @(negedge clk);
    end
    jq_abuf_we = 0;
    for (int c = 0; c < 16; c++) begin
      jq_pbuf_wdata = '0;
      for (int k = 0; k < 9; k++) jq_pbuf_wdata[c*9 + k] = 8'(w5[c][k]);
      jq_pbuf_we = 1; jq_pbuf_addr = JQ_PAW'(200 + c);
      @(negedge clk);
    end
    jq_pbuf_we = 0;
    jq_pass(16, 16, 100, 200, busy);
    for (int t = 0; t < 16; t++) for (int c = 0; c < 16; c++) begin
      int s;
      s = 0;
      for (int k = 0; k < 9; k++) s += a5[c][t/4 + k/3][t%4 + k%3] * w5[c][k];
      check_eq("depthwise", jq_res[t][c], s);
    end
    check_eq("jacquard depthwise busy cycles", busy, 16 + LV + 2 + 16*16);
    $display("family 5: %0d useful MACs in %0d busy cycles", 16*16*9, busy);
  endtask

  initial begin
    rst_n = 0; cmd_valid = 0; cmd_accel = ACC_PASCAL;
    cmd_pascal = '0; cmd_pavlov = '0; cmd_jacquard = '0;
    pa_pbuf_we = 0; pa_abuf_we = 0; pa_pbuf_addr = 0; pa_abuf_addr = 0; pa_pbuf_wdata = 0; pa_abuf_wdata = '0;
    pv_abuf_we = 0; pv_abuf_addr = 0; pv_abuf_wdata = 0; pv_w_valid = 0; pv_w_data = '0;
    jq_pbuf_we = 0; jq_abuf_we = 0; jq_pbuf_addr = 0; jq_abuf_addr = 0; jq_pbuf_wdata = '0; jq_abuf_wdata = '0;
    pa_out_ready = 1; pv_out_ready = 1; jq_out_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    family12();
    family3();
    family4();
    family5();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
