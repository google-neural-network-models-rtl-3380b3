// tb_pascal_accel: end-to-end test of the Pascal accelerator on a reduced
// 4x4 PE array. Fills both buffers with random int8 data, runs pointwise
// layers with several filters and spatial tiles, and compares every drained
// output row with sums computed in the testbench. The first layer runs
// without backpressure and checks the timing (K*F cycles of MACs per tile,
// i.e. one MAC per PE per cycle); the second stalls the output at random.
module tb_pascal_accel;
  import mensa_pkg::*;
  localparam int R = 4, C = 4, RF = 4, NPE = R * C;
  localparam int PB = 1024, AB = 1024, AD = AB / NPE;
  localparam int PAW = $clog2(PB), AAW = $clog2(AD);

  logic clk = 0, rst_n, start, busy, done;
  pascal_cfg_t cfg;
  logic pbuf_we, abuf_we;
  logic [PAW-1:0] pbuf_addr;
  logic [AAW-1:0] abuf_addr;
  data_t pbuf_wdata;
  logic [NPE-1:0][DATA_W-1:0] abuf_wdata;
  logic out_valid, out_ready;
  logic [C-1:0][ACC_W-1:0] out_data;
  logic [CNT_W-1:0] out_tile, out_filt, out_row;

  pascal_accel #(.ROWS(R), .COLS(C), .RF_DEPTH(RF), .PBUF_BYTES(PB), .ABUF_BYTES(AB)) dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  int checks = 0, failures = 0, stalls = 0;
  int act [8][16][NPE];    // [tile][k][pe]
  int wt  [RF][16];        // [filter][k]

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_layer(int K, int F, int T, int abase, int pbase, bit backpressure);
    int beats, t_start, t_first, t_done, exp_beats;
    // fill buffers
    for (int tl = 0; tl < T; tl++)
      for (int k = 0; k < K; k++) begin
        for (int p = 0; p < NPE; p++) begin
          act[tl][k][p] = int'($signed(8'($urandom)));
          abuf_wdata[p] = 8'(act[tl][k][p]);
        end
        abuf_we = 1; abuf_addr = AAW'(abase + tl*K + k);
        @(negedge clk);
      end
    abuf_we = 0;
    for (int f = 0; f < F; f++)
      for (int k = 0; k < K; k++) begin
        wt[f][k] = int'($signed(8'($urandom)));
        pbuf_we = 1; pbuf_addr = PAW'(pbase + f*K + k); pbuf_wdata = data_t'(wt[f][k]);
        @(negedge clk);
      end
    pbuf_we = 0;
    // start
    cfg.k_len = CNT_W'(K); cfg.n_filt = CNT_W'(F); cfg.n_tiles = CNT_W'(T);
    cfg.act_base = ADDR_W'(abase); cfg.par_base = ADDR_W'(pbase);
    start = 1; t_start = cyc;
    @(negedge clk);
    start = 0;
    beats = 0; t_first = -1; t_done = -1;
    exp_beats = T * F * R;
    while (t_done < 0) begin
      out_ready = backpressure ? 1'($urandom_range(1)) : 1'b1;
      #1;
      if (out_valid && !out_ready) stalls++;
      if (out_valid && t_first < 0) t_first = cyc;
      if (out_valid && out_ready) begin
        int tl, f, r;
        tl = int'(out_tile); f = int'(out_filt); r = int'(out_row);
        for (int j = 0; j < C; j++) begin
          int s;
          s = 0;
          for (int k = 0; k < K; k++) s += act[tl][k][r*C + j] * wt[f][k];
          checks++;
          if ($signed(out_data[j]) != s) begin
            failures++;
            $display("tile %0d filt %0d row %0d col %0d: got %0d exp %0d", tl, f, r, j, $signed(out_data[j]), s);
          end
        end
        beats++;
      end
      @(negedge clk);
      if (done) t_done = cyc;
    end
    checks++;
    if (beats != exp_beats) begin failures++; $display("beats %0d exp %0d", beats, exp_beats); end
    if (!backpressure) begin
      checks++;
      if (t_first - t_start != K*F + 2) begin
        failures++; $display("first output after %0d cycles, exp %0d", t_first - t_start, K*F + 2);
      end
      checks++;
      if (t_done - t_start != T*(K*F + 1 + R*F) + 1) begin
        failures++; $display("layer took %0d cycles, exp %0d", t_done - t_start, T*(K*F + 1 + R*F) + 1);
      end
    end
    checks++;
    if (busy) begin failures++; $display("still busy after done"); end
  endtask

  initial begin
    rst_n = 0; start = 0; cfg = '0; pbuf_we = 0; abuf_we = 0; pbuf_addr = 0; abuf_addr = 0;
    pbuf_wdata = 0; abuf_wdata = '0; out_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_layer(5, 3, 2, 0, 0, 1'b0);
    run_layer(7, 4, 3, 10, 100, 1'b1);
    run_layer(1, 1, 1, 63, 1023, 1'b0);
    checks++;
    if (stalls == 0) begin failures++; $display("output backpressure never happened"); end
    $display("stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
