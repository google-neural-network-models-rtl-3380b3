// tb_jacquard_accel: end-to-end test of the Jacquard accelerator on a reduced
// 2x4 PE array with 4 weight registers per PE. Loads random weight vectors
// and input vectors into the buffers, runs layers and checks every output
// activation O[t][f] = sum_p I[t][p] * W[f][p] against the testbench's own
// sum. The first layer checks the timing (one output, i.e. one MAC per PE,
// per cycle after the weight load and the log2(NPE)-deep gather); the second
// stalls the output at random. While some layers run, the next layer's
// weights are written into the parameter buffer (prefetch behind computation)
// and the next layer then starts without a fill phase.
module tb_jacquard_accel;
  import mensa_pkg::*;
  localparam int NR = 2, NC = 4, NPE = NR * NC, JD = 4, PB = 256, AB = 512;
  localparam int PAW = $clog2(PB / NPE), AAW = $clog2(AB / NPE), LV = $clog2(NPE);

  logic clk = 0, rst_n, start, busy, done, pbuf_free;
  jacquard_cfg_t cfg;
  logic pbuf_we, abuf_we;
  logic [PAW-1:0] pbuf_addr;
  logic [AAW-1:0] abuf_addr;
  logic [NPE-1:0][DATA_W-1:0] pbuf_wdata, abuf_wdata;
  logic out_valid, out_ready;
  acc_t out_data;
  logic [CNT_W-1:0] out_t, out_f;

  jacquard_accel #(.ROWS(NR), .COLS(NC), .JW_DEPTH(JD), .PBUF_BYTES(PB), .ABUF_BYTES(AB)) dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  int checks = 0, failures = 0, stalls = 0, prefetched = 0;
  int Wn [JD][NPE];
  int I [64][NPE];
  int W [JD][NPE];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_layer(int F, int T, int abase, int pbase, bit backpressure,
                           bit preloaded = 0, int nF = 0, int npb = 0);
    int beats, t_start, t_first, t_done, exp_t, exp_f, pf;
    for (int t = 0; t < T; t++) begin
      for (int p = 0; p < NPE; p++) begin
        I[t][p] = int'($signed(8'($urandom)));
        abuf_wdata[p] = 8'(I[t][p]);
      end
      abuf_we = 1; abuf_addr = AAW'(abase + t);
      @(negedge clk);
    end
    abuf_we = 0;
    if (!preloaded) for (int f = 0; f < F; f++) begin
      for (int p = 0; p < NPE; p++) begin
        W[f][p] = int'($signed(8'($urandom)));
        pbuf_wdata[p] = 8'(W[f][p]);
      end
      pbuf_we = 1; pbuf_addr = PAW'(pbase + f);
      @(negedge clk);
    end
    for (int f = 0; f < nF; f++) for (int p = 0; p < NPE; p++) Wn[f][p] = int'($signed(8'($urandom)));
    pf = 0;
    pbuf_we = 0;
    cfg.n_filt = CNT_W'(F); cfg.n_vec = CNT_W'(T);
    cfg.act_base = ADDR_W'(abase); cfg.par_base = ADDR_W'(pbase);
    start = 1; t_start = cyc;
    @(negedge clk);
    start = 0;
    beats = 0; t_first = -1; t_done = -1; exp_t = 0; exp_f = 0;
    while (t_done < 0) begin
      out_ready = backpressure ? 1'($urandom_range(1)) : 1'b1;
      // prefetch the next layer's weights while this one runs
      pbuf_we = 0;
      if (busy && pf < nF && pbuf_free && $urandom_range(1)) begin
        for (int p = 0; p < NPE; p++) pbuf_wdata[p] = 8'(Wn[pf][p]);
        pbuf_we = 1; pbuf_addr = PAW'(npb + pf);
        pf++; prefetched++;
      end
      #1;
      if (out_valid && !out_ready) stalls++;
      if (out_valid && t_first < 0) t_first = cyc;
      if (out_valid && out_ready) begin
        int s;
        s = 0;
        for (int p = 0; p < NPE; p++) s += I[exp_t][p] * W[exp_f][p];
        checks++;
        if (int'(out_t) != exp_t || int'(out_f) != exp_f || out_data != s) begin
          failures++;
          $display("output %0d: got t%0d f%0d %0d, exp t%0d f%0d %0d", beats, out_t, out_f, out_data, exp_t, exp_f, s);
        end
        beats++;
        if (exp_f == F - 1) begin exp_f = 0; exp_t++; end else exp_f++;
      end
      @(negedge clk);
      if (done) t_done = cyc;
    end
    pbuf_we = 0;
    checks++;
    if (pf != nF) begin failures++; $display("prefetched %0d of %0d weight vectors", pf, nF); end
    for (int f = 0; f < nF; f++) W[f] = Wn[f];
    checks++;
    if (beats != T*F) begin failures++; $display("outputs %0d exp %0d", beats, T*F); end
    if (!backpressure) begin
      checks++;
      if (t_first - t_start != F + LV + 3) begin
        failures++; $display("first output after %0d cycles, exp %0d", t_first - t_start, F + LV + 3);
      end
      checks++;
      if (t_done - t_start != F + LV + 3 + T*F) begin
        failures++; $display("layer took %0d cycles, exp %0d", t_done - t_start, F + LV + 3 + T*F);
      end
    end
    checks++;
    if (busy || out_valid) begin failures++; $display("not idle after done"); end
  endtask

  initial begin
    rst_n = 0; start = 0; cfg = '0; pbuf_we = 0; abuf_we = 0; pbuf_addr = 0; abuf_addr = 0;
    pbuf_wdata = '0; abuf_wdata = '0; out_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_layer(3, 10, 0, 0, 1'b0);
    run_layer(4, 20, 30, 10, 1'b1, 1'b0, 2, 20);
    run_layer(2, 7, 5, 20, 1'b1, 1'b1, 1, 31);
    run_layer(1, 1, 63, 31, 1'b0, 1'b1);
    run_layer(3, 9, 40, 0, 1'b1, 1'b0, 3, 3);
    run_layer(3, 4, 50, 3, 1'b0, 1'b1);
    checks++;
    if (stalls == 0) begin failures++; $display("output backpressure never happened"); end
    checks++;
    if (prefetched == 0) begin failures++; $display("parameter prefetch never happened"); end
    $display("stall cycles: %0d, weight vectors prefetched: %0d", stalls, prefetched);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
