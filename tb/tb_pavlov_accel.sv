// tb_pavlov_accel: end-to-end test of the Pavlov accelerator with 8 PEs,
// 16-entry weight registers and 8 partial sums per PE. Each layer is one MVM
// O[t] = I[t] x W over random int8 data; W arrives as a row-per-beat stream
// (as from DRAM) while the layer runs. The first layer streams a row every
// cycle and checks the cycle count (n_rows*n_samples MAC cycles); the second
// starves the stream and stalls the output at random, so that both the
// parameter-wait stall and the output backpressure occur.
module tb_pavlov_accel;
  import mensa_pkg::*;
  localparam int NR = 2, NC = 4, NPE = NR * NC, WD = 16, PD = 8, AB = 1024;
  localparam int AAW = $clog2(AB);

  logic clk = 0, rst_n, start, busy, done;
  pavlov_cfg_t cfg;
  logic abuf_we;
  logic [AAW-1:0] abuf_addr;
  data_t abuf_wdata;
  logic w_valid, w_ready;
  logic [NPE-1:0][DATA_W-1:0] w_data;
  logic out_valid, out_ready, w_stall;
  logic [NPE-1:0][ACC_W-1:0] out_data;
  logic [CNT_W-1:0] out_t;

  pavlov_accel #(.ROWS(NR), .COLS(NC), .WREG_DEPTH(WD), .PSUM_DEPTH(PD), .ABUF_BYTES(AB)) dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  int checks = 0, failures = 0, out_stalls = 0, w_stalls = 0;
  int I [PD][WD];
  int W [WD][NPE];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_layer(int R, int T, int abase, bit random_flow);
    int beats, t_start, t_first, t_done, wrow;
    for (int i = 0; i < R; i++)
      for (int t = 0; t < T; t++) begin
        I[t][i] = int'($signed(8'($urandom)));
        abuf_we = 1; abuf_addr = AAW'(abase + i*T + t); abuf_wdata = data_t'(I[t][i]);
        @(negedge clk);
      end
    abuf_we = 0;
    for (int i = 0; i < R; i++) for (int j = 0; j < NPE; j++) W[i][j] = int'($signed(8'($urandom)));
    cfg.n_rows = CNT_W'(R); cfg.n_samples = CNT_W'(T); cfg.act_base = ADDR_W'(abase);
    start = 1; t_start = cyc;
    @(negedge clk);
    start = 0;
    beats = 0; t_first = -1; t_done = -1; wrow = 0;
    while (t_done < 0) begin
      // parameter stream
      w_valid = (wrow < R) && (random_flow ? ($urandom_range(7) == 0) : 1'b1);
      for (int j = 0; j < NPE; j++) w_data[j] = (wrow < R) ? 8'(W[wrow][j]) : 8'($urandom);
      out_ready = random_flow ? 1'($urandom_range(1)) : 1'b1;
      #1;
      if (w_stall) w_stalls++;
      if (out_valid && !out_ready) out_stalls++;
      if (out_valid && t_first < 0) t_first = cyc;
      if (out_valid && out_ready) begin
        int t;
        t = int'(out_t);
        for (int j = 0; j < NPE; j++) begin
          int s;
          s = 0;
          for (int i = 0; i < R; i++) s += I[t][i] * W[i][j];
          checks++;
          if ($signed(out_data[j]) != s) begin
            failures++; $display("t %0d col %0d: got %0d exp %0d", t, j, $signed(out_data[j]), s);
          end
        end
        beats++;
      end
      if (w_valid && w_ready) wrow++;
      @(negedge clk);
      if (done) t_done = cyc;
    end
    w_valid = 0;
    checks++;
    if (beats != T) begin failures++; $display("beats %0d exp %0d", beats, T); end
    checks++;
    if (wrow != R) begin failures++; $display("weight rows taken %0d exp %0d", wrow, R); end
    if (!random_flow) begin
      checks++;
      if (t_first - t_start != R*T + 3) begin
        failures++; $display("first output after %0d cycles, exp %0d", t_first - t_start, R*T + 3);
      end
      checks++;
      if (t_done - t_start != R*T + T + 3) begin
        failures++; $display("layer took %0d cycles, exp %0d", t_done - t_start, R*T + T + 3);
      end
    end
  endtask

  initial begin
    rst_n = 0; start = 0; cfg = '0; abuf_we = 0; abuf_addr = 0; abuf_wdata = 0;
    w_valid = 0; w_data = '0; out_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_layer(10, 5, 0, 1'b0);
    run_layer(16, 8, 200, 1'b1);
    run_layer(1, 1, 1023, 1'b0);
    run_layer(7, 3, 17, 1'b1);
    checks++;
    if (w_stalls == 0) begin failures++; $display("parameter stall never happened"); end
    checks++;
    if (out_stalls == 0) begin failures++; $display("output backpressure never happened"); end
    $display("parameter-wait cycles %0d, output stall cycles %0d", w_stalls, out_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
