// tb_pavlov_pe: self-checking test of pavlov_pe. Fills the weight registers,
// runs the row-outer / sample-inner MVM loop of the Pavlov dataflow while the
// next weight rows are still being written, and checks every partial sum
// against a reference computed in the testbench.
module tb_pavlov_pe;
  import mensa_pkg::*;
  localparam int WD = 16, PD = 8;
  logic clk = 0, w_we, mac_en, first;
  logic [3:0] w_waddr, row;
  logic [2:0] t_idx, rd_t;
  data_t w_wdata, act_in;
  acc_t psum_out;
  int checks = 0, failures = 0;
  int W [WD];
  int I [PD][WD];
  int O [PD];

  pavlov_pe #(.WREG_DEPTH(WD), .PSUM_DEPTH(PD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_we = 0; mac_en = 0; first = 0; w_waddr = 0; row = 0; t_idx = 0; rd_t = 0;
    w_wdata = 0; act_in = 0;
    @(negedge clk);
    for (int rep = 0; rep < 10; rep++) begin
      int R, T, wl;
      R = $urandom_range(1, WD); T = $urandom_range(1, PD);
      for (int i = 0; i < WD; i++) W[i] = int'($signed(8'($urandom)));
      for (int t = 0; t < T; t++) for (int i = 0; i < R; i++) I[t][i] = int'($signed(8'($urandom)));
      for (int t = 0; t < T; t++) begin
        O[t] = 0;
        for (int i = 0; i < R; i++) O[t] += I[t][i] * W[i];
      end
      // row 0 first, then later rows are written while earlier rows compute
      w_we = 1; w_waddr = 0; w_wdata = data_t'(W[0]); mac_en = 0;
      @(negedge clk);
      wl = 1;
      for (int i = 0; i < R; i++) begin
        for (int t = 0; t < T; t++) begin
          if (wl < R) begin w_we = 1; w_waddr = wl[3:0]; w_wdata = data_t'(W[wl]); wl++; end
          else w_we = 0;
          mac_en = 1; row = i[3:0]; t_idx = t[2:0]; first = (i == 0); act_in = data_t'(I[t][i]);
          @(negedge clk);
        end
      end
      mac_en = 0; w_we = 0;
      while (wl < R) begin w_we = 1; w_waddr = wl[3:0]; wl++; @(negedge clk); end
      w_we = 0;
      @(negedge clk);
      for (int t = 0; t < T; t++) begin
        rd_t = t[2:0];
        #1;
        checks++;
        if (psum_out !== O[t]) begin failures++; $display("rep %0d t %0d: got %0d exp %0d", rep, t, psum_out, O[t]); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
