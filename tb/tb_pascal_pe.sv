// tb_pascal_pe: self-checking test of pascal_pe. Runs random sequences of
// broadcast weights and activations, with activation reuse over several
// filters and accumulator clears, against a reference model of the register
// file, and checks every accumulator through acc_out.
module tb_pascal_pe;
  import mensa_pkg::*;
  localparam int RF = 4;
  logic clk = 0, mac_en, act_load, clear;
  data_t act_in, w_in;
  logic [1:0] rf_idx, rd_idx;
  acc_t acc_out;
  int ref_rf [RF];
  int checks = 0, failures = 0;

  pascal_pe #(.RF_DEPTH(RF)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a_cur;
    mac_en = 0; act_load = 0; clear = 0; act_in = 0; w_in = 0; rf_idx = 0; rd_idx = 0;
    a_cur = 0;
    @(negedge clk);
    for (int layer = 0; layer < 20; layer++) begin
      int K, F;
      K = $urandom_range(1, 12); F = $urandom_range(1, RF);
      for (int k = 0; k < K; k++) begin
        for (int f = 0; f < F; f++) begin
          mac_en = 1;
          act_load = (f == 0);
          if (f == 0) begin act_in = data_t'($urandom); a_cur = int'(act_in); end
          else act_in = data_t'($urandom);   // must be ignored when not loading
          w_in = data_t'($urandom);
          rf_idx = f[1:0];
          clear = (k == 0);
          ref_rf[f] = (k == 0 ? 0 : ref_rf[f]) + a_cur * int'(w_in);
          @(negedge clk);
        end
      end
      mac_en = 0;
      // idle cycles with garbage inputs must not change anything
      act_in = data_t'($urandom); w_in = data_t'($urandom); act_load = 1; clear = 1;
      @(negedge clk);
      for (int f = 0; f < F; f++) begin
        rd_idx = f[1:0];
        #1;
        checks++;
        if (acc_out !== ref_rf[f]) begin
          failures++; $display("layer %0d f %0d: got %0d exp %0d", layer, f, acc_out, ref_rf[f]);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
