// tb_jacquard_pe: self-checking test of jacquard_pe. Loads the stationary
// weight registers, then presents input elements (latched and reused over
// several weight vectors) with random stall cycles, and checks that each
// registered partial sum is the product of the right element and weight and
// that it holds while the PE is stalled.
module tb_jacquard_pe;
  import mensa_pkg::*;
  localparam int JD = 4;
  logic clk = 0, w_we, en, act_load;
  logic [1:0] w_idx, f_idx;
  data_t w_data, act_in;
  acc_t psum;
  int checks = 0, failures = 0;
  int W [JD];

  jacquard_pe #(.JW_DEPTH(JD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a_cur, expv;
    w_we = 0; en = 0; act_load = 0; w_idx = 0; f_idx = 0; w_data = 0; act_in = 0;
    a_cur = 0; expv = 0;
    @(negedge clk);
    for (int rep = 0; rep < 8; rep++) begin
      for (int f = 0; f < JD; f++) begin
        w_we = 1; w_idx = f[1:0]; W[f] = int'($signed(8'($urandom))); w_data = data_t'(W[f]);
        @(negedge clk);
      end
      w_we = 0;
      for (int t = 0; t < 20; t++) begin
        for (int f = 0; f < JD; f++) begin
          // random stall before this operation
          while ($urandom_range(3) == 0) begin
            en = 0; act_load = 1; act_in = data_t'($urandom); f_idx = 2'($urandom);
            @(negedge clk);
            checks++;
            if (psum !== expv) begin failures++; $display("psum changed during stall"); end
          end
          en = 1; act_load = (f == 0); f_idx = f[1:0];
          act_in = data_t'($urandom);
          if (f == 0) a_cur = int'(act_in);
          expv = a_cur * W[f];
          @(negedge clk);
          checks++;
          if (psum !== expv) begin failures++; $display("rep %0d t %0d f %0d: got %0d exp %0d", rep, t, f, psum, expv); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
