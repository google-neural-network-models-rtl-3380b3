// tb_jacquard_reduce: self-checking test of jacquard_reduce. Pushes random
// partial-sum vectors with tags through a 16-input tree under random stalls,
// checks each output sum and tag in order, and checks the log2(N)-cycle
// latency when nothing stalls.
module tb_jacquard_reduce;
  import mensa_pkg::*;
  localparam int N = 16, TW = 8, LV = 4;
  logic clk = 0, rst_n, en, in_valid, out_valid;
  logic [TW-1:0] in_tag, out_tag;
  acc_t in_psum [N];
  acc_t out_sum;
  int checks = 0, failures = 0;
  int exp_sum [$];
  int exp_tag [$];
  int cyc = 0, t_in0 = -1, t_out0 = -1;

  jacquard_reduce #(.N(N), .TAG_W(TW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) begin
    if (rst_n && en && out_valid) begin
      checks++;
      if (t_out0 < 0) t_out0 = cyc;
      if (exp_sum.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        int s, tg;
        s = exp_sum.pop_front(); tg = exp_tag.pop_front();
        if (out_sum !== s || out_tag !== TW'(tg)) begin
          failures++; $display("got %0d/%0d exp %0d/%0d", out_sum, out_tag, s, tg);
        end
      end
    end
    cyc++;
  end

  initial begin
    rst_n = 0; en = 0; in_valid = 0; in_tag = 0;
    for (int k = 0; k < N; k++) in_psum[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int s;
      en = (n < 20) ? 1'b1 : ($urandom_range(3) != 0);
      in_valid = (n < 20) ? 1'b1 : $urandom_range(1);
      in_tag = TW'(n);
      s = 0;
      for (int k = 0; k < N; k++) begin
        in_psum[k] = acc_t'($urandom_range(0, 200000)) - 100000;
        s += int'(in_psum[k]);
      end
      if (en && in_valid) begin
        exp_sum.push_back(s); exp_tag.push_back(n);
        if (t_in0 < 0) t_in0 = cyc;
      end
      @(negedge clk);
    end
    en = 1; in_valid = 0;
    repeat (LV + 2) @(negedge clk);
    checks++;
    if (exp_sum.size() != 0) begin failures++; $display("%0d outputs missing", exp_sum.size()); end
    checks++;
    if (t_out0 - t_in0 != LV) begin failures++; $display("latency %0d exp %0d", t_out0 - t_in0, LV); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
