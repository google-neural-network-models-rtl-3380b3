// jacquard_reduce: the gather network of Jacquard. It adds the N partial
// sums produced by the PEs in one cycle into a single output activation, the
// spatial reduction of the paper's Jacquard dataflow ("each PE computes a
// partial sum, then the on-chip interconnect gathers them").
//
// The paper gives only this function. The structure is this design's own: a
// binary adder tree with a pipeline register after every level, so one
// output leaves per cycle with a latency of log2(N) cycles. A valid bit and a
// TAG_W-bit tag travel alongside the data. en freezes every stage (stall).
// N must be a power of two and at least 2.
module jacquard_reduce
  import mensa_pkg::*;
#(
  parameter int unsigned N     = 256,
  parameter int unsigned TAG_W = 8,
  localparam int unsigned LEVELS = $clog2(N)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  acc_t             in_psum [N],
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output acc_t             out_sum
);

  for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned W = N >> l;
    acc_t             sum [W];
    logic             vld;
    logic [TAG_W-1:0] tag;

    if (l == 1) begin : g_first
      always_ff @(posedge clk) begin
        if (en) begin
          for (int k = 0; k < W; k++) sum[k] <= in_psum[2*k] + in_psum[2*k+1];
          tag <= in_tag;
        end
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)  vld <= 1'b0;
        else if (en) vld <= in_valid;
      end
    end else begin : g_next
      always_ff @(posedge clk) begin
        if (en) begin
          for (int k = 0; k < W; k++) sum[k] <= g_lvl[l-1].sum[2*k] + g_lvl[l-1].sum[2*k+1];
          tag <= g_lvl[l-1].tag;
        end
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)  vld <= 1'b0;
        else if (en) vld <= g_lvl[l-1].vld;
      end
    end
  end

  assign out_valid = g_lvl[LEVELS].vld;
  assign out_tag   = g_lvl[LEVELS].tag;
  assign out_sum   = g_lvl[LEVELS].sum[0];

  initial assert (N >= 2 && (1 << LEVELS) == N) else $fatal(1, "jacquard_reduce: N must be a power of two >= 2");

endmodule
