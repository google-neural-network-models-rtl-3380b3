// pavlov_pe: processing element of the Pavlov LSTM-centric accelerator.
//
// The PE owns one output column j of the weight tile. Its 512 B of private
// registers (the paper's figure; there is no accelerator-level parameter
// buffer) hold the weights W_ij streamed straight from DRAM, one row i per
// entry. In compute, the activation I_ti multicast to all PEs is multiplied
// by the stationary weight W_ij and added to partial sum t, so each weight is
// fetched once per layer and reused for every sample t (temporal reuse),
// while O_tj is reduced over rows i in the PE (temporal reduction).
//
// Design choices: weights and partial sums are separate register files;
// PSUM_DEPTH (samples per pass) is not given by the paper. Weight writes and
// MACs may happen in the same cycle (to different rows), so loading of later
// rows overlaps computation on earlier ones.
// Timing: one MAC per cycle; psum_out reads entry rd_t combinationally.
module pavlov_pe
  import mensa_pkg::*;
#(
  parameter int unsigned WREG_DEPTH = 512,  // 512 B of weight registers
  parameter int unsigned PSUM_DEPTH = 64,
  localparam int unsigned WW        = $clog2(WREG_DEPTH),
  localparam int unsigned TW        = $clog2(PSUM_DEPTH)
) (
  input  logic          clk,
  // weight fill from the DRAM stream
  input  logic          w_we,
  input  logic [WW-1:0] w_waddr,
  input  data_t         w_wdata,
  // compute
  input  logic          mac_en,
  input  logic [WW-1:0] row,      // i: selects the stationary weight
  input  logic [TW-1:0] t_idx,    // t: selects the partial sum
  input  logic          first,    // i == 0: start the sum
  input  data_t         act_in,   // multicast I_ti
  // drain
  input  logic [TW-1:0] rd_t,
  output acc_t          psum_out
);

  data_t wreg [WREG_DEPTH];
  acc_t  psum [PSUM_DEPTH];
  acc_t  prod;

  assign prod = acc_t'(act_in) * acc_t'(wreg[row]);

  always_ff @(posedge clk) begin
    if (w_we) wreg[w_waddr] <= w_wdata;
    if (mac_en) psum[t_idx] <= (first ? '0 : psum[t_idx]) + prod;
  end

  assign psum_out = psum[rd_t];

endmodule
