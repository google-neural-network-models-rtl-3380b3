// pascal_pe: processing element of the Pascal compute-centric accelerator.
//
// Each cycle with mac_en set the PE multiplies its own input activation by the
// weight that the controller broadcasts to every PE of the array (spatial
// multicast of W_k) and adds the product into one entry of its private
// register file (temporal reduction: one PE builds a whole output element
// O_ij over K cycles, no partial sums leave the PE). This follows the
// paper's Pascal dataflow.
//
// Design choices not fixed by the paper: the register file holds RF_DEPTH
// accumulators, one per filter, so that a latched input activation (act_load
// captures act_in) can be reused for several filters on consecutive cycles;
// clear restarts an accumulator with the current product; acc_out reads the
// entry rd_idx combinationally for draining.
// Timing: one MAC per cycle, result visible on acc_out the next cycle.
module pascal_pe
  import mensa_pkg::*;
#(
  parameter int unsigned RF_DEPTH = 8,
  localparam int unsigned RW      = (RF_DEPTH > 1) ? $clog2(RF_DEPTH) : 1
) (
  input  logic          clk,
  input  logic          mac_en,    // perform one MAC this cycle
  input  logic          act_load,  // use act_in and latch it for later cycles
  input  data_t         act_in,    // this PE's input activation I_ijk
  input  data_t         w_in,      // broadcast weight W_k
  input  logic [RW-1:0] rf_idx,    // accumulator (filter) updated this cycle
  input  logic          clear,     // first term of the sum: overwrite instead of add
  input  logic [RW-1:0] rd_idx,    // accumulator read on acc_out
  output acc_t          acc_out
);

  data_t act_q;
  acc_t  rf [RF_DEPTH];
  data_t a;
  acc_t  prod;

  assign a    = act_load ? act_in : act_q;
  assign prod = acc_t'(a) * acc_t'(w_in);

  always_ff @(posedge clk) begin
    if (mac_en) begin
      if (act_load) act_q <= act_in;
      rf[rf_idx] <= (clear ? '0 : rf[rf_idx]) + prod;
    end
  end

  assign acc_out = rf[rd_idx];

endmodule
