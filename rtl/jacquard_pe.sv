// jacquard_pe: processing element of the Jacquard data-centric accelerator.
//
// The PE keeps JW_DEPTH parameters in private registers (loaded once from
// the parameter buffer and then reused over many input vectors: temporal
// reuse of W, as in the paper). Each enabled cycle it multiplies its element
// of the current input activation vector by the selected stationary weight
// and registers the product as its partial sum; the partial sums of all PEs
// are gathered by jacquard_reduce into one output activation.
//
// Design choices: JW_DEPTH is not given by the paper; act_load latches the
// input element so that it is reused across the weight vectors f; the whole
// PE stalls when en is low (backpressure from the output).
// Timing: psum is valid one cycle after the operands are presented.
module jacquard_pe
  import mensa_pkg::*;
#(
  parameter int unsigned JW_DEPTH = 16,
  localparam int unsigned FW      = (JW_DEPTH > 1) ? $clog2(JW_DEPTH) : 1
) (
  input  logic          clk,
  input  logic          w_we,      // load weight register w_idx with w_data
  input  logic [FW-1:0] w_idx,
  input  data_t         w_data,
  input  logic          en,        // pipeline advance
  input  logic          act_load,  // take act_in (else reuse latched element)
  input  data_t         act_in,
  input  logic [FW-1:0] f_idx,     // weight vector used this cycle
  output acc_t          psum
);

  data_t wreg [JW_DEPTH];
  data_t act_q;
  data_t a;

  assign a = act_load ? act_in : act_q;

  always_ff @(posedge clk) begin
    if (w_we) wreg[w_idx] <= w_data;
    if (en) begin
      if (act_load) act_q <= act_in;
      psum <= acc_t'(a) * acc_t'(wreg[f_idx]);
    end
  end

endmodule
