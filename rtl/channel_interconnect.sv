// channel_interconnect: buffer-die interconnection between channels.
//
// Each layer's output vector must reach every channel (the paper broadcasts
// a computed vector "to all channels" before the next matrix-vector product,
// and reshapes the attention output "into a single channel"). This block
// carries the C-ALU vector register of one pseudo-channel, chosen by `src`,
// into a 256-bit holding register that all pseudo-channels can put on their
// data bus (bus source BUS_IC). `load` captures at the clock edge; `bcast`
// is the registered vector. The paper only names the interconnection; the
// single-source broadcast register is this design's simplest realisation.
module channel_interconnect
  import salpim_pkg::*;
#(
  parameter int unsigned N_PCH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  logic [$clog2(N_PCH)-1:0] src,
  input  vec_t [N_PCH-1:0]         pch_vec,
  output vec_t                     bcast
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    bcast <= '0;
    else if (load) bcast <= pch_vec[src];
  end
endmodule
