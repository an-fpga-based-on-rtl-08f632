// oselm_bram: synchronous single-port RAM of Q20 words (one FPGA block RAM
// or a few of them).
//
// One port: a write at the clock edge when we is high; rdata shows the word
// that was stored at addr before that edge, one cycle after addr was
// presented (read-before-write, the usual block-RAM behaviour). The core
// keeps its inputs' weights alpha, the bias b, the two output-weight sets
// beta (trained theta1 and fixed-target theta2), the P matrix and the
// hidden and intermediate vectors of a training step in instances of this
// module, as the design places them in on-chip block RAM. The contents
// start at zero; all useful contents are loaded by the host.
module oselm_bram
  import oselm_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic    clk,
  oselm_ram_if.mem port
);
  fx_t mem [DEPTH];

  initial for (int k = 0; k < DEPTH; k++) mem[k] = '0;

  always_ff @(posedge clk) begin
    if (port.we) mem[port.addr] <= port.wdata;
    port.rdata <= mem[port.addr];
  end
endmodule
