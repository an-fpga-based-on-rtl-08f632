// oselm_ram_if: one port of a synchronous single-port RAM.
//
// The client drives addr, we and wdata during a cycle; a write takes effect
// at the clock edge, and rdata holds the word at addr one cycle after addr
// was presented (read-before-write). The same bundle connects every BRAM
// of the core to the sequencer that currently owns it.
interface oselm_ram_if #(
  parameter int unsigned AW = 6
);
  import oselm_pkg::*;
  logic [AW-1:0] addr;
  logic          we;
  fx_t           wdata;
  fx_t           rdata;

  modport client (output addr, output we, output wdata, input rdata);
  modport mem    (input addr, input we, input wdata, output rdata);
endinterface
