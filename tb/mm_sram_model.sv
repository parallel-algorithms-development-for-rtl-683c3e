// mm_sram_model: behavioural model of one single-ported external SRAM bank
// of the FPGA board (not synthesizable logic of the design itself).
//
// One access per cycle: a write (we) stores wdata at addr; a read (en)
// returns the word at addr on rdata one cycle later. WORDS sets the modelled
// depth; the address wraps modulo WORDS. Testbenches fill and inspect the
// contents through the mem array directly.
module mm_sram_model
  import mm_pkg::*;
#(
  parameter int unsigned WORDS = 4096
) (
  input  logic               clk,
  input  logic               en,
  input  logic               we,
  input  logic [BANK_AW-1:0] addr,
  input  logic [BANK_DW-1:0] wdata,
  output logic [BANK_DW-1:0] rdata
);

  logic [BANK_DW-1:0] mem [WORDS];

  initial rdata = '0;

  always @(posedge clk) begin
    if (we)      mem[addr % WORDS] <= wdata;
    else if (en) rdata <= mem[addr % WORDS];
  end

endmodule
