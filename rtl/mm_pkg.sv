// mm_pkg: types and constants shared by the systolic matrix multiplier.
//
// Every channel in the design carries an item_t: a 16-bit signed value and an
// end-of-transmission flag. A token whose eot bit is set carries no value; it
// stands for the separate "EOT channel" of a stream. Channels use a
// valid/ready handshake (a transfer happens in a cycle where both are high),
// the synchronous equivalent of a CSP rendezvous.
//
// The item width (16 bits, two's complement, all arithmetic wrapping modulo
// 2^16) and the 11 x 11 network size follow the published 2D pipelined
// implementation. The SRAM word and address widths are this design's choice.
package mm_pkg;

  // Width of a matrix item (Int16 in the reference implementation).
  localparam int unsigned DATA_W = 16;
  // Default network size: N rows of pipe stages, M cells per row.
  localparam int unsigned N_ROWS = 11;
  localparam int unsigned M_COLS = 11;
  // External SRAM bank port: 32-bit words, 21-bit word address.
  localparam int unsigned BANK_DW = 32;
  localparam int unsigned BANK_AW = 21;
  // Width of the run-time column count k of bss / css.
  localparam int unsigned K_W = 16;

  typedef logic signed [DATA_W-1:0] data_t;

  typedef struct packed {
    logic  eot;   // 1: end-of-transmission token, data is don't-care
    data_t data;  // item value
  } item_t;

  localparam item_t ITEM_ZERO = '{eot: 1'b0, data: '0};
  localparam item_t ITEM_EOT  = '{eot: 1'b1, data: '0};

endpackage
