// topk_pkg: constants and types shared by the top-K flow accelerator.
//
// The flow identifier is the 104-bit 5-tuple {src IP, dst IP, src port,
// dst port, protocol}. Every hash is a 32-bit MurmurHash3. The sketch has six
// rows of 2^21 bits each (three of 8-bit, two of 16-bit, one of 32-bit
// counters); each row is eight 4K x 64-bit memory banks. The estimate handed
// to the priority queue array is 20 bits wide, the width printed on the
// estimation and count buses of the accelerator's block diagram. The hash
// seeds are this design's own choice; the source only says they differ per row.
package topk_pkg;

  localparam int unsigned FLOW_ID_W = 104;
  localparam int unsigned HASH_W    = 32;
  localparam int unsigned EST_W     = 20;
  localparam int unsigned EXT_W     = 32;   // counters are compared at 32 bits

  localparam int unsigned N_ROWS    = 6;
  localparam int unsigned WORD_W    = 64;   // memory word
  localparam int unsigned N_BANKS   = 8;    // memory banks per sketch row
  localparam int unsigned BANK_AW   = 12;   // 4K words per bank

  // Counter width per sketch row (row 1 is index 0).
  localparam int unsigned ROW_DELTA [N_ROWS] = '{8, 8, 8, 16, 16, 32};

  // MurmurHash3 seeds, one per row; row 1's hash is also the flow tag.
  localparam logic [31:0] ROW_SEED [N_ROWS] = '{
    32'h9747_b28c, 32'h1b87_3593, 32'hcc9e_2d51,
    32'h85eb_ca6b, 32'hc2b2_ae35, 32'he654_6b64
  };

  localparam logic [EXT_W-1:0] EXT_INF = '1;  // overflowed counter, +infinity

endpackage
