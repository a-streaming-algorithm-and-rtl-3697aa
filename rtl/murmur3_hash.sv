// murmur3_hash: pipelined 32-bit MurmurHash3 (x86_32 variant) of a 104-bit
// flow identifier.
//
// The key is hashed as 13 bytes, byte k being key[8k+7:8k]: three full 32-bit
// blocks (key[31:0], key[63:32], key[95:64]) and one tail byte (key[103:96]),
// followed by the length (13) and the standard finalisation mix. The four
// block/tail scramblings are independent of the running hash, so they are
// computed side by side in stages 1-2; the running hash then absorbs one block
// per stage (3-5); stage 6 absorbs the tail and length and starts the final
// mix, which ends in stage 8. One key enters per cycle; the hash of the key
// presented with in_valid appears LAT = 8 cycles later with out_valid.
//
// The source names MurmurHash3 with a different seed per sketch row and says
// the hash functions are built from DSP multipliers; the staging and the seed
// values are this design's own.
module murmur3_hash #(
  parameter logic [31:0] SEED = 32'h9747_b28c
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [103:0]  key,
  output logic          out_valid,
  output logic [31:0]   hash,
  output logic          busy        // a key is in the pipeline
);
  localparam int unsigned LAT = 8;
  localparam logic [31:0] C1 = 32'hcc9e_2d51;
  localparam logic [31:0] C2 = 32'h1b87_3593;
  localparam logic [31:0] N  = 32'he654_6b64;
  localparam logic [31:0] F1 = 32'h85eb_ca6b;
  localparam logic [31:0] F2 = 32'hc2b2_ae35;

  function automatic logic [31:0] rotl(input logic [31:0] x, input int unsigned r);
    return (x << r) | (x >> (32 - r));
  endfunction

  // h = rotl(h ^ k, 13) * 5 + N
  function automatic logic [31:0] mix_block(input logic [31:0] h, input logic [31:0] k);
    logic [31:0] t;
    t = rotl(h ^ k, 13);
    return (t << 2) + t + N;
  endfunction

  logic [LAT-1:0] vld;
  logic [31:0] k1 [4];   // after stage 1: block * C1
  logic [31:0] k2 [4];   // after stage 2: rotl(.,15) * C2
  logic [31:0] k2b [3];  // blocks 1, 2 and tail carried to stage 3
  logic [31:0] k2c [2];  // block 2 and tail carried to stage 4
  logic [31:0] k2d;      // tail carried to stage 5
  logic [31:0] h3, h4, h5, h6, h7, h8;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LAT-2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    // stage 1
    k1[0] <= key[31:0]   * C1;
    k1[1] <= key[63:32]  * C1;
    k1[2] <= key[95:64]  * C1;
    k1[3] <= {24'd0, key[103:96]} * C1;
    // stage 2
    for (int i = 0; i < 4; i++) k2[i] <= rotl(k1[i], 15) * C2;
    // stage 3: absorb block 0
    h3     <= mix_block(SEED, k2[0]);
    k2b[0] <= k2[1];
    k2b[1] <= k2[2];
    k2b[2] <= k2[3];
    // stage 4: absorb block 1
    h4     <= mix_block(h3, k2b[0]);
    k2c[0] <= k2b[1];
    k2c[1] <= k2b[2];
    // stage 5: absorb block 2
    h5     <= mix_block(h4, k2c[0]);
    k2d    <= k2c[1];
    // stage 6: tail, length, first multiply of the finaliser
    h6     <= ((h5 ^ k2d ^ 32'd13) ^ ((h5 ^ k2d ^ 32'd13) >> 16)) * F1;
    // stage 7
    h7     <= (h6 ^ (h6 >> 13)) * F2;
    // stage 8
    h8     <= h7 ^ (h7 >> 16);
  end

  assign out_valid = vld[LAT-1];
  assign hash      = h8;
  assign busy      = |vld;

endmodule
