// batage_hash: index and tag of every tagged BATAGE bank for one PC and one
// global history. Bank b (0-based) uses the newest MIN_HIST << b history
// bits, a geometric series. The history is folded by XOR into the index
// width and into the tag width (twice, the second fold shifted by one, so
// index and tag aliasing are independent), then XORed with PC bits. Also
// gives the untagged base table index, PC bits only. Purely
// combinational; the hash itself is this design's choice.
module batage_hash #(
  parameter int unsigned NUM_BANKS = 4,
  parameter int unsigned BANK_IW   = 8,
  parameter int unsigned TAG_BITS  = 8,
  parameter int unsigned BASE_IW   = 10,
  parameter int unsigned MIN_HIST  = 4,
  localparam int unsigned H = MIN_HIST << (NUM_BANKS - 1)
) (
  input  logic [31:0]        pc,
  input  logic [H-1:0]       hist,
  output logic [BASE_IW-1:0] base_idx,
  output logic [BANK_IW-1:0] idx [NUM_BANKS],
  output logic [TAG_BITS-1:0] tag [NUM_BANKS]
);
  assign base_idx = pc[BASE_IW+1:2];

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    localparam int unsigned L = MIN_HIST << b;
    logic [BANK_IW-1:0]  fi;
    logic [TAG_BITS-1:0] ft;
    logic [TAG_BITS-2:0] ft2;
    always_comb begin
      fi = '0; ft = '0; ft2 = '0;
      for (int j = 0; j < L; j++) begin
        fi[j % BANK_IW]        ^= hist[j];
        ft[j % TAG_BITS]       ^= hist[j];
        ft2[j % (TAG_BITS-1)]  ^= hist[j];
      end
      idx[b] = pc[BANK_IW+1:2] ^ pc[2*BANK_IW+1:BANK_IW+2] ^ fi;
      tag[b] = pc[TAG_BITS+1:2] ^ ft ^ {ft2, 1'b0} ^ TAG_BITS'(b);
    end
  end
endmodule
