// batage: BATAGE-style conditional branch direction predictor, consulted in
// the fetch stage.
//
// Tables: an untagged base table of dual counters indexed by PC, and
// NUM_BANKS tagged banks whose index and tag hash the PC with the newest
// 4, 8, 16, ... global history bits (see batage_hash). An entry of a tagged
// bank hits when its tag matches and its counter is not empty (0,0).
//
// Prediction (port f, combinational): every hit, and the base entry, has a
// confidence level (batage_pkg); the most confident one provides the
// prediction, and among equally confident ones the bank with the longer
// history wins. f_tagged says the provider was a tagged bank, in which case
// the decode stage also trusts the prediction when the BTB missed.
//
// Training (port u, at retirement): the branch's PC and the history it was
// predicted with (read from the global history at its saved pointer) are
// hashed again, so the same entries are found. The provider and every hit
// in a longer bank are updated with the outcome. If the provider
// mispredicted, one entry is allocated in a longer bank that missed: the
// scan starts one bank further up when random stream 0 says so; a victim
// with high confidence is not replaced but decayed with probability 1/2
// (its bank's random stream), and the scan moves on. A new entry starts as
// one observation of the outcome.
//
// The source design description gives the principles (geometric histories, per-entry confidence,
// most-confident provider, ties to the longer history, retirement update
// with matching history); table sizes, hash, update and allocation rules
// are this design's choices, kept close to the published BATAGE model.
module batage
  import batage_pkg::*;
#(
  parameter int unsigned BASE_ENTRIES = 1024,
  parameter int unsigned NUM_BANKS    = 4,
  parameter int unsigned BANK_ENTRIES = 256,
  parameter int unsigned TAG_BITS     = 8,
  parameter int unsigned MIN_HIST     = 4,
  localparam int unsigned H       = MIN_HIST << (NUM_BANKS - 1),
  localparam int unsigned BASE_IW = $clog2(BASE_ENTRIES),
  localparam int unsigned BANK_IW = $clog2(BANK_ENTRIES),
  localparam int unsigned PVW     = $clog2(NUM_BANKS + 1)
) (
  input  logic           clk,
  input  logic           rst,
  // prediction
  input  logic [31:0]    f_pc,
  input  logic [H-1:0]   f_hist,
  output logic           f_taken,
  output logic           f_tagged,
  output logic [PVW-1:0] f_provider,  // 0 = base, b+1 = tagged bank b
  // training
  input  logic           u_valid,
  input  logic [31:0]    u_pc,
  input  logic [H-1:0]   u_hist,
  input  logic           u_taken,
  input  logic [31:0]    rnd [5],
  output logic           u_alloc,     // an entry was allocated
  output logic           u_mispred    // the retrained prediction was wrong
);
  typedef struct packed {
    logic [TAG_BITS-1:0] tag;
    dual_ctr_t           ctr;
  } entry_t;

  dual_ctr_t base_q [BASE_ENTRIES];
  entry_t    bank_q [NUM_BANKS][BANK_ENTRIES];

  // ---------------------------------------------------------------- lookup
  logic [BASE_IW-1:0]  f_bidx, u_bidx;
  logic [BANK_IW-1:0]  f_idx [NUM_BANKS], u_idx [NUM_BANKS];
  logic [TAG_BITS-1:0] f_tag [NUM_BANKS], u_tag [NUM_BANKS];

  batage_hash #(.NUM_BANKS(NUM_BANKS), .BANK_IW(BANK_IW), .TAG_BITS(TAG_BITS),
                .BASE_IW(BASE_IW), .MIN_HIST(MIN_HIST))
    u_hash_f (.pc(f_pc), .hist(f_hist), .base_idx(f_bidx), .idx(f_idx), .tag(f_tag));
  batage_hash #(.NUM_BANKS(NUM_BANKS), .BANK_IW(BANK_IW), .TAG_BITS(TAG_BITS),
                .BASE_IW(BASE_IW), .MIN_HIST(MIN_HIST))
    u_hash_u (.pc(u_pc), .hist(u_hist), .base_idx(u_bidx), .idx(u_idx), .tag(u_tag));

  // Provider selection over the base entry (slot 0) and the banks (1..N).
  function automatic logic [PVW-1:0] pick(input dual_ctr_t c [NUM_BANKS+1],
                                          input logic hit [NUM_BANKS+1]);
    logic [PVW-1:0] p;
    conf_e          best;
    p    = '0;
    best = dc_conf(c[0]);
    for (int i = 1; i <= NUM_BANKS; i++) begin
      if (hit[i] && dc_conf(c[i]) >= best) begin
        p    = PVW'(i);
        best = dc_conf(c[i]);
      end
    end
    return p;
  endfunction

  dual_ctr_t f_c [NUM_BANKS+1], u_c [NUM_BANKS+1];
  logic      f_hit [NUM_BANKS+1], u_hit [NUM_BANKS+1];
  entry_t    u_e [NUM_BANKS];
  logic [PVW-1:0] u_prov;

  always_comb begin
    f_c[0] = base_q[f_bidx];  f_hit[0] = 1'b1;
    u_c[0] = base_q[u_bidx];  u_hit[0] = 1'b1;
    for (int b = 0; b < NUM_BANKS; b++) begin
      entry_t fe;
      fe         = bank_q[b][f_idx[b]];
      u_e[b]     = bank_q[b][u_idx[b]];
      f_c[b+1]   = fe.ctr;
      f_hit[b+1] = (fe.tag == f_tag[b]) && !dc_empty(fe.ctr);
      u_c[b+1]   = u_e[b].ctr;
      u_hit[b+1] = (u_e[b].tag == u_tag[b]) && !dc_empty(u_e[b].ctr);
    end
    f_provider = pick(f_c, f_hit);
    f_taken    = dc_taken(f_c[f_provider]);
    f_tagged   = (f_provider != '0);
    u_prov     = pick(u_c, u_hit);
  end

  // -------------------------------------------------------------- training
  logic      base_we;
  dual_ctr_t base_wd;
  logic      bank_we [NUM_BANKS];
  entry_t    bank_wd [NUM_BANKS];

  always_comb begin
    logic done;
    int   start;
    u_mispred = dc_taken(u_c[u_prov]) != u_taken;
    u_alloc   = 1'b0;
    base_we   = u_valid && (u_prov == '0);
    base_wd   = dc_update(u_c[0], u_taken);
    for (int b = 0; b < NUM_BANKS; b++) begin
      bank_we[b] = 1'b0;
      bank_wd[b] = u_e[b];
      // Provider and longer hits learn the outcome.
      if (u_valid && u_hit[b+1] && (b + 1 >= int'(u_prov))) begin
        bank_we[b] = 1'b1;
        bank_wd[b].ctr = dc_update(u_e[b].ctr, u_taken);
      end
    end
    // Allocation on a misprediction, in a longer bank that missed.
    done  = 1'b0;
    start = int'(u_prov) + ((rnd[0][0] && int'(u_prov) + 2 <= NUM_BANKS) ? 1 : 0);
    for (int b = 0; b < NUM_BANKS; b++) begin
      if (u_valid && u_mispred && !done && (b + 1 > start) && !u_hit[b+1]) begin
        if (dc_conf(u_e[b].ctr) == CONF_HIGH) begin
          if (rnd[(b % 4) + 1][0]) begin
            bank_we[b] = 1'b1;
            bank_wd[b].ctr = dc_decay(u_e[b].ctr);
          end
        end else begin
          bank_we[b] = 1'b1;
          bank_wd[b] = '{tag: u_tag[b], ctr: dc_alloc(u_taken)};
          done = 1'b1;
          u_alloc = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < BASE_ENTRIES; i++) base_q[i] <= '0;
      for (int b = 0; b < NUM_BANKS; b++)
        for (int i = 0; i < BANK_ENTRIES; i++) bank_q[b][i] <= '0;
    end else begin
      if (base_we) base_q[u_bidx] <= base_wd;
      for (int b = 0; b < NUM_BANKS; b++)
        if (bank_we[b]) bank_q[b][u_idx[b]] <= bank_wd[b];
    end
  end
endmodule
