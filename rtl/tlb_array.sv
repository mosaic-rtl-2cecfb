// tlb_array: set-associative tag/data array with true LRU replacement, used
// for every TLB section of the design (SETS=1 makes it fully associative).
//
// Lookups are combinational on NPORTS independent ports; a hit on a port
// makes that way the most recently used at the next clock edge. One fill per
// cycle writes a key: an entry already holding the key is overwritten,
// otherwise the first invalid way of the set, otherwise the least recently
// used way. One invalidation per cycle drops a key; flush drops all.
// LRU order is kept as a per-way age (0 = most recent, WAYS-1 = least); the
// ages of a set always form a permutation, so the victim is unique.
// The set index is the low bits of the key; the whole key is kept as tag.
module tlb_array #(
  parameter int unsigned SETS   = 1,
  parameter int unsigned WAYS   = 16,
  parameter int unsigned NPORTS = 1,
  parameter int unsigned KEY_W  = 23,
  parameter int unsigned DATA_W = 20
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic [NPORTS-1:0]                lk_valid,
  input  logic [NPORTS-1:0][KEY_W-1:0]     lk_key,
  output logic [NPORTS-1:0]                lk_hit,
  output logic [NPORTS-1:0][DATA_W-1:0]    lk_data,
  input  logic                             fill_valid,
  input  logic [KEY_W-1:0]                 fill_key,
  input  logic [DATA_W-1:0]                fill_data,
  input  logic                             inv_valid,
  input  logic [KEY_W-1:0]                 inv_key,
  input  logic                             flush
);
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned AGE_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned WAY_W = AGE_W;

  logic [WAYS-1:0]   valid_q [SETS];
  logic [KEY_W-1:0]  key_q   [SETS][WAYS];
  logic [DATA_W-1:0] data_q  [SETS][WAYS];
  logic [AGE_W-1:0]  age_q   [SETS][WAYS];
  logic [AGE_W-1:0]  age_n   [SETS][WAYS];

  function automatic logic [SET_W-1:0] set_of(logic [KEY_W-1:0] k);
    return (SETS > 1) ? SET_W'(k % SETS) : '0;
  endfunction

  logic [NPORTS-1:0][WAY_W-1:0] lk_way;

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      lk_hit[p]  = 1'b0;
      lk_data[p] = '0;
      lk_way[p]  = '0;
      for (int w = 0; w < WAYS; w++) begin
        if (valid_q[set_of(lk_key[p])][w] && key_q[set_of(lk_key[p])][w] == lk_key[p]) begin
          lk_hit[p]  = lk_valid[p];
          lk_data[p] = data_q[set_of(lk_key[p])][w];
          lk_way[p]  = WAY_W'(w);
        end
      end
    end
  end

  // Fill way selection: matching way, else first invalid, else LRU.
  logic [SET_W-1:0] fill_set;
  logic [WAY_W-1:0] fill_way;
  logic             fill_found;
  always_comb begin
    fill_set   = set_of(fill_key);
    fill_way   = '0;
    fill_found = 1'b0;
    for (int w = 0; w < WAYS; w++)
      if (!fill_found && valid_q[fill_set][w] && key_q[fill_set][w] == fill_key) begin
        fill_way = WAY_W'(w); fill_found = 1'b1;
      end
    for (int w = 0; w < WAYS; w++)
      if (!fill_found && !valid_q[fill_set][w]) begin
        fill_way = WAY_W'(w); fill_found = 1'b1;
      end
    for (int w = 0; w < WAYS; w++)
      if (!fill_found && age_q[fill_set][w] == AGE_W'(WAYS - 1)) begin
        fill_way = WAY_W'(w); fill_found = 1'b1;
      end
  end

  // Next LRU ages: apply every port's hit, then the fill, as successive touches.
  always_comb begin
    logic [AGE_W-1:0] a;
    logic [SET_W-1:0] s;
    a = '0;
    s = '0;
    age_n = age_q;
    for (int p = 0; p < NPORTS; p++) begin
      if (lk_hit[p]) begin
        s = set_of(lk_key[p]);
        a = age_n[s][lk_way[p]];
        for (int w = 0; w < WAYS; w++)
          if (age_n[s][w] < a) age_n[s][w] = age_n[s][w] + 1'b1;
        age_n[s][lk_way[p]] = '0;
      end
    end
    if (fill_valid) begin
      a = age_n[fill_set][fill_way];
      for (int w = 0; w < WAYS; w++)
        if (age_n[fill_set][w] < a) age_n[fill_set][w] = age_n[fill_set][w] + 1'b1;
      age_n[fill_set][fill_way] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) age_q[s][w] <= AGE_W'(w);
      end
    end else begin
      age_q <= age_n;
      if (fill_valid) begin
        valid_q[fill_set][fill_way] <= 1'b1;
        key_q[fill_set][fill_way]   <= fill_key;
        data_q[fill_set][fill_way]  <= fill_data;
      end
      if (inv_valid)
        for (int w = 0; w < WAYS; w++)
          if (key_q[set_of(inv_key)][w] == inv_key &&
              !(fill_valid && set_of(fill_key) == set_of(inv_key) && fill_way == WAY_W'(w)))
            valid_q[set_of(inv_key)][w] <= 1'b0;
      if (flush)
        for (int s = 0; s < SETS; s++) valid_q[s] <= '0;
    end
  end

endmodule
