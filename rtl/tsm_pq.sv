// tsm_pq: one top-k priority queue of the Top-k Sorting Module.
//
// The queue keeps the DEPTH smallest keys seen since the last clear, sorted
// ascending in a chain of cells, each with its id. Every cell compares the
// incoming key with its own and with its left neighbour's: a cell whose key
// is larger than the new key takes either the new key (if its left neighbour
// is not larger) or its left neighbour's entry, so the whole chain shifts
// right by one at the insertion point in a single cycle. One insertion per
// cycle, no stall. clear loads every cell with the maximum key, so nothing is
// pruned before the queue is full, as the paper specifies.
//
// k_sel (1..DEPTH) chooses the active k (k of top-k in DC, nprobe in CL);
// thr is the k_sel-th smallest key, the pruning threshold returned to the
// distance reduction side, and full says that k_sel real entries are held.
// Ties keep the earlier entry in front (this design's choice).
module tsm_pq #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned KEY_W = 32,
  parameter int unsigned ID_W  = 16,
  parameter int unsigned K_W   = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              in_valid,
  input  logic [KEY_W-1:0]  in_key,
  input  logic [ID_W-1:0]   in_id,
  input  logic [K_W-1:0]    k_sel,
  output logic [KEY_W-1:0]  keys [DEPTH],
  output logic [ID_W-1:0]   ids  [DEPTH],
  output logic [KEY_W-1:0]  thr,
  output logic              full
);
  logic [DEPTH-1:0] gt;     // cell key > new key
  logic [K_W-1:0]   count;

  always_comb
    for (int i = 0; i < DEPTH; i++) gt[i] = keys[i] > in_key;

  for (genvar i = 0; i < DEPTH; i++) begin : g_cell
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        keys[i] <= '1;
        ids[i]  <= '0;
      end else if (clear) begin
        keys[i] <= '1;
        ids[i]  <= '0;
      end else if (in_valid && gt[i]) begin
        if (i == 0 || !gt[(i == 0) ? 0 : i-1]) begin
          keys[i] <= in_key;
          ids[i]  <= in_id;
        end else begin
          keys[i] <= keys[(i == 0) ? 0 : i-1];
          ids[i]  <= ids[(i == 0) ? 0 : i-1];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                  count <= '0;
    else if (clear)                              count <= '0;
    else if (in_valid && count < K_W'(DEPTH))    count <= count + 1'b1;
  end

  always_comb begin
    thr  = keys[(k_sel == '0) ? 0 : (k_sel > K_W'(DEPTH) ? DEPTH-1 : k_sel - 1'b1)];
    full = count >= k_sel;
  end
endmodule
