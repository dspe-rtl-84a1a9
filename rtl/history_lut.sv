// history_lut: History-LUT of one Merkle-tree level.
//
// Each entry binds (expert, delta-H) to the result index registered by a
// Full-Compute. Lookup is a fully associative match, combinational: hit is
// set and idx returned when a valid entry holds the same expert and exactly
// the same delta-H. Writes (we at a rising edge) fill entries in round-robin
// order; an entry with the same key is overwritten in place. Reset clears
// all entries. The paper gives the table's role; the associative match and
// round-robin replacement are this design's.
module history_lut #(
  parameter int unsigned ENTRIES = 8,
  parameter int unsigned EW      = 3,
  parameter int unsigned DW      = 19,
  parameter int unsigned IW      = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [EW-1:0] q_expert,
  input  logic [DW-1:0] q_dh,
  output logic          hit,
  output logic [IW-1:0] idx,
  input  logic          we,
  input  logic [EW-1:0] w_expert,
  input  logic [DW-1:0] w_dh,
  input  logic [IW-1:0] w_idx
);

  typedef struct packed {
    logic          v;
    logic [EW-1:0] expert;
    logic [DW-1:0] dh;
    logic [IW-1:0] idx;
  } entry_t;

  entry_t tab [ENTRIES];
  logic [$clog2(ENTRIES)-1:0] wp;
  logic                       w_hit;
  logic [$clog2(ENTRIES)-1:0] w_pos;

  always_comb begin
    hit = 1'b0;
    idx = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (!hit && tab[i].v && tab[i].expert == q_expert && tab[i].dh == q_dh) begin
        hit = 1'b1;
        idx = tab[i].idx;
      end
    w_hit = 1'b0;
    w_pos = wp;
    for (int i = 0; i < ENTRIES; i++)
      if (!w_hit && tab[i].v && tab[i].expert == w_expert && tab[i].dh == w_dh) begin
        w_hit = 1'b1;
        w_pos = ($clog2(ENTRIES))'(i);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      for (int i = 0; i < ENTRIES; i++) tab[i] <= '0;
    end else if (we) begin
      tab[w_pos] <= '{v: 1'b1, expert: w_expert, dh: w_dh, idx: w_idx};
      if (!w_hit) wp <= wp + 1'b1;
    end
  end

endmodule
