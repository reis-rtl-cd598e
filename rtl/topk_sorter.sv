// topk_sorter: distance-ordered list of the reranked candidates.
//
// After reranking the design sorts the candidates (quicksort on an embedded
// core) and keeps the k best.  This block is the hardware counterpart: an
// insertion-sorted register list of N_MAX (key, payload) pairs.  Each cycle
// one pair can be inserted: every held pair whose key is larger moves down
// one place and the new pair takes the freed place, so equal keys keep their
// arrival order.  When the list is full a pair larger than every held one is
// dropped and a smaller one pushes the last one out.  `clear` empties it.
// Position i (0 = smallest key) is read through rd_idx (combinational).
module topk_sorter
  import reis_pkg::*;
#(
  parameter int N_MAX = 100,
  parameter int KW    = RDIST_W,
  parameter int PW    = ADDR_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_valid,
  input  logic [KW-1:0] in_key,
  input  logic [PW-1:0] in_pay,
  output logic [15:0]   count,
  input  logic [15:0]   rd_idx,
  output logic [KW-1:0] rd_key,
  output logic [PW-1:0] rd_pay
);
  localparam int IW = $clog2(N_MAX);
  logic [KW-1:0] key [N_MAX];
  logic [PW-1:0] pay [N_MAX];

  logic signed [31:0] pos;
  always_comb begin
    pos = int'(count);
    for (int i = N_MAX - 1; i >= 0; i--)
      if (i < int'(count) && key[i] > in_key) pos = i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int i = 0; i < N_MAX; i++) begin key[i] <= '1; pay[i] <= '0; end
    end else if (clear) begin
      count <= '0;
    end else if (in_valid && pos < N_MAX) begin
      for (int i = N_MAX - 1; i > 0; i--)
        if (i > pos) begin key[i] <= key[i-1]; pay[i] <= pay[i-1]; end
      key[pos] <= in_key;
      pay[pos] <= in_pay;
      if (int'(count) < N_MAX) count <= count + 1'b1;
    end
  end

  assign rd_key = key[rd_idx[IW-1:0]];
  assign rd_pay = pay[rd_idx[IW-1:0]];
endmodule
