// rerank_unit: INT8 rescoring of one candidate.
//
// Binary-quantised search is followed by reranking on the INT8 versions of
// the selected embeddings.  The INT8 embedding of a candidate (1024
// dimensions, INT8_SLOTS = 8 beats of 128 signed bytes) streams in from the
// flash read path; each beat's 128 squared differences against the INT8
// query are summed in one cycle and accumulated.  After the last beat
// `done` pulses with the squared Euclidean distance on `rdist`.  `start`
// clears the accumulator.  The design runs this kernel on an embedded core
// and names Euclidean distance as its metric; squared L2 (monotone in L2)
// and the 128-lane datapath are this implementation's choices.
module rerank_unit
  import reis_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  slot_t              q_int8 [INT8_SLOTS],  // INT8 query, 8 beats
  input  logic               start,
  input  logic               beat_valid,
  input  slot_t              beat,
  output logic               done,
  output logic [RDIST_W-1:0] rdist
);
  localparam int LANES = EMB_BITS / 8;
  localparam int BW    = $clog2(INT8_SLOTS);

  logic [BW:0]        bi;
  logic [RDIST_W-1:0] acc;
  logic [RDIST_W-1:0] beat_sum;

  always_comb begin
    slot_t q;
    q = q_int8[bi[BW-1:0]];
    beat_sum = '0;
    for (int l = 0; l < LANES; l++) begin
      logic signed [8:0]  df;
      logic        [17:0] sq;
      df = 9'($signed(beat[l*8 +: 8])) - 9'($signed(q[l*8 +: 8]));
      sq = 18'($signed(df) * $signed(df));
      beat_sum = beat_sum + RDIST_W'(sq);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bi <= '0; acc <= '0; done <= 1'b0; rdist <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        bi  <= '0;
        acc <= '0;
      end else if (beat_valid) begin
        if (int'(bi) == INT8_SLOTS - 1) begin
          rdist <= acc + beat_sum;
          done  <= 1'b1;
          acc   <= '0;
          bi    <= '0;
        end else begin
          acc <= acc + beat_sum;
          bi  <= bi + 1'b1;
        end
      end
    end
  end
endmodule
