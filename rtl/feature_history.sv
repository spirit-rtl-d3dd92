// feature_history: memory of the predictor's recent past for retraining.
//
// A prediction can only be judged right or wrong up to 30 minutes later, so
// the features it was made from must be kept. Once a minute the classifier
// stores one sample's 80 prediction features (16 words of five 16-bit lane
// values: phases 1 and 2 of the eight channels) and the predictor
// probability of that sample. DEPTH entries (30, one per minute of the
// window) are kept in a circular buffer; `commit` closes the entry being
// written and advances the write pointer, the oldest entry being overwritten
// when the buffer is full. `count` says how many entries are valid.
//
// The 30 one-minute snapshots of features and probabilities follow the
// paper; the word organisation is this design's own.
//
// Interface: writes (wr_word, wr_prob) go to the current write entry at the
// clock edge; reads are combinational from an absolute entry index.
module feature_history
  import spirit_pkg::*;
#(
  parameter int DEPTH   = 30,
  parameter int N_WORDS = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_en,
  input  logic [$clog2(N_WORDS)-1:0]  wr_word,
  input  feat_t [N_LANES-1:0]         wr_data,
  input  logic                        prob_we,
  input  prob_t                       prob_data,
  input  logic                        commit,
  input  logic [$clog2(DEPTH)-1:0]    rd_entry,
  input  logic [$clog2(N_WORDS)-1:0]  rd_word,
  output feat_t [N_LANES-1:0]         rd_data,
  output prob_t                       rd_prob,
  output logic [$clog2(DEPTH+1)-1:0]  count
);
  localparam int EW = $clog2(DEPTH);

  feat_t [N_LANES-1:0] mem   [DEPTH * N_WORDS];
  prob_t               pmem  [DEPTH];
  logic [EW-1:0]       wp;

  always_ff @(posedge clk) begin
    if (wr_en)   mem[int'(wp) * N_WORDS + int'(wr_word)] <= wr_data;
    if (prob_we) pmem[wp] <= prob_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      count <= '0;
    end else if (commit) begin
      wp <= (int'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (int'(count) < DEPTH) count <= count + 1'b1;
    end
  end

  assign rd_data = mem[int'(rd_entry) * N_WORDS + int'(rd_word)];
  assign rd_prob = pmem[rd_entry];
endmodule
