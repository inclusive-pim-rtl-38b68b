// locality_predictor: cache-model locality predictor for cache-aware PIM offload.
//
// It keeps the tags of a SIZE_BYTES, WAYS-way set-associative cache with LINE_BYTES lines
// and true-LRU replacement, the cache model the paper uses to classify push-primitive
// updates: an update whose line is present is expected to be reused on chip (predict
// "cache"); one that misses is expected to see no reuse and is sent to PIM. Every lookup also
// updates the model as a cache would: a hit makes the line most recently used, a miss
// fills the least recently used way.
// LRU is kept as a rank per way (0 = most recent, WAYS-1 = least recent); the ranks of a set
// are always a permutation, so the victim is the way whose rank is WAYS-1, and invalid ways,
// never touched, are always the oldest.
// Interface: req_valid/req_ready with a byte address; the answer (resp_hit) appears with
// resp_valid two cycles later (cycle 1 reads the set, cycle 2 updates it). One lookup is in
// flight at a time. After reset the tag store is cleared by a sweep of SETS cycles, during
// which req_ready is low.
// 16 ways, 4 MB and LRU are the paper's; the 64-byte line follows from the paper's mention of
// 64-byte GPU accesses, and the address width is this design's choice.
// Lint note: the low address bits (the byte offset within a line) are unused on purpose.
module locality_predictor #(
  parameter int ADDR_W     = 40,
  parameter int SIZE_BYTES = 4 * 1024 * 1024,
  parameter int WAYS       = 16,
  parameter int LINE_BYTES = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [ADDR_W-1:0] req_addr,
  output logic              resp_valid,
  output logic              resp_hit
);

  localparam int SETS  = SIZE_BYTES / (WAYS * LINE_BYTES);
  localparam int OFF_W = $clog2(LINE_BYTES);
  localparam int SET_W = $clog2(SETS);
  localparam int TAG_W = ADDR_W - OFF_W - SET_W;
  localparam int WAY_W = $clog2(WAYS);

  typedef enum logic [1:0] {S_INIT, S_IDLE, S_LOOK} state_e;

  logic [TAG_W-1:0] tags  [SETS][WAYS];
  logic [WAY_W-1:0] rank  [SETS][WAYS];
  logic [WAYS-1:0]  valid [SETS];

  state_e           st;
  logic [SET_W-1:0] set_q, init_idx;
  logic [TAG_W-1:0] tag_q;

  // lookup of the latched set
  logic             hit;
  logic [WAY_W-1:0] sel_way;
  always_comb begin
    hit     = 1'b0;
    sel_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (rank[set_q][w] == WAY_W'(WAYS - 1)) sel_way = WAY_W'(w);
    for (int w = 0; w < WAYS; w++)
      if (valid[set_q][w] && tags[set_q][w] == tag_q) begin
        hit     = 1'b1;
        sel_way = WAY_W'(w);
      end
  end

  assign req_ready = (st == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_INIT;
      init_idx   <= '0;
      set_q      <= '0;
      tag_q      <= '0;
      resp_valid <= 1'b0;
      resp_hit   <= 1'b0;
    end else begin
      resp_valid <= 1'b0;
      unique case (st)
        S_INIT: begin
          init_idx <= init_idx + 1;
          if (init_idx == SET_W'(SETS - 1)) st <= S_IDLE;
        end
        S_IDLE: if (req_valid) begin
          set_q <= req_addr[OFF_W +: SET_W];
          tag_q <= req_addr[ADDR_W-1 -: TAG_W];
          st    <= S_LOOK;
        end
        S_LOOK: begin
          resp_valid <= 1'b1;
          resp_hit   <= hit;
          st         <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // tag store: written by the init sweep and by each lookup
  always_ff @(posedge clk) begin
    if (st == S_INIT) begin
      valid[init_idx] <= '0;
      for (int w = 0; w < WAYS; w++) rank[init_idx][w] <= WAY_W'(w);
    end else if (st == S_LOOK) begin
      valid[set_q][sel_way] <= 1'b1;
      tags[set_q][sel_way]  <= tag_q;
      for (int w = 0; w < WAYS; w++) begin
        if (WAY_W'(w) == sel_way)
          rank[set_q][w] <= '0;
        else if (rank[set_q][w] < rank[set_q][sel_way])
          rank[set_q][w] <= rank[set_q][w] + 1;
      end
    end
  end

endmodule
