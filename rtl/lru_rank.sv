// lru_rank: true least-recently-used order for N entries, kept as one rank per
// entry (0 = most recently used, N-1 = least recently used).
//
// Touching entry i moves it to rank 0 and ages by one every entry whose rank
// was below i's old rank, so the ranks always stay a permutation of 0..N-1.
// victim_idx names the entry of rank N-1 combinationally; a touch takes
// effect at the next clock edge. After reset entry i has rank i, so entry N-1
// is the first victim. Callers that track valid bits pick an invalid entry
// before asking for the victim. Helper used by both LRU tables of the design.
module lru_rank #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 touch_en,
  input  logic [$clog2(N)-1:0] touch_idx,
  output logic [$clog2(N)-1:0] victim_idx
);
  localparam int unsigned W = $clog2(N);

  logic [W-1:0] rank [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) rank[i] <= W'(i);
    end else if (touch_en) begin
      for (int i = 0; i < N; i++) begin
        if (W'(i) == touch_idx)             rank[i] <= '0;
        else if (rank[i] < rank[touch_idx]) rank[i] <= rank[i] + 1'b1;
      end
    end
  end

  always_comb begin
    victim_idx = '0;
    for (int i = 0; i < N; i++)
      if (rank[i] == W'(N - 1)) victim_idx = W'(i);
  end
endmodule
