// candidate_comparator: Comparator 1 of the parallel Camshift search.
//
// Given the moments of the N candidate windows, it picks the candidate with the
// largest weighted zero moment M00, the one that holds most of the object, the first
// one on a tie, and passes that candidate's moments on. Registered: the choice
// appears one cycle after `in_valid`, with `out_valid`.
//
// The paper shows the comparator but not its criterion; largest M00 is this
// design's choice.
module candidate_comparator #(
  parameter int unsigned N  = 9,
  parameter int unsigned MW = 40
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [MW-1:0]        m00 [N],
  input  logic [MW-1:0]        m10 [N],
  input  logic [MW-1:0]        m01 [N],
  input  logic [MW-1:0]        cnt [N],
  output logic                 out_valid,
  output logic [$clog2(N)-1:0] best,
  output logic [MW-1:0]        best_m00,
  output logic [MW-1:0]        best_m10,
  output logic [MW-1:0]        best_m01,
  output logic [MW-1:0]        best_cnt
);
  logic [$clog2(N)-1:0] sel;

  always_comb begin
    sel = '0;
    for (int i = 1; i < N; i++)
      if (m00[i] > m00[sel]) sel = ($clog2(N))'(i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; best <= '0;
      best_m00 <= '0; best_m10 <= '0; best_m01 <= '0; best_cnt <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        best     <= sel;
        best_m00 <= m00[sel];
        best_m10 <= m10[sel];
        best_m01 <= m01[sel];
        best_cnt <= cnt[sel];
      end
    end
  end
endmodule
