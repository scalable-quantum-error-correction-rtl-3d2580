// edge_grow: growth register of one decoding-graph edge and its update logic.
//
// Every edge has a weight w and a growth that starts at 0 and rises towards w
// as odd clusters expand over it; the edge is "fully grown" once growth = w,
// and from then on it connects the two vertices it joins. The register sits in
// the PE with the lower id of the two endpoints, which makes that PE its only
// writer. Both endpoints grow the edge at once, so the single writer adds the
// odd flags of both sides in one step:
//
//     growth <= min(growth + odd[0] + odd[1], w)   when the PE is in Growing
//
// This is the adder / min / 2:1 mux / flip-flop path of the paper's grow
// sub-module. Following the paper's FPGA PE algorithm (not its short listing,
// which leaves the test out), growth only changes when the two endpoints belong
// to different clusters (cid_differ); edges inside a cluster keep their growth.
// clear returns growth to 0 at the start of a decode (own choice: the paper
// only says growth is initialised to 0).
//
// Timing: one register, updated on the rising clock edge; growth and full are
// its outputs, valid the cycle after an update. The sum is formed one bit wider
// than the register so that growth + 2 cannot wrap before the min.
module edge_grow #(
  parameter int unsigned W_BITS = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,       // start of a decode: growth <= 0
  input  logic              growing,     // owning PE is in its Growing stage
  input  logic              cid_differ,  // endpoints lie in different clusters
  input  logic              odd_a,       // odd flag of the owning PE
  input  logic              odd_b,       // odd flag of the other endpoint
  input  logic [W_BITS-1:0] w,           // edge weight
  output logic [W_BITS-1:0] growth,
  output logic              full         // growth has reached w (fully grown)
);

  logic [W_BITS:0]   sum;
  logic [W_BITS-1:0] grown;

  always_comb begin
    sum   = {1'b0, growth} + (W_BITS+1)'(odd_a) + (W_BITS+1)'(odd_b);
    grown = (sum < {1'b0, w}) ? sum[W_BITS-1:0] : w;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      growth <= '0;
    end else if (clear) begin
      growth <= '0;
    end else if (growing && cid_differ && (growth < w)) begin
      growth <= grown;
    end
  end

  assign full = (growth >= w);

endmodule
