// adder_tree: pipelined complex adder tree of one DOTP unit.
//
// Sums the N complex partial products delivered by the CMs of one dot-product
// unit. The inputs are padded with zeros to the next power of two and reduced
// by a binary tree of adders with a pipeline register after every level, so
// the sum of the inputs presented in cycle t appears in cycle t + clog2(N) and a
// new sum is accepted every cycle. Each level widens the words by one bit, so
// the result is exact.
//
// The paper says only that the tree is internally pipelined; one register per
// level is this design's choice.
module adder_tree #(
  parameter int unsigned N  = 64,
  parameter int unsigned IW = 22,
  parameter int unsigned L  = (N > 1) ? $clog2(N) : 1,  // levels = latency
  parameter int unsigned OW = IW + L
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [IW-1:0] in_re [N],
  input  logic signed [IW-1:0] in_im [N],
  output logic signed [OW-1:0] sum_re,
  output logic signed [OW-1:0] sum_im
);
  localparam int unsigned NP = 1 << L;  // padded leaf count

  // g_lvl[k].re/im hold the NP >> k partial sums after level k (level 0 = inputs)
  for (genvar k = 0; k <= L; k++) begin : g_lvl
    logic signed [OW-1:0] re [NP >> k];
    logic signed [OW-1:0] im [NP >> k];

    if (k == 0) begin : g_leaf
      always_comb begin
        for (int unsigned i = 0; i < NP; i++) begin
          re[i] = (i < N) ? OW'(in_re[i]) : '0;
          im[i] = (i < N) ? OW'(in_im[i]) : '0;
        end
      end
    end else begin : g_add
      always_ff @(posedge clk) begin
        for (int unsigned i = 0; i < (NP >> k); i++) begin
          if (!rst_n) begin
            re[i] <= '0;
            im[i] <= '0;
          end else begin
            re[i] <= g_lvl[k-1].re[2*i] + g_lvl[k-1].re[2*i+1];
            im[i] <= g_lvl[k-1].im[2*i] + g_lvl[k-1].im[2*i+1];
          end
        end
      end
    end
  end

  assign sum_re = g_lvl[L].re[0];
  assign sum_im = g_lvl[L].im[0];

endmodule
