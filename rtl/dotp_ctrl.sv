// dotp_ctrl: load-weight sequencer of one dot-product (DOTP) unit.
//
// To load a new U x B equalization matrix, LW is held high for U consecutive
// cycles and the rows of W are presented one per cycle on the shared input
// ports, row 1 first. Each DOTP has its own controller that turns the global
// LW into its private strobe lw_u, high only in the cycle of the burst that
// carries its row (cycle IDX, counting from 0).
//
// Implementation (this design's choice; the paper gives only the function): a
// counter of LW-high cycles, cleared while LW is low and saturating at U, and a
// comparison with IDX. lw_u is combinational from lw and the counter, so it
// is high in the same cycle as the row it selects. Synchronous active-low reset.
module dotp_ctrl #(
  parameter int unsigned U   = 8,
  parameter int unsigned IDX = 0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic lw,
  output logic lw_u
);
  localparam int unsigned CW = $clog2(U + 1);
  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n || !lw)        cnt <= '0;
    else if (cnt != CW'(U))   cnt <= cnt + 1'b1;
  end

  assign lw_u = lw && (cnt == CW'(IDX));

  initial assert (IDX < U) else $error("dotp_ctrl: IDX %0d out of range for U=%0d", IDX, U);
endmodule
