// Gas counter (GS) of EVMx.
//
// Loaded with the transaction's gas limit (gval) when execution starts. Each
// cycle the controller may charge a cost; 'enough' tells it, combinationally,
// whether the remaining gas covers the cost on 'cost'. A charge that the
// remaining gas covers is subtracted on the clock edge; a charge it does not
// cover empties the counter and sets the sticky 'out_of_gas' flag, as the
// Ethereum out-of-gas exception consumes all gas. The counter width is this
// design's choice; the load-and-deduct behaviour follows the paper.
module evmx_gas #(
  parameter int unsigned GW = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [GW-1:0] gval,
  input  logic          charge,
  input  logic [GW-1:0] cost,
  output logic          enough,
  output logic [GW-1:0] gas_left,
  output logic          out_of_gas
);
  assign enough = (cost <= gas_left);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gas_left   <= '0;
      out_of_gas <= 1'b0;
    end else if (load) begin
      gas_left   <= gval;
      out_of_gas <= 1'b0;
    end else if (charge) begin
      if (enough) gas_left <= gas_left - cost;
      else begin
        gas_left   <= '0;
        out_of_gas <= 1'b1;
      end
    end
  end
endmodule
