// reg_parity: one parity bit per architectural register.
//
// Fast release lets a store reach the cache before its region is verified.
// If the register holding a store's address were corrupted, the store could
// overwrite an arbitrary memory location, which re-executing the region
// cannot repair. A parity bit per register closes this hole: the parity of
// each value written to the register file is kept here, and every register
// read is checked against it. A mismatch is reported as an error, exactly
// like a sensor detection, and starts recovery.
//
// Interface and timing: the write port updates the parity bit at the clock
// edge. NRD read ports are checked combinationally; error is high in the
// cycle of a read whose data does not match the stored parity (even parity).
// Parity bits reset to 0, matching registers that reset to zero.
//
// From the paper: one parity bit per register, recovery on a mismatch at any
// register access. Own choices: even parity, two read ports, reset value.
module reg_parity
  import turnpike_pkg::*;
#(
  parameter int unsigned NR  = NREG,
  parameter int unsigned DW  = DATA_W,
  parameter int unsigned NRD = 2,
  localparam int unsigned RW = $clog2(NR)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [RW-1:0] wr_idx,
  input  logic [DW-1:0] wr_data,
  input  logic          rd_en   [NRD],
  input  logic [RW-1:0] rd_idx  [NRD],
  input  logic [DW-1:0] rd_data [NRD],
  output logic          error
);

  logic [NR-1:0] par;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     par <= '0;
    else if (wr_en) par[wr_idx] <= ^wr_data;
  end

  always_comb begin
    error = 1'b0;
    for (int unsigned p = 0; p < NRD; p++)
      if (rd_en[p] && (^rd_data[p] != par[rd_idx[p]])) error = 1'b1;
  end

endmodule
