// Received-word buffer of the RS decoder: an N_RS x 8-bit register file that
// holds the RM-decoded symbols r_0..r_{N_RS-1} while the syndrome, key
// equation, erasure addition and polynomial selection run, and is read again
// for the final correction r_l + e_l. One synchronous write port and two
// asynchronous read ports (one for the syndrome unit, one for correction).
// The paper only names this buffer; the port structure is this design's.
module rs_buffer #(
  parameter int unsigned DEPTH = hqc_pkg::N_RS,
  parameter int unsigned W     = hqc_pkg::K_RM,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr_a,
  output logic [W-1:0]  rdata_a,
  input  logic [AW-1:0] raddr_b,
  output logic [W-1:0]  rdata_b
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we && waddr < AW'(DEPTH)) mem[waddr] <= wdata;

  assign rdata_a = (raddr_a < AW'(DEPTH)) ? mem[raddr_a] : '0;
  assign rdata_b = (raddr_b < AW'(DEPTH)) ? mem[raddr_b] : '0;
endmodule
