// cfg_unit: configuration unit (Cfg_unit), the parameter RAM.
//
// Holds the precomputed, key-dependent values the PE needs: the moduli p^2,
// q^2, n, the divisors p, q, the conversion constants y_p, y_q, the ladder
// start values R mod p^2, R mod q^2, the combined CRT constants t_pR, t_qR and
// the exponent segments h_{p,j}, h_{q,j} (address map in mesa_pkg). The paper
// says only that the unit is "primarily implemented via RAM" and is read under
// the control unit's addresses; the host write port and the one-cycle
// synchronous read are this design's choices.
//
// Interface: host write port (we, waddr, wdata), written on the clock edge.
// Read port: re with raddr; rdata is valid on the following cycle.
module cfg_unit #(
  parameter int unsigned N      = 2048,
  parameter int unsigned STAGES = 3,
  localparam int unsigned DEPTH = mesa_pkg::cfg_depth(STAGES),
  localparam int unsigned AW    = mesa_pkg::CFG_AW
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [N-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [N-1:0]  rdata
);
  logic [N-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && waddr < AW'(DEPTH)) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  always_ff @(posedge clk) if (re) assert (raddr < AW'(DEPTH));
endmodule
