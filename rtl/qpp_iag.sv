// qpp_iag: address generator of one LTE lane. The QPP interleaver is
// f(x) = (f1*x + f2*x^2) mod K; its inverse is again a polynomial of degree
// 2, 3 or 4 mod K. One datapath evaluates
//   y = (c1*x + c2*x^2 + c3*x^3 + c4*x^4) mod K
// and serves both modes: INTL uses (f1, f2, 0, 0), DEINTL the inverse
// coefficients (g1..g4). Powers are reduced mod K after each multiply, so
// all products fit in 26 bits. The coefficients are configuration inputs
// (the 188-entry LTE table is not stored). The paper evaluates the
// polynomials recursively; this lane evaluates them directly from the input
// index so that any lane may present any index -- this design's choice.
// Timing: one cycle from (in_valid, idx) to (out_valid, addr).
module qpp_iag
  import tdec_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] K,
  input  logic [ADDR_W-1:0] f1,
  input  logic [ADDR_W-1:0] f2,
  input  logic [ADDR_W-1:0] g1,
  input  logic [ADDR_W-1:0] g2,
  input  logic [ADDR_W-1:0] g3,
  input  logic [ADDR_W-1:0] g4,
  input  iag_mode_e         mode,
  input  logic              in_valid,
  input  logic [ADDR_W-1:0] idx,
  output logic              out_valid,
  output logic [ADDR_W-1:0] addr,
  output logic              ok
);
  localparam int PW = 2 * ADDR_W;

  // (a*b) mod K, a and b already below K
  function automatic logic [ADDR_W-1:0] mulmod(input logic [ADDR_W-1:0] a,
                                               input logic [ADDR_W-1:0] b,
                                               input logic [ADDR_W-1:0] k);
    return ADDR_W'((PW'(a) * PW'(b)) % PW'(k));
  endfunction

  logic [ADDR_W-1:0] x1, x2, x3, x4, c1, c2, c3, c4, y;
  always_comb begin
    logic [ADDR_W+1:0] acc;
    c1 = (mode == INTL) ? f1 : g1;
    c2 = (mode == INTL) ? f2 : g2;
    c3 = (mode == INTL) ? '0 : g3;
    c4 = (mode == INTL) ? '0 : g4;
    x1 = (K == '0) ? '0 : ADDR_W'(idx % K);
    x2 = mulmod(x1, x1, K);
    x3 = mulmod(x2, x1, K);
    x4 = mulmod(x3, x1, K);
    acc = (ADDR_W+2)'(mulmod(c1 % K, x1, K)) + (ADDR_W+2)'(mulmod(c2 % K, x2, K))
        + (ADDR_W+2)'(mulmod(c3 % K, x3, K)) + (ADDR_W+2)'(mulmod(c4 % K, x4, K));
    y = (K == '0) ? '0 : ADDR_W'(acc % (ADDR_W+2)'(K));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; addr <= '0; ok <= 1'b0;
    end else begin
      out_valid <= in_valid;
      addr      <= y;
      ok        <= in_valid && (idx < K);
    end
  end
endmodule
