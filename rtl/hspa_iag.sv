// hspa_iag: runtime address generator of one HSPA+ lane, shared between
// interleaver and deinterleaver mode. Both use the same kernel (a*b) mod c
// with c = p-1; the mode only chooses operands and lookup tables:
//   INTL   (input n = column-major position in the R x C matrix)
//          j = n / R, i = n mod R, row a = T(i),
//          U = s((j * r_a) mod (p-1)) with the C = p-1 / p / p+1 special
//          cases of TS 25.212, output = a*C + U (natural bit index);
//   DEINTL (input k = natural bit index)
//          a = k / C, u = k mod C, i = T^-1(a),
//          j = (s^-1(u) * m_a) mod (p-1) with the same special cases,
//          output = j*R + i (column-major matrix position).
// `ok` is low when the position holds a pruned dummy bit (output >= K in
// INTL mode, k >= K in DEINTL mode). This design keeps the interleaved
// domain unpruned: interleaved addresses are matrix positions 0..R*C-1.
// Each lane owns its copies of s and s^-1 (written by hspa_preproc).
// Timing: one cycle from (in_valid, idx) to (out_valid, addr, ok).
module hspa_iag
  import tdec_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // runtime parameters from the preprocessing unit
  input  logic [ADDR_W-1:0] K,
  input  logic [4:0]        R,
  input  logic [8:0]        C,
  input  logic [8:0]        p,
  input  ccase_e            ccase,
  input  logic              swap,
  input  logic [19:0][8:0]  r,
  input  logic [19:0][7:0]  m,
  input  logic [19:0][4:0]  t_row,
  input  logic [19:0][4:0]  t_inv,
  input  logic              s_we,
  input  logic [7:0]        s_addr,
  input  logic [7:0]        s_data,
  input  logic              si_we,
  input  logic [7:0]        si_addr,
  input  logic [7:0]        si_data,
  // address request
  input  iag_mode_e         mode,
  input  logic              in_valid,
  input  logic [ADDR_W-1:0] idx,
  output logic              out_valid,
  output logic [ADDR_W-1:0] addr,
  output logic              ok
);
  logic [7:0] s_raddr, s_rdata, si_raddr, si_rdata;
  hspa_param_ram u_s  (.clk, .we(s_we),  .waddr(s_addr),  .wdata(s_data),
                       .raddr(s_raddr),  .rdata(s_rdata));
  hspa_param_ram u_si (.clk, .we(si_we), .waddr(si_addr), .wdata(si_data),
                       .raddr(si_raddr), .rdata(si_rdata));

  logic [8:0]  pm1;
  logic [8:0]  col, row_c;      // INTL: j ; DEINTL: u
  logic [4:0]  i_r, a;
  logic [8:0]  kern_a, kern_b;
  logic [16:0] kern;
  logic [ADDR_W:0] res;
  logic        res_ok;

  assign pm1 = p - 9'd1;
  // the shared kernel
  assign kern = 17'((18'(kern_a) * 18'(kern_b)) % 18'(pm1));

  // operand selection (depends only on the input index and parameters)
  always_comb begin
    col = '0; row_c = '0; i_r = '0; a = '0;
    if (mode == INTL) begin
      col = 9'(idx / ADDR_W'(R));
      i_r = 5'(idx % ADDR_W'(R));
      a   = t_row[i_r];
    end else begin
      a     = 5'(idx / ADDR_W'(C));
      row_c = 9'(idx % ADDR_W'(C));
      i_r   = t_inv[a];
    end
  end

  assign si_raddr = (ccase == C_PM1) ? row_c[7:0] : 8'(row_c - 9'd1);
  assign kern_a   = (mode == INTL) ? col : 9'(si_rdata);
  assign kern_b   = (mode == INTL) ? r[a] : 9'(m[a]);
  assign s_raddr  = kern[7:0];

  // special cases and final address
  always_comb begin
    logic [8:0] u, jj;
    u = '0; jj = '0;
    if (mode == INTL) begin
      u = 9'(s_rdata) + 9'd1;                 // s((j*r_a) mod (p-1))
      if (ccase == C_PM1) u = 9'(s_rdata);     // s(.) - 1
      else if (col == pm1) u = 9'd0;           // U(p-1) = 0
      else if (col == p) u = p;                // U(p) = p (C = p+1)
      if (ccase == C_PP1 && swap && a == R - 5'd1) begin
        if (col == 9'd0) u = p;
        else if (col == p) u = 9'd1;
      end
      res    = (ADDR_W+1)'(a) * (ADDR_W+1)'(C) + (ADDR_W+1)'(u);
      res_ok = (idx < ADDR_W'(R) * ADDR_W'(C)) && (res < (ADDR_W+1)'(K));
    end else begin
      jj = 9'(kern);
      if (ccase != C_PM1) begin
        if (row_c == 9'd0) jj = pm1;
        else if (ccase == C_PP1 && row_c == p) jj = p;
        if (ccase == C_PP1 && swap && a == R - 5'd1) begin
          if (row_c == p) jj = 9'd0;
          else if (row_c == 9'd1) jj = p;
        end
      end
      res    = (ADDR_W+1)'(jj) * (ADDR_W+1)'(R) + (ADDR_W+1)'(i_r);
      res_ok = (idx < K);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; addr <= '0; ok <= 1'b0;
    end else begin
      out_valid <= in_valid;
      addr      <= res[ADDR_W-1:0];
      ok        <= in_valid && res_ok;
    end
  end
endmodule
