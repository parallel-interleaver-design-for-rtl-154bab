// hspa_preproc: preprocessing unit of the unified HSPA+ interleaver. One
// copy serves all lanes. On `start` it takes the block size K (40..5114) and
// works through the 3GPP TS 25.212 set-up, one step per cycle:
//   FINDP  rows R (5/10/20), prime p and columns C (p-1, p or p+1), scanning
//          the prime ROM until K <= R*(p+1) (p = 53, C = p for 481..530);
//   SGEN   base sequence s(0)=1, s(j)=(v*s(j-1)) mod p for j = 0..p-2,
//          streamed to every lane: s RAM gets s(j)-1 at address j, the
//          inverse RAM gets j at address s(j)-1;
//   QSEL   q_0 = 1, q_i = next prime > 6 with gcd(q_i, p-1) = 1, stored as
//          r_T(i) = q_i, together with T(i) and its inverse;
//   MINV   m_i = inverse of r_i modulo p-1 (sequential search), used only in
//          deinterleaver mode.
// `done` rises when every runtime parameter is valid (worst case about 5500
// cycles, K = 5114). The set-up is the standard's; computing r_i and m_i
// instead of reading them from ROMs, and the search for m_i, are this
// design's choices.
module hspa_preproc
  import tdec_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] k_in,
  output logic              busy,
  output logic              done,
  output logic [4:0]        R,
  output logic [8:0]        C,
  output logic [8:0]        p,
  output ccase_e            ccase,
  output logic              swap,
  output logic [19:0][8:0]  r,
  output logic [19:0][7:0]  m,
  output logic [19:0][4:0]  t_row,     // T(i)
  output logic [19:0][4:0]  t_inv,     // i such that T(i) = row
  output logic              s_we,
  output logic [7:0]        s_addr,
  output logic [7:0]        s_data,
  output logic              si_we,
  output logic [7:0]        si_addr,
  output logic [7:0]        si_data
);
  typedef enum logic [2:0] {IDLE, FINDP, SGEN, QSEL, MINV, DONE} st_e;
  st_e st;

  logic [ADDR_W-1:0] K;
  logic [5:0]  pidx, qidx;
  logic [1:0]  tsel;
  logic [8:0]  a_p, b_p, sv, j;
  logic [4:0]  a_v, t_val, i;
  logic [8:0]  x;

  hspa_preset_rom u_rom (.a_idx(pidx), .a_p, .a_v, .b_idx(qidx), .b_p,
                         .t_sel(tsel), .t_i(i), .t_val);

  assign busy = (st != IDLE) && (st != DONE);
  assign done = (st == DONE);

  // Base-sequence stream to the lane parameter RAMs.
  assign s_we    = (st == SGEN);
  assign s_addr  = j[7:0];
  assign s_data  = 8'(sv - 9'd1);
  assign si_we   = (st == SGEN);
  assign si_addr = 8'(sv - 9'd1);
  assign si_data = j[7:0];

  logic [13:0] rp1, rpm, rpp;
  assign rp1 = 14'(R) * (14'(a_p) + 14'd1);
  assign rpm = 14'(R) * (14'(a_p) - 14'd1);
  assign rpp = 14'(R) * 14'(a_p);

  logic [8:0] pm1;
  assign pm1 = p - 9'd1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; K <= '0; pidx <= '0; qidx <= '0; tsel <= '0;
      R <= 5'd5; C <= '0; p <= 9'd7; ccase <= C_P; swap <= 1'b0;
      r <= '0; m <= '0; t_row <= '0; t_inv <= '0; sv <= 9'd1; j <= '0; i <= '0; x <= 9'd1;
    end else begin
      unique case (st)
        IDLE, DONE: if (start) begin
          K    <= k_in;
          pidx <= '0;
          r <= '0; m <= '0; t_row <= '0; t_inv <= '0;
          if (k_in <= 13'd159) begin R <= 5'd5; tsel <= 2'd0; end
          else if (k_in <= 13'd200 || (k_in >= 13'd481 && k_in <= 13'd530)) begin R <= 5'd10; tsel <= 2'd1; end
          else begin
            R    <= 5'd20;
            tsel <= ((k_in >= 13'd2281 && k_in <= 13'd2480) || (k_in >= 13'd3161 && k_in <= 13'd3210)) ? 2'd2 : 2'd3;
          end
          st <= FINDP;
        end
        FINDP: begin
          if (K >= 13'd481 && K <= 13'd530) begin
            if (a_p == 9'd53) begin
              p <= a_p; C <= a_p; ccase <= C_P; swap <= 1'b0;
              sv <= 9'd1; j <= '0; st <= SGEN;
            end else pidx <= pidx + 1'b1;
          end else if (14'(K) <= rp1) begin
            p <= a_p; sv <= 9'd1; j <= '0; st <= SGEN;
            if (14'(K) <= rpm)      begin C <= a_p - 9'd1; ccase <= C_PM1; swap <= 1'b0; end
            else if (14'(K) <= rpp) begin C <= a_p;        ccase <= C_P;   swap <= 1'b0; end
            else begin C <= a_p + 9'd1; ccase <= C_PP1; swap <= (14'(K) == rp1); end
          end else pidx <= pidx + 1'b1;
        end
        SGEN: begin
          // s(j) written this cycle; next value by (v * s) mod p
          sv <= 9'((14'(a_v) * 14'(sv)) % 14'(p));
          if (j == p - 9'd2) begin
            j <= '0; i <= '0; qidx <= '0; st <= QSEL;
          end else j <= j + 1'b1;
        end
        QSEL: begin
          if (i == 5'd0) begin
            r[t_val]     <= 9'd1;
            t_row[0]     <= t_val;
            t_inv[t_val] <= 5'd0;
            i <= i + 1'b1;
          end else if (i == R) begin
            i <= '0; x <= 9'd1; st <= MINV;
          end else begin
            if ((pm1 % b_p) != 9'd0) begin
              r[t_val]     <= b_p;
              t_row[i]     <= t_val;
              t_inv[t_val] <= i;
              i <= i + 1'b1;
            end
            qidx <= qidx + 1'b1;
          end
        end
        MINV: begin
          if (i == R) st <= DONE;
          else if (((18'(r[i]) * 18'(x)) % 18'(pm1)) == 18'd1) begin
            m[i] <= x[7:0]; i <= i + 1'b1; x <= 9'd1;
          end else x <= x + 1'b1;
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
