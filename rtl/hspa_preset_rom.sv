// hspa_preset_rom: preset parameter storage of the HSPA+ interleaver, the
// static tables of the 3GPP UMTS/HSPA+ interleaver (TS 25.212): the 52
// primes p from 7 to 257 with their primitive roots v (port a), a second read
// port on the prime list (port b, used to pick the primes q_i), and the
// inter-row permutation patterns T(i) for R = 5, 10 and 20 rows (two
// patterns for 20 rows). Combinational lookups. The paper stores r_i and m_i
// in ROMs as well; this design computes them in the preprocessing unit
// instead, so those tables are absent.
module hspa_preset_rom (
  input  logic [5:0] a_idx,
  output logic [8:0] a_p,
  output logic [4:0] a_v,
  input  logic [5:0] b_idx,
  output logic [8:0] b_p,
  input  logic [1:0] t_sel,   // 0: R=5, 1: R=10, 2: R=20 pattern A, 3: R=20 pattern B
  input  logic [4:0] t_i,
  output logic [4:0] t_val
);
  localparam int NP = 52;
  localparam logic [8:0] PRIME [NP] = '{
    9'd7, 9'd11, 9'd13, 9'd17, 9'd19, 9'd23, 9'd29, 9'd31, 9'd37, 9'd41, 9'd43, 9'd47, 9'd53,
    9'd59, 9'd61, 9'd67, 9'd71, 9'd73, 9'd79, 9'd83, 9'd89, 9'd97, 9'd101, 9'd103, 9'd107, 9'd109,
    9'd113, 9'd127, 9'd131, 9'd137, 9'd139, 9'd149, 9'd151, 9'd157, 9'd163, 9'd167, 9'd173, 9'd179,
    9'd181, 9'd191, 9'd193, 9'd197, 9'd199, 9'd211, 9'd223, 9'd227, 9'd229, 9'd233, 9'd239, 9'd241,
    9'd251, 9'd257};
  localparam logic [4:0] ROOT [NP] = '{
    5'd3, 5'd2, 5'd2, 5'd3, 5'd2, 5'd5, 5'd2, 5'd3, 5'd2, 5'd6, 5'd3, 5'd5, 5'd2,
    5'd2, 5'd2, 5'd2, 5'd7, 5'd5, 5'd3, 5'd2, 5'd3, 5'd5, 5'd2, 5'd5, 5'd2, 5'd6,
    5'd3, 5'd3, 5'd2, 5'd3, 5'd2, 5'd2, 5'd6, 5'd5, 5'd2, 5'd5, 5'd2, 5'd2,
    5'd2, 5'd19, 5'd5, 5'd2, 5'd3, 5'd2, 5'd3, 5'd2, 5'd6, 5'd3, 5'd7, 5'd7,
    5'd6, 5'd3};
  localparam logic [4:0] TA [20] = '{5'd19, 5'd9, 5'd14, 5'd4, 5'd0, 5'd2, 5'd5, 5'd7, 5'd12, 5'd18,
                                     5'd16, 5'd13, 5'd17, 5'd15, 5'd3, 5'd1, 5'd6, 5'd11, 5'd8, 5'd10};
  localparam logic [4:0] TB [20] = '{5'd19, 5'd9, 5'd14, 5'd4, 5'd0, 5'd2, 5'd5, 5'd7, 5'd12, 5'd18,
                                     5'd10, 5'd8, 5'd13, 5'd17, 5'd3, 5'd1, 5'd16, 5'd6, 5'd15, 5'd11};

  assign a_p = (int'(a_idx) < NP) ? PRIME[a_idx] : 9'd0;
  assign a_v = (int'(a_idx) < NP) ? ROOT[a_idx]  : 5'd0;
  assign b_p = (int'(b_idx) < NP) ? PRIME[b_idx] : 9'd0;

  always_comb begin
    t_val = '0;
    unique case (t_sel)
      2'd0: t_val = (t_i < 5'd5)  ? 5'd4 - t_i : 5'd0;
      2'd1: t_val = (t_i < 5'd10) ? 5'd9 - t_i : 5'd0;
      2'd2: t_val = (t_i < 5'd20) ? TA[t_i] : 5'd0;
      default: t_val = (t_i < 5'd20) ? TB[t_i] : 5'd0;
    endcase
  end
endmodule
