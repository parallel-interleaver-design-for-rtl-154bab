// control_unit: sequences one decoding job of the multi-standard decoder.
// Inputs are the block size K and the HSPA+/LTE mode select. For HSPA+ it
// first starts the interleaver preprocessing and waits for it. It then sets
// the bank width (words per extrinsic memory module: ceil(R*C/32) for HSPA+,
// ceil(K/64) for LTE) and runs half iterations: during a half iteration
// `half_active` tells the decoders to produce LLRs; when they report
// `dec_done`, the unit waits until the write network has drained
// (`net_idle`) before the next half starts, because the next half reads the
// memories in order. Half iterations alternate the write mode: even halves
// write through the deinterleaver, odd halves through the interleaver
// (balanced scheduling), up to `max_half` halves (11 = 5.5 iterations).
// The FSM itself is this design's; the paper only names the unit.
module control_unit
  import tdec_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] k_in,
  input  logic              lte_in,
  input  logic [3:0]        max_half,
  output logic              pre_start,
  input  logic              pre_done,
  input  logic [ADDR_W-1:0] rc,          // R*C from the preprocessing unit
  input  logic              dec_done,
  input  logic              net_idle,
  output logic [ADDR_W-1:0] K,
  output logic              lte,
  output logic [OFF_W-1:0]  bank_w,
  output logic              half_active,
  output logic [3:0]        half_idx,
  output iag_mode_e         mode,
  output logic              busy,
  output logic              done,
  output logic [15:0]       half_cycles
);
  typedef enum logic [2:0] {IDLE, PRE0, PRE1, SETW, RUN, DRAIN, FIN} st_e;
  st_e st;
  logic [15:0] cyc;

  assign pre_start   = (st == PRE0);
  assign half_active = (st == RUN);
  assign mode        = half_idx[0] ? INTL : DEINTL;
  assign busy        = (st != IDLE) && (st != FIN);
  assign done        = (st == FIN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; K <= '0; lte <= 1'b0; bank_w <= '0; half_idx <= '0;
      cyc <= '0; half_cycles <= '0;
    end else begin
      unique case (st)
        IDLE, FIN: if (start) begin
          K <= k_in; lte <= lte_in; half_idx <= '0;
          st <= lte_in ? SETW : PRE0;
        end
        PRE0: st <= PRE1;
        PRE1: if (pre_done) st <= SETW;
        SETW: begin
          if (lte) bank_w <= OFF_W'((K + ADDR_W'(NL_LTE - 1)) / ADDR_W'(NL_LTE));
          else     bank_w <= OFF_W'((rc + ADDR_W'(NL_HSPA - 1)) / ADDR_W'(NL_HSPA));
          cyc <= '0;
          st  <= RUN;
        end
        RUN: begin
          cyc <= cyc + 1'b1;
          if (dec_done) st <= DRAIN;
        end
        DRAIN: begin
          cyc <= cyc + 1'b1;
          if (net_idle) begin
            half_cycles <= cyc;
            cyc <= '0;
            if (half_idx + 1'b1 >= max_half) st <= FIN;
            else begin half_idx <= half_idx + 1'b1; st <= RUN; end
          end
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
