// read_ctrl: sequencer of a QMM operation.
//
// On start it latches the operation descriptor and walks four nested loops,
// one step per cycle:
//   row group rg (outermost) -> column group cg -> bit-plane t -> chunk c.
// Each step reads one activation entry and one operand entry and feeds one
// cycle of the DPUs. For every (rg, cg) pair the DPUs accumulate
// xbits * n_chunks steps: the bit-plane loop runs most significant bit first
// and, inside it, the J-element chunks of the reduction. The step flags are
//   first = (t == 0 && c == 0)          start a new dot product,
//   dbl   = (t != 0 && c == 0)          double the accumulator (next bit),
//   last  = (t == xbits-1 && c == n_chunks-1)  result complete.
// After the last step it waits DRAIN cycles for the pipeline (buffer read,
// parallel to serial, DPU) to empty, pulses flush for the serial-to-parallel
// and transpose stages, then pulses done. busy is high from start to done.
// A step is issued in every cycle of RUN; there is no stall.
// The loop order and flags are this design's choice; the paper names the
// block and its control connection to the address generator and the DPUs.
module read_ctrl
  import beta_pkg::*;
#(
  parameter int unsigned DRAIN = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  qmm_desc_t   desc_in,
  output qmm_desc_t   desc,       // latched descriptor
  output logic        busy,
  output logic        done,
  output logic        flush,
  // current step
  output logic        step_valid,
  output logic [15:0] rg,
  output logic [15:0] cg,
  output logic [15:0] ch,
  output logic [2:0]  plane,
  output logic        first,
  output logic        dbl,
  output logic        last
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_FLUSH} state_e;
  state_e state;
  logic [3:0] t;
  logic [7:0] dcnt;

  logic end_c, end_t, end_cg, end_rg;
  assign end_c  = (ch == desc.n_chunks - 16'd1);
  assign end_t  = ({12'd0, t} == {12'd0, desc.xbits} - 16'd1);
  assign end_cg = (cg == desc.n_colgrp - 16'd1);
  assign end_rg = (rg == desc.n_rowgrp - 16'd1);

  assign step_valid = (state == S_RUN);
  assign plane      = 3'(desc.xbits - 4'd1 - t);
  assign first      = (t == 4'd0) && (ch == 16'd0);
  assign dbl        = (t != 4'd0) && (ch == 16'd0);
  assign last       = end_t && end_c;
  assign busy       = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      desc  <= '0;
      rg    <= '0;
      cg    <= '0;
      ch    <= '0;
      t     <= '0;
      dcnt  <= '0;
      done  <= 1'b0;
      flush <= 1'b0;
    end else begin
      done  <= 1'b0;
      flush <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          desc  <= desc_in;
          rg    <= '0;
          cg    <= '0;
          ch    <= '0;
          t     <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (!end_c) ch <= ch + 16'd1;
          else begin
            ch <= '0;
            if (!end_t) t <= t + 4'd1;
            else begin
              t <= '0;
              if (!end_cg) cg <= cg + 16'd1;
              else begin
                cg <= '0;
                if (!end_rg) rg <= rg + 16'd1;
                else begin
                  dcnt  <= 8'(DRAIN);
                  state <= S_DRAIN;
                end
              end
            end
          end
        end
        S_DRAIN: begin
          if (dcnt == 8'd0) begin
            flush <= 1'b1;
            state <= S_FLUSH;
          end else dcnt <= dcnt - 8'd1;
        end
        S_FLUSH: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A started operation must have non-empty loops.
  assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> (desc_in.xbits != 4'd0 && desc_in.xbits <= 4'd8 &&
      desc_in.n_chunks != 16'd0 && desc_in.n_rowgrp != 16'd0 && desc_in.n_colgrp != 16'd0));
endmodule
