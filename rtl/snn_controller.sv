// snn_controller: sequencer for one inference or one training step.
//
// Forward pass: for each time step t = 0 .. T_STEPS-1 the layers are swept
// in order, hidden 1 (G1 words), hidden 2 (G2 words), output (G3 words), one
// weight word per clock, so a step costs G1+G2+G3 clocks (16+5+5 = 26 for
// 64-20-20-10) and the pass T_STEPS*(G1+G2+G3) clocks plus one drain clock.
// `step_end` marks the last word of a layer's step. The shared digital timer
// holds t and advances once per full step.
//
// Training (train = 1) then runs, each phase one word per clock:
//   DECIDE  latch the class          DELTA  latch output deltas
//   SGG     latch backward spikes    UPD_O  update output weights (G3 words)
//   BP2     backward steps 0..T_STEPS-1, reading output-layer words (G3 per
//           step) for the hidden-2 backward neurons
//   UPD_H2  update hidden-2 weights  BP1  backward steps over hidden-2 words
//   UPD_H1  update hidden-1 weights  FINISH  done pulse
// A one-clock clear state before each backward pass resets the timer and the
// backward neurons and lets the last update write settle. The paper does
// not say whether backpropagation sees the old or the new weights; its
// backward-pass block diagram links the output weight updater to the hidden
// updater, and this design reads that as "update first", so backpropagation
// runs through already updated weights. The state machine is this design's.
//
// Interface: `start` (in IDLE) begins; `busy` is high until the one-clock
// `done`. In IDLE the host may read weight words through rb_* (OP_READ).
// Issue-stage outputs: op, addr, now, step_end. Data-stage outputs (one clock
// later): bp*_acc, bp_grp, bp_now.
module snn_controller
  import snn_pkg::*;
#(
  parameter int G1      = 16,
  parameter int G2      = 5,
  parameter int G3      = 5,
  parameter int T_STEPS = TMAX,
  localparam int AW     = $clog2(G1 + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          train,
  input  logic          rb_en,
  input  logic [1:0]    rb_layer,
  input  logic [AW-1:0] rb_addr,
  output layer_op_e     op [3],
  output logic [AW-1:0] addr,
  output stime_t        now,
  output logic          step_end,
  output logic          clear_fwd,
  output logic          clear_bp2,
  output logic          clear_bp1,
  output logic          dec_en,
  output logic          delta_en,
  output logic          sgg_en,
  output logic          bp2_acc,
  output logic          bp1_acc,
  output logic [AW-1:0] bp_grp,
  output stime_t        bp_now,
  output logic          busy,
  output logic          done
);

  typedef enum logic [3:0] {
    S_IDLE, S_FWD, S_FWD_DRAIN, S_DECIDE, S_DELTA, S_SGG, S_UPD_O,
    S_BP2_CLR, S_BP2, S_UPD_H2, S_BP1_CLR, S_BP1, S_UPD_H1, S_FINISH
  } state_e;

  state_e        state;
  logic [1:0]    lay;
  logic [AW-1:0] a;
  logic          t_clear, t_inc, t_last;
  logic [AW-1:0] g_cur;
  logic          word_last;

  digital_timer #(.T_STEPS(T_STEPS)) u_timer (
    .clk, .rst_n, .clear(t_clear), .inc(t_inc), .now, .last(t_last)
  );

  // words swept by the current phase
  always_comb begin
    unique case (state)
      S_FWD:           g_cur = (lay == 2'd0) ? AW'(G1) : (lay == 2'd1) ? AW'(G2) : AW'(G3);
      S_UPD_O, S_BP2:  g_cur = AW'(G3);
      S_UPD_H2, S_BP1: g_cur = AW'(G2);
      S_UPD_H1:        g_cur = AW'(G1);
      default:         g_cur = AW'(1);
    endcase
  end
  assign word_last = (a == g_cur - 1'b1);

  always_comb begin
    op        = '{default: OP_NOP};
    addr      = a;
    step_end  = 1'b0;
    t_clear   = 1'b0;
    t_inc     = 1'b0;
    clear_fwd = 1'b0;
    clear_bp2 = 1'b0;
    clear_bp1 = 1'b0;
    dec_en    = 1'b0;
    delta_en  = 1'b0;
    sgg_en    = 1'b0;
    unique case (state)
      S_IDLE: begin
        addr = rb_addr;
        if (rb_en && rb_layer < 2'd3) op[rb_layer] = OP_READ;
        if (start) begin
          clear_fwd = 1'b1;
          t_clear   = 1'b1;
        end
      end
      S_FWD: begin
        op[lay]  = OP_FWD;
        step_end = word_last;
        t_inc    = word_last && (lay == 2'd2);
      end
      S_DECIDE:  dec_en   = 1'b1;
      S_DELTA:   delta_en = 1'b1;
      S_SGG:     sgg_en   = 1'b1;
      S_UPD_O:   op[2] = OP_UPD;
      S_BP2_CLR: begin
        clear_bp2 = 1'b1;
        t_clear   = 1'b1;
      end
      S_BP1_CLR: begin
        clear_bp1 = 1'b1;
        t_clear   = 1'b1;
      end
      S_BP2: begin
        op[2] = OP_READ;
        t_inc = word_last;
      end
      S_UPD_H2:  op[1] = OP_UPD;
      S_BP1: begin
        op[1] = OP_READ;
        t_inc = word_last;
      end
      S_UPD_H1:  op[0] = OP_UPD;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      lay     <= '0;
      a       <= '0;
      bp2_acc <= 1'b0;
      bp1_acc <= 1'b0;
      bp_grp  <= '0;
      bp_now  <= '0;
      done    <= 1'b0;
    end else begin
      bp2_acc <= (state == S_BP2);
      bp1_acc <= (state == S_BP1);
      bp_grp  <= a;
      bp_now  <= now;
      done    <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_FWD;
          lay   <= '0;
          a     <= '0;
        end
        S_FWD: begin
          if (!word_last) a <= a + 1'b1;
          else begin
            a <= '0;
            if (lay != 2'd2) lay <= lay + 1'b1;
            else begin
              lay <= '0;
              if (t_last) state <= S_FWD_DRAIN;
            end
          end
        end
        S_FWD_DRAIN: state <= S_DECIDE;
        S_DECIDE:    state <= train ? S_DELTA : S_FINISH;
        S_DELTA:     state <= S_SGG;
        S_SGG:       state <= S_UPD_O;
        S_UPD_O, S_UPD_H2, S_UPD_H1: begin
          if (!word_last) a <= a + 1'b1;
          else begin
            a <= '0;
            state <= (state == S_UPD_O) ? S_BP2_CLR :
                     (state == S_UPD_H2) ? S_BP1_CLR : S_FINISH;
          end
        end
        S_BP2_CLR: state <= S_BP2;
        S_BP1_CLR: state <= S_BP1;
        S_BP2, S_BP1: begin
          if (!word_last) a <= a + 1'b1;
          else begin
            a <= '0;
            if (t_last) state <= (state == S_BP2) ? S_UPD_H2 : S_UPD_H1;
          end
        end
        S_FINISH: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
