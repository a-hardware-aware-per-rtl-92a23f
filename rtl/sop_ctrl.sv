// sop_ctrl: tile sequencer of the SOP matrix unit.
//
// One tile computes Y[T, M] = sum over K-blocks b of
// (s_X[:,b] x s_W[:,b]) o (Q_X[:,G_b] Q_W[:,G_b]^T). The sequencer runs
// the two loops of that micro-kernel: the in-block step r = 0..G-1 (one
// rank-1 quantised outer product per accepted operand beat) and the
// K-block count b = 0..n_kblk-1. It marks the first beat of a block
// (scale words are taken then) and the last one, and raises apply for one
// cycle after each last beat, when every output position scales and
// accumulates the finished block.
//
// Handshake: the operand source presents beat_valid; a beat is accepted
// (step) when the sequencer is running and the sparse correction unit does
// not hold it. Without holds the unit accepts one beat per cycle, G beats
// per K-block; done rises two cycles after the tile's last beat (one for
// the final scale-and-accumulate, one to register the state) and stays
// high until the next start. start pulses clr to zero the array.
// Counters report busy cycles and cycles lost to sparse-unit holds.
module sop_ctrl #(
  parameter int unsigned G = 16
)(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] n_kblk,
  input  logic        beat_valid,
  input  logic        hold,
  output logic        beat_ready,
  output logic        step,
  output logic        first,
  output logic        last,
  output logic [15:0] k_cur,
  output logic        apply,
  output logic        clr,
  output logic        run,
  output logic        busy,
  output logic        done,
  output logic [31:0] cyc_count,
  output logic [31:0] hold_count
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_DONE} state_t;
  state_t state;

  localparam int unsigned RW = (G > 1) ? $clog2(G) : 1;
  logic [RW-1:0] r;
  logic [15:0]   b;

  assign clr        = start && (state != S_RUN) && (state != S_DRAIN);
  assign beat_ready = (state == S_RUN) && !hold;
  assign step       = (state == S_RUN) && beat_valid && !hold;
  assign first      = (r == '0);
  assign last       = (r == RW'(G - 1));
  assign k_cur      = b * 16'(G) + 16'(r);
  assign run        = (state == S_RUN);
  assign busy       = (state == S_RUN) || (state == S_DRAIN);
  assign done       = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      r          <= '0;
      b          <= '0;
      apply      <= 1'b0;
      cyc_count  <= '0;
      hold_count <= '0;
    end else begin
      apply <= step && last;
      case (state)
        S_IDLE, S_DONE: if (clr) begin
          r          <= '0;
          b          <= '0;
          cyc_count  <= '0;
          hold_count <= '0;
          state      <= (n_kblk == 16'd0) ? S_DONE : S_RUN;
        end
        S_RUN: begin
          cyc_count <= cyc_count + 32'd1;
          if (beat_valid && hold) hold_count <= hold_count + 32'd1;
          if (step) begin
            if (last) begin
              r <= '0;
              b <= b + 16'd1;
              if (b == n_kblk - 16'd1) state <= S_DRAIN;
            end else begin
              r <= r + RW'(1);
            end
          end
        end
        S_DRAIN: begin
          cyc_count <= cyc_count + 32'd1;
          state     <= S_DONE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_step_only_when_running: assert property (@(posedge clk) disable iff (!rst_n)
    step |-> (state == S_RUN));

endmodule
