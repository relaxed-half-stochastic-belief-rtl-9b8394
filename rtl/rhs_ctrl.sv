// rhs_ctrl -- decoding controller of the RHS decoder.
//
// Runs the BP loop: after `start` it pulses `init` (load channel values,
// clear trackers), then runs iterations of K bit periods each.  bit_en is
// high in every decoding cycle, `last` in the last bit period of an
// iteration, when the trackers update.  In the first cycle of each
// following iteration the syndrome result `syn_ok` is sampled: a valid
// codeword ends decoding with success.
//
// Phase I runs at most L1 iterations.  Its gear (which tracker table the VNs
// use, i.e. the beta-sequence {beta_1^l, beta_2^(L-l)}) is 0 for the first
// GEAR_ITER iterations and 1 afterwards.  If Phase I ends without a
// codeword and L2 > 0, Phase II runs up to L2 more iterations with VN
// harmonisation enabled (gear 1), continuing from the Phase-I tracker
// state.  Otherwise decoding ends with failure.
//
// Timing: start is taken in IDLE; a decode that stops after t iterations
// raises `done` for one cycle K*t + 2 cycles after the start cycle (one extra
// cycle samples the syndrome, one is the done state).  `iters` (total iterations), `success` and
// `used_phase2` are held until the next start.  The iteration limits, the
// continuation into Phase II and the handshake are this design's choices;
// the paper gives the loop, the beta-sequence and the two-phase scheme.
module rhs_ctrl #(
  parameter int unsigned K         = 2,
  parameter int unsigned L1        = 100,
  parameter int unsigned L2        = 50,
  parameter int unsigned GEAR_ITER = 5
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        syn_ok,
  output logic        init,
  output logic        bit_en,
  output logic        last,
  output logic        gear,
  output logic        harm_en,
  output logic        busy,
  output logic        done,
  output logic        success,
  output logic        used_phase2,
  output logic [15:0] iters
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_t;

  localparam int unsigned PW = (K > 1) ? $clog2(K) : 1;

  state_t        state;
  logic [PW-1:0] phase;
  logic [15:0]   it;       // iterations completed in the current phase
  logic          ph2;
  logic          at_check, stop_ok, limit, stop_fail, to_ph2;

  assign at_check  = (state == S_RUN) && (phase == '0) && (iters != '0);
  assign stop_ok   = at_check && syn_ok;
  assign limit     = at_check && (it == 16'(ph2 ? L2 : L1));
  assign to_ph2    = limit && !stop_ok && !ph2 && (L2 > 0);
  assign stop_fail = limit && !stop_ok && !to_ph2;

  assign init    = (state == S_IDLE) && start;
  assign bit_en  = (state == S_RUN) && !stop_ok && !stop_fail;
  assign last    = bit_en && (int'(phase) == int'(K) - 1);
  assign gear    = ph2 || to_ph2 || (it >= 16'(GEAR_ITER));
  assign harm_en = ph2 || to_ph2;
  assign busy    = (state == S_RUN);
  assign done    = (state == S_DONE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      phase       <= '0;
      it          <= '0;
      ph2         <= 1'b0;
      iters       <= '0;
      success     <= 1'b0;
      used_phase2 <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state       <= S_RUN;
          phase       <= '0;
          it          <= '0;
          ph2         <= 1'b0;
          iters       <= '0;
          success     <= 1'b0;
          used_phase2 <= 1'b0;
        end
        S_RUN: begin
          if (stop_ok || stop_fail) begin
            state   <= S_DONE;
            success <= stop_ok;
          end else begin
            if (to_ph2) begin
              ph2         <= 1'b1;
              used_phase2 <= 1'b1;
              it          <= last ? 16'd1 : 16'd0;
            end
            if (last) begin
              phase <= '0;
              iters <= iters + 16'd1;
              if (!to_ph2) it <= it + 16'd1;
            end else begin
              phase <= phase + PW'(1);
            end
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Message bits only flow while decoding; done lasts one cycle.
  assert property (@(posedge clk) disable iff (!rst_n) bit_en |-> busy);
  assert property (@(posedge clk) disable iff (!rst_n) done |=> !done);
endmodule
