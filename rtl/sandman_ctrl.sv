// sandman_ctrl: sequencer of the SANDMAN receiver.
//
// After `start` it issues one array-wide control word per cycle, in this
// order (n: symbol, d: data symbol, j: Y/E slot):
//   CHEST     t = 0..15      H = Y_T S_T^H / 16 (accumulate)
//   CHEST_WB                 write H
//   ERR       n = 0..15      E_T = Y_T - H S_T        (once per block)
//   repeat t_max times:
//     ERR     n = 16..63     step 1: E_D = Y_D - H S~_D
//     PZ      j = 0..7       step 2: z = E^H x
//     PJ      j = 0..7       step 3: j~ = E z (accumulate)
//     PJ_WB                  step 3: row sums into the PE+
//     NRM_E                  step 4: ||j~||^2 and 1/sqrt
//     NRM_U                  step 4: u = j~ / ||j~||
//     CH      j = 2..7       step 5: c^H = u^H E_D
//     Q       j = 2..7       step 6: Q = E_D - u c^H
//     GRAD    d = 0..47      steps 7-8: -grad = H^H Q, S~_D = prox(S~_D + 2 tau (-grad))
//   LLR       d = 0..47      soft outputs into the S FF array
// The control word is registered. `clr_s` (with start) zeroes S~_D;
// `x_shift` pulses at the end of each iteration to rotate x. `done`
// pulses for one cycle when the LLRs are complete; `busy` is high from the
// cycle after start until done. `start` is ignored while busy.
// One block takes 16+1+16 + t_max*(48+8+8+1+1+1+6+6+48) + 48 cycles
// (1351 for t_max = 10), plus one cycle from start
// to the first control word and one from the last word to done.
//
// The order of the steps and the once-only steps follow the algorithm
// outline; the exact cycle schedule is this design's.
module sandman_ctrl
  import sandman_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [3:0] t_max,
  output ctrl_t      ctrl,
  output logic       busy,
  output logic       done,
  output logic       clr_s,
  output logic       x_shift,
  output logic [3:0] iter
);
  typedef enum logic [3:0] {
    P_IDLE, P_CHEST, P_CHWB, P_ERRT, P_ERRD, P_PZ, P_PJ, P_PJWB,
    P_NRME, P_NRMU, P_CH, P_Q, P_GRAD, P_LLR
  } phase_e;

  phase_e     ph;
  logic [5:0] idx;

  function automatic logic [5:0] first_idx(input phase_e p);
    unique case (p)
      P_ERRD:     return 6'd16;
      P_CH, P_Q:  return 6'd2;
      default:    return 6'd0;
    endcase
  endfunction

  function automatic logic [5:0] last_idx(input phase_e p);
    unique case (p)
      P_CHEST, P_ERRT:  return 6'd15;
      P_ERRD:           return 6'd63;
      P_PZ, P_PJ:       return 6'd7;
      P_CH, P_Q:        return 6'd7;
      P_GRAD, P_LLR:    return 6'd47;
      default:          return 6'd0;
    endcase
  endfunction

  function automatic op_e op_of(input phase_e p);
    unique case (p)
      P_CHEST: return OP_CHEST;
      P_CHWB:  return OP_CHEST_WB;
      P_ERRT, P_ERRD: return OP_ERR;
      P_PZ:    return OP_PZ;
      P_PJ:    return OP_PJ;
      P_PJWB:  return OP_PJ_WB;
      P_NRME:  return OP_NRM_E;
      P_NRMU:  return OP_NRM_U;
      P_CH:    return OP_CH;
      P_Q:     return OP_Q;
      P_GRAD:  return OP_GRAD;
      P_LLR:   return OP_LLR;
      default: return OP_NOP;
    endcase
  endfunction

  phase_e nxt;
  always_comb begin
    unique case (ph)
      P_CHEST: nxt = P_CHWB;
      P_CHWB:  nxt = P_ERRT;
      P_ERRT:  nxt = P_ERRD;
      P_ERRD:  nxt = P_PZ;
      P_PZ:    nxt = P_PJ;
      P_PJ:    nxt = P_PJWB;
      P_PJWB:  nxt = P_NRME;
      P_NRME:  nxt = P_NRMU;
      P_NRMU:  nxt = P_CH;
      P_CH:    nxt = P_Q;
      P_Q:     nxt = P_GRAD;
      P_GRAD:  nxt = (iter + 4'd1 >= t_max) ? P_LLR : P_ERRD;
      default: nxt = P_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph      <= P_IDLE;
      idx     <= '0;
      iter    <= '0;
      ctrl    <= '{op: OP_NOP, idx: '0};
      done    <= 1'b0;
      clr_s   <= 1'b0;
      x_shift <= 1'b0;
    end else begin
      clr_s   <= 1'b0;
      x_shift <= 1'b0;
      // the last LLR column is written at the end of the cycle that carries it
      done    <= (ctrl.op == OP_LLR) && (ctrl.idx == 6'd47);
      if (ph == P_IDLE) begin
        ctrl <= '{op: OP_NOP, idx: '0};
        if (start) begin
          ph    <= P_CHEST;
          idx   <= '0;
          iter  <= '0;
          clr_s <= 1'b1;
        end
      end else begin
        ctrl <= '{op: op_of(ph), idx: idx};
        if (idx == last_idx(ph)) begin
          if (ph == P_GRAD) begin
            iter    <= iter + 4'd1;
            x_shift <= 1'b1;
          end
          if (ph == P_LLR) begin
            ph   <= P_IDLE;
          end else begin
            ph  <= nxt;
            idx <= first_idx(nxt);
          end
        end else begin
          idx <= idx + 6'd1;
        end
      end
    end
  end

  assign busy = (ph != P_IDLE) || (ctrl.op != OP_NOP);
endmodule
