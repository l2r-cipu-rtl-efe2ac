// control_unit: sequencer (CU) of the L2R-CIPU tile.
//
// One start pulse runs one pass: the inner products of the 64 windows in the
// activation buffer with the 8 kernels in the weight buffer, i.e. one group
// of T_n = 8 input channels for 64 output pixels of one output channel.
// A pass has two phases:
//   IN    N_BITS*N_BITS cycles, one per digit pair (i, j), j running fastest.
//         a_idx = i selects the activation digit, b_idx = j the weight digit.
//         ppr_sel = (j != 0) restarts each partial-product row from zero;
//         res_en = (j == N_BITS-1) folds the row into the residual and emits
//         output digit t = i; res_sel = res_en and i != 0.
//   FLUSH L_BITS+2 cycles with no operand digits, each emitting digit
//         t = N_BITS + f (res_sel = res_en = 1).
// With each digit the accumulators get shift = T-1-t (T = N_BITS+L_BITS+2
// digits) and acc_clr on digit 0 of a pass started with first = 1. If the
// pass was started with last = 1, a STORE cycle follows in which ob_we copies
// all accumulators into the output buffer. done pulses for one cycle at the
// end of the pass; busy is high from the cycle after start until done.
// A pass therefore takes N_BITS^2 + L_BITS + 2 cycles (81 with the paper's
// sizes) plus one cycle for STORE. The digit-pair schedule and the select and
// enable pattern follow the paper; the first/last pass protocol, the flush
// phase and the handshake are this design's.
module control_unit
  import l2r_pkg::sd_t, l2r_pkg::ipu_ctrl_t, l2r_pkg::acc_ctrl_t, l2r_pkg::tc_digit, l2r_pkg::SHIFT_W;
#(
  parameter int unsigned N_BITS  = l2r_pkg::N_BITS,
  parameter int unsigned K_TERMS = l2r_pkg::K_TERMS,
  parameter int unsigned L_BITS  = l2r_pkg::row_bits(K_TERMS, N_BITS),
  localparam int unsigned T_DIG   = N_BITS + L_BITS + 2,
  localparam int unsigned IW      = $clog2(N_BITS),
  localparam int unsigned FW      = $clog2(L_BITS + 2)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            first,
  input  logic            last,
  output ipu_ctrl_t       ctrl,
  output acc_ctrl_t       acc_ctrl,
  output logic [IW-1:0]   a_idx,
  output logic [IW-1:0]   b_idx,
  output logic            ob_we,
  output logic            busy,
  output logic            done
);

  typedef enum logic [1:0] {S_IDLE, S_IN, S_FLUSH, S_STORE} state_t;

  state_t         state;
  logic [IW-1:0]  i_q, j_q;
  logic [FW-1:0]  f_q;
  logic           first_q, last_q;
  int unsigned    t;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      i_q     <= '0;
      j_q     <= '0;
      f_q     <= '0;
      first_q <= 1'b0;
      last_q  <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_IN;
          i_q     <= '0;
          j_q     <= '0;
          f_q     <= '0;
          first_q <= first;
          last_q  <= last;
        end
        S_IN: begin
          if (j_q == IW'(N_BITS - 1)) begin
            j_q <= '0;
            if (i_q == IW'(N_BITS - 1)) state <= S_FLUSH;
            else                         i_q   <= i_q + 1'b1;
          end else begin
            j_q <= j_q + 1'b1;
          end
        end
        S_FLUSH: begin
          if (f_q == FW'(L_BITS + 1)) begin
            if (last_q) state <= S_STORE;
            else begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end else begin
            f_q <= f_q + 1'b1;
          end
        end
        S_STORE: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    ctrl     = '0;
    acc_ctrl = '0;
    t        = 0;
    ob_we    = (state == S_STORE);
    busy     = (state != S_IDLE);
    a_idx    = i_q;
    b_idx    = j_q;
    if (state == S_IN) begin
      ctrl.gate_en = 1'b1;
      ctrl.ppr_en  = 1'b1;
      ctrl.ppr_sel = (j_q != '0);
      ctrl.res_en  = (j_q == IW'(N_BITS - 1));
      ctrl.res_sel = ctrl.res_en && (i_q != '0);
      t            = int'(i_q);
    end else if (state == S_FLUSH) begin
      ctrl.res_en  = 1'b1;
      ctrl.res_sel = 1'b1;
      t            = N_BITS + int'(f_q);
    end
    acc_ctrl.shift   = SHIFT_W'(T_DIG - 1 - t);
    acc_ctrl.acc_clr = first_q && (t == 0);
  end

  // The host must not start a pass while one is running.
  a_no_start_when_busy : assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state == S_IDLE);

endmodule
