// control_unit: FFT/IFFT control unit (finite state machine).
//
// On start it latches the operation (FFT or IFFT) and log2 of the size,
// then runs (log2(n)-1) stages of max(n/8,1) steps.  Every step takes two
// clock cycles because the coefficient banks are single-port SRAMs: in the
// read cycle all banks and the twiddle ROMs are read; in the write cycle the
// PEs compute combinationally from the read data and the results are written
// back to the same words.  A 1024-point transform therefore takes
// 2 * 9 * 128 = 2304 cycles, and n-point ones 2*(log2 n - 1)*max(n/8,1)
// cycles: 4, 12, 32, 80, 192, 448, 1024 for n = 8 .. 512, the paper's
// cycle counts; n = 4 takes 2 cycles and n = 2 none (the packed input
// a0 + i*a1 already is the transform).
//
// The forward transform counts the stage sg upwards; the inverse transform
// uses the same schedule with the stage counter reversed.  The three
// generators of the paper's control unit are sub-blocks: coef_addr_gen
// (Addr0, Addr1), twiddle_addr_gen (ROM address) and config_ctrl (exchange,
// twiddle and memory controls).
//
// Interface: start is sampled in IDLE or DONE; busy is high during the
// 2*steps cycles of work; done rises in the cycle after the last write and
// stays high until the next start.  rst is synchronous and active high.
module control_unit
  import fft_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  op_e                  op_in,
  input  logic [LOGN_W-1:0]    logn_in,
  output logic                 busy,
  output logic                 done,
  output op_e                  op,
  // coefficient memory
  output logic [ADDR_W-1:0]    addr0,
  output logic [ADDR_W-1:0]    addr1,
  output logic [N_BANK-1:0]    cs,
  output logic [N_BANK-1:0]    we,
  output logic                 bank_x,
  // PE array
  output logic                 rs,
  output logic                 ws,
  // twiddle memory
  output logic                 tw_en,
  output logic [TW_ADDR_W-1:0] tw_addr,
  output logic                 tw_swap,
  output logic                 tw_neg_re,
  output logic                 tw_neg_im
);

  typedef enum logic [1:0] {
    S_IDLE  = 2'd0,
    S_READ  = 2'd1,
    S_WRITE = 2'd2,
    S_DONE  = 2'd3
  } state_e;

  state_e            state;
  logic [LOGN_W-1:0] logn;
  logic [LOGN_W-1:0] s;        // stage counter, 0 .. nst-1
  logic [ADDR_W-1:0] p;        // step counter
  logic [LOGN_W-1:0] nst;      // number of stages
  logic [ADDR_W-1:0] p_last;   // last step of a stage
  logic [LOGN_W-1:0] sg;       // stage in forward order

  always_comb begin
    nst    = logn - LOGN_W'(1);
    p_last = (logn >= LOGN_W'(3)) ? ADDR_W'((1 << (logn - LOGN_W'(3))) - 1) : '0;
    sg     = (op == OP_FFT) ? s : (nst - LOGN_W'(1) - s);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      op    <= OP_FFT;
      logn  <= '0;
      s     <= '0;
      p     <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            op    <= op_in;
            logn  <= logn_in;
            s     <= '0;
            p     <= '0;
            state <= (logn_in >= LOGN_W'(2)) ? S_READ : S_DONE;
          end
        end
        S_READ: state <= S_WRITE;
        S_WRITE: begin
          state <= S_READ;
          if (p == p_last) begin
            p <= '0;
            if (s == nst - LOGN_W'(1)) state <= S_DONE;
            else s <= s + LOGN_W'(1);
          end else begin
            p <= p + ADDR_W'(1);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy  = (state == S_READ) || (state == S_WRITE);
    done  = (state == S_DONE);
    tw_en = (state == S_READ);
  end

  logic tw_odd, tw_minus;

  coef_addr_gen u_coef_addr (
    .logn(logn), .sg(sg), .p(p), .addr0(addr0), .addr1(addr1)
  );

  twiddle_addr_gen u_tw_addr (
    .logn(logn), .sg(sg), .p(p), .addr(tw_addr), .odd(tw_odd), .minus(tw_minus)
  );

  config_ctrl u_cfg (
    .op(op), .logn(logn), .sg(sg), .p(p),
    .active(busy), .wr_phase(state == S_WRITE),
    .tw_odd(tw_odd), .tw_minus(tw_minus),
    .bank_x(bank_x), .rs(rs), .ws(ws),
    .tw_swap(tw_swap), .tw_neg_re(tw_neg_re), .tw_neg_im(tw_neg_im),
    .cs(cs), .we(we)
  );

  // The size must be one the processor holds.
  assert property (@(posedge clk) disable iff (rst)
                   (start && state inside {S_IDLE, S_DONE}) |-> (logn_in <= LOGN_W'(LOGN_MAX)))
    else $error("logn_in %0d exceeds LOGN_MAX", logn_in);

endmodule
