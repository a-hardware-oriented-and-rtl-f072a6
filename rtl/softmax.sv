// softmax: serial low-complexity softmax of one frame of network outputs.
//
// Computes p_i = exp(y_i - y_max - ln(sum_j exp(y_j - y_max))) for the N = K+1
// outputs of one time step (the log-sum-exp form of Eq. 6), with the data path
// of Fig. 9 of the paper:
//   LOAD : the N inputs y_i (8-bit two's complement, 2 fractional bits: one
//          sign, five integer and two fractional bits as in Section V) are
//          shifted in one per cycle into register group 1. A sorting block
//          finds y_max.
//   ACC  : one entry per cycle, y_i - y_max is stored in register group 2 and
//          the first EXP unit (bias d1) result is accumulated into F.
//   LOG  : one cycle; the LOG unit turns F into ln F, which is registered.
//   OUT  : one entry per cycle, the second EXP unit (bias d2) computes
//          p_i = exp(y_i - y_max - ln F) into the output register group.
//   DONE : `out_valid` is high and `p` holds the frame until `out_ack`.
// out_valid rises 2N+1 clock edges after the edge that accepts the last input.
// Interface: y_in/in_valid/in_ready (valid-ready, one label per beat, blank
// first, then labels 1..K); p/out_valid/out_ack. Outputs are q=30 fractions
// saturated to 2^30-1.
// The data path and the EXP/LOG approximations follow the paper; the state
// sequence, the handshakes and the internal widths (16 fractional bits
// for F and ln F) are this design's choices. The figure prints "Register Group
// 2" for both the y_i - y_max group and the p_i group; here the second is
// called the output group.
module softmax
  import ctc_pkg::*;
#(
  parameter int unsigned N          = NUM_LABELS + 1,
  parameter logic [3:0]  LAMBDA     = 4'b1100,        // 1.5
  parameter logic [3:0]  INV_LAMBDA = 4'b0101,        // 0.625
  parameter logic [10:0] D1         = 11'b01011110111, // 0.1011110111
  parameter logic [10:0] D2         = 11'b01111110010  // 0.1111110010
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [7:0]       y_in,
  input  logic                    in_valid,
  output logic                    in_ready,
  output prob_t [N-1:0]           p,
  output logic                    out_valid,
  input  logic                    out_ack
);

  localparam int unsigned IW = $clog2(N);

  typedef enum logic [2:0] {S_LOAD, S_ACC, S_LOG, S_OUT, S_DONE} state_t;
  state_t state;

  logic signed [7:0]  grp1 [N];     // register group 1: y_i
  logic signed [8:0]  grp2 [N];     // register group 2: y_i - y_max
  logic [IW-1:0]      idx;
  logic [21:0]        f_acc;        // F, 16 fractional bits
  logic signed [23:0] ln_f_q;       // registered ln F, 16 fractional bits

  // Sorting block over register group 1.
  logic [N-1:0][7:0]  grp1_flat;
  logic [IW-1:0]      max_idx;
  logic [7:0]         y_max;
  logic               max_any;
  always_comb for (int i = 0; i < N; i++) grp1_flat[i] = grp1[i];
  sort_block #(.N(N), .WIDTH(8), .SIGNED_CMP(1'b1)) u_sort (
    .values(grp1_flat), .valid('1), .find_max(1'b1),
    .idx(max_idx), .value(y_max), .any_valid(max_any)
  );

  // First EXP unit: exp(y_i - y_max), 16 fractional bits.
  logic signed [8:0] diff;
  logic [17:0]       e1;
  assign diff = 9'(grp1[idx]) - 9'($signed(y_max));
  exp_unit #(.XW(9), .XF(2), .OW(18), .OF(16), .LAMBDA(LAMBDA), .D(D1)) u_exp1 (
    .x(diff), .y(e1)
  );

  // LOG unit.
  logic signed [23:0] ln_f;
  log_unit #(.FW(22), .FF(16), .LW(24), .INV_LAMBDA(INV_LAMBDA)) u_log (
    .f(f_acc), .ln_f(ln_f)
  );

  // Second EXP unit: exp(y_i - y_max - ln F), q = 30.
  logic signed [24:0] x2;
  prob_t              e2;
  assign x2 = (25'(grp2[idx]) <<< 14) - 25'(ln_f_q);
  exp_unit #(.XW(25), .XF(16), .OW(PROB_W), .OF(PROB_W), .LAMBDA(LAMBDA), .D(D2)) u_exp2 (
    .x(x2), .y(e2)
  );

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_LOAD;
      idx    <= '0;
      f_acc  <= '0;
      ln_f_q <= '0;
      for (int i = 0; i < N; i++) begin
        grp1[i] <= '0;
        grp2[i] <= '0;
        p[i]    <= '0;
      end
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          grp1[idx] <= y_in;
          if (idx == IW'(N - 1)) begin
            idx   <= '0;
            f_acc <= '0;
            state <= S_ACC;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_ACC: begin
          grp2[idx] <= diff;
          f_acc     <= f_acc + 22'(e1);
          if (idx == IW'(N - 1)) begin
            idx   <= '0;
            state <= S_LOG;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_LOG: begin
          ln_f_q <= ln_f;
          state  <= S_OUT;
        end
        S_OUT: begin
          p[idx] <= e2;
          if (idx == IW'(N - 1)) begin
            idx   <= '0;
            state <= S_DONE;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_DONE: if (out_ack) state <= S_LOAD;
        default: state <= S_LOAD;
      endcase
    end
  end

endmodule
