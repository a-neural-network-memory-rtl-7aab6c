// nn_unit: the neural network of the prefetcher, a fully connected
// N_IN-N-N perceptron network (128 inputs, 32 hidden, 32 outputs) computed on
// one N x N systolic array, with on-line training by back-propagation.
//
// Operations (start with op, one at a time; busy until the done pulse):
//   OP_INFER  ctx -> hid, out. The context bits enter as 0 / 1.0. The hidden
//             layer takes N_IN/N phases (tiles of N inputs) issued on
//             consecutive cycles and summed in 16-bit accumulators; the
//             ReLU-activated hidden vector is then fed back to the array input
//             for the output layer (one more phase). Latency is
//             N_IN/N + 2N + 4 cycles from the start cycle to the done pulse.
//   OP_TRAIN  One gradient step towards target on the outputs selected by
//             mask, using the neuron values stored when ctx was inferred
//             (hid_in, out_in) rather than recomputing them:
//               1. output error  d_k = slope(out_k) * (target_k - out_k)
//                  (vector subtract, ReLU step derivative), 0 where unmasked
//               2. W_o[k][h] += d_k * hid_h * 2^-LR_SHIFT
//               3. hidden error  e_h = slope(hid_h) * sum_k W_o[k][h] * d_k
//                  (the array in transposed mode, on the output weights
//                  just updated, in the paper's order: output weights first,
//                  then the weighted-error pass for the hidden layer)
//               4. W_h[h][i] += e_h * x_i   * 2^-LR_SHIFT, N_IN/N tiles
//             Each update waits N cycles for the wavefront to write the last
//             column before the next one starts.
// The paper gives the network shape, the array size, 8-bit values with 16-bit
// accumulators, ReLU, the phase counts and the training steps; the fixed-point
// format, the learning rate and the 1/8 slope of a ReLU at zero are this
// design's choices.
module nn_unit
  import nnp_pkg::*;
#(
  parameter int N        = 32,    // paper: 32x32 array, 32 hidden, 32 outputs
  parameter int N_IN     = 128,   // paper: 128-bit context vector
  parameter int LR_SHIFT = 3      // learning rate 2^-LR_SHIFT (assumed)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                op_train,   // 0 = OP_INFER, 1 = OP_TRAIN
  input  logic [N_IN-1:0]     ctx,
  input  val_t [N-1:0]        hid_in,
  input  val_t [N-1:0]        out_in,
  input  val_t [N-1:0]        target,
  input  logic [N-1:0]        mask,
  output logic                busy,
  output logic                done,
  output val_t [N-1:0]        hid,
  output val_t [N-1:0]        out
);

  localparam int T  = N_IN / N;          // hidden-layer phases
  localparam int AW = $clog2(T + 1);
  localparam int CW = $clog2(N + T + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_FH, S_FH_W, S_ACT, S_FO, S_FO_W,
    S_TD, S_TT, S_TT_W, S_TUO, S_TUO_W, S_TUH, S_TUH_W, S_DONE
  } state_e;

  state_e              state;
  logic [CW-1:0]       cnt;
  logic [N_IN-1:0]     ctx_r;
  val_t [N-1:0]        hid_r, out_r, tgt_r, dlt_r, eps_r;
  logic [N-1:0]        mask_r;
  acc_t [N-1:0]        acc;

  // array and weight store
  arr_mode_e            mode;
  logic                 a_valid;
  logic [AW-1:0]        a_addr;
  val_t [N-1:0]         a_x, a_e;
  logic [N-1:0][AW-1:0] w_addr;
  val_t [N-1:0][N-1:0]  w_rd, w_wdata;
  logic [N-1:0]         w_we;
  logic                 row_valid, col_valid;
  acc_t [N-1:0]         row_psum, col_psum;

  systolic_array #(.N(N), .AW(AW), .LR_SHIFT(LR_SHIFT)) u_array (
    .clk, .rst_n, .mode,
    .in_valid (a_valid), .in_addr (a_addr), .x_in (a_x), .e_in (a_e),
    .w_addr, .w_rd, .w_we, .w_wdata,
    .row_valid, .row_psum, .col_valid, .col_psum
  );

  weight_store #(.N(N), .N_IN(N_IN), .AW(AW)) u_ws (
    .clk, .rst_n,
    .rd_addr (w_addr), .rd_data (w_rd),
    .we (w_we), .wr_addr (w_addr), .wr_data (w_wdata)
  );

  // Input mux: context tile, hidden vector or nothing.
  always_comb begin
    a_valid = 1'b0;
    a_addr  = AW'(T);
    a_x     = '0;
    a_e     = (state == S_TUH || state == S_TUH_W) ? eps_r : dlt_r;
    unique case (state)
      S_FH, S_TUH: begin
        a_valid = 1'b1;
        a_addr  = AW'(cnt);
        for (int i = 0; i < N; i++)
          a_x[i] = ctx_r[int'(cnt) * N + i] ? ONE : val_t'(0);
      end
      S_TUH_W: begin
        for (int i = 0; i < N; i++)
          a_x[i] = ctx_r[(T - 1) * N + i] ? ONE : val_t'(0);
        a_addr = AW'(T - 1);
      end
      S_FO, S_TT, S_TUO: begin
        a_valid = 1'b1;
        a_x     = hid_r;
      end
      default: a_x = hid_r;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      mode    <= M_FWD;
      cnt     <= '0;
      done    <= 1'b0;
      acc     <= '0;
      hid_r   <= '0;
      out_r   <= '0;
      dlt_r   <= '0;
      eps_r   <= '0;
      tgt_r   <= '0;
      mask_r  <= '0;
      ctx_r   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          ctx_r   <= ctx;
          cnt     <= '0;
          acc     <= '0;
          if (op_train) begin
            hid_r  <= hid_in;
            out_r  <= out_in;
            tgt_r  <= target;
            mask_r <= mask;
            state  <= S_TD;
          end else begin
            mode  <= M_FWD;
            state <= S_FH;
          end
        end
        // ---------------- inference ----------------
        S_FH: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(T - 1)) begin
            cnt   <= '0;
            state <= S_FH_W;
          end
        end
        S_FH_W: if (row_valid) begin
          for (int i = 0; i < N; i++) acc[i] <= sat16(32'(acc[i]) + 32'(row_psum[i]));
          cnt <= cnt + 1'b1;
          if (cnt == CW'(T - 1)) state <= S_ACT;
        end
        S_ACT: begin
          for (int i = 0; i < N; i++) hid_r[i] <= relu8(acc[i]);
          state <= S_FO;
        end
        S_FO: state <= S_FO_W;
        S_FO_W: if (row_valid) begin
          for (int i = 0; i < N; i++) out_r[i] <= relu8(row_psum[i]);
          state <= S_DONE;
        end
        // ---------------- training ----------------
        S_TD: begin
          for (int k = 0; k < N; k++)
            dlt_r[k] <= mask_r[k]
                        ? relu_grad(sat8(32'(tgt_r[k]) - 32'(out_r[k])), out_r[k])
                        : val_t'(0);
          mode  <= M_UPD;
          state <= S_TUO;
        end
        S_TUO: begin
          cnt   <= '0;
          state <= S_TUO_W;
        end
        S_TUO_W: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(N - 1)) begin
            cnt   <= '0;
            mode  <= M_TRANS;
            state <= S_TT;
          end
        end
        S_TT: state <= S_TT_W;
        S_TT_W: if (col_valid) begin
          for (int h = 0; h < N; h++)
            eps_r[h] <= relu_grad(sat8(32'(col_psum[h])), hid_r[h]);
          cnt   <= '0;
          mode  <= M_UPD;
          state <= S_TUH;
        end
        S_TUH: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(T - 1)) begin
            cnt   <= '0;
            state <= S_TUH_W;
          end
        end
        S_TUH_W: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(N - 1)) state <= S_DONE;
        end
        S_DONE: begin
          mode  <= M_FWD;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign hid  = hid_r;
  assign out  = out_r;

endmodule
