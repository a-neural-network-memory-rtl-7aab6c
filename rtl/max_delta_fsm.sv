// max_delta_fsm: dynamic limit on the distance of a trained association.
//
// The limit starts at one STEP (0x2000 bytes, the paper's increment). Over
// every PERIOD accesses it counts the prefetches issued and the useful ones
// (hit by a demand at a useful depth). At the end of a period in which the
// useful share is below THRESH_PCT percent, the limit is raised by one STEP; it
// wraps from N_STEPS back to one STEP, completing a sweep. After N_SWEEPS
// sweeps the FSM settles on the step that scored most useful prefetches in a
// period and holds it. A period at or above the threshold keeps the limit.
// The increment follows the paper; the period, threshold, number of steps and
// of sweeps are not given there and are this design's choices.
//
// Interface: tick marks one access, issued and useful one event each. limit
// is registered, in bytes; limit_lines is the same limit in cache lines.
module max_delta_fsm
  import nnp_pkg::*;
#(
  parameter int PERIOD     = 1024,    // accesses per evaluation period (assumed)
  parameter int STEP       = 'h2000,  // paper: multiples of 0x2000
  parameter int N_STEPS    = 16,      // assumed
  parameter int N_SWEEPS   = 2,       // assumed
  parameter int THRESH_PCT = 25       // assumed
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   tick,
  input  logic   issued,
  input  logic   useful,
  output addr_t  limit,
  output addr_t  limit_lines,
  output logic   settled,
  output logic   raised        // pulse: the limit was raised this cycle
);

  localparam int CW = $clog2(PERIOD + 1);
  localparam int KW = $clog2(N_STEPS + 1);

  typedef enum logic {S_SWEEP, S_SETTLED} state_e;
  state_e state;

  logic [CW-1:0] n_acc, n_issued, n_useful;
  logic [KW-1:0] k, best_k;
  logic [CW-1:0] best_score;
  logic [7:0]    sweeps;
  logic          below;
  logic [CW-1:0] useful_now, issued_now;

  assign useful_now  = n_useful + CW'(useful);
  assign issued_now  = n_issued + CW'(issued);
  assign below       = (32'(useful_now) * 100) < (32'(issued_now) * THRESH_PCT)
                       || issued_now == '0;
  assign limit       = addr_t'(k) * addr_t'(STEP);
  assign limit_lines = limit >> LINE_BITS;
  assign settled     = (state == S_SETTLED);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_SWEEP;
      n_acc      <= '0;
      n_issued   <= '0;
      n_useful   <= '0;
      k          <= KW'(1);
      best_k     <= KW'(1);
      best_score <= '0;
      sweeps     <= '0;
      raised     <= 1'b0;
    end else begin
      raised <= 1'b0;
      if (tick && n_acc == CW'(PERIOD - 1)) begin
        n_acc    <= '0;
        n_issued <= '0;
        n_useful <= '0;
        if (state == S_SWEEP && below) begin
          if (useful_now > best_score) begin
            best_score <= useful_now;
            best_k     <= k;
          end
          if (k == KW'(N_STEPS)) begin
            if (sweeps == 8'(N_SWEEPS - 1)) begin
              state <= S_SETTLED;
              k     <= (useful_now > best_score) ? k : best_k;
            end else begin
              sweeps <= sweeps + 1'b1;
              k      <= KW'(1);
            end
          end else begin
            k      <= k + 1'b1;
            raised <= 1'b1;
          end
        end
      end else begin
        if (tick)   n_acc    <= n_acc + 1'b1;
        n_issued <= issued_now;
        n_useful <= useful_now;
      end
    end
  end

endmodule
