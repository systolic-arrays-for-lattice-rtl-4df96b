// lr_controller -- external logic controller of the systolic array for
// lattice reduction.  One controller runs either algorithm:
//
//   algo = 0 : FSR-LLL (LLL with full size reduction, Table I of the paper)
//   algo = 1 : ASLR    (all-swap lattice reduction, Table II)
//
// Each iteration is
//   1. full size reduction: one "#" token into D_MM (fsr_go), then wait
//      until the array's wavefront has died out (fsr_busy low).  During it
//      every diagonal cell D_bb sets swap[b] when the Siegel condition fails
//      between rows b and b+1.
//   2. decision:
//      FSR-LLL: the smallest k' >= k (1-based) whose pair (k'-1,k') has swap
//               set; if none, stop.  Otherwise k := max(k'-1, 2).
//      ASLR   : all pairs of the current parity ("order", EVEN first; even k
//               are pairs b = k-2 even) that have swap set; if none, all pairs
//               of the other parity without a new size reduction; if none
//               either, stop.  order becomes the parity not just used.
//   3. Givens rotation: the switches sw[] of the chosen pairs are closed
//      for one clock, the vectoring cells compute the rotation and the
//      rotation cells sweep it across the row pairs (wait for rot_busy low).
//   4. column swap: cswap[] of the chosen pairs for one clock.
//
// Follows the paper: the algorithm flows, the switch per diagonal cell and
// that only the chosen pairs rotate.  Own choices: the three phases run one
// after the other (the paper notes they may partly overlap); the wait for
// each phase uses the array's busy flags; an iteration limit MAX_ITER stops
// a run that does not converge (the paper does not bound the iterations).
// Counters: n_iter (full size reductions), n_swap (swap steps, an ASLR step
// swapping several pairs in parallel counts once, as in the paper's Fig. 8),
// n_pairs (column pairs swapped) and cycles (start to done).
module lr_controller #(
  parameter int M        = 4,
  parameter int MAX_ITER = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         algo,       // 0 FSR-LLL, 1 ASLR
  // array side
  output logic         fsr_go,
  input  logic         fsr_busy,
  input  logic [M-2:0] swap,
  output logic [M-2:0] sw,
  output logic [M-2:0] cswap,
  input  logic         rot_busy,
  // status
  output logic         busy,
  output logic         done,       // one-clock pulse at the end
  output logic         hit_limit,  // the run stopped at MAX_ITER
  output logic [15:0]  n_iter,
  output logic [15:0]  n_swap,
  output logic [15:0]  n_pairs,
  output logic [15:0]  cycles
);
  typedef enum logic [2:0] {
    S_IDLE, S_FSR, S_FSR_WAIT, S_DECIDE, S_ROT, S_ROT_WAIT, S_SWAP
  } state_e;

  state_e       st;
  logic [M-2:0] sel;
  int unsigned  k;          // FSR-LLL index k, 1-based
  logic         order_odd;  // ASLR order: 0 = EVEN, 1 = ODD

  // pair b belongs to k = b+2: even k <=> b even
  logic [M-2:0] even_mask, odd_mask;
  always_comb begin
    for (int b = 0; b < M-1; b++) begin
      even_mask[b] = (b % 2 == 0);
      odd_mask[b]  = (b % 2 == 1);
    end
  end

  // decision logic
  logic [M-2:0] pick;
  logic         pick_odd;
  int unsigned  kp;
  always_comb begin
    pick = '0; pick_odd = 1'b0; kp = 0;
    if (!algo) begin
      for (int b = M-2; b >= 0; b--)
        if (swap[b] && (b + 2) >= int'(k)) kp = b + 2;
      if (kp != 0) pick[kp-2] = 1'b1;
    end else begin
      if (!order_odd) begin
        if ((swap & even_mask) != '0)     begin pick = swap & even_mask; pick_odd = 1'b0; end
        else if ((swap & odd_mask) != '0) begin pick = swap & odd_mask;  pick_odd = 1'b1; end
      end else begin
        if ((swap & odd_mask) != '0)      begin pick = swap & odd_mask;  pick_odd = 1'b1; end
        else if ((swap & even_mask) != '0) begin pick = swap & even_mask; pick_odd = 1'b0; end
      end
    end
  end

  function automatic logic [15:0] popc(logic [M-2:0] vec);
    logic [15:0] n;
    n = '0;
    for (int b = 0; b < M-1; b++) n += 16'(vec[b]);
    return n;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; sel <= '0; k <= 2; order_odd <= 1'b0;
      fsr_go <= 1'b0; sw <= '0; cswap <= '0;
      busy <= 1'b0; done <= 1'b0; hit_limit <= 1'b0;
      n_iter <= '0; n_swap <= '0; n_pairs <= '0; cycles <= '0;
    end else begin
      fsr_go <= 1'b0; sw <= '0; cswap <= '0; done <= 1'b0;
      if (busy) cycles <= cycles + 16'd1;
      unique case (st)
        S_IDLE: if (start) begin
          busy <= 1'b1; hit_limit <= 1'b0;
          k <= 2; order_odd <= 1'b0;
          n_iter <= '0; n_swap <= '0; n_pairs <= '0; cycles <= '0;
          fsr_go <= 1'b1;
          st <= S_FSR;
        end
        S_FSR: begin                      // the "#" is on its way
          n_iter <= n_iter + 16'd1;
          st <= S_FSR_WAIT;
        end
        S_FSR_WAIT: if (!fsr_busy) st <= S_DECIDE;
        S_DECIDE: begin
          if (pick == '0) begin
            st <= S_IDLE; busy <= 1'b0; done <= 1'b1;
          end else if (n_iter >= 16'(MAX_ITER)) begin
            st <= S_IDLE; busy <= 1'b0; done <= 1'b1; hit_limit <= 1'b1;
          end else begin
            sel <= pick;
            sw  <= pick;                  // close the switches for one clock
            n_swap  <= n_swap + 16'd1;
            n_pairs <= n_pairs + popc(pick);
            if (!algo) k <= (kp - 1 > 2) ? kp - 1 : 2;
            else       order_odd <= ~pick_odd;
            st <= S_ROT;
          end
        end
        S_ROT: st <= S_ROT_WAIT;          // vectoring cells wrote back
        S_ROT_WAIT: if (!rot_busy) begin
          cswap <= sel;
          st <= S_SWAP;
        end
        S_SWAP: begin                     // columns exchanged, next iteration
          fsr_go <= 1'b1;
          st <= S_FSR;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
