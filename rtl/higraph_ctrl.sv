// higraph_ctrl: iteration controller of the accelerator.
//
// Runs the two phases of the vertex-centric programming model until no
// vertex is active or max_iter iterations have run:
//   scatter - the active-vertex readers stream the ActiveVertex Array into
//             the front end; the phase ends when every reader has finished
//             and the whole pipeline (networks, lanes, vPEs) has drained;
//   apply   - the apply units sweep all vertices and rebuild the
//             ActiveVertex Array for the next iteration.
// The paper gives the two phases and the stop rule; the drain detection, the
// iteration limit and the pulse interface are this design's choices.
//
// Interface: start (pulse, accepted in idle), done (pulse when the run
// ends), phase, scatter_go/apply_go pulses to the datapath, iter count.
// A phase change costs two cycles.
module higraph_ctrl
  import higraph_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] max_iter,
  input  logic        any_active,
  input  logic        fetch_done,
  input  logic        pipe_busy,
  input  logic        apply_done,
  output phase_e      phase,
  output logic        scatter_go,
  output logic        apply_go,
  output logic        done,
  output logic [15:0] iter
);
  typedef enum logic [2:0] {
    S_IDLE, S_SC_GO, S_SC_WAIT, S_SCATTER, S_AP_GO, S_AP_WAIT, S_APPLY
  } state_e;

  state_e st;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      iter <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE:    if (start) begin
                     iter <= '0;
                     if (any_active && max_iter != 0) st <= S_SC_GO;
                     else done <= 1'b1;
                   end
        S_SC_GO:   st <= S_SC_WAIT;
        S_SC_WAIT: st <= S_SCATTER;
        S_SCATTER: if (fetch_done && !pipe_busy) st <= S_AP_GO;
        S_AP_GO:   st <= S_AP_WAIT;
        S_AP_WAIT: st <= S_APPLY;
        S_APPLY:   if (apply_done) begin
                     iter <= iter + 16'd1;
                     if (any_active && iter + 16'd1 < max_iter) st <= S_SC_GO;
                     else begin
                       st   <= S_IDLE;
                       done <= 1'b1;
                     end
                   end
        default:   st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    case (st)
      S_SC_GO, S_SC_WAIT, S_SCATTER: phase = PH_SCATTER;
      S_AP_GO, S_AP_WAIT, S_APPLY:   phase = PH_APPLY;
      default:                       phase = PH_IDLE;
    endcase
  end
  assign scatter_go = (st == S_SC_GO);
  assign apply_go   = (st == S_AP_GO);
endmodule
