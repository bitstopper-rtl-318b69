// scheduler: on-demand computation scheduler and controller.
//
// Runs one query at a time through three phases:
//   MARGIN : read Q_i from the Q buffer, let the bit margin generator fill
//            its LUT, clear the LATS maximum and the lanes;
//   QK     : for every lane l, issue sign-plane (MSB) requests for the lane's
//            Keys j = l, l+NL, l+2NL, ... < seq_len, while fewer than WINDOW
//            of its tokens are in flight. A token is in flight from this
//            request until its lane retires it (pruned, or final score
//            produced); each retirement lets the next Key of the lane start,
//            so the lane's memory requests stay overlapped (the paper's
//            bit-level asynchronous processing). The phase ends when every
//            Key has been issued and retired;
//   VPU    : signal qk_done and wait for the V-PU to finish the output.
// WINDOW defaults to the scoreboard depth so a lane never has more live
// tokens than scoreboard entries. 'win_stall' pulses for a lane that has Keys
// left but is held by the window.
// The phases follow the paper's dataflow steps; the window policy, the
// token-to-lane map (token j in lane j mod NL, as in the scoreboard example
// holding tokens 0 and 32) and the handshakes are this design's choices.
// Lint note: rst_n is reported as used both asynchronously and synchronously
// (SYNCASYNCNET). The synchronous use is only the 'disable iff (!rst_n)' of the
// handshake assertions; every flip-flop uses rst_n as an asynchronous reset.
// Synthesis sees the low log2(NL) bits of each lane's new_tok as constants:
// lane l only ever issues tokens j with j mod NL = l, so those bits are the
// lane number. They are kept so that every token leaves with its full index.
module scheduler
  import bs_pkg::*;
#(
  parameter int NL     = LANES,
  parameter int TOKW   = $clog2(MAX_SEQ),
  parameter int WINDOW = SB_DEPTH
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [TOKW:0]       seq_len,   // 1 .. 2^TOKW Keys
  output logic                busy,
  output logic                done,      // one-cycle pulse
  // phase control
  output logic                q_rd_en,
  output logic                bmg_start,
  input  logic                bmg_done,
  output logic                clear,     // new query: lanes, LATS, buffers
  output logic                qk_active,
  output logic                qk_done,   // level, QK phase finished
  input  logic                vpu_done,
  // MSB requests
  output logic [NL-1:0]       new_valid,
  input  logic [NL-1:0]       new_ready,
  output logic [TOKW-1:0]     new_tok [NL],
  input  logic [NL-1:0]       retire,
  output logic [NL-1:0]       win_stall
);
  localparam int LGL = $clog2(NL);
  localparam int LW  = TOKW - LGL + 1;       // lane-local Key counter
  localparam int FW  = $clog2(WINDOW + 1);

  typedef enum logic [2:0] {S_IDLE, S_QRD, S_MARGIN, S_QK, S_VPU} state_t;
  state_t state;

  logic [LW-1:0] nxt   [NL];
  logic [FW-1:0] infl  [NL];
  logic [NL-1:0] more, idle_lane;

  logic [TOKW:0] tk [NL];
  logic [NL-1:0] issue;
  always_comb begin
    for (int l = 0; l < NL; l++) begin
      tk[l]          = (TOKW + 1)'({nxt[l], LGL'(l)});
      new_tok[l]     = tk[l][TOKW-1:0];
      more[l]        = tk[l] < seq_len;
      new_valid[l]   = (state == S_QK) && more[l] && (int'(infl[l]) < WINDOW);
      win_stall[l]   = (state == S_QK) && more[l] && (int'(infl[l]) >= WINDOW);
      idle_lane[l]   = !more[l] && (infl[l] == '0);
      issue[l]       = new_valid[l] && new_ready[l];
    end
    busy      = (state != S_IDLE);
    q_rd_en   = (state == S_IDLE) && start;
    clear     = (state == S_IDLE) && start;
    bmg_start = (state == S_QRD);
    qk_active = (state == S_QK);
    qk_done   = (state == S_VPU);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      for (int l = 0; l < NL; l++) begin
        nxt[l]  <= '0;
        infl[l] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE:   if (start) begin
                    state <= S_QRD;
                    for (int l = 0; l < NL; l++) begin
                      nxt[l]  <= '0;
                      infl[l] <= '0;
                    end
                  end
        S_QRD:    state <= S_MARGIN;
        S_MARGIN: if (bmg_done) state <= S_QK;
        S_QK:     if (&idle_lane) state <= S_VPU;
        S_VPU:    if (vpu_done) begin
                    state <= S_IDLE;
                    done  <= 1'b1;
                  end
        default:  state <= S_IDLE;
      endcase
      if (state == S_QK) begin
        for (int l = 0; l < NL; l++) begin
          if (issue[l]) nxt[l] <= nxt[l] + LW'(1);
          infl[l] <= infl[l] + FW'(issue[l]) - FW'(retire[l]);
        end
      end
    end
  end

  a_retire_in_flight: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_QK) |-> ((retire & ~idle_lane) == retire));
endmodule
