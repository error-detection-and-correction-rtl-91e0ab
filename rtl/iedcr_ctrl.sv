// iedcr_ctrl -- controller of the IMC error detection and correction routine (IEDCR).
//
// It sequences one inference of the batch and then walks the routine's flowchart on the
// syndrome until the outputs can be released:
//   1. compute the MAC outputs and the checksums (mac_go, chk_go);
//   2. no non-zero Delta: release the outputs unchanged;
//   3. sum of Delta(b) != sum of Delta(n): the checksums are suspect, recompute only them
//      (a stall, cause RECHK_SUM);
//   4. errors detected. Exactly one non-zero Delta(b), or else exactly one non-zero Delta(n):
//      the fault is correctable. If the parity check of the PE checksum passes, release
//      the outputs through the corrector (CORR_COL or CORR_PE); otherwise recompute the
//      checksums (cause RECHK_PARITY);
//   5. several faulty columns in several PEs: recompute the MAC outputs, unless MAX_CONSEC
//      MAC recomputations in a row have already been made, in which case recompute the
//      checksums instead (cause RECHK_CONSEC) and restart the count.
// The paper does not bound the number of rounds; this controller gives up after MAX_ROUNDS
// recomputations and releases the uncorrected outputs with `uncorrectable` set.
// Any Delta counts as "> 0" in the flowchart's tests when it is non-zero, whatever its sign.
//
// Timing: `start` is taken in S_IDLE (load_in latches the inputs). S_ISSUE asserts the go
// strobes for one cycle; S_WAIT waits for every requested array's valid; S_EVAL decides; when
// finishing it pulses out_load (the batch registers the corrected outputs) and moves to S_DONE,
// where `done` is high for one cycle. With crossbar latency LAT an inference takes
// (LAT + 2) * (1 + recomputations) cycles from the start edge to done.
// Counters (rounds, MAC and checksum recomputations by cause) hold until the next start.
module iedcr_ctrl #(
  parameter int unsigned MAX_CONSEC = nc_pkg::MAX_CONSEC_DEF,
  parameter int unsigned MAX_ROUNDS = nc_pkg::MAX_ROUNDS_DEF,
  parameter int unsigned CNT_W      = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // to the crossbars
  output logic                 load_in,
  output logic                 mac_go,
  output logic                 chk_go,
  input  logic                 mac_valid,   // all weight crossbars have new results
  input  logic                 chk_valid,   // all checksum arrays have new results
  // from the syndrome unit
  input  logic                 any_err,
  input  logic                 sums_equal,
  input  logic                 single_b,    // exactly one non-zero Delta(b)
  input  logic                 single_n,    // exactly one non-zero Delta(n)
  input  logic                 parity_ok,
  // to the corrector and result register
  output nc_pkg::corr_mode_e   corr_mode,
  output logic                 out_load,
  // status of the last inference
  output logic                 err_detected,
  output logic                 corrected,
  output logic                 uncorrectable,
  output logic [CNT_W-1:0]     rounds,
  output logic [CNT_W-1:0]     n_mac_recomp,
  output logic [CNT_W-1:0]     n_rechk_sum,
  output logic [CNT_W-1:0]     n_rechk_par,
  output logic [CNT_W-1:0]     n_rechk_consec
);
  import nc_pkg::*;

  iedcr_state_e state;
  logic issue_mac, issue_chk;     // what S_ISSUE requests
  logic pend_mac, pend_chk;       // requested results not yet arrived
  logic [CNT_W-1:0] consec;       // consecutive MAC recomputations

  logic pend_mac_nx, pend_chk_nx;
  assign pend_mac_nx = pend_mac & ~mac_valid;
  assign pend_chk_nx = pend_chk & ~chk_valid;

  // decision of the evaluation state
  typedef enum logic [2:0] {
    DEC_RELEASE, DEC_CORRECT, DEC_RECHK_SUM, DEC_RECHK_PAR, DEC_RECHK_CONSEC, DEC_REMAC
  } dec_e;
  dec_e       dec;
  corr_mode_e dec_mode;

  always_comb begin
    dec_mode = CORR_NONE;
    if (!any_err)                  dec = DEC_RELEASE;
    else if (!sums_equal)          dec = DEC_RECHK_SUM;
    else if (single_b || single_n) begin
      if (parity_ok) begin
        dec      = DEC_CORRECT;
        dec_mode = single_b ? CORR_COL : CORR_PE;
      end else begin
        dec      = DEC_RECHK_PAR;
      end
    end
    else if (consec >= CNT_W'(MAX_CONSEC)) dec = DEC_RECHK_CONSEC;
    else                                   dec = DEC_REMAC;
  end

  logic finishing, give_up;
  assign give_up   = (dec != DEC_RELEASE) && (dec != DEC_CORRECT) &&
                     (rounds >= CNT_W'(MAX_ROUNDS));
  assign finishing = (state == S_EVAL) &&
                     ((dec == DEC_RELEASE) || (dec == DEC_CORRECT) || give_up);

  assign busy      = (state != S_IDLE);
  assign done      = (state == S_DONE);
  assign load_in   = (state == S_IDLE) && start;
  assign mac_go    = (state == S_ISSUE) && issue_mac;
  assign chk_go    = (state == S_ISSUE) && issue_chk;
  assign out_load  = finishing;
  assign corr_mode = (finishing && !give_up) ? dec_mode : CORR_NONE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      issue_mac      <= 1'b0;
      issue_chk      <= 1'b0;
      pend_mac       <= 1'b0;
      pend_chk       <= 1'b0;
      consec         <= '0;
      err_detected   <= 1'b0;
      corrected      <= 1'b0;
      uncorrectable  <= 1'b0;
      rounds         <= '0;
      n_mac_recomp   <= '0;
      n_rechk_sum    <= '0;
      n_rechk_par    <= '0;
      n_rechk_consec <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state          <= S_ISSUE;
          issue_mac      <= 1'b1;
          issue_chk      <= 1'b1;
          consec         <= '0;
          err_detected   <= 1'b0;
          corrected      <= 1'b0;
          uncorrectable  <= 1'b0;
          rounds         <= '0;
          n_mac_recomp   <= '0;
          n_rechk_sum    <= '0;
          n_rechk_par    <= '0;
          n_rechk_consec <= '0;
        end
        S_ISSUE: begin
          state    <= S_WAIT;
          pend_mac <= issue_mac;
          pend_chk <= issue_chk;
        end
        S_WAIT: begin
          pend_mac <= pend_mac_nx;
          pend_chk <= pend_chk_nx;
          if (!pend_mac_nx && !pend_chk_nx) state <= S_EVAL;
        end
        S_EVAL: begin
          if (any_err) err_detected <= 1'b1;
          if (finishing) begin
            state         <= S_DONE;
            corrected     <= (dec == DEC_CORRECT);
            uncorrectable <= give_up;
          end else begin
            state  <= S_ISSUE;
            rounds <= rounds + 1'b1;
            unique case (dec)
              DEC_REMAC: begin
                issue_mac    <= 1'b1;
                issue_chk    <= 1'b0;
                consec       <= consec + 1'b1;
                n_mac_recomp <= n_mac_recomp + 1'b1;
              end
              DEC_RECHK_SUM: begin
                issue_mac   <= 1'b0;
                issue_chk   <= 1'b1;
                consec      <= '0;
                n_rechk_sum <= n_rechk_sum + 1'b1;
              end
              DEC_RECHK_PAR: begin
                issue_mac   <= 1'b0;
                issue_chk   <= 1'b1;
                consec      <= '0;
                n_rechk_par <= n_rechk_par + 1'b1;
              end
              default: begin // DEC_RECHK_CONSEC
                issue_mac      <= 1'b0;
                issue_chk      <= 1'b1;
                consec         <= '0;
                n_rechk_consec <= n_rechk_consec + 1'b1;
              end
            endcase
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Handshake rules
  property p_done_one_cycle;
    @(posedge clk) disable iff (!rst_n) done |=> !done;
  endproperty
  a_done_one_cycle: assert property (p_done_one_cycle);

  property p_no_go_while_waiting;
    @(posedge clk) disable iff (!rst_n) (state == S_WAIT) |-> !(mac_go || chk_go);
  endproperty
  a_no_go_while_waiting: assert property (p_no_go_while_waiting);

  property p_valid_only_when_requested;
    @(posedge clk) disable iff (!rst_n) mac_valid |-> (state == S_WAIT && pend_mac);
  endproperty
  a_valid_only_when_requested: assert property (p_valid_only_when_requested);

endmodule
