// egc_controller -- sequencing FSM of the iterative EGC128 engine.
//
// One block takes 1 + SETUP_CYCLES + ROUNDS clock cycles: `done` rises on the 49th clock edge
// after the edge that accepts `start` (with the defaults), the block latency the specification
// reports for its iterative FPGA cores. The cycle in which `done` is produced can accept the next
// block, so back-to-back blocks also complete every 49 cycles. Phases:
//   IDLE  : waits for `start`; on it pulses `load` (state register, key schedule, mode latch).
//   SETUP : SETUP_CYCLES cycles. For decryption the first ROUNDS-1 of them step the LFSR forward
//           from S_0 to S_19 (`ks_fwd`), so the last round key is ready; for encryption the LFSR
//           holds S_0. The rest are idle so both directions take the same, data-independent time.
//   ROUND : ROUNDS cycles, one Feistel round per cycle (`round_en`). `round_idx` counts
//           0..19 for encryption and 19..0 for decryption; the LFSR steps forward (encryption) or
//           backward (decryption) after each round.
//   FINAL : one cycle; `finalize` writes the output register, and `done` is high for the
//           following cycle. A `start` in this cycle is accepted as well (it plays the part of the
//           IDLE cycle of the next block), so blocks can follow each other every 49 cycles,
//           128 bits per 49 cycles, the specification's throughput formula.
// `start` is ignored while `busy` (SETUP and ROUND). The specification gives only the total of
// 49 cycles ("20 Feistel rounds plus key-schedule and control overhead") and that decryption uses
// an inverse LFSR step; the phase split, and padding the setup phase (9 of its 28 cycles do no
// work) to reach 49 in both directions, are this design's choice.
module egc_controller
  import egc_pkg::*;
#(
  parameter int unsigned NROUNDS      = ROUNDS,
  parameter int unsigned SETUP_CYCLES = 28
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  mode_e      mode_in,
  output logic       load,
  output mode_e      mode,
  output logic       ks_fwd,
  output logic       ks_bwd,
  output logic       round_en,
  output round_idx_t round_idx,
  output logic       finalize,
  output logic       busy,
  output logic       done
);

  localparam int unsigned CNT_W = $clog2(SETUP_CYCLES + NROUNDS + 1);

  if (SETUP_CYCLES < NROUNDS - 1) begin : g_bad_setup
    $error("SETUP_CYCLES must be at least NROUNDS-1 for the decryption LFSR pre-advance");
  end

  typedef enum logic [1:0] {
    ST_IDLE  = 2'd0,
    ST_SETUP = 2'd1,
    ST_ROUND = 2'd2,
    ST_FINAL = 2'd3
  } state_e;

  state_e           st_q;
  logic [CNT_W-1:0] cnt_q;

  always_comb begin
    load      = start && ((st_q == ST_IDLE) || (st_q == ST_FINAL));
    busy      = (st_q == ST_SETUP) || (st_q == ST_ROUND);
    round_en  = (st_q == ST_ROUND);
    finalize  = (st_q == ST_FINAL);
    ks_fwd    = 1'b0;
    ks_bwd    = 1'b0;
    round_idx = '0;
    unique case (st_q)
      ST_SETUP: ks_fwd = (mode == MODE_DEC) && (cnt_q < CNT_W'(NROUNDS - 1));
      ST_ROUND: begin
        ks_fwd    = (mode == MODE_ENC);
        ks_bwd    = (mode == MODE_DEC);
        round_idx = (mode == MODE_ENC) ? round_idx_t'(cnt_q)
                                       : round_idx_t'(NROUNDS - 1) - round_idx_t'(cnt_q);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q  <= ST_IDLE;
      cnt_q <= '0;
      mode  <= MODE_ENC;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st_q)
        ST_IDLE: if (start) begin
          mode  <= mode_in;
          cnt_q <= '0;
          st_q  <= ST_SETUP;
        end
        ST_SETUP: begin
          if (cnt_q == CNT_W'(SETUP_CYCLES - 1)) begin
            cnt_q <= '0;
            st_q  <= ST_ROUND;
          end else cnt_q <= cnt_q + 1'b1;
        end
        ST_ROUND: begin
          if (cnt_q == CNT_W'(NROUNDS - 1)) begin
            cnt_q <= '0;
            st_q  <= ST_FINAL;
          end else cnt_q <= cnt_q + 1'b1;
        end
        ST_FINAL: begin
          done <= 1'b1;
          if (start) begin
            mode  <= mode_in;
            cnt_q <= '0;
            st_q  <= ST_SETUP;
          end else st_q <= ST_IDLE;
        end
        default: st_q <= ST_IDLE;
      endcase
    end
  end

  a_done_pulse: assert property (@(posedge clk) disable iff (!rst_n) done |=> !done);
  a_one_step:   assert property (@(posedge clk) disable iff (!rst_n) !(ks_fwd && ks_bwd));

endmodule
