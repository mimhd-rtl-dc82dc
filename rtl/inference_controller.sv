// inference_controller -- sequencer of one MIMHD inference.
//
// The paper describes inference as encoding followed by a single-step
// associative search; it gives no control timing. This design runs one
// inference as a fixed sequence of one-cycle phases:
//
//   IDLE    start accepted: features latched into the level decoders
//   DRIVE   word lines and base-HV drivers on; crossbar currents sampled
//   CONVERT source-line ADCs convert; encoded HV registered
//   DLOAD   encoded HV applied to the MCAM data lines
//   MATCH   MCAM match-line currents sampled
//   SENSE   sense amplifiers pick the lowest-current row
//   DONE    `done` pulses for one cycle, result is valid; data lines released
//
// So `done` rises LATENCY = 6 clock edges after the edge that accepts
// `start`. `start` is ignored while busy. `prog_ok` is high only in IDLE:
// the array write port is blocked during an inference.
module inference_controller
  import mimhd_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic feat_load,
  output logic drive,
  output logic xbar_read,
  output logic adc_sample,
  output logic dl_load,
  output logic dl_clear,
  output logic mcam_search,
  output logic sa_sense,
  output logic done,
  output logic busy,
  output logic prog_ok
);
  typedef enum logic [2:0] {
    S_IDLE, S_DRIVE, S_CONVERT, S_DLOAD, S_MATCH, S_SENSE, S_DONE
  } state_e;

  state_e state, state_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else        state <= state_d;
  end

  always_comb begin
    state_d = state;
    unique case (state)
      S_IDLE:    if (start) state_d = S_DRIVE;
      S_DRIVE:   state_d = S_CONVERT;
      S_CONVERT: state_d = S_DLOAD;
      S_DLOAD:   state_d = S_MATCH;
      S_MATCH:   state_d = S_SENSE;
      S_SENSE:   state_d = S_DONE;
      S_DONE:    state_d = S_IDLE;
      default:   state_d = S_IDLE;
    endcase
  end

  assign feat_load   = (state == S_IDLE) && start;
  assign drive       = (state == S_DRIVE);
  assign xbar_read   = (state == S_DRIVE);
  assign adc_sample  = (state == S_CONVERT);
  assign dl_load     = (state == S_DLOAD);
  assign mcam_search = (state == S_MATCH);
  assign sa_sense    = (state == S_SENSE);
  assign done        = (state == S_DONE);
  assign dl_clear    = (state == S_DONE);
  assign busy        = (state != S_IDLE);
  assign prog_ok     = (state == S_IDLE);

  // Exactly one phase strobe is active outside IDLE.
  a_one_phase: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> $onehot({drive, adc_sample, dl_load, mcam_search, sa_sense, done}));

endmodule
