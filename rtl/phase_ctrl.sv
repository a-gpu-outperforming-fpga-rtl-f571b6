// phase_ctrl: data-flow control of the layer pipeline.
//
// All layers start together at the beginning of a phase, each on the image
// its input memory channel holds.  When every layer reports done, the banks
// of all memory channels swap (the phase bit flips) and the next phase
// starts, so image i is in layer L during phase i+L and a new image enters
// every phase.  The phase time is that of the slowest layer.
//
// Image hand-over: the host writes the next image into the free bank of the
// input channel while img_ready is high and then pulses img_commit.  While
// `run` is high a phase does not end before the next image is committed (a
// stall, counted in stall_cycles); with `run` low the pipeline keeps
// swapping with empty slots (bubbles) until every image has left it, then
// goes idle.  vtag[L] says that layer L+1 holds a real image in this phase;
// out_latch pulses at the swap after which the output layer's scores belong
// to a real image.  The swap-on-all-done scheme follows the published
// design; the host hand-over, stall and flush behaviour are this design's
// choices.
// `rst_n` resets the state asynchronously and also disables the hand-over
// assertion synchronously; the lint warning about that mixed use is expected.
module phase_ctrl #(
  parameter int NL = 9
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          run,
  input  logic          img_commit,
  output logic          img_ready,
  input  logic [NL-1:0] done,
  output logic          start,
  output logic          phase,
  output logic [NL-1:0] vtag,
  output logic          out_latch,
  output logic [31:0]   stall_cycles
);
  typedef enum logic [1:0] {S_IDLE, S_START, S_WAIT, S_SWAP} state_t;
  state_t state;
  logic   committed;

  assign img_ready = !committed;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; committed <= 1'b0; start <= 1'b0; phase <= 1'b0;
      vtag <= '0; out_latch <= 1'b0; stall_cycles <= '0;
    end else begin
      start     <= 1'b0;
      out_latch <= 1'b0;
      if (img_commit) committed <= 1'b1;
      unique case (state)
        S_IDLE:  if (committed) state <= S_SWAP;
        S_START: begin start <= 1'b1; state <= S_WAIT; end
        S_WAIT:  if (&done && !start) begin
                   if (committed || !run) state <= S_SWAP;
                   else stall_cycles <= stall_cycles + 1;
                 end
        S_SWAP: begin
          phase     <= !phase;
          vtag      <= {vtag[NL-2:0], committed | img_commit};
          committed <= 1'b0;
          out_latch <= vtag[NL-1];
          state     <= (committed || img_commit || |vtag[NL-2:0]) ? S_START : S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A commit is only legal while the input bank is free.
  a_commit_ready: assert property (@(posedge clk) disable iff (!rst_n)
    img_commit |-> img_ready);
endmodule
