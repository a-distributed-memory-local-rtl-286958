// safe_state_ctrl: puts a module's logic into a safe state for reconfiguration.
//
// Runs on the module's own clock. In RUN the module's logic is enabled
// (run_en high). When halt_req is high and the logic reports no operation in
// progress (busy low), the controller moves to SAFE: run_en drops and `safe`
// rises. While safe is high the module's settings may be rewritten. When
// halt_req falls the controller returns to RUN on the next edge. Both outputs
// are registered, so `safe` can cross into another clock domain through a
// synchroniser.
//
// The controller leaves reset in SAFE, so a module holds still until it has
// been configured and released. The party that drives halt_req must not release
// it until the last write to this module has completed on the configuration bus.
//
// The existence of a safe state that is reported as Ready follows the
// architecture; the two-state machine, the busy input, the reset state and the
// release rule are this design's choices.
module safe_state_ctrl (
  input  logic clk,
  input  logic rst_n,
  input  logic halt_req,   // request to stop for reconfiguration
  input  logic busy,       // module logic is in the middle of an operation
  output logic safe,       // logic stopped, settings may change
  output logic run_en      // module logic may run
);

  typedef enum logic [0:0] { S_RUN = 1'b0, S_SAFE = 1'b1 } state_t;
  state_t state_q, state_d;

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      S_RUN:  if (halt_req && !busy) state_d = S_SAFE;
      S_SAFE: if (!halt_req)         state_d = S_RUN;
      default:                       state_d = S_SAFE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_SAFE;
      safe    <= 1'b1;
      run_en  <= 1'b0;
    end else begin
      state_q <= state_d;
      safe    <= (state_d == S_SAFE);
      run_en  <= (state_d == S_RUN);
    end
  end

endmodule
