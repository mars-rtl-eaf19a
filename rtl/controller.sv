// controller: top-level controller of MARS.
//
// After `start` it executes the instruction register file from entry 0: it
// fetches a layer instruction into `cfg` (which also sets the ping-pong
// direction), raises `go` to the four cores, waits until every core reports
// `done`, drops `go`, waits until every core has dropped `done`, and moves to
// the next instruction, stopping after the one marked `last`. `busy` is high
// from `start` to the end; `done` pulses for one cycle at the end; `layer`
// counts the layers finished in the current run.
// The paper gives the controller's function (fetch the instruction code and
// control the system); the four-phase go/done handshake is this design's.
// Runs on the system clock.
module controller
  import mars_pkg::*;
#(
  parameter int N = NCORES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [IRF_AW-1:0] pc,
  input  instr_t            instr,
  output instr_t            cfg,
  output logic              go,
  input  logic [N-1:0]      core_done,
  output logic [7:0]        layer
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_RUN, S_WAIT, S_NEXT} state_t;
  state_t state;

  assign busy = (state != S_IDLE);
  assign go   = (state == S_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pc    <= '0;
      cfg   <= '0;
      done  <= 1'b0;
      layer <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:  if (start) begin pc <= '0; layer <= '0; state <= S_FETCH; end
        S_FETCH: begin cfg <= instr; state <= S_RUN; end
        S_RUN:   if (&core_done) state <= S_WAIT;
        S_WAIT:  if (~|core_done) state <= S_NEXT;
        S_NEXT:  begin
                   layer <= layer + 8'd1;
                   if (cfg.last) begin state <= S_IDLE; done <= 1'b1; end
                   else begin pc <= pc + 1'b1; state <= S_FETCH; end
                 end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
