// step_ctrl: the event window of one processing step.
//
// A pulse on `start` begins the step's work on the next event: for STEP cycles `active`
// is high and `cyc` counts 0..STEP-1; `evt` holds the number of the event being processed
// (the count of start pulses so far, minus one). When the window ends the step stops
// issuing work even if data are left, which is the pipeline's truncation rule. `first`
// marks the first cycle of the window, when the owner clears its output page for `evt`.
module step_ctrl #(
  parameter int STEP = 36,
  parameter int EW   = 8
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  output logic          active,
  output logic [7:0]    cyc,
  output logic [EW-1:0] evt,
  output logic          first
);
  logic          run;
  logic [7:0]    c;
  logic [EW-1:0] e;
  logic          started;

  always_ff @(posedge clk) begin
    if (rst) begin
      run <= 1'b0; c <= '0; e <= '0; started <= 1'b0;
    end else if (start) begin
      run <= 1'b1; c <= '0;
      e <= started ? e + 1'b1 : '0;
      started <= 1'b1;
    end else if (run) begin
      if (c == 8'(STEP - 1)) run <= 1'b0;
      c <= c + 1'b1;
    end
  end

  // the window starts the cycle after the start pulse
  assign active = run;
  assign cyc    = c;
  assign evt    = e;
  assign first  = run && (c == 8'd0);
endmodule
