// plif: parallel leaky-integrate-and-fire unit.  It turns the T full sums of
// one output neuron into its T output spikes in one shot.
//
// The LIF recurrence is unrolled over the timesteps as a chain:
//   X[0]   = O[0]
//   S[t]   = X[t] > vth
//   U[t]   = S[t] ? 0 : X[t] >>> leak_shift          (hard reset, leak)
//   X[t+1] = O[t+1] + U[t]
// so every timestep has its own comparator, shifter, reset mux and adder.
// The membrane starts at zero at t0.  The leaky factor tau is 2^-leak_shift.
// The result is registered: spikes/out_valid appear one cycle after in_valid.
//
// The chain of comparator, shift, zero mux and adder per timestep follows the
// paper's P-LIF.  The shift-based leak, the internal width (two bits above the
// full sum) and the output register are this design's choices.
module plif #(
  parameter int T   = loas_pkg::T,
  parameter int X_W = loas_pkg::PACC_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [X_W-1:0] o [T],       // full sums from the TPPE
  input  logic signed [X_W-1:0] vth,         // firing threshold
  input  logic [2:0]            leak_shift,  // tau = 2^-leak_shift
  output logic                  out_valid,
  output logic [T-1:0]          spikes       // bit t = spike at timestep t
);

  localparam int IW = X_W + 2;

  logic signed [IW-1:0] xm [T];
  logic signed [IW-1:0] um [T];
  logic [T-1:0]         s;

  always_comb begin
    logic signed [IW-1:0] carry;   // membrane potential handed to the next step
    carry = '0;
    for (int t = 0; t < T; t++) begin
      xm[t] = IW'(o[t]) + carry;
      s[t]  = xm[t] > IW'(vth);
      if (s[t]) um[t] = '0;
      else      um[t] = xm[t] >>> leak_shift;
      carry = um[t];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      spikes    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) spikes <= s;
    end
  end

endmodule
