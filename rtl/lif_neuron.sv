// lif_neuron: one leaky integrate-and-fire neuron with refractory counter and
// adaptive threshold.
//
// Per time step the neuron computes V(t) = V(t-1) + sum_i w_ij*x_i(t-1) - LEAK
// and fires when V(t) >= threshold. An adder and a register accumulate the
// weighted inputs (i_wspike while i_valid); at the end of the step i_leak adds
// the constant -LEAK through the same adder; i_fire then compares V with the
// threshold, raises o_spike for the step, returns V to the resting value 0 and
// loads refrac_cnt. While refrac_cnt is not zero the register is disabled (no
// integration, no leak) and the counter counts down once per i_fire. All three
// follow the LIF neuron drawing and text.
// Adaptive threshold: when i_learn is high a firing neuron raises its
// threshold by THETA_PLUS and a silent one lowers it by TH_DECAY per step,
// never below the programmed base (i_thres, loaded by i_thres_we). The paper
// names the rule ("increased once it fires and slowly reduced"); the step
// sizes, the 16-bit membrane width, the saturating adder and the resting value
// 0 are this design's choices. The threshold stays fixed when i_learn is low
// (inference).
// Timing: every input is taken at the clock edge; o_spike is valid from the
// cycle after i_fire until the next i_fire.
module lif_neuron #(
  parameter int V_W        = 16,
  parameter int W_W        = 8,
  parameter int LEAK       = 1,
  parameter int REFRAC     = 2,
  parameter int THETA_PLUS = 4,
  parameter int TH_DECAY   = 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  i_thres_we,  // load base threshold
  input  logic signed [V_W-1:0] i_thres,
  input  logic                  i_learn,     // adaptive threshold on
  input  logic                  i_valid,     // i_wspike valid
  input  logic signed [W_W-1:0] i_wspike,    // spike * weight
  input  logic                  i_leak,      // end of step: subtract LEAK
  input  logic                  i_fire,      // fire check
  output logic                  o_spike,
  output logic signed [V_W-1:0] o_V,
  output logic signed [V_W-1:0] o_thres
);
  localparam int RC_W = (REFRAC < 2) ? 1 : $clog2(REFRAC + 1);
  localparam logic signed [V_W-1:0] VMAX = {1'b0, {(V_W-1){1'b1}}};
  localparam logic signed [V_W-1:0] VMIN = {1'b1, {(V_W-1){1'b0}}};

  logic signed [V_W-1:0] v_q, th_q, base_q, addend;
  logic signed [V_W:0]   sum;
  logic [RC_W-1:0]       refrac_cnt;
  logic                  active, fire_now;

  assign active   = (refrac_cnt == '0);          // "=0" enables the register
  assign addend   = i_leak ? V_W'(-LEAK) : V_W'(i_wspike);
  assign sum      = {v_q[V_W-1], v_q} + {addend[V_W-1], addend};
  assign fire_now = active && (v_q >= th_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q        <= '0;
      th_q       <= VMAX;
      base_q     <= VMAX;
      refrac_cnt <= '0;
      o_spike    <= 1'b0;
    end else begin
      if (i_thres_we) begin
        base_q <= i_thres;
        th_q   <= i_thres;
      end else if (i_fire) begin
        o_spike <= fire_now;
        if (fire_now) begin
          v_q        <= '0;
          refrac_cnt <= RC_W'(REFRAC);
          if (i_learn) th_q <= (th_q > VMAX - V_W'(THETA_PLUS)) ? VMAX : th_q + V_W'(THETA_PLUS);
        end else begin
          if (!active) refrac_cnt <= refrac_cnt - 1'b1;
          if (i_learn && th_q > base_q)
            th_q <= (th_q - base_q > V_W'(TH_DECAY)) ? th_q - V_W'(TH_DECAY) : base_q;
        end
      end else if (active && (i_valid || i_leak)) begin
        if (sum > (V_W+1)'(VMAX))      v_q <= VMAX;
        else if (sum < (V_W+1)'(VMIN)) v_q <= VMIN;
        else                           v_q <= sum[V_W-1:0];
      end
    end
  end

  assign o_V     = v_q;
  assign o_thres = th_q;
endmodule
