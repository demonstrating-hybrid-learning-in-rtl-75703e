// corr_sensor_model: behavioural model (not synthesizable) of the analog
// STDP correlation sensor inside every synapse.
//
// Behaviour, following the paper's description of the circuit: a latch
// remembers whether the last event was a pre or a post pulse. Each event
// restarts the time measurement on its side. When a post follows a pre
// (latch toggles), the elapsed time dt since that pre is turned into
// eta * exp(-dt / tau) and added to the causal store; when a pre follows a
// post, the same is added to the anti-causal store. Repeated events of the
// same kind only restart the measurement. This is the reduced symmetric
// nearest-neighbour pairing of the paper. Stored values are the paper's a+
// and a- (0 V = reset level, growing with accumulation) and are clamped to
// the 1.3 V usable storage range.
//
// Analog controls: tau_us is the row time constant (set by the ramp bias),
// eta_v the storage gain. The 4 calibration bits scale them: bits 1..0 change
// tau in steps of 20 % (the paper: "the length of M4 can be digitally
// controlled in four steps by approximately 20 %"), bits 3..2 scale eta in
// steps of 20 % for the adjustable transfer capacitor (own modelling choice).
// The stores are cleared by rst_causal / rst_anti (column reset AND row reset
// enable). Leakage, mismatch and the exact charge-sharing curve are not
// modelled. The model samples its inputs on clk: an event is a rising edge
// of pre or post seen at a clock edge, and its time is the value of t_us
// (hardware time in microseconds, supplied by the environment) at that edge.
module corr_sensor_model #(
  parameter real VMAX = 1.3
) (
  input  logic       clk,
  input  real        t_us,
  input  logic       pre,
  input  logic       post,
  input  logic [3:0] calib,
  input  real        tau_us,
  input  real        eta_v,
  input  logic       rst_causal,
  input  logic       rst_anti,
  output real        a_causal,
  output real        a_anti
);
  typedef enum logic [1:0] {LAST_NONE, LAST_PRE, LAST_POST} last_e;
  last_e last;
  real   t_pre, t_post;
  logic  pre_d, post_d;
  real   acc_c, acc_a;

  function automatic real incr(input real dt);
    real tau, eta;
    tau = tau_us * (1.0 + 0.2 * real'(calib[1:0]));
    eta = eta_v * (1.0 + 0.2 * real'(calib[3:2]));
    return eta * $exp(-dt / tau);
  endfunction

  initial begin
    last  = LAST_NONE;
    acc_c = 0.0;
    acc_a = 0.0;
    t_pre = 0.0;
    t_post = 0.0;
    pre_d  = 1'b0;
    post_d = 1'b0;
  end

  always @(posedge clk) begin
    logic  pre_ev, post_ev;
    last_e nlast;
    real   nc, na, ntp, ntq;
    pre_ev  = pre && !pre_d;
    post_ev = post && !post_d;
    nlast = last; nc = acc_c; na = acc_a; ntp = t_pre; ntq = t_post;
    if (rst_causal) nc = 0.0;
    if (rst_anti)   na = 0.0;
    if (pre_ev && post_ev) begin
      // coincident pulses: both measurements restart, nothing is stored
      ntp   = t_us;
      ntq   = t_us;
      nlast = LAST_NONE;
    end else if (post_ev) begin
      if (last == LAST_PRE && !rst_causal) nc = nc + incr(t_us - t_pre);
      ntq   = t_us;
      nlast = LAST_POST;
    end else if (pre_ev) begin
      if (last == LAST_POST && !rst_anti) na = na + incr(t_us - t_post);
      ntp   = t_us;
      nlast = LAST_PRE;
    end
    if (nc > VMAX) nc = VMAX;
    if (na > VMAX) na = VMAX;
    pre_d  <= pre;
    post_d <= post;
    last   <= nlast;
    acc_c  <= nc;
    acc_a  <= na;
    t_pre  <= ntp;
    t_post <= ntq;
  end

  assign a_causal = acc_c;
  assign a_anti   = acc_a;
endmodule
