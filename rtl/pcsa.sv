// pcsa: behavioural model of the precharge sense amplifier that reads one
// 2T2R synapse (not synthesizable logic: the circuit is analog).
//
// Circuit: two cross-coupled inverters whose pull-down branches run through
// the BL and BLb devices, with SEN switching precharge transistors on the
// outputs and a discharge transistor to ground. While SEN = 0 both outputs
// are precharged to VDD (q = qb = 1). When SEN rises both branches discharge;
// the branch with the lower resistance discharges faster and its inverter
// drives the other output back to VDD, so the outputs end complementary: R_BL < R_BLb
// gives q = 1, qb = 0 (weight +1), R_BL > R_BLb gives q = 0, qb = 1.
// Timing: the outputs separate t_sw after SEN rises, with
//     t_sw = T0_PS + K_PS_PER_KOHM * min(R_BL, R_BLb) / 1 kOhm   (ps).
// This line passes through the two switching times the paper reports for its
// 130 nm process at the near-threshold supply of 0.6 V: 50 ns for a
// 20 kOhm / 350 kOhm pair and 200 ns for 320 kOhm / 350 kOhm. The straight
// line, and its use for all other pairs, are this model's choice; it
// reproduces the paper's observation that the switching time is set mainly
// by the lower of the two resistances, so that with a 70 ns window pairs
// whose lower device is above 60 kOhm read as "not resolved". Equal
// resistances never resolve (mismatch is not modelled), nor does an open
// column. By default the model has no noise and reads near the boundary are
// deterministic. The measured chip shows pairs near the boundary that "may
// or may not converge"; SPREAD_PCT > 0 reproduces that qualitatively by
// scaling each read's t_sw by a factor drawn uniformly from
// 1 +- SPREAD_PCT/100 ($urandom). The paper gives no figure for this
// spread, so it is off (0) unless a user sets it. If SEN falls before t_sw, the read is abandoned and the
// outputs stay precharged. Resistances must be stable while SEN is high.
module pcsa #(
  parameter int unsigned T0_PS         = 40_000,
  parameter int unsigned K_PS_PER_KOHM = 500,
  parameter int unsigned SPREAD_PCT    = 0
) (
  input  logic        sen,
  input  logic [31:0] r_bl,
  input  logic [31:0] r_blb,
  output logic        q,
  output logic        qb
);

  timeunit 1ns;
  timeprecision 1ps;

  int unsigned read_id;         // identifies the current evaluation phase

  // Switching time in ps, or 0 if the pair never resolves.
  function automatic longint unsigned t_switch_ps(logic [31:0] a, logic [31:0] b);
    logic [31:0] rmin;
    if (a == b || a == 32'hFFFF_FFFF || b == 32'hFFFF_FFFF) return 0;
    rmin = (a < b) ? a : b;
    return longint'(T0_PS) + (longint'(K_PS_PER_KOHM) * longint'(rmin)) / 1000;
  endfunction

  // Random read-to-read variation of the switching time (see header).
  function automatic longint unsigned spread(longint unsigned t);
    longint signed pct;
    if (SPREAD_PCT == 0 || t == 0) return t;
    pct = longint'($urandom_range(2 * SPREAD_PCT)) - longint'(SPREAD_PCT);
    return longint'(t) + (longint'(t) * pct) / 100;
  endfunction

  initial begin
    read_id = 0;
    q  = 1'b1;
    qb = 1'b1;
  end

  always @(sen) begin
    read_id = read_id + 1;
    q  = 1'b1;                  // precharge, or start of evaluation
    qb = 1'b1;
    if (sen) begin
      fork
        begin : evaluate
          automatic int unsigned    id    = read_id;
          automatic longint unsigned t_ps = spread(t_switch_ps(r_bl, r_blb));
          automatic logic           bl_lo = (r_bl < r_blb);
          if (t_ps != 0) begin
            #(real'(t_ps) * 1ps);
            if (sen && id == read_id) begin
              q  = bl_lo;
              qb = !bl_lo;
            end
          end
        end
      join_none
    end
  end

endmodule
