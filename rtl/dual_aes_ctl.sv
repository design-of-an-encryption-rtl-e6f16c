// dual_aes_ctl: dual AES core control.
//
// Schedules blocks onto the two AES round engines so that they work in
// parallel half a block time apart, as in the design's load/upload timing
// diagram: a block goes to engine 0, the next one Nr/2 cycles later to
// engine 1 (7 cycles for 256-bit keys), the next Nr/2 cycles later to engine 0
// again, in the very cycle engine 0 delivers its previous result. Results
// therefore leave in issue order, one every Nr/2 cycles, and the output
// multiplexer only has to select the engine whose `done` is high. The unit
// also sets the round count from the key size and, in CBC mode (`single`),
// disables engine 1 so that engine 0 alone takes a block every Nr cycles.
// `force1` sends the next block to engine 1 alone (the mode controller uses it
// to encrypt the XTS tweak while engine 0 keeps the data key).
//
// Interface: `can_issue` says a block may be issued this cycle and
// `issue_core` to which engine; the mode controller answers with `issue`, and
// this unit raises the engine's `load`. `out_valid`/`out_sel` qualify and
// steer the result multiplexer. `out_sel` is simply `done1` (the engines
// never finish in the same cycle), and bit 0 of `nr` is always 0 since every
// round count is even; both are kept as ports for clarity.
//
// Paper: the Nr/2 stagger, the CBC single engine, the round-count control and
// the output multiplexer. Own choices: the stagger is enforced as a minimum
// distance between issues (a slow source only stretches it), and engines are
// used strictly in turn.
module dual_aes_ctl
  import aes_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] ks,
  input  logic       single,
  input  logic       force1,
  input  logic       issue,
  input  logic       busy0,
  input  logic       busy1,
  input  logic       done0,
  input  logic       done1,
  output rnd_t       nr,
  output logic       can_issue,
  output logic       issue_core,
  output logic       load0,
  output logic       load1,
  output logic       out_valid,
  output logic       out_sel
);

  logic       next_core;
  logic [4:0] gap;        // cycles since the last issue (saturating)
  logic [4:0] min_gap;

  assign nr      = nr_of(ks);
  assign min_gap = single ? 5'(nr) : 5'(nr >> 1);

  always_comb begin
    if (force1) begin
      issue_core = 1'b1;
      can_issue  = !busy1;
    end else if (single) begin
      issue_core = 1'b0;
      can_issue  = !busy0 && !busy1;
    end else begin
      issue_core = next_core;
      can_issue  = (next_core ? !busy1 : !busy0) && (gap >= min_gap);
    end
  end

  assign load0     = issue && can_issue && !issue_core;
  assign load1     = issue && can_issue &&  issue_core;
  assign out_valid = done0 || done1;
  assign out_sel   = done1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_core <= 1'b0;
      gap       <= 5'h1f;
    end else begin
      if (load0 || load1) begin
        next_core <= (single || force1) ? 1'b0 : !issue_core;
        gap       <= 5'd1;
      end else if (gap != 5'h1f) begin
        gap <= gap + 5'd1;
      end
    end
  end

  one_result_per_cycle: assert property (@(posedge clk) disable iff (!rst_n) !(done0 && done1))
    else $error("dual_aes_ctl: both engines finished in the same cycle");
  issue_only_when_allowed: assert property (@(posedge clk) disable iff (!rst_n) issue |-> can_issue)
    else $error("dual_aes_ctl: issue without can_issue");

endmodule
