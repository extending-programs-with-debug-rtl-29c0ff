// pkt_merge: joins the host program's output and the controller's replies into
// the core's single output stream.
//
// Both the program and the controller send packets towards the output queues;
// this block interleaves them a whole packet at a time, so a reply never lands
// inside a program packet. When both have a packet waiting the grant
// alternates (round robin); once a packet has started its source keeps the
// grant until the beat with last set has been taken. A beat once offered is
// never withdrawn in favour of the other source. The paper shows only the
// joining point; the packet-level round-robin policy is this design's choice.
//
// Interface: two valid/ready beat streams in (in0 = program, in1 = controller),
// one out. Combinational forwarding: no added latency, one beat per cycle.
module pkt_merge
  import casp_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in0_valid,
  output logic  in0_ready,
  input  beat_t in0_beat,
  input  logic  in1_valid,
  output logic  in1_ready,
  input  beat_t in1_beat,
  output logic  out_valid,
  input  logic  out_ready,
  output beat_t out_beat
);

  logic busy;      // a packet is in flight
  logic owner;     // its source
  logic prio;      // source that wins the next tie
  logic sel;

  always_comb begin
    if (busy)                      sel = owner;
    else if (in0_valid && in1_valid) sel = prio;
    else                           sel = in1_valid;
  end

  assign out_valid = sel ? in1_valid : in0_valid;
  assign out_beat  = sel ? in1_beat  : in0_beat;
  assign in0_ready = out_ready && !sel;
  assign in1_ready = out_ready &&  sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      owner <= 1'b0;
      prio  <= 1'b0;
    end else if (out_valid) begin
      // an offered beat locks the choice until its packet's last beat is taken
      owner <= sel;
      busy  <= !(out_ready && out_beat.last);
      if (out_ready && out_beat.last) prio <= !sel;
    end
  end

  // The output keeps a beat on offer, unchanged, until it is taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_beat));

endmodule
