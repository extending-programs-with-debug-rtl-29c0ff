// dir_classifier: splits incoming traffic between the host program and the
// controller.
//
// The program is extended with a check on every received packet: a direction
// packet is handed to the controller, any other packet is handled by the
// program as before. The check looks only at the first beat of a packet: a
// direction packet carries DIR_TAG in its top 16 bits. The decision is kept
// for the rest of the packet, so packets are never split between the two
// outputs. The paper gives this function; the tag and its position are this
// design's own choice, since the paper calls the packet format only "custom
// and simple".
//
// Interface: one valid/ready beat stream in, two out (prog_* to the host
// program, ctl_* to the controller). Purely combinational forwarding with a
// one-bit state for "inside a packet" and one for its route; no added latency
// and the full rate of one beat per cycle. dir_pkts and data_pkts count the
// packets sent each way.
module dir_classifier
  import casp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  beat_t       in_beat,
  output logic        prog_valid,
  input  logic        prog_ready,
  output beat_t       prog_beat,
  output logic        ctl_valid,
  input  logic        ctl_ready,
  output beat_t       ctl_beat,
  output logic [31:0] dir_pkts,
  output logic [31:0] data_pkts
);

  logic in_pkt;      // a packet has started and its last beat is not yet through
  logic route_q;     // route of that packet: 1 = controller
  logic is_dir;
  logic route;

  assign is_dir = (in_beat.data[BEAT_W-1 -: 16] == DIR_TAG);
  assign route  = in_pkt ? route_q : is_dir;

  assign prog_beat  = in_beat;
  assign ctl_beat   = in_beat;
  assign prog_valid = in_valid && !route;
  assign ctl_valid  = in_valid &&  route;
  assign in_ready   = route ? ctl_ready : prog_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt    <= 1'b0;
      route_q   <= 1'b0;
      dir_pkts  <= '0;
      data_pkts <= '0;
    end else if (in_valid && in_ready) begin
      if (!in_pkt) begin
        route_q <= is_dir;
        if (is_dir) dir_pkts  <= dir_pkts + 1'b1;
        else        data_pkts <= data_pkts + 1'b1;
      end
      in_pkt <= !in_beat.last;
    end
  end

  // A source keeps a beat on offer, unchanged, until it is taken.
  a_in_hold: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_beat));

endmodule
