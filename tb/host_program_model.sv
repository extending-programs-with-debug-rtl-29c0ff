// host_program_model: behavioural stand-in for the network program that hosts
// the controller (testbench only, not synthesizable).
//
// A minimal request/response service with one extension point in its main
// loop, shaped like the programs the controller is meant to be embedded in.
// For each received packet it: counts it in variable 0; stores the low 64
// bits of the first beat in variable 1; reaches the extension point
// extend{EP_LABELS} and waits for ep_ack; then answers with a copy of the
// packet whose low 64 bits of the first beat are replaced by the current value
// of variable 1. A director that changes variable 1 while the program is held
// at a breakpoint therefore changes the answer, which lets a testbench see that
// state updates reach the program.
module host_program_model
  import casp_pkg::*;
#(
  parameter int unsigned NUM_CTR       = 32,
  parameter int unsigned NUM_HOST_VARS = 8,
  parameter int unsigned NUM_LABELS    = 4,
  parameter int unsigned MAX_BEATS     = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  beat_t                      in_beat,
  output logic                       out_valid,
  input  logic                       out_ready,
  output beat_t                      out_beat,
  output logic                       ep_req,
  output logic [NUM_LABELS-1:0]      ep_labels,
  input  logic                       ep_ack,
  output logic                       host_wr_en,
  output logic [$clog2(NUM_CTR)-1:0] host_wr_id,
  output word_t                      host_wr_data,
  input  word_t                      host_vars [NUM_HOST_VARS],
  input  logic [NUM_LABELS-1:0]      ep_set      // labels of the extension point
);

  beat_t pkt [MAX_BEATS];
  int    n;
  int    ep_count = 0;        // extension points passed, for the testbench

  initial begin
    in_ready = 1'b0; out_valid = 1'b0; out_beat = '0;
    ep_req = 1'b0; ep_labels = '0;
    host_wr_en = 1'b0; host_wr_id = '0; host_wr_data = '0;
    @(posedge clk iff rst_n);
    forever begin
      // receive
      n = 0;
      @(negedge clk); in_ready = 1'b1;
      do begin
        @(posedge clk);
        if (in_valid) begin
          if (n < MAX_BEATS) pkt[n] = in_beat;
          n++;
        end
      end while (!(in_valid && in_beat.last));
      @(negedge clk); in_ready = 1'b0;
      // variable 0 := variable 0 + 1 ; variable 1 := payload
      host_wr_en = 1'b1; host_wr_id = '0; host_wr_data = host_vars[0] + 1;
      @(negedge clk);
      host_wr_id = 1; host_wr_data = word_t'(pkt[0].data[63:0]);
      @(negedge clk);
      host_wr_en = 1'b0;
      // extension point
      ep_req = 1'b1; ep_labels = ep_set;
      do @(negedge clk); while (!ep_ack);
      ep_req = 1'b0;
      ep_count++;
      // answer
      pkt[0].data[63:0] = host_vars[1];
      for (int i = 0; i < n && i < MAX_BEATS; i++) begin
        out_valid = 1'b1; out_beat = pkt[i];
        do @(posedge clk); while (!out_ready);
        @(negedge clk);
      end
      out_valid = 1'b0;
    end
  end
endmodule
