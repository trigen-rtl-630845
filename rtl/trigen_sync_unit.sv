// trigen_sync_unit: multi-NPU synchronisation (Sync register and Sync-ID compare).
//
// When the NPU reaches a SYNC instruction, start is pulsed with the
// instruction's Sync-ID. The unit records it in its own Sync register and
// broadcasts it to the other NPUs (sync_out_valid for one cycle with
// sync_out_id). It keeps a copy of the last Sync-ID broadcast by each of the
// other NPUs and holds the NPU (done low) until every one of them has reached
// at least the same Sync-ID; then done pulses for one cycle. The Sync register,
// the broadcast and the comparison follow the paper; "at least the same ID"
// (unsigned compare, IDs increasing along the program) is this design's
// reading. With NUM_NPUS = 1 there is nobody to wait for and done follows start
// by one cycle.
module trigen_sync_unit #(
  parameter int NUM_NPUS = 1,
  parameter int NR = (NUM_NPUS > 1) ? NUM_NPUS - 1 : 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] sync_id,
  output logic       done,
  output logic       busy,
  output logic       sync_out_valid,
  output logic [7:0] sync_out_id,
  input  logic       sync_in_valid [NR],
  input  logic [7:0] sync_in_id    [NR]
);
  logic [7:0] own;
  logic [7:0] remote [NR];
  logic       waiting;
  logic       all_ok;

  always_comb begin
    all_ok = 1'b1;
    for (int i = 0; i < NUM_NPUS - 1; i++)
      if (remote[i] < own) all_ok = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      own <= '0; waiting <= 1'b0; done <= 1'b0; sync_out_valid <= 1'b0;
      for (int i = 0; i < NR; i++) remote[i] <= '0;
    end else begin
      for (int i = 0; i < NR; i++) if (sync_in_valid[i]) remote[i] <= sync_in_id[i];
      sync_out_valid <= 1'b0;
      done <= 1'b0;
      if (start && !waiting) begin
        own <= sync_id;
        sync_out_valid <= 1'b1;
        waiting <= 1'b1;
      end else if (waiting && all_ok) begin
        waiting <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  assign sync_out_id = own;
  assign busy = waiting;
endmodule
