// nn_ctrl: phase controller of the classifier IP.
//
// A readout goes through Configure (idle) -> Offset -> Load -> Compute ->
// Store and back. The rising edge of trigger, seen in cycle t0, starts it:
// the stream beat present in cycle t0 + readout_offset is sample 0 (an
// offset of 0 takes the beat of cycle t0 itself). From then on every valid
// beat is written to the window buffer until WINDOW beats have been taken;
// the source is never stalled, and in_tready, high only during the load, is
// informational. The cycle after the last beat (tL + 1) the controller
// pulses nn_start; Compute lasts NN_LATENCY = 8 cycles (tL+1 .. tL+8) and
// Store STORE_LATENCY = 2 cycles (tL+9, tL+10), when the store unit writes
// the two logits. Triggers that arrive while a readout or a clear is in
// progress are ignored.
//
// In Configure, a pending deep-reset request is served first: clear_start
// is pulsed and the controller waits in Clear until clear_done.
//
// From the published design: the four phases, the offset counted in clock
// cycles from the trigger's rising edge, the load of window_size beats
// without back-pressure, 8 compute and 2 store cycles. This design's
// choices: the exact alignment of sample 0, counting only valid beats,
// ignoring triggers while busy, and the Clear phase.
// Reset is synchronous and active low.
module nn_ctrl import nn_pkg::*; #(
  parameter int unsigned WINDOW = nn_pkg::WINDOW_SIZE,
  parameter int unsigned OFS_W  = nn_pkg::OFFSET_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      trigger,
  input  logic                      in_tvalid,
  input  logic [OFS_W-1:0]          readout_offset,
  input  logic                      clear_req,
  input  logic                      clear_done,
  output phase_t                    phase,
  output logic                      in_tready,
  output logic                      buf_we,
  output logic [$clog2(WINDOW)-1:0] buf_idx,
  output logic                      nn_start,
  output logic                      clear_start,
  output logic                      trig_ignored
);
  localparam int unsigned IDX_W = $clog2(WINDOW);
  localparam int unsigned LAT_W = 4;

  logic             trig_q, edge_seen;
  logic [OFS_W-1:0] ofs_cnt;
  logic [LAT_W-1:0] lat_cnt;
  logic             start_here, last;

  assign edge_seen   = trigger && !trig_q;
  assign clear_start = (phase == PH_CONFIG) && clear_req;
  // Load begins in the trigger cycle itself when the offset is zero.
  assign start_here  = (phase == PH_CONFIG) && !clear_req && edge_seen;
  assign in_tready   = (phase == PH_LOAD)
                    || (start_here && readout_offset == '0)
                    || (phase == PH_OFFSET && ofs_cnt == readout_offset);
  assign buf_we      = in_tready && in_tvalid;
  assign last        = buf_we && (buf_idx == IDX_W'(WINDOW - 1));
  assign trig_ignored = edge_seen && (phase != PH_CONFIG || clear_req);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      trig_q   <= 1'b0;
      phase    <= PH_CONFIG;
      ofs_cnt  <= '0;
      lat_cnt  <= '0;
      buf_idx  <= '0;
      nn_start <= 1'b0;
    end else begin
      trig_q   <= trigger;
      nn_start <= 1'b0;
      if (buf_we) buf_idx <= last ? '0 : buf_idx + 1'b1;

      unique case (phase)
        PH_CONFIG: begin
          if (clear_req)       phase <= PH_CLEAR;
          else if (edge_seen) begin
            ofs_cnt <= OFS_W'(1);
            phase   <= (readout_offset == '0) ? PH_LOAD : PH_OFFSET;
          end
        end
        PH_OFFSET: begin
          if (ofs_cnt == readout_offset) phase <= PH_LOAD;
          else                           ofs_cnt <= ofs_cnt + 1'b1;
        end
        PH_LOAD:    ;
        PH_COMPUTE: begin
          lat_cnt <= lat_cnt + 1'b1;
          if (lat_cnt == LAT_W'(NN_LATENCY - 1)) begin
            lat_cnt <= '0;
            phase   <= PH_STORE;
          end
        end
        PH_STORE: begin
          lat_cnt <= lat_cnt + 1'b1;
          if (lat_cnt == LAT_W'(STORE_LATENCY - 1)) begin
            lat_cnt <= '0;
            phase   <= PH_CONFIG;
          end
        end
        PH_CLEAR: if (clear_done) phase <= PH_CONFIG;
        default:  phase <= PH_CONFIG;
      endcase

      // The last beat ends the load, whichever phase it was taken in.
      if (last) begin
        phase    <= PH_COMPUTE;
        lat_cnt  <= '0;
        nn_start <= 1'b1;
      end
    end
  end

  a_start_after_load: assert property (@(posedge clk) disable iff (!rst_n)
    nn_start |-> phase == PH_COMPUTE && lat_cnt == '0);
endmodule
