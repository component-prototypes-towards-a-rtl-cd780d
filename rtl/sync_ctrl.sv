// sync_ctrl: frame synchronizer of the receiver (Fig. 13).
//
// It looks for the frame marker "1010" (bits 8-11 of the last word of a
// frame, T8-T11) in the aligned words of the data extractor and steers the
// extractor's bit offset. States:
//   HUNT   - watch FW words at the current offset; on a marker, take that word
//            as the last of a frame and go to CHECK; otherwise slip the offset
//            by one bit (and ignore the one word still cut at the old offset).
//   CHECK  - the marker must reappear every FW words LOCK_N times in a row,
//            else slip and HUNT.
//   LOCKED - frames are delivered; UNLOCK_N markers missed in a row send the
//            controller back to HUNT.
// For the word in the extractor's stage 2 it outputs, combinationally, the
// word's index in the frame and whether the frame is locked. Registered, at
// the extractor's output timing, it hands the 4-bit BCID field (bits 12-15
// of the control word) to the BCID generator and a marker-seen flag.
//
// The source says only that the synchronizer identifies the frame boundary,
// with the 1010 marker as identifier; the state machine, LOCK_N and UNLOCK_N
// are this design's choices.
module sync_ctrl
  import locic_pkg::*;
#(
  parameter int unsigned FW       = (locic_pkg::DEF_FRAME_SLOTS) / 2, // 16-bit words per frame
  parameter int unsigned LOCK_N   = 4,
  parameter int unsigned UNLOCK_N = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [15:0] aligned,
  output logic [3:0]  offset,
  output logic [3:0]  idx,          // index of the current stage-2 word
  output logic        locked_now,   // current stage-2 word is in a locked frame
  output logic        locked,
  output logic [3:0]  bcid_field,
  output logic        field_valid,
  output logic        marker_ok,    // registered: control word carried the marker
  output logic [7:0]  slips         // bit slips since reset (saturating)
);
  typedef enum logic [1:0] {HUNT, CHECK, LOCK} state_e;

  state_e     st;
  logic [3:0] idx_q, cnt;
  logic       skip;
  logic       match, at_end;

  assign match = aligned[11:8] == FRAME_MARKER;

  always_comb begin
    idx    = (idx_q == 4'(FW - 1)) ? 4'd0 : idx_q + 1'b1;
    if (st == HUNT) idx = 4'(FW - 1);
    at_end     = idx == 4'(FW - 1);
    locked_now = st == LOCK;
  end

  assign locked = st == LOCK;

  always_ff @(posedge clk) begin
    if (rst) begin
      st          <= HUNT;
      idx_q       <= 4'(FW - 1);
      cnt         <= '0;
      offset      <= '0;
      skip        <= 1'b1;
      bcid_field  <= '0;
      field_valid <= 1'b0;
      marker_ok   <= 1'b0;
      slips       <= '0;
    end else begin
      field_valid <= 1'b0;
      marker_ok   <= 1'b0;
      idx_q       <= idx;
      skip        <= 1'b0;
      unique case (st)
        HUNT: begin
          if (skip) begin
            cnt <= '0;
          end else if (match) begin
            st  <= CHECK;
            cnt <= 4'd1;
          end else if (cnt == 4'(FW - 1)) begin
            offset <= offset + 1'b1;
            skip   <= 1'b1;
            cnt    <= '0;
            if (slips != 8'hFF) slips <= slips + 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        CHECK: if (at_end) begin
          if (!match) begin
            st     <= HUNT;
            offset <= offset + 1'b1;
            skip   <= 1'b1;
            cnt    <= '0;
            if (slips != 8'hFF) slips <= slips + 1'b1;
          end else if (cnt == 4'(LOCK_N)) begin
            st  <= LOCK;
            cnt <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        LOCK: if (at_end) begin
          marker_ok   <= match;
          field_valid <= match;
          bcid_field  <= aligned[15:12];
          if (match) cnt <= '0;
          else if (cnt == 4'(UNLOCK_N - 1)) begin
            st     <= HUNT;
            offset <= offset + 1'b1;
            skip   <= 1'b1;
            cnt    <= '0;
            if (slips != 8'hFF) slips <= slips + 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        default: st <= HUNT;
      endcase
    end
  end
endmodule
