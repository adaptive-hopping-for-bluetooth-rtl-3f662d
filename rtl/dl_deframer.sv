// dl_deframer: finds and checks downlink command frames in the sliced bit stream.
//
// Frame, sent most significant bit first:
//   SYNC (16 bits, 0xD391) | TYPE (8) | LEN (8) | PAYLOAD (LEN bytes) | CRC-8 (8)
// After SYNC the edge inserts the opposite bit after every five equal
// consecutive bits (bit stuffing in both polarities), so no run inside a
// frame is longer than five: a longer run of "on" bits can only be the
// excitation carrier, a longer run of "off" bits is silence, and the bit
// timing recovery sees an edge at least every six bits. This block hunts for
// SYNC in a 16-bit shift register, removes the stuffed bits, collects the
// bytes and compares the CRC-8 (x^8+x^2+x+1, initial 0, over TYPE, LEN and
// PAYLOAD) with the last byte. A good frame raises frame_ok for one cycle
// with type, len and payload held until the next frame; a bad one (CRC
// mismatch, LEN above MAX_PAYLOAD or a stuffing violation: a sixth equal
// bit, which also ends a frame whose length was corrupted at the first gap) raises frame_err.
// `abort` (the carrier) drops a frame in progress.
//
// Timing: frame_ok/frame_err follow the cycle of the last CRC bit by one.
//
// The paper only says the tag checks each downlink packet for correctness;
// the sync word, the layout, the stuffing and the CRC are this design's.
module dl_deframer
  import cd_pkg::*;
#(
  parameter int unsigned MAX_LEN   = MAX_PAYLOAD,
  parameter logic [15:0] SYNC_WORD = 16'hD391
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     bit_valid,
  input  logic                     bit_in,
  input  logic                     abort,
  output logic                     frame_ok,
  output logic                     frame_err,
  output logic [7:0]               frame_type,
  output logic [7:0]               frame_len,
  output logic [MAX_LEN-1:0][7:0]  frame_payload
);
  typedef enum logic [2:0] {S_HUNT, S_TYPE, S_LEN, S_PAYLOAD, S_CRC} state_e;

  state_e      state;
  logic [15:0] shreg;
  logic [2:0]  run_len;    // equal consecutive bits since the last change
  logic        run_val;
  logic [2:0]  bit_cnt;
  logic [7:0]  byte_sr;
  logic [7:0]  byte_idx;
  logic [7:0]  crc;
  logic [7:0]  byte_next;
  logic        stuffed;

  assign byte_next = {byte_sr[6:0], bit_in};
  assign stuffed   = (run_len == 3'd5);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_HUNT;
      shreg         <= '0;
      run_len       <= '0;
      run_val       <= 1'b0;
      bit_cnt       <= '0;
      byte_sr       <= '0;
      byte_idx      <= '0;
      crc           <= '0;
      frame_ok      <= 1'b0;
      frame_err     <= 1'b0;
      frame_type    <= '0;
      frame_len     <= '0;
      frame_payload <= '0;
    end else begin
      frame_ok  <= 1'b0;
      frame_err <= 1'b0;
      if (abort) begin
        state <= S_HUNT;
        shreg <= '0;
      end else if (bit_valid) begin
        if (state == S_HUNT) begin
          shreg <= {shreg[14:0], bit_in};
          if ({shreg[14:0], bit_in} == SYNC_WORD) begin
            state   <= S_TYPE;
            run_len <= '0;
            bit_cnt <= '0;
            crc     <= '0;
          end
        end else if (stuffed) begin
          // drop the stuffed bit; a sixth equal bit breaks the framing
          run_len <= 3'd1;
          run_val <= bit_in;
          if (bit_in == run_val) begin
            state     <= S_HUNT;
            shreg     <= '0;
            frame_err <= 1'b1;
          end
        end else begin
          run_len <= (run_len != '0 && bit_in == run_val) ? run_len + 3'd1 : 3'd1;
          run_val <= bit_in;
          byte_sr <= byte_next;
          bit_cnt <= bit_cnt + 3'd1;
          if (bit_cnt == 3'd7) begin
            unique case (state)
              S_TYPE: begin
                frame_type <= byte_next;
                crc        <= crc8_byte(crc, byte_next);
                state      <= S_LEN;
              end
              S_LEN: begin
                frame_len <= byte_next;
                crc       <= crc8_byte(crc, byte_next);
                byte_idx  <= '0;
                if (byte_next > 8'(MAX_LEN)) begin
                  state     <= S_HUNT;
                  shreg     <= '0;
                  frame_err <= 1'b1;
                end else begin
                  state <= (byte_next == 8'd0) ? S_CRC : S_PAYLOAD;
                end
              end
              S_PAYLOAD: begin
                frame_payload[byte_idx] <= byte_next;
                crc      <= crc8_byte(crc, byte_next);
                byte_idx <= byte_idx + 8'd1;
                if (byte_idx + 8'd1 == frame_len) state <= S_CRC;
              end
              default: begin  // S_CRC
                state     <= S_HUNT;
                shreg     <= '0;
                frame_ok  <= (byte_next == crc);
                frame_err <= (byte_next != crc);
              end
            endcase
          end
        end
      end
    end
  end
endmodule
