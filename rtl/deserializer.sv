// deserializer: serial-to-parallel converter of the receiver.
//
// An FSM turns the recovered bit stream back into a frame of NUM_WORDS
// parallel streams of WORD_W bits (8 x 32 by default, as in the link
// specification). The framing is this design's choice and matches the
// serializer: in DES_HUNT the last SYNC_W bits are compared with the header
// SYNC_WORD; once it is found, DES_DATA shifts in NUM_WORDS*WORD_W bits, MSB
// first, stream 0 first, then returns to DES_HUNT. While hunting after a
// frame, at least SYNC_W new bits must arrive before a match counts, so data
// bits left in the shift register cannot fake a header.
// Interface: bit_i is taken on clocks where bit_valid_i is high. data_o holds
// the last complete frame; valid_o pulses for one clock when it is updated,
// on the clock after the frame's last bit was taken. sync_o is high in DES_DATA.
// Lint notes: the top bits of the header and word shift registers are shifted
// out and never read (only the low bits feed the next shift and the
// comparison); lint reports them as unused, which is harmless.
`timescale 1ps/1ps
module deserializer
#(
  parameter int unsigned NUM_WORDS = serdes_pkg::NUM_WORDS,
  parameter int unsigned WORD_W    = serdes_pkg::WORD_W
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              bit_i,
  input  logic                              bit_valid_i,
  output logic [NUM_WORDS-1:0][WORD_W-1:0]  data_o,
  output logic                              valid_o,
  output logic                              sync_o
);
  localparam int unsigned WI_W = (NUM_WORDS > 1) ? $clog2(NUM_WORDS) : 1;
  localparam int unsigned BI_W = $clog2(WORD_W);
  localparam int unsigned HC_W = $clog2(serdes_pkg::SYNC_W + 1);

  serdes_pkg::des_state_e                       state;
  logic [serdes_pkg::SYNC_W-1:0]                hunt_sr;
  logic [HC_W-1:0]                  hunt_cnt;
  logic [WORD_W-1:0]                word_sr;
  logic [NUM_WORDS-1:0][WORD_W-1:0] frame_q;
  logic [WI_W-1:0]                  word_idx;
  logic [BI_W-1:0]                  bit_idx;
  logic [serdes_pkg::SYNC_W-1:0]                hunt_next;

  assign hunt_next = {hunt_sr[serdes_pkg::SYNC_W-2:0], bit_i};
  assign sync_o    = (state == serdes_pkg::DES_DATA);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= serdes_pkg::DES_HUNT;
      hunt_sr  <= '0;
      hunt_cnt <= '0;
      word_sr  <= '0;
      frame_q  <= '0;
      word_idx <= '0;
      bit_idx  <= '0;
      data_o   <= '0;
      valid_o  <= 1'b0;
    end else begin
      valid_o <= 1'b0;
      if (bit_valid_i) begin
        unique case (state)
          serdes_pkg::DES_HUNT: begin
            hunt_sr <= hunt_next;
            if (hunt_cnt != HC_W'(serdes_pkg::SYNC_W)) hunt_cnt <= hunt_cnt + 1'b1;
            if ((hunt_cnt >= HC_W'(serdes_pkg::SYNC_W-1)) && (hunt_next == serdes_pkg::SYNC_WORD)) begin
              state    <= serdes_pkg::DES_DATA;
              word_idx <= '0;
              bit_idx  <= '0;
            end
          end
          serdes_pkg::DES_DATA: begin
            word_sr <= {word_sr[WORD_W-2:0], bit_i};
            bit_idx <= bit_idx + 1'b1;
            if (bit_idx == BI_W'(WORD_W-1)) begin
              bit_idx           <= '0;
              frame_q[word_idx] <= {word_sr[WORD_W-2:0], bit_i};
              word_idx          <= word_idx + 1'b1;
              if (word_idx == WI_W'(NUM_WORDS-1)) begin
                data_o           <= frame_q;
                data_o[word_idx] <= {word_sr[WORD_W-2:0], bit_i};
                valid_o          <= 1'b1;
                state            <= serdes_pkg::DES_HUNT;
                hunt_cnt         <= '0;
              end
            end
          end
          default: state <= serdes_pkg::DES_HUNT;
        endcase
      end
    end
  end
endmodule
