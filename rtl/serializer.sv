// serializer: parallel-to-serial converter of the transmitter.
//
// An FSM takes a frame of NUM_WORDS parallel streams of WORD_W bits and sends
// the streams one after another, one bit per clock, stream 0 first and each
// stream MSB first. The 8x32 frame size follows the link specification; the
// FSM's three states and the framing are this design's choice:
//   SER_IDLE  no frame: send the alternating pattern 1010... so the receiver's
//             CDR keeps seeing transitions,
//   SER_SYNC  send the SYNC_W-bit header SYNC_WORD that marks a frame start,
//   SER_DATA  send NUM_WORDS*WORD_W data bits.
// Interface: valid_i/ready_o handshake; a frame is taken when both are high.
// ready_o is high in SER_IDLE and on the last data bit, so frames may follow
// back to back, one every SYNC_W + NUM_WORDS*WORD_W clocks (264 by default).
// Timing: ser_o is registered; the first header bit appears on ser_o one clock
// after the frame is taken. With INVERT_OUT set, ser_o carries the complement
// of each bit, because the three-stage inverter driver that follows inverts.
`timescale 1ps/1ps
module serializer
#(
  parameter int unsigned NUM_WORDS  = serdes_pkg::NUM_WORDS,
  parameter int unsigned WORD_W     = serdes_pkg::WORD_W,
  parameter bit          INVERT_OUT = 1'b1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [NUM_WORDS-1:0][WORD_W-1:0]  data_i,
  input  logic                              valid_i,
  output logic                              ready_o,
  output logic                              ser_o,
  output logic                              busy_o
);
  localparam int unsigned WI_W = (NUM_WORDS > 1) ? $clog2(NUM_WORDS) : 1;
  localparam int unsigned BI_W = $clog2(WORD_W);
  localparam int unsigned SI_W = $clog2(serdes_pkg::SYNC_W);

  serdes_pkg::ser_state_e                       state;
  logic [NUM_WORDS-1:0][WORD_W-1:0] frame_q;
  logic [WI_W-1:0]                  word_idx;
  logic [BI_W-1:0]                  bit_idx;
  logic [SI_W-1:0]                  sync_idx;
  logic                             idle_bit;
  logic                             last_bit;
  logic                             take;
  logic                             next_bit;

  assign last_bit = (state == serdes_pkg::SER_DATA) && (word_idx == WI_W'(NUM_WORDS-1)) &&
                    (bit_idx == BI_W'(WORD_W-1));
  assign ready_o  = (state == serdes_pkg::SER_IDLE) || last_bit;
  assign take     = valid_i && ready_o;
  assign busy_o   = (state != serdes_pkg::SER_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= serdes_pkg::SER_IDLE;
      frame_q  <= '0;
      word_idx <= '0;
      bit_idx  <= '0;
      sync_idx <= '0;
      idle_bit <= 1'b0;
    end else begin
      if (take) begin
        frame_q  <= data_i;
        state    <= serdes_pkg::SER_SYNC;
        sync_idx <= '0;
      end else begin
        unique case (state)
          serdes_pkg::SER_IDLE: idle_bit <= ~idle_bit;
          serdes_pkg::SER_SYNC: begin
            sync_idx <= sync_idx + 1'b1;
            if (sync_idx == SI_W'(serdes_pkg::SYNC_W-1)) begin
              state    <= serdes_pkg::SER_DATA;
              word_idx <= '0;
              bit_idx  <= '0;
            end
          end
          serdes_pkg::SER_DATA: begin
            bit_idx <= bit_idx + 1'b1;
            if (bit_idx == BI_W'(WORD_W-1)) begin
              bit_idx  <= '0;
              word_idx <= word_idx + 1'b1;
              if (word_idx == WI_W'(NUM_WORDS-1)) begin
                state    <= serdes_pkg::SER_IDLE;
                idle_bit <= 1'b1;
              end
            end
          end
          default: state <= serdes_pkg::SER_IDLE;
        endcase
      end
    end
  end

  // Bit to be sent in the current state; registered into ser_o.
  always_comb begin
    unique case (state)
      serdes_pkg::SER_SYNC: next_bit = serdes_pkg::SYNC_WORD[SI_W'(serdes_pkg::SYNC_W-1) - sync_idx];
      serdes_pkg::SER_DATA: next_bit = frame_q[word_idx][BI_W'(WORD_W-1) - bit_idx];
      default:  next_bit = idle_bit;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ser_o <= INVERT_OUT;
    else        ser_o <= next_bit ^ INVERT_OUT;
  end
endmodule
