// combine_data: measurement controller and word assembly.
// After a measurement the result registers hold still: polarity from the
// discriminator, the coarse difference and the two fine phases. This block runs
// in the interface clock domain (clk). It brings the asynchronous stop level
// in through a SYNC_STAGES flip-flop synchroniser; once stop is seen it packs
// the 16-bit word {polarity, coarse[8:0], fine_start[2:0], fine_stop[2:0]} and
// offers it on a valid/ready handshake. After the word is taken it asserts clr
// (a registered, glitch-free asynchronous clear for the capture flip-flops)
// and holds it until every synchroniser stage has fallen, then waits for the next
// interval. After reset clr is raised for the first time one clock after
// rst_n is released: it is low during reset, so its rising edge clears the
// capture flip-flops whatever state they powered up in.
// Latency: stop edge to word_valid is SYNC_STAGES+1 clk cycles; the clear takes
// SYNC_STAGES+1 cycles more after the handshake. Sending before clearing, and
// the word layout apart from the order of the fine fields, follow the
// published design; the synchroniser and handshake are this design's choices.
`timescale 1ps/1ps
module combine_data
  import tdc_pkg::*;
#(
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                stop,
  input  logic                polarity,
  input  logic [COARSE_W-1:0] coarse,
  input  logic [FINE_W-1:0]   fine_start,
  input  logic [FINE_W-1:0]   fine_stop,
  output logic                clr,
  output tdc_word_t           word,
  output logic                word_valid,
  input  logic                word_ready
);
  typedef enum logic [1:0] {S_RESET, S_CLEAR, S_IDLE, S_SEND} state_t;
  state_t state;

  logic [SYNC_STAGES-1:0] stop_sync;
  logic                   stop_seen;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) stop_sync <= '0;
    else        stop_sync <= {stop_sync[SYNC_STAGES-2:0], stop};

  assign stop_seen = stop_sync[SYNC_STAGES-1];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state      <= S_RESET;
      clr        <= 1'b0;
      word       <= '0;
      word_valid <= 1'b0;
    end else begin
      unique case (state)
        S_RESET: begin
          clr   <= 1'b1;
          state <= S_CLEAR;
        end
        S_CLEAR:  // leave only when the whole synchroniser has flushed
          if (stop_sync == '0) begin
            state <= S_IDLE;
            clr   <= 1'b0;
          end
        S_IDLE:
          if (stop_seen) begin
            word       <= '{polarity: polarity, coarse: coarse,
                            fine_start: fine_start, fine_stop: fine_stop};
            word_valid <= 1'b1;
            state      <= S_SEND;
          end
        S_SEND:
          if (word_ready) begin
            word_valid <= 1'b0;
            clr        <= 1'b1;
            state      <= S_CLEAR;
          end
        default: state <= S_CLEAR;
      endcase
    end

  // The word must stay on offer, unchanged, until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    word_valid && !word_ready |=> word_valid && $stable(word));
endmodule
