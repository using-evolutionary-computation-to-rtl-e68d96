// input_sequencer: presents a batch of input vectors to the network, one after
// another, each for `hold` cycles of the 100 MHz sample clock.
//
// With hold = 32 a new vector appears every 0.32 us (3.125 MHz), the rate of
// the image-classification runs; hold = 16 (0.16 us) is the rate of the
// N-back runs. A `start` pulse latches num_vec and hold (hold 0 or above
// MAX_HOLD is taken as MAX_HOLD, hold 1 as 2) and reads vector 0 from the
// batch buffer. The buffer has a one-cycle read latency and a registered
// address, so the first vector reaches `x` three cycles after `start`; the
// next vector is prefetched while the current one is held (which is why at
// least 2 cycles per vector are needed), so vectors follow each other with no
// gap. `x` is registered and changes only on clock
// edges; after the batch it keeps the last vector.
//
// Alongside `x` the sequencer emits a sample_tag_t for every cycle in which a
// vector is presented (vector index, phase, first/last cycle of the vector,
// last cycle of the batch). `busy` covers the whole presentation and `done`
// pulses once after it. The rates come from the paper; the handshake, the
// prefetch and the behaviour after the batch are this design's choices.
`timescale 1ns/1ps
module input_sequencer
  import rpu_pkg::*;
#(
  parameter int unsigned N_IN     = rpu_pkg::DEF_N_IN,
  parameter int unsigned DEPTH    = rpu_pkg::DEF_BATCH,
  parameter int unsigned MAX_HOLD = rpu_pkg::DEF_SAMPLES,
  localparam int unsigned AW      = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [VEC_W-1:0]   num_vec,
  input  logic [PHASE_W-1:0] hold,
  output logic [AW-1:0]      rd_addr,
  input  logic [N_IN-1:0]    rd_data,
  output logic [N_IN-1:0]    x,
  output sample_tag_t        tag,
  output logic               busy,
  output logic               done
);

  typedef enum logic [1:0] {S_IDLE, S_ADDR, S_FETCH, S_RUN} state_t;
  state_t             state;
  logic [VEC_W-1:0]   n_q;
  logic [PHASE_W-1:0] hold_q;

  wire last_phase = (tag.phase == hold_q - 1'b1);
  wire last_vec   = (tag.vec == n_q - 1'b1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      rd_addr <= '0;
      x       <= '0;
      tag     <= '0;
      n_q     <= '0;
      hold_q  <= PHASE_W'(MAX_HOLD);
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start && num_vec != '0) begin
            n_q     <= (32'(num_vec) > DEPTH) ? VEC_W'(DEPTH) : num_vec;
            hold_q  <= (hold == '0 || 32'(hold) > MAX_HOLD) ? PHASE_W'(MAX_HOLD) :
                       (hold == PHASE_W'(1)) ? PHASE_W'(2) : hold;
            rd_addr <= '0;
            state   <= S_ADDR;
          end
        end
        S_ADDR: state <= S_FETCH;  // buffer registers vector 0 at this edge
        S_FETCH: begin
          // rd_data now holds vector 0
          x         <= rd_data;
          tag.valid <= 1'b1;
          tag.first <= 1'b1;
          tag.vec   <= '0;
          tag.phase <= '0;
          tag.last  <= 1'b0;
          tag.final_ <= 1'b0;
          rd_addr   <= AW'(1);
          state     <= S_RUN;
        end
        S_RUN: begin
          if (last_phase) begin
            if (last_vec) begin
              tag   <= '0;
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              x          <= rd_data;
              tag.first  <= 1'b1;
              tag.vec    <= tag.vec + 1'b1;
              tag.phase  <= '0;
              tag.last   <= 1'b0;
              tag.final_ <= 1'b0;
              rd_addr    <= AW'(32'(tag.vec) + 2);
            end
          end else begin
            tag.first  <= 1'b0;
            tag.phase  <= tag.phase + 1'b1;
            tag.last   <= (tag.phase + PHASE_W'(2) == hold_q);
            tag.final_ <= (tag.phase + PHASE_W'(2) == hold_q) && last_vec;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE)
    else $error("input_sequencer: start while busy was ignored");

endmodule
