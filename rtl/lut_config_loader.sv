// lut_config_loader: holds one network's genome (the 32-bit truth table of
// every LUT) and shifts it into the reservoir.
//
// The host writes the genome one LUT word at a time (wr_en, wr_addr,
// wr_data). A pulse on `load` then shifts all LUTs in parallel, each on its
// own serial line, most significant bit first: cfg_ce is high for exactly 32
// cycles and after the 32nd rising edge every LUT holds its word, so a new
// network is in place 0.32 us after `load` at 100 MHz. `busy` is high during
// those 32 cycles and `done` pulses in the cycle after the last shift. Writes
// and loads that arrive while busy are ignored (and flagged by assertions).
//
// Updating the whole network in well under a microsecond is what the paper
// relies on; the parallel lines, the bit order and the host port are this
// design's choices. The genome store is a register array because all words
// are read in every shift cycle.
`timescale 1ns/1ps
module lut_config_loader
  import rpu_pkg::*;
#(
  parameter int unsigned N_LUT = rpu_pkg::DEF_N_LUT,
  localparam int unsigned AW   = $clog2(N_LUT)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_addr,
  input  logic [LUT_BITS-1:0] wr_data,
  input  logic                load,
  output logic                busy,
  output logic                done,
  output logic                cfg_ce,
  output logic [N_LUT-1:0]    cfg_di
);

  logic [LUT_BITS-1:0] genome [N_LUT];
  logic [LUT_K-1:0]    bit_idx;

  always_ff @(posedge clk) begin
    if (wr_en && !busy && 32'(wr_addr) < N_LUT) genome[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      bit_idx <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (load) begin
          busy    <= 1'b1;
          bit_idx <= LUT_K'(LUT_BITS - 1);
        end
      end else begin
        bit_idx <= bit_idx - 1'b1;
        if (bit_idx == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign cfg_ce = busy;
  always_comb begin
    for (int j = 0; j < N_LUT; j++) cfg_di[j] = genome[j][bit_idx];
  end

  a_no_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !wr_en)
    else $error("lut_config_loader: genome write during a load was ignored");
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !load)
    else $error("lut_config_loader: load during a load was ignored");

endmodule
