// bpsk_modulator - BPSK mapping and streaming of a codeword.
//
// Maps code bit 0 to +AMP and 1 to -AMP (+1/-1 as published; AMP = 16 is 1.0
// with 4 fractional bits, this design's sample format) and sends the NW column
// blocks of the codeword one per beat, Z symbols wide, with a valid/ready
// handshake: sym, sym_idx are held while sym_valid is high and sym_ready low.
// start captures c when idle; the first beat is offered the next cycle and
// the last beat of a frame is flagged by sym_last.
module bpsk_modulator
  import jscc_pkg::*;
#(
  parameter int Z  = Z_DEF,
  parameter int NW = 50
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [NW*Z-1:0]         c,
  output logic                    busy,
  output logic                    sym_valid,
  input  logic                    sym_ready,
  output logic [7:0]              sym_idx,
  output logic                    sym_last,
  output logic signed [SW-1:0]    sym [Z]
);
  logic [NW*Z-1:0] c_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sym_valid <= 1'b0;
      sym_idx   <= '0;
    end else if (!sym_valid) begin
      if (start) begin
        sym_valid <= 1'b1;
        sym_idx   <= '0;
      end
    end else if (sym_ready) begin
      if (int'(sym_idx) == NW - 1) sym_valid <= 1'b0;
      else                         sym_idx   <= sym_idx + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!sym_valid && start) c_r <= c;
  end

  always_comb begin
    for (int i = 0; i < Z; i++)
      sym[i] = c_r[int'(sym_idx)*Z + i] ? -(SW)'(AMP) : (SW)'(AMP);
  end

  assign sym_last = sym_valid && (int'(sym_idx) == NW - 1);
  assign busy     = sym_valid;

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    sym_valid && !sym_ready |=> sym_valid && $stable(sym_idx));
endmodule
