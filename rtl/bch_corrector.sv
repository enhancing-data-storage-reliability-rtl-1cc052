// bch_corrector -- the error-correction adder: corrected = received XOR error.
//
// The Chien search issues one error beat per clock; in that same clock the
// decoder launches the FIFO read of the matching received beat, whose data
// arrives one clock later (synchronous SRAM read). This block therefore
// registers the error beat and its sop/eop markers for one clock, XORs it
// with the FIFO data (a P-bit finite-field adder, i.e. P XOR gates), and
// registers the result: out_* follows err_* by two clocks. It also counts
// the bits flipped in each word; out_nerr is valid with out_eop.
// The XOR adder is the paper's; the alignment registers and the count are
// this design's.
module bch_corrector #(
  parameter int unsigned P = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         err_valid,
  input  logic         err_sop,
  input  logic         err_eop,
  input  logic [P-1:0] err,
  input  logic [P-1:0] fifo_data,
  output logic         out_valid,
  output logic         out_sop,
  output logic         out_eop,
  output logic [P-1:0] out_data,
  output logic [7:0]   out_nerr
);

  logic         d_valid, d_sop, d_eop;
  logic [P-1:0] d_err;
  logic [7:0]   running, beat_cnt;

  always_comb begin
    beat_cnt = '0;
    for (int unsigned i = 0; i < P; i++) beat_cnt = beat_cnt + 8'(d_err[i]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      d_valid   <= 1'b0;
      d_sop     <= 1'b0;
      d_eop     <= 1'b0;
      d_err     <= '0;
      out_valid <= 1'b0;
      out_sop   <= 1'b0;
      out_eop   <= 1'b0;
      out_data  <= '0;
      out_nerr  <= '0;
      running   <= '0;
    end else begin
      d_valid   <= err_valid;
      d_sop     <= err_valid && err_sop;
      d_eop     <= err_valid && err_eop;
      d_err     <= err_valid ? err : '0;
      out_valid <= d_valid;
      out_sop   <= d_sop;
      out_eop   <= d_eop;
      out_data  <= d_valid ? (fifo_data ^ d_err) : '0;
      if (d_valid) begin
        if (d_eop) begin
          out_nerr <= (d_sop ? 8'd0 : running) + beat_cnt;
          running  <= '0;
        end else begin
          running  <= (d_sop ? 8'd0 : running) + beat_cnt;
        end
      end
    end
  end

endmodule
