// sync_fifo: single-clock first-in first-out buffer with valid/ready on both
// sides. The PEs of the accelerator talk to each other only through FIFOs
// like this one. DEPTH entries are stored in an array; the output is the
// array entry at the read pointer (first-word fall-through), so a word
// written in one cycle can be read in the next.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic [PW:0]      count;

  wire do_wr = in_valid && in_ready;
  wire do_rd = out_valid && out_ready;

  assign in_ready  = (count < (PW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (PW+1)'(do_wr) - (PW+1)'(do_rd);
    end
  end
endmodule
