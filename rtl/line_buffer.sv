// line_buffer -- one video line of storage, inferred as a dual-port block RAM.
//
// The buffer is read and written at the same address, the column counter, so
// that it acts as a circular FIFO of exactly one line: the word read at column
// c is the pixel written at column c one line earlier, and the new pixel
// replaces it.  Following the paper's remedy for the extra register of an
// inferred block RAM, the read happens on the rising edge, into the output
// register data_out, and the write on the falling edge of the same cycle.  The
// write uses the address and enable latched at the rising edge and takes
// data_in as it is during the second half of the cycle.  Because of that
// timing, data_in may be the registered output of the previous line buffer (or
// a registered input pixel): line buffers chain without a column slip.
// Port names follow the paper's line-buffer diagram (data_in, col_count as
// wr_addr/rd_addr, valid_pixel as the enable, data_out).
// Timing: a rising edge with valid_pixel = 1 loads data_out with mem[col_count];
// the following falling edge writes data_in to mem[col_count].
module line_buffer #(
  parameter int DEPTH = 1920,
  parameter int WIDTH = 16
) (
  input  logic                     clock,
  input  logic                     reset,
  input  logic                     valid_pixel,
  input  logic [$clog2(DEPTH)-1:0] col_count,
  input  logic [WIDTH-1:0]         data_in,
  output logic [WIDTH-1:0]         data_out
);
  logic [WIDTH-1:0]         mem [DEPTH];
  logic [$clog2(DEPTH)-1:0] wr_addr;
  logic                     wr_en;

  always_ff @(posedge clock) begin
    if (reset) begin
      wr_en    <= 1'b0;
      wr_addr  <= '0;
      data_out <= '0;
    end else begin
      wr_en <= valid_pixel;
      if (valid_pixel) begin
        wr_addr  <= col_count;
        data_out <= mem[col_count];
      end
    end
  end

  always_ff @(negedge clock) begin
    if (wr_en) mem[wr_addr] <= data_in;
  end
endmodule
