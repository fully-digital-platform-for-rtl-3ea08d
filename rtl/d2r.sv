// d2r: data-to-RAM acquisition of a sample stream.
//
// A pulse on start (while idle) arms a capture: from the next clock on, one
// sample in every decim+1 is written to the RAM at consecutive addresses until
// DEPTH samples are stored; busy is high meanwhile, then done stays high until
// the next start. The processor reads the RAM back through rd_addr/rd_data
// and computes the residual perturbation amplitude from it. In the loop it
// records the PI output, so the rejection of an injected perturbation can be
// measured without access to the remote end of the fiber.
//
// Interface: din, start, decim in; busy, done out; rd_addr in, rd_data out.
// Timing: the first stored sample is din of the clock after start; rd_data
// is registered (1 clock after rd_addr). RAM is a plain array (block RAM).
// Depth, width, decimation and the read port are this design's choices.
module d2r
  import dopp_pkg::*;
#(
  parameter int DATA_BITS = CORR_W,
  parameter int DEPTH     = 16384,
  parameter int DEC_BITS  = 16,
  localparam int AW       = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [DATA_BITS-1:0]  din,
  input  logic                  start,
  input  logic [DEC_BITS-1:0]   decim,
  output logic                  busy,
  output logic                  done,
  input  logic [AW-1:0]         rd_addr,
  output logic [DATA_BITS-1:0]  rd_data
);
  logic [DATA_BITS-1:0] mem [DEPTH];
  logic [AW-1:0]        wr_addr;
  logic [DEC_BITS-1:0]  dec_cnt;
  logic [DEC_BITS-1:0]  decim_r;
  logic                 we;

  assign we = busy && (dec_cnt == '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; done <= 1'b0; wr_addr <= '0; dec_cnt <= '0; decim_r <= '0;
    end else if (!busy && start) begin
      busy <= 1'b1; done <= 1'b0; wr_addr <= '0; dec_cnt <= '0; decim_r <= decim;
    end else if (busy) begin
      dec_cnt <= (dec_cnt == decim_r) ? '0 : dec_cnt + 1'b1;
      if (we) begin
        wr_addr <= wr_addr + 1'b1;
        if (wr_addr == AW'(DEPTH - 1)) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= din;
    rd_data <= mem[rd_addr];
  end

endmodule
