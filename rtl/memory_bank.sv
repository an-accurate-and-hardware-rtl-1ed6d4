// memory_bank: per-channel register banks of one 32-channel module.
//
// Five banks, one entry per channel, built from flip-flops:
//   data memory       X[n-1], X[n-2], X[n-3]   (3 x 7 bits)
//   parameter memory  sigma_S (Q5.10) and the window exceed counter
// Read is combinational at rd_addr; the datapath writes the whole updated
// entry at wr_addr on the clock edge when wr_en is high, so a channel's
// read-modify-write completes in one cycle. The parameter port (par_we)
// loads a channel's initial sigma_S and clears its counter; it takes
// priority over a datapath write to the same channel. Reset clears the
// history and counters and sets every sigma_S to SIGMA_INIT.
// In the module, clk is a gated clock that runs only in cycles where this
// module is addressed (or in reset), so idle banks do not switch.
// The paper gives the five register banks, their split into data and
// parameter memory, and a "Parameters" input. Which values the five banks
// hold, the reset values and the load port's form are this design's choices.
module memory_bank
  import spike_pkg::*;
#(
  parameter int unsigned DEPTH      = CH_PER_MODULE,
  parameter sigma_t      SIGMA_INIT = sigma_t'(2 << SIG_FRAC_W),
  localparam int unsigned AW        = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  // datapath read
  input  logic [AW-1:0] rd_addr,
  output chan_state_t   rd_data,
  // datapath write-back
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  chan_state_t   wr_data,
  // parameter load
  input  logic          par_we,
  input  logic [AW-1:0] par_addr,
  input  sigma_t        par_sigma
);
  x_t     x1_q [DEPTH];
  x_t     x2_q [DEPTH];
  x_t     x3_q [DEPTH];
  sigma_t sig_q[DEPTH];
  cnt_t   cnt_q[DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) begin
        x1_q[i]  <= '0;
        x2_q[i]  <= '0;
        x3_q[i]  <= '0;
        sig_q[i] <= SIGMA_INIT;
        cnt_q[i] <= '0;
      end
    end else begin
      if (wr_en) begin
        x1_q[wr_addr] <= wr_data.x1;
        x2_q[wr_addr] <= wr_data.x2;
        x3_q[wr_addr] <= wr_data.x3;
        if (!(par_we && par_addr == wr_addr)) begin
          sig_q[wr_addr] <= wr_data.sigma;
          cnt_q[wr_addr] <= wr_data.cnt;
        end
      end
      if (par_we) begin
        sig_q[par_addr] <= par_sigma;
        cnt_q[par_addr] <= '0;
      end
    end
  end

  always_comb begin
    rd_data.x1    = x1_q[rd_addr];
    rd_data.x2    = x2_q[rd_addr];
    rd_data.x3    = x3_q[rd_addr];
    rd_data.sigma = sig_q[rd_addr];
    rd_data.cnt   = cnt_q[rd_addr];
  end
endmodule
