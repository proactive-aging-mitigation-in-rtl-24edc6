// mem_unit: the fabric's port to the data cache ("To Memory Unit").
//
// One read and one write per cycle, as the data cache offers. A load request
// seen in cycle t is sent to the cache at once; the cache answers in cycle t+1
// (synchronous read) and the answer is delayed so that it is presented on
// `ld_data` in cycle t+LD_COLS-1, i.e. in the fourth column after the one that
// issued it: a load spans LD_COLS columns as in the paper. Stores are written
// in the cycle they are issued. The one-cycle cache answer and the delay line
// are this design's choice; the paper gives only the 4-column span and the
// one-read/one-write constraint. The clock is the column step clock.
module mem_unit
  import cgra_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  // from the active column
  input  logic   ld_req,
  input  word_t  ld_addr,
  input  logic   st_req,
  input  word_t  st_addr,
  input  word_t  st_data,
  output word_t  ld_data,
  output logic   ld_valid,
  // to the data cache
  output logic   dc_rd_en,
  output word_t  dc_rd_addr,
  input  word_t  dc_rd_data,   // valid the cycle after dc_rd_en
  output logic   dc_wr_en,
  output word_t  dc_wr_addr,
  output word_t  dc_wr_data
);
  localparam int DLY = LD_COLS - 2;  // registers after the cache's own cycle

  logic              pend;           // a read answer is on dc_rd_data
  logic  [DLY-1:0]   v_q;
  word_t [DLY-1:0]   d_q;

  assign dc_rd_en   = ld_req;
  assign dc_rd_addr = ld_addr;
  assign dc_wr_en   = st_req;
  assign dc_wr_addr = st_addr;
  assign dc_wr_data = st_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pend <= 1'b0;
      v_q  <= '0;
      d_q  <= '0;
    end else begin
      pend   <= ld_req;
      v_q[0] <= pend;
      d_q[0] <= pend ? dc_rd_data : '0;
      for (int i = 1; i < DLY; i++) begin
        v_q[i] <= v_q[i-1];
        d_q[i] <= d_q[i-1];
      end
    end
  end

  assign ld_valid = v_q[DLY-1];
  assign ld_data  = d_q[DLY-1];
endmodule
