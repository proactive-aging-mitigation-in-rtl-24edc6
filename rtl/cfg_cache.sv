// cfg_cache: configuration cache of the reconfigurable unit.
//
// Keeps CFG_ENTRIES virtual configurations, each tagged with the PC of the
// first instruction of the sequence it accelerates. Direct-mapped: the entry
// index is taken from the PC bits above the 4-byte instruction offset, the rest
// of the PC is the tag. The lookup port is combinational (`lk_pc` -> `lk_hit`,
// `lk_idx`). The read port presents, for entry `rd_idx` and load beat `beat`,
// the NCFG column words of virtual columns beat*NCFG .. beat*NCFG+NCFG-1 on the
// configuration lines, plus the entry's header. The write port (from the
// binary translator) stores an entry on the rising edge; `inval` clears all
// valid bits. The paper names the cache and its PC tags; organization, size
// and ports are this design's choice.
module cfg_cache
  import cgra_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  inval,
  // write (translator)
  input  logic                  wr_en,
  input  logic [PCW-1:0]        wr_pc,
  input  vcfg_t                 wr_cfg,
  // lookup
  input  logic [PCW-1:0]        lk_pc,
  output logic                  lk_hit,
  output logic [$clog2(CFG_ENTRIES)-1:0] lk_idx,
  // read
  input  logic [$clog2(CFG_ENTRIES)-1:0] rd_idx,
  input  logic [$clog2(NBEAT > 1 ? NBEAT : 2)-1:0] beat,
  output cfg_lines_t            lines,
  output cfg_hdr_t              hdr
);
  localparam int IW = $clog2(CFG_ENTRIES);
  localparam int TW = PCW - 2 - IW;

  logic [CFG_ENTRIES-1:0]         valid;
  logic [TW-1:0]                  tags [CFG_ENTRIES];
  vcfg_t                          data [CFG_ENTRIES];

  logic [IW-1:0] wi;
  assign wi = wr_pc[2 +: IW];

  always_ff @(posedge clk) begin
    if (!rst_n || inval) valid <= '0;
    else if (wr_en)      valid[wi] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      tags[wi] <= wr_pc[PCW-1 -: TW];
      data[wi] <= wr_cfg;
    end
  end

  assign lk_idx = lk_pc[2 +: IW];
  assign lk_hit = valid[lk_idx] && (tags[lk_idx] == lk_pc[PCW-1 -: TW]);

  vcfg_t rd;
  assign rd  = data[rd_idx];
  assign hdr = rd.hdr;
  always_comb
    for (int m = 0; m < NCFG; m++)
      lines[m] = rd.cols[int'(beat) * NCFG + m];
endmodule
