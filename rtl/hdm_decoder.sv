// hdm_decoder: host-managed device memory (HDM) decoder.
//
// Every LLC miss or writeback is steered either to the local memory
// controller or to the CXL root complex, by its physical address. The
// decoder holds NRANGES base/size windows, programmed once while the CXL.mem
// devices are enumerated (prog_* port). An address inside an enabled window
// goes to fabric-attached memory (to_fam = 1) and window reports which one;
// any other address is local. The decode is purely combinational.
//
// Following the paper: address decoding by programmable HDM decoders set up
// at enumeration. This design's own choices: the window count, base/size
// registers with 4 KiB granularity, first-match priority.
module hdm_decoder
  import fam_pkg::*;
#(
  parameter int unsigned NRANGES = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // programming port (enumeration)
  input  logic                       prog_we,
  input  logic [$clog2(NRANGES)-1:0] prog_idx,
  input  logic                       prog_en,
  input  paddr_t                     prog_base,
  input  paddr_t                     prog_size,
  // decode
  input  paddr_t                     addr,
  output logic                       to_fam,
  output logic [$clog2(NRANGES)-1:0] window
);
  localparam int unsigned GW = PADDR_W - 12;
  logic          en_q   [NRANGES];
  logic [GW-1:0] base_q [NRANGES];
  logic [GW-1:0] lim_q  [NRANGES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NRANGES; i++) begin
        en_q[i] <= 1'b0; base_q[i] <= '0; lim_q[i] <= '0;
      end
    end else if (prog_we) begin
      en_q[prog_idx]   <= prog_en;
      base_q[prog_idx] <= prog_base[PADDR_W-1:12];
      lim_q[prog_idx]  <= prog_base[PADDR_W-1:12] + prog_size[PADDR_W-1:12];
    end
  end

  always_comb begin
    to_fam = 1'b0;
    window = '0;
    for (int i = NRANGES - 1; i >= 0; i--) begin
      if (en_q[i] && addr[PADDR_W-1:12] >= base_q[i] && addr[PADDR_W-1:12] < lim_q[i]) begin
        to_fam = 1'b1;
        window = ($clog2(NRANGES))'(i);
      end
    end
  end
endmodule
