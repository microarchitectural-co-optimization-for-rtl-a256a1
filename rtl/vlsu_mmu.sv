// vlsu_mmu: address translation and access check for the VLSU.
//
// The address generator asks for the translation of one 4 KiB page at a time
// (req_i with the virtual page address); the answer arrives LATENCY cycles
// later on rsp_valid_o with the physical page. This implementation runs in
// bare mode: the physical page equals the virtual one, so only the timing
// of a translation is modelled, and the address generator's waiting state
// is exercised. In addition the MMU checks a whole access range at the
// start of a descriptor (chk_*, combinational): an access faults when its
// base is not 4-byte aligned or when any byte lies at or above MEM_TOP.
// flush_i drops a translation in progress. One translation at a time.
// The paper names the MMU / exception / flush block and the waiting state;
// bare-mode translation, latency and the fault rules are this design's.
module vlsu_mmu
  import ara_opt_pkg::*;
#(
  parameter int unsigned LATENCY = 2,
  parameter logic [31:0] MEM_TOP = 32'h8000_0000
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  req_i,
  input  addr_t vpage_i,
  output logic  busy_o,
  output logic  rsp_valid_o,
  output addr_t ppage_o,
  input  logic  flush_i,
  input  addr_t chk_base_i,
  input  logic [31:0] chk_last_i,   // address of the last byte accessed
  output logic  chk_fault_o
);
  logic [$clog2(LATENCY+1)-1:0] cnt_q;
  addr_t page_q;

  assign busy_o      = (cnt_q != 0);
  assign chk_fault_o = (chk_base_i[1:0] != 2'b00) || (chk_base_i >= MEM_TOP) ||
                       (chk_last_i >= MEM_TOP) || (chk_last_i < chk_base_i);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q       <= '0;
      page_q      <= '0;
      rsp_valid_o <= 1'b0;
      ppage_o     <= '0;
    end else begin
      rsp_valid_o <= 1'b0;
      if (flush_i) begin
        cnt_q <= '0;
      end else if (cnt_q != 0) begin
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == 1) begin
          rsp_valid_o <= 1'b1;
          ppage_o     <= {page_q[AXI_AW-1:12], 12'h000};
        end
      end else if (req_i) begin
        cnt_q  <= $bits(cnt_q)'(LATENCY);
        page_q <= vpage_i;
      end
    end
  end
endmodule
