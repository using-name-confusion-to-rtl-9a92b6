// pns_tb_memsys -- testbench model of what lies below the PNS front-end: a
// page-table walker and a physical memory answering I-cache line refills.
// Pages map as ppn = vpn XOR 0x10 (so physical and virtual addresses always
// differ). The walker answers WALK_LAT cycles after a request; memory takes
// a line request, then sends its 16 words one per cycle after MEM_LAT
// cycles. Memory holds 128 KiB, written by the testbench through mem[].
// Requests are ignored while rst_n is low. It counts walks and line refills for the testbench's coverage report.
module pns_tb_memsys #(
  parameter int WALK_LAT = 4,
  parameter int MEM_LAT  = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        walk_req,
  input  logic [19:0] walk_vpn,
  output logic        walk_resp,
  output logic [19:0] walk_ppn,
  input  logic        mem_req_valid,
  output logic        mem_req_ready,
  input  logic [31:0] mem_req_addr,
  output logic        mem_resp_valid,
  output logic [31:0] mem_resp_data
);
  logic [31:0] mem [32768];
  int walks = 0, refills = 0;

  function automatic logic [19:0] ppn_of(logic [19:0] vpn); return vpn ^ 20'h00010; endfunction

  initial begin
    walk_resp = 0; walk_ppn = 0;
    forever begin
      @(posedge clk);
      if (rst_n && walk_req) begin
        logic [19:0] v;
        v = walk_vpn;
        walks++;
        repeat (WALK_LAT - 1) @(posedge clk);
        #1 walk_resp = 1; walk_ppn = ppn_of(v);
        @(posedge clk); #1 walk_resp = 0;
      end
    end
  end

  initial begin
    mem_req_ready = 0; mem_resp_valid = 0; mem_resp_data = 0;
    forever begin
      @(posedge clk);
      if (rst_n && mem_req_valid) begin
        logic [31:0] a;
        #1 mem_req_ready = 1; a = mem_req_addr; refills++;
        @(posedge clk); #1 mem_req_ready = 0;
        repeat (MEM_LAT) @(posedge clk);
        for (int b = 0; b < 16; b++) begin
          #1 mem_resp_valid = 1; mem_resp_data = mem[15'((a >> 2) + 32'(b))];
          @(posedge clk);
        end
        #1 mem_resp_valid = 0;
      end
    end
  end
endmodule
