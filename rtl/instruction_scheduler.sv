// instruction_scheduler: issue selection for one cluster. Each block window
// of the cluster offers at most one instruction per cycle; the scheduler
// places the offered instructions on the cluster's execution units, lowest
// window index first, until the EUs run out. Because every window can be
// offering at once, the windows hide each other's head-of-queue stalls
// (block-level parallelism). A memory operation is placed only while
// mem_allow_in is high; the design passes one load-store-unit slot per cycle
// along the clusters (mem_allow_out). The priority order and the single
// memory slot are this design's choices. Purely combinational.
module instruction_scheduler
  import cgooo_pkg::*;
#(
  parameter int NBW = 3,
  parameter int NEU = 4
) (
  input  issue_t req   [NBW],
  output logic   grant [NBW],
  output issue_t eu_in [NEU],
  input  logic   mem_allow_in,
  output logic   mem_allow_out,
  output logic [$clog2(NEU+1)-1:0] n_issued
);
  always_comb begin
    int  e;
    logic mem_ok;
    e = 0; mem_ok = mem_allow_in;
    for (int k = 0; k < NEU; k++) eu_in[k] = '0;
    for (int b = 0; b < NBW; b++) begin
      grant[b] = 1'b0;
      if (req[b].valid && e < NEU && (!is_mem(req[b].u.op) || mem_ok)) begin
        grant[b] = 1'b1;
        eu_in[e] = req[b];
        if (is_mem(req[b].u.op)) mem_ok = 1'b0;
        e++;
      end
    end
    mem_allow_out = mem_ok;
    n_issued = ($clog2(NEU+1))'(e);
  end
endmodule
