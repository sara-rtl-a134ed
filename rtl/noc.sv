// noc: the on-chip network between the cores' DMAs and the memory controller.
//
// Requests travel through two levels of router output ports (noc_switch).
// The first level has one port per controller queue class (CPU, GPU, DSP,
// media cores, system cores); a requester reaches the port of the class its
// transaction names, so cores of one class share an interconnect segment, as
// the system cores do in the paper's example. The second level merges the
// five classes into the controller's single input. Both levels allocate by
// transaction priority with round-robin among equals, so the priority chosen
// by a core's meter is honoured at every hop. A request needs two cycles to
// cross the network when nothing blocks it.
//
// Responses return on a broadcast bus, registered once; each DMA picks out
// the responses whose source id is its own. Responses are never blocked.
//
// Priority-based switch allocation in the routers is the paper's; the
// two-level topology, the grouping by queue class and the response bus are
// this design's choice.
module noc
  import sara_pkg::*;
#(
  parameter int unsigned N_IN = 15
) (
  input  logic            clk,
  input  logic            rst_n,
  // requesters
  input  logic [N_IN-1:0] in_valid,
  output logic [N_IN-1:0] in_ready,
  input  mem_req_t        in_req [N_IN],
  output logic            rsp_valid,
  output mem_rsp_t        rsp,
  // memory controller
  output logic            mc_valid,
  input  logic            mc_ready,
  output mem_req_t        mc_req,
  input  logic            mc_rsp_valid,
  input  mem_rsp_t        mc_rsp
);
  logic [N_IN-1:0]       g_in_valid [NUM_QUEUES];
  logic [N_IN-1:0]       g_in_ready [NUM_QUEUES];
  logic [NUM_QUEUES-1:0] g_valid, g_ready;
  mem_req_t              g_req [NUM_QUEUES];

  for (genvar g = 0; g < NUM_QUEUES; g++) begin : g_class
    always_comb
      for (int i = 0; i < N_IN; i++)
        g_in_valid[g][i] = in_valid[i] && (in_req[i].qid == qid_e'(g));

    noc_switch #(.N(N_IN)) u_port (
      .clk, .rst_n,
      .in_valid  (g_in_valid[g]),
      .in_ready  (g_in_ready[g]),
      .in_req    (in_req),
      .out_valid (g_valid[g]),
      .out_ready (g_ready[g]),
      .out_req   (g_req[g])
    );
  end

  always_comb begin
    in_ready = '0;
    for (int g = 0; g < NUM_QUEUES; g++) in_ready |= g_in_ready[g];
  end

  noc_switch #(.N(NUM_QUEUES)) u_root (
    .clk, .rst_n,
    .in_valid  (g_valid),
    .in_ready  (g_ready),
    .in_req    (g_req),
    .out_valid (mc_valid),
    .out_ready (mc_ready),
    .out_req   (mc_req)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rsp       <= '0;
    end else begin
      rsp_valid <= mc_rsp_valid;
      if (mc_rsp_valid) rsp <= mc_rsp;
    end
  end
endmodule
