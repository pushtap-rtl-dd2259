// pushtap_top: one memory channel of the PUSHtap system: the extended memory
// controller and one rank of bank-level PIM units.
//
// The CPU reaches the DRAM through the controller's port (req_*/resp_*). Plain
// reads and writes are OLTP traffic and see the rank interleaved across its
// devices. Two reserved line addresses turn accesses into control requests:
// a 64-byte write to LAUNCH_ADDR launches an OLAP operation on every PIM unit of
// the rank, a read of POLL_ADDR returns once all units have finished. Inside:
//
//   access_queue -> scheduler -> dram_interface <-> bank ports (DRAM outside)
//                      |   \-> refresh_ctrl
//                      |-> pim_interface -> NUM_DEV*NUM_BANK x pim_unit (+wram)
//                      \-> polling_module -> CPU read response
//
// The DRAM banks themselves are outside this module: each bank is a port of 64-
// bit words (bk_*), with read data returning bk_rvalid a fixed number of cycles
// later. The defaults are the evaluated rank: 8 devices x 8 banks = 64 PIM
// units, 64 kB WRAM each; timing in controller cycles at 2.4 GHz.
//
// Responses: normal read data and the poll answer share resp_*; read data has
// priority and the poll answer waits a cycle. There is no back-pressure on the
// response port.
module pushtap_top
  import pushtap_pkg::*;
#(
  parameter int unsigned        NUM_DEV         = 8,
  parameter int unsigned        NUM_BANK        = 8,
  parameter int unsigned        WRAM_BYTES      = 65536,
  parameter int unsigned        QUEUE_DEPTH     = 8,
  parameter int unsigned        HANDOVER_CYCLES = 480,
  parameter int unsigned        TREFI_CYCLES    = 9360,
  parameter int unsigned        TRFC_CYCLES     = 293,
  parameter int unsigned        POLL_INTERVAL   = 16,
  parameter logic [LADDR_W-1:0] LAUNCH_ADDR     = {1'b1, {(LADDR_W-1){1'b0}}},
  parameter logic [LADDR_W-1:0] POLL_ADDR       = {1'b1, {(LADDR_W-2){1'b0}}, 1'b1},
  localparam int unsigned       NUM_PIM         = NUM_DEV * NUM_BANK
) (
  input  logic               clk,
  input  logic               rst_n,
  // CPU request / response
  input  logic               req_valid,
  output logic               req_ready,
  input  mem_req_t           req,
  output logic               resp_valid,
  output logic [LINE_W-1:0]  resp_data,
  // DRAM bank ports
  output logic [NUM_PIM-1:0] bk_req,
  output logic [NUM_PIM-1:0] bk_we,
  output logic [BANK_AW-1:0] bk_addr  [NUM_PIM],
  output logic [63:0]        bk_wdata [NUM_PIM],
  output logic               bk_ref,
  input  logic [NUM_PIM-1:0] bk_rvalid,
  input  logic [63:0]        bk_rdata [NUM_PIM],
  // status
  output logic               bank_to_pim,
  output logic               ev_stall,
  output logic               ev_handover
);
  // queue -> scheduler
  logic     q_valid, q_ready;
  mem_req_t q_req;
  // scheduler -> dram interface
  logic               d_valid, d_we;
  logic [LADDR_W-1:0] d_addr;
  logic [LINE_W-1:0]  d_wdata;
  logic               c_rvalid;
  logic [LINE_W-1:0]  c_rdata;
  // refresh
  logic ref_req, ref_ack, ref_busy;
  // PIM control
  logic               launch_valid, pim_busy;
  op_type_e           launch_op, unit_op;
  logic [PARAM_W-1:0] launch_params, unit_params;
  logic               unit_start;
  logic [NUM_PIM-1:0] unit_done, unit_busy;
  // polling
  logic               poll_start, poll_busy, status_rd, status_valid;
  logic [NUM_PIM-1:0] status_done;
  logic               poll_resp_valid, poll_resp_ready;
  logic [LINE_W-1:0]  poll_resp_data;
  // PIM bank side
  logic [NUM_PIM-1:0] p_req, p_we, p_rvalid;
  logic [BANK_AW-1:0] p_addr  [NUM_PIM];
  logic [63:0]        p_wdata [NUM_PIM];
  logic [63:0]        p_rdata [NUM_PIM];

  access_queue #(.DEPTH(QUEUE_DEPTH)) u_queue (
    .clk, .rst_n,
    .in_valid(req_valid), .in_ready(req_ready), .in_req(req),
    .out_valid(q_valid), .out_ready(q_ready), .out_req(q_req)
  );

  refresh_ctrl #(.TREFI_CYCLES(TREFI_CYCLES), .TRFC_CYCLES(TRFC_CYCLES)) u_refresh (
    .clk, .rst_n, .ref_req, .ref_ack, .ref_busy
  );

  scheduler #(
    .HANDOVER_CYCLES(HANDOVER_CYCLES), .LAUNCH_ADDR(LAUNCH_ADDR), .POLL_ADDR(POLL_ADDR)
  ) u_sched (
    .clk, .rst_n,
    .q_valid, .q_req, .q_ready,
    .d_valid, .d_we, .d_addr, .d_wdata,
    .ref_req, .ref_ack, .ref_busy,
    .launch_valid, .launch_op, .launch_params, .pim_busy, .bank_to_pim,
    .poll_start, .poll_busy,
    .ev_stall, .ev_handover
  );

  polling_module #(.NUM_PIM(NUM_PIM), .POLL_INTERVAL(POLL_INTERVAL)) u_poll (
    .clk, .rst_n,
    .poll_start, .busy(poll_busy),
    .status_rd, .status_valid, .status_done,
    .resp_valid(poll_resp_valid), .resp_ready(poll_resp_ready), .resp_data(poll_resp_data)
  );

  pim_interface #(.NUM_PIM(NUM_PIM)) u_pif (
    .clk, .rst_n,
    .launch_valid, .launch_op, .launch_params,
    .unit_start, .unit_op, .unit_params, .unit_done,
    .any_busy(pim_busy),
    .status_rd, .status_valid, .status_done
  );

  for (genvar u = 0; u < NUM_PIM; u++) begin : g_pim
    pim_unit #(.PIM_ID(u), .WRAM_BYTES(WRAM_BYTES)) u_pim (
      .clk, .rst_n,
      .start(unit_start), .op(unit_op), .params(unit_params),
      .busy(unit_busy[u]), .done(unit_done[u]),
      .b_req(p_req[u]), .b_we(p_we[u]), .b_addr(p_addr[u]), .b_wdata(p_wdata[u]),
      .b_rvalid(p_rvalid[u]), .b_rdata(p_rdata[u])
    );
  end

  dram_interface #(.NUM_DEV(NUM_DEV), .NUM_BANK(NUM_BANK)) u_dram_if (
    .bank_to_pim,
    .c_valid(d_valid), .c_we(d_we), .c_addr(d_addr), .c_wdata(d_wdata), .c_ref(ref_ack),
    .c_rvalid, .c_rdata,
    .p_req, .p_we, .p_addr, .p_wdata, .p_rvalid, .p_rdata,
    .bk_req, .bk_we, .bk_addr, .bk_wdata, .bk_ref,
    .bk_rvalid, .bk_rdata
  );

  assign poll_resp_ready = !c_rvalid;
  assign resp_valid      = c_rvalid || poll_resp_valid;
  assign resp_data       = c_rvalid ? c_rdata : poll_resp_data;

  // Units run only between a start and their done; none runs without a launch.
  assert property (@(posedge clk) disable iff (!rst_n) (unit_busy != '0) |-> pim_busy);
endmodule
