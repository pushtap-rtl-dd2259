// polling_module: answers the CPU's poll request on behalf of all PIM units.
//
// Without it the CPU would read the status of every PIM unit itself. Here the
// CPU issues one read to the reserved poll address; the scheduler passes it on
// with poll_start, and this module reads the finish flags of all units through
// the PIM interface (status_rd), every POLL_INTERVAL cycles, until every flag is
// set. It then returns one 64-byte read response to the CPU: word 0 is the
// finish message (1), word 1 the number of status reads it took. resp_valid is
// held until resp_ready. busy is high from poll_start until the response is
// taken; a new poll_start is ignored while busy.
//
// That the module polls automatically and returns the finish signal through
// the DRAM read protocol follows the design; the polling interval and the
// message layout are this implementation's choices.
module polling_module
  import pushtap_pkg::*;
#(
  parameter int unsigned NUM_PIM       = 64,
  parameter int unsigned POLL_INTERVAL = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               poll_start,
  output logic               busy,
  output logic               status_rd,
  input  logic               status_valid,
  input  logic [NUM_PIM-1:0] status_done,
  output logic               resp_valid,
  input  logic               resp_ready,
  output logic [LINE_W-1:0]  resp_data
);
  typedef enum logic [1:0] {P_IDLE, P_READ, P_WAIT, P_RESP} pstate_e;
  pstate_e     st;
  logic [15:0] gap;
  logic [31:0] n_polls;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st      <= P_IDLE;
      gap     <= '0;
      n_polls <= '0;
    end else begin
      unique case (st)
        P_IDLE: if (poll_start) begin
          n_polls <= '0;
          gap     <= '0;
          st      <= P_READ;
        end
        P_READ: if (gap == '0) begin
          n_polls <= n_polls + 1;
          st      <= P_WAIT;
        end else begin
          gap <= gap - 1'b1;
        end
        P_WAIT: if (status_valid) begin
          if (&status_done) st <= P_RESP;
          else begin
            gap <= 16'(POLL_INTERVAL - 1);
            st  <= P_READ;
          end
        end
        P_RESP: if (resp_ready) st <= P_IDLE;
        default: st <= P_IDLE;
      endcase
    end
  end

  assign busy       = (st != P_IDLE);
  assign status_rd  = (st == P_READ) && (gap == '0);
  assign resp_valid = (st == P_RESP);
  always_comb begin
    resp_data        = '0;
    resp_data[63:0]  = 64'd1;
    resp_data[95:64] = n_polls;
  end
endmodule
