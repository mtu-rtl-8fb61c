// mtu_ctrl: configuration and run control of the MTU.
//
// Holds the workload (mode), the tree size mu (2^mu leaves), the field
// configuration and the challenge register file (chal[k-1] is the challenge of
// tree level k), all written by the host while the unit is idle. A start
// request with a legal mu (log2(NUM_IN)+1 <= mu <= MAX_MU) becomes a one-cycle
// start pulse to the datapath; an illegal one raises error and is dropped.
// The run ends, and done rises, when the root has left the unit (inverted
// trees) or when all 2^mu / NUM_IN leaf groups have been delivered (forward
// trees). done stays high until the next start. Only cycles with en = 1
// (downstream ready) count as transfers. The paper names this control only as
// part of the MTU's "control and scheduler" cost; its register interface is
// a choice of this design.
module mtu_ctrl
  import mtu_pkg::*;
#(
  parameter int unsigned NUM_IN = 8,
  parameter int unsigned MAX_MU = 24,
  localparam int unsigned LVW = $clog2(MAX_MU + 2),
  localparam int unsigned AW  = $clog2(MAX_MU)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  // host configuration
  input  logic           cfg_we,
  input  mode_e          cfg_mode,
  input  logic [LVW-1:0] cfg_mu,
  input  field_cfg_t     cfg_field,
  input  logic           chal_we,
  input  logic [AW-1:0]  chal_addr,
  input  word_t          chal_data,
  input  logic           start_req,
  // status from the datapath
  input  logic           leaf_valid,
  input  logic           root_valid,
  // to the datapath
  output mode_e          mode,
  output logic [LVW-1:0] mu,
  output field_cfg_t     fc,
  output word_t          chal [MAX_MU],
  output logic           start,
  output logic           busy,
  output logic           done,
  output logic           error
);
  localparam int unsigned LB = $clog2(NUM_IN) + 1;

  logic [MAX_MU:0] groups;
  logic [MAX_MU:0] groups_total;
  logic            mu_ok;

  assign groups_total = (MAX_MU+1)'(1) << (int'(mu) - (LB - 1));
  assign mu_ok        = int'(mu) >= LB && int'(mu) <= MAX_MU;
  assign start        = en && start_req && !busy && mu_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode   <= M_MLE_EVAL;
      mu     <= LVW'(LB);
      fc     <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
      error  <= 1'b0;
      groups <= '0;
    end else if (en) begin
      if (!busy && cfg_we) begin
        mode <= cfg_mode;
        mu   <= cfg_mu;
        fc   <= cfg_field;
      end
      if (start_req && !busy) error <= !mu_ok;
      if (start) begin
        busy   <= 1'b1;
        done   <= 1'b0;
        groups <= '0;
      end else if (busy) begin
        if (mode_fwd(mode) && leaf_valid) begin
          groups <= groups + 1'b1;
          if (groups + 1'b1 == groups_total) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
        if (!mode_fwd(mode) && root_valid) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (en && !busy && chal_we && int'(chal_addr) < MAX_MU) chal[chal_addr] <= chal_data;
  end
endmodule
