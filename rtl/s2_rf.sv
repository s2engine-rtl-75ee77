// s2_rf: result-forwarding (RF) component of a processing element.
//
// Results of the output-stationary array leave through chains of RF
// components running down the columns. In each chain the results of one
// round (one convolution per PE) must come out in order, top PE first. PEs
// finish at different times because their sparsity differs, so a PE that is
// done early must not overtake the PEs above it.
//
// Each RF knows its position pos in its chain (number of PEs above it). It
// passes results arriving from above and counts them; only when pos results
// have gone by does it insert its own result and restart the count. Until
// then its own result waits (rf_stall), which in turn holds back the MAC.
//
// Interface: own (from the MAC), up (from the RF above) and dn (to the RF
// below or the array edge), all valid/ready. The output register accepts a
// new result only when it is empty, so no ready signal ripples along the
// chain: a result moves one PE every two clocks, ample for results that
// appear once per convolution.
//
// The ordering requirement follows the published design; the counting
// scheme and the registered output are this design's choices.
module s2_rf #(
  parameter int unsigned ACC_W = s2_pkg::ACC_W,
  parameter int unsigned POS_W = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [POS_W-1:0] pos,
  input  logic             own_valid,
  output logic             own_ready,
  input  logic [ACC_W-1:0] own,
  input  logic             up_valid,
  output logic             up_ready,
  input  logic [ACC_W-1:0] up,
  output logic             dn_valid,
  input  logic             dn_ready,
  output logic [ACC_W-1:0] dn,
  output logic             rf_stall
);

  logic [POS_W-1:0] passed;
  logic             load, my_turn;

  assign load      = !dn_valid;
  assign my_turn   = (passed == pos);
  assign own_ready = load && my_turn;
  assign up_ready  = load && !my_turn;
  assign rf_stall  = own_valid && !my_turn;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      passed   <= '0;
      dn_valid <= 1'b0;
      dn       <= '0;
    end else begin
      if (own_valid && own_ready) begin
        dn       <= own;
        dn_valid <= 1'b1;
        passed   <= '0;
      end else if (up_valid && up_ready) begin
        dn       <= up;
        dn_valid <= 1'b1;
        passed   <= passed + 1'b1;
      end else if (dn_valid && dn_ready) begin
        dn_valid <= 1'b0;
      end
    end
  end

endmodule
