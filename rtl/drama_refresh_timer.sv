// drama_refresh_timer: conventional refresh between searches.
//
// A DRAMA compare restores the cells it reads, and a compare is far shorter
// than the 64 ms retention time, so refresh is not needed while searches run;
// when none runs, ordinary auto-refresh is used. This block earns one refresh
// credit every trefi cycles, keeps up to MAX_PENDING credits while a search is
// in progress (DDR3 lets a controller postpone eight refreshes), and asks for a
// REF command whenever the controller is idle and a credit is owed. If a
// credit is earned with MAX_PENDING already owed it is lost and `missed`
// pulses, so the host can see that searches were too long for the refresh
// budget.
//
// Interface: ref_req is high while idle and a credit is pending; ref_ack (one
// cycle, when the REF has been issued) pays one credit back. Credit pacing and
// the postponement limit are this design's choices; the refresh policy (none
// needed during compares, conventional refresh otherwise) follows the paper.
module drama_refresh_timer #(
  parameter int MAX_PENDING = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] trefi,
  input  logic        idle,
  output logic        ref_req,
  input  logic        ref_ack,
  output logic [3:0]  pending,
  output logic        missed
);

  logic [15:0] cnt;
  logic        tick;

  assign tick    = (cnt >= trefi - 16'd1);
  assign ref_req = idle && (pending != 4'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      pending <= '0;
      missed  <= 1'b0;
    end else begin
      cnt    <= tick ? 16'd0 : cnt + 16'd1;
      missed <= 1'b0;
      case ({tick, ref_ack && pending != 4'd0})
        2'b10: begin
          if (32'(pending) == MAX_PENDING) missed <= 1'b1;
          else                             pending <= pending + 4'd1;
        end
        2'b01: pending <= pending - 4'd1;
        default: ;  // none, or one earned and one paid
      endcase
    end
  end

  a_ack_only_when_req: assert property (@(posedge clk) disable iff (!rst_n) ref_ack |-> pending != 4'd0);

endmodule
