// lif_config: configuration registers of the detector.
//
// Holds the firing threshold and the constant leak shared by all output neurons (the paper's
// threshold register and configurable leak term), the activation threshold of the input neurons
// and a control bit that closes the feedback path from the synchronization layer to the input
// layer. A write (we high) to addr updates one register on the next clock edge; rdata always
// shows the register at addr.
//
// Reset values (this design's choice): threshold 0 and leak 1, which make each output neuron a
// two-spike coincidence detector (one spike minus the leak leaves 0, which does not exceed 0; two
// coincident spikes leave 1, which does; two spikes a cycle apart each leak away);
// pixel threshold 0, so any nonzero pixel is an active input; feedback off. The register map is this design's own.
module lif_config
  import sym_pkg::*;
#(
  parameter logic [ACC_W-1:0] RESET_THRESHOLD = ACC_W'(0),
  parameter logic [ACC_W-1:0] RESET_LEAK      = ACC_W'(1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            we,
  input  cfg_addr_e       addr,
  input  logic [7:0]      wdata,
  output logic [7:0]      rdata,
  output cfg_t            cfg
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.threshold   <= RESET_THRESHOLD;
      cfg.leak        <= RESET_LEAK;
      cfg.pix_thr     <= '0;
      cfg.feedback_en <= 1'b0;
    end else if (we) begin
      case (addr)
        CFG_THRESHOLD: cfg.threshold   <= ACC_W'(wdata);
        CFG_LEAK:      cfg.leak        <= ACC_W'(wdata);
        CFG_PIX_THR:   cfg.pix_thr     <= PIX_W'(wdata);
        CFG_CONTROL:   cfg.feedback_en <= wdata[0];
        default: ;
      endcase
    end
  end

  always_comb begin
    case (addr)
      CFG_THRESHOLD: rdata = 8'(cfg.threshold);
      CFG_LEAK:      rdata = 8'(cfg.leak);
      CFG_PIX_THR:   rdata = 8'(cfg.pix_thr);
      CFG_CONTROL:   rdata = {7'd0, cfg.feedback_en};
      default:       rdata = '0;
    endcase
  end
endmodule
