// process_control_unit: the Process Control Unit, which manages the overall
// data flow of the accelerator.
//
// The paper names this unit and its role but not its insides. Here it is a
// small sequencer that runs the CapsNet layers in order for one image:
//   Convolution layer (cfg1, ReLU)  ->  PrimaryCaps convolution (cfg2)
//   ->  dynamic routing (DigitCaps)  ->  done
// It starts the convolution module once per convolution layer with that
// layer's descriptor, then starts the routing module, and it decides who owns
// the shared PE array and the activation memory ports (pe_owner).
//
// Interface: start pulses while idle; done pulses one cycle after the routing
// module reports done. owner_switches counts hand-overs of the PE array from
// one module to the other.
module process_control_unit
  import caps_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  conv_cfg_t cfg1,
  input  conv_cfg_t cfg2,
  output logic      busy,
  output logic      done,
  output pe_owner_e pe_owner,
  // convolution module
  output logic      conv_start,
  output conv_cfg_t conv_cfg,
  input  logic      conv_done,
  // routing module
  output logic      route_start,
  input  logic      route_done,
  output logic [31:0] owner_switches
);
  typedef enum logic [2:0] {P_IDLE, P_CONV1, P_CONV2, P_ROUTE, P_DONE} phase_e;
  phase_e ph;
  pe_owner_e owner_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= P_IDLE; conv_start <= 1'b0; route_start <= 1'b0; done <= 1'b0;
      owner_q <= PE_OWNER_NONE; owner_switches <= '0;
    end else begin
      conv_start <= 1'b0; route_start <= 1'b0; done <= 1'b0;
      case (ph)
        P_IDLE: if (start) begin ph <= P_CONV1; conv_start <= 1'b1; end
        P_CONV1: if (conv_done) begin ph <= P_CONV2; conv_start <= 1'b1; end
        P_CONV2: if (conv_done) begin ph <= P_ROUTE; route_start <= 1'b1; end
        P_ROUTE: if (route_done) ph <= P_DONE;
        P_DONE: begin done <= 1'b1; ph <= P_IDLE; end
        default: ph <= P_IDLE;
      endcase
      if (pe_owner != owner_q) begin
        if (owner_q != PE_OWNER_NONE && pe_owner != PE_OWNER_NONE)
          owner_switches <= owner_switches + 1'b1;
        if (pe_owner != PE_OWNER_NONE) owner_q <= pe_owner;
      end
    end
  end

  always_comb begin
    case (ph)
      P_CONV1, P_CONV2: pe_owner = PE_OWNER_CONV;
      P_ROUTE:          pe_owner = PE_OWNER_ROUTING;
      default:          pe_owner = PE_OWNER_NONE;
    endcase
    conv_cfg = (ph == P_CONV2) ? cfg2 : cfg1;
  end

  assign busy = (ph != P_IDLE);
endmodule
