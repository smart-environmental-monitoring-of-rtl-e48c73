// unet_ctrl -- layer sequencer of the Tiny U-Net.
//
// Holds the layer schedule as a constant table built by unet_pkg::layer_desc
// from the network parameters (image size, input channels, base channels,
// blocks per side, classes, lanes, input channels per cycle) and steps the layer engine through it:
// on `start` it presents layer 0 and pulses `eng_start`, and each `eng_done`
// advances to the next layer until the last (the classifier) has finished,
// when `done` pulses for one cycle.  Each layer boundary costs one idle cycle
// of the engine.  `layer` shows the index of the running layer.
// The order of layers is the paper's U-Net (encoder, bottleneck, decoder with
// skip connections, 1x1 classifier); running them one after another on a
// single engine is this design's choice.
module unet_ctrl #(
  parameter int IMG   = 128,
  parameter int CIN   = 9,
  parameter int C0    = 16,
  parameter int NB    = 2,
  parameter int NCLS  = 11,
  parameter int LANES = 16,
  parameter int ICP   = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic              eng_start,
  input  logic              eng_done,
  output unet_pkg::layer_t  cfg,
  output logic [7:0]        layer
);
  import unet_pkg::*;

  localparam int NL = num_layers(NB);

  layer_t tab [NL];
  for (genvar i = 0; i < NL; i++) begin : g_tab
    localparam layer_t L = layer_desc(i, IMG, cin_pad(CIN, ICP), C0, NB, NCLS, LANES, ICP);
    assign tab[i] = L;
  end

  typedef enum logic [1:0] {C_IDLE, C_LAUNCH, C_WAIT} cstate_e;
  cstate_e st;

  assign cfg  = tab[(32'(layer) < NL) ? 32'(layer) : 0];
  assign busy = (st != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; layer <= '0; eng_start <= 1'b0; done <= 1'b0;
    end else begin
      eng_start <= 1'b0;
      done      <= 1'b0;
      case (st)
        C_IDLE: if (start) begin
          layer <= '0;
          st    <= C_LAUNCH;
        end
        C_LAUNCH: begin
          eng_start <= 1'b1;
          st        <= C_WAIT;
        end
        C_WAIT: if (eng_done) begin
          if (32'(layer) == NL - 1) begin
            st   <= C_IDLE;
            done <= 1'b1;
          end else begin
            layer <= layer + 8'd1;
            st    <= C_LAUNCH;
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
