// control_unit: holds the network information and runs the layers in order.
//
// This is the outer loop of the paper's algorithm: for each convolution layer,
// set the layer parameters (including the choice between regular and
// depthwise mode) and let the address generator, the convolution unit and the
// activation unit work through it. The host writes up to MAX_LAYERS layer
// descriptors into the table (cfg_we/cfg_addr/cfg_data), then pulses start
// with num_layers. A layer starts only when the previous one has been written
// back completely, since its outputs are the next layer's inputs. A layer
// whose descriptor the hardware cannot run (kernel over 7x7, an input block
// over IB pixels, stride other than 1 or 2, depthwise with IC != OC, an empty
// output) is skipped and sets error.
// Outputs: cfg is the current layer's descriptor, agen_start pulses once per
// layer, mode_switch pulses when a layer's mode differs from the previous
// layer's, busy is high from start to done, done pulses at the end.
// The paper shows a control unit but does not describe it; the descriptor
// table, its size and the error handling are this design's.
module control_unit
  import cnn_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cfg_we,
  input  logic [LAYER_AW-1:0] cfg_addr,
  input  layer_t              cfg_data,
  input  logic                start,
  input  logic [LAYER_AW:0]   num_layers,
  output layer_t              cfg,
  output logic [LAYER_AW-1:0] layer_idx,
  output logic                agen_start,
  input  logic                agen_busy,
  input  logic                clpu_idle,
  input  logic                aplpu_idle,
  output logic                busy,
  output logic                done,
  output logic                error,
  output logic                mode_switch
);
  typedef enum logic [2:0] {C_IDLE, C_LOAD, C_CHECK, C_RUN, C_NEXT} state_e;
  state_e state;

  layer_t       table_q [MAX_LAYERS];
  logic [LAYER_AW:0] li, nl;
  logic         have_prev;
  mode_e        prev_mode;

  always_ff @(posedge clk) begin
    if (cfg_we && state == C_IDLE) table_q[cfg_addr] <= cfg_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; li <= '0; nl <= '0; cfg <= '0;
      agen_start <= 1'b0; done <= 1'b0; error <= 1'b0; mode_switch <= 1'b0;
      have_prev <= 1'b0; prev_mode <= MODE_REGULAR;
    end else begin
      agen_start  <= 1'b0;
      done        <= 1'b0;
      mode_switch <= 1'b0;
      case (state)
        C_IDLE: if (start) begin
          li <= '0; nl <= num_layers; error <= 1'b0; have_prev <= 1'b0;
          state <= (num_layers == 0) ? C_NEXT : C_LOAD;
        end
        C_LOAD: begin
          cfg   <= table_q[li[LAYER_AW-1:0]];
          state <= C_CHECK;
        end
        C_CHECK: begin
          if (layer_ok(cfg)) begin
            agen_start  <= 1'b1;
            mode_switch <= have_prev && (cfg.mode != prev_mode);
            prev_mode   <= cfg.mode;
            have_prev   <= 1'b1;
            state       <= C_RUN;
          end else begin
            error <= 1'b1;
            state <= C_NEXT;
          end
        end
        C_RUN: if (!agen_start && !agen_busy && clpu_idle && aplpu_idle) state <= C_NEXT;
        C_NEXT: begin
          if (li + 1 >= nl) begin
            state <= C_IDLE;
            done  <= 1'b1;
          end else begin
            li    <= li + 1'b1;
            state <= C_LOAD;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  assign busy      = (state != C_IDLE);
  assign layer_idx = li[LAYER_AW-1:0];
endmodule
