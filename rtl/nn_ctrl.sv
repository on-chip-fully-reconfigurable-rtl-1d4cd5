// nn_ctrl: control logic of the reconfigurable ANN. After start_i it reads the
// topology (word 0 = number of layers L, word l+1 = neurons in layer l) and
// evaluates the network layer by layer. Neurons of a layer are taken in groups
// of up to four, one per processor. For input k = 0 (bias) .. F (F = fan-in)
// the controller reads one coefficient per clock and hands it to the
// processors in turn, so a group of g neurons takes g*(F+1) clocks; the
// previous layer's activation k-1 is read from the neuron memory once per k
// and is shared by all processors of the group (the read data stays on the
// memory port until the next read). In the input layer each neuron j has one
// weight and takes ANN input j through the input multiplexer (in_sel_o).
// Coefficients are laid out as in the paper's model: neuron by neuron, bias
// first, then the weights in input order. When a group is done its outputs are
// written to the neuron memory at the neurons' global indices, one per clock.
// Timing: memory reads return one clock after the request, so a one-stage
// pipeline (s1_*) carries the request to the processors. Clocks per inference:
//   3 + sum over layers of (2 + sum over groups of (2 + g*(F+2)))
// (1076 for the paper's 10-13-13-13-13-13-3 network). done_o is high for the
// last clock of an inference (busy_o falls after it);
// err_o is set if the topology breaks a limit (a layer of 0 neurons, more than
// N_IN inputs, more than 128 neurons or 1024 coefficients, or L outside 1..77).
// The schedule and error checks are this design's own; the paper's control
// logic is produced by high-level synthesis and not described further.
`timescale 1ns/1fs
module nn_ctrl
  import smarty_pkg::*;
#(
  parameter int unsigned N_IN        = N_TDC,
  parameter int unsigned MAX_NEUR    = MAX_NEURONS,
  parameter int unsigned MAX_COEF    = MAX_COEFS,
  parameter int unsigned TOPO_DEPTH  = TOPO_WORDS,
  localparam int unsigned NAW = $clog2(MAX_NEUR),
  localparam int unsigned CAW = $clog2(MAX_COEF),
  localparam int unsigned TAW = $clog2(TOPO_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start_i,
  output logic            busy_o,
  output logic            done_o,
  output logic            err_o,
  output logic [31:0]     cycles_o,
  // topology memory read port
  output logic            topo_en_o,
  output logic [TAW-1:0]  topo_addr_o,
  input  logic [7:0]      topo_rdata_i,
  // coefficient memory read port
  output logic            coef_en_o,
  output logic [CAW-1:0]  coef_addr_o,
  input  coef_t           coef_rdata_i,
  // neuron memory port B
  output logic            nm_en_o,
  output logic            nm_we_o,
  output logic [NAW-1:0]  nm_addr_o,
  output act_t            nm_wdata_o,
  input  act_t            nm_rdata_i,
  // input multiplexer
  output logic [3:0]      in_sel_o,
  input  act_t            in_val_i,
  // processors
  output logic [N_PROC-1:0] proc_load_o,
  output logic [N_PROC-1:0] proc_mac_o,
  output coef_t           proc_coef_o,
  output act_t            proc_act_o,
  input  act_t            proc_y_i [N_PROC]
);
  typedef enum logic [3:0] {
    S_IDLE, S_RD_L, S_RD_L_W, S_LAYER, S_LAYER_W, S_GROUP, S_MAC, S_DRAIN, S_WB, S_DONE
  } state_t;

  state_t     state;
  logic [7:0] n_layers, layer;
  logic [7:0] cur_n, prev_n, fan;         // neurons in layer, previous layer, fan-in
  logic [8:0] cur_base, prev_base;        // global index of first neuron of layer
  logic [7:0] gidx;                       // first neuron of the group within the layer
  logic [2:0] gcnt;                       // neurons in the group (1..4)
  logic [1:0] p, wb_p;
  logic [7:0] k;
  logic [11:0] coef_ptr;                  // first coefficient of the group

  // pipeline stage between memory request and processor
  logic       s1_valid, s1_bias, s1_layer0;
  logic [1:0] s1_p;
  act_t       s1_inval;

  // values computed from the topology word being read
  logic [7:0]  new_n, new_fan;
  logic [19:0] need_coef;
  logic        layer_bad;
  logic [7:0]  left;

  always_comb begin
    new_n     = topo_rdata_i;
    new_fan   = (layer == 0) ? 8'd1 : prev_n;
    need_coef = 20'(coef_ptr) + 20'(new_n) * (20'(new_fan) + 20'd1);
    layer_bad = (new_n == 0) ||
                ((layer == 0) && (32'(new_n) > N_IN)) ||
                (32'(cur_base) + 32'(new_n) > MAX_NEUR) ||
                (32'(need_coef) > MAX_COEF);
    left      = cur_n - gidx;
  end

  // ---------------- request side (combinational) ----------------
  always_comb begin
    topo_en_o   = 1'b0;
    topo_addr_o = '0;
    coef_en_o   = 1'b0;
    coef_addr_o = '0;
    nm_en_o     = 1'b0;
    nm_we_o     = 1'b0;
    nm_addr_o   = '0;
    nm_wdata_o  = '0;
    in_sel_o    = 4'(gidx + 8'(p));
    unique case (state)
      S_RD_L: begin
        topo_en_o = 1'b1;
      end
      S_LAYER: begin
        topo_en_o   = 1'b1;
        topo_addr_o = TAW'(layer + 8'd1);
      end
      S_MAC: begin
        coef_en_o   = 1'b1;
        coef_addr_o = CAW'(coef_ptr + 12'(p) * (12'(fan) + 12'd1) + 12'(k));
        if (layer != 0 && p == 0 && k != 0) begin
          nm_en_o   = 1'b1;
          nm_addr_o = NAW'(prev_base + 9'(k) - 9'd1);
        end
      end
      S_WB: begin
        nm_en_o    = 1'b1;
        nm_we_o    = 1'b1;
        nm_addr_o  = NAW'(cur_base + 9'(gidx) + 9'(wb_p));
        nm_wdata_o = proc_y_i[wb_p];
      end
      default: ;
    endcase
  end

  // ---------------- processor side ----------------
  always_comb begin
    for (int i = 0; i < N_PROC; i++) begin
      proc_load_o[i] = s1_valid &&  s1_bias && (s1_p == 2'(i));
      proc_mac_o[i]  = s1_valid && !s1_bias && (s1_p == 2'(i));
    end
    proc_coef_o = coef_rdata_i;
    proc_act_o  = s1_layer0 ? s1_inval : nm_rdata_i;
  end

  // ---------------- state machine ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      n_layers  <= '0;
      layer     <= '0;
      cur_n     <= '0;
      prev_n    <= '0;
      fan       <= '0;
      cur_base  <= '0;
      prev_base <= '0;
      gidx      <= '0;
      gcnt      <= '0;
      p         <= '0;
      wb_p      <= '0;
      k         <= '0;
      coef_ptr  <= '0;
      s1_valid  <= 1'b0;
      s1_bias   <= 1'b0;
      s1_layer0 <= 1'b0;
      s1_p      <= '0;
      s1_inval  <= '0;
      err_o     <= 1'b0;
      cycles_o  <= '0;
    end else begin
      s1_valid <= (state == S_MAC);
      s1_p     <= p;
      s1_bias  <= (k == 0);
      s1_layer0 <= (layer == 0);
      s1_inval <= in_val_i;
      if (state != S_IDLE) cycles_o <= cycles_o + 32'd1;

      unique case (state)
        S_IDLE: if (start_i) begin
          state    <= S_RD_L;
          err_o    <= 1'b0;
          cycles_o <= '0;
        end
        S_RD_L: state <= S_RD_L_W;
        S_RD_L_W: begin
          n_layers  <= topo_rdata_i;
          layer     <= '0;
          cur_base  <= '0;
          prev_base <= '0;
          prev_n    <= '0;
          coef_ptr  <= '0;
          if (topo_rdata_i == 0 || 32'(topo_rdata_i) > TOPO_DEPTH - 1) begin
            err_o <= 1'b1;
            state <= S_DONE;
          end else begin
            state <= S_LAYER;
          end
        end
        S_LAYER: state <= S_LAYER_W;
        S_LAYER_W: begin
          cur_n <= new_n;
          fan   <= new_fan;
          gidx  <= '0;
          if (layer_bad) begin
            err_o <= 1'b1;
            state <= S_DONE;
          end else begin
            state <= S_GROUP;
          end
        end
        S_GROUP: begin
          gcnt  <= (left > 8'd4) ? 3'd4 : 3'(left);
          k     <= '0;
          p     <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          if (3'(p) == gcnt - 3'd1) begin
            p <= '0;
            if (k == fan) state <= S_DRAIN;
            else          k <= k + 8'd1;
          end else begin
            p <= p + 2'd1;
          end
        end
        S_DRAIN: begin
          wb_p  <= '0;
          state <= S_WB;
        end
        S_WB: begin
          if (3'(wb_p) == gcnt - 3'd1) begin
            coef_ptr <= coef_ptr + 12'(gcnt) * (12'(fan) + 12'd1);
            gidx     <= gidx + 8'(gcnt);
            if (gidx + 8'(gcnt) >= cur_n) begin
              prev_base <= cur_base;
              cur_base  <= cur_base + 9'(cur_n);
              prev_n    <= cur_n;
              layer     <= layer + 8'd1;
              state     <= (layer + 8'd1 == n_layers) ? S_DONE : S_LAYER;
            end else begin
              state <= S_GROUP;
            end
          end else begin
            wb_p <= wb_p + 2'd1;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy_o = (state != S_IDLE);
  assign done_o = (state == S_DONE);

  // A group never holds more neurons than there are processors.
  a_gcnt: assert property (@(posedge clk) disable iff (!rst_n) (state == S_MAC) |-> (gcnt >= 1 && gcnt <= 3'(N_PROC)));
endmodule
