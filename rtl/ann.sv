// ann: the NN logic - the reconfigurable feed-forward network and its
// registers. It holds the three memories (coefficients 1024x10, neuron outputs
// 128x32, topology 78x8), four processors and the controller, and decodes the
// memory-style bus from the AXI bridge. Writing CTRL with bit 0 set captures
// the ten TDC codes and starts one inference; CTRL bit 1 (BYPASS) feeds the
// network from ten bus-written 32-bit input registers instead of the TDCs, so
// the ANN runs stand-alone. In normal mode input j is the low 20 bits of TDC
// code j, as an integer with 8 fractional bits (code*256). STATUS shows busy,
// done (sticky until the next start) and a topology error; CYCLES the length
// of the last inference. Results are read from the neuron memory at their
// global neuron index (address 0x800 + index); the output layer is the last
// block of indices. Bus reads return data one clock after RAM_RCE.
// Word address map: 0x000 CTRL, 0x001 STATUS, 0x002 CYCLES, 0x010-0x019
// bypass inputs, 0x020-0x029 live TDC codes, 0x400-0x7FF coefficients,
// 0x800-0x87F neuron outputs, 0xC00-0xC4D topology. Memory sizes, the four
// processors and the bypass follow the paper; the map, the TDC capture and
// the input scaling are this design's choices. Software must not write the
// memories while busy.
`timescale 1ns/1fs
module ann
  import smarty_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [RAM_AW-1:0] ram_addr_i,
  input  logic [31:0]       ram_wdata_i,
  input  logic              ram_we_i,
  input  logic              ram_rce_i,
  output logic [31:0]       ram_rdata_o,
  input  tdc_code_t         tdc_codes_i [N_TDC],
  output logic              busy_o,
  output logic              done_o     // one-clock pulse at the end of an inference
);
  // ---------------- address decode ----------------
  typedef enum logic [2:0] {R_REG, R_COEF, R_NEUR, R_TOPO, R_NONE} region_t;
  region_t region, rd_region;
  logic [31:0] reg_rdata, reg_rdata_q;

  always_comb begin
    if (ram_addr_i[13:10] == A_COEF[13:10])                                region = R_COEF;
    else if (ram_addr_i[13:7] == A_NEURON[13:7])                       region = R_NEUR;
    else if (ram_addr_i[13:7] == A_TOPO[13:7] && ram_addr_i[6:0] < 7'(TOPO_WORDS)) region = R_TOPO;
    else if (ram_addr_i[13:6] == 8'h00)                                region = R_REG;
    else                                                               region = R_NONE;
  end

  // ---------------- registers ----------------
  logic      bypass, start, done_flag;
  act_t      byp_in [N_TDC];
  tdc_code_t cap    [N_TDC];
  logic      c_busy, c_done, c_err;
  logic [31:0] c_cycles;

  assign start = ram_we_i && region == R_REG && ram_addr_i == A_CTRL && ram_wdata_i[0] && !c_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bypass    <= 1'b0;
      done_flag <= 1'b0;
      for (int i = 0; i < N_TDC; i++) begin
        byp_in[i] <= '0;
        cap[i]    <= '0;
      end
    end else begin
      if (ram_we_i && region == R_REG) begin
        if (ram_addr_i == A_CTRL) bypass <= ram_wdata_i[1];
        for (int i = 0; i < N_TDC; i++)
          if (ram_addr_i == A_BYPASS + RAM_AW'(i)) byp_in[i] <= act_t'(ram_wdata_i);
      end
      if (start) begin
        done_flag <= 1'b0;
        for (int i = 0; i < N_TDC; i++) cap[i] <= tdc_codes_i[i];
      end else if (c_done) begin
        done_flag <= 1'b1;
      end
    end
  end

  always_comb begin
    reg_rdata = '0;
    if (ram_addr_i == A_CTRL)   reg_rdata = {30'd0, bypass, 1'b0};
    if (ram_addr_i == A_STATUS) reg_rdata = {29'd0, c_err, done_flag, c_busy};
    if (ram_addr_i == A_CYCLES) reg_rdata = c_cycles;
    for (int i = 0; i < N_TDC; i++) begin
      if (ram_addr_i == A_BYPASS + RAM_AW'(i)) reg_rdata = byp_in[i];
      if (ram_addr_i == A_TDC + RAM_AW'(i))    reg_rdata = 32'(tdc_codes_i[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_region   <= R_NONE;
      reg_rdata_q <= '0;
    end else if (ram_rce_i) begin
      rd_region   <= region;
      reg_rdata_q <= reg_rdata;
    end
  end

  // ---------------- memories ----------------
  logic        coef_b_en, topo_b_en, nm_b_en, nm_b_we;
  logic [9:0]  coef_b_addr;
  logic [6:0]  topo_b_addr, nm_b_addr;
  coef_t       coef_b_rdata;
  logic [COEF_W-1:0] coef_a_rdata;
  logic [7:0]  topo_a_rdata, topo_b_rdata;
  act_t        nm_b_wdata, nm_b_rdata;
  logic [31:0] nm_a_rdata;

  coef_mem #(.DEPTH(MAX_COEFS), .WIDTH(COEF_W)) u_coef (
    .clk,
    .a_en_i   ((ram_we_i || ram_rce_i) && region == R_COEF),
    .a_we_i   (ram_we_i),
    .a_addr_i (ram_addr_i[9:0]),
    .a_wdata_i(ram_wdata_i[COEF_W-1:0]),
    .a_rdata_o(coef_a_rdata),
    .b_en_i   (coef_b_en),
    .b_addr_i (coef_b_addr),
    .b_rdata_o(coef_b_rdata)
  );

  neuron_mem #(.DEPTH(MAX_NEURONS), .WIDTH(ACT_W)) u_neur (
    .clk,
    .a_en_i   ((ram_we_i || ram_rce_i) && region == R_NEUR),
    .a_we_i   (ram_we_i),
    .a_addr_i (ram_addr_i[6:0]),
    .a_wdata_i(ram_wdata_i),
    .a_rdata_o(nm_a_rdata),
    .b_en_i   (nm_b_en),
    .b_we_i   (nm_b_we),
    .b_addr_i (nm_b_addr),
    .b_wdata_i(nm_b_wdata),
    .b_rdata_o(nm_b_rdata)
  );

  topo_mem #(.DEPTH(TOPO_WORDS), .WIDTH(TOPO_W)) u_topo (
    .clk,
    .a_en_i   ((ram_we_i || ram_rce_i) && region == R_TOPO),
    .a_we_i   (ram_we_i),
    .a_addr_i (ram_addr_i[6:0]),
    .a_wdata_i(ram_wdata_i[7:0]),
    .a_rdata_o(topo_a_rdata),
    .b_en_i   (topo_b_en),
    .b_addr_i (topo_b_addr),
    .b_rdata_o(topo_b_rdata)
  );

  always_comb begin
    unique case (rd_region)
      R_REG:   ram_rdata_o = reg_rdata_q;
      R_COEF:  ram_rdata_o = 32'(signed'(coef_a_rdata));
      R_NEUR:  ram_rdata_o = nm_a_rdata;
      R_TOPO:  ram_rdata_o = 32'(topo_a_rdata);
      default: ram_rdata_o = '0;
    endcase
  end

  // ---------------- input multiplexer ----------------
  logic [3:0] in_sel;
  act_t       in_val;

  always_comb begin
    in_val = '0;
    for (int i = 0; i < N_TDC; i++)
      if (in_sel == 4'(i)) in_val = bypass ? byp_in[i] : tdc_to_act(cap[i]);
  end

  // ---------------- processors and controller ----------------
  logic [N_PROC-1:0] p_load, p_mac;
  coef_t             p_coef;
  act_t              p_act;
  act_t              p_y [N_PROC];

  for (genvar g = 0; g < N_PROC; g++) begin : g_proc
    nn_processor u_proc (
      .clk, .rst_n,
      .load_bias_i(p_load[g]),
      .mac_i      (p_mac[g]),
      .coef_i     (p_coef),
      .act_i      (p_act),
      .y_o        (p_y[g])
    );
  end

  nn_ctrl u_ctrl (
    .clk, .rst_n,
    .start_i     (start),
    .busy_o      (c_busy),
    .done_o      (c_done),
    .err_o       (c_err),
    .cycles_o    (c_cycles),
    .topo_en_o   (topo_b_en),
    .topo_addr_o (topo_b_addr),
    .topo_rdata_i(topo_b_rdata),
    .coef_en_o   (coef_b_en),
    .coef_addr_o (coef_b_addr),
    .coef_rdata_i(coef_b_rdata),
    .nm_en_o     (nm_b_en),
    .nm_we_o     (nm_b_we),
    .nm_addr_o   (nm_b_addr),
    .nm_wdata_o  (nm_b_wdata),
    .nm_rdata_i  (nm_b_rdata),
    .in_sel_o    (in_sel),
    .in_val_i    (in_val),
    .proc_load_o (p_load),
    .proc_mac_o  (p_mac),
    .proc_coef_o (p_coef),
    .proc_act_o  (p_act),
    .proc_y_i    (p_y)
  );

  assign busy_o = c_busy;
  assign done_o = c_done;
endmodule
