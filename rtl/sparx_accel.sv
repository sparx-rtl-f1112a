// SPARX secure approximate CNN accelerator.
//
// One custom instruction runs one inference.  While req is high the
// accelerator reads func3 (abc: privacy, approximation, model variant) and
// the key / challenge / signature fields from instr, and the input-bank base
// address of the image from rs1[11:0].  It then
//   - denies the request when invalid_axi_id is high, or, in the secure modes,
//     when the signature check fails;
//   - runs a 3x3 convolution (8 output channels) on the 8x8 systolic array,
//     with the exact Booth or the approximate ILM multipliers, passes the
//     accumulators through batch norm and ReLU into the activation buffer;
//   - pools 2x2 windows with the AAD pooling unit into the pooled buffer;
//   - runs the fully connected layer (10 classes) on the same array;
//   - picks the class with argmax and, in the privacy modes, XORs it with
//     the LFSR noise.
// done is high for one cycle with result = {28'b0, class} or, when denied,
// result[31] = 1.  busy is high from the cycle after req is accepted until
// done; the processor stalls on req && !done.
//
// The host fills the banks through the AXI-Lite port: address bits [19:18]
// select input bank (0, byte entries), weight bank (1, byte entries), bias
// bank (2, 16-bit entries) or registers (3), bits [17:2] the entry.
// Register 0 is the device key (read/write), 1 the busy flag, 2 the last
// result.  Bank layouts are documented in sparx_pkg.
//
// The units and the mode encoding follow the paper; the network shape, the
// banks' layout and ports, the result encoding and this host port are this
// design's choices.
module sparx_accel
  import sparx_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // custom-instruction port (from the EX stage)
  input  logic        req,
  input  logic [31:0] instr,
  input  logic [31:0] rs1,
  input  logic        invalid_axi_id,
  output logic        busy,
  output logic        done,
  output logic [31:0] result,
  // AXI-Lite host port
  input  logic [19:0] s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [19:0] s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready
);
  localparam int unsigned IN_AW = $clog2(IN_DEPTH);
  localparam int unsigned W_AW  = $clog2(W_DEPTH);
  localparam int unsigned B_AW  = $clog2(B_DEPTH);

  // ---------------- control engine ----------------
  ce_state_e     state;
  mode_t         mode_r;
  auth_fields_t  fields_r;
  logic [11:0]   base_r;
  logic          verify, grant, arr_valid, arr_clr, fc_phase;
  logic [11:0]   k, pix0;
  logic [3:0]    n0;
  logic [2:0]    drain_r, drain_c;
  logic          act_we, pool_we, fc_capture, result_valid, denied;
  logic [12:0]   act_waddr;
  logic [3:0][12:0] pool_raddr;
  logic [10:0]   pool_waddr;
  logic          sec_out_valid;
  logic [3:0]    sec_out;
  logic          start;

  assign start = req && (state == S_IDLE);

  control_engine #(.N(N)) u_ctrl (
    .clk, .rst_n, .start,
    .mode(mode_t'(instr[14:12])), .fields(auth_fields_t'(instr[31:20])),
    .base(rs1[11:0]), .invalid_id(invalid_axi_id),
    .grant, .sec_out_valid, .state, .mode_r, .fields_r, .base_r, .busy, .verify,
    .arr_valid, .arr_clr, .fc_phase, .k, .pix0, .n0, .drain_r, .drain_c,
    .act_we, .act_waddr, .pool_raddr, .pool_we, .pool_waddr,
    .fc_capture, .result_valid, .done, .denied
  );

  // ---------------- host bus ----------------
  logic        bus_we;
  logic [19:0] bus_waddr, bus_raddr;
  logic [31:0] bus_wdata, bus_rdata;

  axi_lite_slave #(.AW(20), .DW(32)) u_axi (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .bus_we, .bus_waddr, .bus_wdata, .bus_raddr, .bus_rdata
  );

  region_e wr_rgn, rd_rgn;
  assign wr_rgn = region_e'(bus_waddr[19:18]);
  assign rd_rgn = region_e'(bus_raddr[19:18]);

  // ---------------- banks ----------------
  logic [N:0][IN_AW-1:0] in_raddr;
  logic [N:0][7:0]       in_rdata;
  logic [N:0][W_AW-1:0]  w_raddr;
  logic [N:0][7:0]       w_rdata;
  logic [N+2:0][B_AW-1:0] b_raddr;
  logic [N+2:0][15:0]     b_rdata;
  logic [3:0][12:0]      act_raddr;
  logic [3:0][7:0]       act_rdata;
  logic [0:0][10:0]      pool_raddr_fc;
  logic [0:0][7:0]       pool_rdata;
  logic [7:0]            act_wdata, pool_wdata;

  bank_ram #(.DW(8), .DEPTH(IN_DEPTH), .NRD(N+1)) u_input_bank (
    .clk, .we(bus_we && wr_rgn == RGN_INPUT), .waddr(bus_waddr[IN_AW+1:2]),
    .wdata(bus_wdata[7:0]), .raddr(in_raddr), .rdata(in_rdata));

  bank_ram #(.DW(8), .DEPTH(W_DEPTH), .NRD(N+1)) u_weight_bank (
    .clk, .we(bus_we && wr_rgn == RGN_WEIGHT), .waddr(bus_waddr[W_AW+1:2]),
    .wdata(bus_wdata[7:0]), .raddr(w_raddr), .rdata(w_rdata));

  bank_ram #(.DW(16), .DEPTH(B_DEPTH), .NRD(N+3)) u_bias_bank (
    .clk, .we(bus_we && wr_rgn == RGN_BIAS), .waddr(bus_waddr[B_AW+1:2]),
    .wdata(bus_wdata[15:0]), .raddr(b_raddr), .rdata(b_rdata));

  bank_ram #(.DW(8), .DEPTH(ACT_DEPTH), .NRD(4)) u_act_buf (
    .clk, .we(act_we), .waddr(act_waddr), .wdata(act_wdata),
    .raddr(act_raddr), .rdata(act_rdata));

  bank_ram #(.DW(8), .DEPTH(POOL_DEPTH), .NRD(1)) u_pool_buf (
    .clk, .we(pool_we), .waddr(pool_waddr), .wdata(pool_wdata),
    .raddr(pool_raddr_fc), .rdata(pool_rdata));

  // ---------------- operand feed (CONV and MLP units) ----------------
  logic [N-1:0]                pad;
  logic [N-1:0][W_AW-1:0]      fc_waddr;
  logic [N-1:0]                fc_wvalid;
  logic signed [N-1:0][7:0]    w_vec, x_vec;

  for (genvar c = 0; c < N; c++) begin : g_conv
    conv_unit #(.AW(IN_AW)) u_conv (
      .cifar(mode_r.cifar), .base(base_r), .pix(pix0 + 12'(c)), .k,
      .addr(in_raddr[c]), .pad(pad[c]));
  end
  assign in_raddr[N] = bus_raddr[IN_AW+1:2];

  mlp_unit #(.N(N), .NOUT(NCLS), .BASE(FC_W_BASE), .AW(W_AW)) u_mlp (
    .k, .n0, .waddr(fc_waddr), .wvalid(fc_wvalid));

  always_comb begin
    for (int r = 0; r < int'(N); r++)
      w_raddr[r] = fc_phase ? fc_waddr[r] : W_AW'(32'(k) * N + r);
    w_raddr[N] = bus_raddr[W_AW+1:2];
    pool_raddr_fc[0] = 11'(k);
    for (int i = 0; i < int'(N); i++) begin
      if (fc_phase) begin
        w_vec[i] = fc_wvalid[i] ? w_rdata[i] : '0;
        x_vec[i] = (i == 0) ? pool_rdata[0] : '0;
      end else begin
        w_vec[i] = w_rdata[i];
        x_vec[i] = pad[i] ? '0 : in_rdata[i];
      end
    end
  end

  // ---------------- systolic array ----------------
  logic signed [N-1:0][N-1:0][15:0] acc;
  systolic_array #(.N(N), .W(8), .ACC_W(16)) u_array (
    .clk, .rst_n, .approx(mode_r.approx), .valid(arr_valid), .clr(arr_clr),
    .w_vec, .x_vec, .acc);

  // ---------------- drain: batch norm + ReLU ----------------
  logic signed [15:0] bn_y;
  logic signed [7:0]  relu_y;
  assign b_raddr[0] = B_AW'(BN_SCALE_BASE + 32'(drain_r));
  assign b_raddr[1] = B_AW'(BN_BIAS_BASE + 32'(drain_r));
  for (genvar r = 0; r < N; r++) begin : g_fcb
    assign b_raddr[2+r] = B_AW'(FC_BIAS_BASE + 32'(n0) + r);
  end
  assign b_raddr[N+2] = bus_raddr[B_AW+1:2];

  batch_norm #(.W(16), .SHIFT(BN_SHIFT)) u_bn (
    .acc(acc[drain_r][drain_c]), .scale(b_rdata[0]), .bias(b_rdata[1]), .y(bn_y));
  relu #(.IN_W(16), .OUT_W(8)) u_relu (.x(bn_y), .y(relu_y));
  assign act_wdata = relu_y;

  // ---------------- AAD pooling ----------------
  assign act_raddr = pool_raddr;
  aad_pool #(.W(8)) u_pool (.win(act_rdata), .y(pool_wdata));

  // ---------------- FC scores and argmax ----------------
  logic signed [NCLS-1:0][15:0] logits;
  logic [3:0] cls;

  function automatic logic signed [15:0] sat_add(input logic signed [15:0] a,
                                                  input logic signed [15:0] b);
    logic signed [16:0] s;
    s = 17'(a) + 17'(b);
    if (s > 17'sd32767)       return 16'sh7fff;
    else if (s < -17'sd32768) return 16'sh8000;
    else                      return s[15:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) logits <= '0;
    else if (fc_capture) begin
      for (int r = 0; r < int'(N); r++)
        if (32'(n0) + r < NCLS)
          logits[32'(n0) + r] <= sat_add(acc[r][0], b_rdata[2+r]);
    end
  end

  argmax #(.NCLS(NCLS), .W(16)) u_argmax (.scores(logits), .idx(cls));

  // ---------------- security and privacy ----------------
  logic [3:0] device_key;
  security_unit #(.DEVICE_KEY(4'hA)) u_sec (
    .clk, .rst_n,
    .key_we(bus_we && wr_rgn == RGN_REGS && bus_waddr[17:2] == 16'd0),
    .key_wdata(bus_wdata[3:0]), .device_key,
    .verify, .fields(fields_r), .grant,
    .privacy(mode_r.privacy), .result_valid, .result(cls),
    .out_valid(sec_out_valid), .out(sec_out));

  logic [3:0]  class_r;
  logic [31:0] last_result;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      class_r <= '0;
      last_result <= '0;
    end else begin
      if (sec_out_valid) class_r <= sec_out;
      if (done) last_result <= result;
    end
  end
  assign result = denied ? (32'd1 << RES_DENIED_BIT) : {28'd0, class_r};

  // ---------------- host read mux ----------------
  always_comb begin
    unique case (rd_rgn)
      RGN_INPUT:  bus_rdata = {24'd0, in_rdata[N]};
      RGN_WEIGHT: bus_rdata = {24'd0, w_rdata[N]};
      RGN_BIAS:   bus_rdata = {16'd0, b_rdata[N+2]};
      default: begin
        unique case (bus_raddr[3:2])
          2'd0:    bus_rdata = {28'd0, device_key};
          2'd1:    bus_rdata = {31'd0, busy};
          2'd2:    bus_rdata = last_result;
          default: bus_rdata = '0;
        endcase
      end
    endcase
  end
endmodule
