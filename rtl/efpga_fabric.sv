// efpga_fabric: behavioural model of the 28nm eFPGA fabric and the user
// designs loaded into it.
//
// The real fabric is a FABulous-generated array of 8 x 8 tiles: seven columns
// of LUT4AB tiles (56 tiles, 448 logic cells), one column of DSP_top/DSP_bot
// pairs (4 DSP slices), a WEST_IO column and an EAST_IO column, with
// termination tiles north and south.  Its switch matrices and bitstream format
// come from the FABulous generator and are not reproduced here.  This model
// keeps the fabric's place in the chip: the same ports (bitstream port, two
// 32-bit buses in, four 32-bit buses out, 64-bit AXI stream in and out, 16-bit
// digital output) and the same behaviour for the user designs run on it.
//
// Configuration: cfg_start empties the configuration memory pointer and stops
// the user logic; each cfg_wr stores cfg_data at the next of CFG_WORDS words
// (further words are dropped); cfg_done starts the user logic.  While not
// configured, the user logic is held in reset and all outputs are 0 (tready 0).
// Word 0 bits 7:0 select the user design ("personality"):
//   PERS_COUNTER  16-bit counter built of LUT4AB cells whose LUT contents are
//                 words 1..31; drives dout and from_fab[0].
//   PERS_LOOPBACK inbound stream looped to the outbound stream through one
//                 register stage with back-pressure.
//   PERS_BDT      pileup classifier.  Inbound: 7 beats per track, beat j
//                 carrying feature 2j in tdata[27:0] and 2j+1 in tdata[59:32].
//                 Outbound: one beat per track, tdata[27:0] score (sign
//                 extended to 32 bits), tdata[32] above-threshold flag, tlast.
//                 While a result waits to be sent the inbound side stalls.
//                 from_fab[0] last score, [1] tracks scored, [2] tracks above
//                 threshold; dout = tracks scored.
//   PERS_DSP      the four DSP slices: to_fab[0] bits 7:0 operand b, 11:8 ce
//                 mask, 15:12 clear mask, 16 signed, 31 step toggle; to_fab[1]
//                 byte k operand a of slice k.  Each change of the toggle bit
//                 runs one cycle of the slices; from_fab[k] is slice k's
//                 accumulator, sign- or zero-extended.
//
// From the paper: the tile inventory, the I/O widths, and the counter, loopback
// and classifier designs.  This model's own: the bitstream layout and
// personality codes, the stream packing of the classifier, and the DSP test
// personality, which exists to exercise the DSP slices from the register
// buses.
module efpga_fabric
  import efpga_pkg::*;
#(
  parameter int unsigned N_TO_FABRIC   = 2,
  parameter int unsigned N_FROM_FABRIC = 4,
  parameter logic signed [FX_W-1:0] BDT_THRESH = 28'sd252
) (
  input  logic        clk,
  input  logic        rst,
  // bitstream port
  input  logic        cfg_start,
  input  logic        cfg_wr,
  input  logic [31:0] cfg_data,
  input  logic        cfg_done,
  output logic        configured,
  // register buses (EAST_IO side)
  input  logic [31:0] to_fab   [N_TO_FABRIC],
  output logic [31:0] from_fab [N_FROM_FABRIC],
  // AXI streams
  input  axis64_t     ib_axis,
  output logic        ib_tready,
  output axis64_t     ob_axis,
  input  logic        ob_tready,
  // 16-bit digital output (WEST_IO side)
  output logic [15:0] dout
);
  localparam int unsigned N_DSP = 4;
  localparam int unsigned CW = $clog2(CFG_WORDS + 1);

  // ------------------------------------------------ configuration memory
  logic [31:0]   cfg_mem [CFG_WORDS];
  logic [CW-1:0] wptr;
  logic          urst;          // user-logic reset
  personality_e  pers;

  always_ff @(posedge clk) begin
    if (rst) begin
      configured <= 1'b0; wptr <= '0;
      for (int i = 0; i < CFG_WORDS; i++) cfg_mem[i] <= '0;
    end else begin
      if (cfg_start) begin
        configured <= 1'b0; wptr <= '0;
      end else if (cfg_wr && !configured) begin
        if (wptr < CW'(CFG_WORDS)) begin
          cfg_mem[wptr[$clog2(CFG_WORDS)-1:0]] <= cfg_data;
          wptr <= wptr + 1'b1;
        end
      end
      if (cfg_done && !cfg_start) configured <= 1'b1;
    end
  end

  assign urst = rst || !configured;
  assign pers = configured ? personality_e'(cfg_mem[0][7:0]) : PERS_NONE;

  // ------------------------------------------------------ counter design
  logic [31:0] cnt_cfg [31];
  logic [15:0] count;
  for (genvar j = 0; j < 31; j++) begin : g_cnt_cfg
    assign cnt_cfg[j] = cfg_mem[j+1];
  end
  counter16 #(.W(16)) u_counter (
    .clk, .rst(urst || pers != PERS_COUNTER), .en(1'b1), .cfg(cnt_cfg), .count
  );

  // ----------------------------------------------------- loopback design
  axis64_t lb_in, lb_out;
  logic    lb_s_tready;
  assign lb_in = (pers == PERS_LOOPBACK) ? ib_axis : '0;
  axis_loopback u_loopback (
    .clk, .rst(urst || pers != PERS_LOOPBACK),
    .s_axis(lb_in), .s_tready(lb_s_tready),
    .m_axis(lb_out), .m_tready(ob_tready && pers == PERS_LOOPBACK)
  );

  // ---------------------------------------------------- classifier design
  localparam int unsigned N_BEATS = (N_FEAT + 1) / 2;   // 7
  fx_t         feat [N_FEAT];
  logic [2:0]  beat;
  logic        bdt_busy, bdt_in_v, bdt_out_v, bdt_above;
  fx_t         bdt_score;
  axis64_t     bdt_ob;
  logic        bdt_ready;
  logic [31:0] n_scored, n_above;
  fx_t         last_score;

  assign bdt_ready = (pers == PERS_BDT) && !bdt_busy;

  always_ff @(posedge clk) begin
    if (urst || pers != PERS_BDT) begin
      beat <= '0; bdt_busy <= 1'b0; bdt_in_v <= 1'b0; bdt_ob <= '0;
      n_scored <= '0; n_above <= '0; last_score <= '0;
      for (int i = 0; i < N_FEAT; i++) feat[i] <= '0;
    end else begin
      bdt_in_v <= 1'b0;
      if (ib_axis.tvalid && bdt_ready) begin
        feat[2*beat]   <= ib_axis.tdata[FX_W-1:0];
        feat[2*beat+1] <= ib_axis.tdata[32 +: FX_W];
        if (beat == 3'(N_BEATS-1)) begin
          beat <= '0; bdt_busy <= 1'b1; bdt_in_v <= 1'b1;
        end else beat <= beat + 3'd1;
      end
      if (bdt_out_v) begin
        bdt_ob.tvalid <= 1'b1;
        bdt_ob.tlast  <= 1'b1;
        bdt_ob.tkeep  <= 8'h1F;
        bdt_ob.tdata  <= {31'd0, bdt_above, {(32-FX_W){bdt_score[FX_W-1]}}, bdt_score};
        last_score    <= bdt_score;
        n_scored      <= n_scored + 1;
        n_above       <= n_above + 32'(bdt_above);
      end else if (bdt_ob.tvalid && ob_tready) begin
        bdt_ob   <= '0;
        bdt_busy <= 1'b0;
      end
    end
  end

  bdt_pileup #(.THRESH(BDT_THRESH)) u_bdt (
    .clk, .rst(urst), .in_valid(bdt_in_v), .feat,
    .out_valid(bdt_out_v), .score(bdt_score), .above(bdt_above)
  );

  // ------------------------------------------------------ DSP slices
  logic [19:0] acc [N_DSP];
  logic        tog_q, dsp_step;
  logic        dsp_signed;
  assign dsp_signed = to_fab[0][16];

  always_ff @(posedge clk) begin
    if (urst) tog_q <= 1'b0;
    else      tog_q <= to_fab[0][31];
  end
  assign dsp_step = (pers == PERS_DSP) && (tog_q != to_fab[0][31]);

  for (genvar k = 0; k < N_DSP; k++) begin : g_dsp
    dsp_slice #(.A_W(8), .B_W(8), .ACC_W(20)) u_dsp (
      .clk, .rst(urst),
      .ce(dsp_step && to_fab[0][8+k]), .clr(dsp_step && to_fab[0][12+k]),
      .is_signed(dsp_signed), .a(to_fab[1][8*k +: 8]), .b(to_fab[0][7:0]),
      .acc(acc[k])
    );
  end

  // ------------------------------------------------------ output select
  always_comb begin
    ib_tready = 1'b0;
    ob_axis   = '0;
    dout      = '0;
    for (int k = 0; k < N_FROM_FABRIC; k++) from_fab[k] = '0;
    unique case (pers)
      PERS_COUNTER: begin
        dout = count;
        from_fab[0] = {16'd0, count};
      end
      PERS_LOOPBACK: begin
        ib_tready = lb_s_tready;
        ob_axis   = lb_out;
      end
      PERS_BDT: begin
        ib_tready = bdt_ready;
        ob_axis   = bdt_ob;
        dout      = n_scored[15:0];
        from_fab[0] = 32'(last_score);
        if (N_FROM_FABRIC > 1) from_fab[1] = n_scored;
        if (N_FROM_FABRIC > 2) from_fab[2] = n_above;
      end
      PERS_DSP: begin
        for (int k = 0; k < N_DSP && k < N_FROM_FABRIC; k++)
          from_fab[k] = dsp_signed ? {{12{acc[k][19]}}, acc[k]} : {12'd0, acc[k]};
      end
      default: ;
    endcase
  end

endmodule
