// uhd_classifier: end-to-end unary hyperdimensional image classifier.
//
// An image of N_POS 8-bit pixels is encoded into a D-bit hypervector
//   H(t) = sign( sum_i  P'_i(t) (*) L'_{pixel_i}(t) )
// where P'_i is the position HV of pixel i, produced by one shared VDC-2
// source (pos_hv_gen), and L' is the unary level HV of the pixel value
// (level_hv_gen).  No stored random hypervectors are needed: both kinds of HV
// are generated on the fly.  The image HV is then either bundled into the
// class HV of its label (training) or compared with all class HVs (inference)
// in assoc_memory.
//
// Schedule (this design's own): the outer loop walks dimensions t = 0..D-1,
// the inner loop walks positions i = 0..N_POS-1, one position per clock.  The
// VDC-2 counter and the level counter both hold t and advance after the last
// position of a dimension.  Pipeline: clock 0 reads pixel i from the buffer;
// clock 1 forms P'_i(t), L'_i(t) and adds their product to the encoder's sum;
// one clock after the last position the encoder delivers H(t), which goes to
// the associative memory.  One image takes D * N_POS + 2 clocks from the start clock to done.
//
// Interface: write the image with pix_we/pix_addr/pix_data while idle; pulse
// `start` with `train` and `label` (these are latched, as are `unlearn` and
// `wrong`, which in a retraining pass also take the image out of class
// `wrong`; see assoc_memory).  hv_valid/hv_bit/
// hv_dim stream the image HV, `done` pulses after its last bit, and in
// inference res_valid/res_class/res_score follow one clock later.  `am_clr`
// empties the class memory (D clocks, am_busy high); start is ignored while
// the memory is busy.
module uhd_classifier #(
  parameter int unsigned D       = 1024,
  parameter int unsigned N_POS   = 784,
  parameter int unsigned N_CLASS = 10,
  parameter int unsigned ACC_W   = 16,
  localparam int unsigned DW     = $clog2(D),
  localparam int unsigned PW     = (N_POS > 1) ? $clog2(N_POS) : 1,
  localparam int unsigned CW     = (N_CLASS > 1) ? $clog2(N_CLASS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          pix_we,
  input  logic [PW-1:0] pix_addr,
  input  logic [7:0]    pix_data,
  input  logic          am_clr,
  output logic          am_busy,
  input  logic          start,
  input  logic          train,
  input  logic [CW-1:0] label,
  input  logic          unlearn,
  input  logic [CW-1:0] wrong,
  output logic          busy,
  output logic          hv_valid,
  output logic          hv_bit,
  output logic [DW-1:0] hv_dim,
  output logic          done,
  output logic          res_valid,
  output logic [CW-1:0] res_class,
  output logic [DW:0]   res_score
);

  localparam int unsigned K_VDC2 [1] = '{1};

  logic          go;
  logic          issuing;
  logic [PW-1:0] pos_iss;
  logic [DW-1:0] dim_iss;
  logic          train_q;
  logic [CW-1:0] label_q;
  logic          unlearn_q;
  logic [CW-1:0] wrong_q;

  assign go = start && !busy && !am_busy;

  // ---------------- stage 0: issue position, read pixel ----------------
  logic iss_last_pos, iss_last_dim;
  assign iss_last_pos = (pos_iss == PW'(N_POS - 1));
  assign iss_last_dim = (dim_iss == DW'(D - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      issuing <= 1'b0;
      pos_iss <= '0;
      dim_iss <= '0;
      train_q <= 1'b0;
      label_q <= '0;
      unlearn_q <= 1'b0;
      wrong_q   <= '0;
    end else begin
      if (go) begin
        busy    <= 1'b1;
        issuing <= 1'b1;
        pos_iss <= '0;
        dim_iss <= '0;
        train_q <= train;
        label_q <= label;
        unlearn_q <= unlearn;
        wrong_q   <= wrong;
      end else begin
        if (issuing) begin
          if (iss_last_pos) begin
            pos_iss <= '0;
            dim_iss <= dim_iss + 1'b1;
            if (iss_last_dim) issuing <= 1'b0;
          end else begin
            pos_iss <= pos_iss + 1'b1;
          end
        end
        if (done) busy <= 1'b0;
      end
    end
  end

  logic [7:0] pixel;
  pixel_buffer #(.N_POS(N_POS), .PIX_BITS(8)) u_pix (
    .clk, .we(pix_we && !busy), .waddr(pix_addr), .wdata(pix_data),
    .raddr(pos_iss), .rdata(pixel)
  );

  // ---------------- stage 1: generate P', L' and bundle ----------------
  logic          s1_valid, s1_first, s1_last;
  logic [PW-1:0] s1_pos;
  always_ff @(posedge clk) begin
    if (!rst_n || go) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_pos   <= '0;
    end else begin
      s1_valid <= issuing;
      s1_first <= issuing && (pos_iss == '0);
      s1_last  <= issuing && iss_last_pos;
      s1_pos   <= pos_iss;
    end
  end

  logic                vdc_adv;
  logic [DW-1:0]       vdc_count, dim;
  logic [0:0][DW-1:0]  vdc_seq;
  logic                p_bit, l_bit;

  assign vdc_adv = s1_valid && s1_last;

  vdc2n_gen #(.W(DW), .NSEQ(1), .LOG2B(K_VDC2)) u_vdc (
    .clk, .rst_n, .en(vdc_adv), .clr(go), .count(vdc_count), .seq(vdc_seq)
  );

  pos_hv_gen #(.D(D), .N_POS(N_POS)) u_pos (
    .clk, .rst_n, .clr(go), .step(s1_valid), .pos(s1_pos), .vdc(vdc_seq[0]), .p_bit
  );

  level_hv_gen #(.D(D), .PIX_BITS(8)) u_lvl (
    .clk, .rst_n, .clr(go), .adv(vdc_adv), .pixel, .dim, .l_bit
  );

  hdc_encoder #(.N_POS(N_POS)) u_enc (
    .clk, .rst_n, .valid(s1_valid), .first(s1_first), .last(s1_last),
    .p_bit, .l_bit, .hv_valid, .hv_bit
  );

  // ---------------- stage 2: image HV bit to the associative memory ----
  always_ff @(posedge clk) begin
    if (!rst_n)       hv_dim <= '0;
    else if (vdc_adv) hv_dim <= dim;
  end

  logic hv_last;
  assign hv_last = hv_valid && (hv_dim == DW'(D - 1));
  assign done    = hv_last;

  assoc_memory #(.D(D), .N_CLASS(N_CLASS), .ACC_W(ACC_W)) u_am (
    .clk, .rst_n, .clr(am_clr), .train(train_q), .label(label_q),
    .unlearn(unlearn_q), .wrong(wrong_q),
    .hv_valid, .hv_dim, .hv_bit, .hv_last,
    .busy(am_busy), .res_valid, .res_class, .res_score
  );

  // The VDC counter and the level counter both track the dimension.
  a_dim_match: assert property (@(posedge clk) disable iff (!rst_n) vdc_count == dim);
  a_label: assert property (@(posedge clk) disable iff (!rst_n) go |-> 32'(label) < N_CLASS && 32'(wrong) < N_CLASS);

endmodule
