// param_task: parameter task of one convolution.
//
// Streams the convolution's parameters to its computation task in the order
// the computation consumes them: for each output position, for each input
// channel l, for each output-channel group m, one word with the
// OCH_PAR x K weights of that (l, m), the OCH_PAR biases of group m and, for
// a convolution merged with a pointwise downsample (HAS_DS), the OCH_PAR
// downsample weights and biases. One word per cycle keeps OCH_PAR MAC
// columns busy; the storage is one array of ICH*OCH/OCH_PAR words that wide,
// i.e. the parameter arrays reshaped to the bandwidth the computation needs.
//
// Two storage modes, as in the source:
//  * USE_URAM = 0 (block RAM): the array is initialised with the
//    configuration; here its contents come from the deterministic generator
//    of resnet_pkg (seed SEED, SEED+1 for the downsample).
//  * USE_URAM = 1 (UltraRAM): the array starts empty. During the first pass
//    each word is assembled from the byte stream load_* (least significant
//    byte first, words in address order), written into the array and passed
//    on; later passes read the array only.
//
// Word layout, bit 0 first: w[p][t] (8 bits, p-major), bias[p] (16),
// dsw[p] (8), dsb[p] (16); the DS fields are zero when HAS_DS = 0.
// Output: a 2-deep stream, as the source sizes parameter streams.
module param_task
  import resnet_pkg::*;
#(
  parameter int unsigned ICH      = 16,
  parameter int unsigned OCH      = 16,
  parameter int unsigned OCH_PAR  = 16,
  parameter int unsigned K        = 9,
  parameter bit          HAS_DS   = 0,
  parameter int unsigned SEED     = 1,
  parameter bit          USE_URAM = 0,
  localparam int unsigned PW      = OCH_PAR * (K*8 + 16 + 8 + 16)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load_valid,
  output logic          load_ready,
  input  logic [7:0]    load_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [PW-1:0] out_data
);

  localparam int unsigned OG    = OCH / OCH_PAR;
  localparam int unsigned DEPTH = ICH * OG;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned NB    = PW / 8;

  function automatic logic [PW-1:0] make_word(input int unsigned addr);
    logic [PW-1:0] wd;
    int unsigned l, m, o;
    l  = addr / OG;
    m  = addr % OG;
    wd = '0;
    for (int unsigned p = 0; p < OCH_PAR; p++) begin
      o = m*OCH_PAR + p;
      for (int unsigned t = 0; t < K; t++)
        wd[(p*K + t)*8 +: 8] = param_weight(SEED, (o*ICH + l)*K + t);
      wd[OCH_PAR*K*8 + p*16 +: 16] = param_bias(SEED, o);
      if (HAS_DS) begin
        wd[OCH_PAR*(K*8+16) + p*8 +: 8]      = param_weight(SEED + 1, o*ICH + l);
        wd[OCH_PAR*(K*8+24) + p*16 +: 16]    = param_bias(SEED + 1, o);
      end
    end
    return wd;
  endfunction

  logic [PW-1:0] mem [DEPTH];
  logic [AW-1:0] addr;
  logic          loaded;          // array holds valid parameters

  logic          prod_valid, prod_ready;
  logic [PW-1:0] prod_data;

  if (!USE_URAM) begin : g_bram
    initial begin
      for (int unsigned a = 0; a < DEPTH; a++) mem[a] = make_word(a);
    end
    assign loaded     = 1'b1;
    assign load_ready = 1'b0;
    assign prod_valid = 1'b1;
    assign prod_data  = mem[addr];
  end else begin : g_uram
    logic [PW-1:0]            asm_q;
    logic [$clog2(NB+1)-1:0]  nbytes;
    logic                     loaded_q;
    wire asm_full = (nbytes == NB);

    assign loaded     = loaded_q;
    assign load_ready = !loaded_q && !asm_full;
    assign prod_valid = loaded_q || asm_full;
    assign prod_data  = loaded_q ? mem[addr] : asm_q;

    always_ff @(posedge clk) begin
      if (load_valid && load_ready) asm_q[nbytes*8 +: 8] <= load_data;
      if (!loaded_q && asm_full && prod_ready) mem[addr] <= asm_q;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        nbytes   <= '0;
        loaded_q <= 1'b0;
      end else begin
        if (load_valid && load_ready) nbytes <= nbytes + 1'b1;
        else if (asm_full && prod_ready) nbytes <= '0;
        if (!loaded_q && asm_full && prod_ready && addr == AW'(DEPTH-1))
          loaded_q <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) addr <= '0;
    else if (prod_valid && prod_ready)
      addr <= (addr == AW'(DEPTH-1)) ? '0 : addr + 1'b1;
  end

  stream_fifo #(.W(PW), .DEPTH(2)) u_stream (
    .clk, .rst_n,
    .in_valid (prod_valid), .in_ready(prod_ready), .in_data(prod_data),
    .out_valid, .out_ready, .out_data
  );

endmodule
