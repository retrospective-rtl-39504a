// mmu -- memory management unit of the vector engine with its ifmap and
// kernel banks (Fig. 4, left column).
//
// ifmap memory : N_BANKS banks of BANK_WORDS words, one flat word address
//                space (bank = upper address bits). Written by the host
//                (ifmaps port) or by the engine (layer write-back), read by
//                the engine one word per cycle; that word is broadcast to
//                every NEURIC lane.
// kernel memory: N_BANKS banks, bank j feeding NEURIC lane j. Written by the
//                host one word at a time (bank, address); read by the engine
//                at one address in all banks at once.
// While eng_own is high the engine owns both memories and host writes are
// dropped (host_drop pulses). Reads return data one cycle after e_*_re. The
// paper only names this unit; the ownership rule and the address split are
// this design's choices.
module mmu #(
  parameter int unsigned N_BANKS    = 64,
  parameter int unsigned BANK_WORDS = 512,
  parameter int unsigned W          = 16,
  localparam int unsigned KAW = $clog2(BANK_WORDS),
  localparam int unsigned BAW = (N_BANKS > 1) ? $clog2(N_BANKS) : 1,
  localparam int unsigned IAW = $clog2(N_BANKS * BANK_WORDS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  eng_own,
  // host ifmap write
  input  logic                  h_if_we,
  input  logic [IAW-1:0]        h_if_addr,
  input  logic [W-1:0]          h_if_wdata,
  // host kernel write
  input  logic                  h_k_we,
  input  logic [BAW-1:0]        h_k_bank,
  input  logic [KAW-1:0]        h_k_addr,
  input  logic [W-1:0]          h_k_wdata,
  output logic                  host_drop,
  // engine ifmap port
  input  logic                  e_if_re,
  input  logic                  e_if_we,
  input  logic [IAW-1:0]        e_if_addr,
  input  logic [W-1:0]          e_if_wdata,
  output logic [W-1:0]          e_if_rdata,
  // engine kernel read
  input  logic                  e_k_re,
  input  logic [KAW-1:0]        e_k_addr,
  output logic [N_BANKS-1:0][W-1:0] e_k_rdata
);

  logic [IAW-1:0] if_addr;
  logic [W-1:0]   if_wdata;
  logic           if_we, if_act;
  logic [BAW-1:0] if_bank, if_bank_q;
  logic [N_BANKS-1:0][W-1:0] if_rdata;

  always_comb begin
    if (eng_own) begin
      if_act   = e_if_re || e_if_we;
      if_we    = e_if_we;
      if_addr  = e_if_addr;
      if_wdata = e_if_wdata;
    end else begin
      if_act   = h_if_we;
      if_we    = h_if_we;
      if_addr  = h_if_addr;
      if_wdata = h_if_wdata;
    end
  end

  if (N_BANKS > 1) begin : g_bank_sel
    assign if_bank = if_addr[IAW-1:KAW];
  end else begin : g_one_bank
    assign if_bank = '0;
  end

  for (genvar b = 0; b < N_BANKS; b++) begin : g_if
    sram_bank #(.WORDS(BANK_WORDS), .W(W)) u_bank (
      .clk, .en(if_act && (if_bank == BAW'(b))), .we(if_we),
      .addr(if_addr[KAW-1:0]), .wdata(if_wdata), .rdata(if_rdata[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                        if_bank_q <= '0;
    else if (if_act && !if_we)         if_bank_q <= if_bank;
  end
  assign e_if_rdata = if_rdata[if_bank_q];

  for (genvar b = 0; b < N_BANKS; b++) begin : g_k
    logic k_en, k_we;
    logic [KAW-1:0] k_addr;
    assign k_we   = !eng_own && h_k_we && (h_k_bank == BAW'(b));
    assign k_en   = eng_own ? e_k_re : k_we;
    assign k_addr = eng_own ? e_k_addr : h_k_addr;
    sram_bank #(.WORDS(BANK_WORDS), .W(W)) u_bank (
      .clk, .en(k_en), .we(k_we), .addr(k_addr), .wdata(h_k_wdata), .rdata(e_k_rdata[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) host_drop <= 1'b0;
    else        host_drop <= eng_own && (h_if_we || h_k_we);
  end

endmodule
