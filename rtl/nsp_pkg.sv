// nsp_pkg: types and constants shared by the network security processor.
//
// Holds the 32-bit data word and AXI4-Stream / AXI4-Lite bundles used between
// the processing elements, the process synchronizer, the DMA and the AXI
// Streamer, and the measured cost tables of the cipher-suite algorithms that
// the preferential algorithm works on.
//
// The 32-bit data path follows the "32 bit write bus" / "32 bit read bus" of
// the proposed topology. The cost tables are the slice, power and throughput
// figures measured for each algorithm on a 7z020 device. They are stored as
// integers: power in units of 0.1 mW (so that 99.7 mW is exact), throughput in
// Mbit/s and resource in slices. The AXI4-Lite address width (8 bits) and the
// absence of PROT/ID signals are this design's own choices.
package nsp_pkg;

  localparam int unsigned DATA_W   = 32;
  localparam int unsigned AXIL_AW  = 8;

  typedef logic [DATA_W-1:0] word_t;

  // AXI4-Stream beat (ready travels the other way, as a separate signal)
  typedef struct packed {
    word_t tdata;
    logic  tlast;
    logic  tvalid;
  } axis_t;

  // AXI4-Lite, master-to-slave half
  typedef struct packed {
    logic [AXIL_AW-1:0] awaddr;
    logic               awvalid;
    word_t              wdata;
    logic [3:0]         wstrb;
    logic               wvalid;
    logic               bready;
    logic [AXIL_AW-1:0] araddr;
    logic               arvalid;
    logic               rready;
  } axil_req_t;

  // AXI4-Lite, slave-to-master half
  typedef struct packed {
    logic       awready;
    logic       wready;
    logic [1:0] bresp;
    logic       bvalid;
    logic       arready;
    word_t      rdata;
    logic [1:0] rresp;
    logic       rvalid;
  } axil_rsp_t;

  // ---------------------------------------------------------------------
  // Cipher-suite algorithms and their measured costs
  // ---------------------------------------------------------------------
  localparam int unsigned N_ENC  = 7;
  localparam int unsigned N_HASH = 3;
  localparam int unsigned N_KEX  = 3;

  typedef enum logic [2:0] {ENC_AES, ENC_RC4, ENC_GRAIN, ENC_SALSA, ENC_DES, ENC_3DES, ENC_IDEA} enc_alg_e;
  typedef enum logic [1:0] {HASH_SHA256, HASH_SHA512, HASH_MD5} hash_alg_e;
  typedef enum logic [1:0] {KEX_RSA, KEX_DH_ANON, KEX_DH_RSA} kex_alg_e;

  // one row of the E, H or K matrix: power, throughput, resource
  typedef struct packed {
    logic [15:0] p;   // power, 0.1 mW
    logic [15:0] t;   // throughput, Mbit/s
    logic [15:0] r;   // resource, slices
  } metric_t;

  // selected cipher suite (indices into the three tables)
  typedef struct packed {
    logic [2:0] enc;
    logic [1:0] hash;
    logic [1:0] kex;
  } suite_t;

  typedef metric_t enc_table_t  [N_ENC];
  typedef metric_t hash_table_t [N_HASH];
  typedef metric_t kex_table_t  [N_KEX];

  // encryption algorithms: AES, RC4, Grain, Salsa, DES, 3DES, IDEA
  localparam enc_table_t ENC_TABLE = '{
    '{p:16'd11830, t:16'd1067, r:16'd11385},
    '{p:16'd9940,  t:16'd931,  r:16'd5383 },
    '{p:16'd997,   t:16'd116,  r:16'd237  },
    '{p:16'd1070,  t:16'd3725, r:16'd2839 },
    '{p:16'd1030,  t:16'd7450, r:16'd456  },
    '{p:16'd1170,  t:16'd2480, r:16'd1478 },
    '{p:16'd950,   t:16'd79,   r:16'd320  }
  };

  // hash algorithms: SHA-256, SHA-512, MD5
  localparam hash_table_t HASH_TABLE = '{
    '{p:16'd1760, t:16'd735,  r:16'd1385},
    '{p:16'd2780, t:16'd1471, r:16'd2647},
    '{p:16'd1120, t:16'd916,  r:16'd992 }
  };

  // key exchange algorithms: RSA, DH_anon, DH_RSA
  localparam kex_table_t KEX_TABLE = '{
    '{p:16'd15890, t:16'd298, r:16'd13910},
    '{p:16'd17670, t:16'd149, r:16'd14012},
    '{p:16'd19180, t:16'd99,  r:16'd14789}
  };

endpackage
