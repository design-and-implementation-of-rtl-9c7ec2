// bm_core: Boolean-masked version of bitserial_core, as a gate netlist.
//
// Every signal of the unprotected core except clock and reset is carried as
// two shares whose XOR is the original value; no wire of this module holds a
// plain value. The file is obtained mechanically from the synthesized gate
// netlist of bitserial_core (2-input AND, OR, XOR, inverters and flip-flops
// with asynchronous reset) by these rules:
//   XOR      -> applied to both shares separately (linear)
//   NOT      -> inverts share 1 only
//   AND, OR  -> masked_and / masked_or (compact masking expressions, no
//               fresh randomness)
//   flip-flop-> duplicated, one per share; each share's D input is XORed
//               with the same fresh random bit rnd[k] before the register,
//               so the mask changes every cycle while the value does not
//   constant -> share 1 holds the constant, share 2 is zero
//   port     -> split into <port>_s1 and <port>_s2
// Reset stays a single plain signal; a register resets share 1 to its reset
// value and share 2 to zero. Function and cycle timing are exactly those of
// bitserial_core (see that file): rnd must carry 151 fresh bits per clock,
// and no bit may be reused for anything else.
//
// The conversion method (share-wise linear gates, masked non-linear gates,
// duplicated registers with remasking XORs, split ports, extra random-bit
// input) follows the chip; the netlist itself comes from this design's own
// synthesis of bitserial_core (1304 masked AND/OR gates, 151 registers).
// Unmasking (XOR of the two shares) happens only in mem_protect.
module bm_core
  import secure_rv_pkg::*;
#(
  parameter int unsigned N_RND = 151
) (
  input  logic clk,
  input  logic rst_n,
  output  logic mem_en_s1,
  output  logic mem_en_s2,
  output  logic mem_we_s1,
  output  logic mem_we_s2,
  output  logic [3:0] mem_be_s1,
  output  logic [3:0] mem_be_s2,
  output  logic [9:0] mem_addr_s1,
  output  logic [9:0] mem_addr_s2,
  output  logic [31:0] mem_wdata_s1,
  output  logic [31:0] mem_wdata_s2,
  input  logic [31:0] mem_rdata_s1,
  input  logic [31:0] mem_rdata_s2,
  output  logic rf_re_s1,
  output  logic rf_re_s2,
  output  logic [8:0] rf_raddr_s1,
  output  logic [8:0] rf_raddr_s2,
  input  logic [1:0] rf_rdata_s1,
  input  logic [1:0] rf_rdata_s2,
  output  logic rf_we_s1,
  output  logic rf_we_s2,
  output  logic [8:0] rf_waddr_s1,
  output  logic [8:0] rf_waddr_s2,
  output  logic [1:0] rf_wdata_s1,
  output  logic [1:0] rf_wdata_s2,
  input  logic [N_RND-1:0] rnd
);

  logic s1_2, s2_2;
  logic s1_3, s2_3;
  logic s1_4, s2_4;
  logic s1_5, s2_5;
  logic s1_6, s2_6;
  logic s1_7, s2_7;
  logic s1_8, s2_8;
  logic s1_9, s2_9;
  logic s1_10, s2_10;
  logic s1_11, s2_11;
  logic s1_12, s2_12;
  logic s1_13, s2_13;
  logic s1_14, s2_14;
  logic s1_15, s2_15;
  logic s1_16, s2_16;
  logic s1_17, s2_17;
  logic s1_18, s2_18;
  logic s1_19, s2_19;
  logic s1_20, s2_20;
  logic s1_21, s2_21;
  logic s1_22, s2_22;
  logic s1_23, s2_23;
  logic s1_24, s2_24;
  logic s1_25, s2_25;
  logic s1_26, s2_26;
  logic s1_27, s2_27;
  logic s1_28, s2_28;
  logic s1_29, s2_29;
  logic s1_30, s2_30;
  logic s1_31, s2_31;
  logic s1_32, s2_32;
  logic s1_33, s2_33;
  logic s1_34, s2_34;
  logic s1_35, s2_35;
  logic s1_36, s2_36;
  logic s1_37, s2_37;
  logic s1_38, s2_38;
  logic s1_39, s2_39;
  logic s1_40, s2_40;
  logic s1_41, s2_41;
  logic s1_42, s2_42;
  logic s1_43, s2_43;
  logic s1_44, s2_44;
  logic s1_45, s2_45;
  logic s1_46, s2_46;
  logic s1_47, s2_47;
  logic s1_48, s2_48;
  logic s1_49, s2_49;
  logic s1_50, s2_50;
  logic s1_51, s2_51;
  logic s1_52, s2_52;
  logic s1_53, s2_53;
  logic s1_54, s2_54;
  logic s1_55, s2_55;
  logic s1_56, s2_56;
  logic s1_57, s2_57;
  logic s1_58, s2_58;
  logic s1_59, s2_59;
  logic s1_60, s2_60;
  logic s1_61, s2_61;
  logic s1_62, s2_62;
  logic s1_63, s2_63;
  logic s1_64, s2_64;
  logic s1_65, s2_65;
  logic s1_66, s2_66;
  logic s1_67, s2_67;
  logic s1_68, s2_68;
  logic s1_69, s2_69;
  logic s1_70, s2_70;
  logic s1_71, s2_71;
  logic s1_72, s2_72;
  logic s1_73, s2_73;
  logic s1_74, s2_74;
  logic s1_75, s2_75;
  logic s1_76, s2_76;
  logic s1_77, s2_77;
  logic s1_78, s2_78;
  logic s1_79, s2_79;
  logic s1_80, s2_80;
  logic s1_81, s2_81;
  logic s1_82, s2_82;
  logic s1_83, s2_83;
  logic s1_84, s2_84;
  logic s1_85, s2_85;
  logic s1_86, s2_86;
  logic s1_87, s2_87;
  logic s1_88, s2_88;
  logic s1_89, s2_89;
  logic s1_90, s2_90;
  logic s1_91, s2_91;
  logic s1_92, s2_92;
  logic s1_93, s2_93;
  logic s1_94, s2_94;
  logic s1_95, s2_95;
  logic s1_96, s2_96;
  logic s1_97, s2_97;
  logic s1_98, s2_98;
  logic s1_99, s2_99;
  logic s1_100, s2_100;
  logic s1_101, s2_101;
  logic s1_102, s2_102;
  logic s1_103, s2_103;
  logic s1_104, s2_104;
  logic s1_105, s2_105;
  logic s1_106, s2_106;
  logic s1_107, s2_107;
  logic s1_108, s2_108;
  logic s1_109, s2_109;
  logic s1_110, s2_110;
  logic s1_111, s2_111;
  logic s1_112, s2_112;
  logic s1_113, s2_113;
  logic s1_114, s2_114;
  logic s1_115, s2_115;
  logic s1_116, s2_116;
  logic s1_117, s2_117;
  logic s1_118, s2_118;
  logic s1_119, s2_119;
  logic s1_120, s2_120;
  logic s1_121, s2_121;
  logic s1_122, s2_122;
  logic s1_123, s2_123;
  logic s1_124, s2_124;
  logic s1_125, s2_125;
  logic s1_126, s2_126;
  logic s1_127, s2_127;
  logic s1_128, s2_128;
  logic s1_129, s2_129;
  logic s1_130, s2_130;
  logic s1_131, s2_131;
  logic s1_132, s2_132;
  logic s1_133, s2_133;
  logic s1_134, s2_134;
  logic s1_135, s2_135;
  logic s1_136, s2_136;
  logic s1_137, s2_137;
  logic s1_138, s2_138;
  logic s1_139, s2_139;
  logic s1_140, s2_140;
  logic s1_141, s2_141;
  logic s1_142, s2_142;
  logic s1_143, s2_143;
  logic s1_144, s2_144;
  logic s1_145, s2_145;
  logic s1_146, s2_146;
  logic s1_147, s2_147;
  logic s1_148, s2_148;
  logic s1_149, s2_149;
  logic s1_150, s2_150;
  logic s1_151, s2_151;
  logic s1_152, s2_152;
  logic s1_153, s2_153;
  logic s1_154, s2_154;
  logic s1_155, s2_155;
  logic s1_156, s2_156;
  logic s1_157, s2_157;
  logic s1_158, s2_158;
  logic s1_159, s2_159;
  logic s1_160, s2_160;
  logic s1_161, s2_161;
  logic s1_162, s2_162;
  logic s1_163, s2_163;
  logic s1_164, s2_164;
  logic s1_165, s2_165;
  logic s1_166, s2_166;
  logic s1_167, s2_167;
  logic s1_168, s2_168;
  logic s1_169, s2_169;
  logic s1_170, s2_170;
  logic s1_171, s2_171;
  logic s1_172, s2_172;
  logic s1_173, s2_173;
  logic s1_174, s2_174;
  logic s1_175, s2_175;
  logic s1_176, s2_176;
  logic s1_177, s2_177;
  logic s1_178, s2_178;
  logic s1_179, s2_179;
  logic s1_180, s2_180;
  logic s1_181, s2_181;
  logic s1_182, s2_182;
  logic s1_183, s2_183;
  logic s1_184, s2_184;
  logic s1_185, s2_185;
  logic s1_186, s2_186;
  logic s1_187, s2_187;
  logic s1_188, s2_188;
  logic s1_189, s2_189;
  logic s1_190, s2_190;
  logic s1_191, s2_191;
  logic s1_192, s2_192;
  logic s1_193, s2_193;
  logic s1_194, s2_194;
  logic s1_195, s2_195;
  logic s1_196, s2_196;
  logic s1_197, s2_197;
  logic s1_198, s2_198;
  logic s1_199, s2_199;
  logic s1_200, s2_200;
  logic s1_201, s2_201;
  logic s1_202, s2_202;
  logic s1_203, s2_203;
  logic s1_204, s2_204;
  logic s1_205, s2_205;
  logic s1_206, s2_206;
  logic s1_207, s2_207;
  logic s1_208, s2_208;
  logic s1_209, s2_209;
  logic s1_210, s2_210;
  logic s1_211, s2_211;
  logic s1_212, s2_212;
  logic s1_213, s2_213;
  logic s1_214, s2_214;
  logic s1_215, s2_215;
  logic s1_216, s2_216;
  logic s1_217, s2_217;
  logic s1_218, s2_218;
  logic s1_219, s2_219;
  logic s1_220, s2_220;
  logic s1_221, s2_221;
  logic s1_222, s2_222;
  logic s1_223, s2_223;
  logic s1_224, s2_224;
  logic s1_225, s2_225;
  logic s1_226, s2_226;
  logic s1_227, s2_227;
  logic s1_228, s2_228;
  logic s1_229, s2_229;
  logic s1_230, s2_230;
  logic s1_231, s2_231;
  logic s1_232, s2_232;
  logic s1_233, s2_233;
  logic s1_234, s2_234;
  logic s1_235, s2_235;
  logic s1_236, s2_236;
  logic s1_237, s2_237;
  logic s1_238, s2_238;
  logic s1_239, s2_239;
  logic s1_240, s2_240;
  logic s1_241, s2_241;
  logic s1_242, s2_242;
  logic s1_243, s2_243;
  logic s1_244, s2_244;
  logic s1_245, s2_245;
  logic s1_246, s2_246;
  logic s1_247, s2_247;
  logic s1_248, s2_248;
  logic s1_249, s2_249;
  logic s1_250, s2_250;
  logic s1_251, s2_251;
  logic s1_252, s2_252;
  logic s1_253, s2_253;
  logic s1_254, s2_254;
  logic s1_255, s2_255;
  logic s1_256, s2_256;
  logic s1_257, s2_257;
  logic s1_258, s2_258;
  logic s1_259, s2_259;
  logic s1_260, s2_260;
  logic s1_261, s2_261;
  logic s1_262, s2_262;
  logic s1_263, s2_263;
  logic s1_264, s2_264;
  logic s1_265, s2_265;
  logic s1_266, s2_266;
  logic s1_267, s2_267;
  logic s1_268, s2_268;
  logic s1_269, s2_269;
  logic s1_270, s2_270;
  logic s1_271, s2_271;
  logic s1_272, s2_272;
  logic s1_273, s2_273;
  logic s1_274, s2_274;
  logic s1_275, s2_275;
  logic s1_276, s2_276;
  logic s1_277, s2_277;
  logic s1_278, s2_278;
  logic s1_279, s2_279;
  logic s1_280, s2_280;
  logic s1_281, s2_281;
  logic s1_282, s2_282;
  logic s1_283, s2_283;
  logic s1_284, s2_284;
  logic s1_285, s2_285;
  logic s1_286, s2_286;
  logic s1_287, s2_287;
  logic s1_288, s2_288;
  logic s1_289, s2_289;
  logic s1_290, s2_290;
  logic s1_291, s2_291;
  logic s1_292, s2_292;
  logic s1_293, s2_293;
  logic s1_294, s2_294;
  logic s1_295, s2_295;
  logic s1_296, s2_296;
  logic s1_297, s2_297;
  logic s1_298, s2_298;
  logic s1_299, s2_299;
  logic s1_300, s2_300;
  logic s1_301, s2_301;
  logic s1_302, s2_302;
  logic s1_303, s2_303;
  logic s1_304, s2_304;
  logic s1_305, s2_305;
  logic s1_306, s2_306;
  logic s1_307, s2_307;
  logic s1_308, s2_308;
  logic s1_309, s2_309;
  logic s1_310, s2_310;
  logic s1_311, s2_311;
  logic s1_312, s2_312;
  logic s1_313, s2_313;
  logic s1_314, s2_314;
  logic s1_315, s2_315;
  logic s1_316, s2_316;
  logic s1_317, s2_317;
  logic s1_318, s2_318;
  logic s1_319, s2_319;
  logic s1_320, s2_320;
  logic s1_321, s2_321;
  logic s1_322, s2_322;
  logic s1_323, s2_323;
  logic s1_324, s2_324;
  logic s1_325, s2_325;
  logic s1_326, s2_326;
  logic s1_327, s2_327;
  logic s1_328, s2_328;
  logic s1_329, s2_329;
  logic s1_330, s2_330;
  logic s1_331, s2_331;
  logic s1_332, s2_332;
  logic s1_333, s2_333;
  logic s1_334, s2_334;
  logic s1_335, s2_335;
  logic s1_336, s2_336;
  logic s1_337, s2_337;
  logic s1_338, s2_338;
  logic s1_339, s2_339;
  logic s1_340, s2_340;
  logic s1_341, s2_341;
  logic s1_342, s2_342;
  logic s1_343, s2_343;
  logic s1_344, s2_344;
  logic s1_345, s2_345;
  logic s1_346, s2_346;
  logic s1_347, s2_347;
  logic s1_348, s2_348;
  logic s1_349, s2_349;
  logic s1_350, s2_350;
  logic s1_351, s2_351;
  logic s1_352, s2_352;
  logic s1_353, s2_353;
  logic s1_354, s2_354;
  logic s1_355, s2_355;
  logic s1_356, s2_356;
  logic s1_357, s2_357;
  logic s1_358, s2_358;
  logic s1_359, s2_359;
  logic s1_360, s2_360;
  logic s1_361, s2_361;
  logic s1_362, s2_362;
  logic s1_363, s2_363;
  logic s1_364, s2_364;
  logic s1_365, s2_365;
  logic s1_366, s2_366;
  logic s1_367, s2_367;
  logic s1_368, s2_368;
  logic s1_369, s2_369;
  logic s1_370, s2_370;
  logic s1_371, s2_371;
  logic s1_372, s2_372;
  logic s1_373, s2_373;
  logic s1_374, s2_374;
  logic s1_375, s2_375;
  logic s1_376, s2_376;
  logic s1_377, s2_377;
  logic s1_378, s2_378;
  logic s1_379, s2_379;
  logic s1_380, s2_380;
  logic s1_381, s2_381;
  logic s1_382, s2_382;
  logic s1_383, s2_383;
  logic s1_384, s2_384;
  logic s1_385, s2_385;
  logic s1_386, s2_386;
  logic s1_387, s2_387;
  logic s1_388, s2_388;
  logic s1_389, s2_389;
  logic s1_390, s2_390;
  logic s1_391, s2_391;
  logic s1_392, s2_392;
  logic s1_393, s2_393;
  logic s1_394, s2_394;
  logic s1_395, s2_395;
  logic s1_396, s2_396;
  logic s1_397, s2_397;
  logic s1_398, s2_398;
  logic s1_399, s2_399;
  logic s1_400, s2_400;
  logic s1_401, s2_401;
  logic s1_402, s2_402;
  logic s1_403, s2_403;
  logic s1_404, s2_404;
  logic s1_405, s2_405;
  logic s1_406, s2_406;
  logic s1_407, s2_407;
  logic s1_408, s2_408;
  logic s1_409, s2_409;
  logic s1_410, s2_410;
  logic s1_411, s2_411;
  logic s1_412, s2_412;
  logic s1_413, s2_413;
  logic s1_414, s2_414;
  logic s1_415, s2_415;
  logic s1_416, s2_416;
  logic s1_417, s2_417;
  logic s1_418, s2_418;
  logic s1_419, s2_419;
  logic s1_420, s2_420;
  logic s1_421, s2_421;
  logic s1_422, s2_422;
  logic s1_423, s2_423;
  logic s1_424, s2_424;
  logic s1_425, s2_425;
  logic s1_426, s2_426;
  logic s1_427, s2_427;
  logic s1_428, s2_428;
  logic s1_429, s2_429;
  logic s1_430, s2_430;
  logic s1_431, s2_431;
  logic s1_432, s2_432;
  logic s1_433, s2_433;
  logic s1_434, s2_434;
  logic s1_435, s2_435;
  logic s1_436, s2_436;
  logic s1_437, s2_437;
  logic s1_438, s2_438;
  logic s1_439, s2_439;
  logic s1_440, s2_440;
  logic s1_441, s2_441;
  logic s1_442, s2_442;
  logic s1_443, s2_443;
  logic s1_444, s2_444;
  logic s1_445, s2_445;
  logic s1_446, s2_446;
  logic s1_447, s2_447;
  logic s1_448, s2_448;
  logic s1_449, s2_449;
  logic s1_450, s2_450;
  logic s1_451, s2_451;
  logic s1_452, s2_452;
  logic s1_453, s2_453;
  logic s1_454, s2_454;
  logic s1_455, s2_455;
  logic s1_456, s2_456;
  logic s1_457, s2_457;
  logic s1_458, s2_458;
  logic s1_459, s2_459;
  logic s1_460, s2_460;
  logic s1_461, s2_461;
  logic s1_462, s2_462;
  logic s1_463, s2_463;
  logic s1_464, s2_464;
  logic s1_465, s2_465;
  logic s1_466, s2_466;
  logic s1_467, s2_467;
  logic s1_468, s2_468;
  logic s1_469, s2_469;
  logic s1_470, s2_470;
  logic s1_471, s2_471;
  logic s1_472, s2_472;
  logic s1_473, s2_473;
  logic s1_474, s2_474;
  logic s1_475, s2_475;
  logic s1_476, s2_476;
  logic s1_477, s2_477;
  logic s1_478, s2_478;
  logic s1_479, s2_479;
  logic s1_480, s2_480;
  logic s1_481, s2_481;
  logic s1_482, s2_482;
  logic s1_483, s2_483;
  logic s1_484, s2_484;
  logic s1_485, s2_485;
  logic s1_486, s2_486;
  logic s1_487, s2_487;
  logic s1_488, s2_488;
  logic s1_489, s2_489;
  logic s1_490, s2_490;
  logic s1_491, s2_491;
  logic s1_492, s2_492;
  logic s1_493, s2_493;
  logic s1_494, s2_494;
  logic s1_495, s2_495;
  logic s1_496, s2_496;
  logic s1_497, s2_497;
  logic s1_498, s2_498;
  logic s1_499, s2_499;
  logic s1_500, s2_500;
  logic s1_501, s2_501;
  logic s1_502, s2_502;
  logic s1_503, s2_503;
  logic s1_504, s2_504;
  logic s1_505, s2_505;
  logic s1_506, s2_506;
  logic s1_507, s2_507;
  logic s1_508, s2_508;
  logic s1_509, s2_509;
  logic s1_510, s2_510;
  logic s1_511, s2_511;
  logic s1_512, s2_512;
  logic s1_513, s2_513;
  logic s1_514, s2_514;
  logic s1_515, s2_515;
  logic s1_516, s2_516;
  logic s1_517, s2_517;
  logic s1_518, s2_518;
  logic s1_519, s2_519;
  logic s1_520, s2_520;
  logic s1_521, s2_521;
  logic s1_522, s2_522;
  logic s1_523, s2_523;
  logic s1_524, s2_524;
  logic s1_525, s2_525;
  logic s1_526, s2_526;
  logic s1_527, s2_527;
  logic s1_528, s2_528;
  logic s1_529, s2_529;
  logic s1_530, s2_530;
  logic s1_531, s2_531;
  logic s1_532, s2_532;
  logic s1_533, s2_533;
  logic s1_534, s2_534;
  logic s1_535, s2_535;
  logic s1_536, s2_536;
  logic s1_537, s2_537;
  logic s1_538, s2_538;
  logic s1_539, s2_539;
  logic s1_540, s2_540;
  logic s1_541, s2_541;
  logic s1_542, s2_542;
  logic s1_543, s2_543;
  logic s1_544, s2_544;
  logic s1_545, s2_545;
  logic s1_546, s2_546;
  logic s1_547, s2_547;
  logic s1_548, s2_548;
  logic s1_549, s2_549;
  logic s1_550, s2_550;
  logic s1_551, s2_551;
  logic s1_552, s2_552;
  logic s1_553, s2_553;
  logic s1_554, s2_554;
  logic s1_555, s2_555;
  logic s1_556, s2_556;
  logic s1_557, s2_557;
  logic s1_558, s2_558;
  logic s1_559, s2_559;
  logic s1_560, s2_560;
  logic s1_561, s2_561;
  logic s1_562, s2_562;
  logic s1_563, s2_563;
  logic s1_564, s2_564;
  logic s1_565, s2_565;
  logic s1_566, s2_566;
  logic s1_567, s2_567;
  logic s1_568, s2_568;
  logic s1_569, s2_569;
  logic s1_570, s2_570;
  logic s1_571, s2_571;
  logic s1_572, s2_572;
  logic s1_573, s2_573;
  logic s1_574, s2_574;
  logic s1_575, s2_575;
  logic s1_576, s2_576;
  logic s1_577, s2_577;
  logic s1_578, s2_578;
  logic s1_579, s2_579;
  logic s1_580, s2_580;
  logic s1_581, s2_581;
  logic s1_582, s2_582;
  logic s1_583, s2_583;
  logic s1_584, s2_584;
  logic s1_585, s2_585;
  logic s1_586, s2_586;
  logic s1_587, s2_587;
  logic s1_588, s2_588;
  logic s1_589, s2_589;
  logic s1_590, s2_590;
  logic s1_591, s2_591;
  logic s1_592, s2_592;
  logic s1_593, s2_593;
  logic s1_594, s2_594;
  logic s1_595, s2_595;
  logic s1_596, s2_596;
  logic s1_597, s2_597;
  logic s1_598, s2_598;
  logic s1_599, s2_599;
  logic s1_600, s2_600;
  logic s1_601, s2_601;
  logic s1_602, s2_602;
  logic s1_603, s2_603;
  logic s1_604, s2_604;
  logic s1_605, s2_605;
  logic s1_606, s2_606;
  logic s1_607, s2_607;
  logic s1_608, s2_608;
  logic s1_609, s2_609;
  logic s1_610, s2_610;
  logic s1_611, s2_611;
  logic s1_612, s2_612;
  logic s1_613, s2_613;
  logic s1_614, s2_614;
  logic s1_615, s2_615;
  logic s1_616, s2_616;
  logic s1_617, s2_617;
  logic s1_618, s2_618;
  logic s1_619, s2_619;
  logic s1_620, s2_620;
  logic s1_621, s2_621;
  logic s1_622, s2_622;
  logic s1_623, s2_623;
  logic s1_624, s2_624;
  logic s1_625, s2_625;
  logic s1_626, s2_626;
  logic s1_627, s2_627;
  logic s1_628, s2_628;
  logic s1_629, s2_629;
  logic s1_630, s2_630;
  logic s1_631, s2_631;
  logic s1_632, s2_632;
  logic s1_633, s2_633;
  logic s1_634, s2_634;
  logic s1_635, s2_635;
  logic s1_636, s2_636;
  logic s1_637, s2_637;
  logic s1_638, s2_638;
  logic s1_639, s2_639;
  logic s1_640, s2_640;
  logic s1_641, s2_641;
  logic s1_642, s2_642;
  logic s1_643, s2_643;
  logic s1_644, s2_644;
  logic s1_645, s2_645;
  logic s1_646, s2_646;
  logic s1_647, s2_647;
  logic s1_648, s2_648;
  logic s1_649, s2_649;
  logic s1_650, s2_650;
  logic s1_651, s2_651;
  logic s1_652, s2_652;
  logic s1_653, s2_653;
  logic s1_654, s2_654;
  logic s1_655, s2_655;
  logic s1_656, s2_656;
  logic s1_657, s2_657;
  logic s1_658, s2_658;
  logic s1_659, s2_659;
  logic s1_660, s2_660;
  logic s1_661, s2_661;
  logic s1_662, s2_662;
  logic s1_663, s2_663;
  logic s1_664, s2_664;
  logic s1_665, s2_665;
  logic s1_666, s2_666;
  logic s1_667, s2_667;
  logic s1_668, s2_668;
  logic s1_669, s2_669;
  logic s1_670, s2_670;
  logic s1_671, s2_671;
  logic s1_672, s2_672;
  logic s1_673, s2_673;
  logic s1_674, s2_674;
  logic s1_675, s2_675;
  logic s1_676, s2_676;
  logic s1_677, s2_677;
  logic s1_678, s2_678;
  logic s1_679, s2_679;
  logic s1_680, s2_680;
  logic s1_681, s2_681;
  logic s1_682, s2_682;
  logic s1_683, s2_683;
  logic s1_684, s2_684;
  logic s1_685, s2_685;
  logic s1_686, s2_686;
  logic s1_687, s2_687;
  logic s1_688, s2_688;
  logic s1_689, s2_689;
  logic s1_690, s2_690;
  logic s1_691, s2_691;
  logic s1_692, s2_692;
  logic s1_693, s2_693;
  logic s1_694, s2_694;
  logic s1_695, s2_695;
  logic s1_696, s2_696;
  logic s1_697, s2_697;
  logic s1_698, s2_698;
  logic s1_699, s2_699;
  logic s1_700, s2_700;
  logic s1_701, s2_701;
  logic s1_702, s2_702;
  logic s1_703, s2_703;
  logic s1_704, s2_704;
  logic s1_705, s2_705;
  logic s1_706, s2_706;
  logic s1_707, s2_707;
  logic s1_708, s2_708;
  logic s1_709, s2_709;
  logic s1_710, s2_710;
  logic s1_711, s2_711;
  logic s1_712, s2_712;
  logic s1_713, s2_713;
  logic s1_714, s2_714;
  logic s1_715, s2_715;
  logic s1_716, s2_716;
  logic s1_717, s2_717;
  logic s1_718, s2_718;
  logic s1_719, s2_719;
  logic s1_720, s2_720;
  logic s1_721, s2_721;
  logic s1_722, s2_722;
  logic s1_723, s2_723;
  logic s1_724, s2_724;
  logic s1_725, s2_725;
  logic s1_726, s2_726;
  logic s1_727, s2_727;
  logic s1_728, s2_728;
  logic s1_729, s2_729;
  logic s1_730, s2_730;
  logic s1_731, s2_731;
  logic s1_732, s2_732;
  logic s1_733, s2_733;
  logic s1_734, s2_734;
  logic s1_735, s2_735;
  logic s1_736, s2_736;
  logic s1_737, s2_737;
  logic s1_738, s2_738;
  logic s1_739, s2_739;
  logic s1_740, s2_740;
  logic s1_741, s2_741;
  logic s1_742, s2_742;
  logic s1_743, s2_743;
  logic s1_744, s2_744;
  logic s1_745, s2_745;
  logic s1_746, s2_746;
  logic s1_747, s2_747;
  logic s1_748, s2_748;
  logic s1_749, s2_749;
  logic s1_750, s2_750;
  logic s1_751, s2_751;
  logic s1_752, s2_752;
  logic s1_753, s2_753;
  logic s1_754, s2_754;
  logic s1_755, s2_755;
  logic s1_756, s2_756;
  logic s1_757, s2_757;
  logic s1_758, s2_758;
  logic s1_759, s2_759;
  logic s1_760, s2_760;
  logic s1_761, s2_761;
  logic s1_762, s2_762;
  logic s1_763, s2_763;
  logic s1_764, s2_764;
  logic s1_765, s2_765;
  logic s1_766, s2_766;
  logic s1_767, s2_767;
  logic s1_768, s2_768;
  logic s1_769, s2_769;
  logic s1_770, s2_770;
  logic s1_771, s2_771;
  logic s1_772, s2_772;
  logic s1_773, s2_773;
  logic s1_774, s2_774;
  logic s1_775, s2_775;
  logic s1_776, s2_776;
  logic s1_777, s2_777;
  logic s1_778, s2_778;
  logic s1_779, s2_779;
  logic s1_780, s2_780;
  logic s1_781, s2_781;
  logic s1_782, s2_782;
  logic s1_783, s2_783;
  logic s1_784, s2_784;
  logic s1_785, s2_785;
  logic s1_786, s2_786;
  logic s1_787, s2_787;
  logic s1_788, s2_788;
  logic s1_789, s2_789;
  logic s1_790, s2_790;
  logic s1_791, s2_791;
  logic s1_792, s2_792;
  logic s1_793, s2_793;
  logic s1_794, s2_794;
  logic s1_795, s2_795;
  logic s1_796, s2_796;
  logic s1_797, s2_797;
  logic s1_798, s2_798;
  logic s1_799, s2_799;
  logic s1_800, s2_800;
  logic s1_801, s2_801;
  logic s1_802, s2_802;
  logic s1_803, s2_803;
  logic s1_804, s2_804;
  logic s1_805, s2_805;
  logic s1_806, s2_806;
  logic s1_807, s2_807;
  logic s1_808, s2_808;
  logic s1_809, s2_809;
  logic s1_810, s2_810;
  logic s1_811, s2_811;
  logic s1_812, s2_812;
  logic s1_813, s2_813;
  logic s1_814, s2_814;
  logic s1_815, s2_815;
  logic s1_816, s2_816;
  logic s1_817, s2_817;
  logic s1_818, s2_818;
  logic s1_819, s2_819;
  logic s1_820, s2_820;
  logic s1_821, s2_821;
  logic s1_822, s2_822;
  logic s1_823, s2_823;
  logic s1_824, s2_824;
  logic s1_825, s2_825;
  logic s1_826, s2_826;
  logic s1_827, s2_827;
  logic s1_828, s2_828;
  logic s1_829, s2_829;
  logic s1_830, s2_830;
  logic s1_831, s2_831;
  logic s1_832, s2_832;
  logic s1_833, s2_833;
  logic s1_834, s2_834;
  logic s1_835, s2_835;
  logic s1_836, s2_836;
  logic s1_837, s2_837;
  logic s1_838, s2_838;
  logic s1_839, s2_839;
  logic s1_840, s2_840;
  logic s1_841, s2_841;
  logic s1_842, s2_842;
  logic s1_843, s2_843;
  logic s1_844, s2_844;
  logic s1_845, s2_845;
  logic s1_846, s2_846;
  logic s1_847, s2_847;
  logic s1_848, s2_848;
  logic s1_849, s2_849;
  logic s1_850, s2_850;
  logic s1_851, s2_851;
  logic s1_852, s2_852;
  logic s1_853, s2_853;
  logic s1_854, s2_854;
  logic s1_855, s2_855;
  logic s1_856, s2_856;
  logic s1_857, s2_857;
  logic s1_858, s2_858;
  logic s1_859, s2_859;
  logic s1_860, s2_860;
  logic s1_861, s2_861;
  logic s1_862, s2_862;
  logic s1_863, s2_863;
  logic s1_864, s2_864;
  logic s1_865, s2_865;
  logic s1_866, s2_866;
  logic s1_867, s2_867;
  logic s1_868, s2_868;
  logic s1_869, s2_869;
  logic s1_870, s2_870;
  logic s1_871, s2_871;
  logic s1_872, s2_872;
  logic s1_873, s2_873;
  logic s1_874, s2_874;
  logic s1_875, s2_875;
  logic s1_876, s2_876;
  logic s1_877, s2_877;
  logic s1_878, s2_878;
  logic s1_879, s2_879;
  logic s1_880, s2_880;
  logic s1_881, s2_881;
  logic s1_882, s2_882;
  logic s1_883, s2_883;
  logic s1_884, s2_884;
  logic s1_885, s2_885;
  logic s1_886, s2_886;
  logic s1_887, s2_887;
  logic s1_888, s2_888;
  logic s1_889, s2_889;
  logic s1_890, s2_890;
  logic s1_891, s2_891;
  logic s1_892, s2_892;
  logic s1_893, s2_893;
  logic s1_894, s2_894;
  logic s1_895, s2_895;
  logic s1_896, s2_896;
  logic s1_897, s2_897;
  logic s1_898, s2_898;
  logic s1_899, s2_899;
  logic s1_900, s2_900;
  logic s1_901, s2_901;
  logic s1_902, s2_902;
  logic s1_903, s2_903;
  logic s1_904, s2_904;
  logic s1_905, s2_905;
  logic s1_906, s2_906;
  logic s1_907, s2_907;
  logic s1_908, s2_908;
  logic s1_909, s2_909;
  logic s1_910, s2_910;
  logic s1_911, s2_911;
  logic s1_912, s2_912;
  logic s1_913, s2_913;
  logic s1_914, s2_914;
  logic s1_915, s2_915;
  logic s1_916, s2_916;
  logic s1_917, s2_917;
  logic s1_918, s2_918;
  logic s1_919, s2_919;
  logic s1_920, s2_920;
  logic s1_921, s2_921;
  logic s1_922, s2_922;
  logic s1_923, s2_923;
  logic s1_924, s2_924;
  logic s1_925, s2_925;
  logic s1_926, s2_926;
  logic s1_927, s2_927;
  logic s1_928, s2_928;
  logic s1_929, s2_929;
  logic s1_930, s2_930;
  logic s1_931, s2_931;
  logic s1_932, s2_932;
  logic s1_933, s2_933;
  logic s1_934, s2_934;
  logic s1_935, s2_935;
  logic s1_936, s2_936;
  logic s1_937, s2_937;
  logic s1_938, s2_938;
  logic s1_939, s2_939;
  logic s1_940, s2_940;
  logic s1_941, s2_941;
  logic s1_942, s2_942;
  logic s1_943, s2_943;
  logic s1_944, s2_944;
  logic s1_945, s2_945;
  logic s1_946, s2_946;
  logic s1_947, s2_947;
  logic s1_948, s2_948;
  logic s1_949, s2_949;
  logic s1_950, s2_950;
  logic s1_951, s2_951;
  logic s1_952, s2_952;
  logic s1_953, s2_953;
  logic s1_954, s2_954;
  logic s1_955, s2_955;
  logic s1_956, s2_956;
  logic s1_957, s2_957;
  logic s1_958, s2_958;
  logic s1_959, s2_959;
  logic s1_960, s2_960;
  logic s1_961, s2_961;
  logic s1_962, s2_962;
  logic s1_963, s2_963;
  logic s1_964, s2_964;
  logic s1_965, s2_965;
  logic s1_966, s2_966;
  logic s1_967, s2_967;
  logic s1_968, s2_968;
  logic s1_969, s2_969;
  logic s1_970, s2_970;
  logic s1_971, s2_971;
  logic s1_972, s2_972;
  logic s1_973, s2_973;
  logic s1_974, s2_974;
  logic s1_975, s2_975;
  logic s1_976, s2_976;
  logic s1_977, s2_977;
  logic s1_978, s2_978;
  logic s1_979, s2_979;
  logic s1_980, s2_980;
  logic s1_981, s2_981;
  logic s1_982, s2_982;
  logic s1_983, s2_983;
  logic s1_984, s2_984;
  logic s1_985, s2_985;
  logic s1_986, s2_986;
  logic s1_987, s2_987;
  logic s1_988, s2_988;
  logic s1_989, s2_989;
  logic s1_990, s2_990;
  logic s1_991, s2_991;
  logic s1_992, s2_992;
  logic s1_993, s2_993;
  logic s1_994, s2_994;
  logic s1_995, s2_995;
  logic s1_996, s2_996;
  logic s1_997, s2_997;
  logic s1_998, s2_998;
  logic s1_999, s2_999;
  logic s1_1000, s2_1000;
  logic s1_1001, s2_1001;
  logic s1_1002, s2_1002;
  logic s1_1003, s2_1003;
  logic s1_1004, s2_1004;
  logic s1_1005, s2_1005;
  logic s1_1006, s2_1006;
  logic s1_1007, s2_1007;
  logic s1_1008, s2_1008;
  logic s1_1009, s2_1009;
  logic s1_1010, s2_1010;
  logic s1_1011, s2_1011;
  logic s1_1012, s2_1012;
  logic s1_1013, s2_1013;
  logic s1_1014, s2_1014;
  logic s1_1015, s2_1015;
  logic s1_1016, s2_1016;
  logic s1_1017, s2_1017;
  logic s1_1018, s2_1018;
  logic s1_1019, s2_1019;
  logic s1_1020, s2_1020;
  logic s1_1021, s2_1021;
  logic s1_1022, s2_1022;
  logic s1_1023, s2_1023;
  logic s1_1024, s2_1024;
  logic s1_1025, s2_1025;
  logic s1_1026, s2_1026;
  logic s1_1027, s2_1027;
  logic s1_1028, s2_1028;
  logic s1_1029, s2_1029;
  logic s1_1030, s2_1030;
  logic s1_1031, s2_1031;
  logic s1_1032, s2_1032;
  logic s1_1033, s2_1033;
  logic s1_1034, s2_1034;
  logic s1_1035, s2_1035;
  logic s1_1036, s2_1036;
  logic s1_1037, s2_1037;
  logic s1_1038, s2_1038;
  logic s1_1039, s2_1039;
  logic s1_1040, s2_1040;
  logic s1_1041, s2_1041;
  logic s1_1042, s2_1042;
  logic s1_1043, s2_1043;
  logic s1_1044, s2_1044;
  logic s1_1045, s2_1045;
  logic s1_1046, s2_1046;
  logic s1_1047, s2_1047;
  logic s1_1048, s2_1048;
  logic s1_1049, s2_1049;
  logic s1_1050, s2_1050;
  logic s1_1051, s2_1051;
  logic s1_1052, s2_1052;
  logic s1_1053, s2_1053;
  logic s1_1054, s2_1054;
  logic s1_1055, s2_1055;
  logic s1_1056, s2_1056;
  logic s1_1057, s2_1057;
  logic s1_1058, s2_1058;
  logic s1_1059, s2_1059;
  logic s1_1060, s2_1060;
  logic s1_1061, s2_1061;
  logic s1_1062, s2_1062;
  logic s1_1063, s2_1063;
  logic s1_1064, s2_1064;
  logic s1_1065, s2_1065;
  logic s1_1066, s2_1066;
  logic s1_1067, s2_1067;
  logic s1_1068, s2_1068;
  logic s1_1069, s2_1069;
  logic s1_1070, s2_1070;
  logic s1_1071, s2_1071;
  logic s1_1072, s2_1072;
  logic s1_1073, s2_1073;
  logic s1_1074, s2_1074;
  logic s1_1075, s2_1075;
  logic s1_1076, s2_1076;
  logic s1_1077, s2_1077;
  logic s1_1078, s2_1078;
  logic s1_1079, s2_1079;
  logic s1_1080, s2_1080;
  logic s1_1081, s2_1081;
  logic s1_1082, s2_1082;
  logic s1_1083, s2_1083;
  logic s1_1084, s2_1084;
  logic s1_1085, s2_1085;
  logic s1_1086, s2_1086;
  logic s1_1087, s2_1087;
  logic s1_1088, s2_1088;
  logic s1_1089, s2_1089;
  logic s1_1090, s2_1090;
  logic s1_1091, s2_1091;
  logic s1_1092, s2_1092;
  logic s1_1093, s2_1093;
  logic s1_1094, s2_1094;
  logic s1_1095, s2_1095;
  logic s1_1096, s2_1096;
  logic s1_1097, s2_1097;
  logic s1_1098, s2_1098;
  logic s1_1099, s2_1099;
  logic s1_1100, s2_1100;
  logic s1_1101, s2_1101;
  logic s1_1102, s2_1102;
  logic s1_1103, s2_1103;
  logic s1_1104, s2_1104;
  logic s1_1105, s2_1105;
  logic s1_1106, s2_1106;
  logic s1_1107, s2_1107;
  logic s1_1108, s2_1108;
  logic s1_1109, s2_1109;
  logic s1_1110, s2_1110;
  logic s1_1111, s2_1111;
  logic s1_1112, s2_1112;
  logic s1_1113, s2_1113;
  logic s1_1114, s2_1114;
  logic s1_1115, s2_1115;
  logic s1_1116, s2_1116;
  logic s1_1117, s2_1117;
  logic s1_1118, s2_1118;
  logic s1_1119, s2_1119;
  logic s1_1120, s2_1120;
  logic s1_1121, s2_1121;
  logic s1_1122, s2_1122;
  logic s1_1123, s2_1123;
  logic s1_1124, s2_1124;
  logic s1_1125, s2_1125;
  logic s1_1126, s2_1126;
  logic s1_1127, s2_1127;
  logic s1_1128, s2_1128;
  logic s1_1129, s2_1129;
  logic s1_1130, s2_1130;
  logic s1_1131, s2_1131;
  logic s1_1132, s2_1132;
  logic s1_1133, s2_1133;
  logic s1_1134, s2_1134;
  logic s1_1135, s2_1135;
  logic s1_1136, s2_1136;
  logic s1_1137, s2_1137;
  logic s1_1138, s2_1138;
  logic s1_1139, s2_1139;
  logic s1_1140, s2_1140;
  logic s1_1141, s2_1141;
  logic s1_1142, s2_1142;
  logic s1_1143, s2_1143;
  logic s1_1144, s2_1144;
  logic s1_1145, s2_1145;
  logic s1_1146, s2_1146;
  logic s1_1147, s2_1147;
  logic s1_1148, s2_1148;
  logic s1_1149, s2_1149;
  logic s1_1150, s2_1150;
  logic s1_1151, s2_1151;
  logic s1_1152, s2_1152;
  logic s1_1153, s2_1153;
  logic s1_1154, s2_1154;
  logic s1_1155, s2_1155;
  logic s1_1156, s2_1156;
  logic s1_1157, s2_1157;
  logic s1_1158, s2_1158;
  logic s1_1159, s2_1159;
  logic s1_1160, s2_1160;
  logic s1_1161, s2_1161;
  logic s1_1162, s2_1162;
  logic s1_1163, s2_1163;
  logic s1_1164, s2_1164;
  logic s1_1165, s2_1165;
  logic s1_1166, s2_1166;
  logic s1_1167, s2_1167;
  logic s1_1168, s2_1168;
  logic s1_1169, s2_1169;
  logic s1_1170, s2_1170;
  logic s1_1171, s2_1171;
  logic s1_1172, s2_1172;
  logic s1_1173, s2_1173;
  logic s1_1174, s2_1174;
  logic s1_1175, s2_1175;
  logic s1_1176, s2_1176;
  logic s1_1177, s2_1177;
  logic s1_1178, s2_1178;
  logic s1_1179, s2_1179;
  logic s1_1180, s2_1180;
  logic s1_1181, s2_1181;
  logic s1_1182, s2_1182;
  logic s1_1183, s2_1183;
  logic s1_1184, s2_1184;
  logic s1_1185, s2_1185;
  logic s1_1186, s2_1186;
  logic s1_1187, s2_1187;
  logic s1_1188, s2_1188;
  logic s1_1189, s2_1189;
  logic s1_1190, s2_1190;
  logic s1_1191, s2_1191;
  logic s1_1192, s2_1192;
  logic s1_1193, s2_1193;
  logic s1_1194, s2_1194;
  logic s1_1195, s2_1195;
  logic s1_1196, s2_1196;
  logic s1_1197, s2_1197;
  logic s1_1198, s2_1198;
  logic s1_1199, s2_1199;
  logic s1_1200, s2_1200;
  logic s1_1201, s2_1201;
  logic s1_1202, s2_1202;
  logic s1_1203, s2_1203;
  logic s1_1204, s2_1204;
  logic s1_1205, s2_1205;
  logic s1_1206, s2_1206;
  logic s1_1207, s2_1207;
  logic s1_1208, s2_1208;
  logic s1_1209, s2_1209;
  logic s1_1210, s2_1210;
  logic s1_1211, s2_1211;
  logic s1_1212, s2_1212;
  logic s1_1213, s2_1213;
  logic s1_1214, s2_1214;
  logic s1_1215, s2_1215;
  logic s1_1216, s2_1216;
  logic s1_1217, s2_1217;
  logic s1_1218, s2_1218;
  logic s1_1219, s2_1219;
  logic s1_1220, s2_1220;
  logic s1_1221, s2_1221;
  logic s1_1222, s2_1222;
  logic s1_1223, s2_1223;
  logic s1_1224, s2_1224;
  logic s1_1225, s2_1225;
  logic s1_1226, s2_1226;
  logic s1_1227, s2_1227;
  logic s1_1228, s2_1228;
  logic s1_1229, s2_1229;
  logic s1_1230, s2_1230;
  logic s1_1231, s2_1231;
  logic s1_1232, s2_1232;
  logic s1_1233, s2_1233;
  logic s1_1234, s2_1234;
  logic s1_1235, s2_1235;
  logic s1_1236, s2_1236;
  logic s1_1237, s2_1237;
  logic s1_1238, s2_1238;
  logic s1_1239, s2_1239;
  logic s1_1240, s2_1240;
  logic s1_1241, s2_1241;
  logic s1_1242, s2_1242;
  logic s1_1243, s2_1243;
  logic s1_1244, s2_1244;
  logic s1_1245, s2_1245;
  logic s1_1246, s2_1246;
  logic s1_1247, s2_1247;
  logic s1_1248, s2_1248;
  logic s1_1249, s2_1249;
  logic s1_1250, s2_1250;
  logic s1_1251, s2_1251;
  logic s1_1252, s2_1252;
  logic s1_1253, s2_1253;
  logic s1_1254, s2_1254;
  logic s1_1255, s2_1255;
  logic s1_1256, s2_1256;
  logic s1_1257, s2_1257;
  logic s1_1258, s2_1258;
  logic s1_1259, s2_1259;
  logic s1_1260, s2_1260;
  logic s1_1261, s2_1261;
  logic s1_1262, s2_1262;
  logic s1_1263, s2_1263;
  logic s1_1264, s2_1264;
  logic s1_1265, s2_1265;
  logic s1_1266, s2_1266;
  logic s1_1267, s2_1267;
  logic s1_1268, s2_1268;
  logic s1_1269, s2_1269;
  logic s1_1270, s2_1270;
  logic s1_1271, s2_1271;
  logic s1_1272, s2_1272;
  logic s1_1273, s2_1273;
  logic s1_1274, s2_1274;
  logic s1_1275, s2_1275;
  logic s1_1276, s2_1276;
  logic s1_1277, s2_1277;
  logic s1_1278, s2_1278;
  logic s1_1279, s2_1279;
  logic s1_1280, s2_1280;
  logic s1_1281, s2_1281;
  logic s1_1282, s2_1282;
  logic s1_1283, s2_1283;
  logic s1_1284, s2_1284;
  logic s1_1285, s2_1285;
  logic s1_1286, s2_1286;
  logic s1_1287, s2_1287;
  logic s1_1288, s2_1288;
  logic s1_1289, s2_1289;
  logic s1_1290, s2_1290;
  logic s1_1291, s2_1291;
  logic s1_1292, s2_1292;
  logic s1_1293, s2_1293;
  logic s1_1294, s2_1294;
  logic s1_1295, s2_1295;
  logic s1_1296, s2_1296;
  logic s1_1297, s2_1297;
  logic s1_1298, s2_1298;
  logic s1_1299, s2_1299;
  logic s1_1300, s2_1300;
  logic s1_1301, s2_1301;
  logic s1_1302, s2_1302;
  logic s1_1303, s2_1303;
  logic s1_1304, s2_1304;
  logic s1_1305, s2_1305;
  logic s1_1306, s2_1306;
  logic s1_1307, s2_1307;
  logic s1_1308, s2_1308;
  logic s1_1309, s2_1309;
  logic s1_1310, s2_1310;
  logic s1_1311, s2_1311;
  logic s1_1312, s2_1312;
  logic s1_1313, s2_1313;
  logic s1_1314, s2_1314;
  logic s1_1315, s2_1315;
  logic s1_1316, s2_1316;
  logic s1_1317, s2_1317;
  logic s1_1318, s2_1318;
  logic s1_1319, s2_1319;
  logic s1_1320, s2_1320;
  logic s1_1321, s2_1321;
  logic s1_1322, s2_1322;
  logic s1_1323, s2_1323;
  logic s1_1324, s2_1324;
  logic s1_1325, s2_1325;
  logic s1_1326, s2_1326;
  logic s1_1327, s2_1327;
  logic s1_1328, s2_1328;
  logic s1_1329, s2_1329;
  logic s1_1330, s2_1330;
  logic s1_1331, s2_1331;
  logic s1_1332, s2_1332;
  logic s1_1333, s2_1333;
  logic s1_1334, s2_1334;
  logic s1_1335, s2_1335;
  logic s1_1336, s2_1336;
  logic s1_1337, s2_1337;
  logic s1_1338, s2_1338;
  logic s1_1339, s2_1339;
  logic s1_1340, s2_1340;
  logic s1_1341, s2_1341;
  logic s1_1342, s2_1342;
  logic s1_1343, s2_1343;
  logic s1_1344, s2_1344;
  logic s1_1345, s2_1345;
  logic s1_1346, s2_1346;
  logic s1_1347, s2_1347;
  logic s1_1348, s2_1348;
  logic s1_1349, s2_1349;
  logic s1_1350, s2_1350;
  logic s1_1351, s2_1351;
  logic s1_1352, s2_1352;
  logic s1_1353, s2_1353;
  logic s1_1354, s2_1354;
  logic s1_1355, s2_1355;
  logic s1_1356, s2_1356;
  logic s1_1357, s2_1357;
  logic s1_1358, s2_1358;
  logic s1_1359, s2_1359;
  logic s1_1360, s2_1360;
  logic s1_1361, s2_1361;
  logic s1_1362, s2_1362;
  logic s1_1363, s2_1363;
  logic s1_1364, s2_1364;
  logic s1_1365, s2_1365;
  logic s1_1366, s2_1366;
  logic s1_1367, s2_1367;
  logic s1_1368, s2_1368;
  logic s1_1369, s2_1369;
  logic s1_1370, s2_1370;
  logic s1_1371, s2_1371;
  logic s1_1372, s2_1372;
  logic s1_1373, s2_1373;
  logic s1_1374, s2_1374;
  logic s1_1375, s2_1375;
  logic s1_1376, s2_1376;
  logic s1_1377, s2_1377;
  logic s1_1378, s2_1378;
  logic s1_1379, s2_1379;
  logic s1_1380, s2_1380;
  logic s1_1381, s2_1381;
  logic s1_1382, s2_1382;
  logic s1_1383, s2_1383;
  logic s1_1384, s2_1384;
  logic s1_1385, s2_1385;
  logic s1_1386, s2_1386;
  logic s1_1387, s2_1387;
  logic s1_1388, s2_1388;
  logic s1_1389, s2_1389;
  logic s1_1390, s2_1390;
  logic s1_1391, s2_1391;
  logic s1_1392, s2_1392;
  logic s1_1393, s2_1393;
  logic s1_1394, s2_1394;
  logic s1_1395, s2_1395;
  logic s1_1396, s2_1396;
  logic s1_1397, s2_1397;
  logic s1_1398, s2_1398;
  logic s1_1399, s2_1399;
  logic s1_1400, s2_1400;
  logic s1_1401, s2_1401;
  logic s1_1402, s2_1402;
  logic s1_1403, s2_1403;
  logic s1_1404, s2_1404;
  logic s1_1405, s2_1405;
  logic s1_1406, s2_1406;
  logic s1_1407, s2_1407;
  logic s1_1408, s2_1408;
  logic s1_1409, s2_1409;
  logic s1_1410, s2_1410;
  logic s1_1411, s2_1411;
  logic s1_1412, s2_1412;
  logic s1_1413, s2_1413;
  logic s1_1414, s2_1414;
  logic s1_1415, s2_1415;
  logic s1_1416, s2_1416;
  logic s1_1417, s2_1417;
  logic s1_1418, s2_1418;
  logic s1_1419, s2_1419;
  logic s1_1420, s2_1420;
  logic s1_1421, s2_1421;
  logic s1_1422, s2_1422;
  logic s1_1423, s2_1423;
  logic s1_1424, s2_1424;
  logic s1_1425, s2_1425;
  logic s1_1426, s2_1426;
  logic s1_1427, s2_1427;
  logic s1_1428, s2_1428;
  logic s1_1429, s2_1429;
  logic s1_1430, s2_1430;
  logic s1_1431, s2_1431;
  logic s1_1432, s2_1432;
  logic s1_1433, s2_1433;
  logic s1_1434, s2_1434;
  logic s1_1435, s2_1435;
  logic s1_1436, s2_1436;
  logic s1_1437, s2_1437;
  logic s1_1438, s2_1438;
  logic s1_1439, s2_1439;
  logic s1_1440, s2_1440;
  logic s1_1441, s2_1441;
  logic s1_1442, s2_1442;
  logic s1_1443, s2_1443;
  logic s1_1444, s2_1444;
  logic s1_1445, s2_1445;
  logic s1_1446, s2_1446;
  logic s1_1447, s2_1447;
  logic s1_1448, s2_1448;
  logic s1_1449, s2_1449;
  logic s1_1450, s2_1450;
  logic s1_1451, s2_1451;
  logic s1_1452, s2_1452;
  logic s1_1453, s2_1453;
  logic s1_1454, s2_1454;
  logic s1_1455, s2_1455;
  logic s1_1456, s2_1456;
  logic s1_1457, s2_1457;
  logic s1_1458, s2_1458;
  logic s1_1459, s2_1459;
  logic s1_1460, s2_1460;
  logic s1_1461, s2_1461;
  logic s1_1462, s2_1462;
  logic s1_1463, s2_1463;
  logic s1_1464, s2_1464;
  logic s1_1465, s2_1465;
  logic s1_1466, s2_1466;
  logic s1_1467, s2_1467;
  logic s1_1468, s2_1468;
  logic s1_1469, s2_1469;
  logic s1_1470, s2_1470;
  logic s1_1471, s2_1471;
  logic s1_1472, s2_1472;
  logic s1_1473, s2_1473;
  logic s1_1474, s2_1474;
  logic s1_1475, s2_1475;
  logic s1_1476, s2_1476;
  logic s1_1477, s2_1477;
  logic s1_1478, s2_1478;
  logic s1_1479, s2_1479;
  logic s1_1480, s2_1480;
  logic s1_1481, s2_1481;
  logic s1_1482, s2_1482;
  logic s1_1483, s2_1483;
  logic s1_1484, s2_1484;
  logic s1_1485, s2_1485;
  logic s1_1486, s2_1486;
  logic s1_1487, s2_1487;
  logic s1_1488, s2_1488;
  logic s1_1489, s2_1489;
  logic s1_1490, s2_1490;
  logic s1_1491, s2_1491;
  logic s1_1492, s2_1492;
  logic s1_1493, s2_1493;
  logic s1_1494, s2_1494;
  logic s1_1495, s2_1495;
  logic s1_1496, s2_1496;
  logic s1_1497, s2_1497;
  logic s1_1498, s2_1498;
  logic s1_1499, s2_1499;
  logic s1_1500, s2_1500;
  logic s1_1501, s2_1501;
  logic s1_1502, s2_1502;
  logic s1_1503, s2_1503;
  logic s1_1504, s2_1504;
  logic s1_1505, s2_1505;
  logic s1_1506, s2_1506;
  logic s1_1507, s2_1507;
  logic s1_1508, s2_1508;
  logic s1_1509, s2_1509;
  logic s1_1510, s2_1510;
  logic s1_1511, s2_1511;
  logic s1_1512, s2_1512;
  logic s1_1513, s2_1513;
  logic s1_1514, s2_1514;
  logic s1_1515, s2_1515;
  logic s1_1516, s2_1516;
  logic s1_1517, s2_1517;
  logic s1_1518, s2_1518;
  logic s1_1519, s2_1519;
  logic s1_1520, s2_1520;
  logic s1_1521, s2_1521;
  logic s1_1522, s2_1522;
  logic s1_1523, s2_1523;
  logic s1_1524, s2_1524;
  logic s1_1525, s2_1525;
  logic s1_1526, s2_1526;
  logic s1_1527, s2_1527;
  logic s1_1528, s2_1528;
  logic s1_1529, s2_1529;
  logic s1_1530, s2_1530;
  logic s1_1531, s2_1531;
  logic s1_1532, s2_1532;
  logic s1_1533, s2_1533;
  logic s1_1534, s2_1534;
  logic s1_1535, s2_1535;
  logic s1_1536, s2_1536;
  logic s1_1537, s2_1537;
  logic s1_1538, s2_1538;
  logic s1_1539, s2_1539;
  logic s1_1540, s2_1540;
  logic s1_1541, s2_1541;
  logic s1_1542, s2_1542;
  logic s1_1543, s2_1543;
  logic s1_1544, s2_1544;
  logic s1_1545, s2_1545;
  logic s1_1546, s2_1546;
  logic s1_1547, s2_1547;
  logic s1_1548, s2_1548;
  logic s1_1549, s2_1549;
  logic s1_1550, s2_1550;
  logic s1_1551, s2_1551;
  logic s1_1552, s2_1552;
  logic s1_1553, s2_1553;
  logic s1_1554, s2_1554;
  logic s1_1555, s2_1555;
  logic s1_1556, s2_1556;
  logic s1_1557, s2_1557;
  logic s1_1558, s2_1558;
  logic s1_1559, s2_1559;
  logic s1_1560, s2_1560;
  logic s1_1561, s2_1561;
  logic s1_1562, s2_1562;
  logic s1_1563, s2_1563;
  logic s1_1564, s2_1564;
  logic s1_1565, s2_1565;
  logic s1_1566, s2_1566;
  logic s1_1567, s2_1567;
  logic s1_1568, s2_1568;
  logic s1_1569, s2_1569;
  logic s1_1570, s2_1570;
  logic s1_1571, s2_1571;
  logic s1_1572, s2_1572;
  logic s1_1573, s2_1573;
  logic s1_1574, s2_1574;
  logic s1_1575, s2_1575;
  logic [150:0] q1, q2;

  assign mem_en_s1 = s1_2;
  assign mem_en_s2 = s2_2;
  assign mem_we_s1 = s1_3;
  assign mem_we_s2 = s2_3;
  assign mem_be_s1[0] = s1_4;
  assign mem_be_s1[1] = s1_5;
  assign mem_be_s1[2] = s1_6;
  assign mem_be_s1[3] = s1_7;
  assign mem_be_s2[0] = s2_4;
  assign mem_be_s2[1] = s2_5;
  assign mem_be_s2[2] = s2_6;
  assign mem_be_s2[3] = s2_7;
  assign mem_addr_s1[0] = s1_8;
  assign mem_addr_s1[1] = s1_9;
  assign mem_addr_s1[2] = s1_10;
  assign mem_addr_s1[3] = s1_11;
  assign mem_addr_s1[4] = s1_12;
  assign mem_addr_s1[5] = s1_13;
  assign mem_addr_s1[6] = s1_14;
  assign mem_addr_s1[7] = s1_15;
  assign mem_addr_s1[8] = s1_16;
  assign mem_addr_s1[9] = s1_17;
  assign mem_addr_s2[0] = s2_8;
  assign mem_addr_s2[1] = s2_9;
  assign mem_addr_s2[2] = s2_10;
  assign mem_addr_s2[3] = s2_11;
  assign mem_addr_s2[4] = s2_12;
  assign mem_addr_s2[5] = s2_13;
  assign mem_addr_s2[6] = s2_14;
  assign mem_addr_s2[7] = s2_15;
  assign mem_addr_s2[8] = s2_16;
  assign mem_addr_s2[9] = s2_17;
  assign mem_wdata_s1[0] = s1_18;
  assign mem_wdata_s1[1] = s1_19;
  assign mem_wdata_s1[2] = s1_20;
  assign mem_wdata_s1[3] = s1_21;
  assign mem_wdata_s1[4] = s1_22;
  assign mem_wdata_s1[5] = s1_23;
  assign mem_wdata_s1[6] = s1_24;
  assign mem_wdata_s1[7] = s1_25;
  assign mem_wdata_s1[8] = s1_26;
  assign mem_wdata_s1[9] = s1_27;
  assign mem_wdata_s1[10] = s1_28;
  assign mem_wdata_s1[11] = s1_29;
  assign mem_wdata_s1[12] = s1_30;
  assign mem_wdata_s1[13] = s1_31;
  assign mem_wdata_s1[14] = s1_32;
  assign mem_wdata_s1[15] = s1_33;
  assign mem_wdata_s1[16] = s1_34;
  assign mem_wdata_s1[17] = s1_35;
  assign mem_wdata_s1[18] = s1_36;
  assign mem_wdata_s1[19] = s1_37;
  assign mem_wdata_s1[20] = s1_38;
  assign mem_wdata_s1[21] = s1_39;
  assign mem_wdata_s1[22] = s1_40;
  assign mem_wdata_s1[23] = s1_41;
  assign mem_wdata_s1[24] = s1_42;
  assign mem_wdata_s1[25] = s1_43;
  assign mem_wdata_s1[26] = s1_44;
  assign mem_wdata_s1[27] = s1_45;
  assign mem_wdata_s1[28] = s1_46;
  assign mem_wdata_s1[29] = s1_47;
  assign mem_wdata_s1[30] = s1_48;
  assign mem_wdata_s1[31] = s1_49;
  assign mem_wdata_s2[0] = s2_18;
  assign mem_wdata_s2[1] = s2_19;
  assign mem_wdata_s2[2] = s2_20;
  assign mem_wdata_s2[3] = s2_21;
  assign mem_wdata_s2[4] = s2_22;
  assign mem_wdata_s2[5] = s2_23;
  assign mem_wdata_s2[6] = s2_24;
  assign mem_wdata_s2[7] = s2_25;
  assign mem_wdata_s2[8] = s2_26;
  assign mem_wdata_s2[9] = s2_27;
  assign mem_wdata_s2[10] = s2_28;
  assign mem_wdata_s2[11] = s2_29;
  assign mem_wdata_s2[12] = s2_30;
  assign mem_wdata_s2[13] = s2_31;
  assign mem_wdata_s2[14] = s2_32;
  assign mem_wdata_s2[15] = s2_33;
  assign mem_wdata_s2[16] = s2_34;
  assign mem_wdata_s2[17] = s2_35;
  assign mem_wdata_s2[18] = s2_36;
  assign mem_wdata_s2[19] = s2_37;
  assign mem_wdata_s2[20] = s2_38;
  assign mem_wdata_s2[21] = s2_39;
  assign mem_wdata_s2[22] = s2_40;
  assign mem_wdata_s2[23] = s2_41;
  assign mem_wdata_s2[24] = s2_42;
  assign mem_wdata_s2[25] = s2_43;
  assign mem_wdata_s2[26] = s2_44;
  assign mem_wdata_s2[27] = s2_45;
  assign mem_wdata_s2[28] = s2_46;
  assign mem_wdata_s2[29] = s2_47;
  assign mem_wdata_s2[30] = s2_48;
  assign mem_wdata_s2[31] = s2_49;
  assign s1_50 = mem_rdata_s1[0];
  assign s1_51 = mem_rdata_s1[1];
  assign s1_52 = mem_rdata_s1[2];
  assign s1_53 = mem_rdata_s1[3];
  assign s1_54 = mem_rdata_s1[4];
  assign s1_55 = mem_rdata_s1[5];
  assign s1_56 = mem_rdata_s1[6];
  assign s1_57 = mem_rdata_s1[7];
  assign s1_58 = mem_rdata_s1[8];
  assign s1_59 = mem_rdata_s1[9];
  assign s1_60 = mem_rdata_s1[10];
  assign s1_61 = mem_rdata_s1[11];
  assign s1_62 = mem_rdata_s1[12];
  assign s1_63 = mem_rdata_s1[13];
  assign s1_64 = mem_rdata_s1[14];
  assign s1_65 = mem_rdata_s1[15];
  assign s1_66 = mem_rdata_s1[16];
  assign s1_67 = mem_rdata_s1[17];
  assign s1_68 = mem_rdata_s1[18];
  assign s1_69 = mem_rdata_s1[19];
  assign s1_70 = mem_rdata_s1[20];
  assign s1_71 = mem_rdata_s1[21];
  assign s1_72 = mem_rdata_s1[22];
  assign s1_73 = mem_rdata_s1[23];
  assign s1_74 = mem_rdata_s1[24];
  assign s1_75 = mem_rdata_s1[25];
  assign s1_76 = mem_rdata_s1[26];
  assign s1_77 = mem_rdata_s1[27];
  assign s1_78 = mem_rdata_s1[28];
  assign s1_79 = mem_rdata_s1[29];
  assign s1_80 = mem_rdata_s1[30];
  assign s1_81 = mem_rdata_s1[31];
  assign s2_50 = mem_rdata_s2[0];
  assign s2_51 = mem_rdata_s2[1];
  assign s2_52 = mem_rdata_s2[2];
  assign s2_53 = mem_rdata_s2[3];
  assign s2_54 = mem_rdata_s2[4];
  assign s2_55 = mem_rdata_s2[5];
  assign s2_56 = mem_rdata_s2[6];
  assign s2_57 = mem_rdata_s2[7];
  assign s2_58 = mem_rdata_s2[8];
  assign s2_59 = mem_rdata_s2[9];
  assign s2_60 = mem_rdata_s2[10];
  assign s2_61 = mem_rdata_s2[11];
  assign s2_62 = mem_rdata_s2[12];
  assign s2_63 = mem_rdata_s2[13];
  assign s2_64 = mem_rdata_s2[14];
  assign s2_65 = mem_rdata_s2[15];
  assign s2_66 = mem_rdata_s2[16];
  assign s2_67 = mem_rdata_s2[17];
  assign s2_68 = mem_rdata_s2[18];
  assign s2_69 = mem_rdata_s2[19];
  assign s2_70 = mem_rdata_s2[20];
  assign s2_71 = mem_rdata_s2[21];
  assign s2_72 = mem_rdata_s2[22];
  assign s2_73 = mem_rdata_s2[23];
  assign s2_74 = mem_rdata_s2[24];
  assign s2_75 = mem_rdata_s2[25];
  assign s2_76 = mem_rdata_s2[26];
  assign s2_77 = mem_rdata_s2[27];
  assign s2_78 = mem_rdata_s2[28];
  assign s2_79 = mem_rdata_s2[29];
  assign s2_80 = mem_rdata_s2[30];
  assign s2_81 = mem_rdata_s2[31];
  assign rf_re_s1 = s1_82;
  assign rf_re_s2 = s2_82;
  assign rf_raddr_s1[0] = s1_83;
  assign rf_raddr_s1[1] = s1_84;
  assign rf_raddr_s1[2] = s1_85;
  assign rf_raddr_s1[3] = s1_86;
  assign rf_raddr_s1[4] = s1_87;
  assign rf_raddr_s1[5] = s1_88;
  assign rf_raddr_s1[6] = s1_89;
  assign rf_raddr_s1[7] = s1_90;
  assign rf_raddr_s1[8] = s1_91;
  assign rf_raddr_s2[0] = s2_83;
  assign rf_raddr_s2[1] = s2_84;
  assign rf_raddr_s2[2] = s2_85;
  assign rf_raddr_s2[3] = s2_86;
  assign rf_raddr_s2[4] = s2_87;
  assign rf_raddr_s2[5] = s2_88;
  assign rf_raddr_s2[6] = s2_89;
  assign rf_raddr_s2[7] = s2_90;
  assign rf_raddr_s2[8] = s2_91;
  assign s1_92 = rf_rdata_s1[0];
  assign s1_93 = rf_rdata_s1[1];
  assign s2_92 = rf_rdata_s2[0];
  assign s2_93 = rf_rdata_s2[1];
  assign rf_we_s1 = s1_94;
  assign rf_we_s2 = s2_94;
  assign rf_waddr_s1[0] = s1_95;
  assign rf_waddr_s1[1] = s1_96;
  assign rf_waddr_s1[2] = s1_97;
  assign rf_waddr_s1[3] = s1_98;
  assign rf_waddr_s1[4] = s1_99;
  assign rf_waddr_s1[5] = s1_100;
  assign rf_waddr_s1[6] = s1_101;
  assign rf_waddr_s1[7] = s1_102;
  assign rf_waddr_s1[8] = s1_103;
  assign rf_waddr_s2[0] = s2_95;
  assign rf_waddr_s2[1] = s2_96;
  assign rf_waddr_s2[2] = s2_97;
  assign rf_waddr_s2[3] = s2_98;
  assign rf_waddr_s2[4] = s2_99;
  assign rf_waddr_s2[5] = s2_100;
  assign rf_waddr_s2[6] = s2_101;
  assign rf_waddr_s2[7] = s2_102;
  assign rf_waddr_s2[8] = s2_103;
  assign rf_wdata_s1[0] = s1_104;
  assign rf_wdata_s1[1] = s1_105;
  assign rf_wdata_s2[0] = s2_104;
  assign rf_wdata_s2[1] = s2_105;

  assign s1_106 = ~s1_98;
  assign s2_106 = s2_98;
  assign s1_107 = ~s1_96;
  assign s2_107 = s2_96;
  assign s1_108 = ~s1_95;
  assign s2_108 = s2_95;
  assign s1_109 = ~s1_110;
  assign s2_109 = s2_110;
  assign s1_111 = ~s1_112;
  assign s2_111 = s2_112;
  assign s1_113 = ~s1_97;
  assign s2_113 = s2_97;
  assign s1_114 = ~s1_115;
  assign s2_114 = s2_115;
  assign s1_116 = ~s1_117;
  assign s2_116 = s2_117;
  assign s1_118 = ~s1_119;
  assign s2_118 = s2_119;
  assign s1_120 = ~s1_121;
  assign s2_120 = s2_121;
  assign s1_122 = ~s1_123;
  assign s2_122 = s2_123;
  assign s1_124 = ~s1_125;
  assign s2_124 = s2_125;
  assign s1_126 = ~s1_127;
  assign s2_126 = s2_127;
  assign s1_128 = ~s1_129;
  assign s2_128 = s2_129;
  assign s1_130 = ~s1_131;
  assign s2_130 = s2_131;
  assign s1_132 = ~s1_133;
  assign s2_132 = s2_133;
  assign s1_134 = ~s1_135;
  assign s2_134 = s2_135;
  assign s1_136 = ~s1_137;
  assign s2_136 = s2_137;
  assign s1_138 = ~s1_139;
  assign s2_138 = s2_139;
  assign s1_140 = ~s1_141;
  assign s2_140 = s2_141;
  assign s1_142 = ~s1_143;
  assign s2_142 = s2_143;
  assign s1_144 = ~s1_145;
  assign s2_144 = s2_145;
  assign s1_146 = ~s1_147;
  assign s2_146 = s2_147;
  masked_and u_g0 (.x1(s1_119), .x2(s2_119), .y1(s1_121), .y2(s2_121), .z1(s1_148), .z2(s2_148));
  assign s1_149 = ~s1_148;
  assign s2_149 = s2_148;
  masked_and u_g1 (.x1(s1_122), .x2(s2_122), .y1(s1_148), .y2(s2_148), .z1(s1_150), .z2(s2_150));
  masked_or u_g2 (.x1(s1_123), .x2(s2_123), .y1(s1_149), .y2(s2_149), .z1(s1_151), .z2(s2_151));
  masked_and u_g3 (.x1(s1_119), .x2(s2_119), .y1(s1_120), .y2(s2_120), .z1(s1_152), .z2(s2_152));
  masked_or u_g4 (.x1(s1_118), .x2(s2_118), .y1(s1_121), .y2(s2_121), .z1(s1_153), .z2(s2_153));
  masked_and u_g5 (.x1(s1_122), .x2(s2_122), .y1(s1_152), .y2(s2_152), .z1(s1_154), .z2(s2_154));
  masked_or u_g6 (.x1(s1_123), .x2(s2_123), .y1(s1_153), .y2(s2_153), .z1(s1_155), .z2(s2_155));
  masked_or u_g7 (.x1(s1_118), .x2(s2_118), .y1(s1_123), .y2(s2_123), .z1(s1_156), .z2(s2_156));
  masked_and u_g8 (.x1(s1_96), .x2(s2_96), .y1(s1_95), .y2(s2_95), .z1(s1_157), .z2(s2_157));
  masked_and u_g9 (.x1(s1_96), .x2(s2_96), .y1(s1_97), .y2(s2_97), .z1(s1_158), .z2(s2_158));
  assign s1_159 = ~s1_158;
  assign s2_159 = s2_158;
  masked_and u_g10 (.x1(s1_95), .x2(s2_95), .y1(s1_158), .y2(s2_158), .z1(s1_160), .z2(s2_160));
  assign s1_161 = s1_98 ^ s1_160;
  assign s2_161 = s2_98 ^ s2_160;
  masked_and u_g11 (.x1(s1_156), .x2(s2_156), .y1(s1_161), .y2(s2_161), .z1(s1_86), .z2(s2_86));
  masked_or u_g12 (.x1(s1_110), .x2(s2_110), .y1(s1_137), .y2(s2_137), .z1(s1_162), .z2(s2_162));
  masked_and u_g13 (.x1(s1_129), .x2(s2_129), .y1(s1_162), .y2(s2_162), .z1(s1_163), .z2(s2_163));
  masked_or u_g14 (.x1(s1_112), .x2(s2_112), .y1(s1_163), .y2(s2_163), .z1(s1_7), .z2(s2_7));
  masked_and u_g15 (.x1(s1_107), .x2(s2_107), .y1(s1_113), .y2(s2_113), .z1(s1_164), .z2(s2_164));
  masked_or u_g16 (.x1(s1_96), .x2(s2_96), .y1(s1_97), .y2(s2_97), .z1(s1_165), .z2(s2_165));
  assign s1_166 = s1_97 ^ s1_157;
  assign s2_166 = s2_97 ^ s2_157;
  masked_and u_g17 (.x1(s1_156), .x2(s2_156), .y1(s1_166), .y2(s2_166), .z1(s1_85), .z2(s2_85));
  assign s1_167 = s1_96 ^ s1_95;
  assign s2_167 = s2_96 ^ s2_95;
  masked_and u_g18 (.x1(s1_156), .x2(s2_156), .y1(s1_167), .y2(s2_167), .z1(s1_84), .z2(s2_84));
  masked_and u_g19 (.x1(s1_110), .x2(s2_110), .y1(s1_111), .y2(s2_111), .z1(s1_168), .z2(s2_168));
  masked_and u_g20 (.x1(s1_169), .x2(s2_169), .y1(s1_168), .y2(s2_168), .z1(s1_170), .z2(s2_170));
  masked_and u_g21 (.x1(s1_112), .x2(s2_112), .y1(s1_171), .y2(s2_171), .z1(s1_172), .z2(s2_172));
  masked_and u_g22 (.x1(s1_109), .x2(s2_109), .y1(s1_111), .y2(s2_111), .z1(s1_173), .z2(s2_173));
  masked_or u_g23 (.x1(s1_110), .x2(s2_110), .y1(s1_112), .y2(s2_112), .z1(s1_174), .z2(s2_174));
  masked_and u_g24 (.x1(s1_25), .x2(s2_25), .y1(s1_111), .y2(s2_111), .z1(s1_175), .z2(s2_175));
  masked_and u_g25 (.x1(s1_25), .x2(s2_25), .y1(s1_173), .y2(s2_173), .z1(s1_176), .z2(s2_176));
  masked_or u_g26 (.x1(s1_170), .x2(s2_170), .y1(s1_172), .y2(s2_172), .z1(s1_177), .z2(s2_177));
  masked_or u_g27 (.x1(s1_176), .x2(s2_176), .y1(s1_177), .y2(s2_177), .z1(s1_49), .z2(s2_49));
  masked_and u_g28 (.x1(s1_108), .x2(s2_108), .y1(s1_156), .y2(s2_156), .z1(s1_83), .z2(s2_83));
  masked_and u_g29 (.x1(s1_111), .x2(s2_111), .y1(s1_18), .y2(s2_18), .z1(s1_178), .z2(s2_178));
  masked_and u_g30 (.x1(s1_18), .x2(s2_18), .y1(s1_173), .y2(s2_173), .z1(s1_179), .z2(s2_179));
  masked_and u_g31 (.x1(s1_180), .x2(s2_180), .y1(s1_174), .y2(s2_174), .z1(s1_181), .z2(s2_181));
  masked_or u_g32 (.x1(s1_179), .x2(s2_179), .y1(s1_181), .y2(s2_181), .z1(s1_26), .z2(s2_26));
  masked_and u_g33 (.x1(s1_22), .x2(s2_22), .y1(s1_111), .y2(s2_111), .z1(s1_182), .z2(s2_182));
  masked_and u_g34 (.x1(s1_22), .x2(s2_22), .y1(s1_173), .y2(s2_173), .z1(s1_183), .z2(s2_183));
  masked_and u_g35 (.x1(s1_184), .x2(s2_184), .y1(s1_174), .y2(s2_174), .z1(s1_185), .z2(s2_185));
  masked_or u_g36 (.x1(s1_183), .x2(s2_183), .y1(s1_185), .y2(s2_185), .z1(s1_30), .z2(s2_30));
  masked_and u_g37 (.x1(s1_21), .x2(s2_21), .y1(s1_111), .y2(s2_111), .z1(s1_186), .z2(s2_186));
  masked_and u_g38 (.x1(s1_21), .x2(s2_21), .y1(s1_173), .y2(s2_173), .z1(s1_187), .z2(s2_187));
  masked_and u_g39 (.x1(s1_188), .x2(s2_188), .y1(s1_174), .y2(s2_174), .z1(s1_189), .z2(s2_189));
  masked_or u_g40 (.x1(s1_187), .x2(s2_187), .y1(s1_189), .y2(s2_189), .z1(s1_29), .z2(s2_29));
  masked_or u_g41 (.x1(s1_110), .x2(s2_110), .y1(s1_136), .y2(s2_136), .z1(s1_190), .z2(s2_190));
  masked_and u_g42 (.x1(s1_129), .x2(s2_129), .y1(s1_190), .y2(s2_190), .z1(s1_191), .z2(s2_191));
  masked_or u_g43 (.x1(s1_112), .x2(s2_112), .y1(s1_191), .y2(s2_191), .z1(s1_6), .z2(s2_6));
  masked_and u_g44 (.x1(s1_128), .x2(s2_128), .y1(s1_162), .y2(s2_162), .z1(s1_192), .z2(s2_192));
  masked_or u_g45 (.x1(s1_112), .x2(s2_112), .y1(s1_192), .y2(s2_192), .z1(s1_5), .z2(s2_5));
  masked_and u_g46 (.x1(s1_128), .x2(s2_128), .y1(s1_190), .y2(s2_190), .z1(s1_193), .z2(s2_193));
  masked_or u_g47 (.x1(s1_112), .x2(s2_112), .y1(s1_193), .y2(s2_193), .z1(s1_4), .z2(s2_4));
  masked_and u_g48 (.x1(s1_24), .x2(s2_24), .y1(s1_111), .y2(s2_111), .z1(s1_194), .z2(s2_194));
  masked_and u_g49 (.x1(s1_24), .x2(s2_24), .y1(s1_173), .y2(s2_173), .z1(s1_195), .z2(s2_195));
  masked_and u_g50 (.x1(s1_196), .x2(s2_196), .y1(s1_174), .y2(s2_174), .z1(s1_197), .z2(s2_197));
  masked_or u_g51 (.x1(s1_195), .x2(s2_195), .y1(s1_197), .y2(s2_197), .z1(s1_32), .z2(s2_32));
  masked_and u_g52 (.x1(s1_169), .x2(s2_169), .y1(s1_174), .y2(s2_174), .z1(s1_198), .z2(s2_198));
  masked_or u_g53 (.x1(s1_176), .x2(s2_176), .y1(s1_198), .y2(s2_198), .z1(s1_33), .z2(s2_33));
  masked_and u_g54 (.x1(s1_20), .x2(s2_20), .y1(s1_111), .y2(s2_111), .z1(s1_199), .z2(s2_199));
  masked_and u_g55 (.x1(s1_20), .x2(s2_20), .y1(s1_173), .y2(s2_173), .z1(s1_200), .z2(s2_200));
  masked_and u_g56 (.x1(s1_201), .x2(s2_201), .y1(s1_174), .y2(s2_174), .z1(s1_202), .z2(s2_202));
  masked_or u_g57 (.x1(s1_200), .x2(s2_200), .y1(s1_202), .y2(s2_202), .z1(s1_28), .z2(s2_28));
  masked_and u_g58 (.x1(s1_196), .x2(s2_196), .y1(s1_168), .y2(s2_168), .z1(s1_203), .z2(s2_203));
  masked_and u_g59 (.x1(s1_112), .x2(s2_112), .y1(s1_204), .y2(s2_204), .z1(s1_205), .z2(s2_205));
  masked_or u_g60 (.x1(s1_195), .x2(s2_195), .y1(s1_203), .y2(s2_203), .z1(s1_206), .z2(s2_206));
  masked_or u_g61 (.x1(s1_205), .x2(s2_205), .y1(s1_206), .y2(s2_206), .z1(s1_48), .z2(s2_48));
  masked_and u_g62 (.x1(s1_207), .x2(s2_207), .y1(s1_168), .y2(s2_168), .z1(s1_208), .z2(s2_208));
  masked_and u_g63 (.x1(s1_112), .x2(s2_112), .y1(s1_209), .y2(s2_209), .z1(s1_210), .z2(s2_210));
  masked_and u_g64 (.x1(s1_23), .x2(s2_23), .y1(s1_111), .y2(s2_111), .z1(s1_211), .z2(s2_211));
  masked_and u_g65 (.x1(s1_23), .x2(s2_23), .y1(s1_173), .y2(s2_173), .z1(s1_212), .z2(s2_212));
  masked_or u_g66 (.x1(s1_208), .x2(s2_208), .y1(s1_210), .y2(s2_210), .z1(s1_213), .z2(s2_213));
  masked_or u_g67 (.x1(s1_212), .x2(s2_212), .y1(s1_213), .y2(s2_213), .z1(s1_47), .z2(s2_47));
  masked_and u_g68 (.x1(s1_184), .x2(s2_184), .y1(s1_168), .y2(s2_168), .z1(s1_214), .z2(s2_214));
  masked_and u_g69 (.x1(s1_112), .x2(s2_112), .y1(s1_215), .y2(s2_215), .z1(s1_216), .z2(s2_216));
  masked_or u_g70 (.x1(s1_183), .x2(s2_183), .y1(s1_214), .y2(s2_214), .z1(s1_217), .z2(s2_217));
  masked_or u_g71 (.x1(s1_216), .x2(s2_216), .y1(s1_217), .y2(s2_217), .z1(s1_46), .z2(s2_46));
  masked_and u_g72 (.x1(s1_188), .x2(s2_188), .y1(s1_168), .y2(s2_168), .z1(s1_218), .z2(s2_218));
  masked_and u_g73 (.x1(s1_219), .x2(s2_219), .y1(s1_112), .y2(s2_112), .z1(s1_220), .z2(s2_220));
  masked_or u_g74 (.x1(s1_187), .x2(s2_187), .y1(s1_218), .y2(s2_218), .z1(s1_221), .z2(s2_221));
  masked_or u_g75 (.x1(s1_220), .x2(s2_220), .y1(s1_221), .y2(s2_221), .z1(s1_45), .z2(s2_45));
  masked_and u_g76 (.x1(s1_201), .x2(s2_201), .y1(s1_168), .y2(s2_168), .z1(s1_222), .z2(s2_222));
  masked_and u_g77 (.x1(s1_223), .x2(s2_223), .y1(s1_112), .y2(s2_112), .z1(s1_224), .z2(s2_224));
  masked_or u_g78 (.x1(s1_200), .x2(s2_200), .y1(s1_222), .y2(s2_222), .z1(s1_225), .z2(s2_225));
  masked_or u_g79 (.x1(s1_224), .x2(s2_224), .y1(s1_225), .y2(s2_225), .z1(s1_44), .z2(s2_44));
  masked_and u_g80 (.x1(s1_226), .x2(s2_226), .y1(s1_168), .y2(s2_168), .z1(s1_227), .z2(s2_227));
  masked_and u_g81 (.x1(s1_228), .x2(s2_228), .y1(s1_112), .y2(s2_112), .z1(s1_229), .z2(s2_229));
  masked_and u_g82 (.x1(s1_19), .x2(s2_19), .y1(s1_111), .y2(s2_111), .z1(s1_230), .z2(s2_230));
  masked_and u_g83 (.x1(s1_19), .x2(s2_19), .y1(s1_173), .y2(s2_173), .z1(s1_231), .z2(s2_231));
  masked_or u_g84 (.x1(s1_227), .x2(s2_227), .y1(s1_231), .y2(s2_231), .z1(s1_232), .z2(s2_232));
  masked_or u_g85 (.x1(s1_229), .x2(s2_229), .y1(s1_232), .y2(s2_232), .z1(s1_43), .z2(s2_43));
  masked_and u_g86 (.x1(s1_180), .x2(s2_180), .y1(s1_168), .y2(s2_168), .z1(s1_233), .z2(s2_233));
  masked_and u_g87 (.x1(s1_234), .x2(s2_234), .y1(s1_112), .y2(s2_112), .z1(s1_235), .z2(s2_235));
  masked_or u_g88 (.x1(s1_179), .x2(s2_179), .y1(s1_233), .y2(s2_233), .z1(s1_236), .z2(s2_236));
  masked_or u_g89 (.x1(s1_235), .x2(s2_235), .y1(s1_236), .y2(s2_236), .z1(s1_42), .z2(s2_42));
  masked_and u_g90 (.x1(s1_237), .x2(s2_237), .y1(s1_112), .y2(s2_112), .z1(s1_238), .z2(s2_238));
  masked_or u_g91 (.x1(s1_175), .x2(s2_175), .y1(s1_238), .y2(s2_238), .z1(s1_41), .z2(s2_41));
  masked_and u_g92 (.x1(s1_239), .x2(s2_239), .y1(s1_112), .y2(s2_112), .z1(s1_240), .z2(s2_240));
  masked_or u_g93 (.x1(s1_194), .x2(s2_194), .y1(s1_240), .y2(s2_240), .z1(s1_40), .z2(s2_40));
  masked_and u_g94 (.x1(s1_241), .x2(s2_241), .y1(s1_112), .y2(s2_112), .z1(s1_242), .z2(s2_242));
  masked_or u_g95 (.x1(s1_211), .x2(s2_211), .y1(s1_242), .y2(s2_242), .z1(s1_39), .z2(s2_39));
  masked_and u_g96 (.x1(s1_243), .x2(s2_243), .y1(s1_112), .y2(s2_112), .z1(s1_244), .z2(s2_244));
  masked_or u_g97 (.x1(s1_199), .x2(s2_199), .y1(s1_244), .y2(s2_244), .z1(s1_36), .z2(s2_36));
  masked_and u_g98 (.x1(s1_245), .x2(s2_245), .y1(s1_112), .y2(s2_112), .z1(s1_246), .z2(s2_246));
  masked_or u_g99 (.x1(s1_230), .x2(s2_230), .y1(s1_246), .y2(s2_246), .z1(s1_35), .z2(s2_35));
  masked_and u_g100 (.x1(s1_247), .x2(s2_247), .y1(s1_112), .y2(s2_112), .z1(s1_248), .z2(s2_248));
  masked_or u_g101 (.x1(s1_178), .x2(s2_178), .y1(s1_248), .y2(s2_248), .z1(s1_34), .z2(s2_34));
  masked_and u_g102 (.x1(s1_249), .x2(s2_249), .y1(s1_112), .y2(s2_112), .z1(s1_250), .z2(s2_250));
  masked_or u_g103 (.x1(s1_182), .x2(s2_182), .y1(s1_250), .y2(s2_250), .z1(s1_38), .z2(s2_38));
  masked_and u_g104 (.x1(s1_251), .x2(s2_251), .y1(s1_112), .y2(s2_112), .z1(s1_252), .z2(s2_252));
  masked_or u_g105 (.x1(s1_186), .x2(s2_186), .y1(s1_252), .y2(s2_252), .z1(s1_37), .z2(s2_37));
  masked_and u_g106 (.x1(s1_118), .x2(s2_118), .y1(s1_120), .y2(s2_120), .z1(s1_253), .z2(s2_253));
  masked_or u_g107 (.x1(s1_119), .x2(s2_119), .y1(s1_121), .y2(s2_121), .z1(s1_254), .z2(s2_254));
  masked_and u_g108 (.x1(s1_122), .x2(s2_122), .y1(s1_253), .y2(s2_253), .z1(s1_255), .z2(s2_255));
  masked_or u_g109 (.x1(s1_123), .x2(s2_123), .y1(s1_254), .y2(s2_254), .z1(s1_256), .z2(s2_256));
  masked_and u_g110 (.x1(s1_257), .x2(s2_257), .y1(s1_255), .y2(s2_255), .z1(s1_258), .z2(s2_258));
  masked_and u_g111 (.x1(s1_259), .x2(s2_259), .y1(s1_256), .y2(s2_256), .z1(s1_260), .z2(s2_260));
  masked_or u_g112 (.x1(s1_258), .x2(s2_258), .y1(s1_260), .y2(s2_260), .z1(s1_16), .z2(s2_16));
  masked_and u_g113 (.x1(s1_261), .x2(s2_261), .y1(s1_255), .y2(s2_255), .z1(s1_262), .z2(s2_262));
  masked_and u_g114 (.x1(s1_263), .x2(s2_263), .y1(s1_256), .y2(s2_256), .z1(s1_264), .z2(s2_264));
  masked_or u_g115 (.x1(s1_262), .x2(s2_262), .y1(s1_264), .y2(s2_264), .z1(s1_15), .z2(s2_15));
  masked_and u_g116 (.x1(s1_265), .x2(s2_265), .y1(s1_255), .y2(s2_255), .z1(s1_266), .z2(s2_266));
  masked_and u_g117 (.x1(s1_267), .x2(s2_267), .y1(s1_256), .y2(s2_256), .z1(s1_268), .z2(s2_268));
  masked_or u_g118 (.x1(s1_266), .x2(s2_266), .y1(s1_268), .y2(s2_268), .z1(s1_14), .z2(s2_14));
  masked_and u_g119 (.x1(s1_269), .x2(s2_269), .y1(s1_255), .y2(s2_255), .z1(s1_270), .z2(s2_270));
  masked_and u_g120 (.x1(s1_271), .x2(s2_271), .y1(s1_256), .y2(s2_256), .z1(s1_272), .z2(s2_272));
  masked_or u_g121 (.x1(s1_270), .x2(s2_270), .y1(s1_272), .y2(s2_272), .z1(s1_13), .z2(s2_13));
  masked_and u_g122 (.x1(s1_273), .x2(s2_273), .y1(s1_255), .y2(s2_255), .z1(s1_274), .z2(s2_274));
  masked_and u_g123 (.x1(s1_275), .x2(s2_275), .y1(s1_256), .y2(s2_256), .z1(s1_276), .z2(s2_276));
  masked_or u_g124 (.x1(s1_274), .x2(s2_274), .y1(s1_276), .y2(s2_276), .z1(s1_12), .z2(s2_12));
  masked_and u_g125 (.x1(s1_277), .x2(s2_277), .y1(s1_255), .y2(s2_255), .z1(s1_278), .z2(s2_278));
  masked_and u_g126 (.x1(s1_279), .x2(s2_279), .y1(s1_256), .y2(s2_256), .z1(s1_280), .z2(s2_280));
  masked_or u_g127 (.x1(s1_278), .x2(s2_278), .y1(s1_280), .y2(s2_280), .z1(s1_11), .z2(s2_11));
  masked_and u_g128 (.x1(s1_281), .x2(s2_281), .y1(s1_255), .y2(s2_255), .z1(s1_282), .z2(s2_282));
  masked_and u_g129 (.x1(s1_283), .x2(s2_283), .y1(s1_256), .y2(s2_256), .z1(s1_284), .z2(s2_284));
  masked_or u_g130 (.x1(s1_282), .x2(s2_282), .y1(s1_284), .y2(s2_284), .z1(s1_10), .z2(s2_10));
  masked_and u_g131 (.x1(s1_285), .x2(s2_285), .y1(s1_255), .y2(s2_255), .z1(s1_286), .z2(s2_286));
  masked_and u_g132 (.x1(s1_287), .x2(s2_287), .y1(s1_256), .y2(s2_256), .z1(s1_288), .z2(s2_288));
  masked_or u_g133 (.x1(s1_286), .x2(s2_286), .y1(s1_288), .y2(s2_288), .z1(s1_9), .z2(s2_9));
  masked_and u_g134 (.x1(s1_289), .x2(s2_289), .y1(s1_255), .y2(s2_255), .z1(s1_290), .z2(s2_290));
  masked_and u_g135 (.x1(s1_291), .x2(s2_291), .y1(s1_256), .y2(s2_256), .z1(s1_292), .z2(s2_292));
  masked_or u_g136 (.x1(s1_290), .x2(s2_290), .y1(s1_292), .y2(s2_292), .z1(s1_8), .z2(s2_8));
  masked_and u_g137 (.x1(s1_117), .x2(s2_117), .y1(s1_155), .y2(s2_155), .z1(s1_293), .z2(s2_293));
  assign s1_294 = ~s1_293;
  assign s2_294 = s2_293;
  masked_and u_g138 (.x1(s1_151), .x2(s2_151), .y1(s1_294), .y2(s2_294), .z1(s1_295), .z2(s2_295));
  masked_or u_g139 (.x1(s1_150), .x2(s2_150), .y1(s1_293), .y2(s2_293), .z1(s1_296), .z2(s2_296));
  masked_and u_g140 (.x1(s1_243), .x2(s2_243), .y1(s1_154), .y2(s2_154), .z1(s1_297), .z2(s2_297));
  masked_and u_g141 (.x1(s1_298), .x2(s2_298), .y1(s1_155), .y2(s2_155), .z1(s1_299), .z2(s2_299));
  masked_or u_g142 (.x1(s1_297), .x2(s2_297), .y1(s1_299), .y2(s2_299), .z1(s1_300), .z2(s2_300));
  masked_and u_g143 (.x1(s1_295), .x2(s2_295), .y1(s1_300), .y2(s2_300), .z1(s1_301), .z2(s2_301));
  masked_and u_g144 (.x1(s1_237), .x2(s2_237), .y1(s1_154), .y2(s2_154), .z1(s1_302), .z2(s2_302));
  masked_and u_g145 (.x1(s1_303), .x2(s2_303), .y1(s1_155), .y2(s2_155), .z1(s1_304), .z2(s2_304));
  masked_or u_g146 (.x1(s1_302), .x2(s2_302), .y1(s1_304), .y2(s2_304), .z1(s1_305), .z2(s2_305));
  masked_and u_g147 (.x1(s1_296), .x2(s2_296), .y1(s1_305), .y2(s2_305), .z1(s1_306), .z2(s2_306));
  masked_or u_g148 (.x1(s1_301), .x2(s2_301), .y1(s1_306), .y2(s2_306), .z1(s1_90), .z2(s2_90));
  masked_and u_g149 (.x1(s1_245), .x2(s2_245), .y1(s1_154), .y2(s2_154), .z1(s1_307), .z2(s2_307));
  masked_and u_g150 (.x1(s1_308), .x2(s2_308), .y1(s1_155), .y2(s2_155), .z1(s1_309), .z2(s2_309));
  masked_or u_g151 (.x1(s1_307), .x2(s2_307), .y1(s1_309), .y2(s2_309), .z1(s1_310), .z2(s2_310));
  masked_and u_g152 (.x1(s1_295), .x2(s2_295), .y1(s1_310), .y2(s2_310), .z1(s1_311), .z2(s2_311));
  masked_and u_g153 (.x1(s1_239), .x2(s2_239), .y1(s1_154), .y2(s2_154), .z1(s1_312), .z2(s2_312));
  masked_and u_g154 (.x1(s1_313), .x2(s2_313), .y1(s1_155), .y2(s2_155), .z1(s1_314), .z2(s2_314));
  masked_or u_g155 (.x1(s1_312), .x2(s2_312), .y1(s1_314), .y2(s2_314), .z1(s1_315), .z2(s2_315));
  masked_and u_g156 (.x1(s1_296), .x2(s2_296), .y1(s1_315), .y2(s2_315), .z1(s1_316), .z2(s2_316));
  masked_or u_g157 (.x1(s1_311), .x2(s2_311), .y1(s1_316), .y2(s2_316), .z1(s1_89), .z2(s2_89));
  masked_and u_g158 (.x1(s1_247), .x2(s2_247), .y1(s1_154), .y2(s2_154), .z1(s1_317), .z2(s2_317));
  masked_and u_g159 (.x1(s1_318), .x2(s2_318), .y1(s1_155), .y2(s2_155), .z1(s1_319), .z2(s2_319));
  masked_or u_g160 (.x1(s1_317), .x2(s2_317), .y1(s1_319), .y2(s2_319), .z1(s1_320), .z2(s2_320));
  masked_and u_g161 (.x1(s1_295), .x2(s2_295), .y1(s1_320), .y2(s2_320), .z1(s1_321), .z2(s2_321));
  masked_and u_g162 (.x1(s1_241), .x2(s2_241), .y1(s1_154), .y2(s2_154), .z1(s1_322), .z2(s2_322));
  masked_and u_g163 (.x1(s1_323), .x2(s2_323), .y1(s1_155), .y2(s2_155), .z1(s1_324), .z2(s2_324));
  masked_or u_g164 (.x1(s1_322), .x2(s2_322), .y1(s1_324), .y2(s2_324), .z1(s1_325), .z2(s2_325));
  masked_and u_g165 (.x1(s1_296), .x2(s2_296), .y1(s1_325), .y2(s2_325), .z1(s1_326), .z2(s2_326));
  masked_or u_g166 (.x1(s1_321), .x2(s2_321), .y1(s1_326), .y2(s2_326), .z1(s1_88), .z2(s2_88));
  masked_and u_g167 (.x1(s1_169), .x2(s2_169), .y1(s1_154), .y2(s2_154), .z1(s1_327), .z2(s2_327));
  masked_and u_g168 (.x1(s1_328), .x2(s2_328), .y1(s1_155), .y2(s2_155), .z1(s1_329), .z2(s2_329));
  masked_or u_g169 (.x1(s1_327), .x2(s2_327), .y1(s1_329), .y2(s2_329), .z1(s1_330), .z2(s2_330));
  masked_and u_g170 (.x1(s1_295), .x2(s2_295), .y1(s1_330), .y2(s2_330), .z1(s1_331), .z2(s2_331));
  masked_and u_g171 (.x1(s1_249), .x2(s2_249), .y1(s1_154), .y2(s2_154), .z1(s1_332), .z2(s2_332));
  masked_and u_g172 (.x1(s1_333), .x2(s2_333), .y1(s1_155), .y2(s2_155), .z1(s1_334), .z2(s2_334));
  masked_or u_g173 (.x1(s1_332), .x2(s2_332), .y1(s1_334), .y2(s2_334), .z1(s1_335), .z2(s2_335));
  masked_and u_g174 (.x1(s1_296), .x2(s2_296), .y1(s1_335), .y2(s2_335), .z1(s1_336), .z2(s2_336));
  masked_or u_g175 (.x1(s1_331), .x2(s2_331), .y1(s1_336), .y2(s2_336), .z1(s1_87), .z2(s2_87));
  masked_and u_g176 (.x1(s1_226), .x2(s2_226), .y1(s1_174), .y2(s2_174), .z1(s1_337), .z2(s2_337));
  masked_or u_g177 (.x1(s1_231), .x2(s2_231), .y1(s1_337), .y2(s2_337), .z1(s1_27), .z2(s2_27));
  masked_and u_g178 (.x1(s1_207), .x2(s2_207), .y1(s1_174), .y2(s2_174), .z1(s1_338), .z2(s2_338));
  masked_or u_g179 (.x1(s1_212), .x2(s2_212), .y1(s1_338), .y2(s2_338), .z1(s1_31), .z2(s2_31));
  masked_and u_g180 (.x1(s1_123), .x2(s2_123), .y1(s1_148), .y2(s2_148), .z1(s1_339), .z2(s2_339));
  masked_or u_g181 (.x1(s1_122), .x2(s2_122), .y1(s1_149), .y2(s2_149), .z1(s1_340), .z2(s2_340));
  masked_and u_g182 (.x1(s1_95), .x2(s2_95), .y1(s1_117), .y2(s2_117), .z1(s1_341), .z2(s2_341));
  assign s1_342 = ~s1_341;
  assign s2_342 = s2_341;
  masked_and u_g183 (.x1(s1_96), .x2(s2_96), .y1(s1_341), .y2(s2_341), .z1(s1_343), .z2(s2_343));
  masked_and u_g184 (.x1(s1_158), .x2(s2_158), .y1(s1_341), .y2(s2_341), .z1(s1_344), .z2(s2_344));
  masked_or u_g185 (.x1(s1_159), .x2(s2_159), .y1(s1_342), .y2(s2_342), .z1(s1_345), .z2(s2_345));
  masked_and u_g186 (.x1(s1_98), .x2(s2_98), .y1(s1_344), .y2(s2_344), .z1(s1_346), .z2(s2_346));
  masked_or u_g187 (.x1(s1_106), .x2(s2_106), .y1(s1_345), .y2(s2_345), .z1(s1_347), .z2(s2_347));
  masked_and u_g188 (.x1(s1_339), .x2(s2_339), .y1(s1_347), .y2(s2_347), .z1(s1_348), .z2(s2_348));
  masked_and u_g189 (.x1(s1_126), .x2(s2_126), .y1(s1_132), .y2(s2_132), .z1(s1_349), .z2(s2_349));
  masked_and u_g190 (.x1(s1_130), .x2(s2_130), .y1(s1_349), .y2(s2_349), .z1(s1_350), .z2(s2_350));
  masked_and u_g191 (.x1(s1_124), .x2(s2_124), .y1(s1_350), .y2(s2_350), .z1(s1_351), .z2(s2_351));
  masked_and u_g192 (.x1(s1_134), .x2(s2_134), .y1(s1_351), .y2(s2_351), .z1(s1_352), .z2(s2_352));
  assign s1_353 = ~s1_352;
  assign s2_353 = s2_352;
  masked_or u_g193 (.x1(s1_145), .x2(s2_145), .y1(s1_147), .y2(s2_147), .z1(s1_354), .z2(s2_354));
  assign s1_355 = ~s1_354;
  assign s2_355 = s2_354;
  masked_and u_g194 (.x1(s1_138), .x2(s2_138), .y1(s1_141), .y2(s2_141), .z1(s1_356), .z2(s2_356));
  masked_or u_g195 (.x1(s1_139), .x2(s2_139), .y1(s1_140), .y2(s2_140), .z1(s1_357), .z2(s2_357));
  masked_and u_g196 (.x1(s1_355), .x2(s2_355), .y1(s1_356), .y2(s2_356), .z1(s1_358), .z2(s2_358));
  masked_and u_g197 (.x1(s1_168), .x2(s2_168), .y1(s1_358), .y2(s2_358), .z1(s1_359), .z2(s2_359));
  masked_and u_g198 (.x1(s1_353), .x2(s2_353), .y1(s1_359), .y2(s2_359), .z1(s1_360), .z2(s2_360));
  masked_and u_g199 (.x1(s1_115), .x2(s2_115), .y1(s1_339), .y2(s2_339), .z1(s1_361), .z2(s2_361));
  masked_and u_g200 (.x1(s1_360), .x2(s2_360), .y1(s1_361), .y2(s2_361), .z1(s1_362), .z2(s2_362));
  masked_or u_g201 (.x1(s1_114), .x2(s2_114), .y1(s1_352), .y2(s2_352), .z1(s1_363), .z2(s2_363));
  masked_or u_g202 (.x1(s1_348), .x2(s2_348), .y1(s1_362), .y2(s2_362), .z1(s1_364), .z2(s2_364));
  masked_and u_g203 (.x1(s1_123), .x2(s2_123), .y1(s1_253), .y2(s2_253), .z1(s1_365), .z2(s2_365));
  masked_or u_g204 (.x1(s1_122), .x2(s2_122), .y1(s1_254), .y2(s2_254), .z1(s1_366), .z2(s2_366));
  masked_or u_g205 (.x1(s1_346), .x2(s2_346), .y1(s1_366), .y2(s2_366), .z1(s1_367), .z2(s2_367));
  assign s1_368 = ~s1_367;
  assign s2_368 = s2_367;
  masked_and u_g206 (.x1(s1_112), .x2(s2_112), .y1(s1_115), .y2(s2_115), .z1(s1_369), .z2(s2_369));
  assign s1_370 = ~s1_369;
  assign s2_370 = s2_369;
  masked_and u_g207 (.x1(s1_174), .x2(s2_174), .y1(s1_370), .y2(s2_370), .z1(s1_371), .z2(s2_371));
  masked_or u_g208 (.x1(s1_173), .x2(s2_173), .y1(s1_369), .y2(s2_369), .z1(s1_372), .z2(s2_372));
  masked_and u_g209 (.x1(s1_358), .x2(s2_358), .y1(s1_371), .y2(s2_371), .z1(s1_373), .z2(s2_373));
  masked_and u_g210 (.x1(s1_139), .x2(s2_139), .y1(s1_143), .y2(s2_143), .z1(s1_374), .z2(s2_374));
  assign s1_375 = ~s1_374;
  assign s2_375 = s2_374;
  masked_and u_g211 (.x1(s1_140), .x2(s2_140), .y1(s1_374), .y2(s2_374), .z1(s1_376), .z2(s2_376));
  masked_or u_g212 (.x1(s1_141), .x2(s2_141), .y1(s1_375), .y2(s2_375), .z1(s1_377), .z2(s2_377));
  masked_and u_g213 (.x1(s1_355), .x2(s2_355), .y1(s1_376), .y2(s2_376), .z1(s1_378), .z2(s2_378));
  masked_or u_g214 (.x1(s1_354), .x2(s2_354), .y1(s1_377), .y2(s2_377), .z1(s1_379), .z2(s2_379));
  masked_and u_g215 (.x1(s1_116), .x2(s2_116), .y1(s1_380), .y2(s2_380), .z1(s1_381), .z2(s2_381));
  masked_and u_g216 (.x1(s1_117), .x2(s2_117), .y1(s1_382), .y2(s2_382), .z1(s1_383), .z2(s2_383));
  masked_or u_g217 (.x1(s1_381), .x2(s2_381), .y1(s1_383), .y2(s2_383), .z1(s1_384), .z2(s2_384));
  masked_or u_g218 (.x1(s1_308), .x2(s2_308), .y1(s1_298), .y2(s2_298), .z1(s1_385), .z2(s2_385));
  masked_or u_g219 (.x1(s1_328), .x2(s2_328), .y1(s1_386), .y2(s2_386), .z1(s1_387), .z2(s2_387));
  masked_or u_g220 (.x1(s1_318), .x2(s2_318), .y1(s1_387), .y2(s2_387), .z1(s1_388), .z2(s2_388));
  masked_or u_g221 (.x1(s1_385), .x2(s2_385), .y1(s1_388), .y2(s2_388), .z1(s1_389), .z2(s2_389));
  masked_and u_g222 (.x1(s1_384), .x2(s2_384), .y1(s1_389), .y2(s2_389), .z1(s1_390), .z2(s2_390));
  assign s1_391 = ~s1_390;
  assign s2_391 = s2_390;
  masked_and u_g223 (.x1(s1_138), .x2(s2_138), .y1(s1_140), .y2(s2_140), .z1(s1_392), .z2(s2_392));
  masked_or u_g224 (.x1(s1_139), .x2(s2_139), .y1(s1_141), .y2(s2_141), .z1(s1_393), .z2(s2_393));
  masked_and u_g225 (.x1(s1_355), .x2(s2_355), .y1(s1_392), .y2(s2_392), .z1(s1_394), .z2(s2_394));
  masked_or u_g226 (.x1(s1_354), .x2(s2_354), .y1(s1_393), .y2(s2_393), .z1(s1_395), .z2(s2_395));
  masked_and u_g227 (.x1(s1_143), .x2(s2_143), .y1(s1_394), .y2(s2_394), .z1(s1_396), .z2(s2_396));
  masked_or u_g228 (.x1(s1_142), .x2(s2_142), .y1(s1_395), .y2(s2_395), .z1(s1_397), .z2(s2_397));
  masked_or u_g229 (.x1(s1_96), .x2(s2_96), .y1(s1_341), .y2(s2_341), .z1(s1_398), .z2(s2_398));
  masked_and u_g230 (.x1(s1_97), .x2(s2_97), .y1(s1_398), .y2(s2_398), .z1(s1_399), .z2(s2_399));
  masked_and u_g231 (.x1(s1_106), .x2(s2_106), .y1(s1_113), .y2(s2_113), .z1(s1_400), .z2(s2_400));
  masked_or u_g232 (.x1(s1_98), .x2(s2_98), .y1(s1_97), .y2(s2_97), .z1(s1_401), .z2(s2_401));
  masked_or u_g233 (.x1(s1_98), .x2(s2_98), .y1(s1_399), .y2(s2_399), .z1(s1_402), .z2(s2_402));
  assign s1_403 = ~s1_402;
  assign s2_403 = s2_402;
  masked_and u_g234 (.x1(s1_404), .x2(s2_404), .y1(s1_402), .y2(s2_402), .z1(s1_405), .z2(s2_405));
  masked_or u_g235 (.x1(s1_98), .x2(s2_98), .y1(s1_158), .y2(s2_158), .z1(s1_406), .z2(s2_406));
  assign s1_407 = s1_98 ^ s1_158;
  assign s2_407 = s2_98 ^ s2_158;
  masked_and u_g236 (.x1(s1_108), .x2(s2_108), .y1(s1_116), .y2(s2_116), .z1(s1_408), .z2(s2_408));
  masked_or u_g237 (.x1(s1_95), .x2(s2_95), .y1(s1_117), .y2(s2_117), .z1(s1_409), .z2(s2_409));
  masked_and u_g238 (.x1(s1_318), .x2(s2_318), .y1(s1_408), .y2(s2_408), .z1(s1_410), .z2(s2_410));
  masked_and u_g239 (.x1(s1_386), .x2(s2_386), .y1(s1_341), .y2(s2_341), .z1(s1_411), .z2(s2_411));
  masked_or u_g240 (.x1(s1_410), .x2(s2_410), .y1(s1_411), .y2(s2_411), .z1(s1_412), .z2(s2_412));
  masked_and u_g241 (.x1(s1_108), .x2(s2_108), .y1(s1_117), .y2(s2_117), .z1(s1_413), .z2(s2_413));
  assign s1_414 = ~s1_413;
  assign s2_414 = s2_413;
  masked_and u_g242 (.x1(s1_308), .x2(s2_308), .y1(s1_413), .y2(s2_413), .z1(s1_415), .z2(s2_415));
  masked_and u_g243 (.x1(s1_95), .x2(s2_95), .y1(s1_116), .y2(s2_116), .z1(s1_416), .z2(s2_416));
  masked_and u_g244 (.x1(s1_298), .x2(s2_298), .y1(s1_416), .y2(s2_416), .z1(s1_417), .z2(s2_417));
  masked_or u_g245 (.x1(s1_415), .x2(s2_415), .y1(s1_417), .y2(s2_417), .z1(s1_418), .z2(s2_418));
  masked_or u_g246 (.x1(s1_412), .x2(s2_412), .y1(s1_418), .y2(s2_418), .z1(s1_419), .z2(s2_419));
  masked_and u_g247 (.x1(s1_158), .x2(s2_158), .y1(s1_419), .y2(s2_419), .z1(s1_420), .z2(s2_420));
  masked_and u_g248 (.x1(s1_323), .x2(s2_323), .y1(s1_413), .y2(s2_413), .z1(s1_421), .z2(s2_421));
  masked_and u_g249 (.x1(s1_313), .x2(s2_313), .y1(s1_416), .y2(s2_416), .z1(s1_422), .z2(s2_422));
  masked_or u_g250 (.x1(s1_421), .x2(s2_421), .y1(s1_422), .y2(s2_422), .z1(s1_423), .z2(s2_423));
  masked_and u_g251 (.x1(s1_333), .x2(s2_333), .y1(s1_408), .y2(s2_408), .z1(s1_424), .z2(s2_424));
  masked_and u_g252 (.x1(s1_303), .x2(s2_303), .y1(s1_341), .y2(s2_341), .z1(s1_425), .z2(s2_425));
  masked_or u_g253 (.x1(s1_424), .x2(s2_424), .y1(s1_425), .y2(s2_425), .z1(s1_426), .z2(s2_426));
  masked_or u_g254 (.x1(s1_423), .x2(s2_423), .y1(s1_426), .y2(s2_426), .z1(s1_427), .z2(s2_427));
  masked_and u_g255 (.x1(s1_164), .x2(s2_164), .y1(s1_427), .y2(s2_427), .z1(s1_428), .z2(s2_428));
  masked_and u_g256 (.x1(s1_96), .x2(s2_96), .y1(s1_113), .y2(s2_113), .z1(s1_429), .z2(s2_429));
  masked_and u_g257 (.x1(s1_430), .x2(s2_430), .y1(s1_408), .y2(s2_408), .z1(s1_431), .z2(s2_431));
  masked_and u_g258 (.x1(s1_432), .x2(s2_432), .y1(s1_341), .y2(s2_341), .z1(s1_433), .z2(s2_433));
  masked_or u_g259 (.x1(s1_431), .x2(s2_431), .y1(s1_433), .y2(s2_433), .z1(s1_434), .z2(s2_434));
  masked_and u_g260 (.x1(s1_435), .x2(s2_435), .y1(s1_413), .y2(s2_413), .z1(s1_436), .z2(s2_436));
  masked_and u_g261 (.x1(s1_437), .x2(s2_437), .y1(s1_416), .y2(s2_416), .z1(s1_438), .z2(s2_438));
  masked_or u_g262 (.x1(s1_436), .x2(s2_436), .y1(s1_438), .y2(s2_438), .z1(s1_439), .z2(s2_439));
  masked_or u_g263 (.x1(s1_434), .x2(s2_434), .y1(s1_439), .y2(s2_439), .z1(s1_440), .z2(s2_440));
  masked_and u_g264 (.x1(s1_429), .x2(s2_429), .y1(s1_440), .y2(s2_440), .z1(s1_441), .z2(s2_441));
  masked_or u_g265 (.x1(s1_428), .x2(s2_428), .y1(s1_441), .y2(s2_441), .z1(s1_442), .z2(s2_442));
  masked_and u_g266 (.x1(s1_107), .x2(s2_107), .y1(s1_97), .y2(s2_97), .z1(s1_443), .z2(s2_443));
  masked_and u_g267 (.x1(s1_444), .x2(s2_444), .y1(s1_408), .y2(s2_408), .z1(s1_445), .z2(s2_445));
  masked_and u_g268 (.x1(s1_446), .x2(s2_446), .y1(s1_416), .y2(s2_416), .z1(s1_447), .z2(s2_447));
  masked_or u_g269 (.x1(s1_445), .x2(s2_445), .y1(s1_447), .y2(s2_447), .z1(s1_448), .z2(s2_448));
  masked_and u_g270 (.x1(s1_449), .x2(s2_449), .y1(s1_413), .y2(s2_413), .z1(s1_450), .z2(s2_450));
  masked_and u_g271 (.x1(s1_404), .x2(s2_404), .y1(s1_341), .y2(s2_341), .z1(s1_451), .z2(s2_451));
  masked_or u_g272 (.x1(s1_450), .x2(s2_450), .y1(s1_451), .y2(s2_451), .z1(s1_452), .z2(s2_452));
  masked_or u_g273 (.x1(s1_448), .x2(s2_448), .y1(s1_452), .y2(s2_452), .z1(s1_453), .z2(s2_453));
  masked_and u_g274 (.x1(s1_443), .x2(s2_443), .y1(s1_453), .y2(s2_453), .z1(s1_454), .z2(s2_454));
  masked_or u_g275 (.x1(s1_420), .x2(s2_420), .y1(s1_454), .y2(s2_454), .z1(s1_455), .z2(s2_455));
  masked_or u_g276 (.x1(s1_407), .x2(s2_407), .y1(s1_455), .y2(s2_455), .z1(s1_456), .z2(s2_456));
  masked_or u_g277 (.x1(s1_442), .x2(s2_442), .y1(s1_456), .y2(s2_456), .z1(s1_457), .z2(s2_457));
  masked_and u_g278 (.x1(s1_143), .x2(s2_143), .y1(s1_413), .y2(s2_413), .z1(s1_458), .z2(s2_458));
  masked_and u_g279 (.x1(s1_139), .x2(s2_139), .y1(s1_416), .y2(s2_416), .z1(s1_459), .z2(s2_459));
  masked_or u_g280 (.x1(s1_458), .x2(s2_458), .y1(s1_459), .y2(s2_459), .z1(s1_460), .z2(s2_460));
  masked_and u_g281 (.x1(s1_141), .x2(s2_141), .y1(s1_408), .y2(s2_408), .z1(s1_461), .z2(s2_461));
  masked_and u_g282 (.x1(s1_99), .x2(s2_99), .y1(s1_341), .y2(s2_341), .z1(s1_462), .z2(s2_462));
  masked_or u_g283 (.x1(s1_461), .x2(s2_461), .y1(s1_462), .y2(s2_462), .z1(s1_463), .z2(s2_463));
  masked_or u_g284 (.x1(s1_460), .x2(s2_460), .y1(s1_463), .y2(s2_463), .z1(s1_464), .z2(s2_464));
  masked_and u_g285 (.x1(s1_112), .x2(s2_112), .y1(s1_413), .y2(s2_413), .z1(s1_465), .z2(s2_465));
  masked_and u_g286 (.x1(s1_115), .x2(s2_115), .y1(s1_416), .y2(s2_416), .z1(s1_466), .z2(s2_466));
  masked_or u_g287 (.x1(s1_465), .x2(s2_465), .y1(s1_466), .y2(s2_466), .z1(s1_467), .z2(s2_467));
  masked_and u_g288 (.x1(s1_110), .x2(s2_110), .y1(s1_408), .y2(s2_408), .z1(s1_468), .z2(s2_468));
  masked_and u_g289 (.x1(s1_328), .x2(s2_328), .y1(s1_341), .y2(s2_341), .z1(s1_469), .z2(s2_469));
  masked_or u_g290 (.x1(s1_468), .x2(s2_468), .y1(s1_469), .y2(s2_469), .z1(s1_470), .z2(s2_470));
  masked_or u_g291 (.x1(s1_467), .x2(s2_467), .y1(s1_470), .y2(s2_470), .z1(s1_471), .z2(s2_471));
  masked_and u_g292 (.x1(s1_101), .x2(s2_101), .y1(s1_413), .y2(s2_413), .z1(s1_472), .z2(s2_472));
  masked_and u_g293 (.x1(s1_103), .x2(s2_103), .y1(s1_341), .y2(s2_341), .z1(s1_473), .z2(s2_473));
  masked_or u_g294 (.x1(s1_472), .x2(s2_472), .y1(s1_473), .y2(s2_473), .z1(s1_474), .z2(s2_474));
  masked_and u_g295 (.x1(s1_100), .x2(s2_100), .y1(s1_408), .y2(s2_408), .z1(s1_475), .z2(s2_475));
  masked_and u_g296 (.x1(s1_102), .x2(s2_102), .y1(s1_416), .y2(s2_416), .z1(s1_476), .z2(s2_476));
  masked_or u_g297 (.x1(s1_475), .x2(s2_475), .y1(s1_476), .y2(s2_476), .z1(s1_477), .z2(s2_477));
  masked_or u_g298 (.x1(s1_474), .x2(s2_474), .y1(s1_477), .y2(s2_477), .z1(s1_478), .z2(s2_478));
  masked_and u_g299 (.x1(s1_145), .x2(s2_145), .y1(s1_416), .y2(s2_416), .z1(s1_479), .z2(s2_479));
  masked_and u_g300 (.x1(s1_147), .x2(s2_147), .y1(s1_341), .y2(s2_341), .z1(s1_480), .z2(s2_480));
  masked_or u_g301 (.x1(s1_479), .x2(s2_479), .y1(s1_480), .y2(s2_480), .z1(s1_481), .z2(s2_481));
  masked_and u_g302 (.x1(s1_482), .x2(s2_482), .y1(s1_408), .y2(s2_408), .z1(s1_483), .z2(s2_483));
  masked_and u_g303 (.x1(s1_484), .x2(s2_484), .y1(s1_413), .y2(s2_413), .z1(s1_485), .z2(s2_485));
  masked_or u_g304 (.x1(s1_483), .x2(s2_483), .y1(s1_485), .y2(s2_485), .z1(s1_486), .z2(s2_486));
  masked_or u_g305 (.x1(s1_481), .x2(s2_481), .y1(s1_486), .y2(s2_486), .z1(s1_487), .z2(s2_487));
  masked_and u_g306 (.x1(s1_403), .x2(s2_403), .y1(s1_457), .y2(s2_457), .z1(s1_488), .z2(s2_488));
  masked_or u_g307 (.x1(s1_405), .x2(s2_405), .y1(s1_488), .y2(s2_488), .z1(s1_489), .z2(s2_489));
  masked_and u_g308 (.x1(s1_96), .x2(s2_96), .y1(s1_409), .y2(s2_409), .z1(s1_490), .z2(s2_490));
  masked_or u_g309 (.x1(s1_401), .x2(s2_401), .y1(s1_490), .y2(s2_490), .z1(s1_491), .z2(s2_491));
  assign s1_492 = ~s1_491;
  assign s2_492 = s2_491;
  masked_and u_g310 (.x1(s1_489), .x2(s2_489), .y1(s1_491), .y2(s2_491), .z1(s1_493), .z2(s2_493));
  masked_and u_g311 (.x1(s1_107), .x2(s2_107), .y1(s1_408), .y2(s2_408), .z1(s1_494), .z2(s2_494));
  masked_or u_g312 (.x1(s1_96), .x2(s2_96), .y1(s1_409), .y2(s2_409), .z1(s1_495), .z2(s2_495));
  masked_and u_g313 (.x1(s1_97), .x2(s2_97), .y1(s1_495), .y2(s2_495), .z1(s1_496), .z2(s2_496));
  assign s1_497 = s1_97 ^ s1_495;
  assign s2_497 = s2_97 ^ s2_495;
  assign s1_498 = s1_113 ^ s1_495;
  assign s2_498 = s2_113 ^ s2_495;
  assign s1_499 = s1_96 ^ s1_409;
  assign s2_499 = s2_96 ^ s2_409;
  masked_or u_g314 (.x1(s1_490), .x2(s2_490), .y1(s1_494), .y2(s2_494), .z1(s1_500), .z2(s2_500));
  masked_and u_g315 (.x1(s1_110), .x2(s2_110), .y1(s1_413), .y2(s2_413), .z1(s1_501), .z2(s2_501));
  masked_and u_g316 (.x1(s1_115), .x2(s2_115), .y1(s1_341), .y2(s2_341), .z1(s1_502), .z2(s2_502));
  masked_or u_g317 (.x1(s1_501), .x2(s2_501), .y1(s1_502), .y2(s2_502), .z1(s1_503), .z2(s2_503));
  masked_and u_g318 (.x1(s1_112), .x2(s2_112), .y1(s1_416), .y2(s2_416), .z1(s1_504), .z2(s2_504));
  masked_and u_g319 (.x1(s1_328), .x2(s2_328), .y1(s1_408), .y2(s2_408), .z1(s1_505), .z2(s2_505));
  masked_or u_g320 (.x1(s1_504), .x2(s2_504), .y1(s1_505), .y2(s2_505), .z1(s1_506), .z2(s2_506));
  masked_or u_g321 (.x1(s1_503), .x2(s2_503), .y1(s1_506), .y2(s2_506), .z1(s1_507), .z2(s2_507));
  masked_or u_g322 (.x1(s1_499), .x2(s2_499), .y1(s1_507), .y2(s2_507), .z1(s1_508), .z2(s2_508));
  assign s1_509 = s1_98 ^ s1_496;
  assign s2_509 = s2_98 ^ s2_496;
  masked_and u_g323 (.x1(s1_103), .x2(s2_103), .y1(s1_408), .y2(s2_408), .z1(s1_510), .z2(s2_510));
  masked_and u_g324 (.x1(s1_100), .x2(s2_100), .y1(s1_413), .y2(s2_413), .z1(s1_511), .z2(s2_511));
  masked_and u_g325 (.x1(s1_101), .x2(s2_101), .y1(s1_416), .y2(s2_416), .z1(s1_512), .z2(s2_512));
  masked_and u_g326 (.x1(s1_102), .x2(s2_102), .y1(s1_341), .y2(s2_341), .z1(s1_513), .z2(s2_513));
  masked_or u_g327 (.x1(s1_511), .x2(s2_511), .y1(s1_513), .y2(s2_513), .z1(s1_514), .z2(s2_514));
  masked_or u_g328 (.x1(s1_510), .x2(s2_510), .y1(s1_512), .y2(s2_512), .z1(s1_515), .z2(s2_515));
  masked_or u_g329 (.x1(s1_514), .x2(s2_514), .y1(s1_515), .y2(s2_515), .z1(s1_516), .z2(s2_516));
  masked_or u_g330 (.x1(s1_500), .x2(s2_500), .y1(s1_516), .y2(s2_516), .z1(s1_517), .z2(s2_517));
  masked_and u_g331 (.x1(s1_147), .x2(s2_147), .y1(s1_408), .y2(s2_408), .z1(s1_518), .z2(s2_518));
  masked_and u_g332 (.x1(s1_145), .x2(s2_145), .y1(s1_341), .y2(s2_341), .z1(s1_519), .z2(s2_519));
  masked_or u_g333 (.x1(s1_518), .x2(s2_518), .y1(s1_519), .y2(s2_519), .z1(s1_520), .z2(s2_520));
  masked_and u_g334 (.x1(s1_482), .x2(s2_482), .y1(s1_413), .y2(s2_413), .z1(s1_521), .z2(s2_521));
  masked_and u_g335 (.x1(s1_484), .x2(s2_484), .y1(s1_416), .y2(s2_416), .z1(s1_522), .z2(s2_522));
  masked_or u_g336 (.x1(s1_521), .x2(s2_521), .y1(s1_522), .y2(s2_522), .z1(s1_523), .z2(s2_523));
  masked_or u_g337 (.x1(s1_520), .x2(s2_520), .y1(s1_523), .y2(s2_523), .z1(s1_524), .z2(s2_524));
  masked_or u_g338 (.x1(s1_500), .x2(s2_500), .y1(s1_524), .y2(s2_524), .z1(s1_525), .z2(s2_525));
  masked_and u_g339 (.x1(s1_141), .x2(s2_141), .y1(s1_413), .y2(s2_413), .z1(s1_526), .z2(s2_526));
  masked_and u_g340 (.x1(s1_139), .x2(s2_139), .y1(s1_341), .y2(s2_341), .z1(s1_527), .z2(s2_527));
  masked_and u_g341 (.x1(s1_143), .x2(s2_143), .y1(s1_416), .y2(s2_416), .z1(s1_528), .z2(s2_528));
  masked_or u_g342 (.x1(s1_526), .x2(s2_526), .y1(s1_527), .y2(s2_527), .z1(s1_529), .z2(s2_529));
  masked_and u_g343 (.x1(s1_99), .x2(s2_99), .y1(s1_408), .y2(s2_408), .z1(s1_530), .z2(s2_530));
  masked_or u_g344 (.x1(s1_528), .x2(s2_528), .y1(s1_530), .y2(s2_530), .z1(s1_531), .z2(s2_531));
  masked_or u_g345 (.x1(s1_529), .x2(s2_529), .y1(s1_531), .y2(s2_531), .z1(s1_532), .z2(s2_532));
  masked_or u_g346 (.x1(s1_499), .x2(s2_499), .y1(s1_532), .y2(s2_532), .z1(s1_533), .z2(s2_533));
  masked_and u_g347 (.x1(s1_498), .x2(s2_498), .y1(s1_533), .y2(s2_533), .z1(s1_534), .z2(s2_534));
  masked_and u_g348 (.x1(s1_525), .x2(s2_525), .y1(s1_534), .y2(s2_534), .z1(s1_535), .z2(s2_535));
  masked_and u_g349 (.x1(s1_497), .x2(s2_497), .y1(s1_517), .y2(s2_517), .z1(s1_536), .z2(s2_536));
  masked_and u_g350 (.x1(s1_508), .x2(s2_508), .y1(s1_536), .y2(s2_536), .z1(s1_537), .z2(s2_537));
  masked_or u_g351 (.x1(s1_535), .x2(s2_535), .y1(s1_537), .y2(s2_537), .z1(s1_538), .z2(s2_538));
  masked_or u_g352 (.x1(s1_509), .x2(s2_509), .y1(s1_538), .y2(s2_538), .z1(s1_539), .z2(s2_539));
  masked_and u_g353 (.x1(s1_492), .x2(s2_492), .y1(s1_539), .y2(s2_539), .z1(s1_540), .z2(s2_540));
  masked_or u_g354 (.x1(s1_493), .x2(s2_493), .y1(s1_540), .y2(s2_540), .z1(s1_541), .z2(s2_541));
  masked_and u_g355 (.x1(s1_396), .x2(s2_396), .y1(s1_541), .y2(s2_541), .z1(s1_542), .z2(s2_542));
  masked_and u_g356 (.x1(s1_145), .x2(s2_145), .y1(s1_376), .y2(s2_376), .z1(s1_543), .z2(s2_543));
  assign s1_544 = ~s1_543;
  assign s2_544 = s2_543;
  masked_and u_g357 (.x1(s1_147), .x2(s2_147), .y1(s1_543), .y2(s2_543), .z1(s1_545), .z2(s2_545));
  assign s1_546 = ~s1_545;
  assign s2_546 = s2_545;
  masked_and u_g358 (.x1(s1_489), .x2(s2_489), .y1(s1_546), .y2(s2_546), .z1(s1_547), .z2(s2_547));
  masked_and u_g359 (.x1(s1_98), .x2(s2_98), .y1(s1_165), .y2(s2_165), .z1(s1_548), .z2(s2_548));
  masked_or u_g360 (.x1(s1_106), .x2(s2_106), .y1(s1_164), .y2(s2_164), .z1(s1_549), .z2(s2_549));
  masked_and u_g361 (.x1(s1_429), .x2(s2_429), .y1(s1_464), .y2(s2_464), .z1(s1_550), .z2(s2_550));
  masked_and u_g362 (.x1(s1_158), .x2(s2_158), .y1(s1_471), .y2(s2_471), .z1(s1_551), .z2(s2_551));
  masked_and u_g363 (.x1(s1_164), .x2(s2_164), .y1(s1_487), .y2(s2_487), .z1(s1_552), .z2(s2_552));
  masked_and u_g364 (.x1(s1_443), .x2(s2_443), .y1(s1_478), .y2(s2_478), .z1(s1_553), .z2(s2_553));
  masked_or u_g365 (.x1(s1_550), .x2(s2_550), .y1(s1_552), .y2(s2_552), .z1(s1_554), .z2(s2_554));
  masked_or u_g366 (.x1(s1_551), .x2(s2_551), .y1(s1_553), .y2(s2_553), .z1(s1_555), .z2(s2_555));
  masked_or u_g367 (.x1(s1_98), .x2(s2_98), .y1(s1_555), .y2(s2_555), .z1(s1_556), .z2(s2_556));
  masked_or u_g368 (.x1(s1_554), .x2(s2_554), .y1(s1_556), .y2(s2_556), .z1(s1_557), .z2(s2_557));
  masked_and u_g369 (.x1(s1_158), .x2(s2_158), .y1(s1_453), .y2(s2_453), .z1(s1_558), .z2(s2_558));
  masked_and u_g370 (.x1(s1_427), .x2(s2_427), .y1(s1_429), .y2(s2_429), .z1(s1_559), .z2(s2_559));
  masked_and u_g371 (.x1(s1_440), .x2(s2_440), .y1(s1_443), .y2(s2_443), .z1(s1_560), .z2(s2_560));
  masked_and u_g372 (.x1(s1_164), .x2(s2_164), .y1(s1_419), .y2(s2_419), .z1(s1_561), .z2(s2_561));
  masked_or u_g373 (.x1(s1_559), .x2(s2_559), .y1(s1_560), .y2(s2_560), .z1(s1_562), .z2(s2_562));
  masked_or u_g374 (.x1(s1_558), .x2(s2_558), .y1(s1_561), .y2(s2_561), .z1(s1_563), .z2(s2_563));
  masked_or u_g375 (.x1(s1_562), .x2(s2_562), .y1(s1_563), .y2(s2_563), .z1(s1_564), .z2(s2_564));
  masked_or u_g376 (.x1(s1_106), .x2(s2_106), .y1(s1_564), .y2(s2_564), .z1(s1_565), .z2(s2_565));
  masked_and u_g377 (.x1(s1_557), .x2(s2_557), .y1(s1_565), .y2(s2_565), .z1(s1_566), .z2(s2_566));
  masked_and u_g378 (.x1(s1_549), .x2(s2_549), .y1(s1_566), .y2(s2_566), .z1(s1_567), .z2(s2_567));
  masked_and u_g379 (.x1(s1_341), .x2(s2_341), .y1(s1_443), .y2(s2_443), .z1(s1_568), .z2(s2_568));
  assign s1_569 = ~s1_568;
  assign s2_569 = s2_568;
  masked_and u_g380 (.x1(s1_106), .x2(s2_106), .y1(s1_568), .y2(s2_568), .z1(s1_570), .z2(s2_570));
  masked_or u_g381 (.x1(s1_98), .x2(s2_98), .y1(s1_569), .y2(s2_569), .z1(s1_571), .z2(s2_571));
  masked_and u_g382 (.x1(s1_404), .x2(s2_404), .y1(s1_548), .y2(s2_548), .z1(s1_572), .z2(s2_572));
  masked_or u_g383 (.x1(s1_570), .x2(s2_570), .y1(s1_572), .y2(s2_572), .z1(s1_573), .z2(s2_573));
  masked_or u_g384 (.x1(s1_567), .x2(s2_567), .y1(s1_573), .y2(s2_573), .z1(s1_574), .z2(s2_574));
  masked_or u_g385 (.x1(s1_333), .x2(s2_333), .y1(s1_571), .y2(s2_571), .z1(s1_575), .z2(s2_575));
  masked_and u_g386 (.x1(s1_402), .x2(s2_402), .y1(s1_575), .y2(s2_575), .z1(s1_576), .z2(s2_576));
  masked_and u_g387 (.x1(s1_574), .x2(s2_574), .y1(s1_576), .y2(s2_576), .z1(s1_577), .z2(s2_577));
  masked_or u_g388 (.x1(s1_488), .x2(s2_488), .y1(s1_577), .y2(s2_577), .z1(s1_578), .z2(s2_578));
  masked_or u_g389 (.x1(s1_401), .x2(s2_401), .y1(s1_495), .y2(s2_495), .z1(s1_579), .z2(s2_579));
  assign s1_580 = ~s1_579;
  assign s2_580 = s2_579;
  masked_and u_g390 (.x1(s1_545), .x2(s2_545), .y1(s1_579), .y2(s2_579), .z1(s1_581), .z2(s2_581));
  masked_and u_g391 (.x1(s1_578), .x2(s2_578), .y1(s1_581), .y2(s2_581), .z1(s1_582), .z2(s2_582));
  masked_or u_g392 (.x1(s1_547), .x2(s2_547), .y1(s1_582), .y2(s2_582), .z1(s1_583), .z2(s2_583));
  masked_and u_g393 (.x1(s1_145), .x2(s2_145), .y1(s1_146), .y2(s2_146), .z1(s1_584), .z2(s2_584));
  masked_or u_g394 (.x1(s1_144), .x2(s2_144), .y1(s1_147), .y2(s2_147), .z1(s1_585), .z2(s2_585));
  masked_and u_g395 (.x1(s1_356), .x2(s2_356), .y1(s1_584), .y2(s2_584), .z1(s1_586), .z2(s2_586));
  masked_or u_g396 (.x1(s1_357), .x2(s2_357), .y1(s1_585), .y2(s2_585), .z1(s1_587), .z2(s2_587));
  masked_and u_g397 (.x1(s1_583), .x2(s2_583), .y1(s1_587), .y2(s2_587), .z1(s1_588), .z2(s2_588));
  masked_and u_g398 (.x1(s1_406), .x2(s2_406), .y1(s1_586), .y2(s2_586), .z1(s1_589), .z2(s2_589));
  masked_and u_g399 (.x1(s1_566), .x2(s2_566), .y1(s1_589), .y2(s2_589), .z1(s1_590), .z2(s2_590));
  masked_or u_g400 (.x1(s1_378), .x2(s2_378), .y1(s1_590), .y2(s2_590), .z1(s1_591), .z2(s2_591));
  masked_or u_g401 (.x1(s1_588), .x2(s2_588), .y1(s1_591), .y2(s2_591), .z1(s1_592), .z2(s2_592));
  masked_or u_g402 (.x1(s1_99), .x2(s2_99), .y1(s1_571), .y2(s2_571), .z1(s1_593), .z2(s2_593));
  masked_or u_g403 (.x1(s1_404), .x2(s2_404), .y1(s1_570), .y2(s2_570), .z1(s1_594), .z2(s2_594));
  masked_and u_g404 (.x1(s1_402), .x2(s2_402), .y1(s1_594), .y2(s2_594), .z1(s1_595), .z2(s2_595));
  masked_and u_g405 (.x1(s1_593), .x2(s2_593), .y1(s1_595), .y2(s2_595), .z1(s1_596), .z2(s2_596));
  masked_or u_g406 (.x1(s1_488), .x2(s2_488), .y1(s1_596), .y2(s2_596), .z1(s1_597), .z2(s2_597));
  masked_and u_g407 (.x1(s1_491), .x2(s2_491), .y1(s1_597), .y2(s2_597), .z1(s1_598), .z2(s2_598));
  masked_or u_g408 (.x1(s1_540), .x2(s2_540), .y1(s1_598), .y2(s2_598), .z1(s1_599), .z2(s2_599));
  masked_and u_g409 (.x1(s1_579), .x2(s2_579), .y1(s1_599), .y2(s2_599), .z1(s1_600), .z2(s2_600));
  masked_or u_g410 (.x1(s1_379), .x2(s2_379), .y1(s1_600), .y2(s2_600), .z1(s1_601), .z2(s2_601));
  masked_and u_g411 (.x1(s1_397), .x2(s2_397), .y1(s1_601), .y2(s2_601), .z1(s1_602), .z2(s2_602));
  masked_and u_g412 (.x1(s1_592), .x2(s2_592), .y1(s1_602), .y2(s2_602), .z1(s1_603), .z2(s2_603));
  masked_or u_g413 (.x1(s1_542), .x2(s2_542), .y1(s1_603), .y2(s2_603), .z1(s1_604), .z2(s2_604));
  masked_and u_g414 (.x1(s1_143), .x2(s2_143), .y1(s1_358), .y2(s2_358), .z1(s1_605), .z2(s2_605));
  masked_or u_g415 (.x1(s1_378), .x2(s2_378), .y1(s1_605), .y2(s2_605), .z1(s1_606), .z2(s2_606));
  assign s1_607 = ~s1_606;
  assign s2_607 = s2_606;
  masked_and u_g416 (.x1(s1_604), .x2(s2_604), .y1(s1_607), .y2(s2_607), .z1(s1_608), .z2(s2_608));
  masked_and u_g417 (.x1(s1_116), .x2(s2_116), .y1(s1_92), .y2(s2_92), .z1(s1_609), .z2(s2_609));
  masked_and u_g418 (.x1(s1_117), .x2(s2_117), .y1(s1_610), .y2(s2_610), .z1(s1_611), .z2(s2_611));
  masked_or u_g419 (.x1(s1_609), .x2(s2_609), .y1(s1_611), .y2(s2_611), .z1(s1_612), .z2(s2_612));
  masked_or u_g420 (.x1(s1_313), .x2(s2_313), .y1(s1_303), .y2(s2_303), .z1(s1_613), .z2(s2_613));
  masked_or u_g421 (.x1(s1_333), .x2(s2_333), .y1(s1_430), .y2(s2_430), .z1(s1_614), .z2(s2_614));
  masked_or u_g422 (.x1(s1_323), .x2(s2_323), .y1(s1_614), .y2(s2_614), .z1(s1_615), .z2(s2_615));
  masked_or u_g423 (.x1(s1_613), .x2(s2_613), .y1(s1_615), .y2(s2_615), .z1(s1_616), .z2(s2_616));
  masked_and u_g424 (.x1(s1_612), .x2(s2_612), .y1(s1_616), .y2(s2_616), .z1(s1_617), .z2(s2_617));
  masked_and u_g425 (.x1(s1_606), .x2(s2_606), .y1(s1_617), .y2(s2_617), .z1(s1_618), .z2(s2_618));
  masked_or u_g426 (.x1(s1_608), .x2(s2_608), .y1(s1_618), .y2(s2_618), .z1(s1_619), .z2(s2_619));
  masked_and u_g427 (.x1(s1_390), .x2(s2_390), .y1(s1_619), .y2(s2_619), .z1(s1_620), .z2(s2_620));
  masked_or u_g428 (.x1(s1_390), .x2(s2_390), .y1(s1_619), .y2(s2_619), .z1(s1_621), .z2(s2_621));
  assign s1_622 = s1_390 ^ s1_619;
  assign s2_622 = s2_390 ^ s2_619;
  assign s1_623 = ~s1_622;
  assign s2_623 = s2_622;
  masked_or u_g429 (.x1(s1_624), .x2(s2_624), .y1(s1_622), .y2(s2_622), .z1(s1_625), .z2(s2_625));
  masked_or u_g430 (.x1(s1_112), .x2(s2_112), .y1(s1_115), .y2(s2_115), .z1(s1_626), .z2(s2_626));
  assign s1_627 = s1_110 ^ s1_625;
  assign s2_627 = s2_110 ^ s2_625;
  masked_or u_g431 (.x1(s1_626), .x2(s2_626), .y1(s1_627), .y2(s2_627), .z1(s1_628), .z2(s2_628));
  assign s1_629 = ~s1_628;
  assign s2_629 = s2_628;
  masked_or u_g432 (.x1(s1_115), .x2(s2_115), .y1(s1_174), .y2(s2_174), .z1(s1_630), .z2(s2_630));
  assign s1_631 = ~s1_630;
  assign s2_631 = s2_630;
  masked_and u_g433 (.x1(s1_446), .x2(s2_446), .y1(s1_631), .y2(s2_631), .z1(s1_632), .z2(s2_632));
  masked_and u_g434 (.x1(s1_605), .x2(s2_605), .y1(s1_632), .y2(s2_632), .z1(s1_633), .z2(s2_633));
  masked_and u_g435 (.x1(s1_112), .x2(s2_112), .y1(s1_114), .y2(s2_114), .z1(s1_634), .z2(s2_634));
  masked_and u_g436 (.x1(s1_358), .x2(s2_358), .y1(s1_634), .y2(s2_634), .z1(s1_635), .z2(s2_635));
  masked_or u_g437 (.x1(s1_378), .x2(s2_378), .y1(s1_635), .y2(s2_635), .z1(s1_636), .z2(s2_636));
  masked_or u_g438 (.x1(s1_633), .x2(s2_633), .y1(s1_636), .y2(s2_636), .z1(s1_637), .z2(s2_637));
  assign s1_638 = s1_619 ^ s1_637;
  assign s2_638 = s2_619 ^ s2_637;
  masked_and u_g439 (.x1(s1_390), .x2(s2_390), .y1(s1_638), .y2(s2_638), .z1(s1_639), .z2(s2_639));
  assign s1_640 = ~s1_639;
  assign s2_640 = s2_639;
  assign s1_641 = s1_390 ^ s1_638;
  assign s2_641 = s2_390 ^ s2_638;
  assign s1_642 = s1_391 ^ s1_638;
  assign s2_642 = s2_391 ^ s2_638;
  masked_and u_g440 (.x1(s1_643), .x2(s2_643), .y1(s1_579), .y2(s2_579), .z1(s1_644), .z2(s2_644));
  masked_and u_g441 (.x1(s1_580), .x2(s2_580), .y1(s1_637), .y2(s2_637), .z1(s1_645), .z2(s2_645));
  masked_or u_g442 (.x1(s1_644), .x2(s2_644), .y1(s1_645), .y2(s2_645), .z1(s1_646), .z2(s2_646));
  assign s1_647 = ~s1_646;
  assign s2_647 = s2_646;
  masked_and u_g443 (.x1(s1_641), .x2(s2_641), .y1(s1_646), .y2(s2_646), .z1(s1_648), .z2(s2_648));
  masked_or u_g444 (.x1(s1_642), .x2(s2_642), .y1(s1_647), .y2(s2_647), .z1(s1_649), .z2(s2_649));
  masked_and u_g445 (.x1(s1_640), .x2(s2_640), .y1(s1_649), .y2(s2_649), .z1(s1_650), .z2(s2_650));
  masked_or u_g446 (.x1(s1_639), .x2(s2_639), .y1(s1_648), .y2(s2_648), .z1(s1_651), .z2(s2_651));
  masked_and u_g447 (.x1(s1_112), .x2(s2_112), .y1(s1_378), .y2(s2_378), .z1(s1_652), .z2(s2_652));
  masked_and u_g448 (.x1(s1_110), .x2(s2_110), .y1(s1_379), .y2(s2_379), .z1(s1_653), .z2(s2_653));
  masked_or u_g449 (.x1(s1_652), .x2(s2_652), .y1(s1_653), .y2(s2_653), .z1(s1_654), .z2(s2_654));
  assign s1_655 = ~s1_654;
  assign s2_655 = s2_654;
  masked_and u_g450 (.x1(s1_622), .x2(s2_622), .y1(s1_655), .y2(s2_655), .z1(s1_656), .z2(s2_656));
  masked_or u_g451 (.x1(s1_623), .x2(s2_623), .y1(s1_654), .y2(s2_654), .z1(s1_657), .z2(s2_657));
  masked_and u_g452 (.x1(s1_650), .x2(s2_650), .y1(s1_657), .y2(s2_657), .z1(s1_658), .z2(s2_658));
  masked_or u_g453 (.x1(s1_651), .x2(s2_651), .y1(s1_656), .y2(s2_656), .z1(s1_659), .z2(s2_659));
  masked_or u_g454 (.x1(s1_619), .x2(s2_619), .y1(s1_654), .y2(s2_654), .z1(s1_660), .z2(s2_660));
  assign s1_661 = ~s1_660;
  assign s2_661 = s2_660;
  masked_and u_g455 (.x1(s1_390), .x2(s2_390), .y1(s1_661), .y2(s2_661), .z1(s1_662), .z2(s2_662));
  masked_or u_g456 (.x1(s1_391), .x2(s2_391), .y1(s1_660), .y2(s2_660), .z1(s1_663), .z2(s2_663));
  masked_and u_g457 (.x1(s1_659), .x2(s2_659), .y1(s1_663), .y2(s2_663), .z1(s1_664), .z2(s2_664));
  masked_or u_g458 (.x1(s1_658), .x2(s2_658), .y1(s1_662), .y2(s2_662), .z1(s1_665), .z2(s2_665));
  masked_and u_g459 (.x1(s1_115), .x2(s2_115), .y1(s1_173), .y2(s2_173), .z1(s1_666), .z2(s2_666));
  masked_or u_g460 (.x1(s1_110), .x2(s2_110), .y1(s1_114), .y2(s2_114), .z1(s1_667), .z2(s2_667));
  masked_and u_g461 (.x1(s1_109), .x2(s2_109), .y1(s1_115), .y2(s2_115), .z1(s1_668), .z2(s2_668));
  masked_or u_g462 (.x1(s1_664), .x2(s2_664), .y1(s1_668), .y2(s2_668), .z1(s1_669), .z2(s2_669));
  masked_and u_g463 (.x1(s1_626), .x2(s2_626), .y1(s1_667), .y2(s2_667), .z1(s1_670), .z2(s2_670));
  masked_or u_g464 (.x1(s1_665), .x2(s2_665), .y1(s1_670), .y2(s2_670), .z1(s1_671), .z2(s2_671));
  masked_and u_g465 (.x1(s1_669), .x2(s2_669), .y1(s1_671), .y2(s2_671), .z1(s1_672), .z2(s2_672));
  masked_or u_g466 (.x1(s1_629), .x2(s2_629), .y1(s1_672), .y2(s2_672), .z1(s1_673), .z2(s2_673));
  masked_and u_g467 (.x1(s1_378), .x2(s2_378), .y1(s1_673), .y2(s2_673), .z1(s1_674), .z2(s2_674));
  masked_or u_g468 (.x1(s1_373), .x2(s2_373), .y1(s1_674), .y2(s2_674), .z1(s1_675), .z2(s2_675));
  masked_and u_g469 (.x1(s1_365), .x2(s2_365), .y1(s1_675), .y2(s2_675), .z1(s1_676), .z2(s2_676));
  masked_and u_g470 (.x1(s1_118), .x2(s2_118), .y1(s1_121), .y2(s2_121), .z1(s1_677), .z2(s2_677));
  masked_and u_g471 (.x1(s1_123), .x2(s2_123), .y1(s1_677), .y2(s2_677), .z1(s1_678), .z2(s2_678));
  masked_and u_g472 (.x1(s1_397), .x2(s2_397), .y1(s1_678), .y2(s2_678), .z1(s1_679), .z2(s2_679));
  masked_and u_g473 (.x1(s1_122), .x2(s2_122), .y1(s1_677), .y2(s2_677), .z1(s1_680), .z2(s2_680));
  masked_or u_g474 (.x1(s1_152), .x2(s2_152), .y1(s1_680), .y2(s2_680), .z1(s1_681), .z2(s2_681));
  masked_or u_g475 (.x1(s1_679), .x2(s2_679), .y1(s1_681), .y2(s2_681), .z1(s1_682), .z2(s2_682));
  masked_or u_g476 (.x1(s1_676), .x2(s2_676), .y1(s1_682), .y2(s2_682), .z1(s1_683), .z2(s2_683));
  masked_and u_g477 (.x1(s1_367), .x2(s2_367), .y1(s1_683), .y2(s2_683), .z1(s1_684), .z2(s2_684));
  masked_or u_g478 (.x1(s1_364), .x2(s2_364), .y1(s1_684), .y2(s2_684), .z1(s1_685), .z2(s2_685));
  masked_and u_g479 (.x1(s1_365), .x2(s2_365), .y1(s1_394), .y2(s2_394), .z1(s1_686), .z2(s2_686));
  masked_or u_g480 (.x1(s1_676), .x2(s2_676), .y1(s1_686), .y2(s2_686), .z1(s1_687), .z2(s2_687));
  masked_or u_g481 (.x1(s1_152), .x2(s2_152), .y1(s1_255), .y2(s2_255), .z1(s1_688), .z2(s2_688));
  masked_or u_g482 (.x1(s1_687), .x2(s2_687), .y1(s1_688), .y2(s2_688), .z1(s1_689), .z2(s2_689));
  masked_and u_g483 (.x1(s1_367), .x2(s2_367), .y1(s1_689), .y2(s2_689), .z1(s1_690), .z2(s2_690));
  masked_or u_g484 (.x1(s1_364), .x2(s2_364), .y1(s1_690), .y2(s2_690), .z1(s1_691), .z2(s2_691));
  masked_and u_g485 (.x1(s1_151), .x2(s2_151), .y1(s1_366), .y2(s2_366), .z1(s1_692), .z2(s2_692));
  assign s1_693 = ~s1_692;
  assign s2_693 = s2_692;
  masked_or u_g486 (.x1(s1_148), .x2(s2_148), .y1(s1_365), .y2(s2_365), .z1(s1_694), .z2(s2_694));
  assign s1_695 = ~s1_694;
  assign s2_695 = s2_694;
  masked_or u_g487 (.x1(s1_362), .x2(s2_362), .y1(s1_695), .y2(s2_695), .z1(s1_696), .z2(s2_696));
  assign s1_697 = ~s1_696;
  assign s2_697 = s2_696;
  masked_and u_g488 (.x1(s1_343), .x2(s2_343), .y1(s1_697), .y2(s2_697), .z1(s1_698), .z2(s2_698));
  masked_or u_g489 (.x1(s1_97), .x2(s2_97), .y1(s1_698), .y2(s2_698), .z1(s1_699), .z2(s2_699));
  masked_or u_g490 (.x1(s1_122), .x2(s2_122), .y1(s1_677), .y2(s2_677), .z1(s1_700), .z2(s2_700));
  assign s1_701 = ~s1_700;
  assign s2_701 = s2_700;
  masked_and u_g491 (.x1(s1_153), .x2(s2_153), .y1(s1_701), .y2(s2_701), .z1(s1_702), .z2(s2_702));
  masked_or u_g492 (.x1(s1_152), .x2(s2_152), .y1(s1_700), .y2(s2_700), .z1(s1_703), .z2(s2_703));
  masked_and u_g493 (.x1(s1_345), .x2(s2_345), .y1(s1_702), .y2(s2_702), .z1(s1_704), .z2(s2_704));
  masked_or u_g494 (.x1(s1_696), .x2(s2_696), .y1(s1_704), .y2(s2_704), .z1(s1_705), .z2(s2_705));
  masked_and u_g495 (.x1(s1_699), .x2(s2_699), .y1(s1_705), .y2(s2_705), .z1(s1_706), .z2(s2_706));
  masked_and u_g496 (.x1(s1_96), .x2(s2_96), .y1(s1_696), .y2(s2_696), .z1(s1_707), .z2(s2_707));
  masked_and u_g497 (.x1(s1_697), .x2(s2_697), .y1(s1_702), .y2(s2_702), .z1(s1_708), .z2(s2_708));
  assign s1_709 = s1_96 ^ s1_341;
  assign s2_709 = s2_96 ^ s2_341;
  masked_and u_g498 (.x1(s1_708), .x2(s2_708), .y1(s1_709), .y2(s2_709), .z1(s1_710), .z2(s2_710));
  masked_or u_g499 (.x1(s1_707), .x2(s2_707), .y1(s1_710), .y2(s2_710), .z1(s1_711), .z2(s2_711));
  masked_and u_g500 (.x1(s1_95), .x2(s2_95), .y1(s1_696), .y2(s2_696), .z1(s1_712), .z2(s2_712));
  masked_or u_g501 (.x1(s1_413), .x2(s2_413), .y1(s1_416), .y2(s2_416), .z1(s1_713), .z2(s2_713));
  masked_and u_g502 (.x1(s1_708), .x2(s2_708), .y1(s1_713), .y2(s2_713), .z1(s1_714), .z2(s2_714));
  masked_or u_g503 (.x1(s1_712), .x2(s2_712), .y1(s1_714), .y2(s2_714), .z1(s1_715), .z2(s2_715));
  masked_and u_g504 (.x1(s1_117), .x2(s2_117), .y1(s1_696), .y2(s2_696), .z1(s1_716), .z2(s2_716));
  masked_and u_g505 (.x1(s1_116), .x2(s2_116), .y1(s1_708), .y2(s2_708), .z1(s1_717), .z2(s2_717));
  masked_or u_g506 (.x1(s1_716), .x2(s2_716), .y1(s1_717), .y2(s2_717), .z1(s1_718), .z2(s2_718));
  masked_and u_g507 (.x1(s1_339), .x2(s2_339), .y1(s1_379), .y2(s2_379), .z1(s1_719), .z2(s2_719));
  masked_or u_g508 (.x1(s1_340), .x2(s2_340), .y1(s1_378), .y2(s2_378), .z1(s1_720), .z2(s2_720));
  masked_and u_g509 (.x1(s1_702), .x2(s2_702), .y1(s1_720), .y2(s2_720), .z1(s1_721), .z2(s2_721));
  masked_or u_g510 (.x1(s1_703), .x2(s2_703), .y1(s1_719), .y2(s2_719), .z1(s1_722), .z2(s2_722));
  masked_and u_g511 (.x1(s1_723), .x2(s2_723), .y1(s1_721), .y2(s2_721), .z1(s1_724), .z2(s2_724));
  masked_and u_g512 (.x1(s1_725), .x2(s2_725), .y1(s1_722), .y2(s2_722), .z1(s1_726), .z2(s2_726));
  masked_or u_g513 (.x1(s1_724), .x2(s2_724), .y1(s1_726), .y2(s2_726), .z1(s1_727), .z2(s2_727));
  masked_and u_g514 (.x1(s1_725), .x2(s2_725), .y1(s1_721), .y2(s2_721), .z1(s1_728), .z2(s2_728));
  masked_and u_g515 (.x1(s1_729), .x2(s2_729), .y1(s1_722), .y2(s2_722), .z1(s1_730), .z2(s2_730));
  masked_or u_g516 (.x1(s1_728), .x2(s2_728), .y1(s1_730), .y2(s2_730), .z1(s1_731), .z2(s2_731));
  masked_and u_g517 (.x1(s1_729), .x2(s2_729), .y1(s1_721), .y2(s2_721), .z1(s1_732), .z2(s2_732));
  masked_and u_g518 (.x1(s1_733), .x2(s2_733), .y1(s1_722), .y2(s2_722), .z1(s1_734), .z2(s2_734));
  masked_or u_g519 (.x1(s1_732), .x2(s2_732), .y1(s1_734), .y2(s2_734), .z1(s1_735), .z2(s2_735));
  masked_and u_g520 (.x1(s1_733), .x2(s2_733), .y1(s1_721), .y2(s2_721), .z1(s1_736), .z2(s2_736));
  masked_and u_g521 (.x1(s1_737), .x2(s2_737), .y1(s1_722), .y2(s2_722), .z1(s1_738), .z2(s2_738));
  masked_or u_g522 (.x1(s1_736), .x2(s2_736), .y1(s1_738), .y2(s2_738), .z1(s1_739), .z2(s2_739));
  masked_and u_g523 (.x1(s1_737), .x2(s2_737), .y1(s1_721), .y2(s2_721), .z1(s1_740), .z2(s2_740));
  masked_and u_g524 (.x1(s1_741), .x2(s2_741), .y1(s1_722), .y2(s2_722), .z1(s1_742), .z2(s2_742));
  masked_or u_g525 (.x1(s1_740), .x2(s2_740), .y1(s1_742), .y2(s2_742), .z1(s1_743), .z2(s2_743));
  masked_and u_g526 (.x1(s1_741), .x2(s2_741), .y1(s1_721), .y2(s2_721), .z1(s1_744), .z2(s2_744));
  masked_and u_g527 (.x1(s1_745), .x2(s2_745), .y1(s1_722), .y2(s2_722), .z1(s1_746), .z2(s2_746));
  masked_or u_g528 (.x1(s1_744), .x2(s2_744), .y1(s1_746), .y2(s2_746), .z1(s1_747), .z2(s2_747));
  masked_and u_g529 (.x1(s1_745), .x2(s2_745), .y1(s1_721), .y2(s2_721), .z1(s1_748), .z2(s2_748));
  masked_and u_g530 (.x1(s1_749), .x2(s2_749), .y1(s1_722), .y2(s2_722), .z1(s1_750), .z2(s2_750));
  masked_or u_g531 (.x1(s1_748), .x2(s2_748), .y1(s1_750), .y2(s2_750), .z1(s1_751), .z2(s2_751));
  masked_and u_g532 (.x1(s1_749), .x2(s2_749), .y1(s1_721), .y2(s2_721), .z1(s1_752), .z2(s2_752));
  masked_and u_g533 (.x1(s1_753), .x2(s2_753), .y1(s1_722), .y2(s2_722), .z1(s1_754), .z2(s2_754));
  masked_or u_g534 (.x1(s1_752), .x2(s2_752), .y1(s1_754), .y2(s2_754), .z1(s1_755), .z2(s2_755));
  masked_and u_g535 (.x1(s1_753), .x2(s2_753), .y1(s1_721), .y2(s2_721), .z1(s1_756), .z2(s2_756));
  masked_and u_g536 (.x1(s1_757), .x2(s2_757), .y1(s1_722), .y2(s2_722), .z1(s1_758), .z2(s2_758));
  masked_or u_g537 (.x1(s1_756), .x2(s2_756), .y1(s1_758), .y2(s2_758), .z1(s1_759), .z2(s2_759));
  masked_and u_g538 (.x1(s1_757), .x2(s2_757), .y1(s1_721), .y2(s2_721), .z1(s1_760), .z2(s2_760));
  masked_and u_g539 (.x1(s1_761), .x2(s2_761), .y1(s1_722), .y2(s2_722), .z1(s1_762), .z2(s2_762));
  masked_or u_g540 (.x1(s1_760), .x2(s2_760), .y1(s1_762), .y2(s2_762), .z1(s1_763), .z2(s2_763));
  masked_and u_g541 (.x1(s1_761), .x2(s2_761), .y1(s1_721), .y2(s2_721), .z1(s1_764), .z2(s2_764));
  masked_and u_g542 (.x1(s1_765), .x2(s2_765), .y1(s1_722), .y2(s2_722), .z1(s1_766), .z2(s2_766));
  masked_or u_g543 (.x1(s1_764), .x2(s2_764), .y1(s1_766), .y2(s2_766), .z1(s1_767), .z2(s2_767));
  masked_and u_g544 (.x1(s1_765), .x2(s2_765), .y1(s1_721), .y2(s2_721), .z1(s1_768), .z2(s2_768));
  masked_and u_g545 (.x1(s1_769), .x2(s2_769), .y1(s1_722), .y2(s2_722), .z1(s1_770), .z2(s2_770));
  masked_or u_g546 (.x1(s1_768), .x2(s2_768), .y1(s1_770), .y2(s2_770), .z1(s1_771), .z2(s2_771));
  masked_and u_g547 (.x1(s1_769), .x2(s2_769), .y1(s1_721), .y2(s2_721), .z1(s1_772), .z2(s2_772));
  masked_and u_g548 (.x1(s1_773), .x2(s2_773), .y1(s1_722), .y2(s2_722), .z1(s1_774), .z2(s2_774));
  masked_or u_g549 (.x1(s1_772), .x2(s2_772), .y1(s1_774), .y2(s2_774), .z1(s1_775), .z2(s2_775));
  masked_and u_g550 (.x1(s1_773), .x2(s2_773), .y1(s1_721), .y2(s2_721), .z1(s1_776), .z2(s2_776));
  masked_and u_g551 (.x1(s1_777), .x2(s2_777), .y1(s1_722), .y2(s2_722), .z1(s1_778), .z2(s2_778));
  masked_or u_g552 (.x1(s1_776), .x2(s2_776), .y1(s1_778), .y2(s2_778), .z1(s1_779), .z2(s2_779));
  masked_and u_g553 (.x1(s1_777), .x2(s2_777), .y1(s1_721), .y2(s2_721), .z1(s1_780), .z2(s2_780));
  masked_and u_g554 (.x1(s1_781), .x2(s2_781), .y1(s1_722), .y2(s2_722), .z1(s1_782), .z2(s2_782));
  masked_or u_g555 (.x1(s1_780), .x2(s2_780), .y1(s1_782), .y2(s2_782), .z1(s1_783), .z2(s2_783));
  masked_and u_g556 (.x1(s1_781), .x2(s2_781), .y1(s1_721), .y2(s2_721), .z1(s1_784), .z2(s2_784));
  masked_and u_g557 (.x1(s1_785), .x2(s2_785), .y1(s1_722), .y2(s2_722), .z1(s1_786), .z2(s2_786));
  masked_or u_g558 (.x1(s1_784), .x2(s2_784), .y1(s1_786), .y2(s2_786), .z1(s1_787), .z2(s2_787));
  masked_and u_g559 (.x1(s1_785), .x2(s2_785), .y1(s1_721), .y2(s2_721), .z1(s1_788), .z2(s2_788));
  masked_and u_g560 (.x1(s1_789), .x2(s2_789), .y1(s1_722), .y2(s2_722), .z1(s1_790), .z2(s2_790));
  masked_or u_g561 (.x1(s1_788), .x2(s2_788), .y1(s1_790), .y2(s2_790), .z1(s1_791), .z2(s2_791));
  masked_and u_g562 (.x1(s1_789), .x2(s2_789), .y1(s1_721), .y2(s2_721), .z1(s1_792), .z2(s2_792));
  masked_and u_g563 (.x1(s1_793), .x2(s2_793), .y1(s1_722), .y2(s2_722), .z1(s1_794), .z2(s2_794));
  masked_or u_g564 (.x1(s1_792), .x2(s2_792), .y1(s1_794), .y2(s2_794), .z1(s1_795), .z2(s2_795));
  masked_and u_g565 (.x1(s1_793), .x2(s2_793), .y1(s1_721), .y2(s2_721), .z1(s1_796), .z2(s2_796));
  masked_and u_g566 (.x1(s1_797), .x2(s2_797), .y1(s1_722), .y2(s2_722), .z1(s1_798), .z2(s2_798));
  masked_or u_g567 (.x1(s1_796), .x2(s2_796), .y1(s1_798), .y2(s2_798), .z1(s1_799), .z2(s2_799));
  masked_and u_g568 (.x1(s1_797), .x2(s2_797), .y1(s1_721), .y2(s2_721), .z1(s1_800), .z2(s2_800));
  masked_and u_g569 (.x1(s1_801), .x2(s2_801), .y1(s1_722), .y2(s2_722), .z1(s1_802), .z2(s2_802));
  masked_or u_g570 (.x1(s1_800), .x2(s2_800), .y1(s1_802), .y2(s2_802), .z1(s1_803), .z2(s2_803));
  masked_and u_g571 (.x1(s1_801), .x2(s2_801), .y1(s1_721), .y2(s2_721), .z1(s1_804), .z2(s2_804));
  masked_and u_g572 (.x1(s1_257), .x2(s2_257), .y1(s1_722), .y2(s2_722), .z1(s1_805), .z2(s2_805));
  masked_or u_g573 (.x1(s1_804), .x2(s2_804), .y1(s1_805), .y2(s2_805), .z1(s1_806), .z2(s2_806));
  masked_and u_g574 (.x1(s1_257), .x2(s2_257), .y1(s1_721), .y2(s2_721), .z1(s1_807), .z2(s2_807));
  masked_and u_g575 (.x1(s1_261), .x2(s2_261), .y1(s1_722), .y2(s2_722), .z1(s1_808), .z2(s2_808));
  masked_or u_g576 (.x1(s1_807), .x2(s2_807), .y1(s1_808), .y2(s2_808), .z1(s1_809), .z2(s2_809));
  masked_and u_g577 (.x1(s1_261), .x2(s2_261), .y1(s1_721), .y2(s2_721), .z1(s1_810), .z2(s2_810));
  masked_and u_g578 (.x1(s1_265), .x2(s2_265), .y1(s1_722), .y2(s2_722), .z1(s1_811), .z2(s2_811));
  masked_or u_g579 (.x1(s1_810), .x2(s2_810), .y1(s1_811), .y2(s2_811), .z1(s1_812), .z2(s2_812));
  masked_and u_g580 (.x1(s1_265), .x2(s2_265), .y1(s1_721), .y2(s2_721), .z1(s1_813), .z2(s2_813));
  masked_and u_g581 (.x1(s1_269), .x2(s2_269), .y1(s1_722), .y2(s2_722), .z1(s1_814), .z2(s2_814));
  masked_or u_g582 (.x1(s1_813), .x2(s2_813), .y1(s1_814), .y2(s2_814), .z1(s1_815), .z2(s2_815));
  masked_and u_g583 (.x1(s1_269), .x2(s2_269), .y1(s1_721), .y2(s2_721), .z1(s1_816), .z2(s2_816));
  masked_and u_g584 (.x1(s1_273), .x2(s2_273), .y1(s1_722), .y2(s2_722), .z1(s1_817), .z2(s2_817));
  masked_or u_g585 (.x1(s1_816), .x2(s2_816), .y1(s1_817), .y2(s2_817), .z1(s1_818), .z2(s2_818));
  masked_and u_g586 (.x1(s1_273), .x2(s2_273), .y1(s1_721), .y2(s2_721), .z1(s1_819), .z2(s2_819));
  masked_and u_g587 (.x1(s1_277), .x2(s2_277), .y1(s1_722), .y2(s2_722), .z1(s1_820), .z2(s2_820));
  masked_or u_g588 (.x1(s1_819), .x2(s2_819), .y1(s1_820), .y2(s2_820), .z1(s1_821), .z2(s2_821));
  masked_and u_g589 (.x1(s1_277), .x2(s2_277), .y1(s1_721), .y2(s2_721), .z1(s1_822), .z2(s2_822));
  masked_and u_g590 (.x1(s1_281), .x2(s2_281), .y1(s1_722), .y2(s2_722), .z1(s1_823), .z2(s2_823));
  masked_or u_g591 (.x1(s1_822), .x2(s2_822), .y1(s1_823), .y2(s2_823), .z1(s1_824), .z2(s2_824));
  masked_and u_g592 (.x1(s1_281), .x2(s2_281), .y1(s1_721), .y2(s2_721), .z1(s1_825), .z2(s2_825));
  masked_and u_g593 (.x1(s1_285), .x2(s2_285), .y1(s1_722), .y2(s2_722), .z1(s1_826), .z2(s2_826));
  masked_or u_g594 (.x1(s1_825), .x2(s2_825), .y1(s1_826), .y2(s2_826), .z1(s1_827), .z2(s2_827));
  masked_and u_g595 (.x1(s1_285), .x2(s2_285), .y1(s1_721), .y2(s2_721), .z1(s1_828), .z2(s2_828));
  masked_and u_g596 (.x1(s1_289), .x2(s2_289), .y1(s1_722), .y2(s2_722), .z1(s1_829), .z2(s2_829));
  masked_or u_g597 (.x1(s1_828), .x2(s2_828), .y1(s1_829), .y2(s2_829), .z1(s1_830), .z2(s2_830));
  masked_and u_g598 (.x1(s1_289), .x2(s2_289), .y1(s1_721), .y2(s2_721), .z1(s1_831), .z2(s2_831));
  masked_and u_g599 (.x1(s1_832), .x2(s2_832), .y1(s1_722), .y2(s2_722), .z1(s1_833), .z2(s2_833));
  masked_or u_g600 (.x1(s1_831), .x2(s2_831), .y1(s1_833), .y2(s2_833), .z1(s1_834), .z2(s2_834));
  masked_and u_g601 (.x1(s1_832), .x2(s2_832), .y1(s1_721), .y2(s2_721), .z1(s1_835), .z2(s2_835));
  masked_and u_g602 (.x1(s1_836), .x2(s2_836), .y1(s1_722), .y2(s2_722), .z1(s1_837), .z2(s2_837));
  masked_or u_g603 (.x1(s1_835), .x2(s2_835), .y1(s1_837), .y2(s2_837), .z1(s1_838), .z2(s2_838));
  masked_or u_g604 (.x1(s1_115), .x2(s2_115), .y1(s1_352), .y2(s2_352), .z1(s1_839), .z2(s2_839));
  masked_and u_g605 (.x1(s1_359), .x2(s2_359), .y1(s1_839), .y2(s2_839), .z1(s1_840), .z2(s2_840));
  assign s1_841 = ~s1_840;
  assign s2_841 = s2_840;
  masked_and u_g606 (.x1(s1_719), .x2(s2_719), .y1(s1_841), .y2(s2_841), .z1(s1_842), .z2(s2_842));
  masked_or u_g607 (.x1(s1_720), .x2(s2_720), .y1(s1_840), .y2(s2_840), .z1(s1_843), .z2(s2_843));
  masked_and u_g608 (.x1(s1_142), .x2(s2_142), .y1(s1_394), .y2(s2_394), .z1(s1_844), .z2(s2_844));
  masked_and u_g609 (.x1(s1_702), .x2(s2_702), .y1(s1_843), .y2(s2_843), .z1(s1_845), .z2(s2_845));
  masked_or u_g610 (.x1(s1_703), .x2(s2_703), .y1(s1_842), .y2(s2_842), .z1(s1_846), .z2(s2_846));
  masked_and u_g611 (.x1(s1_847), .x2(s2_847), .y1(s1_845), .y2(s2_845), .z1(s1_848), .z2(s2_848));
  masked_and u_g612 (.x1(s1_849), .x2(s2_849), .y1(s1_846), .y2(s2_846), .z1(s1_850), .z2(s2_850));
  masked_or u_g613 (.x1(s1_848), .x2(s2_848), .y1(s1_850), .y2(s2_850), .z1(s1_851), .z2(s2_851));
  masked_and u_g614 (.x1(s1_849), .x2(s2_849), .y1(s1_845), .y2(s2_845), .z1(s1_852), .z2(s2_852));
  masked_and u_g615 (.x1(s1_853), .x2(s2_853), .y1(s1_846), .y2(s2_846), .z1(s1_854), .z2(s2_854));
  masked_or u_g616 (.x1(s1_852), .x2(s2_852), .y1(s1_854), .y2(s2_854), .z1(s1_855), .z2(s2_855));
  masked_and u_g617 (.x1(s1_853), .x2(s2_853), .y1(s1_845), .y2(s2_845), .z1(s1_856), .z2(s2_856));
  masked_and u_g618 (.x1(s1_857), .x2(s2_857), .y1(s1_846), .y2(s2_846), .z1(s1_858), .z2(s2_858));
  masked_or u_g619 (.x1(s1_856), .x2(s2_856), .y1(s1_858), .y2(s2_858), .z1(s1_859), .z2(s2_859));
  masked_and u_g620 (.x1(s1_857), .x2(s2_857), .y1(s1_845), .y2(s2_845), .z1(s1_860), .z2(s2_860));
  masked_and u_g621 (.x1(s1_861), .x2(s2_861), .y1(s1_846), .y2(s2_846), .z1(s1_862), .z2(s2_862));
  masked_or u_g622 (.x1(s1_860), .x2(s2_860), .y1(s1_862), .y2(s2_862), .z1(s1_863), .z2(s2_863));
  masked_and u_g623 (.x1(s1_861), .x2(s2_861), .y1(s1_845), .y2(s2_845), .z1(s1_864), .z2(s2_864));
  masked_and u_g624 (.x1(s1_865), .x2(s2_865), .y1(s1_846), .y2(s2_846), .z1(s1_866), .z2(s2_866));
  masked_or u_g625 (.x1(s1_864), .x2(s2_864), .y1(s1_866), .y2(s2_866), .z1(s1_867), .z2(s2_867));
  masked_and u_g626 (.x1(s1_865), .x2(s2_865), .y1(s1_845), .y2(s2_845), .z1(s1_868), .z2(s2_868));
  masked_and u_g627 (.x1(s1_869), .x2(s2_869), .y1(s1_846), .y2(s2_846), .z1(s1_870), .z2(s2_870));
  masked_or u_g628 (.x1(s1_868), .x2(s2_868), .y1(s1_870), .y2(s2_870), .z1(s1_871), .z2(s2_871));
  masked_and u_g629 (.x1(s1_869), .x2(s2_869), .y1(s1_845), .y2(s2_845), .z1(s1_872), .z2(s2_872));
  masked_and u_g630 (.x1(s1_873), .x2(s2_873), .y1(s1_846), .y2(s2_846), .z1(s1_874), .z2(s2_874));
  masked_or u_g631 (.x1(s1_872), .x2(s2_872), .y1(s1_874), .y2(s2_874), .z1(s1_875), .z2(s2_875));
  masked_and u_g632 (.x1(s1_873), .x2(s2_873), .y1(s1_845), .y2(s2_845), .z1(s1_876), .z2(s2_876));
  masked_and u_g633 (.x1(s1_877), .x2(s2_877), .y1(s1_846), .y2(s2_846), .z1(s1_878), .z2(s2_878));
  masked_or u_g634 (.x1(s1_876), .x2(s2_876), .y1(s1_878), .y2(s2_878), .z1(s1_879), .z2(s2_879));
  masked_and u_g635 (.x1(s1_877), .x2(s2_877), .y1(s1_845), .y2(s2_845), .z1(s1_880), .z2(s2_880));
  masked_and u_g636 (.x1(s1_881), .x2(s2_881), .y1(s1_846), .y2(s2_846), .z1(s1_882), .z2(s2_882));
  masked_or u_g637 (.x1(s1_880), .x2(s2_880), .y1(s1_882), .y2(s2_882), .z1(s1_883), .z2(s2_883));
  masked_and u_g638 (.x1(s1_881), .x2(s2_881), .y1(s1_845), .y2(s2_845), .z1(s1_884), .z2(s2_884));
  masked_and u_g639 (.x1(s1_885), .x2(s2_885), .y1(s1_846), .y2(s2_846), .z1(s1_886), .z2(s2_886));
  masked_or u_g640 (.x1(s1_884), .x2(s2_884), .y1(s1_886), .y2(s2_886), .z1(s1_887), .z2(s2_887));
  masked_and u_g641 (.x1(s1_885), .x2(s2_885), .y1(s1_845), .y2(s2_845), .z1(s1_888), .z2(s2_888));
  masked_and u_g642 (.x1(s1_889), .x2(s2_889), .y1(s1_846), .y2(s2_846), .z1(s1_890), .z2(s2_890));
  masked_or u_g643 (.x1(s1_888), .x2(s2_888), .y1(s1_890), .y2(s2_890), .z1(s1_891), .z2(s2_891));
  masked_and u_g644 (.x1(s1_889), .x2(s2_889), .y1(s1_845), .y2(s2_845), .z1(s1_892), .z2(s2_892));
  masked_and u_g645 (.x1(s1_893), .x2(s2_893), .y1(s1_846), .y2(s2_846), .z1(s1_894), .z2(s2_894));
  masked_or u_g646 (.x1(s1_892), .x2(s2_892), .y1(s1_894), .y2(s2_894), .z1(s1_895), .z2(s2_895));
  masked_and u_g647 (.x1(s1_893), .x2(s2_893), .y1(s1_845), .y2(s2_845), .z1(s1_896), .z2(s2_896));
  masked_and u_g648 (.x1(s1_897), .x2(s2_897), .y1(s1_846), .y2(s2_846), .z1(s1_898), .z2(s2_898));
  masked_or u_g649 (.x1(s1_896), .x2(s2_896), .y1(s1_898), .y2(s2_898), .z1(s1_899), .z2(s2_899));
  masked_and u_g650 (.x1(s1_897), .x2(s2_897), .y1(s1_845), .y2(s2_845), .z1(s1_900), .z2(s2_900));
  masked_and u_g651 (.x1(s1_901), .x2(s2_901), .y1(s1_846), .y2(s2_846), .z1(s1_902), .z2(s2_902));
  masked_or u_g652 (.x1(s1_900), .x2(s2_900), .y1(s1_902), .y2(s2_902), .z1(s1_903), .z2(s2_903));
  masked_and u_g653 (.x1(s1_901), .x2(s2_901), .y1(s1_845), .y2(s2_845), .z1(s1_904), .z2(s2_904));
  masked_and u_g654 (.x1(s1_905), .x2(s2_905), .y1(s1_846), .y2(s2_846), .z1(s1_906), .z2(s2_906));
  masked_or u_g655 (.x1(s1_904), .x2(s2_904), .y1(s1_906), .y2(s2_906), .z1(s1_907), .z2(s2_907));
  masked_and u_g656 (.x1(s1_905), .x2(s2_905), .y1(s1_845), .y2(s2_845), .z1(s1_908), .z2(s2_908));
  masked_and u_g657 (.x1(s1_909), .x2(s2_909), .y1(s1_846), .y2(s2_846), .z1(s1_910), .z2(s2_910));
  masked_or u_g658 (.x1(s1_908), .x2(s2_908), .y1(s1_910), .y2(s2_910), .z1(s1_911), .z2(s2_911));
  masked_and u_g659 (.x1(s1_909), .x2(s2_909), .y1(s1_845), .y2(s2_845), .z1(s1_912), .z2(s2_912));
  masked_and u_g660 (.x1(s1_913), .x2(s2_913), .y1(s1_846), .y2(s2_846), .z1(s1_914), .z2(s2_914));
  masked_or u_g661 (.x1(s1_912), .x2(s2_912), .y1(s1_914), .y2(s2_914), .z1(s1_915), .z2(s2_915));
  masked_and u_g662 (.x1(s1_913), .x2(s2_913), .y1(s1_845), .y2(s2_845), .z1(s1_916), .z2(s2_916));
  masked_and u_g663 (.x1(s1_917), .x2(s2_917), .y1(s1_846), .y2(s2_846), .z1(s1_918), .z2(s2_918));
  masked_or u_g664 (.x1(s1_916), .x2(s2_916), .y1(s1_918), .y2(s2_918), .z1(s1_919), .z2(s2_919));
  masked_and u_g665 (.x1(s1_917), .x2(s2_917), .y1(s1_845), .y2(s2_845), .z1(s1_920), .z2(s2_920));
  masked_and u_g666 (.x1(s1_921), .x2(s2_921), .y1(s1_846), .y2(s2_846), .z1(s1_922), .z2(s2_922));
  masked_or u_g667 (.x1(s1_920), .x2(s2_920), .y1(s1_922), .y2(s2_922), .z1(s1_923), .z2(s2_923));
  masked_and u_g668 (.x1(s1_921), .x2(s2_921), .y1(s1_845), .y2(s2_845), .z1(s1_924), .z2(s2_924));
  masked_and u_g669 (.x1(s1_925), .x2(s2_925), .y1(s1_846), .y2(s2_846), .z1(s1_926), .z2(s2_926));
  masked_or u_g670 (.x1(s1_924), .x2(s2_924), .y1(s1_926), .y2(s2_926), .z1(s1_927), .z2(s2_927));
  masked_and u_g671 (.x1(s1_925), .x2(s2_925), .y1(s1_845), .y2(s2_845), .z1(s1_928), .z2(s2_928));
  masked_and u_g672 (.x1(s1_259), .x2(s2_259), .y1(s1_846), .y2(s2_846), .z1(s1_929), .z2(s2_929));
  masked_or u_g673 (.x1(s1_928), .x2(s2_928), .y1(s1_929), .y2(s2_929), .z1(s1_930), .z2(s2_930));
  masked_and u_g674 (.x1(s1_259), .x2(s2_259), .y1(s1_845), .y2(s2_845), .z1(s1_931), .z2(s2_931));
  masked_and u_g675 (.x1(s1_263), .x2(s2_263), .y1(s1_846), .y2(s2_846), .z1(s1_932), .z2(s2_932));
  masked_or u_g676 (.x1(s1_931), .x2(s2_931), .y1(s1_932), .y2(s2_932), .z1(s1_933), .z2(s2_933));
  masked_and u_g677 (.x1(s1_263), .x2(s2_263), .y1(s1_845), .y2(s2_845), .z1(s1_934), .z2(s2_934));
  masked_and u_g678 (.x1(s1_267), .x2(s2_267), .y1(s1_846), .y2(s2_846), .z1(s1_935), .z2(s2_935));
  masked_or u_g679 (.x1(s1_934), .x2(s2_934), .y1(s1_935), .y2(s2_935), .z1(s1_936), .z2(s2_936));
  masked_and u_g680 (.x1(s1_267), .x2(s2_267), .y1(s1_845), .y2(s2_845), .z1(s1_937), .z2(s2_937));
  masked_and u_g681 (.x1(s1_271), .x2(s2_271), .y1(s1_846), .y2(s2_846), .z1(s1_938), .z2(s2_938));
  masked_or u_g682 (.x1(s1_937), .x2(s2_937), .y1(s1_938), .y2(s2_938), .z1(s1_939), .z2(s2_939));
  masked_and u_g683 (.x1(s1_271), .x2(s2_271), .y1(s1_845), .y2(s2_845), .z1(s1_940), .z2(s2_940));
  masked_and u_g684 (.x1(s1_275), .x2(s2_275), .y1(s1_846), .y2(s2_846), .z1(s1_941), .z2(s2_941));
  masked_or u_g685 (.x1(s1_940), .x2(s2_940), .y1(s1_941), .y2(s2_941), .z1(s1_942), .z2(s2_942));
  masked_and u_g686 (.x1(s1_275), .x2(s2_275), .y1(s1_845), .y2(s2_845), .z1(s1_943), .z2(s2_943));
  masked_and u_g687 (.x1(s1_279), .x2(s2_279), .y1(s1_846), .y2(s2_846), .z1(s1_944), .z2(s2_944));
  masked_or u_g688 (.x1(s1_943), .x2(s2_943), .y1(s1_944), .y2(s2_944), .z1(s1_945), .z2(s2_945));
  masked_and u_g689 (.x1(s1_279), .x2(s2_279), .y1(s1_845), .y2(s2_845), .z1(s1_946), .z2(s2_946));
  masked_and u_g690 (.x1(s1_283), .x2(s2_283), .y1(s1_846), .y2(s2_846), .z1(s1_947), .z2(s2_947));
  masked_or u_g691 (.x1(s1_946), .x2(s2_946), .y1(s1_947), .y2(s2_947), .z1(s1_948), .z2(s2_948));
  masked_and u_g692 (.x1(s1_283), .x2(s2_283), .y1(s1_845), .y2(s2_845), .z1(s1_949), .z2(s2_949));
  masked_and u_g693 (.x1(s1_287), .x2(s2_287), .y1(s1_846), .y2(s2_846), .z1(s1_950), .z2(s2_950));
  masked_or u_g694 (.x1(s1_949), .x2(s2_949), .y1(s1_950), .y2(s2_950), .z1(s1_951), .z2(s2_951));
  masked_and u_g695 (.x1(s1_287), .x2(s2_287), .y1(s1_845), .y2(s2_845), .z1(s1_952), .z2(s2_952));
  masked_and u_g696 (.x1(s1_291), .x2(s2_291), .y1(s1_846), .y2(s2_846), .z1(s1_953), .z2(s2_953));
  masked_or u_g697 (.x1(s1_952), .x2(s2_952), .y1(s1_953), .y2(s2_953), .z1(s1_954), .z2(s2_954));
  masked_and u_g698 (.x1(s1_291), .x2(s2_291), .y1(s1_845), .y2(s2_845), .z1(s1_955), .z2(s2_955));
  masked_and u_g699 (.x1(s1_129), .x2(s2_129), .y1(s1_846), .y2(s2_846), .z1(s1_956), .z2(s2_956));
  masked_or u_g700 (.x1(s1_955), .x2(s2_955), .y1(s1_956), .y2(s2_956), .z1(s1_957), .z2(s2_957));
  masked_and u_g701 (.x1(s1_129), .x2(s2_129), .y1(s1_845), .y2(s2_845), .z1(s1_958), .z2(s2_958));
  masked_and u_g702 (.x1(s1_137), .x2(s2_137), .y1(s1_846), .y2(s2_846), .z1(s1_959), .z2(s2_959));
  masked_or u_g703 (.x1(s1_958), .x2(s2_958), .y1(s1_959), .y2(s2_959), .z1(s1_960), .z2(s2_960));
  masked_or u_g704 (.x1(s1_340), .x2(s2_340), .y1(s1_844), .y2(s2_844), .z1(s1_961), .z2(s2_961));
  assign s1_962 = ~s1_961;
  assign s2_962 = s2_961;
  assign s1_963 = s1_122 ^ s1_677;
  assign s2_963 = s2_122 ^ s2_677;
  masked_or u_g705 (.x1(s1_680), .x2(s2_680), .y1(s1_701), .y2(s2_701), .z1(s1_964), .z2(s2_964));
  masked_and u_g706 (.x1(s1_365), .x2(s2_365), .y1(s1_397), .y2(s2_397), .z1(s1_965), .z2(s2_965));
  masked_or u_g707 (.x1(s1_366), .x2(s2_366), .y1(s1_396), .y2(s2_396), .z1(s1_966), .z2(s2_966));
  masked_or u_g708 (.x1(s1_340), .x2(s2_340), .y1(s1_379), .y2(s2_379), .z1(s1_967), .z2(s2_967));
  masked_and u_g709 (.x1(s1_964), .x2(s2_964), .y1(s1_966), .y2(s2_966), .z1(s1_968), .z2(s2_968));
  masked_or u_g710 (.x1(s1_963), .x2(s2_963), .y1(s1_965), .y2(s2_965), .z1(s1_969), .z2(s2_969));
  masked_and u_g711 (.x1(s1_961), .x2(s2_961), .y1(s1_968), .y2(s2_968), .z1(s1_970), .z2(s2_970));
  masked_or u_g712 (.x1(s1_962), .x2(s2_962), .y1(s1_969), .y2(s2_969), .z1(s1_971), .z2(s2_971));
  masked_and u_g713 (.x1(s1_123), .x2(s2_123), .y1(s1_152), .y2(s2_152), .z1(s1_972), .z2(s2_972));
  masked_and u_g714 (.x1(s1_128), .x2(s2_128), .y1(s1_972), .y2(s2_972), .z1(s1_973), .z2(s2_973));
  masked_and u_g715 (.x1(s1_136), .x2(s2_136), .y1(s1_973), .y2(s2_973), .z1(s1_974), .z2(s2_974));
  masked_or u_g716 (.x1(s1_700), .x2(s2_700), .y1(s1_974), .y2(s2_974), .z1(s1_975), .z2(s2_975));
  masked_and u_g717 (.x1(s1_80), .x2(s2_80), .y1(s1_975), .y2(s2_975), .z1(s1_976), .z2(s2_976));
  masked_and u_g718 (.x1(s1_171), .x2(s2_171), .y1(s1_702), .y2(s2_702), .z1(s1_977), .z2(s2_977));
  masked_or u_g719 (.x1(s1_976), .x2(s2_976), .y1(s1_977), .y2(s2_977), .z1(s1_978), .z2(s2_978));
  masked_and u_g720 (.x1(s1_970), .x2(s2_970), .y1(s1_978), .y2(s2_978), .z1(s1_979), .z2(s2_979));
  masked_and u_g721 (.x1(s1_204), .x2(s2_204), .y1(s1_971), .y2(s2_971), .z1(s1_980), .z2(s2_980));
  masked_or u_g722 (.x1(s1_979), .x2(s2_979), .y1(s1_980), .y2(s2_980), .z1(s1_981), .z2(s2_981));
  masked_and u_g723 (.x1(s1_79), .x2(s2_79), .y1(s1_975), .y2(s2_975), .z1(s1_982), .z2(s2_982));
  masked_and u_g724 (.x1(s1_204), .x2(s2_204), .y1(s1_702), .y2(s2_702), .z1(s1_983), .z2(s2_983));
  masked_or u_g725 (.x1(s1_982), .x2(s2_982), .y1(s1_983), .y2(s2_983), .z1(s1_984), .z2(s2_984));
  masked_and u_g726 (.x1(s1_970), .x2(s2_970), .y1(s1_984), .y2(s2_984), .z1(s1_985), .z2(s2_985));
  masked_and u_g727 (.x1(s1_209), .x2(s2_209), .y1(s1_971), .y2(s2_971), .z1(s1_986), .z2(s2_986));
  masked_or u_g728 (.x1(s1_985), .x2(s2_985), .y1(s1_986), .y2(s2_986), .z1(s1_987), .z2(s2_987));
  masked_and u_g729 (.x1(s1_78), .x2(s2_78), .y1(s1_975), .y2(s2_975), .z1(s1_988), .z2(s2_988));
  masked_and u_g730 (.x1(s1_209), .x2(s2_209), .y1(s1_702), .y2(s2_702), .z1(s1_989), .z2(s2_989));
  masked_or u_g731 (.x1(s1_988), .x2(s2_988), .y1(s1_989), .y2(s2_989), .z1(s1_990), .z2(s2_990));
  masked_and u_g732 (.x1(s1_970), .x2(s2_970), .y1(s1_990), .y2(s2_990), .z1(s1_991), .z2(s2_991));
  masked_and u_g733 (.x1(s1_215), .x2(s2_215), .y1(s1_971), .y2(s2_971), .z1(s1_992), .z2(s2_992));
  masked_or u_g734 (.x1(s1_991), .x2(s2_991), .y1(s1_992), .y2(s2_992), .z1(s1_993), .z2(s2_993));
  masked_and u_g735 (.x1(s1_77), .x2(s2_77), .y1(s1_975), .y2(s2_975), .z1(s1_994), .z2(s2_994));
  masked_and u_g736 (.x1(s1_215), .x2(s2_215), .y1(s1_702), .y2(s2_702), .z1(s1_995), .z2(s2_995));
  masked_or u_g737 (.x1(s1_994), .x2(s2_994), .y1(s1_995), .y2(s2_995), .z1(s1_996), .z2(s2_996));
  masked_and u_g738 (.x1(s1_970), .x2(s2_970), .y1(s1_996), .y2(s2_996), .z1(s1_997), .z2(s2_997));
  masked_and u_g739 (.x1(s1_219), .x2(s2_219), .y1(s1_971), .y2(s2_971), .z1(s1_998), .z2(s2_998));
  masked_or u_g740 (.x1(s1_997), .x2(s2_997), .y1(s1_998), .y2(s2_998), .z1(s1_999), .z2(s2_999));
  masked_and u_g741 (.x1(s1_76), .x2(s2_76), .y1(s1_975), .y2(s2_975), .z1(s1_1000), .z2(s2_1000));
  masked_and u_g742 (.x1(s1_219), .x2(s2_219), .y1(s1_702), .y2(s2_702), .z1(s1_1001), .z2(s2_1001));
  masked_or u_g743 (.x1(s1_1000), .x2(s2_1000), .y1(s1_1001), .y2(s2_1001), .z1(s1_1002), .z2(s2_1002));
  masked_and u_g744 (.x1(s1_970), .x2(s2_970), .y1(s1_1002), .y2(s2_1002), .z1(s1_1003), .z2(s2_1003));
  masked_and u_g745 (.x1(s1_223), .x2(s2_223), .y1(s1_971), .y2(s2_971), .z1(s1_1004), .z2(s2_1004));
  masked_or u_g746 (.x1(s1_1003), .x2(s2_1003), .y1(s1_1004), .y2(s2_1004), .z1(s1_1005), .z2(s2_1005));
  masked_and u_g747 (.x1(s1_75), .x2(s2_75), .y1(s1_975), .y2(s2_975), .z1(s1_1006), .z2(s2_1006));
  masked_and u_g748 (.x1(s1_223), .x2(s2_223), .y1(s1_702), .y2(s2_702), .z1(s1_1007), .z2(s2_1007));
  masked_or u_g749 (.x1(s1_1006), .x2(s2_1006), .y1(s1_1007), .y2(s2_1007), .z1(s1_1008), .z2(s2_1008));
  masked_and u_g750 (.x1(s1_970), .x2(s2_970), .y1(s1_1008), .y2(s2_1008), .z1(s1_1009), .z2(s2_1009));
  masked_and u_g751 (.x1(s1_228), .x2(s2_228), .y1(s1_971), .y2(s2_971), .z1(s1_1010), .z2(s2_1010));
  masked_or u_g752 (.x1(s1_1009), .x2(s2_1009), .y1(s1_1010), .y2(s2_1010), .z1(s1_1011), .z2(s2_1011));
  masked_and u_g753 (.x1(s1_74), .x2(s2_74), .y1(s1_975), .y2(s2_975), .z1(s1_1012), .z2(s2_1012));
  masked_and u_g754 (.x1(s1_228), .x2(s2_228), .y1(s1_702), .y2(s2_702), .z1(s1_1013), .z2(s2_1013));
  masked_or u_g755 (.x1(s1_1012), .x2(s2_1012), .y1(s1_1013), .y2(s2_1013), .z1(s1_1014), .z2(s2_1014));
  masked_and u_g756 (.x1(s1_970), .x2(s2_970), .y1(s1_1014), .y2(s2_1014), .z1(s1_1015), .z2(s2_1015));
  masked_and u_g757 (.x1(s1_234), .x2(s2_234), .y1(s1_971), .y2(s2_971), .z1(s1_1016), .z2(s2_1016));
  masked_or u_g758 (.x1(s1_1015), .x2(s2_1015), .y1(s1_1016), .y2(s2_1016), .z1(s1_1017), .z2(s2_1017));
  masked_and u_g759 (.x1(s1_234), .x2(s2_234), .y1(s1_702), .y2(s2_702), .z1(s1_1018), .z2(s2_1018));
  masked_and u_g760 (.x1(s1_81), .x2(s2_81), .y1(s1_137), .y2(s2_137), .z1(s1_1019), .z2(s2_1019));
  masked_and u_g761 (.x1(s1_73), .x2(s2_73), .y1(s1_136), .y2(s2_136), .z1(s1_1020), .z2(s2_1020));
  masked_or u_g762 (.x1(s1_1019), .x2(s2_1019), .y1(s1_1020), .y2(s2_1020), .z1(s1_1021), .z2(s2_1021));
  masked_and u_g763 (.x1(s1_973), .x2(s2_973), .y1(s1_1021), .y2(s2_1021), .z1(s1_1022), .z2(s2_1022));
  masked_and u_g764 (.x1(s1_73), .x2(s2_73), .y1(s1_700), .y2(s2_700), .z1(s1_1023), .z2(s2_1023));
  masked_or u_g765 (.x1(s1_1022), .x2(s2_1022), .y1(s1_1023), .y2(s2_1023), .z1(s1_1024), .z2(s2_1024));
  masked_or u_g766 (.x1(s1_1018), .x2(s2_1018), .y1(s1_1024), .y2(s2_1024), .z1(s1_1025), .z2(s2_1025));
  masked_and u_g767 (.x1(s1_970), .x2(s2_970), .y1(s1_1025), .y2(s2_1025), .z1(s1_1026), .z2(s2_1026));
  masked_and u_g768 (.x1(s1_237), .x2(s2_237), .y1(s1_971), .y2(s2_971), .z1(s1_1027), .z2(s2_1027));
  masked_or u_g769 (.x1(s1_1026), .x2(s2_1026), .y1(s1_1027), .y2(s2_1027), .z1(s1_1028), .z2(s2_1028));
  masked_and u_g770 (.x1(s1_237), .x2(s2_237), .y1(s1_702), .y2(s2_702), .z1(s1_1029), .z2(s2_1029));
  masked_and u_g771 (.x1(s1_72), .x2(s2_72), .y1(s1_700), .y2(s2_700), .z1(s1_1030), .z2(s2_1030));
  masked_and u_g772 (.x1(s1_80), .x2(s2_80), .y1(s1_137), .y2(s2_137), .z1(s1_1031), .z2(s2_1031));
  masked_and u_g773 (.x1(s1_72), .x2(s2_72), .y1(s1_136), .y2(s2_136), .z1(s1_1032), .z2(s2_1032));
  masked_or u_g774 (.x1(s1_1031), .x2(s2_1031), .y1(s1_1032), .y2(s2_1032), .z1(s1_1033), .z2(s2_1033));
  masked_and u_g775 (.x1(s1_973), .x2(s2_973), .y1(s1_1033), .y2(s2_1033), .z1(s1_1034), .z2(s2_1034));
  masked_or u_g776 (.x1(s1_1030), .x2(s2_1030), .y1(s1_1034), .y2(s2_1034), .z1(s1_1035), .z2(s2_1035));
  masked_or u_g777 (.x1(s1_1029), .x2(s2_1029), .y1(s1_1035), .y2(s2_1035), .z1(s1_1036), .z2(s2_1036));
  masked_or u_g778 (.x1(s1_971), .x2(s2_971), .y1(s1_1036), .y2(s2_1036), .z1(s1_1037), .z2(s2_1037));
  masked_or u_g779 (.x1(s1_239), .x2(s2_239), .y1(s1_970), .y2(s2_970), .z1(s1_1038), .z2(s2_1038));
  masked_and u_g780 (.x1(s1_1037), .x2(s2_1037), .y1(s1_1038), .y2(s2_1038), .z1(s1_1039), .z2(s2_1039));
  masked_and u_g781 (.x1(s1_239), .x2(s2_239), .y1(s1_702), .y2(s2_702), .z1(s1_1040), .z2(s2_1040));
  masked_and u_g782 (.x1(s1_71), .x2(s2_71), .y1(s1_700), .y2(s2_700), .z1(s1_1041), .z2(s2_1041));
  masked_and u_g783 (.x1(s1_79), .x2(s2_79), .y1(s1_137), .y2(s2_137), .z1(s1_1042), .z2(s2_1042));
  masked_and u_g784 (.x1(s1_71), .x2(s2_71), .y1(s1_136), .y2(s2_136), .z1(s1_1043), .z2(s2_1043));
  masked_or u_g785 (.x1(s1_1042), .x2(s2_1042), .y1(s1_1043), .y2(s2_1043), .z1(s1_1044), .z2(s2_1044));
  masked_and u_g786 (.x1(s1_973), .x2(s2_973), .y1(s1_1044), .y2(s2_1044), .z1(s1_1045), .z2(s2_1045));
  masked_or u_g787 (.x1(s1_1041), .x2(s2_1041), .y1(s1_1045), .y2(s2_1045), .z1(s1_1046), .z2(s2_1046));
  masked_or u_g788 (.x1(s1_1040), .x2(s2_1040), .y1(s1_1046), .y2(s2_1046), .z1(s1_1047), .z2(s2_1047));
  masked_and u_g789 (.x1(s1_970), .x2(s2_970), .y1(s1_1047), .y2(s2_1047), .z1(s1_1048), .z2(s2_1048));
  masked_and u_g790 (.x1(s1_241), .x2(s2_241), .y1(s1_971), .y2(s2_971), .z1(s1_1049), .z2(s2_1049));
  masked_or u_g791 (.x1(s1_1048), .x2(s2_1048), .y1(s1_1049), .y2(s2_1049), .z1(s1_1050), .z2(s2_1050));
  masked_and u_g792 (.x1(s1_241), .x2(s2_241), .y1(s1_702), .y2(s2_702), .z1(s1_1051), .z2(s2_1051));
  masked_and u_g793 (.x1(s1_70), .x2(s2_70), .y1(s1_700), .y2(s2_700), .z1(s1_1052), .z2(s2_1052));
  masked_and u_g794 (.x1(s1_78), .x2(s2_78), .y1(s1_137), .y2(s2_137), .z1(s1_1053), .z2(s2_1053));
  masked_and u_g795 (.x1(s1_70), .x2(s2_70), .y1(s1_136), .y2(s2_136), .z1(s1_1054), .z2(s2_1054));
  masked_or u_g796 (.x1(s1_1053), .x2(s2_1053), .y1(s1_1054), .y2(s2_1054), .z1(s1_1055), .z2(s2_1055));
  masked_and u_g797 (.x1(s1_973), .x2(s2_973), .y1(s1_1055), .y2(s2_1055), .z1(s1_1056), .z2(s2_1056));
  masked_or u_g798 (.x1(s1_1052), .x2(s2_1052), .y1(s1_1056), .y2(s2_1056), .z1(s1_1057), .z2(s2_1057));
  masked_or u_g799 (.x1(s1_1051), .x2(s2_1051), .y1(s1_1057), .y2(s2_1057), .z1(s1_1058), .z2(s2_1058));
  masked_and u_g800 (.x1(s1_970), .x2(s2_970), .y1(s1_1058), .y2(s2_1058), .z1(s1_1059), .z2(s2_1059));
  masked_and u_g801 (.x1(s1_249), .x2(s2_249), .y1(s1_971), .y2(s2_971), .z1(s1_1060), .z2(s2_1060));
  masked_or u_g802 (.x1(s1_1059), .x2(s2_1059), .y1(s1_1060), .y2(s2_1060), .z1(s1_1061), .z2(s2_1061));
  masked_and u_g803 (.x1(s1_249), .x2(s2_249), .y1(s1_702), .y2(s2_702), .z1(s1_1062), .z2(s2_1062));
  masked_and u_g804 (.x1(s1_69), .x2(s2_69), .y1(s1_700), .y2(s2_700), .z1(s1_1063), .z2(s2_1063));
  masked_and u_g805 (.x1(s1_77), .x2(s2_77), .y1(s1_137), .y2(s2_137), .z1(s1_1064), .z2(s2_1064));
  masked_and u_g806 (.x1(s1_69), .x2(s2_69), .y1(s1_136), .y2(s2_136), .z1(s1_1065), .z2(s2_1065));
  masked_or u_g807 (.x1(s1_1064), .x2(s2_1064), .y1(s1_1065), .y2(s2_1065), .z1(s1_1066), .z2(s2_1066));
  masked_and u_g808 (.x1(s1_973), .x2(s2_973), .y1(s1_1066), .y2(s2_1066), .z1(s1_1067), .z2(s2_1067));
  masked_or u_g809 (.x1(s1_1063), .x2(s2_1063), .y1(s1_1067), .y2(s2_1067), .z1(s1_1068), .z2(s2_1068));
  masked_or u_g810 (.x1(s1_1062), .x2(s2_1062), .y1(s1_1068), .y2(s2_1068), .z1(s1_1069), .z2(s2_1069));
  masked_and u_g811 (.x1(s1_970), .x2(s2_970), .y1(s1_1069), .y2(s2_1069), .z1(s1_1070), .z2(s2_1070));
  masked_and u_g812 (.x1(s1_251), .x2(s2_251), .y1(s1_971), .y2(s2_971), .z1(s1_1071), .z2(s2_1071));
  masked_or u_g813 (.x1(s1_1070), .x2(s2_1070), .y1(s1_1071), .y2(s2_1071), .z1(s1_1072), .z2(s2_1072));
  masked_and u_g814 (.x1(s1_251), .x2(s2_251), .y1(s1_702), .y2(s2_702), .z1(s1_1073), .z2(s2_1073));
  masked_and u_g815 (.x1(s1_68), .x2(s2_68), .y1(s1_700), .y2(s2_700), .z1(s1_1074), .z2(s2_1074));
  masked_and u_g816 (.x1(s1_76), .x2(s2_76), .y1(s1_137), .y2(s2_137), .z1(s1_1075), .z2(s2_1075));
  masked_and u_g817 (.x1(s1_68), .x2(s2_68), .y1(s1_136), .y2(s2_136), .z1(s1_1076), .z2(s2_1076));
  masked_or u_g818 (.x1(s1_1075), .x2(s2_1075), .y1(s1_1076), .y2(s2_1076), .z1(s1_1077), .z2(s2_1077));
  masked_and u_g819 (.x1(s1_973), .x2(s2_973), .y1(s1_1077), .y2(s2_1077), .z1(s1_1078), .z2(s2_1078));
  masked_or u_g820 (.x1(s1_1074), .x2(s2_1074), .y1(s1_1078), .y2(s2_1078), .z1(s1_1079), .z2(s2_1079));
  masked_or u_g821 (.x1(s1_1073), .x2(s2_1073), .y1(s1_1079), .y2(s2_1079), .z1(s1_1080), .z2(s2_1080));
  masked_and u_g822 (.x1(s1_970), .x2(s2_970), .y1(s1_1080), .y2(s2_1080), .z1(s1_1081), .z2(s2_1081));
  masked_and u_g823 (.x1(s1_243), .x2(s2_243), .y1(s1_971), .y2(s2_971), .z1(s1_1082), .z2(s2_1082));
  masked_or u_g824 (.x1(s1_1081), .x2(s2_1081), .y1(s1_1082), .y2(s2_1082), .z1(s1_1083), .z2(s2_1083));
  masked_and u_g825 (.x1(s1_243), .x2(s2_243), .y1(s1_702), .y2(s2_702), .z1(s1_1084), .z2(s2_1084));
  masked_and u_g826 (.x1(s1_67), .x2(s2_67), .y1(s1_700), .y2(s2_700), .z1(s1_1085), .z2(s2_1085));
  masked_and u_g827 (.x1(s1_75), .x2(s2_75), .y1(s1_137), .y2(s2_137), .z1(s1_1086), .z2(s2_1086));
  masked_and u_g828 (.x1(s1_67), .x2(s2_67), .y1(s1_136), .y2(s2_136), .z1(s1_1087), .z2(s2_1087));
  masked_or u_g829 (.x1(s1_1086), .x2(s2_1086), .y1(s1_1087), .y2(s2_1087), .z1(s1_1088), .z2(s2_1088));
  masked_and u_g830 (.x1(s1_973), .x2(s2_973), .y1(s1_1088), .y2(s2_1088), .z1(s1_1089), .z2(s2_1089));
  masked_or u_g831 (.x1(s1_1085), .x2(s2_1085), .y1(s1_1089), .y2(s2_1089), .z1(s1_1090), .z2(s2_1090));
  masked_or u_g832 (.x1(s1_1084), .x2(s2_1084), .y1(s1_1090), .y2(s2_1090), .z1(s1_1091), .z2(s2_1091));
  masked_and u_g833 (.x1(s1_970), .x2(s2_970), .y1(s1_1091), .y2(s2_1091), .z1(s1_1092), .z2(s2_1092));
  masked_and u_g834 (.x1(s1_245), .x2(s2_245), .y1(s1_971), .y2(s2_971), .z1(s1_1093), .z2(s2_1093));
  masked_or u_g835 (.x1(s1_1092), .x2(s2_1092), .y1(s1_1093), .y2(s2_1093), .z1(s1_1094), .z2(s2_1094));
  masked_and u_g836 (.x1(s1_245), .x2(s2_245), .y1(s1_702), .y2(s2_702), .z1(s1_1095), .z2(s2_1095));
  masked_and u_g837 (.x1(s1_66), .x2(s2_66), .y1(s1_700), .y2(s2_700), .z1(s1_1096), .z2(s2_1096));
  masked_and u_g838 (.x1(s1_74), .x2(s2_74), .y1(s1_137), .y2(s2_137), .z1(s1_1097), .z2(s2_1097));
  masked_and u_g839 (.x1(s1_66), .x2(s2_66), .y1(s1_136), .y2(s2_136), .z1(s1_1098), .z2(s2_1098));
  masked_or u_g840 (.x1(s1_1097), .x2(s2_1097), .y1(s1_1098), .y2(s2_1098), .z1(s1_1099), .z2(s2_1099));
  masked_and u_g841 (.x1(s1_973), .x2(s2_973), .y1(s1_1099), .y2(s2_1099), .z1(s1_1100), .z2(s2_1100));
  masked_or u_g842 (.x1(s1_1096), .x2(s2_1096), .y1(s1_1100), .y2(s2_1100), .z1(s1_1101), .z2(s2_1101));
  masked_or u_g843 (.x1(s1_1095), .x2(s2_1095), .y1(s1_1101), .y2(s2_1101), .z1(s1_1102), .z2(s2_1102));
  masked_and u_g844 (.x1(s1_970), .x2(s2_970), .y1(s1_1102), .y2(s2_1102), .z1(s1_1103), .z2(s2_1103));
  masked_and u_g845 (.x1(s1_247), .x2(s2_247), .y1(s1_971), .y2(s2_971), .z1(s1_1104), .z2(s2_1104));
  masked_or u_g846 (.x1(s1_1103), .x2(s2_1103), .y1(s1_1104), .y2(s2_1104), .z1(s1_1105), .z2(s2_1105));
  masked_and u_g847 (.x1(s1_65), .x2(s2_65), .y1(s1_975), .y2(s2_975), .z1(s1_1106), .z2(s2_1106));
  masked_and u_g848 (.x1(s1_129), .x2(s2_129), .y1(s1_972), .y2(s2_972), .z1(s1_1107), .z2(s2_1107));
  masked_and u_g849 (.x1(s1_136), .x2(s2_136), .y1(s1_1107), .y2(s2_1107), .z1(s1_1108), .z2(s2_1108));
  masked_and u_g850 (.x1(s1_81), .x2(s2_81), .y1(s1_1108), .y2(s2_1108), .z1(s1_1109), .z2(s2_1109));
  masked_and u_g851 (.x1(s1_247), .x2(s2_247), .y1(s1_702), .y2(s2_702), .z1(s1_1110), .z2(s2_1110));
  masked_and u_g852 (.x1(s1_73), .x2(s2_73), .y1(s1_137), .y2(s2_137), .z1(s1_1111), .z2(s2_1111));
  masked_and u_g853 (.x1(s1_973), .x2(s2_973), .y1(s1_1111), .y2(s2_1111), .z1(s1_1112), .z2(s2_1112));
  masked_or u_g854 (.x1(s1_1110), .x2(s2_1110), .y1(s1_1112), .y2(s2_1112), .z1(s1_1113), .z2(s2_1113));
  masked_or u_g855 (.x1(s1_1109), .x2(s2_1109), .y1(s1_1113), .y2(s2_1113), .z1(s1_1114), .z2(s2_1114));
  masked_or u_g856 (.x1(s1_1106), .x2(s2_1106), .y1(s1_1114), .y2(s2_1114), .z1(s1_1115), .z2(s2_1115));
  masked_and u_g857 (.x1(s1_970), .x2(s2_970), .y1(s1_1115), .y2(s2_1115), .z1(s1_1116), .z2(s2_1116));
  masked_and u_g858 (.x1(s1_169), .x2(s2_169), .y1(s1_971), .y2(s2_971), .z1(s1_1117), .z2(s2_1117));
  masked_or u_g859 (.x1(s1_1116), .x2(s2_1116), .y1(s1_1117), .y2(s2_1117), .z1(s1_1118), .z2(s2_1118));
  masked_and u_g860 (.x1(s1_64), .x2(s2_64), .y1(s1_975), .y2(s2_975), .z1(s1_1119), .z2(s2_1119));
  masked_and u_g861 (.x1(s1_80), .x2(s2_80), .y1(s1_1108), .y2(s2_1108), .z1(s1_1120), .z2(s2_1120));
  masked_and u_g862 (.x1(s1_169), .x2(s2_169), .y1(s1_702), .y2(s2_702), .z1(s1_1121), .z2(s2_1121));
  masked_and u_g863 (.x1(s1_128), .x2(s2_128), .y1(s1_137), .y2(s2_137), .z1(s1_1122), .z2(s2_1122));
  masked_and u_g864 (.x1(s1_972), .x2(s2_972), .y1(s1_1122), .y2(s2_1122), .z1(s1_1123), .z2(s2_1123));
  masked_and u_g865 (.x1(s1_72), .x2(s2_72), .y1(s1_1123), .y2(s2_1123), .z1(s1_1124), .z2(s2_1124));
  masked_or u_g866 (.x1(s1_1120), .x2(s2_1120), .y1(s1_1124), .y2(s2_1124), .z1(s1_1125), .z2(s2_1125));
  masked_or u_g867 (.x1(s1_1121), .x2(s2_1121), .y1(s1_1125), .y2(s2_1125), .z1(s1_1126), .z2(s2_1126));
  masked_or u_g868 (.x1(s1_1119), .x2(s2_1119), .y1(s1_1126), .y2(s2_1126), .z1(s1_1127), .z2(s2_1127));
  masked_and u_g869 (.x1(s1_970), .x2(s2_970), .y1(s1_1127), .y2(s2_1127), .z1(s1_1128), .z2(s2_1128));
  masked_and u_g870 (.x1(s1_196), .x2(s2_196), .y1(s1_971), .y2(s2_971), .z1(s1_1129), .z2(s2_1129));
  masked_or u_g871 (.x1(s1_1128), .x2(s2_1128), .y1(s1_1129), .y2(s2_1129), .z1(s1_1130), .z2(s2_1130));
  masked_and u_g872 (.x1(s1_63), .x2(s2_63), .y1(s1_975), .y2(s2_975), .z1(s1_1131), .z2(s2_1131));
  masked_and u_g873 (.x1(s1_79), .x2(s2_79), .y1(s1_1108), .y2(s2_1108), .z1(s1_1132), .z2(s2_1132));
  masked_and u_g874 (.x1(s1_196), .x2(s2_196), .y1(s1_702), .y2(s2_702), .z1(s1_1133), .z2(s2_1133));
  masked_and u_g875 (.x1(s1_71), .x2(s2_71), .y1(s1_1123), .y2(s2_1123), .z1(s1_1134), .z2(s2_1134));
  masked_or u_g876 (.x1(s1_1132), .x2(s2_1132), .y1(s1_1134), .y2(s2_1134), .z1(s1_1135), .z2(s2_1135));
  masked_or u_g877 (.x1(s1_1131), .x2(s2_1131), .y1(s1_1135), .y2(s2_1135), .z1(s1_1136), .z2(s2_1136));
  masked_or u_g878 (.x1(s1_1133), .x2(s2_1133), .y1(s1_1136), .y2(s2_1136), .z1(s1_1137), .z2(s2_1137));
  masked_and u_g879 (.x1(s1_970), .x2(s2_970), .y1(s1_1137), .y2(s2_1137), .z1(s1_1138), .z2(s2_1138));
  masked_and u_g880 (.x1(s1_207), .x2(s2_207), .y1(s1_971), .y2(s2_971), .z1(s1_1139), .z2(s2_1139));
  masked_or u_g881 (.x1(s1_1138), .x2(s2_1138), .y1(s1_1139), .y2(s2_1139), .z1(s1_1140), .z2(s2_1140));
  masked_and u_g882 (.x1(s1_62), .x2(s2_62), .y1(s1_975), .y2(s2_975), .z1(s1_1141), .z2(s2_1141));
  masked_and u_g883 (.x1(s1_78), .x2(s2_78), .y1(s1_1108), .y2(s2_1108), .z1(s1_1142), .z2(s2_1142));
  masked_and u_g884 (.x1(s1_207), .x2(s2_207), .y1(s1_702), .y2(s2_702), .z1(s1_1143), .z2(s2_1143));
  masked_and u_g885 (.x1(s1_70), .x2(s2_70), .y1(s1_1123), .y2(s2_1123), .z1(s1_1144), .z2(s2_1144));
  masked_or u_g886 (.x1(s1_1142), .x2(s2_1142), .y1(s1_1144), .y2(s2_1144), .z1(s1_1145), .z2(s2_1145));
  masked_or u_g887 (.x1(s1_1141), .x2(s2_1141), .y1(s1_1145), .y2(s2_1145), .z1(s1_1146), .z2(s2_1146));
  masked_or u_g888 (.x1(s1_1143), .x2(s2_1143), .y1(s1_1146), .y2(s2_1146), .z1(s1_1147), .z2(s2_1147));
  masked_and u_g889 (.x1(s1_970), .x2(s2_970), .y1(s1_1147), .y2(s2_1147), .z1(s1_1148), .z2(s2_1148));
  masked_and u_g890 (.x1(s1_184), .x2(s2_184), .y1(s1_971), .y2(s2_971), .z1(s1_1149), .z2(s2_1149));
  masked_or u_g891 (.x1(s1_1148), .x2(s2_1148), .y1(s1_1149), .y2(s2_1149), .z1(s1_1150), .z2(s2_1150));
  masked_and u_g892 (.x1(s1_61), .x2(s2_61), .y1(s1_975), .y2(s2_975), .z1(s1_1151), .z2(s2_1151));
  masked_and u_g893 (.x1(s1_77), .x2(s2_77), .y1(s1_1108), .y2(s2_1108), .z1(s1_1152), .z2(s2_1152));
  masked_and u_g894 (.x1(s1_184), .x2(s2_184), .y1(s1_702), .y2(s2_702), .z1(s1_1153), .z2(s2_1153));
  masked_and u_g895 (.x1(s1_69), .x2(s2_69), .y1(s1_1123), .y2(s2_1123), .z1(s1_1154), .z2(s2_1154));
  masked_or u_g896 (.x1(s1_1152), .x2(s2_1152), .y1(s1_1154), .y2(s2_1154), .z1(s1_1155), .z2(s2_1155));
  masked_or u_g897 (.x1(s1_1151), .x2(s2_1151), .y1(s1_1155), .y2(s2_1155), .z1(s1_1156), .z2(s2_1156));
  masked_or u_g898 (.x1(s1_1153), .x2(s2_1153), .y1(s1_1156), .y2(s2_1156), .z1(s1_1157), .z2(s2_1157));
  masked_and u_g899 (.x1(s1_970), .x2(s2_970), .y1(s1_1157), .y2(s2_1157), .z1(s1_1158), .z2(s2_1158));
  masked_and u_g900 (.x1(s1_188), .x2(s2_188), .y1(s1_971), .y2(s2_971), .z1(s1_1159), .z2(s2_1159));
  masked_or u_g901 (.x1(s1_1158), .x2(s2_1158), .y1(s1_1159), .y2(s2_1159), .z1(s1_1160), .z2(s2_1160));
  masked_and u_g902 (.x1(s1_60), .x2(s2_60), .y1(s1_975), .y2(s2_975), .z1(s1_1161), .z2(s2_1161));
  masked_and u_g903 (.x1(s1_76), .x2(s2_76), .y1(s1_1108), .y2(s2_1108), .z1(s1_1162), .z2(s2_1162));
  masked_and u_g904 (.x1(s1_188), .x2(s2_188), .y1(s1_702), .y2(s2_702), .z1(s1_1163), .z2(s2_1163));
  masked_and u_g905 (.x1(s1_68), .x2(s2_68), .y1(s1_1123), .y2(s2_1123), .z1(s1_1164), .z2(s2_1164));
  masked_or u_g906 (.x1(s1_1162), .x2(s2_1162), .y1(s1_1164), .y2(s2_1164), .z1(s1_1165), .z2(s2_1165));
  masked_or u_g907 (.x1(s1_1161), .x2(s2_1161), .y1(s1_1165), .y2(s2_1165), .z1(s1_1166), .z2(s2_1166));
  masked_or u_g908 (.x1(s1_1163), .x2(s2_1163), .y1(s1_1166), .y2(s2_1166), .z1(s1_1167), .z2(s2_1167));
  masked_and u_g909 (.x1(s1_970), .x2(s2_970), .y1(s1_1167), .y2(s2_1167), .z1(s1_1168), .z2(s2_1168));
  masked_and u_g910 (.x1(s1_201), .x2(s2_201), .y1(s1_971), .y2(s2_971), .z1(s1_1169), .z2(s2_1169));
  masked_or u_g911 (.x1(s1_1168), .x2(s2_1168), .y1(s1_1169), .y2(s2_1169), .z1(s1_1170), .z2(s2_1170));
  masked_and u_g912 (.x1(s1_59), .x2(s2_59), .y1(s1_975), .y2(s2_975), .z1(s1_1171), .z2(s2_1171));
  masked_and u_g913 (.x1(s1_75), .x2(s2_75), .y1(s1_1108), .y2(s2_1108), .z1(s1_1172), .z2(s2_1172));
  masked_and u_g914 (.x1(s1_201), .x2(s2_201), .y1(s1_702), .y2(s2_702), .z1(s1_1173), .z2(s2_1173));
  masked_and u_g915 (.x1(s1_67), .x2(s2_67), .y1(s1_1123), .y2(s2_1123), .z1(s1_1174), .z2(s2_1174));
  masked_or u_g916 (.x1(s1_1173), .x2(s2_1173), .y1(s1_1174), .y2(s2_1174), .z1(s1_1175), .z2(s2_1175));
  masked_or u_g917 (.x1(s1_1172), .x2(s2_1172), .y1(s1_1175), .y2(s2_1175), .z1(s1_1176), .z2(s2_1176));
  masked_or u_g918 (.x1(s1_1171), .x2(s2_1171), .y1(s1_1176), .y2(s2_1176), .z1(s1_1177), .z2(s2_1177));
  masked_and u_g919 (.x1(s1_970), .x2(s2_970), .y1(s1_1177), .y2(s2_1177), .z1(s1_1178), .z2(s2_1178));
  masked_and u_g920 (.x1(s1_226), .x2(s2_226), .y1(s1_971), .y2(s2_971), .z1(s1_1179), .z2(s2_1179));
  masked_or u_g921 (.x1(s1_1178), .x2(s2_1178), .y1(s1_1179), .y2(s2_1179), .z1(s1_1180), .z2(s2_1180));
  masked_and u_g922 (.x1(s1_58), .x2(s2_58), .y1(s1_975), .y2(s2_975), .z1(s1_1181), .z2(s2_1181));
  masked_and u_g923 (.x1(s1_74), .x2(s2_74), .y1(s1_1108), .y2(s2_1108), .z1(s1_1182), .z2(s2_1182));
  masked_and u_g924 (.x1(s1_226), .x2(s2_226), .y1(s1_702), .y2(s2_702), .z1(s1_1183), .z2(s2_1183));
  masked_and u_g925 (.x1(s1_66), .x2(s2_66), .y1(s1_1123), .y2(s2_1123), .z1(s1_1184), .z2(s2_1184));
  masked_or u_g926 (.x1(s1_1182), .x2(s2_1182), .y1(s1_1184), .y2(s2_1184), .z1(s1_1185), .z2(s2_1185));
  masked_or u_g927 (.x1(s1_1181), .x2(s2_1181), .y1(s1_1185), .y2(s2_1185), .z1(s1_1186), .z2(s2_1186));
  masked_or u_g928 (.x1(s1_1183), .x2(s2_1183), .y1(s1_1186), .y2(s2_1186), .z1(s1_1187), .z2(s2_1187));
  masked_and u_g929 (.x1(s1_970), .x2(s2_970), .y1(s1_1187), .y2(s2_1187), .z1(s1_1188), .z2(s2_1188));
  masked_and u_g930 (.x1(s1_180), .x2(s2_180), .y1(s1_971), .y2(s2_971), .z1(s1_1189), .z2(s2_1189));
  masked_or u_g931 (.x1(s1_1188), .x2(s2_1188), .y1(s1_1189), .y2(s2_1189), .z1(s1_1190), .z2(s2_1190));
  masked_and u_g932 (.x1(s1_57), .x2(s2_57), .y1(s1_975), .y2(s2_975), .z1(s1_1191), .z2(s2_1191));
  masked_and u_g933 (.x1(s1_1021), .x2(s2_1021), .y1(s1_1107), .y2(s2_1107), .z1(s1_1192), .z2(s2_1192));
  masked_and u_g934 (.x1(s1_180), .x2(s2_180), .y1(s1_702), .y2(s2_702), .z1(s1_1193), .z2(s2_1193));
  masked_and u_g935 (.x1(s1_65), .x2(s2_65), .y1(s1_1122), .y2(s2_1122), .z1(s1_1194), .z2(s2_1194));
  masked_and u_g936 (.x1(s1_972), .x2(s2_972), .y1(s1_1194), .y2(s2_1194), .z1(s1_1195), .z2(s2_1195));
  masked_or u_g937 (.x1(s1_1193), .x2(s2_1193), .y1(s1_1195), .y2(s2_1195), .z1(s1_1196), .z2(s2_1196));
  masked_or u_g938 (.x1(s1_1192), .x2(s2_1192), .y1(s1_1196), .y2(s2_1196), .z1(s1_1197), .z2(s2_1197));
  masked_or u_g939 (.x1(s1_1191), .x2(s2_1191), .y1(s1_1197), .y2(s2_1197), .z1(s1_1198), .z2(s2_1198));
  masked_and u_g940 (.x1(s1_970), .x2(s2_970), .y1(s1_1198), .y2(s2_1198), .z1(s1_1199), .z2(s2_1199));
  masked_and u_g941 (.x1(s1_25), .x2(s2_25), .y1(s1_971), .y2(s2_971), .z1(s1_1200), .z2(s2_1200));
  masked_or u_g942 (.x1(s1_1199), .x2(s2_1199), .y1(s1_1200), .y2(s2_1200), .z1(s1_1201), .z2(s2_1201));
  masked_and u_g943 (.x1(s1_56), .x2(s2_56), .y1(s1_975), .y2(s2_975), .z1(s1_1202), .z2(s2_1202));
  masked_and u_g944 (.x1(s1_64), .x2(s2_64), .y1(s1_1123), .y2(s2_1123), .z1(s1_1203), .z2(s2_1203));
  masked_and u_g945 (.x1(s1_25), .x2(s2_25), .y1(s1_702), .y2(s2_702), .z1(s1_1204), .z2(s2_1204));
  masked_and u_g946 (.x1(s1_1033), .x2(s2_1033), .y1(s1_1107), .y2(s2_1107), .z1(s1_1205), .z2(s2_1205));
  masked_or u_g947 (.x1(s1_1204), .x2(s2_1204), .y1(s1_1205), .y2(s2_1205), .z1(s1_1206), .z2(s2_1206));
  masked_or u_g948 (.x1(s1_1203), .x2(s2_1203), .y1(s1_1206), .y2(s2_1206), .z1(s1_1207), .z2(s2_1207));
  masked_or u_g949 (.x1(s1_1202), .x2(s2_1202), .y1(s1_1207), .y2(s2_1207), .z1(s1_1208), .z2(s2_1208));
  masked_and u_g950 (.x1(s1_970), .x2(s2_970), .y1(s1_1208), .y2(s2_1208), .z1(s1_1209), .z2(s2_1209));
  masked_and u_g951 (.x1(s1_24), .x2(s2_24), .y1(s1_971), .y2(s2_971), .z1(s1_1210), .z2(s2_1210));
  masked_or u_g952 (.x1(s1_1209), .x2(s2_1209), .y1(s1_1210), .y2(s2_1210), .z1(s1_1211), .z2(s2_1211));
  masked_and u_g953 (.x1(s1_55), .x2(s2_55), .y1(s1_975), .y2(s2_975), .z1(s1_1212), .z2(s2_1212));
  masked_and u_g954 (.x1(s1_1044), .x2(s2_1044), .y1(s1_1107), .y2(s2_1107), .z1(s1_1213), .z2(s2_1213));
  masked_and u_g955 (.x1(s1_24), .x2(s2_24), .y1(s1_702), .y2(s2_702), .z1(s1_1214), .z2(s2_1214));
  masked_and u_g956 (.x1(s1_63), .x2(s2_63), .y1(s1_1122), .y2(s2_1122), .z1(s1_1215), .z2(s2_1215));
  masked_and u_g957 (.x1(s1_972), .x2(s2_972), .y1(s1_1215), .y2(s2_1215), .z1(s1_1216), .z2(s2_1216));
  masked_or u_g958 (.x1(s1_1214), .x2(s2_1214), .y1(s1_1216), .y2(s2_1216), .z1(s1_1217), .z2(s2_1217));
  masked_or u_g959 (.x1(s1_1213), .x2(s2_1213), .y1(s1_1217), .y2(s2_1217), .z1(s1_1218), .z2(s2_1218));
  masked_or u_g960 (.x1(s1_1212), .x2(s2_1212), .y1(s1_1218), .y2(s2_1218), .z1(s1_1219), .z2(s2_1219));
  masked_and u_g961 (.x1(s1_970), .x2(s2_970), .y1(s1_1219), .y2(s2_1219), .z1(s1_1220), .z2(s2_1220));
  masked_and u_g962 (.x1(s1_23), .x2(s2_23), .y1(s1_971), .y2(s2_971), .z1(s1_1221), .z2(s2_1221));
  masked_or u_g963 (.x1(s1_1220), .x2(s2_1220), .y1(s1_1221), .y2(s2_1221), .z1(s1_1222), .z2(s2_1222));
  masked_and u_g964 (.x1(s1_54), .x2(s2_54), .y1(s1_975), .y2(s2_975), .z1(s1_1223), .z2(s2_1223));
  masked_and u_g965 (.x1(s1_1055), .x2(s2_1055), .y1(s1_1107), .y2(s2_1107), .z1(s1_1224), .z2(s2_1224));
  masked_and u_g966 (.x1(s1_23), .x2(s2_23), .y1(s1_702), .y2(s2_702), .z1(s1_1225), .z2(s2_1225));
  masked_and u_g967 (.x1(s1_62), .x2(s2_62), .y1(s1_1123), .y2(s2_1123), .z1(s1_1226), .z2(s2_1226));
  masked_or u_g968 (.x1(s1_1225), .x2(s2_1225), .y1(s1_1226), .y2(s2_1226), .z1(s1_1227), .z2(s2_1227));
  masked_or u_g969 (.x1(s1_1224), .x2(s2_1224), .y1(s1_1227), .y2(s2_1227), .z1(s1_1228), .z2(s2_1228));
  masked_or u_g970 (.x1(s1_1223), .x2(s2_1223), .y1(s1_1228), .y2(s2_1228), .z1(s1_1229), .z2(s2_1229));
  masked_and u_g971 (.x1(s1_970), .x2(s2_970), .y1(s1_1229), .y2(s2_1229), .z1(s1_1230), .z2(s2_1230));
  masked_and u_g972 (.x1(s1_22), .x2(s2_22), .y1(s1_971), .y2(s2_971), .z1(s1_1231), .z2(s2_1231));
  masked_or u_g973 (.x1(s1_1230), .x2(s2_1230), .y1(s1_1231), .y2(s2_1231), .z1(s1_1232), .z2(s2_1232));
  masked_and u_g974 (.x1(s1_53), .x2(s2_53), .y1(s1_975), .y2(s2_975), .z1(s1_1233), .z2(s2_1233));
  masked_and u_g975 (.x1(s1_61), .x2(s2_61), .y1(s1_1123), .y2(s2_1123), .z1(s1_1234), .z2(s2_1234));
  masked_and u_g976 (.x1(s1_22), .x2(s2_22), .y1(s1_702), .y2(s2_702), .z1(s1_1235), .z2(s2_1235));
  masked_and u_g977 (.x1(s1_1066), .x2(s2_1066), .y1(s1_1107), .y2(s2_1107), .z1(s1_1236), .z2(s2_1236));
  masked_or u_g978 (.x1(s1_1235), .x2(s2_1235), .y1(s1_1236), .y2(s2_1236), .z1(s1_1237), .z2(s2_1237));
  masked_or u_g979 (.x1(s1_1234), .x2(s2_1234), .y1(s1_1237), .y2(s2_1237), .z1(s1_1238), .z2(s2_1238));
  masked_or u_g980 (.x1(s1_1233), .x2(s2_1233), .y1(s1_1238), .y2(s2_1238), .z1(s1_1239), .z2(s2_1239));
  masked_and u_g981 (.x1(s1_970), .x2(s2_970), .y1(s1_1239), .y2(s2_1239), .z1(s1_1240), .z2(s2_1240));
  masked_and u_g982 (.x1(s1_21), .x2(s2_21), .y1(s1_971), .y2(s2_971), .z1(s1_1241), .z2(s2_1241));
  masked_or u_g983 (.x1(s1_1240), .x2(s2_1240), .y1(s1_1241), .y2(s2_1241), .z1(s1_1242), .z2(s2_1242));
  masked_and u_g984 (.x1(s1_52), .x2(s2_52), .y1(s1_975), .y2(s2_975), .z1(s1_1243), .z2(s2_1243));
  masked_and u_g985 (.x1(s1_1077), .x2(s2_1077), .y1(s1_1107), .y2(s2_1107), .z1(s1_1244), .z2(s2_1244));
  masked_and u_g986 (.x1(s1_21), .x2(s2_21), .y1(s1_702), .y2(s2_702), .z1(s1_1245), .z2(s2_1245));
  masked_and u_g987 (.x1(s1_60), .x2(s2_60), .y1(s1_1122), .y2(s2_1122), .z1(s1_1246), .z2(s2_1246));
  masked_and u_g988 (.x1(s1_972), .x2(s2_972), .y1(s1_1246), .y2(s2_1246), .z1(s1_1247), .z2(s2_1247));
  masked_or u_g989 (.x1(s1_1245), .x2(s2_1245), .y1(s1_1247), .y2(s2_1247), .z1(s1_1248), .z2(s2_1248));
  masked_or u_g990 (.x1(s1_1244), .x2(s2_1244), .y1(s1_1248), .y2(s2_1248), .z1(s1_1249), .z2(s2_1249));
  masked_or u_g991 (.x1(s1_1243), .x2(s2_1243), .y1(s1_1249), .y2(s2_1249), .z1(s1_1250), .z2(s2_1250));
  masked_and u_g992 (.x1(s1_970), .x2(s2_970), .y1(s1_1250), .y2(s2_1250), .z1(s1_1251), .z2(s2_1251));
  masked_and u_g993 (.x1(s1_20), .x2(s2_20), .y1(s1_971), .y2(s2_971), .z1(s1_1252), .z2(s2_1252));
  masked_or u_g994 (.x1(s1_1251), .x2(s2_1251), .y1(s1_1252), .y2(s2_1252), .z1(s1_1253), .z2(s2_1253));
  masked_and u_g995 (.x1(s1_51), .x2(s2_51), .y1(s1_975), .y2(s2_975), .z1(s1_1254), .z2(s2_1254));
  masked_and u_g996 (.x1(s1_1088), .x2(s2_1088), .y1(s1_1107), .y2(s2_1107), .z1(s1_1255), .z2(s2_1255));
  masked_and u_g997 (.x1(s1_20), .x2(s2_20), .y1(s1_702), .y2(s2_702), .z1(s1_1256), .z2(s2_1256));
  masked_and u_g998 (.x1(s1_59), .x2(s2_59), .y1(s1_1122), .y2(s2_1122), .z1(s1_1257), .z2(s2_1257));
  masked_and u_g999 (.x1(s1_972), .x2(s2_972), .y1(s1_1257), .y2(s2_1257), .z1(s1_1258), .z2(s2_1258));
  masked_or u_g1000 (.x1(s1_1256), .x2(s2_1256), .y1(s1_1258), .y2(s2_1258), .z1(s1_1259), .z2(s2_1259));
  masked_or u_g1001 (.x1(s1_1255), .x2(s2_1255), .y1(s1_1259), .y2(s2_1259), .z1(s1_1260), .z2(s2_1260));
  masked_or u_g1002 (.x1(s1_1254), .x2(s2_1254), .y1(s1_1260), .y2(s2_1260), .z1(s1_1261), .z2(s2_1261));
  masked_and u_g1003 (.x1(s1_970), .x2(s2_970), .y1(s1_1261), .y2(s2_1261), .z1(s1_1262), .z2(s2_1262));
  masked_and u_g1004 (.x1(s1_19), .x2(s2_19), .y1(s1_971), .y2(s2_971), .z1(s1_1263), .z2(s2_1263));
  masked_or u_g1005 (.x1(s1_1262), .x2(s2_1262), .y1(s1_1263), .y2(s2_1263), .z1(s1_1264), .z2(s2_1264));
  masked_and u_g1006 (.x1(s1_50), .x2(s2_50), .y1(s1_975), .y2(s2_975), .z1(s1_1265), .z2(s2_1265));
  masked_and u_g1007 (.x1(s1_1099), .x2(s2_1099), .y1(s1_1107), .y2(s2_1107), .z1(s1_1266), .z2(s2_1266));
  masked_and u_g1008 (.x1(s1_19), .x2(s2_19), .y1(s1_702), .y2(s2_702), .z1(s1_1267), .z2(s2_1267));
  masked_and u_g1009 (.x1(s1_58), .x2(s2_58), .y1(s1_1122), .y2(s2_1122), .z1(s1_1268), .z2(s2_1268));
  masked_and u_g1010 (.x1(s1_972), .x2(s2_972), .y1(s1_1268), .y2(s2_1268), .z1(s1_1269), .z2(s2_1269));
  masked_or u_g1011 (.x1(s1_1267), .x2(s2_1267), .y1(s1_1269), .y2(s2_1269), .z1(s1_1270), .z2(s2_1270));
  masked_or u_g1012 (.x1(s1_1266), .x2(s2_1266), .y1(s1_1270), .y2(s2_1270), .z1(s1_1271), .z2(s2_1271));
  masked_or u_g1013 (.x1(s1_1265), .x2(s2_1265), .y1(s1_1271), .y2(s2_1271), .z1(s1_1272), .z2(s2_1272));
  masked_and u_g1014 (.x1(s1_970), .x2(s2_970), .y1(s1_1272), .y2(s2_1272), .z1(s1_1273), .z2(s2_1273));
  masked_and u_g1015 (.x1(s1_18), .x2(s2_18), .y1(s1_971), .y2(s2_971), .z1(s1_1274), .z2(s2_1274));
  masked_or u_g1016 (.x1(s1_1273), .x2(s2_1273), .y1(s1_1274), .y2(s2_1274), .z1(s1_1275), .z2(s2_1275));
  masked_and u_g1017 (.x1(s1_204), .x2(s2_204), .y1(s1_154), .y2(s2_154), .z1(s1_1276), .z2(s2_1276));
  masked_and u_g1018 (.x1(s1_446), .x2(s2_446), .y1(s1_155), .y2(s2_155), .z1(s1_1277), .z2(s2_1277));
  masked_or u_g1019 (.x1(s1_1276), .x2(s2_1276), .y1(s1_1277), .y2(s2_1277), .z1(s1_1278), .z2(s2_1278));
  masked_and u_g1020 (.x1(s1_209), .x2(s2_209), .y1(s1_154), .y2(s2_154), .z1(s1_1279), .z2(s2_1279));
  masked_and u_g1021 (.x1(s1_449), .x2(s2_449), .y1(s1_155), .y2(s2_155), .z1(s1_1280), .z2(s2_1280));
  masked_or u_g1022 (.x1(s1_1279), .x2(s2_1279), .y1(s1_1280), .y2(s2_1280), .z1(s1_1281), .z2(s2_1281));
  masked_and u_g1023 (.x1(s1_215), .x2(s2_215), .y1(s1_154), .y2(s2_154), .z1(s1_1282), .z2(s2_1282));
  masked_and u_g1024 (.x1(s1_444), .x2(s2_444), .y1(s1_155), .y2(s2_155), .z1(s1_1283), .z2(s2_1283));
  masked_or u_g1025 (.x1(s1_1282), .x2(s2_1282), .y1(s1_1283), .y2(s2_1283), .z1(s1_1284), .z2(s2_1284));
  masked_and u_g1026 (.x1(s1_219), .x2(s2_219), .y1(s1_154), .y2(s2_154), .z1(s1_1285), .z2(s2_1285));
  masked_and u_g1027 (.x1(s1_432), .x2(s2_432), .y1(s1_155), .y2(s2_155), .z1(s1_1286), .z2(s2_1286));
  masked_or u_g1028 (.x1(s1_1285), .x2(s2_1285), .y1(s1_1286), .y2(s2_1286), .z1(s1_1287), .z2(s2_1287));
  masked_and u_g1029 (.x1(s1_223), .x2(s2_223), .y1(s1_154), .y2(s2_154), .z1(s1_1288), .z2(s2_1288));
  masked_and u_g1030 (.x1(s1_437), .x2(s2_437), .y1(s1_155), .y2(s2_155), .z1(s1_1289), .z2(s2_1289));
  masked_or u_g1031 (.x1(s1_1288), .x2(s2_1288), .y1(s1_1289), .y2(s2_1289), .z1(s1_1290), .z2(s2_1290));
  masked_and u_g1032 (.x1(s1_228), .x2(s2_228), .y1(s1_154), .y2(s2_154), .z1(s1_1291), .z2(s2_1291));
  masked_and u_g1033 (.x1(s1_435), .x2(s2_435), .y1(s1_155), .y2(s2_155), .z1(s1_1292), .z2(s2_1292));
  masked_or u_g1034 (.x1(s1_1291), .x2(s2_1291), .y1(s1_1292), .y2(s2_1292), .z1(s1_1293), .z2(s2_1293));
  masked_and u_g1035 (.x1(s1_234), .x2(s2_234), .y1(s1_154), .y2(s2_154), .z1(s1_1294), .z2(s2_1294));
  masked_and u_g1036 (.x1(s1_430), .x2(s2_430), .y1(s1_155), .y2(s2_155), .z1(s1_1295), .z2(s2_1295));
  masked_or u_g1037 (.x1(s1_1294), .x2(s2_1294), .y1(s1_1295), .y2(s2_1295), .z1(s1_1296), .z2(s2_1296));
  masked_and u_g1038 (.x1(s1_251), .x2(s2_251), .y1(s1_154), .y2(s2_154), .z1(s1_1297), .z2(s2_1297));
  masked_and u_g1039 (.x1(s1_386), .x2(s2_386), .y1(s1_155), .y2(s2_155), .z1(s1_1298), .z2(s2_1298));
  masked_or u_g1040 (.x1(s1_1297), .x2(s2_1297), .y1(s1_1298), .y2(s2_1298), .z1(s1_1299), .z2(s2_1299));
  masked_and u_g1041 (.x1(s1_196), .x2(s2_196), .y1(s1_154), .y2(s2_154), .z1(s1_1300), .z2(s2_1300));
  masked_and u_g1042 (.x1(s1_115), .x2(s2_115), .y1(s1_155), .y2(s2_155), .z1(s1_1301), .z2(s2_1301));
  masked_or u_g1043 (.x1(s1_1300), .x2(s2_1300), .y1(s1_1301), .y2(s2_1301), .z1(s1_1302), .z2(s2_1302));
  masked_and u_g1044 (.x1(s1_207), .x2(s2_207), .y1(s1_154), .y2(s2_154), .z1(s1_1303), .z2(s2_1303));
  masked_and u_g1045 (.x1(s1_112), .x2(s2_112), .y1(s1_155), .y2(s2_155), .z1(s1_1304), .z2(s2_1304));
  masked_or u_g1046 (.x1(s1_1303), .x2(s2_1303), .y1(s1_1304), .y2(s2_1304), .z1(s1_1305), .z2(s2_1305));
  masked_and u_g1047 (.x1(s1_184), .x2(s2_184), .y1(s1_154), .y2(s2_154), .z1(s1_1306), .z2(s2_1306));
  masked_and u_g1048 (.x1(s1_110), .x2(s2_110), .y1(s1_155), .y2(s2_155), .z1(s1_1307), .z2(s2_1307));
  masked_or u_g1049 (.x1(s1_1306), .x2(s2_1306), .y1(s1_1307), .y2(s2_1307), .z1(s1_1308), .z2(s2_1308));
  masked_and u_g1050 (.x1(s1_188), .x2(s2_188), .y1(s1_154), .y2(s2_154), .z1(s1_1309), .z2(s2_1309));
  masked_and u_g1051 (.x1(s1_103), .x2(s2_103), .y1(s1_155), .y2(s2_155), .z1(s1_1310), .z2(s2_1310));
  masked_or u_g1052 (.x1(s1_1309), .x2(s2_1309), .y1(s1_1310), .y2(s2_1310), .z1(s1_1311), .z2(s2_1311));
  masked_and u_g1053 (.x1(s1_201), .x2(s2_201), .y1(s1_154), .y2(s2_154), .z1(s1_1312), .z2(s2_1312));
  masked_and u_g1054 (.x1(s1_102), .x2(s2_102), .y1(s1_155), .y2(s2_155), .z1(s1_1313), .z2(s2_1313));
  masked_or u_g1055 (.x1(s1_1312), .x2(s2_1312), .y1(s1_1313), .y2(s2_1313), .z1(s1_1314), .z2(s2_1314));
  masked_and u_g1056 (.x1(s1_226), .x2(s2_226), .y1(s1_154), .y2(s2_154), .z1(s1_1315), .z2(s2_1315));
  masked_and u_g1057 (.x1(s1_101), .x2(s2_101), .y1(s1_155), .y2(s2_155), .z1(s1_1316), .z2(s2_1316));
  masked_or u_g1058 (.x1(s1_1315), .x2(s2_1315), .y1(s1_1316), .y2(s2_1316), .z1(s1_1317), .z2(s2_1317));
  masked_and u_g1059 (.x1(s1_180), .x2(s2_180), .y1(s1_154), .y2(s2_154), .z1(s1_1318), .z2(s2_1318));
  masked_and u_g1060 (.x1(s1_100), .x2(s2_100), .y1(s1_155), .y2(s2_155), .z1(s1_1319), .z2(s2_1319));
  masked_or u_g1061 (.x1(s1_1318), .x2(s2_1318), .y1(s1_1319), .y2(s2_1319), .z1(s1_1320), .z2(s2_1320));
  masked_and u_g1062 (.x1(s1_25), .x2(s2_25), .y1(s1_154), .y2(s2_154), .z1(s1_1321), .z2(s2_1321));
  masked_and u_g1063 (.x1(s1_99), .x2(s2_99), .y1(s1_155), .y2(s2_155), .z1(s1_1322), .z2(s2_1322));
  masked_or u_g1064 (.x1(s1_1321), .x2(s2_1321), .y1(s1_1322), .y2(s2_1322), .z1(s1_1323), .z2(s2_1323));
  masked_and u_g1065 (.x1(s1_24), .x2(s2_24), .y1(s1_154), .y2(s2_154), .z1(s1_1324), .z2(s2_1324));
  masked_and u_g1066 (.x1(s1_139), .x2(s2_139), .y1(s1_155), .y2(s2_155), .z1(s1_1325), .z2(s2_1325));
  masked_or u_g1067 (.x1(s1_1324), .x2(s2_1324), .y1(s1_1325), .y2(s2_1325), .z1(s1_1326), .z2(s2_1326));
  masked_and u_g1068 (.x1(s1_23), .x2(s2_23), .y1(s1_154), .y2(s2_154), .z1(s1_1327), .z2(s2_1327));
  masked_and u_g1069 (.x1(s1_143), .x2(s2_143), .y1(s1_155), .y2(s2_155), .z1(s1_1328), .z2(s2_1328));
  masked_or u_g1070 (.x1(s1_1327), .x2(s2_1327), .y1(s1_1328), .y2(s2_1328), .z1(s1_1329), .z2(s2_1329));
  masked_and u_g1071 (.x1(s1_22), .x2(s2_22), .y1(s1_154), .y2(s2_154), .z1(s1_1330), .z2(s2_1330));
  masked_and u_g1072 (.x1(s1_141), .x2(s2_141), .y1(s1_155), .y2(s2_155), .z1(s1_1331), .z2(s2_1331));
  masked_or u_g1073 (.x1(s1_1330), .x2(s2_1330), .y1(s1_1331), .y2(s2_1331), .z1(s1_1332), .z2(s2_1332));
  masked_and u_g1074 (.x1(s1_21), .x2(s2_21), .y1(s1_154), .y2(s2_154), .z1(s1_1333), .z2(s2_1333));
  masked_and u_g1075 (.x1(s1_147), .x2(s2_147), .y1(s1_155), .y2(s2_155), .z1(s1_1334), .z2(s2_1334));
  masked_or u_g1076 (.x1(s1_1333), .x2(s2_1333), .y1(s1_1334), .y2(s2_1334), .z1(s1_1335), .z2(s2_1335));
  masked_and u_g1077 (.x1(s1_20), .x2(s2_20), .y1(s1_154), .y2(s2_154), .z1(s1_1336), .z2(s2_1336));
  masked_and u_g1078 (.x1(s1_145), .x2(s2_145), .y1(s1_155), .y2(s2_155), .z1(s1_1337), .z2(s2_1337));
  masked_or u_g1079 (.x1(s1_1336), .x2(s2_1336), .y1(s1_1337), .y2(s2_1337), .z1(s1_1338), .z2(s2_1338));
  masked_and u_g1080 (.x1(s1_19), .x2(s2_19), .y1(s1_154), .y2(s2_154), .z1(s1_1339), .z2(s2_1339));
  masked_and u_g1081 (.x1(s1_484), .x2(s2_484), .y1(s1_155), .y2(s2_155), .z1(s1_1340), .z2(s2_1340));
  masked_or u_g1082 (.x1(s1_1339), .x2(s2_1339), .y1(s1_1340), .y2(s2_1340), .z1(s1_1341), .z2(s2_1341));
  masked_and u_g1083 (.x1(s1_18), .x2(s2_18), .y1(s1_154), .y2(s2_154), .z1(s1_1342), .z2(s2_1342));
  masked_and u_g1084 (.x1(s1_482), .x2(s2_482), .y1(s1_155), .y2(s2_155), .z1(s1_1343), .z2(s2_1343));
  masked_or u_g1085 (.x1(s1_1342), .x2(s2_1342), .y1(s1_1343), .y2(s2_1343), .z1(s1_1344), .z2(s2_1344));
  masked_and u_g1086 (.x1(s1_107), .x2(s2_107), .y1(s1_341), .y2(s2_341), .z1(s1_1345), .z2(s2_1345));
  masked_or u_g1087 (.x1(s1_96), .x2(s2_96), .y1(s1_342), .y2(s2_342), .z1(s1_1346), .z2(s2_1346));
  masked_and u_g1088 (.x1(s1_340), .x2(s2_340), .y1(s1_1346), .y2(s2_1346), .z1(s1_1347), .z2(s2_1347));
  masked_or u_g1089 (.x1(s1_339), .x2(s2_339), .y1(s1_1345), .y2(s2_1345), .z1(s1_1348), .z2(s2_1348));
  masked_or u_g1090 (.x1(s1_340), .x2(s2_340), .y1(s1_360), .y2(s2_360), .z1(s1_1349), .z2(s2_1349));
  masked_and u_g1091 (.x1(s1_365), .x2(s2_365), .y1(s1_491), .y2(s2_491), .z1(s1_1350), .z2(s2_1350));
  assign s1_1351 = ~s1_1350;
  assign s2_1351 = s2_1350;
  masked_and u_g1092 (.x1(s1_702), .x2(s2_702), .y1(s1_967), .y2(s2_967), .z1(s1_1352), .z2(s2_1352));
  masked_and u_g1093 (.x1(s1_1349), .x2(s2_1349), .y1(s1_1352), .y2(s2_1352), .z1(s1_1353), .z2(s2_1353));
  assign s1_1354 = ~s1_1353;
  assign s2_1354 = s2_1353;
  masked_and u_g1094 (.x1(s1_1351), .x2(s2_1351), .y1(s1_1353), .y2(s2_1353), .z1(s1_1355), .z2(s2_1355));
  masked_or u_g1095 (.x1(s1_1350), .x2(s2_1350), .y1(s1_1354), .y2(s2_1354), .z1(s1_1356), .z2(s2_1356));
  masked_and u_g1096 (.x1(s1_1348), .x2(s2_1348), .y1(s1_1355), .y2(s2_1355), .z1(s1_1357), .z2(s2_1357));
  masked_or u_g1097 (.x1(s1_1347), .x2(s2_1347), .y1(s1_1356), .y2(s2_1356), .z1(s1_1358), .z2(s2_1358));
  masked_or u_g1098 (.x1(s1_125), .x2(s2_125), .y1(s1_1357), .y2(s2_1357), .z1(s1_1359), .z2(s2_1359));
  masked_and u_g1099 (.x1(s1_340), .x2(s2_340), .y1(s1_619), .y2(s2_619), .z1(s1_1360), .z2(s2_1360));
  assign s1_1361 = s1_125 ^ s1_350;
  assign s2_1361 = s2_125 ^ s2_350;
  masked_and u_g1100 (.x1(s1_339), .x2(s2_339), .y1(s1_1361), .y2(s2_1361), .z1(s1_1362), .z2(s2_1362));
  masked_or u_g1101 (.x1(s1_1358), .x2(s2_1358), .y1(s1_1362), .y2(s2_1362), .z1(s1_1363), .z2(s2_1363));
  masked_or u_g1102 (.x1(s1_1360), .x2(s2_1360), .y1(s1_1363), .y2(s2_1363), .z1(s1_1364), .z2(s2_1364));
  masked_and u_g1103 (.x1(s1_1359), .x2(s2_1359), .y1(s1_1364), .y2(s2_1364), .z1(s1_1365), .z2(s2_1365));
  masked_and u_g1104 (.x1(s1_107), .x2(s2_107), .y1(s1_416), .y2(s2_416), .z1(s1_1366), .z2(s2_1366));
  masked_or u_g1105 (.x1(s1_339), .x2(s2_339), .y1(s1_1366), .y2(s2_1366), .z1(s1_1367), .z2(s2_1367));
  assign s1_1368 = ~s1_1367;
  assign s2_1368 = s2_1367;
  masked_and u_g1106 (.x1(s1_1355), .x2(s2_1355), .y1(s1_1367), .y2(s2_1367), .z1(s1_1369), .z2(s2_1369));
  masked_or u_g1107 (.x1(s1_1356), .x2(s2_1356), .y1(s1_1368), .y2(s2_1368), .z1(s1_1370), .z2(s2_1370));
  masked_or u_g1108 (.x1(s1_131), .x2(s2_131), .y1(s1_1369), .y2(s2_1369), .z1(s1_1371), .z2(s2_1371));
  assign s1_1372 = s1_131 ^ s1_349;
  assign s2_1372 = s2_131 ^ s2_349;
  masked_and u_g1109 (.x1(s1_339), .x2(s2_339), .y1(s1_1372), .y2(s2_1372), .z1(s1_1373), .z2(s2_1373));
  masked_or u_g1110 (.x1(s1_1370), .x2(s2_1370), .y1(s1_1373), .y2(s2_1373), .z1(s1_1374), .z2(s2_1374));
  masked_or u_g1111 (.x1(s1_1360), .x2(s2_1360), .y1(s1_1374), .y2(s2_1374), .z1(s1_1375), .z2(s2_1375));
  masked_and u_g1112 (.x1(s1_1371), .x2(s2_1371), .y1(s1_1375), .y2(s2_1375), .z1(s1_1376), .z2(s2_1376));
  masked_and u_g1113 (.x1(s1_107), .x2(s2_107), .y1(s1_413), .y2(s2_413), .z1(s1_1377), .z2(s2_1377));
  masked_or u_g1114 (.x1(s1_96), .x2(s2_96), .y1(s1_414), .y2(s2_414), .z1(s1_1378), .z2(s2_1378));
  masked_and u_g1115 (.x1(s1_340), .x2(s2_340), .y1(s1_1378), .y2(s2_1378), .z1(s1_1379), .z2(s2_1379));
  masked_or u_g1116 (.x1(s1_339), .x2(s2_339), .y1(s1_1377), .y2(s2_1377), .z1(s1_1380), .z2(s2_1380));
  masked_and u_g1117 (.x1(s1_1355), .x2(s2_1355), .y1(s1_1380), .y2(s2_1380), .z1(s1_1381), .z2(s2_1381));
  masked_or u_g1118 (.x1(s1_1356), .x2(s2_1356), .y1(s1_1379), .y2(s2_1379), .z1(s1_1382), .z2(s2_1382));
  masked_or u_g1119 (.x1(s1_127), .x2(s2_127), .y1(s1_1381), .y2(s2_1381), .z1(s1_1383), .z2(s2_1383));
  assign s1_1384 = s1_126 ^ s1_133;
  assign s2_1384 = s2_126 ^ s2_133;
  masked_and u_g1120 (.x1(s1_339), .x2(s2_339), .y1(s1_1384), .y2(s2_1384), .z1(s1_1385), .z2(s2_1385));
  masked_or u_g1121 (.x1(s1_1382), .x2(s2_1382), .y1(s1_1385), .y2(s2_1385), .z1(s1_1386), .z2(s2_1386));
  masked_or u_g1122 (.x1(s1_1360), .x2(s2_1360), .y1(s1_1386), .y2(s2_1386), .z1(s1_1387), .z2(s2_1387));
  masked_and u_g1123 (.x1(s1_1383), .x2(s2_1383), .y1(s1_1387), .y2(s2_1387), .z1(s1_1388), .z2(s2_1388));
  masked_and u_g1124 (.x1(s1_340), .x2(s2_340), .y1(s1_495), .y2(s2_495), .z1(s1_1389), .z2(s2_1389));
  masked_or u_g1125 (.x1(s1_339), .x2(s2_339), .y1(s1_494), .y2(s2_494), .z1(s1_1390), .z2(s2_1390));
  masked_and u_g1126 (.x1(s1_1355), .x2(s2_1355), .y1(s1_1390), .y2(s2_1390), .z1(s1_1391), .z2(s2_1391));
  masked_or u_g1127 (.x1(s1_1356), .x2(s2_1356), .y1(s1_1389), .y2(s2_1389), .z1(s1_1392), .z2(s2_1392));
  masked_or u_g1128 (.x1(s1_133), .x2(s2_133), .y1(s1_1391), .y2(s2_1391), .z1(s1_1393), .z2(s2_1393));
  masked_and u_g1129 (.x1(s1_132), .x2(s2_132), .y1(s1_339), .y2(s2_339), .z1(s1_1394), .z2(s2_1394));
  masked_or u_g1130 (.x1(s1_1392), .x2(s2_1392), .y1(s1_1394), .y2(s2_1394), .z1(s1_1395), .z2(s2_1395));
  masked_or u_g1131 (.x1(s1_1360), .x2(s2_1360), .y1(s1_1395), .y2(s2_1395), .z1(s1_1396), .z2(s2_1396));
  masked_and u_g1132 (.x1(s1_1393), .x2(s2_1393), .y1(s1_1396), .y2(s2_1396), .z1(s1_1397), .z2(s2_1397));
  masked_and u_g1133 (.x1(s1_296), .x2(s2_296), .y1(s1_693), .y2(s2_693), .z1(s1_1398), .z2(s2_1398));
  masked_or u_g1134 (.x1(s1_295), .x2(s2_295), .y1(s1_692), .y2(s2_692), .z1(s1_1399), .z2(s2_1399));
  masked_and u_g1135 (.x1(s1_92), .x2(s2_92), .y1(s1_1398), .y2(s2_1398), .z1(s1_1400), .z2(s2_1400));
  masked_and u_g1136 (.x1(s1_380), .x2(s2_380), .y1(s1_1399), .y2(s2_1399), .z1(s1_1401), .z2(s2_1401));
  masked_or u_g1137 (.x1(s1_1400), .x2(s2_1400), .y1(s1_1401), .y2(s2_1401), .z1(s1_1402), .z2(s2_1402));
  masked_or u_g1138 (.x1(s1_154), .x2(s2_154), .y1(s1_693), .y2(s2_693), .z1(s1_82), .z2(s2_82));
  assign s1_1403 = ~s1_82;
  assign s2_1403 = s2_82;
  masked_and u_g1139 (.x1(s1_295), .x2(s2_295), .y1(s1_82), .y2(s2_82), .z1(s1_1404), .z2(s2_1404));
  masked_or u_g1140 (.x1(s1_296), .x2(s2_296), .y1(s1_1403), .y2(s2_1403), .z1(s1_1405), .z2(s2_1405));
  masked_and u_g1141 (.x1(s1_93), .x2(s2_93), .y1(s1_1404), .y2(s2_1404), .z1(s1_1406), .z2(s2_1406));
  masked_and u_g1142 (.x1(s1_610), .x2(s2_610), .y1(s1_1405), .y2(s2_1405), .z1(s1_1407), .z2(s2_1407));
  masked_or u_g1143 (.x1(s1_1406), .x2(s2_1406), .y1(s1_1407), .y2(s2_1407), .z1(s1_1408), .z2(s2_1408));
  masked_and u_g1144 (.x1(s1_93), .x2(s2_93), .y1(s1_1398), .y2(s2_1398), .z1(s1_1409), .z2(s2_1409));
  masked_and u_g1145 (.x1(s1_382), .x2(s2_382), .y1(s1_1399), .y2(s2_1399), .z1(s1_1410), .z2(s2_1410));
  masked_or u_g1146 (.x1(s1_1409), .x2(s2_1409), .y1(s1_1410), .y2(s2_1410), .z1(s1_1411), .z2(s2_1411));
  masked_and u_g1147 (.x1(s1_96), .x2(s2_96), .y1(s1_408), .y2(s2_408), .z1(s1_1412), .z2(s2_1412));
  masked_or u_g1148 (.x1(s1_339), .x2(s2_339), .y1(s1_1412), .y2(s2_1412), .z1(s1_1413), .z2(s2_1413));
  assign s1_1414 = ~s1_1413;
  assign s2_1414 = s2_1413;
  masked_and u_g1149 (.x1(s1_1355), .x2(s2_1355), .y1(s1_1413), .y2(s2_1413), .z1(s1_1415), .z2(s2_1415));
  masked_or u_g1150 (.x1(s1_1356), .x2(s2_1356), .y1(s1_1414), .y2(s2_1414), .z1(s1_1416), .z2(s2_1416));
  masked_or u_g1151 (.x1(s1_135), .x2(s2_135), .y1(s1_1415), .y2(s2_1415), .z1(s1_1417), .z2(s2_1417));
  assign s1_1418 = s1_135 ^ s1_351;
  assign s2_1418 = s2_135 ^ s2_351;
  masked_and u_g1152 (.x1(s1_339), .x2(s2_339), .y1(s1_1418), .y2(s2_1418), .z1(s1_1419), .z2(s2_1419));
  masked_or u_g1153 (.x1(s1_1416), .x2(s2_1416), .y1(s1_1419), .y2(s2_1419), .z1(s1_1420), .z2(s2_1420));
  masked_or u_g1154 (.x1(s1_1360), .x2(s2_1360), .y1(s1_1420), .y2(s2_1420), .z1(s1_1421), .z2(s2_1421));
  masked_and u_g1155 (.x1(s1_1417), .x2(s2_1417), .y1(s1_1421), .y2(s2_1421), .z1(s1_1422), .z2(s2_1422));
  masked_and u_g1156 (.x1(s1_106), .x2(s2_106), .y1(s1_344), .y2(s2_344), .z1(s1_1423), .z2(s2_1423));
  masked_and u_g1157 (.x1(s1_168), .x2(s2_168), .y1(s1_1423), .y2(s2_1423), .z1(s1_1424), .z2(s2_1424));
  masked_and u_g1158 (.x1(s1_173), .x2(s2_173), .y1(s1_343), .y2(s2_343), .z1(s1_1425), .z2(s2_1425));
  masked_and u_g1159 (.x1(s1_400), .x2(s2_400), .y1(s1_1425), .y2(s2_1425), .z1(s1_1426), .z2(s2_1426));
  masked_or u_g1160 (.x1(s1_340), .x2(s2_340), .y1(s1_1426), .y2(s2_1426), .z1(s1_1427), .z2(s2_1427));
  masked_or u_g1161 (.x1(s1_1424), .x2(s2_1424), .y1(s1_1427), .y2(s2_1427), .z1(s1_1428), .z2(s2_1428));
  masked_and u_g1162 (.x1(s1_367), .x2(s2_367), .y1(s1_961), .y2(s2_961), .z1(s1_1429), .z2(s2_1429));
  masked_and u_g1163 (.x1(s1_1352), .x2(s2_1352), .y1(s1_1428), .y2(s2_1428), .z1(s1_1430), .z2(s2_1430));
  masked_and u_g1164 (.x1(s1_1429), .x2(s2_1429), .y1(s1_1430), .y2(s2_1430), .z1(s1_1431), .z2(s2_1431));
  assign s1_1432 = ~s1_1431;
  assign s2_1432 = s2_1431;
  masked_and u_g1165 (.x1(s1_1433), .x2(s2_1433), .y1(s1_1432), .y2(s2_1432), .z1(s1_1434), .z2(s2_1434));
  masked_and u_g1166 (.x1(s1_18), .x2(s2_18), .y1(s1_339), .y2(s2_339), .z1(s1_1435), .z2(s2_1435));
  masked_and u_g1167 (.x1(s1_340), .x2(s2_340), .y1(s1_390), .y2(s2_390), .z1(s1_1436), .z2(s2_1436));
  masked_or u_g1168 (.x1(s1_1435), .x2(s2_1435), .y1(s1_1436), .y2(s2_1436), .z1(s1_1437), .z2(s2_1437));
  masked_and u_g1169 (.x1(s1_1431), .x2(s2_1431), .y1(s1_1437), .y2(s2_1437), .z1(s1_1438), .z2(s2_1438));
  masked_or u_g1170 (.x1(s1_1434), .x2(s2_1434), .y1(s1_1438), .y2(s2_1438), .z1(s1_1439), .z2(s2_1439));
  masked_and u_g1171 (.x1(s1_346), .x2(s2_346), .y1(s1_365), .y2(s2_365), .z1(s1_1440), .z2(s2_1440));
  masked_or u_g1172 (.x1(s1_347), .x2(s2_347), .y1(s1_366), .y2(s2_366), .z1(s1_1441), .z2(s2_1441));
  masked_and u_g1173 (.x1(s1_665), .x2(s2_665), .y1(s1_1440), .y2(s2_1440), .z1(s1_1442), .z2(s2_1442));
  masked_and u_g1174 (.x1(s1_1443), .x2(s2_1443), .y1(s1_1441), .y2(s2_1441), .z1(s1_1444), .z2(s2_1444));
  masked_or u_g1175 (.x1(s1_1442), .x2(s2_1442), .y1(s1_1444), .y2(s2_1444), .z1(s1_1445), .z2(s2_1445));
  masked_and u_g1176 (.x1(s1_624), .x2(s2_624), .y1(s1_151), .y2(s2_151), .z1(s1_1446), .z2(s2_1446));
  masked_or u_g1177 (.x1(s1_365), .x2(s2_365), .y1(s1_1446), .y2(s2_1446), .z1(s1_1447), .z2(s2_1447));
  masked_and u_g1178 (.x1(s1_625), .x2(s2_625), .y1(s1_1447), .y2(s2_1447), .z1(s1_1448), .z2(s2_1448));
  masked_and u_g1179 (.x1(s1_400), .x2(s2_400), .y1(s1_1366), .y2(s2_1366), .z1(s1_1449), .z2(s2_1449));
  masked_and u_g1180 (.x1(s1_836), .x2(s2_836), .y1(s1_1449), .y2(s2_1449), .z1(s1_1450), .z2(s2_1450));
  masked_and u_g1181 (.x1(s1_1451), .x2(s2_1451), .y1(s1_579), .y2(s2_579), .z1(s1_1452), .z2(s2_1452));
  assign s1_1453 = s1_836 ^ s1_1449;
  assign s2_1453 = s2_836 ^ s2_1449;
  masked_and u_g1182 (.x1(s1_1452), .x2(s2_1452), .y1(s1_1453), .y2(s2_1453), .z1(s1_1454), .z2(s2_1454));
  masked_or u_g1183 (.x1(s1_1451), .x2(s2_1451), .y1(s1_365), .y2(s2_365), .z1(s1_1455), .z2(s2_1455));
  masked_or u_g1184 (.x1(s1_366), .x2(s2_366), .y1(s1_1450), .y2(s2_1450), .z1(s1_1456), .z2(s2_1456));
  masked_or u_g1185 (.x1(s1_1454), .x2(s2_1454), .y1(s1_1456), .y2(s2_1456), .z1(s1_1457), .z2(s2_1457));
  masked_and u_g1186 (.x1(s1_1455), .x2(s2_1455), .y1(s1_1457), .y2(s2_1457), .z1(s1_1458), .z2(s2_1458));
  masked_or u_g1187 (.x1(s1_1459), .x2(s2_1459), .y1(s1_365), .y2(s2_365), .z1(s1_1460), .z2(s2_1460));
  masked_and u_g1188 (.x1(s1_1459), .x2(s2_1459), .y1(s1_579), .y2(s2_579), .z1(s1_1461), .z2(s2_1461));
  masked_and u_g1189 (.x1(s1_836), .x2(s2_836), .y1(s1_604), .y2(s2_604), .z1(s1_1462), .z2(s2_1462));
  assign s1_1463 = s1_836 ^ s1_604;
  assign s2_1463 = s2_836 ^ s2_604;
  masked_and u_g1190 (.x1(s1_1461), .x2(s2_1461), .y1(s1_1463), .y2(s2_1463), .z1(s1_1464), .z2(s2_1464));
  masked_or u_g1191 (.x1(s1_366), .x2(s2_366), .y1(s1_1462), .y2(s2_1462), .z1(s1_1465), .z2(s2_1465));
  masked_or u_g1192 (.x1(s1_1464), .x2(s2_1464), .y1(s1_1465), .y2(s2_1465), .z1(s1_1466), .z2(s2_1466));
  masked_and u_g1193 (.x1(s1_1460), .x2(s2_1460), .y1(s1_1466), .y2(s2_1466), .z1(s1_1467), .z2(s2_1467));
  masked_and u_g1194 (.x1(s1_365), .x2(s2_365), .y1(s1_651), .y2(s2_651), .z1(s1_1468), .z2(s2_1468));
  masked_and u_g1195 (.x1(s1_643), .x2(s2_643), .y1(s1_366), .y2(s2_366), .z1(s1_1469), .z2(s2_1469));
  masked_or u_g1196 (.x1(s1_1468), .x2(s2_1468), .y1(s1_1469), .y2(s2_1469), .z1(s1_1470), .z2(s2_1470));
  masked_and u_g1197 (.x1(s1_171), .x2(s2_171), .y1(s1_154), .y2(s2_154), .z1(s1_1471), .z2(s2_1471));
  masked_and u_g1198 (.x1(s1_404), .x2(s2_404), .y1(s1_155), .y2(s2_155), .z1(s1_1472), .z2(s2_1472));
  masked_or u_g1199 (.x1(s1_1471), .x2(s2_1471), .y1(s1_1472), .y2(s2_1472), .z1(s1_1473), .z2(s2_1473));
  masked_and u_g1200 (.x1(s1_81), .x2(s2_81), .y1(s1_975), .y2(s2_975), .z1(s1_1474), .z2(s2_1474));
  masked_and u_g1201 (.x1(s1_365), .x2(s2_365), .y1(s1_617), .y2(s2_617), .z1(s1_1475), .z2(s2_1475));
  masked_or u_g1202 (.x1(s1_1474), .x2(s2_1474), .y1(s1_1475), .y2(s2_1475), .z1(s1_1476), .z2(s2_1476));
  masked_and u_g1203 (.x1(s1_970), .x2(s2_970), .y1(s1_1476), .y2(s2_1476), .z1(s1_1477), .z2(s2_1477));
  masked_and u_g1204 (.x1(s1_171), .x2(s2_171), .y1(s1_971), .y2(s2_971), .z1(s1_1478), .z2(s2_1478));
  masked_or u_g1205 (.x1(s1_1477), .x2(s2_1477), .y1(s1_1478), .y2(s2_1478), .z1(s1_1479), .z2(s2_1479));
  masked_or u_g1206 (.x1(s1_847), .x2(s2_847), .y1(s1_845), .y2(s2_845), .z1(s1_1480), .z2(s2_1480));
  assign s1_1481 = s1_1461 ^ s1_1463;
  assign s2_1481 = s2_1461 ^ s2_1463;
  masked_or u_g1207 (.x1(s1_379), .x2(s2_379), .y1(s1_1481), .y2(s2_1481), .z1(s1_1482), .z2(s2_1482));
  masked_or u_g1208 (.x1(s1_378), .x2(s2_378), .y1(s1_390), .y2(s2_390), .z1(s1_1483), .z2(s2_1483));
  masked_and u_g1209 (.x1(s1_395), .x2(s2_395), .y1(s1_1483), .y2(s2_1483), .z1(s1_1484), .z2(s2_1484));
  masked_and u_g1210 (.x1(s1_1482), .x2(s2_1482), .y1(s1_1484), .y2(s2_1484), .z1(s1_1485), .z2(s2_1485));
  assign s1_1486 = s1_642 ^ s1_647;
  assign s2_1486 = s2_642 ^ s2_647;
  masked_and u_g1211 (.x1(s1_394), .x2(s2_394), .y1(s1_1486), .y2(s2_1486), .z1(s1_1487), .z2(s2_1487));
  masked_or u_g1212 (.x1(s1_1485), .x2(s2_1485), .y1(s1_1487), .y2(s2_1487), .z1(s1_1488), .z2(s2_1488));
  masked_and u_g1213 (.x1(s1_340), .x2(s2_340), .y1(s1_1488), .y2(s2_1488), .z1(s1_1489), .z2(s2_1489));
  masked_and u_g1214 (.x1(s1_446), .x2(s2_446), .y1(s1_1433), .y2(s2_1433), .z1(s1_1490), .z2(s2_1490));
  masked_and u_g1215 (.x1(s1_719), .x2(s2_719), .y1(s1_1490), .y2(s2_1490), .z1(s1_1491), .z2(s2_1491));
  masked_or u_g1216 (.x1(s1_846), .x2(s2_846), .y1(s1_1491), .y2(s2_1491), .z1(s1_1492), .z2(s2_1492));
  masked_or u_g1217 (.x1(s1_1489), .x2(s2_1489), .y1(s1_1492), .y2(s2_1492), .z1(s1_1493), .z2(s2_1493));
  masked_and u_g1218 (.x1(s1_1480), .x2(s2_1480), .y1(s1_1493), .y2(s2_1493), .z1(s1_1494), .z2(s2_1494));
  masked_and u_g1219 (.x1(s1_723), .x2(s2_723), .y1(s1_722), .y2(s2_722), .z1(s1_1495), .z2(s2_1495));
  masked_and u_g1220 (.x1(s1_376), .x2(s2_376), .y1(s1_584), .y2(s2_584), .z1(s1_1496), .z2(s2_1496));
  masked_and u_g1221 (.x1(s1_579), .x2(s2_579), .y1(s1_1496), .y2(s2_1496), .z1(s1_1497), .z2(s2_1497));
  masked_and u_g1222 (.x1(s1_1486), .x2(s2_1486), .y1(s1_1497), .y2(s2_1497), .z1(s1_1498), .z2(s2_1498));
  masked_and u_g1223 (.x1(s1_545), .x2(s2_545), .y1(s1_1481), .y2(s2_1481), .z1(s1_1499), .z2(s2_1499));
  assign s1_1500 = s1_1452 ^ s1_1453;
  assign s2_1500 = s2_1452 ^ s2_1453;
  masked_and u_g1224 (.x1(s1_544), .x2(s2_544), .y1(s1_1500), .y2(s2_1500), .z1(s1_1501), .z2(s2_1501));
  masked_or u_g1225 (.x1(s1_339), .x2(s2_339), .y1(s1_1501), .y2(s2_1501), .z1(s1_1502), .z2(s2_1502));
  masked_or u_g1226 (.x1(s1_1499), .x2(s2_1499), .y1(s1_1502), .y2(s2_1502), .z1(s1_1503), .z2(s2_1503));
  masked_or u_g1227 (.x1(s1_1498), .x2(s2_1498), .y1(s1_1503), .y2(s2_1503), .z1(s1_1504), .z2(s2_1504));
  masked_or u_g1228 (.x1(s1_137), .x2(s2_137), .y1(s1_340), .y2(s2_340), .z1(s1_1505), .z2(s2_1505));
  masked_and u_g1229 (.x1(s1_721), .x2(s2_721), .y1(s1_1505), .y2(s2_1505), .z1(s1_1506), .z2(s2_1506));
  masked_and u_g1230 (.x1(s1_1504), .x2(s2_1504), .y1(s1_1506), .y2(s2_1506), .z1(s1_1507), .z2(s2_1507));
  masked_or u_g1231 (.x1(s1_1495), .x2(s2_1495), .y1(s1_1507), .y2(s2_1507), .z1(s1_1508), .z2(s2_1508));
  masked_and u_g1232 (.x1(s1_98), .x2(s2_98), .y1(s1_705), .y2(s2_705), .z1(s1_1509), .z2(s2_1509));
  masked_and u_g1233 (.x1(s1_708), .x2(s2_708), .y1(s1_1423), .y2(s2_1423), .z1(s1_1510), .z2(s2_1510));
  masked_or u_g1234 (.x1(s1_1509), .x2(s2_1509), .y1(s1_1510), .y2(s2_1510), .z1(s1_1511), .z2(s2_1511));
  masked_or u_g1235 (.x1(s1_150), .x2(s2_150), .y1(s1_972), .y2(s2_972), .z1(s1_1512), .z2(s2_1512));
  masked_or u_g1236 (.x1(s1_679), .x2(s2_679), .y1(s1_1512), .y2(s2_1512), .z1(s1_1513), .z2(s2_1513));
  masked_or u_g1237 (.x1(s1_368), .x2(s2_368), .y1(s1_1513), .y2(s2_1513), .z1(s1_1514), .z2(s2_1514));
  masked_or u_g1238 (.x1(s1_364), .x2(s2_364), .y1(s1_1514), .y2(s2_1514), .z1(s1_1515), .z2(s2_1515));
  masked_or u_g1239 (.x1(s1_687), .x2(s2_687), .y1(s1_1515), .y2(s2_1515), .z1(s1_1516), .z2(s2_1516));
  masked_or u_g1240 (.x1(s1_142), .x2(s2_142), .y1(s1_604), .y2(s2_604), .z1(s1_1517), .z2(s2_1517));
  masked_or u_g1241 (.x1(s1_143), .x2(s2_143), .y1(s1_1481), .y2(s2_1481), .z1(s1_1518), .z2(s2_1518));
  masked_and u_g1242 (.x1(s1_586), .x2(s2_586), .y1(s1_1517), .y2(s2_1517), .z1(s1_1519), .z2(s2_1519));
  masked_and u_g1243 (.x1(s1_1518), .x2(s2_1518), .y1(s1_1519), .y2(s2_1519), .z1(s1_1520), .z2(s2_1520));
  masked_or u_g1244 (.x1(s1_114), .x2(s2_114), .y1(s1_168), .y2(s2_168), .z1(s1_1521), .z2(s2_1521));
  masked_and u_g1245 (.x1(s1_1486), .x2(s2_1486), .y1(s1_1521), .y2(s2_1521), .z1(s1_1522), .z2(s2_1522));
  masked_or u_g1246 (.x1(s1_109), .x2(s2_109), .y1(s1_620), .y2(s2_620), .z1(s1_1523), .z2(s2_1523));
  masked_and u_g1247 (.x1(s1_369), .x2(s2_369), .y1(s1_621), .y2(s2_621), .z1(s1_1524), .z2(s2_1524));
  masked_and u_g1248 (.x1(s1_1523), .x2(s2_1523), .y1(s1_1524), .y2(s2_1524), .z1(s1_1525), .z2(s2_1525));
  masked_and u_g1249 (.x1(s1_622), .x2(s2_622), .y1(s1_666), .y2(s2_666), .z1(s1_1526), .z2(s2_1526));
  masked_or u_g1250 (.x1(s1_543), .x2(s2_543), .y1(s1_1526), .y2(s2_1526), .z1(s1_1527), .z2(s2_1527));
  masked_or u_g1251 (.x1(s1_1525), .x2(s2_1525), .y1(s1_1527), .y2(s2_1527), .z1(s1_1528), .z2(s2_1528));
  masked_or u_g1252 (.x1(s1_1522), .x2(s2_1522), .y1(s1_1528), .y2(s2_1528), .z1(s1_1529), .z2(s2_1529));
  masked_or u_g1253 (.x1(s1_544), .x2(s2_544), .y1(s1_1500), .y2(s2_1500), .z1(s1_1530), .z2(s2_1530));
  masked_and u_g1254 (.x1(s1_587), .x2(s2_587), .y1(s1_1530), .y2(s2_1530), .z1(s1_1531), .z2(s2_1531));
  masked_and u_g1255 (.x1(s1_1529), .x2(s2_1529), .y1(s1_1531), .y2(s2_1531), .z1(s1_1532), .z2(s2_1532));
  masked_or u_g1256 (.x1(s1_1520), .x2(s2_1520), .y1(s1_1532), .y2(s2_1532), .z1(s1_1533), .z2(s2_1533));
  masked_and u_g1257 (.x1(s1_365), .x2(s2_365), .y1(s1_1533), .y2(s2_1533), .z1(s1_1534), .z2(s2_1534));
  masked_and u_g1258 (.x1(s1_137), .x2(s2_137), .y1(s1_840), .y2(s2_840), .z1(s1_1535), .z2(s2_1535));
  masked_and u_g1259 (.x1(s1_106), .x2(s2_106), .y1(s1_110), .y2(s2_110), .z1(s1_1536), .z2(s2_1536));
  masked_or u_g1260 (.x1(s1_98), .x2(s2_98), .y1(s1_109), .y2(s2_109), .z1(s1_1537), .z2(s2_1537));
  masked_and u_g1261 (.x1(s1_111), .x2(s2_111), .y1(s1_401), .y2(s2_401), .z1(s1_1538), .z2(s2_1538));
  masked_or u_g1262 (.x1(s1_112), .x2(s2_112), .y1(s1_1536), .y2(s2_1536), .z1(s1_1539), .z2(s2_1539));
  masked_and u_g1263 (.x1(s1_1537), .x2(s2_1537), .y1(s1_1538), .y2(s2_1538), .z1(s1_1540), .z2(s2_1540));
  masked_or u_g1264 (.x1(s1_400), .x2(s2_400), .y1(s1_1539), .y2(s2_1539), .z1(s1_1541), .z2(s2_1541));
  masked_or u_g1265 (.x1(s1_18), .x2(s2_18), .y1(s1_1540), .y2(s2_1540), .z1(s1_1542), .z2(s2_1542));
  masked_and u_g1266 (.x1(s1_114), .x2(s2_114), .y1(s1_1433), .y2(s2_1433), .z1(s1_1543), .z2(s2_1543));
  masked_or u_g1267 (.x1(s1_1541), .x2(s2_1541), .y1(s1_1543), .y2(s2_1543), .z1(s1_1544), .z2(s2_1544));
  masked_and u_g1268 (.x1(s1_844), .x2(s2_844), .y1(s1_1544), .y2(s2_1544), .z1(s1_1545), .z2(s2_1545));
  masked_and u_g1269 (.x1(s1_1542), .x2(s2_1542), .y1(s1_1545), .y2(s2_1545), .z1(s1_1546), .z2(s2_1546));
  masked_and u_g1270 (.x1(s1_1443), .x2(s2_1443), .y1(s1_580), .y2(s2_580), .z1(s1_1547), .z2(s2_1547));
  masked_and u_g1271 (.x1(s1_635), .x2(s2_635), .y1(s1_1547), .y2(s2_1547), .z1(s1_1548), .z2(s2_1548));
  masked_or u_g1272 (.x1(s1_1546), .x2(s2_1546), .y1(s1_1548), .y2(s2_1548), .z1(s1_1549), .z2(s2_1549));
  masked_or u_g1273 (.x1(s1_1535), .x2(s2_1535), .y1(s1_1549), .y2(s2_1549), .z1(s1_1550), .z2(s2_1550));
  masked_and u_g1274 (.x1(s1_339), .x2(s2_339), .y1(s1_1550), .y2(s2_1550), .z1(s1_1551), .z2(s2_1551));
  masked_or u_g1275 (.x1(s1_1534), .x2(s2_1534), .y1(s1_1551), .y2(s2_1551), .z1(s1_105), .z2(s2_105));
  masked_and u_g1276 (.x1(s1_801), .x2(s2_801), .y1(s1_255), .y2(s2_255), .z1(s1_1552), .z2(s2_1552));
  masked_and u_g1277 (.x1(s1_925), .x2(s2_925), .y1(s1_256), .y2(s2_256), .z1(s1_1553), .z2(s2_1553));
  masked_or u_g1278 (.x1(s1_1552), .x2(s2_1552), .y1(s1_1553), .y2(s2_1553), .z1(s1_17), .z2(s2_17));
  masked_and u_g1279 (.x1(s1_396), .x2(s2_396), .y1(s1_678), .y2(s2_678), .z1(s1_3), .z2(s2_3));
  masked_or u_g1280 (.x1(s1_255), .x2(s2_255), .y1(s1_678), .y2(s2_678), .z1(s1_2), .z2(s2_2));
  masked_and u_g1281 (.x1(s1_359), .x2(s2_359), .y1(s1_363), .y2(s2_363), .z1(s1_1554), .z2(s2_1554));
  masked_or u_g1282 (.x1(s1_635), .x2(s2_635), .y1(s1_844), .y2(s2_844), .z1(s1_1555), .z2(s2_1555));
  masked_or u_g1283 (.x1(s1_1554), .x2(s2_1554), .y1(s1_1555), .y2(s2_1555), .z1(s1_1556), .z2(s2_1556));
  masked_and u_g1284 (.x1(s1_339), .x2(s2_339), .y1(s1_1556), .y2(s2_1556), .z1(s1_1557), .z2(s2_1557));
  masked_and u_g1285 (.x1(s1_358), .x2(s2_358), .y1(s1_372), .y2(s2_372), .z1(s1_1558), .z2(s2_1558));
  masked_or u_g1286 (.x1(s1_543), .x2(s2_543), .y1(s1_586), .y2(s2_586), .z1(s1_1559), .z2(s2_1559));
  masked_or u_g1287 (.x1(s1_1558), .x2(s2_1558), .y1(s1_1559), .y2(s2_1559), .z1(s1_1560), .z2(s2_1560));
  masked_and u_g1288 (.x1(s1_365), .x2(s2_365), .y1(s1_1560), .y2(s2_1560), .z1(s1_1561), .z2(s2_1561));
  masked_or u_g1289 (.x1(s1_1557), .x2(s2_1557), .y1(s1_1561), .y2(s2_1561), .z1(s1_1562), .z2(s2_1562));
  assign s1_1563 = ~s1_1562;
  assign s2_1563 = s2_1562;
  masked_or u_g1290 (.x1(s1_101), .x2(s2_101), .y1(s1_102), .y2(s2_102), .z1(s1_1564), .z2(s2_1564));
  masked_or u_g1291 (.x1(s1_99), .x2(s2_99), .y1(s1_103), .y2(s2_103), .z1(s1_1565), .z2(s2_1565));
  masked_or u_g1292 (.x1(s1_1564), .x2(s2_1564), .y1(s1_1565), .y2(s2_1565), .z1(s1_1566), .z2(s2_1566));
  masked_or u_g1293 (.x1(s1_100), .x2(s2_100), .y1(s1_1566), .y2(s2_1566), .z1(s1_1567), .z2(s2_1567));
  masked_and u_g1294 (.x1(s1_117), .x2(s2_117), .y1(s1_1567), .y2(s2_1567), .z1(s1_1568), .z2(s2_1568));
  masked_and u_g1295 (.x1(s1_1562), .x2(s2_1562), .y1(s1_1568), .y2(s2_1568), .z1(s1_94), .z2(s2_94));
  masked_and u_g1296 (.x1(s1_295), .x2(s2_295), .y1(s1_1299), .y2(s2_1299), .z1(s1_1569), .z2(s2_1569));
  masked_and u_g1297 (.x1(s1_296), .x2(s2_296), .y1(s1_1296), .y2(s2_1296), .z1(s1_1570), .z2(s2_1570));
  masked_or u_g1298 (.x1(s1_1569), .x2(s2_1569), .y1(s1_1570), .y2(s2_1570), .z1(s1_91), .z2(s2_91));
  masked_and u_g1299 (.x1(s1_116), .x2(s2_116), .y1(s1_1562), .y2(s2_1562), .z1(s1_1571), .z2(s2_1571));
  masked_or u_g1300 (.x1(s1_117), .x2(s2_117), .y1(s1_1563), .y2(s2_1563), .z1(s1_1572), .z2(s2_1572));
  masked_and u_g1301 (.x1(s1_104), .x2(s2_104), .y1(s1_1572), .y2(s2_1572), .z1(s1_1573), .z2(s2_1573));
  masked_and u_g1302 (.x1(s1_105), .x2(s2_105), .y1(s1_1571), .y2(s2_1571), .z1(s1_1574), .z2(s2_1574));
  masked_or u_g1303 (.x1(s1_1573), .x2(s2_1573), .y1(s1_1574), .y2(s2_1574), .z1(s1_1575), .z2(s2_1575));
  assign s1_143 = q1[0];
  assign s2_143 = q2[0];
  assign s1_139 = q1[1];
  assign s2_139 = q2[1];
  assign s1_99 = q1[2];
  assign s2_99 = q2[2];
  assign s1_100 = q1[3];
  assign s2_100 = q2[3];
  assign s1_101 = q1[4];
  assign s2_101 = q2[4];
  assign s1_102 = q1[5];
  assign s2_102 = q2[5];
  assign s1_103 = q1[6];
  assign s2_103 = q2[6];
  assign s1_110 = q1[7];
  assign s2_110 = q2[7];
  assign s1_112 = q1[8];
  assign s2_112 = q2[8];
  assign s1_115 = q1[9];
  assign s2_115 = q2[9];
  assign s1_328 = q1[10];
  assign s2_328 = q2[10];
  assign s1_318 = q1[11];
  assign s2_318 = q2[11];
  assign s1_308 = q1[12];
  assign s2_308 = q2[12];
  assign s1_298 = q1[13];
  assign s2_298 = q2[13];
  assign s1_386 = q1[14];
  assign s2_386 = q2[14];
  assign s1_333 = q1[15];
  assign s2_333 = q2[15];
  assign s1_323 = q1[16];
  assign s2_323 = q2[16];
  assign s1_313 = q1[17];
  assign s2_313 = q2[17];
  assign s1_303 = q1[18];
  assign s2_303 = q2[18];
  assign s1_430 = q1[19];
  assign s2_430 = q2[19];
  assign s1_435 = q1[20];
  assign s2_435 = q2[20];
  assign s1_437 = q1[21];
  assign s2_437 = q2[21];
  assign s1_432 = q1[22];
  assign s2_432 = q2[22];
  assign s1_444 = q1[23];
  assign s2_444 = q2[23];
  assign s1_449 = q1[24];
  assign s2_449 = q2[24];
  assign s1_446 = q1[25];
  assign s2_446 = q2[25];
  assign s1_404 = q1[26];
  assign s2_404 = q2[26];
  assign s1_18 = q1[27];
  assign s2_18 = q2[27];
  assign s1_19 = q1[28];
  assign s2_19 = q2[28];
  assign s1_20 = q1[29];
  assign s2_20 = q2[29];
  assign s1_21 = q1[30];
  assign s2_21 = q2[30];
  assign s1_22 = q1[31];
  assign s2_22 = q2[31];
  assign s1_23 = q1[32];
  assign s2_23 = q2[32];
  assign s1_24 = q1[33];
  assign s2_24 = q2[33];
  assign s1_25 = q1[34];
  assign s2_25 = q2[34];
  assign s1_180 = q1[35];
  assign s2_180 = q2[35];
  assign s1_226 = q1[36];
  assign s2_226 = q2[36];
  assign s1_201 = q1[37];
  assign s2_201 = q2[37];
  assign s1_188 = q1[38];
  assign s2_188 = q2[38];
  assign s1_184 = q1[39];
  assign s2_184 = q2[39];
  assign s1_207 = q1[40];
  assign s2_207 = q2[40];
  assign s1_196 = q1[41];
  assign s2_196 = q2[41];
  assign s1_169 = q1[42];
  assign s2_169 = q2[42];
  assign s1_247 = q1[43];
  assign s2_247 = q2[43];
  assign s1_245 = q1[44];
  assign s2_245 = q2[44];
  assign s1_243 = q1[45];
  assign s2_243 = q2[45];
  assign s1_251 = q1[46];
  assign s2_251 = q2[46];
  assign s1_249 = q1[47];
  assign s2_249 = q2[47];
  assign s1_241 = q1[48];
  assign s2_241 = q2[48];
  assign s1_239 = q1[49];
  assign s2_239 = q2[49];
  assign s1_237 = q1[50];
  assign s2_237 = q2[50];
  assign s1_234 = q1[51];
  assign s2_234 = q2[51];
  assign s1_228 = q1[52];
  assign s2_228 = q2[52];
  assign s1_223 = q1[53];
  assign s2_223 = q2[53];
  assign s1_219 = q1[54];
  assign s2_219 = q2[54];
  assign s1_215 = q1[55];
  assign s2_215 = q2[55];
  assign s1_209 = q1[56];
  assign s2_209 = q2[56];
  assign s1_204 = q1[57];
  assign s2_204 = q2[57];
  assign s1_171 = q1[58];
  assign s2_171 = q2[58];
  assign s1_137 = q1[59];
  assign s2_137 = q2[59];
  assign s1_129 = q1[60];
  assign s2_129 = q2[60];
  assign s1_291 = q1[61];
  assign s2_291 = q2[61];
  assign s1_287 = q1[62];
  assign s2_287 = q2[62];
  assign s1_283 = q1[63];
  assign s2_283 = q2[63];
  assign s1_279 = q1[64];
  assign s2_279 = q2[64];
  assign s1_275 = q1[65];
  assign s2_275 = q2[65];
  assign s1_271 = q1[66];
  assign s2_271 = q2[66];
  assign s1_267 = q1[67];
  assign s2_267 = q2[67];
  assign s1_263 = q1[68];
  assign s2_263 = q2[68];
  assign s1_259 = q1[69];
  assign s2_259 = q2[69];
  assign s1_925 = q1[70];
  assign s2_925 = q2[70];
  assign s1_921 = q1[71];
  assign s2_921 = q2[71];
  assign s1_917 = q1[72];
  assign s2_917 = q2[72];
  assign s1_913 = q1[73];
  assign s2_913 = q2[73];
  assign s1_909 = q1[74];
  assign s2_909 = q2[74];
  assign s1_905 = q1[75];
  assign s2_905 = q2[75];
  assign s1_901 = q1[76];
  assign s2_901 = q2[76];
  assign s1_897 = q1[77];
  assign s2_897 = q2[77];
  assign s1_893 = q1[78];
  assign s2_893 = q2[78];
  assign s1_889 = q1[79];
  assign s2_889 = q2[79];
  assign s1_885 = q1[80];
  assign s2_885 = q2[80];
  assign s1_881 = q1[81];
  assign s2_881 = q2[81];
  assign s1_877 = q1[82];
  assign s2_877 = q2[82];
  assign s1_873 = q1[83];
  assign s2_873 = q2[83];
  assign s1_869 = q1[84];
  assign s2_869 = q2[84];
  assign s1_865 = q1[85];
  assign s2_865 = q2[85];
  assign s1_861 = q1[86];
  assign s2_861 = q2[86];
  assign s1_857 = q1[87];
  assign s2_857 = q2[87];
  assign s1_853 = q1[88];
  assign s2_853 = q2[88];
  assign s1_849 = q1[89];
  assign s2_849 = q2[89];
  assign s1_847 = q1[90];
  assign s2_847 = q2[90];
  assign s1_836 = q1[91];
  assign s2_836 = q2[91];
  assign s1_832 = q1[92];
  assign s2_832 = q2[92];
  assign s1_289 = q1[93];
  assign s2_289 = q2[93];
  assign s1_285 = q1[94];
  assign s2_285 = q2[94];
  assign s1_281 = q1[95];
  assign s2_281 = q2[95];
  assign s1_277 = q1[96];
  assign s2_277 = q2[96];
  assign s1_273 = q1[97];
  assign s2_273 = q2[97];
  assign s1_269 = q1[98];
  assign s2_269 = q2[98];
  assign s1_265 = q1[99];
  assign s2_265 = q2[99];
  assign s1_261 = q1[100];
  assign s2_261 = q2[100];
  assign s1_257 = q1[101];
  assign s2_257 = q2[101];
  assign s1_801 = q1[102];
  assign s2_801 = q2[102];
  assign s1_797 = q1[103];
  assign s2_797 = q2[103];
  assign s1_793 = q1[104];
  assign s2_793 = q2[104];
  assign s1_789 = q1[105];
  assign s2_789 = q2[105];
  assign s1_785 = q1[106];
  assign s2_785 = q2[106];
  assign s1_781 = q1[107];
  assign s2_781 = q2[107];
  assign s1_777 = q1[108];
  assign s2_777 = q2[108];
  assign s1_773 = q1[109];
  assign s2_773 = q2[109];
  assign s1_769 = q1[110];
  assign s2_769 = q2[110];
  assign s1_765 = q1[111];
  assign s2_765 = q2[111];
  assign s1_761 = q1[112];
  assign s2_761 = q2[112];
  assign s1_757 = q1[113];
  assign s2_757 = q2[113];
  assign s1_753 = q1[114];
  assign s2_753 = q2[114];
  assign s1_749 = q1[115];
  assign s2_749 = q2[115];
  assign s1_745 = q1[116];
  assign s2_745 = q2[116];
  assign s1_741 = q1[117];
  assign s2_741 = q2[117];
  assign s1_737 = q1[118];
  assign s2_737 = q2[118];
  assign s1_733 = q1[119];
  assign s2_733 = q2[119];
  assign s1_729 = q1[120];
  assign s2_729 = q2[120];
  assign s1_725 = q1[121];
  assign s2_725 = q2[121];
  assign s1_723 = q1[122];
  assign s2_723 = q2[122];
  assign s1_117 = q1[123];
  assign s2_117 = q2[123];
  assign s1_95 = q1[124];
  assign s2_95 = q2[124];
  assign s1_96 = q1[125];
  assign s2_96 = q2[125];
  assign s1_97 = q1[126];
  assign s2_97 = q2[126];
  assign s1_98 = q1[127];
  assign s2_98 = q2[127];
  assign s1_121 = q1[128];
  assign s2_121 = q2[128];
  assign s1_119 = q1[129];
  assign s2_119 = q2[129];
  assign s1_123 = q1[130];
  assign s2_123 = q2[130];
  assign s1_104 = q1[131];
  assign s2_104 = q2[131];
  assign s1_135 = q1[132];
  assign s2_135 = q2[132];
  assign s1_133 = q1[133];
  assign s2_133 = q2[133];
  assign s1_127 = q1[134];
  assign s2_127 = q2[134];
  assign s1_131 = q1[135];
  assign s2_131 = q2[135];
  assign s1_125 = q1[136];
  assign s2_125 = q2[136];
  assign s1_610 = q1[137];
  assign s2_610 = q2[137];
  assign s1_380 = q1[138];
  assign s2_380 = q2[138];
  assign s1_382 = q1[139];
  assign s2_382 = q2[139];
  assign s1_1433 = q1[140];
  assign s2_1433 = q2[140];
  assign s1_1443 = q1[141];
  assign s2_1443 = q2[141];
  assign s1_624 = q1[142];
  assign s2_624 = q2[142];
  assign s1_1451 = q1[143];
  assign s2_1451 = q2[143];
  assign s1_1459 = q1[144];
  assign s2_1459 = q2[144];
  assign s1_643 = q1[145];
  assign s2_643 = q2[145];
  assign s1_482 = q1[146];
  assign s2_482 = q2[146];
  assign s1_484 = q1[147];
  assign s2_484 = q2[147];
  assign s1_145 = q1[148];
  assign s2_145 = q2[148];
  assign s1_147 = q1[149];
  assign s2_147 = q2[149];
  assign s1_141 = q1[150];
  assign s2_141 = q2[150];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q1[0] <= 1'b0;
      q2[0] <= 1'b0;
      q1[1] <= 1'b0;
      q2[1] <= 1'b0;
      q1[2] <= 1'b0;
      q2[2] <= 1'b0;
      q1[3] <= 1'b0;
      q2[3] <= 1'b0;
      q1[4] <= 1'b0;
      q2[4] <= 1'b0;
      q1[5] <= 1'b0;
      q2[5] <= 1'b0;
      q1[6] <= 1'b0;
      q2[6] <= 1'b0;
      q1[7] <= 1'b0;
      q2[7] <= 1'b0;
      q1[8] <= 1'b0;
      q2[8] <= 1'b0;
      q1[9] <= 1'b0;
      q2[9] <= 1'b0;
      q1[10] <= 1'b0;
      q2[10] <= 1'b0;
      q1[11] <= 1'b0;
      q2[11] <= 1'b0;
      q1[12] <= 1'b0;
      q2[12] <= 1'b0;
      q1[13] <= 1'b0;
      q2[13] <= 1'b0;
      q1[14] <= 1'b0;
      q2[14] <= 1'b0;
      q1[15] <= 1'b0;
      q2[15] <= 1'b0;
      q1[16] <= 1'b0;
      q2[16] <= 1'b0;
      q1[17] <= 1'b0;
      q2[17] <= 1'b0;
      q1[18] <= 1'b0;
      q2[18] <= 1'b0;
      q1[19] <= 1'b0;
      q2[19] <= 1'b0;
      q1[20] <= 1'b0;
      q2[20] <= 1'b0;
      q1[21] <= 1'b0;
      q2[21] <= 1'b0;
      q1[22] <= 1'b0;
      q2[22] <= 1'b0;
      q1[23] <= 1'b0;
      q2[23] <= 1'b0;
      q1[24] <= 1'b0;
      q2[24] <= 1'b0;
      q1[25] <= 1'b0;
      q2[25] <= 1'b0;
      q1[26] <= 1'b0;
      q2[26] <= 1'b0;
      q1[27] <= 1'b0;
      q2[27] <= 1'b0;
      q1[28] <= 1'b0;
      q2[28] <= 1'b0;
      q1[29] <= 1'b0;
      q2[29] <= 1'b0;
      q1[30] <= 1'b0;
      q2[30] <= 1'b0;
      q1[31] <= 1'b0;
      q2[31] <= 1'b0;
      q1[32] <= 1'b0;
      q2[32] <= 1'b0;
      q1[33] <= 1'b0;
      q2[33] <= 1'b0;
      q1[34] <= 1'b0;
      q2[34] <= 1'b0;
      q1[35] <= 1'b0;
      q2[35] <= 1'b0;
      q1[36] <= 1'b0;
      q2[36] <= 1'b0;
      q1[37] <= 1'b0;
      q2[37] <= 1'b0;
      q1[38] <= 1'b0;
      q2[38] <= 1'b0;
      q1[39] <= 1'b0;
      q2[39] <= 1'b0;
      q1[40] <= 1'b0;
      q2[40] <= 1'b0;
      q1[41] <= 1'b0;
      q2[41] <= 1'b0;
      q1[42] <= 1'b0;
      q2[42] <= 1'b0;
      q1[43] <= 1'b0;
      q2[43] <= 1'b0;
      q1[44] <= 1'b0;
      q2[44] <= 1'b0;
      q1[45] <= 1'b0;
      q2[45] <= 1'b0;
      q1[46] <= 1'b0;
      q2[46] <= 1'b0;
      q1[47] <= 1'b0;
      q2[47] <= 1'b0;
      q1[48] <= 1'b0;
      q2[48] <= 1'b0;
      q1[49] <= 1'b0;
      q2[49] <= 1'b0;
      q1[50] <= 1'b0;
      q2[50] <= 1'b0;
      q1[51] <= 1'b0;
      q2[51] <= 1'b0;
      q1[52] <= 1'b0;
      q2[52] <= 1'b0;
      q1[53] <= 1'b0;
      q2[53] <= 1'b0;
      q1[54] <= 1'b0;
      q2[54] <= 1'b0;
      q1[55] <= 1'b0;
      q2[55] <= 1'b0;
      q1[56] <= 1'b0;
      q2[56] <= 1'b0;
      q1[57] <= 1'b0;
      q2[57] <= 1'b0;
      q1[58] <= 1'b0;
      q2[58] <= 1'b0;
      q1[59] <= 1'b0;
      q2[59] <= 1'b0;
      q1[60] <= 1'b0;
      q2[60] <= 1'b0;
      q1[61] <= 1'b0;
      q2[61] <= 1'b0;
      q1[62] <= 1'b0;
      q2[62] <= 1'b0;
      q1[63] <= 1'b0;
      q2[63] <= 1'b0;
      q1[64] <= 1'b0;
      q2[64] <= 1'b0;
      q1[65] <= 1'b0;
      q2[65] <= 1'b0;
      q1[66] <= 1'b0;
      q2[66] <= 1'b0;
      q1[67] <= 1'b0;
      q2[67] <= 1'b0;
      q1[68] <= 1'b0;
      q2[68] <= 1'b0;
      q1[69] <= 1'b0;
      q2[69] <= 1'b0;
      q1[70] <= 1'b0;
      q2[70] <= 1'b0;
      q1[71] <= 1'b0;
      q2[71] <= 1'b0;
      q1[72] <= 1'b0;
      q2[72] <= 1'b0;
      q1[73] <= 1'b0;
      q2[73] <= 1'b0;
      q1[74] <= 1'b0;
      q2[74] <= 1'b0;
      q1[75] <= 1'b0;
      q2[75] <= 1'b0;
      q1[76] <= 1'b0;
      q2[76] <= 1'b0;
      q1[77] <= 1'b0;
      q2[77] <= 1'b0;
      q1[78] <= 1'b0;
      q2[78] <= 1'b0;
      q1[79] <= 1'b0;
      q2[79] <= 1'b0;
      q1[80] <= 1'b0;
      q2[80] <= 1'b0;
      q1[81] <= 1'b0;
      q2[81] <= 1'b0;
      q1[82] <= 1'b0;
      q2[82] <= 1'b0;
      q1[83] <= 1'b0;
      q2[83] <= 1'b0;
      q1[84] <= 1'b0;
      q2[84] <= 1'b0;
      q1[85] <= 1'b0;
      q2[85] <= 1'b0;
      q1[86] <= 1'b0;
      q2[86] <= 1'b0;
      q1[87] <= 1'b0;
      q2[87] <= 1'b0;
      q1[88] <= 1'b0;
      q2[88] <= 1'b0;
      q1[89] <= 1'b0;
      q2[89] <= 1'b0;
      q1[90] <= 1'b0;
      q2[90] <= 1'b0;
      q1[91] <= 1'b0;
      q2[91] <= 1'b0;
      q1[92] <= 1'b0;
      q2[92] <= 1'b0;
      q1[93] <= 1'b0;
      q2[93] <= 1'b0;
      q1[94] <= 1'b0;
      q2[94] <= 1'b0;
      q1[95] <= 1'b0;
      q2[95] <= 1'b0;
      q1[96] <= 1'b0;
      q2[96] <= 1'b0;
      q1[97] <= 1'b0;
      q2[97] <= 1'b0;
      q1[98] <= 1'b0;
      q2[98] <= 1'b0;
      q1[99] <= 1'b0;
      q2[99] <= 1'b0;
      q1[100] <= 1'b0;
      q2[100] <= 1'b0;
      q1[101] <= 1'b0;
      q2[101] <= 1'b0;
      q1[102] <= 1'b0;
      q2[102] <= 1'b0;
      q1[103] <= 1'b0;
      q2[103] <= 1'b0;
      q1[104] <= 1'b0;
      q2[104] <= 1'b0;
      q1[105] <= 1'b0;
      q2[105] <= 1'b0;
      q1[106] <= 1'b0;
      q2[106] <= 1'b0;
      q1[107] <= 1'b0;
      q2[107] <= 1'b0;
      q1[108] <= 1'b0;
      q2[108] <= 1'b0;
      q1[109] <= 1'b0;
      q2[109] <= 1'b0;
      q1[110] <= 1'b0;
      q2[110] <= 1'b0;
      q1[111] <= 1'b0;
      q2[111] <= 1'b0;
      q1[112] <= 1'b0;
      q2[112] <= 1'b0;
      q1[113] <= 1'b0;
      q2[113] <= 1'b0;
      q1[114] <= 1'b0;
      q2[114] <= 1'b0;
      q1[115] <= 1'b0;
      q2[115] <= 1'b0;
      q1[116] <= 1'b0;
      q2[116] <= 1'b0;
      q1[117] <= 1'b0;
      q2[117] <= 1'b0;
      q1[118] <= 1'b0;
      q2[118] <= 1'b0;
      q1[119] <= 1'b0;
      q2[119] <= 1'b0;
      q1[120] <= 1'b0;
      q2[120] <= 1'b0;
      q1[121] <= 1'b0;
      q2[121] <= 1'b0;
      q1[122] <= 1'b0;
      q2[122] <= 1'b0;
      q1[123] <= 1'b0;
      q2[123] <= 1'b0;
      q1[124] <= 1'b0;
      q2[124] <= 1'b0;
      q1[125] <= 1'b0;
      q2[125] <= 1'b0;
      q1[126] <= 1'b0;
      q2[126] <= 1'b0;
      q1[127] <= 1'b0;
      q2[127] <= 1'b0;
      q1[128] <= 1'b0;
      q2[128] <= 1'b0;
      q1[129] <= 1'b0;
      q2[129] <= 1'b0;
      q1[130] <= 1'b0;
      q2[130] <= 1'b0;
      q1[131] <= 1'b0;
      q2[131] <= 1'b0;
      q1[132] <= 1'b0;
      q2[132] <= 1'b0;
      q1[133] <= 1'b0;
      q2[133] <= 1'b0;
      q1[134] <= 1'b0;
      q2[134] <= 1'b0;
      q1[135] <= 1'b0;
      q2[135] <= 1'b0;
      q1[136] <= 1'b0;
      q2[136] <= 1'b0;
      q1[137] <= 1'b0;
      q2[137] <= 1'b0;
      q1[138] <= 1'b0;
      q2[138] <= 1'b0;
      q1[139] <= 1'b0;
      q2[139] <= 1'b0;
      q1[140] <= 1'b0;
      q2[140] <= 1'b0;
      q1[141] <= 1'b0;
      q2[141] <= 1'b0;
      q1[142] <= 1'b0;
      q2[142] <= 1'b0;
      q1[143] <= 1'b0;
      q2[143] <= 1'b0;
      q1[144] <= 1'b0;
      q2[144] <= 1'b0;
      q1[145] <= 1'b0;
      q2[145] <= 1'b0;
      q1[146] <= 1'b0;
      q2[146] <= 1'b0;
      q1[147] <= 1'b0;
      q2[147] <= 1'b0;
      q1[148] <= 1'b0;
      q2[148] <= 1'b0;
      q1[149] <= 1'b0;
      q2[149] <= 1'b0;
      q1[150] <= 1'b0;
      q2[150] <= 1'b0;
    end else begin
      q1[0] <= s1_1329 ^ rnd[0];
      q2[0] <= s2_1329 ^ rnd[0];
      q1[1] <= s1_1326 ^ rnd[1];
      q2[1] <= s2_1326 ^ rnd[1];
      q1[2] <= s1_1323 ^ rnd[2];
      q2[2] <= s2_1323 ^ rnd[2];
      q1[3] <= s1_1320 ^ rnd[3];
      q2[3] <= s2_1320 ^ rnd[3];
      q1[4] <= s1_1317 ^ rnd[4];
      q2[4] <= s2_1317 ^ rnd[4];
      q1[5] <= s1_1314 ^ rnd[5];
      q2[5] <= s2_1314 ^ rnd[5];
      q1[6] <= s1_1311 ^ rnd[6];
      q2[6] <= s2_1311 ^ rnd[6];
      q1[7] <= s1_1308 ^ rnd[7];
      q2[7] <= s2_1308 ^ rnd[7];
      q1[8] <= s1_1305 ^ rnd[8];
      q2[8] <= s2_1305 ^ rnd[8];
      q1[9] <= s1_1302 ^ rnd[9];
      q2[9] <= s2_1302 ^ rnd[9];
      q1[10] <= s1_330 ^ rnd[10];
      q2[10] <= s2_330 ^ rnd[10];
      q1[11] <= s1_320 ^ rnd[11];
      q2[11] <= s2_320 ^ rnd[11];
      q1[12] <= s1_310 ^ rnd[12];
      q2[12] <= s2_310 ^ rnd[12];
      q1[13] <= s1_300 ^ rnd[13];
      q2[13] <= s2_300 ^ rnd[13];
      q1[14] <= s1_1299 ^ rnd[14];
      q2[14] <= s2_1299 ^ rnd[14];
      q1[15] <= s1_335 ^ rnd[15];
      q2[15] <= s2_335 ^ rnd[15];
      q1[16] <= s1_325 ^ rnd[16];
      q2[16] <= s2_325 ^ rnd[16];
      q1[17] <= s1_315 ^ rnd[17];
      q2[17] <= s2_315 ^ rnd[17];
      q1[18] <= s1_305 ^ rnd[18];
      q2[18] <= s2_305 ^ rnd[18];
      q1[19] <= s1_1296 ^ rnd[19];
      q2[19] <= s2_1296 ^ rnd[19];
      q1[20] <= s1_1293 ^ rnd[20];
      q2[20] <= s2_1293 ^ rnd[20];
      q1[21] <= s1_1290 ^ rnd[21];
      q2[21] <= s2_1290 ^ rnd[21];
      q1[22] <= s1_1287 ^ rnd[22];
      q2[22] <= s2_1287 ^ rnd[22];
      q1[23] <= s1_1284 ^ rnd[23];
      q2[23] <= s2_1284 ^ rnd[23];
      q1[24] <= s1_1281 ^ rnd[24];
      q2[24] <= s2_1281 ^ rnd[24];
      q1[25] <= s1_1278 ^ rnd[25];
      q2[25] <= s2_1278 ^ rnd[25];
      q1[26] <= s1_1473 ^ rnd[26];
      q2[26] <= s2_1473 ^ rnd[26];
      q1[27] <= s1_1275 ^ rnd[27];
      q2[27] <= s2_1275 ^ rnd[27];
      q1[28] <= s1_1264 ^ rnd[28];
      q2[28] <= s2_1264 ^ rnd[28];
      q1[29] <= s1_1253 ^ rnd[29];
      q2[29] <= s2_1253 ^ rnd[29];
      q1[30] <= s1_1242 ^ rnd[30];
      q2[30] <= s2_1242 ^ rnd[30];
      q1[31] <= s1_1232 ^ rnd[31];
      q2[31] <= s2_1232 ^ rnd[31];
      q1[32] <= s1_1222 ^ rnd[32];
      q2[32] <= s2_1222 ^ rnd[32];
      q1[33] <= s1_1211 ^ rnd[33];
      q2[33] <= s2_1211 ^ rnd[33];
      q1[34] <= s1_1201 ^ rnd[34];
      q2[34] <= s2_1201 ^ rnd[34];
      q1[35] <= s1_1190 ^ rnd[35];
      q2[35] <= s2_1190 ^ rnd[35];
      q1[36] <= s1_1180 ^ rnd[36];
      q2[36] <= s2_1180 ^ rnd[36];
      q1[37] <= s1_1170 ^ rnd[37];
      q2[37] <= s2_1170 ^ rnd[37];
      q1[38] <= s1_1160 ^ rnd[38];
      q2[38] <= s2_1160 ^ rnd[38];
      q1[39] <= s1_1150 ^ rnd[39];
      q2[39] <= s2_1150 ^ rnd[39];
      q1[40] <= s1_1140 ^ rnd[40];
      q2[40] <= s2_1140 ^ rnd[40];
      q1[41] <= s1_1130 ^ rnd[41];
      q2[41] <= s2_1130 ^ rnd[41];
      q1[42] <= s1_1118 ^ rnd[42];
      q2[42] <= s2_1118 ^ rnd[42];
      q1[43] <= s1_1105 ^ rnd[43];
      q2[43] <= s2_1105 ^ rnd[43];
      q1[44] <= s1_1094 ^ rnd[44];
      q2[44] <= s2_1094 ^ rnd[44];
      q1[45] <= s1_1083 ^ rnd[45];
      q2[45] <= s2_1083 ^ rnd[45];
      q1[46] <= s1_1072 ^ rnd[46];
      q2[46] <= s2_1072 ^ rnd[46];
      q1[47] <= s1_1061 ^ rnd[47];
      q2[47] <= s2_1061 ^ rnd[47];
      q1[48] <= s1_1050 ^ rnd[48];
      q2[48] <= s2_1050 ^ rnd[48];
      q1[49] <= s1_1039 ^ rnd[49];
      q2[49] <= s2_1039 ^ rnd[49];
      q1[50] <= s1_1028 ^ rnd[50];
      q2[50] <= s2_1028 ^ rnd[50];
      q1[51] <= s1_1017 ^ rnd[51];
      q2[51] <= s2_1017 ^ rnd[51];
      q1[52] <= s1_1011 ^ rnd[52];
      q2[52] <= s2_1011 ^ rnd[52];
      q1[53] <= s1_1005 ^ rnd[53];
      q2[53] <= s2_1005 ^ rnd[53];
      q1[54] <= s1_999 ^ rnd[54];
      q2[54] <= s2_999 ^ rnd[54];
      q1[55] <= s1_993 ^ rnd[55];
      q2[55] <= s2_993 ^ rnd[55];
      q1[56] <= s1_987 ^ rnd[56];
      q2[56] <= s2_987 ^ rnd[56];
      q1[57] <= s1_981 ^ rnd[57];
      q2[57] <= s2_981 ^ rnd[57];
      q1[58] <= s1_1479 ^ rnd[58];
      q2[58] <= s2_1479 ^ rnd[58];
      q1[59] <= s1_960 ^ rnd[59];
      q2[59] <= s2_960 ^ rnd[59];
      q1[60] <= s1_957 ^ rnd[60];
      q2[60] <= s2_957 ^ rnd[60];
      q1[61] <= s1_954 ^ rnd[61];
      q2[61] <= s2_954 ^ rnd[61];
      q1[62] <= s1_951 ^ rnd[62];
      q2[62] <= s2_951 ^ rnd[62];
      q1[63] <= s1_948 ^ rnd[63];
      q2[63] <= s2_948 ^ rnd[63];
      q1[64] <= s1_945 ^ rnd[64];
      q2[64] <= s2_945 ^ rnd[64];
      q1[65] <= s1_942 ^ rnd[65];
      q2[65] <= s2_942 ^ rnd[65];
      q1[66] <= s1_939 ^ rnd[66];
      q2[66] <= s2_939 ^ rnd[66];
      q1[67] <= s1_936 ^ rnd[67];
      q2[67] <= s2_936 ^ rnd[67];
      q1[68] <= s1_933 ^ rnd[68];
      q2[68] <= s2_933 ^ rnd[68];
      q1[69] <= s1_930 ^ rnd[69];
      q2[69] <= s2_930 ^ rnd[69];
      q1[70] <= s1_927 ^ rnd[70];
      q2[70] <= s2_927 ^ rnd[70];
      q1[71] <= s1_923 ^ rnd[71];
      q2[71] <= s2_923 ^ rnd[71];
      q1[72] <= s1_919 ^ rnd[72];
      q2[72] <= s2_919 ^ rnd[72];
      q1[73] <= s1_915 ^ rnd[73];
      q2[73] <= s2_915 ^ rnd[73];
      q1[74] <= s1_911 ^ rnd[74];
      q2[74] <= s2_911 ^ rnd[74];
      q1[75] <= s1_907 ^ rnd[75];
      q2[75] <= s2_907 ^ rnd[75];
      q1[76] <= s1_903 ^ rnd[76];
      q2[76] <= s2_903 ^ rnd[76];
      q1[77] <= s1_899 ^ rnd[77];
      q2[77] <= s2_899 ^ rnd[77];
      q1[78] <= s1_895 ^ rnd[78];
      q2[78] <= s2_895 ^ rnd[78];
      q1[79] <= s1_891 ^ rnd[79];
      q2[79] <= s2_891 ^ rnd[79];
      q1[80] <= s1_887 ^ rnd[80];
      q2[80] <= s2_887 ^ rnd[80];
      q1[81] <= s1_883 ^ rnd[81];
      q2[81] <= s2_883 ^ rnd[81];
      q1[82] <= s1_879 ^ rnd[82];
      q2[82] <= s2_879 ^ rnd[82];
      q1[83] <= s1_875 ^ rnd[83];
      q2[83] <= s2_875 ^ rnd[83];
      q1[84] <= s1_871 ^ rnd[84];
      q2[84] <= s2_871 ^ rnd[84];
      q1[85] <= s1_867 ^ rnd[85];
      q2[85] <= s2_867 ^ rnd[85];
      q1[86] <= s1_863 ^ rnd[86];
      q2[86] <= s2_863 ^ rnd[86];
      q1[87] <= s1_859 ^ rnd[87];
      q2[87] <= s2_859 ^ rnd[87];
      q1[88] <= s1_855 ^ rnd[88];
      q2[88] <= s2_855 ^ rnd[88];
      q1[89] <= s1_851 ^ rnd[89];
      q2[89] <= s2_851 ^ rnd[89];
      q1[90] <= s1_1494 ^ rnd[90];
      q2[90] <= s2_1494 ^ rnd[90];
      q1[91] <= s1_838 ^ rnd[91];
      q2[91] <= s2_838 ^ rnd[91];
      q1[92] <= s1_834 ^ rnd[92];
      q2[92] <= s2_834 ^ rnd[92];
      q1[93] <= s1_830 ^ rnd[93];
      q2[93] <= s2_830 ^ rnd[93];
      q1[94] <= s1_827 ^ rnd[94];
      q2[94] <= s2_827 ^ rnd[94];
      q1[95] <= s1_824 ^ rnd[95];
      q2[95] <= s2_824 ^ rnd[95];
      q1[96] <= s1_821 ^ rnd[96];
      q2[96] <= s2_821 ^ rnd[96];
      q1[97] <= s1_818 ^ rnd[97];
      q2[97] <= s2_818 ^ rnd[97];
      q1[98] <= s1_815 ^ rnd[98];
      q2[98] <= s2_815 ^ rnd[98];
      q1[99] <= s1_812 ^ rnd[99];
      q2[99] <= s2_812 ^ rnd[99];
      q1[100] <= s1_809 ^ rnd[100];
      q2[100] <= s2_809 ^ rnd[100];
      q1[101] <= s1_806 ^ rnd[101];
      q2[101] <= s2_806 ^ rnd[101];
      q1[102] <= s1_803 ^ rnd[102];
      q2[102] <= s2_803 ^ rnd[102];
      q1[103] <= s1_799 ^ rnd[103];
      q2[103] <= s2_799 ^ rnd[103];
      q1[104] <= s1_795 ^ rnd[104];
      q2[104] <= s2_795 ^ rnd[104];
      q1[105] <= s1_791 ^ rnd[105];
      q2[105] <= s2_791 ^ rnd[105];
      q1[106] <= s1_787 ^ rnd[106];
      q2[106] <= s2_787 ^ rnd[106];
      q1[107] <= s1_783 ^ rnd[107];
      q2[107] <= s2_783 ^ rnd[107];
      q1[108] <= s1_779 ^ rnd[108];
      q2[108] <= s2_779 ^ rnd[108];
      q1[109] <= s1_775 ^ rnd[109];
      q2[109] <= s2_775 ^ rnd[109];
      q1[110] <= s1_771 ^ rnd[110];
      q2[110] <= s2_771 ^ rnd[110];
      q1[111] <= s1_767 ^ rnd[111];
      q2[111] <= s2_767 ^ rnd[111];
      q1[112] <= s1_763 ^ rnd[112];
      q2[112] <= s2_763 ^ rnd[112];
      q1[113] <= s1_759 ^ rnd[113];
      q2[113] <= s2_759 ^ rnd[113];
      q1[114] <= s1_755 ^ rnd[114];
      q2[114] <= s2_755 ^ rnd[114];
      q1[115] <= s1_751 ^ rnd[115];
      q2[115] <= s2_751 ^ rnd[115];
      q1[116] <= s1_747 ^ rnd[116];
      q2[116] <= s2_747 ^ rnd[116];
      q1[117] <= s1_743 ^ rnd[117];
      q2[117] <= s2_743 ^ rnd[117];
      q1[118] <= s1_739 ^ rnd[118];
      q2[118] <= s2_739 ^ rnd[118];
      q1[119] <= s1_735 ^ rnd[119];
      q2[119] <= s2_735 ^ rnd[119];
      q1[120] <= s1_731 ^ rnd[120];
      q2[120] <= s2_731 ^ rnd[120];
      q1[121] <= s1_727 ^ rnd[121];
      q2[121] <= s2_727 ^ rnd[121];
      q1[122] <= s1_1508 ^ rnd[122];
      q2[122] <= s2_1508 ^ rnd[122];
      q1[123] <= s1_718 ^ rnd[123];
      q2[123] <= s2_718 ^ rnd[123];
      q1[124] <= s1_715 ^ rnd[124];
      q2[124] <= s2_715 ^ rnd[124];
      q1[125] <= s1_711 ^ rnd[125];
      q2[125] <= s2_711 ^ rnd[125];
      q1[126] <= s1_706 ^ rnd[126];
      q2[126] <= s2_706 ^ rnd[126];
      q1[127] <= s1_1511 ^ rnd[127];
      q2[127] <= s2_1511 ^ rnd[127];
      q1[128] <= s1_691 ^ rnd[128];
      q2[128] <= s2_691 ^ rnd[128];
      q1[129] <= s1_685 ^ rnd[129];
      q2[129] <= s2_685 ^ rnd[129];
      q1[130] <= s1_1516 ^ rnd[130];
      q2[130] <= s2_1516 ^ rnd[130];
      q1[131] <= s1_1575 ^ rnd[131];
      q2[131] <= s2_1575 ^ rnd[131];
      q1[132] <= s1_1422 ^ rnd[132];
      q2[132] <= s2_1422 ^ rnd[132];
      q1[133] <= s1_1397 ^ rnd[133];
      q2[133] <= s2_1397 ^ rnd[133];
      q1[134] <= s1_1388 ^ rnd[134];
      q2[134] <= s2_1388 ^ rnd[134];
      q1[135] <= s1_1376 ^ rnd[135];
      q2[135] <= s2_1376 ^ rnd[135];
      q1[136] <= s1_1365 ^ rnd[136];
      q2[136] <= s2_1365 ^ rnd[136];
      q1[137] <= s1_1408 ^ rnd[137];
      q2[137] <= s2_1408 ^ rnd[137];
      q1[138] <= s1_1402 ^ rnd[138];
      q2[138] <= s2_1402 ^ rnd[138];
      q1[139] <= s1_1411 ^ rnd[139];
      q2[139] <= s2_1411 ^ rnd[139];
      q1[140] <= s1_1439 ^ rnd[140];
      q2[140] <= s2_1439 ^ rnd[140];
      q1[141] <= s1_1445 ^ rnd[141];
      q2[141] <= s2_1445 ^ rnd[141];
      q1[142] <= s1_1448 ^ rnd[142];
      q2[142] <= s2_1448 ^ rnd[142];
      q1[143] <= s1_1458 ^ rnd[143];
      q2[143] <= s2_1458 ^ rnd[143];
      q1[144] <= s1_1467 ^ rnd[144];
      q2[144] <= s2_1467 ^ rnd[144];
      q1[145] <= s1_1470 ^ rnd[145];
      q2[145] <= s2_1470 ^ rnd[145];
      q1[146] <= s1_1344 ^ rnd[146];
      q2[146] <= s2_1344 ^ rnd[146];
      q1[147] <= s1_1341 ^ rnd[147];
      q2[147] <= s2_1341 ^ rnd[147];
      q1[148] <= s1_1338 ^ rnd[148];
      q2[148] <= s2_1338 ^ rnd[148];
      q1[149] <= s1_1335 ^ rnd[149];
      q2[149] <= s2_1335 ^ rnd[149];
      q1[150] <= s1_1332 ^ rnd[150];
      q2[150] <= s2_1332 ^ rnd[150];
    end
  end

endmodule
