00010137
00004297
07c28293
00007317
87c30313
0062f863
0002a023
00428293
ff5ff06f
210000ef
770000ef
0000006f
000077b7
8757c703
04100793
00f70463
00008067
00052783
00007737
87c72703
00978793
40e787b3
00f52023
00008067
000077b7
8847a603
00060863
00062703
00e52023
8847a603
000077b7
87c7a583
00c60613
00a00513
4900006f
ff010113
01212023
00007937
88492783
00812423
00052403
0007a703
0047af03
0087ae83
0107ae03
0147a303
0187a883
01c7a803
0247a583
0287a603
02c7a683
00912223
00112623
00050493
0207a503
00e42023
0004a703
00500793
02a42023
01e42223
01d42423
01c42823
00642a23
01142c23
01042e23
02b42223
02c42423
02d42623
00f4a623
00f42623
00e42023
00040513
f41ff0ef
00442783
08078063
0004a783
00c12083
00812403
0007af83
0047af03
0087ae83
00c7ae03
0107a303
0147a883
0187a803
01c7a583
0207a603
0247a683
0287a703
02c7a783
01f4a023
01e4a223
01d4a423
01c4a623
0064a823
0114aa23
0104ac23
00b4ae23
02c4a023
02d4a223
02e4a423
02f4a623
00012903
00412483
01010113
00008067
0084a503
00600793
00f42623
00840593
478000ef
88492783
00c42503
00c40613
0007a783
00c12083
00412483
00f42023
00812403
00012903
00a00593
01010113
3300006f
000077b7
8757c783
00007737
87872683
fbf78793
0017b793
00d7e7b3
86f72c23
000077b7
04200713
86e78a23
00008067
000077b7
04100713
86e78aa3
000077b7
8607ac23
00008067
f6010113
08112e23
08812c23
09412423
09512223
07b12623
08912a23
09212823
09312623
09612023
07712e23
07812c23
07912a23
07a12823
0a010413
fc010113
00f10713
fc010113
00f10793
ff07f793
ff077713
000076b7
00e7a023
88e6a023
00200713
00e7a423
000045b7
02800713
00e7a623
01078513
0007a223
00058593
00007db7
88fda223
458000ef
000045b7
02058593
f8040513
448000ef
000047b7
14878793
00a00713
64e7ae23
000077b7
8607a623
1f400793
f6f42623
00004ab7
00007a37
80000737
01072783
00007737
86f72423
f6c42703
12e05463
00170c93
00100913
00004c37
000074b7
00100b93
00700b13
ef5ff0ef
ec1ff0ef
000047b7
04078593
fa040513
3d8000ef
fa040593
f8040513
f7742e23
274000ef
00007737
00153793
f7840613
00300593
00200513
86f72c23
f7642c23
1ac000ef
f7842683
000047b7
14878593
00300613
00300793
080c0513
f6f42a23
19c000ef
884da503
cf9ff0ef
8744c703
04000793
14e7f663
04100d13
00300993
0140006f
8744c703
001d0793
0ff7fd13
05a76463
04300593
000d0513
1d4000ef
f7c42703
fee510e3
f7c40593
00000513
254000ef
060a8593
fa040513
32c000ef
8744c703
001d0793
872a2e23
0ff7fd13
00090993
fda770e3
00199513
01350533
f7842583
00190913
5e0000ef
00050793
f7440513
f6f42a23
c0dff0ef
f19910e3
000077b7
8687a783
80000737
01072683
40f684b3
000077b7
86d7a223
000077b7
8697a023
0a905263
00100793
00007737
86f72623
f6c42903
00048513
00090593
588000ef
00591793
412787b3
00050713
00679513
40f50533
00351513
01250533
000077b7
00048593
00651513
84e7ae23
558000ef
000077b7
84a7ac23
f6040113
09c12083
09812403
09412483
09012903
08c12983
08812a03
08412a83
08012b03
07c12b83
07812c03
07412c83
07012d03
06c12d83
00000513
0a010113
00008067
00900513
f1dff06f
f6c42683
000077b7
86c7a703
00269793
00d787b3
00179793
f6f42623
de0704e3
f4dff06f
00250513
00b505b3
00b62023
00008067
00560713
00171793
00e787b3
00379793
00e787b3
00379793
00261613
00271813
01050533
00f60833
00d52023
00d52223
06e52c23
010586b3
0106a803
00e6aa23
00e6ac23
00180713
00e6a823
00052703
00c585b3
00f585b3
000017b7
00b787b3
fae7aa23
000077b7
00500713
86e7ae23
00008067
0ff57513
0ff5f593
00b50663
00000513
00008067
000077b7
86a78aa3
00100513
00008067
ff010113
00812423
00912223
00112623
00050413
00058493
0034c583
00244503
fbdff0ef
fe051ae3
00048593
00040513
140000ef
00000793
00a05a63
000077b7
00a00713
86e7ae23
00100793
00c12083
00812403
00412483
00078513
01010113
00008067
ffe50513
00153513
00008067
ff010113
00812423
00912223
00112623
00050413
00058493
fddff0ef
00300793
00050463
00040793
00f4a023
00200793
04f40a63
0287e863
00040a63
000077b7
87c7a703
06400793
04e7dc63
00c12083
00812403
0004a023
00412483
01010113
00008067
00400713
00e41463
00f4a023
00c12083
00812403
00412483
01010113
00008067
00c12083
00812403
00100793
00f4a023
00412483
01010113
00008067
00c12083
00812403
00300793
00f4a023
00412483
01010113
00008067
fe010113
00b12223
00c12423
00d12623
00e12823
00f12a23
01012c23
01112e23
02010113
00008067
00050793
0005c703
00178793
00158593
fee78fa3
fe0718e3
00008067
00054783
00079a63
0340006f
00054783
02078063
00068593
0005c703
00150513
00158693
fef704e3
40e78533
00008067
0015c703
40e78533
00008067
0005c703
fe9ff06f
02060063
00c50633
00050793
0005c703
00178793
00158593
fee78fa3
fef618e3
00008067
000077b7
87c7a603
000077b7
8787a703
ffb60613
00100793
00c03633
00f70463
00266613
000077b7
8757c703
04100793
00f70463
00466613
000077b7
8747c703
04200793
00f70463
00866613
000047b7
0a07a703
00700793
00f70463
01066613
000047b7
7a47a703
1fe00793
00f70463
02066613
000077b7
8847a783
0047a703
00070463
04066613
0087a683
00200713
00e68463
08066613
00c7a683
01100713
00e68463
10066613
0107c683
01078793
02068663
00004737
04400593
00070713
0100006f
0007c683
00074583
0c068463
00178793
00170713
fed586e3
20066613
000077b7
8807a783
0047a703
00070463
40066613
0087a683
00100713
00e68863
00001737
80070713
00e66633
00c7a683
01200713
00e68663
00001737
00e66633
0107c683
01078793
02068663
00004737
04400593
00070713
0100006f
0007c683
00074583
04068c63
00178793
00170713
fed586e3
000027b7
00f66633
000045b7
fec5a823
000077b7
8607a703
000046b7
00004637
fee6aa23
1f400513
00006737
000047b7
fea62c23
00d70713
fee7ae23
00008067
f40586e3
f45ff06f
fc0580e3
fb5ff06f
00050793
00000513
02058063
0015f713
0015d593
00070463
00f50533
00179793
fe0596e3
00008067
00008067
00050613
04058263
00000513
01f00713
00000793
00100893
fff00813
00e656b3
0016f693
00179793
00f6e7b3
00e896b3
fff70713
00b7e663
40b787b3
00d56533
fd071ee3
00008067
fff00513
00008067
00050693
02058a63
01f00793
00000513
fff00613
00f6d733
00151513
00177713
00a76533
fff78793
00b56463
40b50533
fec792e3
00008067
00008067
00050e93
00050893
00058613
06054663
0605c063
fff00513
06058a63
00000813
01f00713
00000793
00100e13
fff00313
00e8d6b3
0016f693
00179793
00f6e7b3
00ee16b3
fff70713
00c7e663
40c787b3
00d86833
fc671ee3
00beceb3
00080513
000ec463
00008067
41000533
00008067
40b00633
fa9ff06f
40a008b3
fe05cae3
00100513
f8059ce3
00008067
00008067
00050893
00050813
00058613
04054663
0405c063
04058e63
01f00713
00000793
fff00593
00e856b3
00179793
0016f693
00f6e7b3
fff70713
00c7e463
40c787b3
feb712e3
0208c263
00078513
00008067
40b00633
fc5ff06f
40a00833
fe05cae3
fa059ce3
00080793
40f00533
00008067
00008067
