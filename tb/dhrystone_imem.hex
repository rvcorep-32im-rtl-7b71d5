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
740000ef
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
46c0006f
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
448000ef
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
30c0006f
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
428000ef
000045b7
02058593
f8040513
418000ef
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
12e05263
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
3a8000ef
fa040593
f8040513
f7742e23
244000ef
00007737
00153793
f7840613
00300593
00200513
86f72c23
f7642c23
188000ef
f7842683
000047b7
14878593
00300613
00300793
080c0513
f6f42a23
178000ef
884da503
cf9ff0ef
8744c703
04000793
12e7f463
04100d13
00300993
0140006f
8744c703
001d0793
0ff7fd13
05a76463
04300593
000d0513
1a4000ef
f7c42703
fee510e3
f7c40593
00000513
224000ef
060a8593
fa040513
2fc000ef
8744c703
001d0793
872a2e23
0ff7fd13
00090993
fda770e3
00199793
013787b3
f7842703
f7440513
00190913
02e7c7b3
f6f42a23
c11ff0ef
f12c92e3
000077b7
8687a783
80000737
01072683
00007737
40f687b3
86d72223
00007737
86f72023
08f05263
00100713
000076b7
86e6a623
f6c42603
000f4737
24070713
02e606b3
00000513
02c7c733
02f6c7b3
000076b7
84e6ae23
00007737
84f72c23
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
0a010113
00008067
00900793
f41ff06f
f6c42603
00007737
86c72683
00261713
00c70733
00171713
f6e42623
e00686e3
f6dff06f
00250513
00b505b3
00b62023
00008067
00560713
0c800813
03070833
00261613
00271793
00f50533
00d52023
06e52c23
00d52223
00c807b3
00f587b3
0107a683
00e7aa23
00e7ac23
00168713
00e7a823
00052703
010585b3
00c585b3
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
